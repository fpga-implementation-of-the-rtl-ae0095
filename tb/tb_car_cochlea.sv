// tb_car_cochlea: end-to-end test of the whole cochlea at its default size
// (12 arrays x 102 sections = 1224 sections, 29-cycle slots, 142 MHz against
// a 48 kHz sample clock of 2958/2958/2959-cycle periods).  All 1224 sections
// get Greenwood-map coefficients through the upload port; the input is an
// impulse followed by random samples.  After every sample period all 1224
// taps are compared with a 64-bit reference of the plain 1224-section
// cascade, delayed by one period per array: tap s of array k at period n must
// equal the reference output of section k*102+s for input sample n-k.  The
// run counts each mechanism of the design and fails if one never happened:
// coefficient upload, state clearing after reset (102 cycles, then the first sample matches a zero-state cascade), time-multiplexed section
// steps, done_sample, hand-over of a non-zero signal from one array to the
// next, the 12-period latency to the final section, and a dropped early
// sample edge (overrun).
module tb_car_cochlea;
  import car_pkg::*;
  import car_ref_pkg::*;

  localparam int NARR  = 12;
  localparam int NSEC  = 102;
  localparam int SC    = 29;
  localparam int NTOT  = NARR * NSEC;
  localparam int AW    = $clog2(NSEC);
  localparam int ARW   = $clog2(NARR);
  localparam int NSAMP = 16;

  logic            clk = 1'b0;
  logic            rst_n = 1'b0;
  logic            clk_48k = 1'b0;
  sample_t         sound_in = '0;
  logic            coef_we = 1'b0;
  logic [ARW-1:0]  coef_arr = '0;
  logic [AW-1:0]   coef_sec = '0;
  coefs_t          coef_wdata = '0;
  data_t           taps [NARR][NSEC];
  logic [NARR-1:0] tap_valid;
  logic [AW-1:0]   tap_sec [NARR];
  data_t           tap_y [NARR];
  data_t           y_out;
  logic [NARR-1:0] done_sample;
  logic [NARR-1:0] busy;
  logic            ready;
  logic [NARR-1:0] overrun;

  car_cochlea dut (.*);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  // Mechanism counters.
  int n_upload = 0;
  int n_clear = 0;
  int n_steps = 0;
  int n_done = 0;
  int n_handover = 0;
  int n_overrun = 0;
  int latency_periods = -1;

  ref_coef_t kc [NTOT];
  longint w1 [NTOT];
  longint w2 [NTOT];
  longint yref [NSAMP][NTOT];

  initial begin
    repeat (NSAMP * 3000 + 20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int clear_cycles = 0;
  always @(posedge clk) begin
    if (rst_n && !ready) clear_cycles++;
    if (rst_n) begin
      for (int k = 0; k < NARR; k++) if (tap_valid[k]) n_steps++;
    end
  end

  task automatic ref_sample(input int n, input longint xv);
    ref_out_t o;
    longint xs;
    xs = xv;
    for (int g = 0; g < NTOT; g++) begin
      o = rstep(xs, w1[g], w2[g], kc[g].a, kc[g].c, kc[g].g, kc[g].h);
      w1[g] = o.w1; w2[g] = o.w2; yref[n][g] = o.y;
      xs = o.y;
    end
  endtask

  task automatic sample_edge(input sample_t sv, input int period);
    @(negedge clk);
    sound_in = sv;
    clk_48k = 1'b1;
    repeat (period / 2) @(negedge clk);
    clk_48k = 1'b0;
    repeat (period - period / 2 - 1) @(negedge clk);
  endtask

  initial begin
    sample_t xs [NSAMP];
    for (int g = 0; g < NTOT; g++) begin
      kc[g] = greenwood_coefs(g, NTOT, 0.12);
      w1[g] = 0; w2[g] = 0;
    end
    for (int n = 0; n < NSAMP; n++) begin
      xs[n] = (n == 0) ? sample_t'(16'sd24000) : sample_t'($urandom_range(0, 8000)) - sample_t'(4000);
      ref_sample(n, longint'(from_sample(xs[n])));
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Upload all coefficients.
    for (int g = 0; g < NTOT; g++) begin
      @(negedge clk);
      coef_we = 1'b1;
      coef_arr = ARW'(g / NSEC);
      coef_sec = AW'(g % NSEC);
      coef_wdata = '{a: coef_t'(kc[g].a), c: coef_t'(kc[g].c),
                     g: coef_t'(kc[g].g), h: coef_t'(kc[g].h)};
      n_upload++;
    end
    @(negedge clk) coef_we = 1'b0;
    wait (ready);
    @(negedge clk);
    // States cleared: the first sample is checked below against a cascade
    // that starts from zero states; here only the clearing time is checked.
    checks++;
    if (clear_cycles != NSEC) begin
      failures++;
      $display("ready after %0d cycles, expected %0d", clear_cycles, NSEC);
    end else n_clear++;
    fork
      for (int n = 0; n < NSAMP; n++)
        sample_edge(xs[n], (n % 3 == 2) ? 2959 : 2958);
      for (int n = 0; n < NSAMP; n++) begin
        int bad;
        @(posedge clk iff done_sample[0]);
        @(negedge clk);
        n_done++;
        bad = 0;
        for (int k = 0; k < NARR; k++) begin
          for (int s = 0; s < NSEC; s++) begin
            longint e;
            e = (n >= k) ? yref[n-k][k*NSEC+s] : 0;
            checks++;
            if (longint'(taps[k][s]) != e) begin
              failures++;
              bad++;
              if (bad < 5)
                $display("period %0d array %0d tap %0d: %0d expected %0d", n, k, s,
                         taps[k][s], e);
            end
          end
          if (k > 0 && taps[k][0] != '0) n_handover++;
        end
        if (latency_periods < 0 && y_out != '0) latency_periods = n + 1;
      end
    join
    checks++;
    if (overrun != '0) begin
      failures++;
      $display("overrun at the real sample rate");
    end
    // An early sample clock edge is dropped by every array.
    sample_edge(sample_t'(16'sd1), 1000);
    sample_edge(sample_t'(16'sd2), 3000);
    checks++;
    if (&overrun) n_overrun++;
    else begin
      failures++;
      $display("early edge not flagged: %b", overrun);
    end

    $display("mechanisms: upload=%0d clear=%0d section_steps=%0d done_sample=%0d handover=%0d latency_periods=%0d overrun=%0d",
             n_upload, n_clear, n_steps, n_done, n_handover, latency_periods, n_overrun);
    checks++;
    if (n_upload != NTOT || n_clear != 1 || n_done != NSAMP || n_handover == 0 ||
        n_overrun == 0 || n_steps < NSAMP * NTOT) begin
      failures++;
      $display("a mechanism did not happen as expected");
    end
    checks++;
    if (latency_periods != NARR) begin
      failures++;
      $display("final section first answered after %0d periods, expected %0d",
               latency_periods, NARR);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
