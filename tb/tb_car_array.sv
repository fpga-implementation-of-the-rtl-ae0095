// tb_car_array: one CAR array at its default size (102 sections, 29-cycle
// slots) with real Greenwood-map coefficients, uploaded through the write
// port.  A 48 kHz sample clock is modelled as periods of 2958/2958/2959
// system clocks (142 MHz / 48 kHz = 2958.33).  The input is an impulse
// followed by random samples; after every sample all 102 taps, the streamed
// outputs and y_last are compared with the 64-bit reference cascade.  Also
// checked: done_sample comes 2 + 102*29 cycles after the system clock first
// sees the sample clock high (two synchroniser cycles, then 2958), no sample
// is lost at the real 48 kHz rate, and a sample clock edge that comes too
// early is dropped with overrun raised.
module tb_car_array;
  import car_pkg::*;
  import car_ref_pkg::*;

  localparam int unsigned NSEC = 102;
  localparam int unsigned SC   = 29;
  localparam int unsigned AW   = $clog2(NSEC);
  localparam int NSAMP = 12;

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          clk_48k = 1'b0;
  data_t         x_in = '0;
  logic          coef_we = 1'b0;
  logic [AW-1:0] coef_waddr = '0;
  coefs_t        coef_wdata = '0;
  data_t         taps [NSEC];
  logic          tap_valid;
  logic [AW-1:0] tap_sec;
  data_t         tap_y;
  data_t         y_last;
  logic          done_sample;
  logic          busy;
  logic          ready;
  logic          overrun;

  car_array #(.NSEC(NSEC), .SECTION_CYCLES(SC)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  ref_coef_t kc [NSEC];
  longint w1 [NSEC];
  longint w2 [NSEC];
  longint ey [NSEC];
  longint ey_all [NSAMP][NSEC];
  longint rise_all [NSAMP];
  int n_done = 0;
  int n_taps = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference cascade for one input sample.
  task automatic ref_sample(input longint xv);
    ref_out_t o;
    longint xs;
    xs = xv;
    for (int s = 0; s < int'(NSEC); s++) begin
      o = rstep(xs, w1[s], w2[s], kc[s].a, kc[s].c, kc[s].g, kc[s].h);
      w1[s] = o.w1; w2[s] = o.w2; ey[s] = o.y;
      xs = o.y;
    end
  endtask

  // Streamed taps must match the expected outputs in order.
  int tap_idx = 0;
  always @(posedge clk) begin
    if (rst_n && tap_valid) begin
      n_taps++;
      checks++;
      if (int'(tap_sec) != tap_idx || longint'(tap_y) != ey[tap_idx]) begin
        failures++;
        $display("stream tap %0d (exp %0d): %0d, expected %0d", tap_sec, tap_idx,
                 tap_y, ey[tap_idx]);
      end
      tap_idx++;
    end
    if (rst_n && done_sample) n_done++;
  end

  task automatic sample(input int n, input sample_t sv, input int period);
    @(negedge clk);
    x_in = from_sample(sv);
    clk_48k = 1'b1;
    rise_all[n] = cycle;
    tap_idx = 0;
    ref_sample(longint'(from_sample(sv)));
    for (int s = 0; s < int'(NSEC); s++) ey_all[n][s] = ey[s];
    repeat (period / 2) @(negedge clk);
    clk_48k = 1'b0;
    repeat (period - period / 2 - 1) @(negedge clk);
  endtask

  initial begin
    longint dcyc;
    for (int s = 0; s < int'(NSEC); s++) begin
      kc[s] = greenwood_coefs(s, NSEC, 0.12);
      w1[s] = 0; w2[s] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Upload the coefficients, last section first.
    for (int s = NSEC - 1; s >= 0; s--) begin
      @(negedge clk);
      coef_we = 1'b1;
      coef_waddr = AW'(s);
      coef_wdata = '{a: coef_t'(kc[s].a), c: coef_t'(kc[s].c),
                     g: coef_t'(kc[s].g), h: coef_t'(kc[s].h)};
    end
    @(negedge clk) coef_we = 1'b0;
    wait (ready);
    fork
      begin
        for (int n = 0; n < NSAMP; n++) begin
          sample_t sv;
          sv = (n == 0) ? sample_t'(16'sd20000) : sample_t'($urandom);
          sample(n, sv, (n % 3 == 2) ? 2959 : 2958);
        end
      end
      begin
        for (int n = 0; n < NSAMP; n++) begin
          @(posedge clk iff done_sample);
          dcyc = cycle - rise_all[n];
          @(negedge clk);
          checks++;
          if (dcyc != longint'(2 + NSEC * SC)) begin
            failures++;
            $display("sample %0d: done_sample %0d cycles after the clock edge", n, dcyc);
          end
          for (int s = 0; s < int'(NSEC); s++) begin
            checks++;
            if (longint'(taps[s]) != ey_all[n][s]) begin
              failures++;
              if (failures < 10)
                $display("sample %0d tap %0d: %0d expected %0d", n, s, taps[s], ey_all[n][s]);
            end
          end
          checks++;
          if (longint'(y_last) != ey_all[n][NSEC-1]) failures++;
        end
      end
    join
    checks++;
    if (overrun || n_done != NSAMP || n_taps != NSAMP * int'(NSEC)) begin
      failures++;
      $display("overrun %0b, %0d samples, %0d taps", overrun, n_done, n_taps);
    end
    // Sample clock edge after only 1000 cycles: dropped, overrun raised.
    @(negedge clk) clk_48k = 1'b1;
    x_in = from_sample(sample_t'(16'sd100));
    tap_idx = 0;
    ref_sample(longint'(from_sample(sample_t'(16'sd100))));
    repeat (500) @(negedge clk);
    clk_48k = 1'b0;
    repeat (500) @(negedge clk);
    clk_48k = 1'b1;
    repeat (500) @(negedge clk);
    clk_48k = 1'b0;
    repeat (3000) @(negedge clk);
    checks++;
    if (!overrun || n_done != NSAMP + 1) begin
      failures++;
      $display("early edge: overrun %0b, %0d samples", overrun, n_done);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
