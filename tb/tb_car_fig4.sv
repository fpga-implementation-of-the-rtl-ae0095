// tb_car_fig4: the impulse-response and maximum-length-sequence (MLS)
// evaluation of the first 20 filter sections, run on the full default
// cochlea (1224 sections, Greenwood-map coefficients) and compared with a
// floating-point model of the same cascade, in the manner of a software
// versus fixed-point hardware comparison.
//   Phase 1: a unit impulse (16-bit value 16000), then 99 zero samples.
//   Phase 2: after the states have decayed, two periods of a 127-sample MLS
//            (7-bit LFSR, taps x^7 + x^6 + 1) of amplitude +-4000.
// For each of the 20 taps the peak error of the hardware against the
// floating-point model must stay below 1 % of that tap's peak output
// (both phases), and in phase 1 the impulse response must have decayed
// below 1 % of its peak by the 100th sample.  The floating-point model uses
// the quantised coefficient values, so the error measured is that of the
// 24-bit datapath with rounding.  From the impulse responses the gain of
// each tap is computed by DFT: the DC gain must be within 0.2 dB of 0 dB,
// and the hardware gain within 0.1 dB of the floating-point gain wherever
// the latter is above -40 dB (40 log-spaced frequencies, 50 Hz to 24 kHz).
module tb_car_fig4;
  import car_pkg::*;
  import car_ref_pkg::*;

  localparam int NARR = 12;
  localparam int NSEC = 102;
  localparam int NTOT = NARR * NSEC;
  localparam int AW   = $clog2(NSEC);
  localparam int ARW  = $clog2(NARR);
  localparam int NCH  = 20;
  localparam int NIMP = 100;
  localparam int NGAP = 300;
  localparam int NMLS = 254;

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

  initial begin
    repeat ((NIMP + NGAP + NMLS) * 2960 + 20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ref_coef_t kc [NCH];
  real fw1 [NCH];
  real fw2 [NCH];
  real fy  [NCH];
  real peak [2][NCH];
  real maxerr [2][NCH];
  real tail [NCH];
  real hw_ir [NCH][NIMP];
  real fl_ir [NCH][NIMP];
  localparam real IMP_AMP = 16000.0 * 16.0;
  localparam real PI = 3.14159265358979;

  // Gain |H(f)| of a 100-sample impulse response, by direct DFT.
  function automatic real gain_db(input real ir [NIMP], input real f);
    real re, im, w, m;
    re = 0.0; im = 0.0;
    w = 2.0 * PI * f / 48000.0;
    for (int n = 0; n < NIMP; n++) begin
      re += ir[n] * $cos(w * real'(n));
      im -= ir[n] * $sin(w * real'(n));
    end
    m = $sqrt(re * re + im * im) / IMP_AMP;
    if (m < 1.0e-12) m = 1.0e-12;
    return 20.0 * $log10(m);
  endfunction

  task automatic float_step(input real x);
    real xs, w1n, w2n, a, c, g, h;
    xs = x;
    for (int s = 0; s < NCH; s++) begin
      a = real'(kc[s].a) / 65536.0; c = real'(kc[s].c) / 65536.0;
      g = real'(kc[s].g) / 65536.0; h = real'(kc[s].h) / 65536.0;
      w1n = xs + a * fw1[s] - c * fw2[s];
      w2n = c * fw1[s] + a * fw2[s];
      fy[s] = g * (xs + h * w2n);
      fw1[s] = w1n; fw2[s] = w2n;
      xs = fy[s];
    end
  endtask

  // One sample period: present the sample, wait for array 0 to finish and
  // compare its first NCH taps with the floating-point model.
  task automatic run_sample(input sample_t sv, input int phase, input int n);
    real e, v;
    @(negedge clk);
    sound_in = sv;
    clk_48k = 1'b1;
    float_step(real'(from_sample(sv)));
    @(posedge clk iff done_sample[0]);
    @(negedge clk);
    clk_48k = 1'b0;
    for (int s = 0; s < NCH; s++) begin
      v = real'(taps[0][s]);
      e = v - fy[s];
      if (e < 0.0) e = -e;
      if (v < 0.0) v = -v;
      if (phase >= 0) begin
        if (v > peak[phase][s]) peak[phase][s] = v;
        if (e > maxerr[phase][s]) maxerr[phase][s] = e;
      end
      if (phase == 0 && n == NIMP - 1) tail[s] = v;
      if (phase == 0) begin
        hw_ir[s][n] = real'(taps[0][s]);
        fl_ir[s][n] = fy[s];
      end
    end
  endtask

  initial begin
    ref_coef_t k;
    logic [6:0] lfsr;
    for (int s = 0; s < NCH; s++) begin
      fw1[s] = 0.0; fw2[s] = 0.0;
      peak[0][s] = 0.0; peak[1][s] = 0.0; maxerr[0][s] = 0.0; maxerr[1][s] = 0.0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int gi = 0; gi < NTOT; gi++) begin
      k = greenwood_coefs(gi, NTOT, 0.12);
      if (gi < NCH) kc[gi] = k;
      @(negedge clk);
      coef_we = 1'b1;
      coef_arr = ARW'(gi / NSEC);
      coef_sec = AW'(gi % NSEC);
      coef_wdata = '{a: coef_t'(k.a), c: coef_t'(k.c), g: coef_t'(k.g), h: coef_t'(k.h)};
    end
    @(negedge clk) coef_we = 1'b0;
    wait (ready);
    // Phase 1: impulse response.
    for (int n = 0; n < NIMP; n++)
      run_sample((n == 0) ? sample_t'(16'sd16000) : sample_t'(0), 0, n);
    // Let both models decay.
    for (int n = 0; n < NGAP; n++) run_sample(sample_t'(0), -1, n);
    // Phase 2: MLS.
    lfsr = 7'h7f;
    for (int n = 0; n < NMLS; n++) begin
      run_sample(lfsr[0] ? sample_t'(16'sd4000) : -sample_t'(16'sd4000), 1, n);
      lfsr = {lfsr[5:0], lfsr[6] ^ lfsr[5]};
    end
    for (int s = 0; s < NCH; s++) begin
      for (int ph = 0; ph < 2; ph++) begin
        checks++;
        if (peak[ph][s] < 1000.0 || maxerr[ph][s] > 0.01 * peak[ph][s]) begin
          failures++;
          $display("phase %0d tap %0d: peak %0.1f, max error %0.1f", ph, s,
                   peak[ph][s], maxerr[ph][s]);
        end
      end
      checks++;
      if (tail[s] > 0.01 * peak[0][s]) begin
        failures++;
        $display("tap %0d: impulse response not decayed (%0.1f of peak %0.1f)", s,
                 tail[s], peak[0][s]);
      end
    end
    // Frequency response from the impulse responses: DC gain near 0 dB, and
    // hardware within 0.1 dB of floating point wherever the gain is above
    // -40 dB, at 40 log-spaced frequencies from 50 Hz to 24 kHz.
    begin
      real worst, pk_db, pk_f;
      worst = 0.0;
      for (int s = 0; s < NCH; s++) begin
        real dc;
        dc = gain_db(hw_ir[s], 0.0);
        checks++;
        if (dc > 0.2 || dc < -0.2) begin
          failures++;
          $display("tap %0d: DC gain %0.3f dB", s, dc);
        end
        pk_db = -1000.0; pk_f = 0.0;
        for (int i = 0; i < 40; i++) begin
          real f, gh, gf, d;
          f = 50.0 * $pow(480.0, real'(i) / 39.0);
          gh = gain_db(hw_ir[s], f);
          gf = gain_db(fl_ir[s], f);
          d = (gh > gf) ? gh - gf : gf - gh;
          if (gh > pk_db) begin pk_db = gh; pk_f = f; end
          if (gf > -40.0) begin
            checks++;
            if (d > worst) worst = d;
            if (d > 0.1) begin
              failures++;
              $display("tap %0d at %0.0f Hz: %0.3f dB vs %0.3f dB", s, f, gh, gf);
            end
          end
        end
        if (s == 0 || s == NCH - 1)
          $display("tap %0d: DC %0.3f dB, peak %0.2f dB near %0.0f Hz", s, dc, pk_db, pk_f);
      end
      $display("largest hardware/floating-point gain difference: %0.5f dB", worst);
    end
    $display("tap 0: impulse peak %0.0f err %0.1f, MLS peak %0.0f err %0.1f",
             peak[0][0], maxerr[0][0], peak[1][0], maxerr[1][0]);
    $display("tap %0d: impulse peak %0.0f err %0.1f, MLS peak %0.0f err %0.1f", NCH - 1,
             peak[0][NCH-1], maxerr[0][NCH-1], peak[1][NCH-1], maxerr[1][NCH-1]);
    checks++;
    if (overrun != '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
