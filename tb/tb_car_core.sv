// tb_car_core: drives the CAR core with random operands (including
// full-scale ones that saturate) and with Greenwood-map coefficients, and
// compares Y, W1' and W2' with the 64-bit reference model.  It also checks
// that done arrives exactly 6 cycles after start, once per start.
module tb_car_core;
  import car_pkg::*;
  import car_ref_pkg::*;

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  logic   start = 1'b0;
  data_t  x;
  state_t st;
  coefs_t k;
  logic   done;
  data_t  y;
  state_t st_new;

  int checks = 0;
  int failures = 0;

  car_core dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rnd_data(input int mode);
    case (mode)
      0: return longint'($signed($urandom_range(0, 2047))) - 1024;
      1: return longint'($signed(24'($urandom))) ;
      default: return ($urandom_range(0, 1) == 1) ? DMAX : DMIN;
    endcase
  endfunction

  task automatic run_one(input longint xv, input longint w1v, input longint w2v,
                         input longint av, input longint cv, input longint gv,
                         input longint hv);
    ref_out_t e;
    int lat;
    x  = data_t'(xv);
    st = '{w1: data_t'(w1v), w2: data_t'(w2v)};
    k  = '{a: coef_t'(av), c: coef_t'(cv), g: coef_t'(gv), h: coef_t'(hv)};
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    // Scramble the inputs: the core must use the latched copies.
    x  = data_t'($urandom);
    st = state_t'({$urandom, $urandom});
    lat = 1;
    while (!done && lat < 50) begin
      @(negedge clk);
      lat++;
    end
    e = rstep(xv, w1v, w2v, av, cv, gv, hv);
    checks++;
    if (lat != CORE_LATENCY) begin
      failures++;
      $display("latency %0d, expected %0d", lat, CORE_LATENCY);
    end
    checks++;
    if (longint'(y) != e.y || longint'(st_new.w1) != e.w1 ||
        longint'(st_new.w2) != e.w2) begin
      failures++;
      $display("mismatch x=%0d w1=%0d w2=%0d a=%0d c=%0d g=%0d h=%0d: got y=%0d w1=%0d w2=%0d exp %0d %0d %0d",
               xv, w1v, w2v, av, cv, gv, hv, y, st_new.w1, st_new.w2, e.y, e.w1, e.w2);
    end
    @(negedge clk);
    checks++;
    if (done) begin
      failures++;
      $display("done held for more than one cycle");
    end
  endtask

  initial begin
    longint w1v, w2v;
    ref_coef_t kc;
    ref_out_t e;
    x = '0; st = '0; k = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    // Random operands over the whole coefficient range.
    for (int i = 0; i < 600; i++) begin
      run_one(rnd_data(i % 3), rnd_data((i / 3) % 3), rnd_data(i % 2),
              longint'($signed(18'($urandom))), longint'($signed(18'($urandom))),
              longint'($signed(18'($urandom))), longint'($signed(18'($urandom))));
    end
    // A realistic section iterated over an impulse: states fed back.
    kc = greenwood_coefs(40, 102, 0.1);
    w1v = 0; w2v = 0;
    for (int n = 0; n < 40; n++) begin
      longint xv;
      xv = (n == 0) ? 64'sd500000 : 64'sd0;
      run_one(xv, w1v, w2v, kc.a, kc.c, kc.g, kc.h);
      e = rstep(xv, w1v, w2v, kc.a, kc.c, kc.g, kc.h);
      w1v = e.w1; w2v = e.w2;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
