// tb_car_ctrl: checks the global state machine of a CAR array at its default
// size (102 sections, 29-cycle slots) against a simple stand-in core and
// memory models kept in the testbench.  The stand-in core answers
// CORE_LATENCY cycles after start with y = x + W1, W1' = W1 + 1, W2' = x.
// Checked: the clearing of all states after reset; per sample, that sections
// are visited in order, one per 29-cycle slot; that section 0 gets the sound
// sample and every later section the previous section's output; the values
// written back; done_sample exactly 102 x 29 = 2958 cycles after the tick;
// acceptance of back-to-back ticks 2958 cycles apart; and that a tick during
// processing is dropped and raises overrun.
module tb_car_ctrl;
  import car_pkg::*;

  localparam int unsigned NSEC = 102;
  localparam int unsigned SC   = 29;
  localparam int unsigned AW   = $clog2(NSEC);

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          tick = 1'b0;
  data_t         x_in = '0;
  logic [AW-1:0] mem_raddr;
  logic          st_we;
  logic [AW-1:0] st_waddr;
  state_t        st_wdata;
  logic          core_start;
  data_t         core_x;
  logic          core_done;
  data_t         core_y;
  state_t        core_st_new;
  logic          tap_valid;
  logic [AW-1:0] tap_sec;
  data_t         tap_y;
  data_t         y_last;
  logic          done_sample;
  logic          busy;
  logic          ready;
  logic          overrun;

  car_ctrl #(.NSEC(NSEC), .SECTION_CYCLES(SC)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Memory model (one-cycle read) and stand-in core.
  state_t mem [NSEC];
  state_t st_rdata;
  data_t  cx;
  state_t cst;
  int     cdelay = -1;
  always @(posedge clk) begin
    if (st_we) mem[st_waddr] <= st_wdata;
    st_rdata <= mem[mem_raddr];
  end
  always @(posedge clk) begin
    core_done <= 1'b0;
    if (core_start) begin
      cx  <= core_x;
      cst <= st_rdata;
      cdelay <= CORE_LATENCY - 2;
    end else if (cdelay > 0) begin
      cdelay <= cdelay - 1;
    end else if (cdelay == 0) begin
      cdelay <= -1;
      core_done   <= 1'b1;
      core_y      <= cx + cst.w1;
      core_st_new <= '{w1: cst.w1 + 1, w2: cx};
    end
  end

  // Reference state of the sections.
  longint rw1 [NSEC];
  longint rw2 [NSEC];

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor taps and done_sample against the expected schedule.
  longint tick_cycle;
  longint exp_x;
  int     exp_sec;
  int     n_done = 0;
  always @(posedge clk) begin
    if (rst_n && tap_valid) begin
      longint ey;
      checks++;
      ey = exp_x + rw1[exp_sec];
      if (int'(tap_sec) != exp_sec || longint'(tap_y) != ey ||
          cycle - tick_cycle != longint'(exp_sec * SC + CORE_LATENCY + 1)) begin
        failures++;
        $display("tap: sec %0d (exp %0d) y %0d (exp %0d) at +%0d", tap_sec, exp_sec,
                 tap_y, ey, cycle - tick_cycle);
      end
      checks++;
      if (!st_we || st_wdata.w1 != data_t'(rw1[exp_sec] + 1) || st_wdata.w2 != data_t'(exp_x)) begin
        failures++;
        $display("write-back of section %0d wrong", exp_sec);
      end
      rw1[exp_sec] = rw1[exp_sec] + 1;
      rw2[exp_sec] = exp_x;
      exp_x = ey;
      exp_sec++;
    end
    if (rst_n && done_sample) begin
      n_done++;
      checks++;
      if (cycle - tick_cycle != longint'(NSEC * SC) || exp_sec != int'(NSEC) ||
          longint'(y_last) != exp_x) begin
        failures++;
        $display("done_sample at +%0d after %0d sections", cycle - tick_cycle, exp_sec);
      end
    end
    // A tick is accepted when the controller is ready and not processing.
    if (rst_n && tick && ready && !busy) begin
      tick_cycle = cycle;
      exp_x = longint'(x_in);
      exp_sec = 0;
    end
  end

  task automatic send_tick(input longint xv);
    @(negedge clk);
    tick = 1'b1;
    x_in = data_t'(xv);
    @(negedge clk) tick = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (ready);
    @(negedge clk);
    for (int s = 0; s < int'(NSEC); s++) begin
      rw1[s] = 0; rw2[s] = 0;
      checks++;
      if (mem[s] != '0) begin
        failures++;
        $display("state %0d not cleared", s);
      end
    end
    // Four samples, ticks exactly one sample budget apart.
    for (int n = 0; n < 4; n++) begin
      send_tick(longint'(n * 1000 + 17));
      repeat (NSEC * SC - 2) @(negedge clk);
    end
    repeat (4) @(negedge clk);
    checks++;
    if (n_done != 4 || overrun) begin
      failures++;
      $display("%0d done_sample pulses, overrun %0b", n_done, overrun);
    end
    // A tick in the middle of a sample must be dropped and flagged.
    send_tick(64'sd5);
    repeat (500) @(negedge clk);
    tick = 1'b1; x_in = data_t'(999);
    @(negedge clk) tick = 1'b0;
    repeat (NSEC * SC) @(negedge clk);
    checks++;
    if (!overrun || n_done != 5) begin
      failures++;
      $display("overrun %0b, %0d done_sample pulses", overrun, n_done);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
