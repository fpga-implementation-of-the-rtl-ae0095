// tb_state_mem: writes random W1, W2 pairs to every entry in random order,
// reads them back and checks the one-cycle read latency and the contents,
// including a read of an entry written on the same cycle (old data).
module tb_state_mem;
  import car_pkg::*;

  localparam int unsigned NSEC = 102;
  localparam int unsigned AW = $clog2(NSEC);

  logic          clk = 1'b0;
  logic          we = 1'b0;
  logic [AW-1:0] waddr = '0;
  state_t        wdata = '0;
  logic [AW-1:0] raddr = '0;
  state_t        rdata;

  state_t model [NSEC];
  int checks = 0;
  int failures = 0;

  state_mem #(.NSEC(NSEC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic state_t rnd();
    return state_t'({$urandom, $urandom});
  endfunction

  initial begin
    // Fill every entry, twice, in a scrambled order.
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < int'(NSEC); i++) begin
        int s;
        s = (i * 37 + pass * 11) % NSEC;
        @(negedge clk);
        we = 1'b1;
        waddr = AW'(s);
        wdata = rnd();
        model[s] = wdata;
      end
    end
    @(negedge clk) we = 1'b0;
    // Read back: rdata is valid one cycle after raddr.
    for (int i = 0; i < int'(NSEC); i++) begin
      raddr = AW'(NSEC - 1 - i);
      @(negedge clk);
      checks++;
      if (rdata !== model[NSEC-1-i]) begin
        failures++;
        $display("entry %0d: got %h expected %h", NSEC-1-i, rdata, model[NSEC-1-i]);
      end
    end
    // Write and read the same entry on one cycle: old data comes out first.
    raddr = AW'(5);
    we = 1'b1; waddr = AW'(5); wdata = rnd();
    @(negedge clk);
    checks++;
    if (rdata !== model[5]) begin
      failures++;
      $display("read-during-write returned new data");
    end
    model[5] = wdata;
    we = 1'b0;
    @(negedge clk);
    checks++;
    if (rdata !== model[5]) begin
      failures++;
      $display("write not visible on next read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
