// sample_sync: turns the 48 kHz sample clock into a one-cycle sample tick in
// the system clock domain.  Two flip-flops resynchronise the slow clock, a
// third detects its rising edge, so tick is high for one system clock cycle
// three cycles after each rising edge of clk_48k.  The source feeds the
// 48 kHz clock into each CAR array beside the system clock; how the two are
// brought together is this design's choice.
module sample_sync (
  input  logic clk,
  input  logic rst_n,
  input  logic clk_48k,
  output logic tick
);

  logic [2:0] sync;

  always_ff @(posedge clk) begin
    if (!rst_n) sync <= '0;
    else        sync <= {sync[1:0], clk_48k};
  end

  assign tick = sync[1] & ~sync[2];

endmodule
