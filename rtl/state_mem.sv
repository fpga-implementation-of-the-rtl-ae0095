// state_mem: filter-state store of one CAR array.  Entry s holds the two
// delay-element values {W1, W2} of section s between one sound sample and the
// next.  The global state machine reads the entry before a section is
// computed, writes the updated states back when the core is done, and clears
// every entry after reset.
//
// Simple dual-port memory: one synchronous write port and one read port with
// one cycle of latency.  NSEC x 48 bits, small enough for distributed (LUT)
// RAM.  Widths and the one-cycle read are this design's choices.
module state_mem
  import car_pkg::*;
#(
  parameter int unsigned NSEC = 102,
  localparam int unsigned AW = (NSEC > 1) ? $clog2(NSEC) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  state_t        wdata,
  input  logic [AW-1:0] raddr,
  output state_t        rdata
);

  state_t mem [NSEC];

  always_ff @(posedge clk) begin
    if (we && waddr < AW'(NSEC)) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
