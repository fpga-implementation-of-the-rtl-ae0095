// coef_mem: coefficient store of one CAR array.  Entry s holds the
// coefficients {a, c, g, h} of section s.  The coefficients are computed
// off-chip and uploaded through the write port; the global state machine
// reads the entry of the section it is about to process.
//
// Simple dual-port memory: one synchronous write port (we, waddr, wdata) and
// one read port with one cycle of latency (rdata is mem[raddr] of the
// previous cycle).  NSEC x 72 bits, small enough for distributed (LUT) RAM.
// The contents are not reset: they are undefined until uploaded.  The port
// widths and the one-cycle read are this design's choices.
module coef_mem
  import car_pkg::*;
#(
  parameter int unsigned NSEC = 102,
  localparam int unsigned AW = (NSEC > 1) ? $clog2(NSEC) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  coefs_t        wdata,
  input  logic [AW-1:0] raddr,
  output coefs_t        rdata
);

  coefs_t mem [NSEC];

  always_ff @(posedge clk) begin
    if (we && waddr < AW'(NSEC)) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
