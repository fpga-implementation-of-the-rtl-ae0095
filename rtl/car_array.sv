// car_array: one CAR array, NSEC cascaded filter sections computed by a single
// time-multiplexed CAR core.  Per sound sample the global state machine
// (car_ctrl) walks the sections in order, reading each section's coefficients
// (coef_mem) and stored states W1, W2 (state_mem), running the core
// (car_core) and writing the states back; the output of each section is the
// input of the next one.  With 142 MHz and 29 cycles per section, 102 sections
// fit in one 48 kHz sample period (102 x 29 = 2958 of 2958.3 cycles).
//
// Interface: clk is the system clock, clk_48k the sample clock (resampled by
// sample_sync); x_in is the array's input, latched on the sample tick.
// Coefficients are uploaded through coef_we/coef_waddr/coef_wdata.  taps[s]
// holds the output y of section s for the latest sample (the y1..y102 outputs),
// the tap_* signals stream each output as it is produced, y_last is the last
// section's output, held for the next array of a cascade, and done_sample
// pulses once all sections of a sample are done.
// Timing: the tick cycle is slot 0 of section 0; tap s appears
// s*SECTION_CYCLES + CORE_LATENCY + 1 cycles after the tick, done_sample
// NSEC*SECTION_CYCLES cycles after it.  After reset the array needs NSEC
// cycles to clear its states (ready low) and ignores ticks meanwhile.
// The tap register bank, the upload port and the overrun flag are this
// design's choices; the block structure follows the source.
module car_array
  import car_pkg::*;
#(
  parameter int unsigned NSEC           = 102,
  parameter int unsigned SECTION_CYCLES = 29,
  localparam int unsigned AW = (NSEC > 1) ? $clog2(NSEC) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clk_48k,
  input  data_t         x_in,
  input  logic          coef_we,
  input  logic [AW-1:0] coef_waddr,
  input  coefs_t        coef_wdata,
  output data_t         taps [NSEC],
  output logic          tap_valid,
  output logic [AW-1:0] tap_sec,
  output data_t         tap_y,
  output data_t         y_last,
  output logic          done_sample,
  output logic          busy,
  output logic          ready,
  output logic          overrun
);

  logic          tick;
  logic [AW-1:0] mem_raddr;
  logic          st_we;
  logic [AW-1:0] st_waddr;
  state_t        st_wdata;
  state_t        st_rdata;
  coefs_t        coef_rdata;
  logic          core_start;
  data_t         core_x;
  logic          core_done;
  data_t         core_y;
  state_t        core_st_new;

  sample_sync u_sync (
    .clk     (clk),
    .rst_n   (rst_n),
    .clk_48k (clk_48k),
    .tick    (tick)
  );

  coef_mem #(.NSEC(NSEC)) u_coef (
    .clk   (clk),
    .we    (coef_we),
    .waddr (coef_waddr),
    .wdata (coef_wdata),
    .raddr (mem_raddr),
    .rdata (coef_rdata)
  );

  state_mem #(.NSEC(NSEC)) u_state (
    .clk   (clk),
    .we    (st_we),
    .waddr (st_waddr),
    .wdata (st_wdata),
    .raddr (mem_raddr),
    .rdata (st_rdata)
  );

  car_ctrl #(.NSEC(NSEC), .SECTION_CYCLES(SECTION_CYCLES)) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .tick        (tick),
    .x_in        (x_in),
    .mem_raddr   (mem_raddr),
    .st_we       (st_we),
    .st_waddr    (st_waddr),
    .st_wdata    (st_wdata),
    .core_start  (core_start),
    .core_x      (core_x),
    .core_done   (core_done),
    .core_y      (core_y),
    .core_st_new (core_st_new),
    .tap_valid   (tap_valid),
    .tap_sec     (tap_sec),
    .tap_y       (tap_y),
    .y_last      (y_last),
    .done_sample (done_sample),
    .busy        (busy),
    .ready       (ready),
    .overrun     (overrun)
  );

  car_core u_core (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (core_start),
    .x      (core_x),
    .st     (st_rdata),
    .k      (coef_rdata),
    .done   (core_done),
    .y      (core_y),
    .st_new (core_st_new)
  );

  // Tap outputs y1 .. yNSEC.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(NSEC); s++) taps[s] <= '0;
    end else if (tap_valid) begin
      taps[tap_sec] <= tap_y;
    end
  end

endmodule
