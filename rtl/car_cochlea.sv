// car_cochlea: the CAR model of the cochlea's basilar membrane, NARR CAR
// arrays of NSEC sections each (12 x 102 = 1224 sections by default), all run
// from one system clock and one 48 kHz sample clock.
//
// The sections form a single cascade from the highest resonant frequency
// (section 0, basal end) to the lowest.  Inside an array the cascade is
// followed within one sample period.  Between arrays it is pipelined: array
// k+1 takes as its input the last section output that array k produced in the
// previous sample period (y_last), so each array adds one sample period of
// delay and the last section lags the sound input by NARR periods
// (12 x 20.8 us = 250 us).  All arrays work in parallel and in lock step.
//
// Interface: sound_in is the 16-bit sound sample (two's complement), latched
// on each sample tick and scaled to the internal data word (car_pkg).  The
// host uploads the coefficients of section coef_sec of array coef_arr through
// coef_we/coef_wdata; global section number = coef_arr*NSEC + coef_sec.
// taps[k][s] is the output of global section k*NSEC+s, refreshed once per
// sample period (array k's outputs lag the input by k periods); tap_* stream
// every output as it is produced; y_out is the final section's output;
// done_sample[k] pulses when array k has finished a sample.
// The one-period register between arrays is this design's reading of the
// source's 250 us figure; the arrays themselves follow the source.
module car_cochlea
  import car_pkg::*;
#(
  parameter int unsigned NARR           = 12,
  parameter int unsigned NSEC           = 102,
  parameter int unsigned SECTION_CYCLES = 29,
  localparam int unsigned AW  = (NSEC > 1) ? $clog2(NSEC) : 1,
  localparam int unsigned ARW = (NARR > 1) ? $clog2(NARR) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clk_48k,
  input  sample_t        sound_in,
  input  logic           coef_we,
  input  logic [ARW-1:0] coef_arr,
  input  logic [AW-1:0]  coef_sec,
  input  coefs_t         coef_wdata,
  output data_t          taps [NARR][NSEC],
  output logic [NARR-1:0] tap_valid,
  output logic [AW-1:0]  tap_sec [NARR],
  output data_t          tap_y [NARR],
  output data_t          y_out,
  output logic [NARR-1:0] done_sample,
  output logic [NARR-1:0] busy,
  output logic           ready,
  output logic [NARR-1:0] overrun
);

  data_t           arr_in   [NARR];
  data_t           arr_last [NARR];
  logic [NARR-1:0] arr_ready;

  for (genvar k = 0; k < int'(NARR); k++) begin : g_arr
    if (k == 0) begin : g_first
      assign arr_in[k] = from_sample(sound_in);
    end else begin : g_next
      assign arr_in[k] = arr_last[k-1];
    end

    car_array #(.NSEC(NSEC), .SECTION_CYCLES(SECTION_CYCLES)) u_array (
      .clk         (clk),
      .rst_n       (rst_n),
      .clk_48k     (clk_48k),
      .x_in        (arr_in[k]),
      .coef_we     (coef_we && (coef_arr == ARW'(k))),
      .coef_waddr  (coef_sec),
      .coef_wdata  (coef_wdata),
      .taps        (taps[k]),
      .tap_valid   (tap_valid[k]),
      .tap_sec     (tap_sec[k]),
      .tap_y       (tap_y[k]),
      .y_last      (arr_last[k]),
      .done_sample (done_sample[k]),
      .busy        (busy[k]),
      .ready       (arr_ready[k]),
      .overrun     (overrun[k])
    );
  end

  assign y_out = arr_last[NARR-1];
  assign ready = &arr_ready;

endmodule
