// car_ctrl: global state machine of one CAR array.  It time-multiplexes the
// single CAR core over the NSEC filter sections of the array, once per sound
// sample.
//
// States (Idle, Control and Done follow the source architecture; Init is
// this design's addition):
//   INIT    after reset, clears the W1/W2 entry of every section, one per cycle.
//   IDLE    waits for the sample tick.  On the tick it latches the input sample
//           and starts section 0.
//   CONTROL processes section sec in a fixed slot of SECTION_CYCLES cycles:
//           slot cycle 0 presents sec to both memories (the tick cycle is slot
//           cycle 0 of section 0), cycle 1 starts the core with the section's
//           coefficients, stored states and its input X, and when the core
//           reports done the new W1, W2 are written back, the output is
//           published as tap sec and kept as the input of section sec+1.  The
//           input multiplexer gives section 0 the sound sample and every other
//           section the previous section's output, so the sections form one
//           cascade.
//   DONE    one cycle with done_sample high; it also accepts the next tick.
// Timing: from a tick, done_sample is high NSEC*SECTION_CYCLES cycles later,
// and a new tick is accepted on that cycle or later.  A tick that arrives
// while sections are still being processed is dropped and sets the sticky
// overrun flag (this design's choice).  The fixed slot length stands for the
// source's 29 clock cycles per section; the core itself finishes in fewer.
module car_ctrl
  import car_pkg::*;
#(
  parameter int unsigned NSEC          = 102,
  parameter int unsigned SECTION_CYCLES = 29,
  localparam int unsigned AW = (NSEC > 1) ? $clog2(NSEC) : 1,
  localparam int unsigned CW = $clog2(SECTION_CYCLES)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          tick,
  input  data_t         x_in,
  // memories
  output logic [AW-1:0] mem_raddr,
  output logic          st_we,
  output logic [AW-1:0] st_waddr,
  output state_t        st_wdata,
  // CAR core
  output logic          core_start,
  output data_t         core_x,
  input  logic          core_done,
  input  data_t         core_y,
  input  state_t        core_st_new,
  // outputs
  output logic          tap_valid,
  output logic [AW-1:0] tap_sec,
  output data_t         tap_y,
  output data_t         y_last,
  output logic          done_sample,
  output logic          busy,
  output logic          ready,
  output logic          overrun
);

  if (SECTION_CYCLES < CORE_LATENCY + 2) begin : g_check
    $error("SECTION_CYCLES must be at least CORE_LATENCY + 2");
  end

  typedef enum logic [1:0] {INIT, IDLE, CONTROL, DONE} gstate_e;

  gstate_e       state;
  logic [AW-1:0] sec;
  logic [CW-1:0] cnt;
  data_t         x_sample;
  data_t         y_prev;
  logic          slot_done;

  localparam logic [AW-1:0] LAST_SEC = AW'(NSEC - 1);
  localparam logic [CW-1:0] LAST_CNT = CW'(SECTION_CYCLES - 1);

  assign mem_raddr   = sec;
  assign core_start  = (state == CONTROL) && (cnt == CW'(1));
  assign core_x      = (sec == '0) ? x_sample : y_prev;
  assign st_we       = (state == INIT) || (state == CONTROL && core_done);
  assign st_waddr    = sec;
  assign st_wdata    = (state == INIT) ? '0 : core_st_new;
  assign tap_valid   = (state == CONTROL) && core_done;
  assign tap_sec     = sec;
  assign tap_y       = core_y;
  assign done_sample = (state == DONE);
  assign busy        = (state == CONTROL);
  assign ready       = (state != INIT);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= INIT;
      sec       <= '0;
      cnt       <= '0;
      x_sample  <= '0;
      y_prev    <= '0;
      y_last    <= '0;
      overrun   <= 1'b0;
      slot_done <= 1'b0;
    end else begin
      unique case (state)
        INIT: begin
          if (sec == LAST_SEC) begin
            sec   <= '0;
            state <= IDLE;
          end else begin
            sec <= sec + AW'(1);
          end
        end
        IDLE, DONE: begin
          if (tick) begin
            x_sample  <= x_in;
            sec       <= '0;
            cnt       <= CW'(1);
            slot_done <= 1'b0;
            state     <= CONTROL;
          end else begin
            state <= IDLE;
          end
        end
        CONTROL: begin
          if (tick) overrun <= 1'b1;
          if (core_done) begin
            y_prev    <= core_y;
            slot_done <= 1'b1;
            if (sec == LAST_SEC) y_last <= core_y;
          end
          if (cnt == LAST_CNT) begin
            cnt       <= '0;
            slot_done <= 1'b0;
            if (sec == LAST_SEC) begin
              sec   <= '0;
              state <= DONE;
            end else begin
              sec <= sec + AW'(1);
            end
          end else begin
            cnt <= cnt + CW'(1);
          end
        end
        default: state <= INIT;
      endcase
    end
  end

  // Every slot must see exactly one done from the core before it ends.
  a_slot_done: assert property (@(posedge clk) disable iff (!rst_n)
    (state == CONTROL && cnt == LAST_CNT) |-> (slot_done || core_done));
  a_one_done: assert property (@(posedge clk) disable iff (!rst_n)
    (state == CONTROL && core_done) |-> !slot_done);

endmodule
