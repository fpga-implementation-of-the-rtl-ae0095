// car_core: one CAR filter section, the arithmetic unit that a CAR array
// time-multiplexes over all of its sections.
//
// The section is the two-pole-two-zero resonator
//     W1' = X + a*W1 - c*W2
//     W2' =     c*W1 + a*W2
//     Y   = g * (X + h*W2')
// with a = r cos(theta), c = r sin(theta), which realises
//     Y/X = g (z^2 + (-2a0 + h c0) r z + r^2) / (z^2 - 2 a0 r z + r^2).
// Following the source architecture, two state machines run in parallel, each
// cycling Idle -> Calc -> Done: the W1 machine computes W1', the W2 machine
// computes W2' and, from it, the output Y.  The core raises done once both
// machines are in Done; both then return to Idle.
//
// Interface: start is a one-cycle pulse; x, st (W1, W2 of the section) and k
// (its coefficients) are latched on that cycle and may change afterwards.
// Timing: done is a one-cycle pulse CORE_LATENCY (6) cycles after start;
// y and st_new stay valid from then until the next done.  The W1 machine
// needs 2 Calc cycles, the W2 machine 5; the W1 machine waits in Done.
// The fixed-point formats, rounding and saturation (see car_pkg) and the
// cycle split are this design's choices; the equations follow the source.
module car_core
  import car_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  data_t  x,
  input  state_t st,
  input  coefs_t k,
  output logic   done,
  output data_t  y,
  output state_t st_new
);

  typedef enum logic [1:0] {IDLE, CALC, DONE} mstate_e;

  mstate_e m1_state, m2_state;
  logic [2:0] m2_step;

  // Operands latched at start.
  data_t  x_r;
  state_t st_r;
  coefs_t k_r;

  // W1 machine intermediates.
  data_t aw1, cw2;
  // W2 machine intermediates.
  data_t cw1, aw2, hw2, xs;

  assign done = (m1_state == DONE) && (m2_state == DONE);

  always_ff @(posedge clk) begin
    if (start) begin
      x_r  <= x;
      st_r <= st;
      k_r  <= k;
    end
  end

  // W1 state machine: two Calc cycles (products, then sum).
  logic m1_step;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m1_state   <= IDLE;
      m1_step    <= 1'b0;
      st_new.w1  <= '0;
      aw1        <= '0;
      cw2        <= '0;
    end else begin
      unique case (m1_state)
        IDLE: if (start) begin
          m1_state <= CALC;
          m1_step  <= 1'b0;
        end
        CALC: begin
          if (!m1_step) begin
            aw1     <= qmul(k_r.a, st_r.w1);
            cw2     <= qmul(k_r.c, st_r.w2);
            m1_step <= 1'b1;
          end else begin
            st_new.w1 <= sat(WIDE_W'(x_r) + WIDE_W'(aw1) - WIDE_W'(cw2));
            m1_state  <= DONE;
          end
        end
        DONE: if (done) m1_state <= IDLE;
        default: m1_state <= IDLE;
      endcase
    end
  end

  // W2 state machine: five Calc cycles (products, W2', h*W2', X + h*W2', Y).
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m2_state  <= IDLE;
      m2_step   <= '0;
      st_new.w2 <= '0;
      y         <= '0;
      cw1       <= '0;
      aw2       <= '0;
      hw2       <= '0;
      xs        <= '0;
    end else begin
      unique case (m2_state)
        IDLE: if (start) begin
          m2_state <= CALC;
          m2_step  <= '0;
        end
        CALC: begin
          m2_step <= m2_step + 3'd1;
          unique case (m2_step)
            3'd0: begin
              cw1 <= qmul(k_r.c, st_r.w1);
              aw2 <= qmul(k_r.a, st_r.w2);
            end
            3'd1: st_new.w2 <= sat(WIDE_W'(cw1) + WIDE_W'(aw2));
            3'd2: hw2 <= qmul(k_r.h, st_new.w2);
            3'd3: xs  <= sat(WIDE_W'(x_r) + WIDE_W'(hw2));
            default: begin
              y        <= qmul(k_r.g, xs);
              m2_state <= DONE;
            end
          endcase
        end
        DONE: if (done) m2_state <= IDLE;
        default: m2_state <= IDLE;
      endcase
    end
  end

  // A new section may only be started while both machines are idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (m1_state == IDLE && m2_state == IDLE));

endmodule
