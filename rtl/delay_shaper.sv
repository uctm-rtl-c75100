// delay_shaper -- one delay/shaping element (two chained monostables).
//
// A rising edge on `in` starts the element. The first monostable waits
// `cfg.delay` clock cycles (0 .. 2^13-1); the second then drives `out` high
// for `cfg.width` cycles (1 .. 2^13-1; a setting of 0 is taken as 1). Because
// the edge, not the level, is the time reference, a pulse can be made shorter
// or longer than the one that arrived. Edges that arrive while the element is
// delaying or shaping are ignored; `busy` is high over that whole interval
// and is the element's dead-time signal.
//
// Timing (one clock = 10 ns at 100 MHz): if the edge is seen in the cycle
// where `in` is first 1, `out` is 1 from the (delay+1)-th following clock
// edge for exactly `width` cycles; with delay 0 the element adds one register
// stage. `busy` rises with the edge's clock and falls together with `out`, so
// a new edge is accepted from the cycle after the pulse ends.
//
// The paper states the ranges, the edge reference and the ignore-while-busy
// rule; the counter-based state machine and rising-edge polarity are this
// design's choices.
module delay_shaper
  import uctm_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  shape_cfg_t cfg,
  input  logic       in,
  output logic       out,
  output logic       busy
);

  typedef enum logic [1:0] {S_IDLE, S_DELAY, S_WIDTH} state_t;

  state_t state_q;
  dly_t   cnt_q;
  logic   in_q;
  dly_t   width_m1;   // width - 1, with 0 taken as 1

  assign width_m1 = (cfg.width == '0) ? '0 : cfg.width - 1'b1;
  assign busy     = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cnt_q   <= '0;
      in_q    <= 1'b0;
      out     <= 1'b0;
    end else begin
      in_q <= in;
      unique case (state_q)
        S_IDLE: begin
          if (in && !in_q) begin
            if (cfg.delay == '0) begin
              state_q <= S_WIDTH;
              cnt_q   <= width_m1;
              out     <= 1'b1;
            end else begin
              state_q <= S_DELAY;
              cnt_q   <= cfg.delay - 1'b1;
            end
          end
        end
        S_DELAY: begin
          if (cnt_q == '0) begin
            state_q <= S_WIDTH;
            cnt_q   <= width_m1;
            out     <= 1'b1;
          end else begin
            cnt_q <= cnt_q - 1'b1;
          end
        end
        S_WIDTH: begin
          if (cnt_q == '0) begin
            state_q <= S_IDLE;
            out     <= 1'b0;
          end else begin
            cnt_q <= cnt_q - 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // The output pulse only exists inside a busy interval.
  a_out_in_busy: assert property (@(posedge clk) disable iff (!rst_n) out |-> busy)
    else $error("delay_shaper: out high while idle");

endmodule
