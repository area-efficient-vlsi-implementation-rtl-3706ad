// gf2m_ctrl: sequencer of one bit-serial multiplication.
//
// A two-state machine (IDLE, RUN) with a down counter of ceil(log2 M) bits.
//   - In IDLE, a start pulse raises load for that cycle: the operand register
//     captures A and the accumulator is cleared at the coming edge. The
//     machine enters RUN with the counter at M-1.
//   - In RUN, step is high for exactly M cycles. In each, the accumulator
//     captures block H's output and one bit of B is consumed, MSB first; the
//     counter value is the index of the bit being consumed (M-1 down to 0).
//   - After the edge that ends the last iteration, the machine is back in IDLE
//     and done pulses for one cycle: the product is in the accumulator.
// So a multiplication takes one load cycle plus M iteration cycles, M+1 clock
// edges in all counting the edge that samples start; done is high in the
// cycle after the last of them. start is ignored while busy. A new start may
// be given in the cycle done is high.
//
// The multiplier only specifies that the result is ready after M iterations;
// the handshake, the counter and the separate load cycle are this design's
// choices. Asynchronous active-low reset to IDLE.
module gf2m_ctrl #(
  parameter int unsigned M = gf2m_pkg::M_DEFAULT
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic load,    // capture A, clear the accumulator
  output logic step,    // one iteration: consume b_{idx}, update accumulator
  output logic busy,
  output logic done     // one-cycle pulse, product valid
);

  import gf2m_pkg::*;

  localparam int unsigned CW = (M > 1) ? $clog2(M) : 1;

  ctrl_state_e   state;
  logic [CW-1:0] cnt;   // index of the bit of B consumed in this RUN cycle

  assign load = (state == CTRL_IDLE) && start;
  assign step = (state == CTRL_RUN);
  assign busy = (state == CTRL_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= CTRL_IDLE;
      cnt   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        CTRL_IDLE: begin
          if (start) begin
            state <= CTRL_RUN;
            cnt   <= CW'(M - 1);
          end
        end
        CTRL_RUN: begin
          if (cnt == '0) begin
            state <= CTRL_IDLE;
            done  <= 1'b1;
          end else begin
            cnt <= cnt - 1'b1;
          end
        end
        default: state <= CTRL_IDLE;
      endcase
    end
  end

  // The counter never leaves 0 .. M-1, and done never overlaps an iteration.
  a_cnt_range: assert property (@(posedge clk) disable iff (!rst_n)
    step |-> (cnt <= CW'(M - 1)));
  a_done_idle: assert property (@(posedge clk) disable iff (!rst_n)
    done |-> !step);

endmodule
