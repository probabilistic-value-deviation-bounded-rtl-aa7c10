// modulo_l_counter -- bit-position synchroniser of the channel adaptation
// controller.
//
// What it does: tracks which bit of an L-bit serial word is on the data line,
// so that the control module can present that bit position's channel setting.
// The output idx is 0 while no adapted word is in flight and 1..len during
// the word, where idx = j means the j-th transmitted bit (first bit = 1).
//
// How it works: a two-state machine clocked on the falling edge of the serial
// clock, exactly as in the reference state machine:
//   s0 (idle):     idx = 0. If s_start is 1 at a falling edge: idx <= 1, go to s1.
//   s1 (counting): at a falling edge, if idx < len: idx <= idx + 1;
//                  otherwise (idx = len): idx <= 0, back to s0.
// The falling edge of the serial clock is the moment the transmitter sets the
// next bit on the data line, so the new setting is in place for the whole bit.
// After bit len the counter returns to 0 at the next falling edge, so the
// ninth I2C clock (the acknowledge) sees the default register R_0. Holding
// s_start at 1 therefore adapts back-to-back bytes of a burst read, each one
// followed by one acknowledge clock at the default setting.
//
// Interface:
//   scl       serial clock; every register of this module changes on its
//             falling edge (the reference implementation used falling-edge
//             flip-flops throughout).
//   rst_n     asynchronous, active-low reset to s0 / idx = 0 (this design's
//             choice; the reference does not describe a reset).
//   s_start   start of an adapted word, from the processor, sampled at falling
//             edges of scl while idle.
//   word_len  run-time word length. The reference lists the word length as an
//             input of the state machine; here 0 or any value above the
//             parameter L selects L (this design's choice), since only L
//             per-bit registers exist.
//   idx       current bit position, 0..L.
//   state     current state, for observation.
// Timing: idx changes only on falling scl edges, on the very edge that sees
// s_start; no combinational path from inputs to outputs.
// The two assertions at the end are this design's own. Their "disable iff"
// uses rst_n synchronously while the flip-flops use it asynchronously; the
// lint warning SYNCASYNCNET that this causes is expected and harmless.
module modulo_l_counter
  import chad_pkg::*;
#(
  parameter int unsigned L  = L_DEFAULT,
  localparam int unsigned IW = $clog2(L + 1)
) (
  input  logic          scl,
  input  logic          rst_n,
  input  logic          s_start,
  input  logic [IW-1:0] word_len,
  output logic [IW-1:0] idx,
  output sync_state_e   state
);

  logic [IW-1:0] len;

  // Effective word length: 1..L.
  always_comb begin
    if (word_len == '0 || 32'(word_len) > L) len = IW'(L);
    else                                     len = word_len;
  end

  always_ff @(negedge scl or negedge rst_n) begin
    if (!rst_n) begin
      state <= S0_IDLE;
      idx   <= '0;
    end else begin
      unique case (state)
        S0_IDLE: begin
          if (s_start) begin
            idx   <= IW'(1);
            state <= S1_COUNT;
          end else begin
            idx   <= '0;
          end
        end
        S1_COUNT: begin
          if (idx < len) begin
            idx <= idx + IW'(1);
          end else begin
            idx   <= '0;
            state <= S0_IDLE;
          end
        end
        default: begin
          idx   <= '0;
          state <= S0_IDLE;
        end
      endcase
    end
  end

  // The position never leaves 0..L, and it is 0 exactly when idle.
  a_idx_range : assert property (@(negedge scl) disable iff (!rst_n)
                                 32'(idx) <= L);
  a_idle_zero : assert property (@(negedge scl) disable iff (!rst_n)
                                 (state == S0_IDLE) == (idx == '0));

endmodule : modulo_l_counter
