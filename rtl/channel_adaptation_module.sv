// channel_adaptation_module -- protocol-agnostic controller for bit-level
// channel adaptation of a serial link (top level).
//
// What it does: for every bit of a serially transmitted L-bit word it selects
// one of 2^N states of a channel modulating device, so that each bit position
// travels over a channel with its own error probability. On I2C the device is
// a digitally controlled potentiometer (DCP) that forms the SDA pull-up: a
// larger pull-up saves power but makes 1 bits rise more slowly and so more
// likely to be read as 0. Least-significant bits can be given the weak,
// cheap pull-up; the most-significant bits keep a strong one, so the value
// error stays inside a tolerated distribution.
//
// How it works: two blocks, as in the reference block diagram.
//   modulo_l_counter  follows the serial clock and gives the bit position
//                     idx (0 = outside an adapted word, 1..L = bit number);
//   control_module    holds the table R[0..L] and outputs R[idx].
// Neither block looks at the data line; the processor synchronises the
// counter with s_start when an adapted word is about to be sent.
//
// Interface:
//   scl                 serial clock of the link, also the controller's clock
//                       (all state changes on its falling edge).
//   rst_n               asynchronous active-low reset: idle, all registers at
//                       RESET_SEL.
//   s_start, word_len   synchronisation from the processor (see
//                       modulo_l_counter).
//   cfg_we, cfg_src, cfg_addr, cfg_data
//                       configuration writes from the processor (see
//                       control_module).
//   src_sel             which source's table is live (S > 1 only; tie to 0
//                       for the default single-source build).
//   s_select            N-bit control signal to the channel modulating
//                       hardware (the DCP wiper code on I2C).
//   bit_idx, busy       current bit position and "adapted word in flight",
//                       for observation.
// Timing: at the falling scl edge on which s_start is seen, s_select switches
// to R[1]; at each following falling edge it moves on to R[2]..R[len]; the
// falling edge after bit len brings it back to R[0].
module channel_adaptation_module
  import chad_pkg::*;
#(
  parameter int unsigned L         = L_DEFAULT,
  parameter int unsigned N         = N_DEFAULT,
  parameter int unsigned RESET_SEL = RESET_SEL_DEFAULT,
  parameter int unsigned S         = S_DEFAULT,
  localparam int unsigned IW = $clog2(L + 1),
  localparam int unsigned SW = (S > 1) ? $clog2(S) : 1
) (
  input  logic          scl,
  input  logic          rst_n,
  input  logic          s_start,
  input  logic [IW-1:0] word_len,
  input  logic          cfg_we,
  input  logic [SW-1:0] cfg_src,
  input  logic [IW-1:0] cfg_addr,
  input  logic [N-1:0]  cfg_data,
  input  logic [SW-1:0] src_sel,
  output logic [N-1:0]  s_select,
  output logic [IW-1:0] bit_idx,
  output logic          busy
);

  sync_state_e state;

  modulo_l_counter #(.L(L)) u_counter (
    .scl      (scl),
    .rst_n    (rst_n),
    .s_start  (s_start),
    .word_len (word_len),
    .idx      (bit_idx),
    .state    (state)
  );

  control_module #(.L(L), .N(N), .RESET_SEL(RESET_SEL), .S(S)) u_control (
    .scl      (scl),
    .rst_n    (rst_n),
    .cfg_we   (cfg_we),
    .cfg_src  (cfg_src),
    .cfg_addr (cfg_addr),
    .cfg_data (cfg_data),
    .src_sel  (src_sel),
    .idx      (bit_idx),
    .s_select (s_select)
  );

  assign busy = (state == S1_COUNT);

endmodule : channel_adaptation_module
