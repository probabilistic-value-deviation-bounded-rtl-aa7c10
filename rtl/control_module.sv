// control_module -- selection register file of the channel adaptation
// controller.
//
// What it does: stores the channel adaptation lookup table, L+1 registers of
// N bits, and drives the channel modulating hardware with the entry of the
// bit position currently on the line: s_select = R[idx]. R[0] is the default
// (nominal, error-free) setting used outside adapted words -- START, STOP,
// acknowledge clocks, addresses and any byte that must not be disturbed --
// and R[1]..R[L] are the settings for the 1st..L-th transmitted bit of a word.
// The table is computed offline from the source's value distribution and the
// tolerated distortion, and is written by the processor once.
//
// Several sources: when more than one sensor on the bus sends adapted words,
// each gets its own table (parameter S, default 1 = the single-sensor case).
// src_sel picks the live table, and cfg_src the table a write goes to.
//
// How it works: S x (L+1) enabled flip-flop registers and an N-bit
// multiplexer indexed by (src_sel, idx). The register-per-position
// organisation and the always-on output s_select = R_i follow the reference
// design, as does keeping a table per sensor; the write port and the source
// select are this design's own, since the reference only says the processor
// feeds the table once.
//
// Interface:
//   scl       serial clock; the registers are written on its falling edge,
//             the same edge that advances the bit counter (the reference
//             implementation's selection registers are falling-edge
//             flip-flops with clock enable). The processor, as bus master,
//             owns scl and so can clock its writes.
//   rst_n     asynchronous, active-low; every register resets to RESET_SEL.
//   cfg_we    write enable; cfg_src picks the table, cfg_addr (0..L) the
//             register, cfg_data is the new selection. Writes to addresses
//             above L or to tables above S-1 are ignored.
//   src_sel   table in use (0..S-1), set by the processor before the
//             sensor's data words; values above S-1 select table 0.
//   idx       bit position from the modulo-L counter (0..L).
//   s_select  N-bit selection to the channel modulating hardware;
//             combinational from idx and the registers, so it changes right
//             after the falling scl edge that moves idx.
module control_module
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
  input  logic          cfg_we,
  input  logic [SW-1:0] cfg_src,
  input  logic [IW-1:0] cfg_addr,
  input  logic [N-1:0]  cfg_data,
  input  logic [SW-1:0] src_sel,
  input  logic [IW-1:0] idx,
  output logic [N-1:0]  s_select
);

  logic [N-1:0] regs [S][L+1];

  always_ff @(negedge scl or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned t = 0; t < S; t++)
        for (int unsigned k = 0; k <= L; k++) regs[t][k] <= N'(RESET_SEL);
    end else if (cfg_we && 32'(cfg_addr) <= L && 32'(cfg_src) < S) begin
      regs[cfg_src][cfg_addr] <= cfg_data;
    end
  end

  logic [SW-1:0] src;
  logic [IW-1:0] pos;

  always_comb begin
    src      = (32'(src_sel) < S) ? src_sel : '0;
    pos      = (32'(idx) <= L)    ? idx     : '0;
    s_select = regs[src][pos];
  end

endmodule : control_module
