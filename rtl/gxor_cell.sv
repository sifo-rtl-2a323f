// gxor_cell: garbled XOR overlay cell (free XOR).
//
// With the free-XOR scheme every wire's two keys differ by the same global
// offset R, so the zero key of an XOR gate's output is simply the XOR of
// the zero keys of its inputs; no hashing and no garbled table are needed.
// The cell is purely combinational, as in the paper: its operands are held
// in the dispatcher's In1/In2 registers and its result is taken in the
// same cycle.
module gxor_cell
  import sifo_pkg::*;
(
  input  key_t k0,
  input  key_t k1,
  output key_t k_out
);
  assign k_out = k0 ^ k1;
endmodule
