// fixed1s_encoder: 8-bit character to 11-bit fixed-1s code.
//
// Every code has five ones and six zeros, so two different codes always
// differ in a position where the stored word has a one and the search word a
// zero. That lets a CAM cell detect a mismatch with a single search line and
// transistor. Byte n maps to the n-th weight-5 word in increasing numeric
// order (nids_pkg::fixed1s), which matches the codes the paper prints.
// Purely combinational.
module fixed1s_encoder
  import nids_pkg::*;
(
  input  logic [7:0] ch,
  output code_t      code
);
  always_comb code = fixed1s(ch);
endmodule
