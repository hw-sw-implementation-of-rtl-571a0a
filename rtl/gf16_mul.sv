// gf16_mul: one "F_q product" cell of the accelerator datapath.
//
// Purely combinational product of two F_16 elements, p = a * b mod
// (x^4 + x + 1). Fifteen of these form one scalar-column multiplier; the
// accelerator holds 15*P of them. No clock, no latency. The field size
// (4-bit elements) is the paper's; the reduction polynomial is this
// design's choice (the one used by the MiRitH reference code for q = 16).
module gf16_mul
  import mirith_pkg::*;
(
  input  gf_t a,
  input  gf_t b,
  output gf_t p
);
  always_comb p = gf_mul(a, b);
endmodule
