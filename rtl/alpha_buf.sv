// alpha_buf: the scalar vector [[alpha]]_i of one share.
//
// Software delivers the k scalars packed fifteen to a 60-bit word (scalar
// alpha_j, j = 1..k, in word (j-1)/15 at nibble (j-1) mod 15), the same
// packing as a column of M. Each word is written with wr_en/wr_idx/wr_data.
// The buffer is a register row so that any P consecutive scalars
// alpha_j .. alpha_{j+P-1} can be read in the same cycle (combinational
// read, index j counted from 1); scalars past k read as zero. Keeping alpha
// in registers rather than block RAM is this design's choice.
module alpha_buf
  import mirith_pkg::*;
#(
  parameter int unsigned K = K_MATS,
  parameter int unsigned P = 1,
  localparam int unsigned WORDS = (K + M_ROWS - 1) / M_ROWS,
  localparam int unsigned WW    = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned JW    = $clog2(K + P + 1)
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [WW-1:0]     wr_idx,
  input  col_t              wr_data,
  input  logic [JW-1:0]     rd_j,     // first scalar index, 1-based
  output gf_t  [P-1:0]      rd_alpha  // alpha_{rd_j + p}
);
  gf_t row [WORDS*M_ROWS];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int r = 0; r < M_ROWS; r++)
        row[int'(wr_idx)*M_ROWS + r] <= wr_data[GF_BITS*r +: GF_BITS];
  end

  always_comb begin
    for (int p = 0; p < P; p++) begin
      int unsigned j;
      j = int'(rd_j) + p;
      rd_alpha[p] = (j >= 1 && j <= K) ? row[j-1] : '0;
    end
  end
endmodule
