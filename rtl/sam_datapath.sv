// sam_datapath: one computation step of E = sum_j alpha_j * M_j.
//
// Takes P column words M_{j+p, z} (15 elements each) with their scalars
// alpha_{j+p}, forms the P scalar-column products with 15*P F_16
// multipliers, and adds them (bitwise XOR in characteristic 2) to the
// incoming partial column E_z. The result is registered: e_out is valid one
// clock after the inputs, with out_valid marking it. The 15 multipliers
// per column and the 15 adders feeding back into E follow the paper's block
// diagram; the paper's P is the number of products summed per step.
module sam_datapath
  import mirith_pkg::*;
#(
  parameter int unsigned P = 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  col_t [P-1:0]   m_col,     // M_{j+p, z}
  input  gf_t  [P-1:0]   alpha,     // alpha_{j+p} (0 beyond k)
  input  col_t           e_in,      // E_z before this step
  output logic           out_valid,
  output col_t           e_out      // E_z after this step
);
  col_t sum;

  // 15 x P product cells
  gf_t prod [P][M_ROWS];
  for (genvar p = 0; p < P; p++) begin : g_lane
    for (genvar r = 0; r < M_ROWS; r++) begin : g_row
      gf16_mul u_mul (
        .a(m_col[p][GF_BITS*r +: GF_BITS]),
        .b(alpha[p]),
        .p(prod[p][r])
      );
    end
  end

  // 15 adders: F_16 addition is XOR
  always_comb begin
    sum = e_in;
    for (int p = 0; p < P; p++)
      for (int r = 0; r < M_ROWS; r++)
        sum[GF_BITS*r +: GF_BITS] ^= prod[p][r];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      e_out     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) e_out <= sum;
    end
  end
endmodule
