// mirith_cut12_top: the MiRitH "Cut 1+2" hardware: the E = sum alpha M
// accelerator and the Keccak PRNG side by side, as attached to the
// programmable logic of a Zynq-class SoC.
//
// The host processor runs the rest of KeyGen, Sign and Open in software.
// It drives the sum-alpha-M accelerator through the AXI4-Lite register
// window and lets it fetch operands and store results through its own AXI4
// master port (see sum_alpha_m); it streams seeds into the PRNG and reads
// pseudo-random words back (see keccak_prng). The two blocks are
// independent and may run at the same time, which is how the design lets
// share generation and the matrix sums overlap. Both block choices follow
// the paper's Cut 1+2; the PRNG's plain stream ports are this design's
// choice, since the paper does not say how the PRNG is attached.
module mirith_cut12_top
  import mirith_pkg::*;
#(
  parameter int unsigned K          = K_MATS,
  parameter int unsigned P          = 1,
  parameter int unsigned E_BANKS    = 4,
  parameter int unsigned RATE_LANES = 21
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic                 busy,
  output logic                 done,
  // AXI4-Lite slave
  input  logic [7:0]           s_axil_awaddr,
  input  logic                 s_axil_awvalid,
  output logic                 s_axil_awready,
  input  logic [31:0]          s_axil_wdata,
  input  logic [3:0]           s_axil_wstrb,
  input  logic                 s_axil_wvalid,
  output logic                 s_axil_wready,
  output logic [1:0]           s_axil_bresp,
  output logic                 s_axil_bvalid,
  input  logic                 s_axil_bready,
  input  logic [7:0]           s_axil_araddr,
  input  logic                 s_axil_arvalid,
  output logic                 s_axil_arready,
  output logic [31:0]          s_axil_rdata,
  output logic [1:0]           s_axil_rresp,
  output logic                 s_axil_rvalid,
  input  logic                 s_axil_rready,
  // AXI4 master
  output logic [ADDR_BITS-1:0] m_axi_araddr,
  output logic [7:0]           m_axi_arlen,
  output logic [2:0]           m_axi_arsize,
  output logic [1:0]           m_axi_arburst,
  output logic                 m_axi_arvalid,
  input  logic                 m_axi_arready,
  input  logic [BUS_BITS-1:0]  m_axi_rdata,
  input  logic [1:0]           m_axi_rresp,
  input  logic                 m_axi_rlast,
  input  logic                 m_axi_rvalid,
  output logic                 m_axi_rready,
  output logic [ADDR_BITS-1:0] m_axi_awaddr,
  output logic [7:0]           m_axi_awlen,
  output logic [2:0]           m_axi_awsize,
  output logic [1:0]           m_axi_awburst,
  output logic                 m_axi_awvalid,
  input  logic                 m_axi_awready,
  output logic [BUS_BITS-1:0]  m_axi_wdata,
  output logic [BUS_BITS/8-1:0] m_axi_wstrb,
  output logic                 m_axi_wlast,
  output logic                 m_axi_wvalid,
  input  logic                 m_axi_wready,
  input  logic [1:0]           m_axi_bresp,
  input  logic                 m_axi_bvalid,
  output logic                 m_axi_bready,
  // events, for performance observation
  output logic                 ev_step,
  output logic                 ev_wb_stall,
  // Keccak PRNG streams
  input  logic                 prng_init,
  input  logic                 prng_in_valid,
  output logic                 prng_in_ready,
  input  logic [63:0]          prng_in_data,
  input  logic                 prng_in_last,
  input  logic [3:0]           prng_in_bytes,
  output logic                 prng_out_valid,
  input  logic                 prng_out_ready,
  output logic [63:0]          prng_out_data,
  output logic                 prng_perm_busy
);
  sum_alpha_m #(.K(K), .P(P), .E_BANKS(E_BANKS)) u_sam (.*);

  keccak_prng #(.RATE_LANES(RATE_LANES)) u_prng (
    .clk, .rst_n, .init(prng_init),
    .in_valid(prng_in_valid), .in_ready(prng_in_ready), .in_data(prng_in_data),
    .in_last(prng_in_last), .in_bytes(prng_in_bytes),
    .out_valid(prng_out_valid), .out_ready(prng_out_ready), .out_data(prng_out_data),
    .perm_busy(prng_perm_busy)
  );
endmodule
