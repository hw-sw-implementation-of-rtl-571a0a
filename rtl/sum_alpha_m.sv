// sum_alpha_m: accelerator for E = sum_{j=1..k} alpha_j * M_j over F_16
// (the "Cut 1" hardware block).
//
// The host loads the k matrices M_j once (LOAD_M) and then hands over any
// number of scalar vectors alpha (RUN); for each it receives the 15 x 15
// matrix E, column by column, in system memory. Inside:
//   axil_regs   AXI4-Lite slave, control/status registers
//   sam_ctrl    control unit: loads, j/z loops, E write-back
//   axi_master  64-bit AXI4 master fetching M and alpha, storing E
//   sdp_ram     P lanes of M memory, one 15-element column per 64-bit word
//   alpha_buf   the k scalars of one share
//   sam_datapath 15*P F_16 multipliers and 15 adders, E_z += sum alpha*M
//   tdp_ram     E_BANKS result banks of 15 columns
// Each clock the datapath consumes column z of P matrices, so one matrix E
// costs ceil(k/P)*15 cycles of computation (1170 at k = 78, P = 1), plus
// the alpha fetch, which is not overlapped, and two cycles of drain. The
// write-back of one E overlaps the next computation. P (the paper's
// parallelisation factor, 1 unless stated otherwise) and the 60-bit column
// words follow the paper; E_BANKS = 4 follows the four E memories of its
// block diagram; everything about interfaces and sequencing is this
// design's choice.
module sum_alpha_m
  import mirith_pkg::*;
#(
  parameter int unsigned K       = K_MATS,
  parameter int unsigned P       = 1,
  parameter int unsigned E_BANKS = 4
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
  output logic                 ev_wb_stall
);
  localparam int unsigned JB     = (K + P - 1) / P;
  localparam int unsigned MDEPTH = JB * N_COLS;
  localparam int unsigned MAW    = (MDEPTH > 1) ? $clog2(MDEPTH) : 1;
  localparam int unsigned AWORDS = (K + M_ROWS - 1) / M_ROWS;
  localparam int unsigned AWW    = (AWORDS > 1) ? $clog2(AWORDS) : 1;
  localparam int unsigned JW     = $clog2(K + P + 1);
  localparam int unsigned EAW    = $clog2(N_COLS);

  logic                 cmd_load_m, cmd_run, err_clr, err;
  logic [ADDR_BITS-1:0] m_addr, alpha_addr, e_addr;
  logic [15:0]          num_shares;

  logic                 rd_cmd_valid, rd_cmd_ready, rd_beat_valid, rd_done;
  logic [ADDR_BITS-1:0] rd_cmd_addr;
  logic [15:0]          rd_cmd_beats;
  logic [BUS_BITS-1:0]  rd_beat_data;
  logic                 wr_cmd_valid, wr_cmd_ready, wr_beat_valid, wr_beat_ready, wr_done;
  logic [ADDR_BITS-1:0] wr_cmd_addr;
  logic [15:0]          wr_cmd_beats;
  logic [BUS_BITS-1:0]  wr_beat_data;

  logic [P-1:0]         m_we;
  logic [MAW-1:0]       m_waddr, m_raddr;
  logic [BUS_BITS-1:0]  m_wdata;
  logic                 m_re;
  logic [BUS_BITS-1:0]  m_rdata [P];
  col_t [P-1:0]         m_col;

  logic                 a_wr_en;
  logic [AWW-1:0]       a_wr_idx;
  col_t                 a_wr_data;
  logic [JW-1:0]        a_rd_j;
  gf_t  [P-1:0]         a_rd_alpha;

  logic                 dp_valid, dp_out_valid;
  col_t                 dp_e_in, dp_e_out;

  logic [E_BANKS-1:0]   e_a_en, e_b_we;
  logic [EAW-1:0]       e_a_addr [E_BANKS];
  col_t                 e_a_rdata [E_BANKS];
  logic [EAW-1:0]       e_b_addr;
  col_t                 e_b_wdata;

  axil_regs #(.P(P), .K(K), .E_BANKS(E_BANKS)) u_regs (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready, .s_axil_wdata, .s_axil_wstrb,
    .s_axil_wvalid, .s_axil_wready, .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready, .s_axil_rdata, .s_axil_rresp,
    .s_axil_rvalid, .s_axil_rready,
    .cmd_load_m, .cmd_run, .err_clr, .m_addr, .alpha_addr, .e_addr, .num_shares,
    .busy, .done, .err
  );

  sam_ctrl #(.K(K), .P(P), .E_BANKS(E_BANKS)) u_ctrl (
    .clk, .rst_n,
    .cmd_load_m, .cmd_run, .m_addr, .alpha_addr, .e_addr, .num_shares, .busy, .done,
    .rd_cmd_valid, .rd_cmd_ready, .rd_cmd_addr, .rd_cmd_beats, .rd_beat_valid,
    .rd_beat_data, .rd_done,
    .wr_cmd_valid, .wr_cmd_ready, .wr_cmd_addr, .wr_cmd_beats, .wr_beat_valid,
    .wr_beat_ready, .wr_beat_data, .wr_done,
    .m_we, .m_waddr, .m_wdata, .m_re, .m_raddr,
    .a_wr_en, .a_wr_idx, .a_wr_data, .a_rd_j,
    .dp_valid, .dp_e_in, .dp_out_valid, .dp_e_out,
    .e_a_en, .e_a_addr, .e_a_rdata, .e_b_we, .e_b_addr, .e_b_wdata,
    .ev_step, .ev_wb_stall
  );

  axi_master #(.AW(ADDR_BITS), .DW(BUS_BITS)) u_axi (
    .clk, .rst_n,
    .rd_cmd_valid, .rd_cmd_ready, .rd_cmd_addr, .rd_cmd_beats, .rd_beat_valid,
    .rd_beat_data, .rd_done,
    .wr_cmd_valid, .wr_cmd_ready, .wr_cmd_addr, .wr_cmd_beats, .wr_beat_valid,
    .wr_beat_ready, .wr_beat_data, .wr_done,
    .err, .err_clr,
    .m_axi_araddr, .m_axi_arlen, .m_axi_arsize, .m_axi_arburst, .m_axi_arvalid,
    .m_axi_arready, .m_axi_rdata, .m_axi_rresp, .m_axi_rlast, .m_axi_rvalid,
    .m_axi_rready,
    .m_axi_awaddr, .m_axi_awlen, .m_axi_awsize, .m_axi_awburst, .m_axi_awvalid,
    .m_axi_awready, .m_axi_wdata, .m_axi_wstrb, .m_axi_wlast, .m_axi_wvalid,
    .m_axi_wready, .m_axi_bresp, .m_axi_bvalid, .m_axi_bready
  );

  for (genvar p = 0; p < P; p++) begin : g_mram
    sdp_ram #(.WIDTH(BUS_BITS), .DEPTH(MDEPTH)) u_m (
      .clk, .we(m_we[p]), .waddr(m_waddr), .wdata(m_wdata),
      .re(m_re), .raddr(m_raddr), .rdata(m_rdata[p])
    );
    assign m_col[p] = m_rdata[p][COL_BITS-1:0];
  end

  alpha_buf #(.K(K), .P(P)) u_alpha (
    .clk, .wr_en(a_wr_en), .wr_idx(a_wr_idx), .wr_data(a_wr_data),
    .rd_j(a_rd_j), .rd_alpha(a_rd_alpha)
  );

  sam_datapath #(.P(P)) u_dp (
    .clk, .rst_n, .in_valid(dp_valid), .m_col, .alpha(a_rd_alpha),
    .e_in(dp_e_in), .out_valid(dp_out_valid), .e_out(dp_e_out)
  );

  for (genvar b = 0; b < E_BANKS; b++) begin : g_eram
    tdp_ram #(.WIDTH(COL_BITS), .DEPTH(N_COLS)) u_e (
      .clk,
      .a_en(e_a_en[b]), .a_we(1'b0), .a_addr(e_a_addr[b]), .a_wdata('0),
      .a_rdata(e_a_rdata[b]),
      .b_en(e_b_we[b]), .b_we(e_b_we[b]), .b_addr(e_b_addr), .b_wdata(e_b_wdata),
      .b_rdata()
    );
  end
endmodule
