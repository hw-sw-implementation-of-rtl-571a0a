// axil_regs: AXI4-Lite slave with the accelerator's control registers.
//
// Software on the host processor programs the operand and result addresses,
// the number of shares, and starts a command by writing CTRL. Registers
// (byte offsets, 32 bits each):
//   0x00 CTRL       W  bit0 LOAD_M, bit1 RUN, bit2 clear error (self-clearing
//                      pulses; a start is ignored while busy)
//   0x04 STATUS     R  bit0 busy, bit1 done (sticky, cleared by a start),
//                      bit2 AXI error
//   0x08 M_ADDR     RW address of M_1..M_k in system memory
//   0x0C ALPHA_ADDR RW address of the first share's packed alpha vector
//   0x10 E_ADDR     RW address where the first result matrix is written
//   0x14 NUM_SHARES RW number of alpha vectors processed by one RUN
//   0x18 CYCLES     R  clock cycles the last command was busy
//   0x1C CONFIG     R  P in [7:0], k in [15:8], E banks in [23:16]
// A write is taken when address and data are both valid; a read answers one
// cycle after the address. Responses are always OKAY. The paper only names
// an AXI slave in front of the control unit; this register map is this
// design's own.
module axil_regs
  import mirith_pkg::*;
#(
  parameter int unsigned P       = 1,
  parameter int unsigned K       = K_MATS,
  parameter int unsigned E_BANKS = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
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
  // to / from the control unit
  output logic                 cmd_load_m,
  output logic                 cmd_run,
  output logic                 err_clr,
  output logic [ADDR_BITS-1:0] m_addr,
  output logic [ADDR_BITS-1:0] alpha_addr,
  output logic [ADDR_BITS-1:0] e_addr,
  output logic [15:0]          num_shares,
  input  logic                 busy,
  input  logic                 done,
  input  logic                 err
);
  logic        done_flag;
  logic [31:0] cycles;

  logic wr_fire;
  assign wr_fire        = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_fire;
  assign s_axil_wready  = wr_fire;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;
  assign s_axil_arready = !s_axil_rvalid;

  // byte-lane merge of a register write
  function automatic logic [31:0] merge(logic [31:0] old, logic [31:0] d, logic [3:0] be);
    for (int b = 0; b < 4; b++)
      if (be[b]) old[8*b +: 8] = d[8*b +: 8];
    return old;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axil_bvalid <= 1'b0;
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
      cmd_load_m    <= 1'b0;
      cmd_run       <= 1'b0;
      err_clr       <= 1'b0;
      m_addr        <= '0;
      alpha_addr    <= '0;
      e_addr        <= '0;
      num_shares    <= '0;
      done_flag     <= 1'b0;
      cycles        <= '0;
    end else begin
      cmd_load_m <= 1'b0;
      cmd_run    <= 1'b0;
      err_clr    <= 1'b0;
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;
      if (wr_fire) begin
        s_axil_bvalid <= 1'b1;
        case (s_axil_awaddr[7:2])
          6'h00: begin
            if (s_axil_wstrb[0] && !busy) begin
              cmd_load_m <= s_axil_wdata[0];
              cmd_run    <= s_axil_wdata[1] && !s_axil_wdata[0];
              if (s_axil_wdata[1:0] != 2'b00) begin
                done_flag <= 1'b0;
                cycles    <= '0;
              end
            end
            if (s_axil_wstrb[0]) err_clr <= s_axil_wdata[2];
          end
          6'h02: m_addr     <= merge(m_addr, s_axil_wdata, s_axil_wstrb);
          6'h03: alpha_addr <= merge(alpha_addr, s_axil_wdata, s_axil_wstrb);
          6'h04: e_addr     <= merge(e_addr, s_axil_wdata, s_axil_wstrb);
          6'h05: num_shares <= 16'(merge(32'(num_shares), s_axil_wdata, s_axil_wstrb));
          default: ;
        endcase
      end
      if (done) done_flag <= 1'b1;
      if (busy) cycles <= cycles + 32'd1;

      if (s_axil_rvalid && s_axil_rready) s_axil_rvalid <= 1'b0;
      if (s_axil_arvalid && s_axil_arready) begin
        s_axil_rvalid <= 1'b1;
        case (s_axil_araddr[7:2])
          6'h01: s_axil_rdata <= {29'd0, err, done_flag, busy};
          6'h02: s_axil_rdata <= m_addr;
          6'h03: s_axil_rdata <= alpha_addr;
          6'h04: s_axil_rdata <= e_addr;
          6'h05: s_axil_rdata <= 32'(num_shares);
          6'h06: s_axil_rdata <= cycles;
          6'h07: s_axil_rdata <= {8'd0, 8'(E_BANKS), 8'(K), 8'(P)};
          default: s_axil_rdata <= '0;
        endcase
      end
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata));
endmodule
