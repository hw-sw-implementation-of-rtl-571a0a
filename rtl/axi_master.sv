// axi_master: AXI4 burst master of the accelerator (64-bit data).
//
// Two independent engines share one AXI4 port, one per AXI direction, so
// loading operands and writing results back can overlap.
//  * Read engine: a command (address, number of 64-bit beats) is split into
//    INCR bursts of at most MAX_BURST beats, one burst in flight at a time.
//    Every received beat is handed out on rd_beat_valid/rd_beat_data; the
//    consumer must take it in that cycle. rd_done pulses after the last beat.
//  * Write engine: a command (address, beats) is split the same way; beat
//    data come from the wr_beat_valid/ready stream, and wr_done pulses after
//    the last write response.
// A burst is also cut short where it would cross a 4 KiB boundary, as AXI
// requires. Addresses must be aligned to the 8-byte beat; an assertion
// checks this. Any non-OKAY response sets the
// sticky err flag (cleared by err_clr). The paper names an AXI master of
// 64-bit width; the engine split, burst length and lack of IDs are this
// design's choices.
module axi_master #(
  parameter int unsigned AW        = 32,
  parameter int unsigned DW        = 64,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  // read command and beat stream
  input  logic          rd_cmd_valid,
  output logic          rd_cmd_ready,
  input  logic [AW-1:0] rd_cmd_addr,
  input  logic [15:0]   rd_cmd_beats,
  output logic          rd_beat_valid,
  output logic [DW-1:0] rd_beat_data,
  output logic          rd_done,
  // write command and beat stream
  input  logic          wr_cmd_valid,
  output logic          wr_cmd_ready,
  input  logic [AW-1:0] wr_cmd_addr,
  input  logic [15:0]   wr_cmd_beats,
  input  logic          wr_beat_valid,
  output logic          wr_beat_ready,
  input  logic [DW-1:0] wr_beat_data,
  output logic          wr_done,
  output logic          err,
  input  logic          err_clr,
  // AXI4 read address / data
  output logic [AW-1:0] m_axi_araddr,
  output logic [7:0]    m_axi_arlen,
  output logic [2:0]    m_axi_arsize,
  output logic [1:0]    m_axi_arburst,
  output logic          m_axi_arvalid,
  input  logic          m_axi_arready,
  input  logic [DW-1:0] m_axi_rdata,
  input  logic [1:0]    m_axi_rresp,
  input  logic          m_axi_rlast,
  input  logic          m_axi_rvalid,
  output logic          m_axi_rready,
  // AXI4 write address / data / response
  output logic [AW-1:0] m_axi_awaddr,
  output logic [7:0]    m_axi_awlen,
  output logic [2:0]    m_axi_awsize,
  output logic [1:0]    m_axi_awburst,
  output logic          m_axi_awvalid,
  input  logic          m_axi_awready,
  output logic [DW-1:0] m_axi_wdata,
  output logic [DW/8-1:0] m_axi_wstrb,
  output logic          m_axi_wlast,
  output logic          m_axi_wvalid,
  input  logic          m_axi_wready,
  input  logic [1:0]    m_axi_bresp,
  input  logic          m_axi_bvalid,
  output logic          m_axi_bready
);
  localparam int unsigned BYTES = DW / 8;

  typedef enum logic [1:0] {E_IDLE, E_ADDR, E_DATA, E_RESP} eng_t;

  // burst length (AxLEN) for the remaining beat count at this address:
  // at most MAX_BURST beats and never across a 4 KiB boundary
  function automatic logic [7:0] burst_len(logic [15:0] left, logic [AW-1:0] addr);
    logic [15:0] n, to_4k;
    to_4k = 16'((4096 - 32'(addr[11:0])) / BYTES);
    n = (left > 16'(MAX_BURST)) ? 16'(MAX_BURST) : left;
    if (n > to_4k) n = to_4k;
    return 8'(n - 16'd1);
  endfunction

  // ---------------- read engine ----------------
  eng_t        rs;
  logic [15:0] r_left;
  logic [AW-1:0] r_addr;

  assign rd_cmd_ready  = (rs == E_IDLE);
  assign m_axi_arvalid = (rs == E_ADDR);
  assign m_axi_araddr  = r_addr;
  assign m_axi_arlen   = burst_len(r_left, r_addr);
  assign m_axi_arsize  = 3'($clog2(BYTES));
  assign m_axi_arburst = 2'b01;
  assign m_axi_rready  = (rs == E_DATA);
  assign rd_beat_valid = m_axi_rvalid && m_axi_rready;
  assign rd_beat_data  = m_axi_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs      <= E_IDLE;
      r_left  <= '0;
      r_addr  <= '0;
      rd_done <= 1'b0;
    end else begin
      rd_done <= 1'b0;
      case (rs)
        E_IDLE: if (rd_cmd_valid && rd_cmd_beats != 0) begin
          r_addr <= rd_cmd_addr;
          r_left <= rd_cmd_beats;
          rs     <= E_ADDR;
        end
        E_ADDR: if (m_axi_arready) begin
          r_addr <= r_addr + AW'((32'(m_axi_arlen) + 1) * BYTES);
          rs     <= E_DATA;
        end
        E_DATA: if (m_axi_rvalid) begin
          r_left <= r_left - 16'd1;
          if (m_axi_rlast) begin
            if (r_left == 16'd1) begin
              rs      <= E_IDLE;
              rd_done <= 1'b1;
            end else begin
              rs <= E_ADDR;
            end
          end
        end
        default: rs <= E_IDLE;
      endcase
    end
  end

  // ---------------- write engine ----------------
  eng_t        ws;
  logic [15:0] w_left;
  logic [AW-1:0] w_addr;
  logic [7:0]  w_cnt;   // beats of the current burst already sent
  logic [7:0]  w_len;   // awlen of the current burst

  assign wr_cmd_ready  = (ws == E_IDLE);
  assign m_axi_awvalid = (ws == E_ADDR);
  assign m_axi_awaddr  = w_addr;
  assign m_axi_awlen   = burst_len(w_left, w_addr);
  assign m_axi_awsize  = 3'($clog2(BYTES));
  assign m_axi_awburst = 2'b01;
  assign m_axi_wvalid  = (ws == E_DATA) && wr_beat_valid;
  assign wr_beat_ready = (ws == E_DATA) && m_axi_wready;
  assign m_axi_wdata   = wr_beat_data;
  assign m_axi_wstrb   = '1;
  assign m_axi_wlast   = (w_cnt == w_len);
  assign m_axi_bready  = (ws == E_RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws      <= E_IDLE;
      w_left  <= '0;
      w_addr  <= '0;
      w_cnt   <= '0;
      w_len   <= '0;
      wr_done <= 1'b0;
    end else begin
      wr_done <= 1'b0;
      case (ws)
        E_IDLE: if (wr_cmd_valid && wr_cmd_beats != 0) begin
          w_addr <= wr_cmd_addr;
          w_left <= wr_cmd_beats;
          ws     <= E_ADDR;
        end
        E_ADDR: if (m_axi_awready) begin
          w_addr <= w_addr + AW'((32'(m_axi_awlen) + 1) * BYTES);
          w_len  <= m_axi_awlen;
          w_cnt  <= '0;
          ws     <= E_DATA;
        end
        E_DATA: if (m_axi_wvalid && m_axi_wready) begin
          w_left <= w_left - 16'd1;
          w_cnt  <= w_cnt + 8'd1;
          if (m_axi_wlast) ws <= E_RESP;
        end
        E_RESP: if (m_axi_bvalid) begin
          if (w_left == 16'd0) begin
            ws      <= E_IDLE;
            wr_done <= 1'b1;
          end else begin
            ws <= E_ADDR;
          end
        end
        default: ws <= E_IDLE;
      endcase
    end
  end

  // ---------------- response errors ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) err <= 1'b0;
    else if (err_clr) err <= 1'b0;
    else if ((m_axi_rvalid && m_axi_rready && m_axi_rresp != 2'b00) ||
             (m_axi_bvalid && m_axi_bready && m_axi_bresp != 2'b00)) err <= 1'b1;
  end

  // ---------------- protocol rules ----------------
  a_rd_align: assert property (@(posedge clk) disable iff (!rst_n)
    rd_cmd_valid && rd_cmd_ready |-> rd_cmd_addr % BYTES == 0);
  a_wr_align: assert property (@(posedge clk) disable iff (!rst_n)
    wr_cmd_valid && wr_cmd_ready |-> wr_cmd_addr % BYTES == 0);
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_arvalid && !m_axi_arready |=> m_axi_arvalid && $stable(m_axi_araddr));
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_axi_awvalid && !m_axi_awready |=> m_axi_awvalid && $stable(m_axi_awaddr));
endmodule
