// sam_ctrl: control unit of the E = sum alpha M accelerator.
//
// Three jobs, started by single-cycle commands from the register interface:
//  * LOAD_M: read the k*15 column words of M_1..M_k (matrix-major, column z
//    of M_j at word (j-1)*15+z) and spread them over the P M-RAM lanes:
//    M_j goes to lane (j-1) mod P at address ((j-1) div P)*15 + z.
//  * RUN: for each of num_shares shares s, read its packed alpha vector
//    (ceil(k/15) words at alpha_addr + s*8*ceil(k/15)) into the alpha
//    buffer, then run the loops "for j in [1,k] step P, for z in [0,14]":
//    one step per cycle reads column z of P matrices, the P scalars and the
//    partial column E_z, and writes E_z back two cycles later. A share's
//    result goes to E bank s mod E_BANKS.
//  * Write-back, concurrent with RUN: each finished E bank is streamed as
//    15 64-bit words to e_addr + s*120 while the next share computes. A
//    share may start only when its bank has been written back.
// busy is high from a command until all its memory traffic is done; done
// pulses once at that point. One computation takes ceil(k/P)*15 cycles
// plus two cycles of pipeline drain.
// The loop nest (j outer, z inner) and the step of P products follow the
// paper; the memory layout, the banking of E into independent result slots
// and the overlapped write-back are this design's choices.
module sam_ctrl
  import mirith_pkg::*;
#(
  parameter int unsigned K       = K_MATS,
  parameter int unsigned P       = 1,
  parameter int unsigned E_BANKS = 4,
  localparam int unsigned JB     = (K + P - 1) / P,          // j-blocks
  localparam int unsigned MDEPTH = JB * N_COLS,               // words per lane
  localparam int unsigned MAW    = (MDEPTH > 1) ? $clog2(MDEPTH) : 1,
  localparam int unsigned AWORDS = (K + M_ROWS - 1) / M_ROWS,
  localparam int unsigned AWW    = (AWORDS > 1) ? $clog2(AWORDS) : 1,
  localparam int unsigned JW     = $clog2(K + P + 1),
  localparam int unsigned EAW    = $clog2(N_COLS),
  localparam int unsigned BW     = (E_BANKS > 1) ? $clog2(E_BANKS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // commands and configuration
  input  logic                 cmd_load_m,
  input  logic                 cmd_run,
  input  logic [ADDR_BITS-1:0] m_addr,
  input  logic [ADDR_BITS-1:0] alpha_addr,
  input  logic [ADDR_BITS-1:0] e_addr,
  input  logic [15:0]          num_shares,
  output logic                 busy,
  output logic                 done,
  // AXI master read engine
  output logic                 rd_cmd_valid,
  input  logic                 rd_cmd_ready,
  output logic [ADDR_BITS-1:0] rd_cmd_addr,
  output logic [15:0]          rd_cmd_beats,
  input  logic                 rd_beat_valid,
  input  logic [BUS_BITS-1:0]  rd_beat_data,
  input  logic                 rd_done,
  // AXI master write engine
  output logic                 wr_cmd_valid,
  input  logic                 wr_cmd_ready,
  output logic [ADDR_BITS-1:0] wr_cmd_addr,
  output logic [15:0]          wr_cmd_beats,
  output logic                 wr_beat_valid,
  input  logic                 wr_beat_ready,
  output logic [BUS_BITS-1:0]  wr_beat_data,
  input  logic                 wr_done,
  // M RAM lanes (shared address, per-lane write enable)
  output logic [P-1:0]         m_we,
  output logic [MAW-1:0]       m_waddr,
  output logic [BUS_BITS-1:0]  m_wdata,
  output logic                 m_re,
  output logic [MAW-1:0]       m_raddr,
  // alpha buffer
  output logic                 a_wr_en,
  output logic [AWW-1:0]       a_wr_idx,
  output col_t                 a_wr_data,
  output logic [JW-1:0]        a_rd_j,
  // datapath
  output logic                 dp_valid,
  output col_t                 dp_e_in,
  input  logic                 dp_out_valid,
  input  col_t                 dp_e_out,
  // E banks: port A reads, port B writes
  output logic [E_BANKS-1:0]   e_a_en,
  output logic [EAW-1:0]       e_a_addr [E_BANKS],
  input  col_t                 e_a_rdata [E_BANKS],
  output logic [E_BANKS-1:0]   e_b_we,
  output logic [EAW-1:0]       e_b_addr,
  output col_t                 e_b_wdata,
  // activity counters for observation
  output logic                 ev_step,      // one computation step issued
  output logic                 ev_wb_stall   // share waiting for a free E bank
);
  typedef enum logic [3:0] {
    S_IDLE, S_LM_CMD, S_LM_DATA, S_WAIT_BANK, S_A_CMD, S_A_DATA,
    S_COMP, S_DRAIN, S_WB_WAIT, S_FINISH
  } state_t;

  typedef enum logic [1:0] {W_IDLE, W_RD, W_DATA, W_DONE} wstate_t;

  state_t  st;
  wstate_t wst;

  logic [15:0]            shares, s_cnt, done_cnt, wb_cnt;
  logic [ADDR_BITS-1:0]   cur_alpha;
  // LOAD_M counters
  logic [$clog2(P+1)-1:0] lane;
  logic [MAW-1:0]         lbase;       // ((j-1) div P)*15
  logic [EAW-1:0]         lz;
  // alpha load
  logic [AWW-1:0]         aw_idx;
  // compute loop
  logic [JW-1:0]          jb_j;        // first j of the block, 1-based
  logic [MAW-1:0]         jbase;       // block * 15
  logic [EAW-1:0]         cz;
  logic [BW-1:0]          cbank;
  logic                   s1_v, s1_first;
  logic [EAW-1:0]         s1_z, s2_z;
  logic [1:0]             drain;
  // write-back
  logic [EAW-1:0]         wz;
  logic [BW-1:0]          wbank;
  logic [ADDR_BITS-1:0]   wb_addr;
  logic                   wb_cmd_sent;

  localparam logic [15:0] M_WORDS = 16'(K * N_COLS);

  // ---------------- main sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      shares    <= '0;
      s_cnt     <= '0;
      done_cnt  <= '0;
      cur_alpha <= '0;
      lane      <= '0;
      lbase     <= '0;
      lz        <= '0;
      aw_idx    <= '0;
      jb_j      <= '0;
      jbase     <= '0;
      cz        <= '0;
      cbank     <= '0;
      drain     <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: begin
          if (cmd_load_m) begin
            lane <= '0; lbase <= '0; lz <= '0;
            st <= S_LM_CMD;
          end else if (cmd_run) begin
            shares    <= num_shares;
            s_cnt     <= '0;
            done_cnt  <= '0;
            cbank     <= '0;
            cur_alpha <= alpha_addr;
            st        <= (num_shares == 0) ? S_FINISH : S_WAIT_BANK;
          end
        end
        S_LM_CMD: if (rd_cmd_ready) st <= S_LM_DATA;
        S_LM_DATA: begin
          if (rd_beat_valid) begin
            if (lz == EAW'(N_COLS - 1)) begin
              lz <= '0;
              if (lane == ($clog2(P+1))'(P - 1)) begin
                lane  <= '0;
                lbase <= lbase + MAW'(N_COLS);
              end else begin
                lane <= lane + 1'b1;
              end
            end else begin
              lz <= lz + 1'b1;
            end
          end
          if (rd_done) st <= S_FINISH;
        end
        S_WAIT_BANK: if (s_cnt - wb_cnt < 16'(E_BANKS)) begin
          aw_idx <= '0;
          st     <= S_A_CMD;
        end
        S_A_CMD: if (rd_cmd_ready) st <= S_A_DATA;
        S_A_DATA: begin
          if (rd_beat_valid) aw_idx <= aw_idx + 1'b1;
          if (rd_done) begin
            jb_j  <= JW'(1);
            jbase <= '0;
            cz    <= '0;
            st    <= S_COMP;
          end
        end
        S_COMP: begin
          if (cz == EAW'(N_COLS - 1)) begin
            cz <= '0;
            if (jb_j + JW'(P) > JW'(K)) begin
              drain <= 2'd2;
              st    <= S_DRAIN;
            end else begin
              jb_j  <= jb_j + JW'(P);
              jbase <= jbase + MAW'(N_COLS);
            end
          end else begin
            cz <= cz + 1'b1;
          end
        end
        S_DRAIN: begin
          drain <= drain - 2'd1;
          if (drain == 2'd1) begin
            done_cnt  <= done_cnt + 16'd1;
            s_cnt     <= s_cnt + 16'd1;
            cur_alpha <= cur_alpha + ADDR_BITS'(AWORDS * (BUS_BITS / 8));
            cbank     <= (cbank == BW'(E_BANKS - 1)) ? '0 : cbank + 1'b1;
            st        <= (s_cnt + 16'd1 == shares) ? S_WB_WAIT : S_WAIT_BANK;
          end
        end
        S_WB_WAIT: if (wb_cnt == shares) st <= S_FINISH;
        S_FINISH: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);

  // read commands (M load or alpha load)
  always_comb begin
    rd_cmd_valid = (st == S_LM_CMD) || (st == S_A_CMD);
    rd_cmd_addr  = (st == S_LM_CMD) ? m_addr : cur_alpha;
    rd_cmd_beats = (st == S_LM_CMD) ? M_WORDS : 16'(AWORDS);
  end

  // M RAM writes during LOAD_M
  always_comb begin
    m_we    = '0;
    if (st == S_LM_DATA && rd_beat_valid) m_we[lane] = 1'b1;
    m_waddr = lbase + MAW'(lz);
    m_wdata = rd_beat_data;
  end

  // alpha writes during alpha load
  assign a_wr_en   = (st == S_A_DATA) && rd_beat_valid;
  assign a_wr_idx  = aw_idx;
  assign a_wr_data = rd_beat_data[COL_BITS-1:0];

  // ---------------- compute pipeline ----------------
  // stage 0: address M and E; stage 1: operands arrive, datapath adds;
  // stage 2: registered sum written to E.
  logic [JW-1:0] s1_j;
  logic [BW-1:0] s1_bank, s2_bank;

  assign m_re    = (st == S_COMP);
  assign m_raddr = jbase + MAW'(cz);
  assign ev_step = (st == S_COMP);
  assign ev_wb_stall = (st == S_WAIT_BANK) && !(s_cnt - wb_cnt < 16'(E_BANKS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v     <= 1'b0;
      s1_first <= 1'b0;
      s1_z     <= '0;
      s1_j     <= '0;
      s1_bank  <= '0;
      s2_z     <= '0;
      s2_bank  <= '0;
    end else begin
      s1_v     <= (st == S_COMP);
      s1_first <= (jb_j == JW'(1));
      s1_z     <= cz;
      s1_j     <= jb_j;
      s1_bank  <= cbank;
      s2_z     <= s1_z;
      s2_bank  <= s1_bank;
    end
  end

  assign a_rd_j   = s1_j;
  assign dp_valid = s1_v;
  assign dp_e_in  = s1_first ? '0 : e_a_rdata[s1_bank];

  always_comb begin
    e_b_we    = '0;
    if (dp_out_valid) e_b_we[s2_bank] = 1'b1;
    e_b_addr  = s2_z;
    e_b_wdata = dp_e_out;
  end

  // port A: the computing bank reads E_z, the write-back bank reads its words
  always_comb begin
    for (int b = 0; b < E_BANKS; b++) begin
      e_a_en[b]   = 1'b0;
      e_a_addr[b] = '0;
      if (st == S_COMP && cbank == BW'(b)) begin
        e_a_en[b]   = 1'b1;
        e_a_addr[b] = cz;
      end else if (wst == W_RD && wbank == BW'(b)) begin
        e_a_en[b]   = 1'b1;
        e_a_addr[b] = wz;
      end
    end
  end

  // ---------------- write-back engine ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst         <= W_IDLE;
      wb_cnt      <= '0;
      wz          <= '0;
      wbank       <= '0;
      wb_addr     <= '0;
      wb_cmd_sent <= 1'b0;
    end else begin
      if (st == S_IDLE && cmd_run) begin
        wb_cnt  <= '0;
        wbank   <= '0;
        wb_addr <= e_addr;
      end
      case (wst)
        W_IDLE: if (wb_cnt != done_cnt && st != S_IDLE) begin
          wz          <= '0;
          wb_cmd_sent <= 1'b0;
          wst         <= W_RD;
        end
        W_RD: begin
          if (wr_cmd_ready && !wb_cmd_sent) wb_cmd_sent <= 1'b1;
          wst <= W_DATA;
        end
        W_DATA: begin
          if (wr_cmd_ready && !wb_cmd_sent) wb_cmd_sent <= 1'b1;
          if (wr_beat_ready) begin
            if (wz == EAW'(N_COLS - 1)) begin
              wst <= W_DONE;
            end else begin
              wz  <= wz + 1'b1;
              wst <= W_RD;
            end
          end
        end
        W_DONE: if (wr_done) begin
          wb_cnt  <= wb_cnt + 16'd1;
          wbank   <= (wbank == BW'(E_BANKS - 1)) ? '0 : wbank + 1'b1;
          wb_addr <= wb_addr + ADDR_BITS'(N_COLS * (BUS_BITS / 8));
          wst     <= W_IDLE;
        end
        default: wst <= W_IDLE;
      endcase
    end
  end

  assign wr_cmd_valid  = (wst == W_RD || wst == W_DATA) && !wb_cmd_sent;
  assign wr_cmd_addr   = wb_addr;
  assign wr_cmd_beats  = 16'(N_COLS);
  assign wr_beat_valid = (wst == W_DATA);
  assign wr_beat_data  = BUS_BITS'(e_a_rdata[wbank]);

  // the compute pipeline must never write the bank being written back
  a_bank_free: assert property (@(posedge clk) disable iff (!rst_n)
    (st == S_COMP && wst != W_IDLE) |-> cbank != wbank);
endmodule
