// tb_sam_ctrl: the control unit with k = 10, P = 3 (last j-block holds one
// matrix) and two E banks, wired to the real memories and datapath but with
// the AXI master replaced by a simple command responder: read commands are
// answered from a word array with random gaps between beats, write beats
// are accepted with random ready and acknowledged after a random delay,
// sometimes long enough that a share has to wait for a free bank. Checks
// the command addresses and lengths, the per-lane placement of M (through
// the final results), E = sum alpha_j M_j for every share, the number of
// steps (ceil(k/P)*15 per share), single done pulses and that bank waits
// happened.
module tb_sam_ctrl;
  import mirith_pkg::*;
  import tb_ref_pkg::*;
  localparam int K = 10, P = 3, EB = 2, SH = 5, AWD = 1;
  localparam int JB = (K + P - 1) / P, MDEPTH = JB * 15;
  localparam int MAW = $clog2(MDEPTH), JW = $clog2(K + P + 1);
  localparam int M_BASE = 32'h100, A_BASE = 32'h800, E_BASE = 32'hC00;

  logic clk = 0, rst_n = 0;
  logic cmd_load_m = 0, cmd_run = 0;
  logic [15:0] num_shares = SH;
  logic [31:0] m_addr = M_BASE, alpha_addr = A_BASE, e_addr = E_BASE;
  logic busy, done;
  logic rd_cmd_valid, rd_cmd_ready, rd_beat_valid, rd_done;
  logic [31:0] rd_cmd_addr;
  logic [15:0] rd_cmd_beats;
  logic [63:0] rd_beat_data;
  logic wr_cmd_valid, wr_cmd_ready, wr_beat_valid, wr_beat_ready, wr_done;
  logic [31:0] wr_cmd_addr;
  logic [15:0] wr_cmd_beats;
  logic [63:0] wr_beat_data;
  logic [P-1:0] m_we;
  logic [MAW-1:0] m_waddr, m_raddr;
  logic [63:0] m_wdata;
  logic m_re;
  logic [63:0] m_rdata [P];
  col_t [P-1:0] m_col;
  logic a_wr_en;
  logic [0:0] a_wr_idx;
  col_t a_wr_data;
  logic [JW-1:0] a_rd_j;
  gf_t [P-1:0] a_rd_alpha;
  logic dp_valid, dp_out_valid;
  col_t dp_e_in, dp_e_out;
  logic [EB-1:0] e_a_en, e_b_we;
  logic [3:0] e_a_addr [EB];
  col_t e_a_rdata [EB];
  logic [3:0] e_b_addr;
  col_t e_b_wdata;
  logic ev_step, ev_wb_stall;
  int checks = 0, failures = 0, steps = 0, stall_cycles = 0, dones = 0;

  sam_ctrl #(.K(K), .P(P), .E_BANKS(EB)) dut (.*);

  for (genvar p = 0; p < P; p++) begin : g_m
    sdp_ram #(.WIDTH(64), .DEPTH(MDEPTH)) u_m (.clk, .we(m_we[p]), .waddr(m_waddr), .wdata(m_wdata),
      .re(m_re), .raddr(m_raddr), .rdata(m_rdata[p]));
    assign m_col[p] = m_rdata[p][59:0];
  end
  alpha_buf #(.K(K), .P(P)) u_a (.clk, .wr_en(a_wr_en), .wr_idx(a_wr_idx), .wr_data(a_wr_data),
    .rd_j(a_rd_j), .rd_alpha(a_rd_alpha));
  sam_datapath #(.P(P)) u_dp (.clk, .rst_n, .in_valid(dp_valid), .m_col, .alpha(a_rd_alpha),
    .e_in(dp_e_in), .out_valid(dp_out_valid), .e_out(dp_e_out));
  for (genvar b = 0; b < EB; b++) begin : g_e
    tdp_ram #(.WIDTH(60), .DEPTH(15)) u_e (.clk, .a_en(e_a_en[b]), .a_we(1'b0), .a_addr(e_a_addr[b]),
      .a_wdata('0), .a_rdata(e_a_rdata[b]), .b_en(e_b_we[b]), .b_we(e_b_we[b]), .b_addr(e_b_addr),
      .b_wdata(e_b_wdata), .b_rdata());
  end

  always #5 clk = ~clk;

  logic [63:0] tmem [1024];

  // read responder
  initial begin
    rd_cmd_ready = 0; rd_beat_valid = 0; rd_beat_data = 0; rd_done = 0;
    wait (rst_n);
    forever begin
      int a, n;
      @(negedge clk); rd_cmd_ready = 1;
      do @(posedge clk); while (!rd_cmd_valid);
      a = rd_cmd_addr; n = rd_cmd_beats;
      checks++;
      if (!(a == M_BASE && n == K * 15) && !(a >= A_BASE && a < A_BASE + SH * 8 && n == AWD)) begin
        failures++; $display("FAIL read command %h %0d", a, n);
      end
      @(negedge clk); rd_cmd_ready = 0;
      for (int i = 0; i < n; i++) begin
        repeat ($urandom_range(2)) @(negedge clk);
        rd_beat_valid = 1; rd_beat_data = tmem[a / 8 + i];
        @(negedge clk); rd_beat_valid = 0;
      end
      rd_done = 1;
      @(negedge clk); rd_done = 0;
    end
  end

  // write responder
  int wr_cmds = 0;
  initial begin
    wr_cmd_ready = 0; wr_beat_ready = 0; wr_done = 0;
    wait (rst_n);
    forever begin
      int a, n, got;
      @(negedge clk); wr_cmd_ready = 1;
      do @(posedge clk); while (!wr_cmd_valid);
      a = wr_cmd_addr; n = wr_cmd_beats;
      checks++;
      if (a != E_BASE + wr_cmds * 120 || n != 15) begin
        failures++; $display("FAIL write command %h %0d", a, n);
      end
      wr_cmds++;
      @(negedge clk); wr_cmd_ready = 0;
      got = 0;
      while (got < n) begin
        wr_beat_ready = ($urandom_range(1) == 1);
        @(posedge clk);
        if (wr_beat_valid && wr_beat_ready) begin tmem[a / 8 + got] = wr_beat_data; got++; end
        @(negedge clk);
      end
      wr_beat_ready = 0;
      repeat ((wr_cmds % 2 == 1) ? 400 : 3) @(negedge clk);   // slow acknowledgement now and then
      wr_done = 1;
      @(negedge clk); wr_done = 0;
    end
  end

  always @(negedge clk) begin
    if (ev_step) steps++;
    if (ev_wb_stall) stall_cycles++;
    if (done) dones++;
  end

  logic [3:0] mref [1:K][0:14][0:14];
  logic [3:0] aref [0:SH-1][1:K];

  initial begin
    for (int i = 0; i < 1024; i++) tmem[i] = '0;
    for (int j = 1; j <= K; j++)
      for (int z = 0; z < 15; z++) begin
        logic [63:0] w;
        w = {$urandom, $urandom};
        for (int r = 0; r < 15; r++) mref[j][z][r] = w[4*r +: 4];
        tmem[M_BASE/8 + (j-1)*15 + z] = w;
      end
    for (int s = 0; s < SH; s++) begin
      logic [63:0] v;
      v = {$urandom, $urandom};
      for (int r = 0; r < K; r++) aref[s][r+1] = v[4*r +: 4];
      tmem[A_BASE/8 + s] = v;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); cmd_load_m = 1;
    @(negedge clk); cmd_load_m = 0;
    wait (done);
    @(negedge clk); cmd_run = 1;
    @(negedge clk); cmd_run = 0;
    wait (done);
    repeat (2) @(negedge clk);
    checks += 3;
    if (steps != SH * JB * 15) begin failures++; $display("FAIL steps %0d", steps); end
    if (dones != 2) begin failures++; $display("FAIL done pulses %0d", dones); end
    if (stall_cycles == 0) begin failures++; $display("FAIL no bank wait happened"); end
    for (int s = 0; s < SH; s++)
      for (int z = 0; z < 15; z++) begin
        logic [63:0] exp_w;
        exp_w = '0;
        for (int r = 0; r < 15; r++) begin
          logic [3:0] acc;
          acc = '0;
          for (int j = 1; j <= K; j++) acc ^= ref_gf_mul(aref[s][j], mref[j][z][r]);
          exp_w[4*r +: 4] = acc;
        end
        checks++;
        if (tmem[E_BASE/8 + s*15 + z] !== exp_w) begin
          failures++;
          if (failures < 10) $display("FAIL share %0d col %0d: %h vs %h", s, z, tmem[E_BASE/8 + s*15 + z], exp_w);
        end
      end
    $display("steps=%0d bank_wait_cycles=%0d", steps, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
