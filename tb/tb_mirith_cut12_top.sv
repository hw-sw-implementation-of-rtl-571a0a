// tb_mirith_cut12_top: end-to-end run of the Cut 1+2 design at its
// default parameters (k = 78, P = 1, four E banks, SHAKE128 rate).
// The host loads M_1..M_k from an address that is not burst-aligned (so
// bursts are cut at 4 KiB boundaries), then runs six shares while memory
// answers writes slowly, so that shares wait for a free E bank. In parallel
// the PRNG absorbs a 200-byte seed (two blocks, padding in a lane of its
// own) and squeezes 45 words (three output blocks): four permutations. All E matrices and PRNG words are compared with
// reference models; the testbench counts how often each mechanism happened
// (burst split at 16 beats, split at 4 KiB, bank wait, write-back
// overlapping computation, PRNG absorb/squeeze permutations, PRNG and
// matrix engine busy at once) and fails if one never did. The compute
// steps per share must be ceil(k/P)*15 = 1170.
module tb_mirith_cut12_top;
  import tb_ref_pkg::*;
  localparam int K = 78, P = 1, SHARES = 6, AW = 6;
  localparam int M_BASE = 32'h0FC8, A_BASE = 32'h4000, E_BASE = 32'h6008;

  logic clk = 0, rst_n = 0;
  logic busy, done, ev_step, ev_wb_stall;
  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic [31:0] wdata = 0, rdata;
  logic [3:0] wstrb = 0;
  logic awready, wready, bvalid, arready, rvalid;
  logic [1:0] bresp, rresp;
  logic [31:0] m_araddr, m_awaddr;
  logic [7:0] m_arlen, m_awlen;
  logic [2:0] m_arsize, m_awsize;
  logic [1:0] m_arburst, m_awburst, m_rresp, m_bresp;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready, m_awvalid, m_awready;
  logic m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic [63:0] m_rdata, m_wdata;
  logic [7:0] m_wstrb;
  int proto_errors, n_ar, n_aw;
  int checks = 0, failures = 0, steps = 0, stalls = 0;
  logic prng_init = 0, prng_in_valid = 0, prng_in_last = 0, prng_out_ready = 0;
  logic [63:0] prng_in_data = '0, prng_out_data;
  logic [3:0] prng_in_bytes = '0;
  logic prng_in_ready, prng_out_valid, prng_perm_busy;
  int n_split16 = 0, n_split4k = 0, n_overlap_wb = 0, n_perm = 0, n_both = 0;
  bit prng_ok = 0;

  mirith_cut12_top dut (
    .clk, .rst_n, .busy, .done,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .m_axi_araddr(m_araddr), .m_axi_arlen(m_arlen), .m_axi_arsize(m_arsize),
    .m_axi_arburst(m_arburst), .m_axi_arvalid(m_arvalid), .m_axi_arready(m_arready),
    .m_axi_rdata(m_rdata), .m_axi_rresp(m_rresp), .m_axi_rlast(m_rlast),
    .m_axi_rvalid(m_rvalid), .m_axi_rready(m_rready),
    .m_axi_awaddr(m_awaddr), .m_axi_awlen(m_awlen), .m_axi_awsize(m_awsize),
    .m_axi_awburst(m_awburst), .m_axi_awvalid(m_awvalid), .m_axi_awready(m_awready),
    .m_axi_wdata(m_wdata), .m_axi_wstrb(m_wstrb), .m_axi_wlast(m_wlast),
    .m_axi_wvalid(m_wvalid), .m_axi_wready(m_wready), .m_axi_bresp(m_bresp),
    .m_axi_bvalid(m_bvalid), .m_axi_bready(m_bready),
    .ev_step, .ev_wb_stall,
    .prng_init, .prng_in_valid, .prng_in_ready, .prng_in_data, .prng_in_last, .prng_in_bytes,
    .prng_out_valid, .prng_out_ready, .prng_out_data, .prng_perm_busy
  );

  axi_mem_model #(.WORDS(8192), .STALL_PCT(30), .B_DELAY(2500)) mem (
    .clk, .rst_n, .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready),
    .awaddr(m_awaddr), .awlen(m_awlen), .awvalid(m_awvalid), .awready(m_awready),
    .wdata(m_wdata), .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready),
    .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready),
    .proto_errors, .n_ar, .n_aw
  );

  always #5 clk = ~clk;
  always @(negedge clk) begin
    if (ev_step) steps++;
    if (ev_wb_stall) stalls++;
    if (ev_step && m_wvalid) n_overlap_wb++;
    if (ev_step && prng_perm_busy) n_both++;
  end
  // address-channel observation: a burst shorter than 16 beats that ends on
  // a 4 KiB boundary was cut there; 16-beat bursts show the length split
  always @(negedge clk) begin
    if (m_arvalid && m_arready) begin
      if (m_arlen == 8'd15) n_split16++;
      if (m_arlen != 8'd15 && ((m_araddr + 32'(m_arlen) * 8 + 8) % 4096 == 0)) n_split4k++;
    end
  end
  logic prng_busy_q = 0;
  always @(negedge clk) begin
    prng_busy_q <= prng_perm_busy;
    if (prng_perm_busy && !prng_busy_q) n_perm++;
  end

  // PRNG stream: absorb a 200-byte seed, squeeze 45 words
  initial begin
    byte unsigned seed[];
    logic [63:0] exp_q[];
    int w;
    seed = new[200];
    foreach (seed[i]) seed[i] = 8'($urandom);
    ref_shake(seed, 168, 8'h1F, 45, exp_q);
    wait (rst_n);
    wait (ev_step);             // start while the matrix engine computes
    @(negedge clk);
    prng_init = 1;
    @(negedge clk); prng_init = 0;
    for (int i = 0; i < 25; i++) begin
      prng_in_valid = 1;
      for (int b = 0; b < 8; b++) prng_in_data[8*b +: 8] = seed[8*i + b];
      prng_in_last = (i == 24);
      prng_in_bytes = 4'd8;
      @(posedge clk);
      while (!prng_in_ready) @(posedge clk);
      @(negedge clk);
    end
    prng_in_valid = 0; prng_in_last = 0;
    w = 0;
    prng_ok = 1;
    while (w < 45) begin
      prng_out_ready = 1;
      @(posedge clk);
      if (prng_out_valid) begin
        checks++;
        if (prng_out_data !== exp_q[w]) begin
          failures++; prng_ok = 0;
          $display("FAIL prng word %0d: %h vs %h", w, prng_out_data, exp_q[w]);
        end
        w++;
      end
      @(negedge clk);
    end
    prng_out_ready = 0;
  end

  task automatic wr(logic [7:0] a, logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; wstrb = 4'hF; awvalid = 1; wvalid = 1; bready = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    @(negedge clk); bready = 0;
  endtask

  task automatic rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1; rready = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk); rready = 0;
  endtask

  task automatic wait_done();
    logic [31:0] st;
    do rd(8'h04, st); while (!st[1]);
  endtask

  logic [3:0] mref [1:K][0:14][0:14];   // [j][z][row]
  logic [3:0] aref [0:SHARES-1][1:K];

  initial begin
    logic [31:0] d;
    int steps0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // operands in memory
    for (int j = 1; j <= K; j++)
      for (int z = 0; z < 15; z++) begin
        logic [63:0] w;
        w = {$urandom, $urandom};          // top nibble is padding
        for (int r = 0; r < 15; r++) mref[j][z][r] = w[4*r +: 4];
        mem.mem[M_BASE/8 + (j-1)*15 + z] = w;
      end
    for (int s = 0; s < SHARES; s++)
      for (int w = 0; w < AW; w++) begin
        logic [63:0] v;
        v = {$urandom, $urandom};
        for (int r = 0; r < 15; r++) begin
          if (s == 3) v[4*r +: 4] = 4'h0;   // share 3: zero vector
          if (w*15 + r < K) aref[s][w*15 + r + 1] = v[4*r +: 4];
        end
        mem.mem[A_BASE/8 + s*AW + w] = v;
      end
    wr(8'h08, M_BASE);
    wr(8'h0C, A_BASE);
    wr(8'h10, E_BASE);
    wr(8'h14, SHARES);
    wr(8'h00, 32'h1);
    wait_done();
    steps0 = steps;
    wr(8'h00, 32'h2);
    wait_done();
    checks++;
    if (steps - steps0 != SHARES * ((K + P - 1) / P) * 15) begin
      failures++; $display("FAIL steps %0d", steps - steps0);
    end
    for (int s = 0; s < SHARES; s++)
      for (int z = 0; z < 15; z++) begin
        logic [63:0] exp_w, got;
        exp_w = '0;
        for (int r = 0; r < 15; r++) begin
          logic [3:0] acc;
          acc = '0;
          for (int j = 1; j <= K; j++) acc ^= ref_gf_mul(aref[s][j], mref[j][z][r]);
          exp_w[4*r +: 4] = acc;
        end
        got = mem.mem[E_BASE/8 + s*15 + z];
        checks++;
        if (got !== exp_w) begin
          failures++;
          if (failures < 10) $display("FAIL share %0d col %0d: %h vs %h", s, z, got, exp_w);
        end
        if (s == 3) begin checks++; if (got !== 64'h0) failures++; end
      end
    rd(8'h18, d);
    $display("RUN cycles=%0d steps=%0d bank_stall_cycles=%0d bursts_rd=%0d bursts_wr=%0d", d, steps - steps0, stalls, n_ar, n_aw);
    $display("MECHANISMS split16=%0d split4k=%0d bank_wait=%0d wb_overlap=%0d prng_perms=%0d prng_and_sam_busy=%0d",
             n_split16, n_split4k, stalls, n_overlap_wb, n_perm, n_both);
    checks += 7;
    if (n_split16 == 0) begin failures++; $display("FAIL no 16-beat split"); end
    if (n_split4k == 0) begin failures++; $display("FAIL no 4 KiB split"); end
    if (stalls == 0) begin failures++; $display("FAIL no bank wait"); end
    if (n_overlap_wb == 0) begin failures++; $display("FAIL no write-back overlap"); end
    if (n_perm != 4) begin failures++; $display("FAIL prng permutations %0d", n_perm); end
    if (n_both == 0) begin failures++; $display("FAIL prng never ran with the matrix engine"); end
    if (!prng_ok) begin failures++; $display("FAIL prng stream incomplete"); end
    checks += 2;
    if (proto_errors != 0) begin failures++; $display("FAIL protocol %0d", proto_errors); end
    rd(8'h04, d);
    if (d[2]) begin failures++; $display("FAIL error bit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
