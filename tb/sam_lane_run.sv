// sam_lane_run: one complete run of the matrix engine at a given lane count
// P, used by tb_parallel_lanes. It instantiates sum_alpha_m with k = 78 and
// the chosen P next to its own stalling AXI memory, loads random matrices
// M_1..M_k, runs SHARES shares (share 3 has an all-zero alpha vector) and
// compares every result column with sum_j alpha_j M_j computed here. It also
// counts computation steps against ceil(k/P)*15 per share, reads back the
// CONFIG register and checks that the memory saw no protocol error. When it
// is finished it raises `fin` and leaves its counts and the CYCLES register
// value on its outputs.
module sam_lane_run #(
  parameter int P = 4,
  parameter int SHARES = 5
) (
  output logic fin,
  output int   checks,
  output int   failures,
  output int   run_cycles
);
  import tb_ref_pkg::*;
  localparam int K = 78, AW = 6;
  localparam int M_BASE = 32'h0000, A_BASE = 32'h4000, E_BASE = 32'h6008;

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
  int steps = 0, stalls = 0;

  sum_alpha_m #(.K(K), .P(P)) dut (
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
    .ev_step, .ev_wb_stall
  );

  axi_mem_model #(.WORDS(8192), .STALL_PCT(30)) mem (
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
    fin = 0; checks = 0; failures = 0; run_cycles = 0;
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
          if (failures < 10) $display("FAIL P=%0d share %0d col %0d: %h vs %h", P, s, z, got, exp_w);
        end
        if (s == 3) begin checks++; if (got !== 64'h0) failures++; end
      end
    rd(8'h18, d);
    run_cycles = d;
    $display("P=%0d: RUN cycles=%0d steps=%0d (%0d per share)", P, d, steps - steps0,
             (steps - steps0) / SHARES);
    checks += 3;
    if (proto_errors != 0) begin failures++; $display("FAIL protocol %0d", proto_errors); end
    rd(8'h04, d);
    if (d[2]) begin failures++; $display("FAIL error bit"); end
    rd(8'h1C, d);
    if (d[7:0] != P || d[15:8] != K) begin failures++; $display("FAIL CONFIG %h", d); end
    fin = 1;
  end

endmodule
