// tb_axil_regs: AXI4-Lite accesses to the register block: read back of the
// address and share-count registers (with byte strobes), the CONFIG word,
// start pulses from CTRL and their suppression while busy, the sticky done
// bit and its clearing by a new start, the busy-cycle counter, the error
// bit and the error-clear pulse.
module tb_axil_regs;
  logic clk = 0, rst_n = 0;
  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic [31:0] wdata = 0, rdata;
  logic [3:0] wstrb = 0;
  logic awready, wready, bvalid, arready, rvalid;
  logic [1:0] bresp, rresp;
  logic cmd_load_m, cmd_run, err_clr;
  logic [31:0] m_addr, alpha_addr, e_addr;
  logic [15:0] num_shares;
  logic busy = 0, done = 0, err = 0;
  int checks = 0, failures = 0;
  int n_load = 0, n_run = 0, n_clr = 0;

  axil_regs #(.P(4), .K(78), .E_BANKS(4)) dut (
    .clk, .rst_n,
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready),
    .cmd_load_m, .cmd_run, .err_clr, .m_addr, .alpha_addr, .e_addr, .num_shares,
    .busy, .done, .err
  );
  always #5 clk = ~clk;
  always @(negedge clk) begin
    if (cmd_load_m) n_load++;
    if (cmd_run) n_run++;
    if (err_clr) n_clr++;
  end

  task automatic wr(logic [7:0] a, logic [31:0] d, logic [3:0] s = 4'hF);
    @(negedge clk);
    awaddr = a; wdata = d; wstrb = s; awvalid = 1; wvalid = 1; bready = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    @(negedge clk); bready = 0;
  endtask

  task automatic rd(logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    repeat ($urandom_range(3)) @(negedge clk);   // consumer slow to accept
    rready = 1;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk); rready = 0;
  endtask

  task automatic expect_eq(string what, logic [31:0] got, logic [31:0] exp_q);
    checks++;
    if (got !== exp_q) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp_q); end
  endtask

  initial begin
    logic [31:0] d;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wr(8'h08, 32'h0001_0000);
    wr(8'h0C, 32'h0002_0040);
    wr(8'h10, 32'h0003_0080);
    wr(8'h14, 32'd6);
    wr(8'h0C, 32'hAAAA_BBCC, 4'b0001);
    rd(8'h08, d); expect_eq("M_ADDR", d, 32'h0001_0000);
    rd(8'h0C, d); expect_eq("ALPHA_ADDR strobe", d, 32'h0002_00CC);
    rd(8'h10, d); expect_eq("E_ADDR", d, 32'h0003_0080);
    rd(8'h14, d); expect_eq("NUM_SHARES", d, 32'd6);
    expect_eq("ports", {m_addr[15:0], 16'(num_shares)}, {16'h0000, 16'd6});
    rd(8'h1C, d); expect_eq("CONFIG", d, {8'd0, 8'd4, 8'd78, 8'd4});
    wr(8'h00, 32'h1);
    expect_eq("load pulse", 32'(n_load), 32'd1);
    // simulate a busy accelerator for 10 cycles then done
    @(negedge clk); busy = 1;
    wr(8'h00, 32'h2);                       // ignored while busy
    expect_eq("run ignored while busy", 32'(n_run), 32'd0);
    rd(8'h04, d); expect_eq("STATUS busy", d & 32'h3, 32'h1);
    repeat (10) @(negedge clk);
    busy = 0; done = 1;
    @(negedge clk); done = 0;
    rd(8'h04, d); expect_eq("STATUS done", d & 32'h3, 32'h2);
    rd(8'h18, d);
    checks++;
    if (d < 10 || d > 40) begin failures++; $display("FAIL CYCLES %0d", d); end
    wr(8'h00, 32'h2);
    expect_eq("run pulse", 32'(n_run), 32'd1);
    rd(8'h04, d); expect_eq("done cleared", d & 32'h2, 32'h0);
    err = 1;
    rd(8'h04, d); expect_eq("STATUS err", d & 32'h4, 32'h4);
    wr(8'h00, 32'h4);
    expect_eq("err clear pulse", 32'(n_clr), 32'd1);
    expect_eq("no extra starts", 32'(n_load + n_run), 32'd2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
