// tb_axi_master: the AXI4 master against a stalling memory model. Read
// commands of 1 to 70 beats at addresses chosen to sit just below 4 KiB
// boundaries check that bursts are split at 16 beats and at the boundary,
// and that every beat arrives in order with the memory's data. Write
// commands do the same in the other direction, with the beat source
// stalling at random; the written memory is compared word by word. The
// model counts any protocol violation as a failure.
module tb_axi_master;
  logic clk = 0, rst_n = 0;
  logic rd_cmd_valid = 0, rd_cmd_ready, rd_beat_valid, rd_done;
  logic [31:0] rd_cmd_addr = 0;
  logic [15:0] rd_cmd_beats = 0;
  logic [63:0] rd_beat_data;
  logic wr_cmd_valid = 0, wr_cmd_ready, wr_beat_valid = 0, wr_beat_ready, wr_done;
  logic [31:0] wr_cmd_addr = 0;
  logic [15:0] wr_cmd_beats = 0;
  logic [63:0] wr_beat_data = 0;
  logic err, err_clr = 0;
  logic [31:0] araddr, awaddr;
  logic [7:0] arlen, awlen;
  logic [2:0] arsize, awsize;
  logic [1:0] arburst, awburst, rresp, bresp;
  logic arvalid, arready, rlast, rvalid, rready, awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [63:0] rdata, wdata;
  logic [7:0] wstrb;
  int proto_errors, n_ar, n_aw;
  int checks = 0, failures = 0;

  axi_master dut (
    .clk, .rst_n,
    .rd_cmd_valid, .rd_cmd_ready, .rd_cmd_addr, .rd_cmd_beats, .rd_beat_valid, .rd_beat_data, .rd_done,
    .wr_cmd_valid, .wr_cmd_ready, .wr_cmd_addr, .wr_cmd_beats, .wr_beat_valid, .wr_beat_ready,
    .wr_beat_data, .wr_done, .err, .err_clr,
    .m_axi_araddr(araddr), .m_axi_arlen(arlen), .m_axi_arsize(arsize), .m_axi_arburst(arburst),
    .m_axi_arvalid(arvalid), .m_axi_arready(arready), .m_axi_rdata(rdata), .m_axi_rresp(rresp),
    .m_axi_rlast(rlast), .m_axi_rvalid(rvalid), .m_axi_rready(rready),
    .m_axi_awaddr(awaddr), .m_axi_awlen(awlen), .m_axi_awsize(awsize), .m_axi_awburst(awburst),
    .m_axi_awvalid(awvalid), .m_axi_awready(awready), .m_axi_wdata(wdata), .m_axi_wstrb(wstrb),
    .m_axi_wlast(wlast), .m_axi_wvalid(wvalid), .m_axi_wready(wready), .m_axi_bresp(bresp),
    .m_axi_bvalid(bvalid), .m_axi_bready(bready)
  );

  axi_mem_model #(.WORDS(4096)) mem (
    .clk, .rst_n, .araddr, .arlen, .arvalid, .arready, .rdata, .rresp, .rlast, .rvalid, .rready,
    .awaddr, .awlen, .awvalid, .awready, .wdata, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready,
    .proto_errors, .n_ar, .n_aw
  );

  always #5 clk = ~clk;

  // expected number of bursts for a transfer
  function automatic int nbursts(int a, int beats);
    int n = 0;
    while (beats > 0) begin
      int b = (beats > 16) ? 16 : beats;
      int to4k = (4096 - (a % 4096)) / 8;
      if (b > to4k) b = to4k;
      a += 8 * b; beats -= b; n++;
    end
    return n;
  endfunction

  initial begin
    int addrs[] = '{0, 4096 - 8*5, 8192 - 8, 4096 + 128, 12288 - 8*16};
    int lens[]  = '{1, 16, 17, 70, 33};
    for (int i = 0; i < 4096; i++) mem.mem[i] = {$urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (addrs[k]) begin
      int got, ar0;
      ar0 = n_ar;
      @(negedge clk);
      rd_cmd_valid = 1; rd_cmd_addr = addrs[k]; rd_cmd_beats = 16'(lens[k]);
      @(negedge clk); rd_cmd_valid = 0;
      got = 0;
      while (!rd_done) begin
        @(posedge clk); #1;
        if (rd_beat_valid) begin
          checks++;
          if (rd_beat_data !== mem.mem[(addrs[k] / 8 + got) % 4096]) begin
            failures++; $display("FAIL read %0d beat %0d", k, got);
          end
          got++;
        end
      end
      checks += 2;
      if (got != lens[k]) begin failures++; $display("FAIL read %0d beats %0d", k, got); end
      if (n_ar - ar0 != nbursts(addrs[k], lens[k])) begin
        failures++; $display("FAIL read %0d bursts %0d", k, n_ar - ar0);
      end
    end
    foreach (addrs[k]) begin
      logic [63:0] src [];
      int sent, aw0;
      src = new[lens[k]];
      foreach (src[i]) src[i] = {$urandom, $urandom};
      aw0 = n_aw;
      @(negedge clk);
      wr_cmd_valid = 1; wr_cmd_beats = 16'(lens[k]);
      wr_cmd_addr = 32'(addrs[k]);
      @(negedge clk); wr_cmd_valid = 0;
      sent = 0;
      while (!wr_done) begin
        wr_beat_valid = (sent < lens[k]) && ($urandom_range(3) != 0);
        wr_beat_data = (sent < lens[k]) ? src[sent] : '0;
        @(posedge clk);
        if (wr_beat_valid && wr_beat_ready) sent++;
        @(negedge clk);
        // hold valid once raised until taken
        while (wr_beat_valid && !wr_beat_ready && sent < lens[k]) begin
          @(posedge clk);
          if (wr_beat_ready) sent++;
          @(negedge clk);
        end
        wr_beat_valid = 0;
      end
      for (int i = 0; i < lens[k]; i++) begin
        checks++;
        if (mem.mem[(addrs[k] / 8 + i) % 4096] !== src[i]) begin
          failures++; $display("FAIL write %0d word %0d", k, i);
        end
      end
      checks++;
      if (n_aw - aw0 != nbursts(addrs[k], lens[k])) begin
        failures++; $display("FAIL write %0d bursts %0d", k, n_aw - aw0);
      end
    end
    checks += 2;
    if (proto_errors != 0) begin failures++; $display("FAIL protocol errors %0d", proto_errors); end
    if (err) begin failures++; $display("FAIL err flag"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
