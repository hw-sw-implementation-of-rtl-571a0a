// tb_tdp_ram: both ports of the true dual-port RAM write and read at
// random (never the same address written by both in one cycle), against a
// model; checks one-cycle latency, read-first behaviour on each port and
// that data written on one port are read on the other.
module tb_tdp_ram;
  localparam int DEPTH = 15;
  logic clk = 0;
  logic a_en, a_we, b_en, b_we;
  logic [3:0] a_addr, b_addr;
  logic [59:0] a_wdata, b_wdata, a_rdata, b_rdata;
  logic [59:0] model [DEPTH];
  int checks = 0, failures = 0;

  tdp_ram dut (.clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
               .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);
  always #5 clk = ~clk;

  initial begin
    logic [59:0] ea, eb;
    bit ca, cb;
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    // initialise through port A
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = 4'(i); a_wdata = {$urandom, $urandom};
      model[i] = a_wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      a_en = ($urandom_range(3) != 0); a_we = ($urandom_range(1) == 1);
      b_en = ($urandom_range(3) != 0); b_we = ($urandom_range(1) == 1);
      a_addr = 4'($urandom_range(DEPTH - 1));
      b_addr = 4'($urandom_range(DEPTH - 1));
      if (a_en && a_we && b_en && b_we && a_addr == b_addr) b_we = 0;
      a_wdata = {$urandom, $urandom};
      b_wdata = {$urandom, $urandom};
      ca = a_en; cb = b_en;
      ea = model[a_addr]; eb = model[b_addr];
      // reading the address the other port writes this cycle: old data not guaranteed
      if (a_en && b_en && b_we && a_addr == b_addr && !a_we) ca = 0;
      if (a_en && b_en && a_we && a_addr == b_addr && !b_we) cb = 0;
      @(posedge clk);
      if (a_en && a_we) model[a_addr] = a_wdata;
      if (b_en && b_we) model[b_addr] = b_wdata;
      #1;
      if (ca) begin checks++; if (a_rdata !== ea) begin failures++; $display("FAIL A %0d", a_addr); end end
      if (cb) begin checks++; if (b_rdata !== eb) begin failures++; $display("FAIL B %0d", b_addr); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
