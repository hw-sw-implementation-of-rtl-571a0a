// tb_sdp_ram: random writes and reads on the simple dual-port RAM at its
// default size, against an associative-array model; checks one-cycle read
// latency and read-old-data on a same-address write and read.
module tb_sdp_ram;
  localparam int DEPTH = 1170;
  logic clk = 0;
  logic we, re;
  logic [10:0] waddr, raddr;
  logic [63:0] wdata, rdata;
  logic [63:0] model [DEPTH];
  bit          valid [DEPTH];
  int checks = 0, failures = 0;

  sdp_ram dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    logic [63:0] exp_q;
    bit chk;
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    foreach (valid[i]) valid[i] = 0;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      we = ($urandom_range(1) == 1);
      waddr = 11'($urandom_range(DEPTH - 1));
      wdata = {$urandom, $urandom};
      re = ($urandom_range(1) == 1);
      raddr = (n % 7 == 0) ? waddr : 11'($urandom_range(DEPTH - 1));
      chk = re && valid[raddr];
      exp_q = model[raddr];
      @(posedge clk);
      if (we) begin model[waddr] = wdata; valid[waddr] = 1; end
      #1;
      if (chk) begin
        checks++;
        if (rdata !== exp_q) begin
          failures++;
          $display("FAIL read %0d: got %h expected %h", raddr, rdata, exp_q);
        end
      end
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
