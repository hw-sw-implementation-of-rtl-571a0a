// tb_sam_datapath: random steps through the scalar-column datapath with
// P = 3 lanes; each result is compared one cycle later with
// e_in + sum_p alpha_p * M_p worked out element by element with the
// reference F_16 product. Also checks the one-cycle latency of out_valid
// and that a zero scalar leaves the column unchanged.
module tb_sam_datapath;
  import tb_ref_pkg::*;
  localparam int P = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [P-1:0][59:0] m_col;
  logic [P-1:0][3:0]  alpha;
  logic [59:0] e_in, e_out, exp_q;
  logic out_valid;
  int checks = 0, failures = 0;

  sam_datapath #(.P(P)) dut (.clk, .rst_n, .in_valid, .m_col, .alpha, .e_in, .out_valid, .e_out);

  always #5 clk = ~clk;

  function automatic logic [59:0] model(logic [P-1:0][59:0] m, logic [P-1:0][3:0] a, logic [59:0] e);
    logic [59:0] r;
    r = e;
    for (int p = 0; p < P; p++)
      for (int i = 0; i < 15; i++)
        r[4*i +: 4] = r[4*i +: 4] ^ ref_gf_mul(a[p], m[p][4*i +: 4]);
    return r;
  endfunction

  initial begin
    in_valid = 0; m_col = '0; alpha = '0; e_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      in_valid = 1;
      for (int p = 0; p < P; p++) begin
        m_col[p] = {$urandom, $urandom};
        alpha[p] = (n % 10 == 0) ? 4'h0 : 4'($urandom);
      end
      e_in = {$urandom, $urandom};
      exp_q = (n % 10 == 0) ? e_in : model(m_col, alpha, e_in);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || e_out !== exp_q) begin
        failures++;
        $display("FAIL step %0d: got %h valid %b expected %h", n, e_out, out_valid, exp_q);
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL out_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
