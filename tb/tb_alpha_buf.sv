// tb_alpha_buf: loads the k = 78 scalars of several random alpha vectors
// (six 60-bit words) into the buffer with P = 4 and reads every window
// alpha_j .. alpha_{j+3}, j = 1..78, including the windows that run past
// k and must read zero.
module tb_alpha_buf;
  localparam int K = 78, P = 4, WORDS = 6;
  logic clk = 0;
  logic wr_en;
  logic [2:0] wr_idx;
  logic [59:0] wr_data;
  logic [6:0] rd_j;
  logic [P-1:0][3:0] rd_alpha;
  logic [3:0] ref_a [K + 1];
  int checks = 0, failures = 0;

  alpha_buf #(.K(K), .P(P)) dut (.clk, .wr_en, .wr_idx, .wr_data, .rd_j, .rd_alpha);
  always #5 clk = ~clk;

  initial begin
    wr_en = 0; wr_idx = 0; wr_data = 0; rd_j = 1;
    for (int v = 0; v < 5; v++) begin
      for (int j = 1; j <= K; j++) ref_a[j] = 4'($urandom);
      for (int w = 0; w < WORDS; w++) begin
        @(negedge clk);
        wr_en = 1; wr_idx = 3'(w);
        wr_data = {$urandom, $urandom};
        for (int r = 0; r < 15; r++)
          if (w * 15 + r < K) wr_data[4*r +: 4] = ref_a[w * 15 + r + 1];
      end
      @(negedge clk);
      wr_en = 0;
      for (int j = 1; j <= K; j++) begin
        rd_j = 7'(j);
        #1;
        for (int p = 0; p < P; p++) begin
          checks++;
          if (rd_alpha[p] !== ((j + p <= K) ? ref_a[j + p] : 4'h0)) begin
            failures++;
            $display("FAIL vec %0d alpha_%0d: got %h", v, j + p, rd_alpha[p]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
