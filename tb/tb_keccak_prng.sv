// tb_keccak_prng: the sponge as SHAKE128. Checks the published first
// 32 bytes of SHAKE128("") and then random messages of lengths around the
// 168-byte block (0..8 bytes in the last word, messages ending exactly on a
// lane and on a block boundary) against the reference sponge, squeezing 50
// words so that output continues through further permutations. The
// consumer stalls at random.
module tb_keccak_prng;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic init = 0, in_valid = 0, in_last = 0, out_ready = 0;
  logic [63:0] in_data = '0;
  logic [3:0] in_bytes = '0;
  logic in_ready, out_valid, perm_busy;
  logic [63:0] out_data;
  int checks = 0, failures = 0;

  keccak_prng dut (.clk, .rst_n, .init, .in_valid, .in_ready, .in_data, .in_last, .in_bytes,
                   .out_valid, .out_ready, .out_data, .perm_busy);
  always #5 clk = ~clk;

  task automatic hash(input byte unsigned msg[], input int nout, output logic [63:0] got[]);
    int n, w, nw;
    n = msg.size();
    nw = (n + 8) / 8;          // words sent, the last one holding n % 8 bytes (maybe 0)
    if (n % 8 == 0 && n > 0) nw = n / 8;
    @(negedge clk); init = 1;
    @(negedge clk); init = 0;
    for (w = 0; w < nw; w++) begin
      in_valid = 1;
      in_data = '0;
      for (int b = 0; b < 8; b++) if (8*w + b < n) in_data[8*b +: 8] = msg[8*w + b];
      in_data[63:56] ^= (8*w + 8 > n) ? 8'hA5 : 8'h00;   // junk beyond the message must be ignored
      in_last = (w == nw - 1);
      in_bytes = in_last ? 4'(n - 8*w) : 4'd8;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
    got = new[nout];
    w = 0;
    while (w < nout) begin
      out_ready = ($urandom_range(3) != 0);
      @(posedge clk);
      if (out_valid && out_ready) begin got[w] = out_data; w++; end
      @(negedge clk);
    end
    out_ready = 0;
  endtask

  initial begin
    byte unsigned msg[];
    logic [63:0] got[], exp_q[];
    int lens[] = '{0, 1, 7, 8, 9, 16, 100, 160, 167, 168, 169, 175, 176, 336, 400};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // SHAKE128("") = 7f9c2ba4e88f827d 616045507605853e ... (bytes in order)
    msg = new[0];
    hash(msg, 4, got);
    checks += 2;
    if (got[0] !== 64'h7d828fe8a42b9c7f) begin failures++; $display("FAIL empty w0 %h", got[0]); end
    if (got[1] !== 64'h3e85057650456061) begin failures++; $display("FAIL empty w1 %h", got[1]); end
    foreach (lens[k]) begin
      msg = new[lens[k]];
      foreach (msg[i]) msg[i] = 8'($urandom);
      hash(msg, 50, got);
      ref_shake(msg, 168, 8'h1F, 50, exp_q);
      for (int i = 0; i < 50; i++) begin
        checks++;
        if (got[i] !== exp_q[i]) begin
          failures++;
          if (failures < 10) $display("FAIL len %0d word %0d: %h vs %h", lens[k], i, got[i], exp_q[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
