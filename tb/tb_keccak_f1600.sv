// tb_keccak_f1600: permutes the all-zero state (published first lanes
// F1258F7940E1DDE7, 84D5CCF933C0478A) and then random states loaded through
// the load port, comparing all 25 lanes with the compact reference model;
// checks that done comes exactly 24 cycles after start and that busy is
// high in between.
module tb_keccak_f1600;
  import mirith_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic load = 0, start = 0, busy, done;
  kstate_t state_in, state_out;
  lanes_t ref_st;
  int checks = 0, failures = 0;

  keccak_f1600 dut (.clk, .rst_n, .load, .state_in, .start, .state_out, .busy, .done);
  always #5 clk = ~clk;

  task automatic run_perm(output int cycles);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc;
    state_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_perm(cyc);
    checks += 3;
    if (state_out[0] !== 64'hF1258F7940E1DDE7) begin failures++; $display("FAIL lane0 %h", state_out[0]); end
    if (state_out[1] !== 64'h84D5CCF933C0478A) begin failures++; $display("FAIL lane1 %h", state_out[1]); end
    if (cyc != 24) begin failures++; $display("FAIL latency %0d", cyc); end
    for (int n = 0; n < 20; n++) begin
      @(negedge clk);
      for (int i = 0; i < 25; i++) begin
        state_in[i] = {$urandom, $urandom};
        ref_st[i] = state_in[i];
      end
      load = 1;
      @(negedge clk); load = 0;
      ref_keccakf(ref_st);
      run_perm(cyc);
      checks++;
      if (cyc != 24) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int i = 0; i < 25; i++) begin
        checks++;
        if (state_out[i] !== ref_st[i]) begin
          failures++;
          $display("FAIL state %0d lane %0d: %h vs %h", n, i, state_out[i], ref_st[i]);
        end
      end
    end
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
