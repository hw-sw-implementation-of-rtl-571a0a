// tb_parallel_lanes: the matrix engine at the lane counts used by the larger
// configurations, P = 4, 8 and 16 scalar-column products per cycle, with
// k = 78. Three independent copies of sam_lane_run operate side by side,
// each with its own memory, and each checks every result matrix and its
// step count of ceil(k/P)*15 per share (300, 150 and 75). This testbench
// then checks that the measured run time falls as P grows, and prints the
// cycles per share for each P.
module tb_parallel_lanes;
  localparam int SHARES = 5;
  logic fin4, fin8, fin16;
  int c4, c8, c16, f4, f8, f16, cy4, cy8, cy16;
  int checks = 0, failures = 0;
  logic clk = 0;

  sam_lane_run #(.P(4),  .SHARES(SHARES)) run4  (.fin(fin4),  .checks(c4),  .failures(f4),  .run_cycles(cy4));
  sam_lane_run #(.P(8),  .SHARES(SHARES)) run8  (.fin(fin8),  .checks(c8),  .failures(f8),  .run_cycles(cy8));
  sam_lane_run #(.P(16), .SHARES(SHARES)) run16 (.fin(fin16), .checks(c16), .failures(f16), .run_cycles(cy16));

  always #5 clk = ~clk;

  initial begin
    @(negedge clk);
    while (!(fin4 && fin8 && fin16)) @(negedge clk);
    checks = c4 + c8 + c16;
    failures = f4 + f8 + f16;
    $display("cycles per share: P=4 %0d, P=8 %0d, P=16 %0d",
             cy4 / SHARES, cy8 / SHARES, cy16 / SHARES);
    checks += 2;
    if (!(cy8 < cy4)) begin failures++; $display("FAIL P=8 not faster than P=4"); end
    if (!(cy16 < cy8)) begin failures++; $display("FAIL P=16 not faster than P=8"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks + c4 + c8 + c16, failures + f4 + f8 + f16);
    $finish;
  end
endmodule
