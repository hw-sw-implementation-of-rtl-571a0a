// tb_gf16_mul: exhaustive check of the F_16 product cell against a
// shift-and-reduce reference, plus hand-worked products (t * t^3 = t + 1,
// 1 is neutral, 0 absorbs).
module tb_gf16_mul;
  import tb_ref_pkg::*;
  logic [3:0] a, b, p;
  int checks = 0, failures = 0;

  gf16_mul dut (.a, .b, .p);

  task automatic chk(logic [3:0] exp, string what);
    checks++;
    if (p !== exp) begin
      failures++;
      $display("FAIL %s: %h * %h = %h, expected %h", what, a, b, p, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        a = 4'(i); b = 4'(j); #1;
        chk(ref_gf_mul(a, b), "table");
      end
    a = 4'h2; b = 4'h8; #1; chk(4'h3, "t*t^3");
    a = 4'h8; b = 4'h8; #1; chk(4'hC, "t^3*t^3 = t^6 = t^3+t^2");
    a = 4'h9; b = 4'h1; #1; chk(4'h9, "one");
    a = 4'h0; b = 4'h7; #1; chk(4'h0, "zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
