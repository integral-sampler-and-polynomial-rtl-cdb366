// tb_mod_mul: self-checking test of mod_mul (Barrett) for q = 12289 and,
// in a second instance, q = 4093 at W = 12.  Modular results are compared
// with (a*b) % q, general results with the plain product.
module tb_mod_mul;
  int checks = 0, failures = 0;

  logic [13:0] a1, b1; logic g1; logic [27:0] p1;
  logic [11:0] a2, b2; logic g2; logic [23:0] p2;
  mod_mul #(.W(14), .Q(12289)) dut1 (.a(a1), .b(b1), .gen(g1), .p(p1));
  mod_mul #(.W(12), .Q(4093))  dut2 (.a(a2), .b(b2), .gen(g2), .p(p2));

  initial begin
    for (int i = 0; i < 4000; i++) begin
      longint unsigned x, y, xx, yy;
      x  = (i == 0) ? 12288 : $urandom_range(12288);
      y  = (i == 0) ? 12288 : $urandom_range(12288);
      xx = (i == 0) ? 4092 : $urandom_range(4092);
      yy = (i == 0) ? 4092 : $urandom_range(4092);
      a1 = 14'(x); b1 = 14'(y); a2 = 12'(xx); b2 = 12'(yy);
      g1 = 0; g2 = 0; #1;
      checks += 2;
      if (p1 != 28'((x * y) % 12289)) begin failures++; $display("FAIL q1 %0d*%0d=%0d", x, y, p1); end
      if (p2 != 24'((xx * yy) % 4093)) begin failures++; $display("FAIL q2 %0d*%0d=%0d", xx, yy, p2); end
      x = $urandom_range(16383); y = $urandom_range(16383);
      a1 = 14'(x); b1 = 14'(y); g1 = 1; #1;
      checks++;
      if (p1 != 28'(x * y)) begin failures++; $display("FAIL gen %0d*%0d=%0d", x, y, p1); end
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
