// tb_mod_add: self-checking test of mod_add at q = 12289, W = 14.
// Random and corner operands; modular add/sub are checked against % on
// integers, the general mode against plain W-bit addition with carry.
module tb_mod_add;
  localparam int unsigned W = 14;
  localparam int unsigned Q = 12289;
  logic [W-1:0] a, b, s;
  logic sub, gen, cin, cout;
  int checks = 0, failures = 0;

  mod_add #(.W(W), .Q(Q)) dut (.*);

  task automatic check(input logic [W-1:0] ea, input logic ec, input string what);
    checks++;
    if (s !== ea || cout !== ec) begin
      failures++;
      $display("FAIL %s a=%0d b=%0d sub=%0d gen=%0d cin=%0d: s=%0d c=%0d expected %0d %0d",
               what, a, b, sub, gen, cin, s, cout, ea, ec);
    end
  endtask

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int unsigned x, y, t;
      x = (i < 4) ? ((i & 1) ? Q - 1 : 0) : $urandom_range(Q - 1);
      y = (i < 4) ? ((i & 2) ? Q - 1 : 0) : $urandom_range(Q - 1);
      a = W'(x); b = W'(y); gen = 0; cin = 0;
      sub = 0; #1; check(W'((x + y) % Q), 1'b0, "modadd");
      sub = 1; #1; check(W'((x + Q - y) % Q), 1'b0, "modsub");
      x = $urandom_range((1 << W) - 1); y = $urandom_range((1 << W) - 1);
      a = W'(x); b = W'(y); gen = 1; sub = 0; cin = 1'($urandom);
      #1; t = x + y + cin; check(W'(t), t[W], "genadd");
      sub = 1; cin = 1;
      #1; t = x + ((~y) & ((1 << W) - 1)) + 1; check(W'(t), t[W], "gensub");
    end
    // sums that land exactly on q and q - 1
    for (int i = 0; i < 200; i++) begin
      int unsigned x;
      x = $urandom_range(Q - 1);
      a = W'(x); b = W'(Q - x - ((i & 1) ? 1 : 0)); gen = 0; sub = 0; cin = 0;
      if (x == 0 && !(i & 1)) b = '0;
      #1; check(W'((x + b) % Q), 1'b0, "modadd edge");
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
