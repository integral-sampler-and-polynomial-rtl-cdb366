// tb_butterfly_pe: checks the three configurations of the butterfly unit:
// PE_ORD (u+v, (u-v)w mod q), PE_MUL (general v*w) and PE_ADD (general
// u+v+cin with carry out), combinational and registered outputs.
module tb_butterfly_pe;
  import lbc_pkg::*;
  localparam int unsigned W = 14, Q = 12289;
  logic clk = 0, rst_n = 0, en;
  pe_mode_t mode;
  logic [W-1:0] ntt_u, ntt_v, ntt_w, samp_u, samp_v, samp_w, hi_d, hi_q;
  logic [2*W-1:0] lo_d, lo_q;
  logic cin, cout;
  int checks = 0, failures = 0;

  butterfly_pe #(.W(W), .Q(Q)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic [W-1:0] eh, input logic [2*W-1:0] el,
                     input logic ec, input string what);
    checks++;
    if (hi_d !== eh || lo_d !== el || cout !== ec) begin
      failures++;
      $display("FAIL %s: hi=%0d lo=%0d c=%0d exp %0d %0d %0d", what, hi_d, lo_d, cout, eh, el, ec);
    end
    @(posedge clk); #1;
    checks++;
    if (hi_q !== eh || lo_q !== el) begin
      failures++;
      $display("FAIL %s reg: hi=%0d lo=%0d", what, hi_q, lo_q);
    end
  endtask

  initial begin
    en = 1; cin = 0; mode = PE_ORD;
    {ntt_u, ntt_v, ntt_w, samp_u, samp_v, samp_w} = '0;
    #12 rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      longint unsigned u, v, w, su, sv, sw;
      u = $urandom_range(Q-1); v = $urandom_range(Q-1); w = $urandom_range(Q-1);
      su = $urandom_range((1<<W)-1); sv = $urandom_range((1<<W)-1); sw = $urandom_range((1<<W)-1);
      ntt_u = W'(u); ntt_v = W'(v); ntt_w = W'(w);
      samp_u = W'(su); samp_v = W'(sv); samp_w = W'(sw);
      cin = 1'($urandom);
      mode = PE_ORD; #1;
      chk(W'((u + v) % Q), (2*W)'(((u + Q - v) % Q) * w % Q), 1'b0, "ord");
      mode = PE_MUL; #1;
      chk('0, (2*W)'(sv * sw), 1'b0, "mul");
      mode = PE_ADD; #1;
      begin
        longint unsigned t;
        t = su + sv + cin;
        chk(W'(t), '0, t[W], "add");
      end
    end
    // registers hold when en = 0
    en = 0; mode = PE_ORD; ntt_u = 1; ntt_v = 2; #1;
    begin
      logic [W-1:0] h;
      h = hi_q;
      @(posedge clk); #1; checks++;
      if (hi_q !== h) begin failures++; $display("FAIL hold"); end
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
