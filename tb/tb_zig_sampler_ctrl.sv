// tb_zig_sampler_ctrl: discrete Ziggurat control with 4 rectangles, 5-bit
// x, 16-bit y and 32-bit k, and a register model of the butterfly array's
// wide multiplier (product two cycles after the operands).  Rectangle and
// E tables are random but well-formed (x_{i-1} <= x_i, flags as bits), so
// that every branch of the acceptance rules is taken; each random word is
// also judged by a software model of the rules, and the hardware must
// emit exactly the model's accepted samples in order.  The branch counts
// are printed and each reachable branch must have occurred.  The model
// redraws x in the same rectangle after an x outside 0..x_i, rejects x = 0
// with b = 1, and uses OR in both sLine shortcuts, as the control does.
module tb_zig_sampler_ctrl;
  localparam int unsigned M = 4, XW = 5, LAM = 16, KW = 32, PW = 40;
  localparam int unsigned IW = 2, RNW = LAM + XW + IW + 2, TW = 2 * XW + LAM + KW + 3;
  localparam int unsigned EW = LAM + 2;
  localparam int unsigned NW = 20000;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, en, tbl_we, tbl_sel, r_valid, r_ready, smp_valid, smp_ready;
  logic [IW+XW-1:0] tbl_addr;
  logic [TW-1:0] tbl_data;
  logic [RNW-1:0] r_word;
  logic [KW-1:0] mul_k;
  logic [XW-1:0] mul_x;
  logic [PW-1:0] mul_p, mp1;
  logic signed [XW:0] smp;

  zig_sampler_ctrl #(.M(M), .XW(XW), .LAM(LAM), .KW(KW), .PW(PW)) dut (.*);
  always #5 clk = ~clk;

  // model of the array: registered partial products, then registered sum
  always_ff @(posedge clk) begin
    mp1   <= PW'(mul_k) * PW'(mul_x);
    mul_p <= mp1;
  end

  int xi [M], xim1 [M];
  longint dy [M], kk [M];
  bit flat [M], below [M], above [M];
  longint et [M][1 << XW];
  logic [RNW-1:0] words [NW];
  int wptr = 0;
  int expq [$];
  int cnt [9];   // 0 rej_x, 1 small, 2 zero, 3 below-acc, 4 above-acc, 5 neither-acc, 6 slow-rej, 7 flat, 8 zero-rej
  int keep = -1; // rectangle kept after an x outside 0..x_i

  function automatic void judge(logic [RNW-1:0] w);
    longint yp, ybar, L, E;
    int x, i;
    bit b, s, acc;
    yp = longint'(w[RNW-1 -: LAM]);
    x  = int'(w[XW+IW+1 -: XW]);
    i  = (keep >= 0) ? keep : int'(w[IW+1 -: IW]);
    b  = w[1]; s = w[0];
    if (x > xi[i]) begin cnt[0]++; keep = i; return; end
    keep = -1;
    if (x != 0 && x <= xim1[i]) begin cnt[1]++; expq.push_back(s ? -x : x); return; end
    if (x == 0 && !b) begin cnt[2]++; expq.push_back(0); return; end
    if (x == 0 &&  b) begin cnt[8]++; return; end
    ybar = yp * dy[i];
    L = flat[i] ? -1 : kk[i] * (xi[i] - x);
    E = et[i][x] * (longint'(1) << LAM);
    if (flat[i]) cnt[7]++;
    if (below[i])      acc = (ybar <= L) || (ybar <= E);
    else if (above[i]) acc = !((ybar >= L) || (ybar > E));
    else               acc = (ybar <= E);
    if (acc) begin
      cnt[below[i] ? 3 : above[i] ? 4 : 5]++;
      expq.push_back(s ? -x : x);
    end else cnt[6]++;
  endfunction

  assign r_word = words[wptr];
  always_ff @(posedge clk) if (r_valid && r_ready) wptr <= wptr + 1;

  initial begin
    int prev;
    prev = 0;
    for (int i = 0; i < M; i++) begin
      xim1[i] = prev;
      xi[i]   = (i == M - 1) ? 30 : prev + $urandom_range(7);
      prev    = xi[i];
      flat[i] = (xi[i] == xim1[i]);
      dy[i]   = $urandom_range(16'hffff);
      kk[i]   = longint'($urandom);
      below[i] = (i <= 1);
      above[i] = (i == M - 1);
      for (int x = 0; x < (1 << XW); x++)
        et[i][x] = longint'($urandom_range(20'h3ffff)) - 20'h1ffff;
    end
    for (int n = 0; n < NW; n++) words[n] = RNW'({$urandom, $urandom});
    en = 0; tbl_we = 0; tbl_sel = 0; tbl_addr = 0; tbl_data = 0; r_valid = 0; smp_ready = 0;
    #12 rst_n = 1;
    for (int i = 0; i < M; i++) begin
      @(negedge clk);
      tbl_we = 1; tbl_sel = 0; tbl_addr = (IW+XW)'(i);
      tbl_data = {XW'(xi[i]), XW'(xim1[i]), LAM'(dy[i]), KW'(kk[i]), flat[i], below[i], above[i]};
      for (int x = 0; x < (1 << XW); x++) begin
        @(negedge clk);
        tbl_sel = 1; tbl_addr = {IW'(i), XW'(x)}; tbl_data = TW'(EW'(et[i][x]));
      end
    end
    @(negedge clk); tbl_we = 0;
    for (int n = 0; n < NW - 1; n++) judge(words[n]);
    en = 1;
    for (int n = 0; n < 3000 && expq.size() > 0; n++) begin
      int e;
      r_valid = ($urandom_range(4) != 0);
      smp_ready = ($urandom_range(4) != 0);
      while (!(smp_valid && smp_ready)) begin
        @(negedge clk);
        r_valid = ($urandom_range(4) != 0);
        smp_ready = ($urandom_range(4) != 0);
      end
      e = expq.pop_front();
      checks++;
      if (int'(smp) != e) begin failures++; if (failures < 10) $display("FAIL sample %0d: %0d exp %0d", n, smp, e); end
      @(negedge clk);
    end
    $display("branches rej_x=%0d small=%0d zero=%0d below=%0d above=%0d neither=%0d slow_rej=%0d flat=%0d zero_rej=%0d",
             cnt[0], cnt[1], cnt[2], cnt[3], cnt[4], cnt[5], cnt[6], cnt[7], cnt[8]);
    // branch 7 (flat rectangle in the sLine test) cannot occur: a flat
    // rectangle has no x in (x_{i-1}, x_i], and x = 0 with b = 1 is rejected
    for (int c = 0; c < 9; c++) begin
      if (c == 7) continue;
      checks++;
      if (cnt[c] == 0) begin failures++; $display("FAIL branch %0d never taken", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
