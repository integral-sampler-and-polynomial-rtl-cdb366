// tb_lbc_full: end-to-end test of lbc_top at the design's default size:
// q = 12289, n = 512, Knuth-Yao table 1936 x 64 bits, Ziggurat with 8
// rectangles of 11-bit x, 32-bit y and 64-bit k.  The top is instantiated
// without parameter overrides.  Four operations b = a*s + e are run: both
// samplers with sigma = 215.73 (the BLISS set), then both with sigma = 3.33
// (the LP sampler on the same build).  For each sigma the tables are
// computed here: the Knuth-Yao bit matrix from the normalised Gaussian, and
// an equal-area Ziggurat partition (see load_zig).  Each result is checked
// against a schoolbook negacyclic product.  The samples' standard deviation
// must lie within 10 % of sigma, and their magnitude within the table.  The
// mechanisms are counted as in tb_lbc_top: sampler modes, sLine uses,
// forward/inverse transforms, random-source stalls and Ziggurat rejections.
// Random sources stall one cycle in eight.
module tb_lbc_full;
  localparam int unsigned N      = 512;
  localparam int unsigned NROW   = 1936;
  localparam int unsigned LAMBDA = 64;
  localparam int unsigned M      = 8;
  localparam int unsigned XW     = 11;
  localparam int unsigned LAM    = 32;
  localparam int unsigned KW     = 64;
  import lbc_pkg::*;
  localparam int unsigned W = 14, Q = 12289;
  localparam int unsigned AW = $clog2(N);
  localparam int unsigned IW = (M > 1) ? $clog2(M) : 1;
  localparam int unsigned RNW = LAM + XW + IW + 2;
  localparam int unsigned TW = 2 * XW + LAM + KW + 3;
  localparam int unsigned EW = LAM + 2;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, go, busy, done, host_we;
  samp_sel_t samp_sel;
  logic [AW-1:0] host_addr;
  logic [W-1:0] host_wdata, host_rdata;
  logic rbit_valid, rbit, rbit_ready, rword_valid, rword_ready;
  logic [RNW-1:0] rword;
  logic ky_clr, ky_we, ky_bit;
  logic [$clog2(NROW)-1:0] ky_row;
  logic [$clog2(LAMBDA)-1:0] ky_col;
  logic zg_we, zg_sel;
  logic [IW+XW-1:0] zg_addr;
  logic [TW-1:0] zg_data;

  lbc_top dut (.*);

  always #5 clk = ~clk;

  // ---------------- observation ----------------
  int smp_log [$];
  int n_ky = 0, n_zig = 0, n_add = 0, n_mul = 0, n_sline = 0, n_fwd = 0, n_inv = 0;
  int n_rstall = 0, n_zdraw = 0, n_kyrst = 0;
  begin : g_obs
    always @(posedge clk) begin
      if (dut.u_ctrl.smp_valid && dut.u_ctrl.smp_ready) begin
        smp_log.push_back(int'(dut.u_ctrl.smp));
        if (samp_sel == SAMP_KY) n_ky++; else n_zig++;
      end
      if (dut.u_arr.mode == ARR_ADD) n_add++;
      if (dut.u_arr.mode == ARR_MUL) n_mul++;
      if (int'(dut.u_zig.st) == 3) n_sline++;   // S_DEC: sLine result judged
      if (dut.u_arr.start && !dut.u_arr.inv) n_fwd++;
      if (dut.u_arr.start && dut.u_arr.inv) n_inv++;
      if ((rbit_ready && !rbit_valid) || (rword_ready && !rword_valid)) n_rstall++;
      if (rword_valid && rword_ready) n_zdraw++;          // Ziggurat draws (accepted + rejected)
      if (int'(dut.u_ky.st) == 2 && !dut.u_ky.d_neg &&    // S_CHK leaving to a new walk
          (dut.u_ky.d_over || dut.u_ky.col == LAMBDA)) n_kyrst++;
    end
  end

  // random sources: occasionally not valid
  always @(negedge clk) begin
    rbit_valid  = ($urandom_range(7) != 0);
    rbit        = 1'($urandom);
    rword_valid = ($urandom_range(7) != 0);
    rword       = RNW'({$urandom, $urandom, $urandom});
  end

  // ---------------- tables ----------------
  real sigma;

  task automatic load_ky();
    real rho [], s, p;
    rho = new[NROW];
    s = 0;
    for (int x = 0; x < NROW; x++) begin
      rho[x] = $exp(-(x * x) / (2.0 * sigma * sigma));
      s += (x == 0) ? rho[x] : 2 * rho[x];
    end
    @(negedge clk); ky_clr = 1; @(negedge clk); ky_clr = 0;
    repeat (LAMBDA + 2) @(negedge clk);
    for (int x = 0; x < NROW; x++) begin
      p = ((x == 0) ? rho[x] : 2 * rho[x]) / s;
      for (int c = 0; c < LAMBDA; c++) begin
        p = p * 2;
        ky_we = 1; ky_row = x[$clog2(NROW)-1:0]; ky_col = c[$clog2(LAMBDA)-1:0];
        ky_bit = (p >= 1.0);
        if (p >= 1.0) p -= 1.0;
        @(negedge clk);
      end
    end
    ky_we = 0;
  endtask

  // Ziggurat tables for the current sigma: M rectangles of (nearly) equal
  // area S over rho(x) = exp(-x^2 / 2 sigma^2), bottom one of width
  // x_M + 1 with x_M = round(9 sigma), built downwards:
  //   y_M = 0, y_{i-1} = y_i + S / (x_i + 1), x_{i-1} = floor(sqrt(-2 sigma^2 ln y_{i-1}))
  // S is found by bisection so that y_0 reaches 1; y_0 is then set to 1.
  // Fixed point: ybar_i = floor(y_i 2^LAM), k = (ybar_{i-1} - ybar_i) 2^LAM
  // / (x_i - x_{i-1}), E(i, x) = floor(rho(x) 2^LAM) - ybar_i.
  task automatic load_zig();
    real xs [M + 1], ys [M + 1], lo, hi, sa, sc;
    longint unsigned yb [M + 1], dy, kk;
    int xi, xp;
    bit ok;
    xs[M] = $floor(9.0 * sigma + 0.5);
    lo = 0.0; hi = 1.0 * (xs[M] + 1);
    for (int it = 0; it < 200; it++) begin
      sa = (lo + hi) / 2;
      ys[M] = 0.0; ok = 1;
      for (int i = M; i >= 1 && ok; i--) begin
        ys[i - 1] = ys[i] + sa / (xs[i] + 1);
        if (i > 1) begin
          if (ys[i - 1] >= 1.0) ok = 0;
          else xs[i - 1] = $floor($sqrt(-2.0 * sigma * sigma * $ln(ys[i - 1])));
        end
      end
      if (!ok || ys[0] >= 1.0) hi = sa; else lo = sa;
    end
    sa = hi;
    ys[M] = 0.0;
    for (int i = M; i >= 1; i--) begin
      ys[i - 1] = ys[i] + sa / (xs[i] + 1);
      if (i > 1) xs[i - 1] = $floor($sqrt(-2.0 * sigma * sigma * $ln(ys[i - 1])));
    end
    xs[0] = 0.0; ys[0] = 1.0;
    sc = 1.0;
    for (int j = 0; j < LAM; j++) sc = sc * 2.0;       // 2^LAM
    for (int i = 0; i <= M; i++) yb[i] = longint'($floor(ys[i] * sc));
    for (int i = 1; i <= M; i++) begin
      xi = int'(xs[i]); xp = int'(xs[i - 1]);
      dy = yb[i - 1] - yb[i];
      kk = (xi == xp) ? 0 : (dy << LAM) / longint'(xi - xp);
      @(negedge clk);
      zg_we = 1; zg_sel = 0; zg_addr = (IW+XW)'(i - 1);
      zg_data = {XW'(xi), XW'(xp), LAM'(dy), KW'(kk), (xi == xp),
                 (real'(xi) + 1.0 <= sigma), (sigma <= real'(xp))};
      for (int x = 0; x < (1 << XW); x++) begin
        longint e;
        e = (x > xi) ? 0 : longint'($floor($exp(-(x * x) / (2.0 * sigma * sigma)) * sc)) - longint'(yb[i]);
        @(negedge clk);
        zg_sel = 1; zg_addr = {IW'(i - 1), XW'(x)};
        zg_data = TW'(EW'(e));
      end
    end
    @(negedge clk); zg_we = 0;
  endtask

  // reference: c = a*s + e in Z_q[x]/(x^N + 1), s and e signed
  function automatic longint unsigned res(int v);
    return (v < 0) ? longint'(Q) + longint'(v) : longint'(v);
  endfunction

  function automatic void negacyclic(input longint unsigned a [], input int sv [],
                                     input int ev [], ref longint unsigned c []);
    longint unsigned t;
    for (int k = 0; k < N; k++) c[k] = res(ev[k]);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        t = a[i] * res(sv[j]) % Q;
        if (i + j < N) c[i + j] = (c[i + j] + t) % Q;
        else           c[i + j - N] = (c[i + j - N] + Q - t) % Q;
      end
  endfunction

  // ---------------- one operation ----------------
  task automatic run_op(input samp_sel_t sel);
    longint unsigned a [], c [];
    int sv [], ev [];
    int t0, cyc, maxabs;
    a = new[N]; c = new[N]; sv = new[N]; ev = new[N];
    samp_sel = sel;
    for (int i = 0; i < N; i++) begin
      a[i] = $urandom_range(Q - 1);
      @(negedge clk); host_we = 1; host_addr = AW'(i); host_wdata = W'(a[i]);
    end
    @(negedge clk); host_we = 0;
    smp_log.delete();
    go = 1; @(negedge clk); go = 0;
    t0 = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    checks++;
    if (smp_log.size() != 2 * N) begin
      failures++; $display("FAIL %0d samples seen", smp_log.size());
    end else begin
      maxabs = (sel == SAMP_KY) ? NROW - 1 : int'($floor(9.0 * sigma + 0.5));
      for (int i = 0; i < N; i++) begin sv[i] = smp_log[i]; ev[i] = smp_log[N + i]; end
      for (int i = 0; i < 2 * N; i++) begin
        checks++;
        if (smp_log[i] > maxabs || smp_log[i] < -maxabs) begin
          failures++; $display("FAIL sample %0d out of range", smp_log[i]);
        end
      end
      begin
        real sq, sd;
        sq = 0;
        for (int i = 0; i < 2 * N; i++) sq += real'(smp_log[i]) * real'(smp_log[i]);
        sd = $sqrt(sq / (2 * N));
        $display("sigma %0.2f, %s: sample standard deviation %0.2f over %0d samples",
                 sigma, (sel == SAMP_KY) ? "Knuth-Yao" : "Ziggurat", sd, 2 * N);
        checks++;
        if (sd < 0.9 * sigma || sd > 1.1 * sigma) begin
          failures++; $display("FAIL standard deviation %0.2f for sigma %0.2f", sd, sigma);
        end
      end
      negacyclic(a, sv, ev, c);
      for (int i = 0; i < N; i++) begin
        host_addr = AW'(i);
        @(negedge clk);
        checks++;
        if (host_rdata != W'(c[i])) begin
          failures++;
          if (failures < 10) $display("FAIL b[%0d] = %0d, expected %0d", i, host_rdata, c[i]);
        end
      end
    end
    $display("operation with %s sampler: %0d cycles", (sel == SAMP_KY) ? "Knuth-Yao" : "Ziggurat", cyc);
  endtask

  initial begin
    go = 0; host_we = 0; host_addr = 0; host_wdata = 0; samp_sel = SAMP_KY;
    ky_clr = 0; ky_we = 0; ky_row = 0; ky_col = 0; ky_bit = 0;
    zg_we = 0; zg_sel = 0; zg_addr = 0; zg_data = 0;
    #12 rst_n = 1;
    sigma = 215.73;             // BLISS set
    load_ky();
    load_zig();
    run_op(SAMP_KY);
    run_op(SAMP_ZIG);
    sigma = 3.33;               // LP sampler on the same build
    load_ky();
    load_zig();
    run_op(SAMP_KY);
    run_op(SAMP_ZIG);
    $display("mechanisms: ky_samples=%0d zig_samples=%0d add_mode_cycles=%0d mul_mode_cycles=%0d sline=%0d fwd_ntt=%0d inv_ntt=%0d rnd_stalls=%0d zig_rejects=%0d ky_restarts=%0d",
             n_ky, n_zig, n_add, n_mul, n_sline, n_fwd, n_inv, n_rstall, n_zdraw - n_zig, n_kyrst);
    checks += 8;
    if (n_ky == 0)     begin failures++; $display("FAIL no Knuth-Yao sample"); end
    if (n_zig == 0)    begin failures++; $display("FAIL no Ziggurat sample"); end
    if (n_add == 0)    begin failures++; $display("FAIL wide adder mode unused"); end
    if (n_mul == 0)    begin failures++; $display("FAIL wide multiplier mode unused"); end
    if (n_sline == 0)  begin failures++; $display("FAIL sLine path never taken"); end
    if (n_fwd != 8)    begin failures++; $display("FAIL forward NTT passes %0d", n_fwd); end
    if (n_inv != 4)    begin failures++; $display("FAIL inverse NTT passes %0d", n_inv); end
    if (n_rstall == 0) begin failures++; $display("FAIL no random-source stall"); end
    if (n_zdraw == n_zig) begin failures++; $display("FAIL no Ziggurat rejection"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
