// tb_lbc_top: end-to-end test of the integral sampler / polynomial
// multiplier, by default at a reduced size (n = 16, q = 12289, Knuth-Yao
// table 8 x 12 for sigma = 1.5, Ziggurat with 4 rectangles of 5-bit x).
// Two operations b = a*s + e are run, the first drawing s and e with the
// Knuth-Yao control, the second with the Ziggurat control.  The samples are
// observed where they enter the general controller, and b is compared with
// a schoolbook negacyclic product computed here.  The test counts the
// mechanisms it must exercise: both sampling algorithms, the array's wide
// adder and wide multiplier modes, the Ziggurat sLine path, forward and
// inverse NTT passes, and random-source stalls; each must occur.
// The parameters can be overridden (tb_lbc_full runs the default size).
module tb_lbc_top #(
  parameter int unsigned N      = 16,
  parameter int unsigned PSI    = 5860,     // 11^384 mod 12289, order 32
  parameter int unsigned NROW   = 8,
  parameter int unsigned LAMBDA = 12,
  parameter real         SIGMA  = 1.5,
  parameter int unsigned M      = 4,
  parameter int unsigned XW     = 5,
  parameter int unsigned LAM    = 16,
  parameter int unsigned KW     = 32,
  parameter bit          DEFAULT_TOP = 0
);
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

  if (DEFAULT_TOP) begin : g_def
    lbc_top dut (.*);
  end else begin : g_red
    lbc_top #(.N(N), .PSI(PSI), .NROW(NROW), .LAMBDA(LAMBDA), .M(M), .XW(XW),
              .LAM(LAM), .KW(KW)) dut (.*);
  end

  always #5 clk = ~clk;

  // ---------------- observation ----------------
  int smp_log [$];
  int n_ky = 0, n_zig = 0, n_add = 0, n_mul = 0, n_sline = 0, n_fwd = 0, n_inv = 0;
  int n_rstall = 0, n_zdraw = 0, n_kyrst = 0;
  if (DEFAULT_TOP) begin : g_obs_d
    always @(posedge clk) begin
      if (g_def.dut.u_ctrl.smp_valid && g_def.dut.u_ctrl.smp_ready) begin
        smp_log.push_back(int'(g_def.dut.u_ctrl.smp));
        if (samp_sel == SAMP_KY) n_ky++; else n_zig++;
      end
      if (g_def.dut.u_arr.mode == ARR_ADD) n_add++;
      if (g_def.dut.u_arr.mode == ARR_MUL) n_mul++;
      if (int'(g_def.dut.u_zig.st) == 3) n_sline++;   // S_DEC: sLine result judged
      if (g_def.dut.u_arr.start && !g_def.dut.u_arr.inv) n_fwd++;
      if (g_def.dut.u_arr.start && g_def.dut.u_arr.inv) n_inv++;
      if ((rbit_ready && !rbit_valid) || (rword_ready && !rword_valid)) n_rstall++;
      if (rword_valid && rword_ready) n_zdraw++;          // Ziggurat draws (accepted + rejected)
      if (int'(g_def.dut.u_ky.st) == 2 && !g_def.dut.u_ky.d_neg &&    // S_CHK leaving to a new walk
          (g_def.dut.u_ky.d_over || g_def.dut.u_ky.col == LAMBDA)) n_kyrst++;
    end
  end else begin : g_obs_r
    always @(posedge clk) begin
      if (g_red.dut.u_ctrl.smp_valid && g_red.dut.u_ctrl.smp_ready) begin
        smp_log.push_back(int'(g_red.dut.u_ctrl.smp));
        if (samp_sel == SAMP_KY) n_ky++; else n_zig++;
      end
      if (g_red.dut.u_arr.mode == ARR_ADD) n_add++;
      if (g_red.dut.u_arr.mode == ARR_MUL) n_mul++;
      if (int'(g_red.dut.u_zig.st) == 3) n_sline++;   // S_DEC: sLine result judged
      if (g_red.dut.u_arr.start && !g_red.dut.u_arr.inv) n_fwd++;
      if (g_red.dut.u_arr.start && g_red.dut.u_arr.inv) n_inv++;
      if ((rbit_ready && !rbit_valid) || (rword_ready && !rword_valid)) n_rstall++;
      if (rword_valid && rword_ready) n_zdraw++;          // Ziggurat draws (accepted + rejected)
      if (int'(g_red.dut.u_ky.st) == 2 && !g_red.dut.u_ky.d_neg &&    // S_CHK leaving to a new walk
          (g_red.dut.u_ky.d_over || g_red.dut.u_ky.col == LAMBDA)) n_kyrst++;
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
  task automatic load_ky();
    real rho [], s, p;
    rho = new[NROW];
    s = 0;
    for (int x = 0; x < NROW; x++) begin
      rho[x] = $exp(-(x * x) / (2.0 * SIGMA * SIGMA));
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

  // Well-formed Ziggurat tables: x_i grows to the largest sample, the
  // rectangle flags split into below / neither / above sigma.
  task automatic load_zig();
    int prev, xi, xmax;
    xmax = (1 << XW) - 2;
    prev = 0;
    for (int i = 0; i < M; i++) begin
      xi = (i == M - 1) ? xmax : prev + $urandom_range(1, xmax / M);
      @(negedge clk);
      zg_we = 1; zg_sel = 0; zg_addr = (IW+XW)'(i);
      zg_data = {XW'(xi), XW'(prev), LAM'($urandom), KW'({$urandom, $urandom}),
                 (xi == prev), (i < M / 2), (i == M - 1)};
      for (int x = 0; x < (1 << XW); x++) begin
        @(negedge clk);
        zg_sel = 1; zg_addr = {IW'(i), XW'(x)};
        zg_data = TW'(EW'(longint'($urandom_range(0, (1 << (LAM + 1)) - 1)) - (1 << LAM)));
      end
      prev = xi;
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
      maxabs = (sel == SAMP_KY) ? NROW - 1 : (1 << XW) - 2;
      for (int i = 0; i < N; i++) begin sv[i] = smp_log[i]; ev[i] = smp_log[N + i]; end
      for (int i = 0; i < 2 * N; i++) begin
        checks++;
        if (smp_log[i] > maxabs || smp_log[i] < -maxabs) begin
          failures++; $display("FAIL sample %0d out of range", smp_log[i]);
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
    if (n_fwd != 4)    begin failures++; $display("FAIL forward NTT passes %0d", n_fwd); end
    if (n_inv != 2)    begin failures++; $display("FAIL inverse NTT passes %0d", n_inv); end
    if (n_rstall == 0) begin failures++; $display("FAIL no random-source stall"); end
    if (n_zdraw == n_zig) begin failures++; $display("FAIL no Ziggurat rejection"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (DEFAULT_TOP ? 3000000 : 200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
