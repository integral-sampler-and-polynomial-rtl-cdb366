// tb_ky_sampler_ctrl: Knuth-Yao control on a small table (sigma = 1.5,
// 8 rows, 12 columns) with a register-based model of the butterfly
// array's wide adder (sum registered one cycle after the operands).  The
// table is a truncated discrete Gaussian computed here; the random bit
// stream is shared with a software model of the same walk, and the
// hardware's samples must equal the model's, one by one.  Also counts the
// restarts of the model (columns exhausted or early stop) and the
// handshake back-pressure on samples.  Two tables are run: the full
// distribution, then the same one scaled to a total probability of 0.6,
// so that walks which fall off the table (restart) are frequent.  Both
// restart kinds must be seen at least once.
module tb_ky_sampler_ctrl;
  localparam int unsigned NROW = 8, LAMBDA = 12;
  localparam int unsigned SW = $clog2(NROW) + 1;
  localparam int unsigned DW = $clog2(NROW * LAMBDA + 1) + 2;
  localparam int unsigned NBITS = 200000;
  localparam int unsigned NSMP = 400;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, en, tbl_clr, tbl_we, tbl_bit;
  logic [$clog2(NROW)-1:0] tbl_row;
  logic [$clog2(LAMBDA)-1:0] tbl_col;
  logic r_valid, r_bit, r_ready, op_cin, smp_valid, smp_ready;
  logic [DW-1:0] op_a, op_b, d_in;
  logic signed [SW-1:0] smp;

  ky_sampler_ctrl #(.NROW(NROW), .LAMBDA(LAMBDA)) dut (.*);
  always #5 clk = ~clk;

  // model of the array's wide adder
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) d_in <= '0; else d_in <= op_a + op_b + DW'(op_cin);

  bit P [NROW][LAMBDA];
  int HD [LAMBDA];
  int hdsum;
  bit rbits [NBITS];
  int rptr_hw = 0;
  int rptr_sw, restarts, n_early, n_exhaust;

  function automatic bit nextbit();
    bit b = rbits[rptr_sw];
    rptr_sw++;
    return b;
  endfunction

  // software walk, Algorithm "Knuth-Yao" with the same restart rules
  function automatic int model_sample();
    forever begin
      int d;
      d = 0;
      for (int col = 0; col < LAMBDA; col++) begin
        bit r;
        r = nextbit();
        d = 2 * d + (r ? 0 : 1) - HD[col];
        if (d < 0) begin
          for (int row = 0; row < NROW; row++) begin
            d += P[row][col];
            if (d == 0) begin
              bit sg = nextbit();
              return sg ? -row : row;
            end
          end
          break;      // malformed, restart
        end else if (d > hdsum) begin
          n_early++;  // early stop: d can no longer reach zero
          break;
        end
        if (col == LAMBDA - 1) n_exhaust++;
      end
      restarts++;
    end
  endfunction

  assign r_bit = rbits[rptr_hw];
  always_ff @(posedge clk) if (r_valid && r_ready) rptr_hw <= rptr_hw + 1;

  // load a truncated Gaussian table scaled by 'scale' and draw NSMP samples
  task automatic run_table(real scale);
    real rho [NROW], sm, p;
    sm = 0;
    for (int x = 0; x < NROW; x++) begin
      rho[x] = $exp(-(x * x) / (2.0 * 1.5 * 1.5));
      sm += (x == 0) ? rho[x] : 2 * rho[x];
    end
    hdsum = 0;
    for (int c = 0; c < LAMBDA; c++) HD[c] = 0;
    for (int x = 0; x < NROW; x++) begin
      p = scale * ((x == 0) ? rho[x] : 2 * rho[x]) / sm;
      for (int c = 0; c < LAMBDA; c++) begin
        p = p * 2;
        P[x][c] = (p >= 1.0);
        if (P[x][c]) begin p -= 1.0; HD[c]++; hdsum++; end
      end
    end
    en = 0;
    @(negedge clk); tbl_clr = 1; @(negedge clk); tbl_clr = 0;
    repeat (LAMBDA + 2) @(negedge clk);
    for (int x = 0; x < NROW; x++)
      for (int c = 0; c < LAMBDA; c++) begin
        tbl_we = 1; tbl_row = x[$clog2(NROW)-1:0]; tbl_col = c[$clog2(LAMBDA)-1:0]; tbl_bit = P[x][c];
        @(negedge clk);
      end
    tbl_we = 0;
    checks++;
    if (dut.hd_sum != DW'(hdsum)) begin failures++; $display("FAIL hd_sum %0d exp %0d", dut.hd_sum, hdsum); end
    en = 1;
    for (int n = 0; n < NSMP; n++) begin
      int e;
      r_valid = ($urandom_range(3) != 0);
      smp_ready = ($urandom_range(3) != 0);
      while (!(smp_valid && smp_ready)) begin
        @(negedge clk);
        r_valid = ($urandom_range(3) != 0);
        smp_ready = ($urandom_range(3) != 0);
      end
      e = model_sample();
      checks++;
      if (int'(smp) != e) begin failures++; $display("FAIL sample %0d: %0d exp %0d", n, smp, e); end
      if (n == NSMP - 1) r_valid = 0;   // no bits for a walk past the last sample
      @(negedge clk);
    end
    smp_ready = 0;
    checks++;
    if (rptr_hw != rptr_sw) begin failures++; $display("FAIL bits used %0d vs %0d", rptr_hw, rptr_sw); end
  endtask

  initial begin
    for (int i = 0; i < NBITS; i++) rbits[i] = 1'($urandom);
    rptr_sw = 0; restarts = 0; n_early = 0; n_exhaust = 0;
    en = 0; tbl_clr = 0; tbl_we = 0; tbl_row = 0; tbl_col = 0; tbl_bit = 0;
    r_valid = 0; smp_ready = 0;
    #12 rst_n = 1;
    run_table(1.0);
    run_table(0.6);
    $display("samples %0d restarts %0d (early stop %0d, columns exhausted %0d) bits %0d",
             2 * NSMP, restarts, n_early, n_exhaust, rptr_sw);
    checks++;
    if (n_early == 0 || n_exhaust == 0) begin
      failures++; $display("FAIL a restart kind never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
