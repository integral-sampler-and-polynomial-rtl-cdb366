// tb_ntt_array: the butterfly array at its default size (q = 12289,
// n = 512, 9 NTT units, 2 pre-multipliers).
//  * ARR_NTT: a random polynomial with random weights w0, w1 is streamed
//    through the forward and the inverse transform; every output is
//    compared with a direct O(n^2) evaluation sum_i x_i w0_i w1_i omega^(ik)
//    at the bit-reversed position, and the latency is checked.
//  * ARR_ADD: random 28-bit two's-complement additions with carry in.
//  * ARR_MUL: random 64-bit k times 11-bit x, the Ziggurat sLine product.
module tb_ntt_array;
  import lbc_pkg::*;
  localparam int unsigned W = 14, Q = 12289, N = 512, LOGN = 9;
  localparam int unsigned PSI = 10302;
  localparam int unsigned AU = 2, KW = 64, XW = 11, PW = 84;
  int checks = 0, failures = 0;

  function automatic longint unsigned mpow(longint unsigned b, longint unsigned e);
    longint unsigned r = 1;
    b = b % Q;
    while (e > 0) begin
      if (e & 1) r = r * b % Q;
      b = b * b % Q;
      e >>= 1;
    end
    return r;
  endfunction

  function automatic int unsigned brev(int unsigned v);
    int unsigned r = 0;
    for (int k = 0; k < LOGN; k++) r = (r << 1) | ((v >> k) & 1);
    return r;
  endfunction

  logic clk = 0, rst_n = 0;
  arr_mode_t mode;
  logic inv, start, pre_start, dout_start, add_cin;
  logic [W-1:0] din, w0, w1, pre_q, dout;
  logic [AU*W-1:0] add_a, add_b, add_s;
  logic [KW-1:0] mul_k;
  logic [XW-1:0] mul_x;
  logic [PW-1:0] mul_p;

  ntt_array dut (.*);
  always #5 clk = ~clk;

  longint unsigned y [N];
  logic [W-1:0] xs [N], w0s [N], w1s [N];

  task automatic run(input logic inverse);
    longint unsigned om, acc;
    int lat;
    om = mpow(PSI, 2);
    if (inverse) om = mpow(om, N - 1);
    for (int i = 0; i < N; i++) begin
      xs[i] = W'($urandom_range(Q - 1));
      w0s[i] = W'($urandom_range(Q - 1));
      w1s[i] = W'($urandom_range(Q - 1));
      y[i] = longint'(xs[i]) * w0s[i] % Q * w1s[i] % Q;
    end
    inv = inverse;
    fork
      begin
        for (int i = 0; i < N; i++) begin
          @(negedge clk); start = (i == 0); din = xs[i]; w0 = w0s[i]; w1 = w1s[i];
        end
        @(negedge clk); start = 0; din = 0;
      end
      begin
        @(negedge clk);
        lat = 0;
        while (!dout_start) begin @(negedge clk); lat++; end
        checks++;
        // pre-multiplier register + sum over stages of (D + 1)
        if (lat != 1 + (N - 1) + LOGN) begin failures++; $display("FAIL latency %0d", lat); end
        for (int p = 0; p < N; p++) begin
          int unsigned k;
          k = brev(p);
          acc = 0;
          for (int i = 0; i < N; i++) acc = (acc + y[i] * mpow(om, (i * k) % N)) % Q;
          checks++;
          if (dout != W'(acc)) begin
            failures++;
            if (failures < 10) $display("FAIL inv=%0d pos %0d got %0d exp %0d", inverse, p, dout, acc);
          end
          @(negedge clk);
        end
      end
    join
    repeat (N) @(negedge clk);
  endtask

  initial begin
    mode = ARR_NTT; inv = 0; start = 0; din = 0; w0 = 0; w1 = 0;
    add_a = 0; add_b = 0; add_cin = 0; mul_k = 0; mul_x = 0;
    #12 rst_n = 1;
    run(0);
    run(1);
    // wide addition
    @(negedge clk); mode = ARR_ADD;
    for (int i = 0; i < 300; i++) begin
      logic [AU*W-1:0] ea;
      add_a = (AU*W)'({$urandom, $urandom}); add_b = (AU*W)'({$urandom, $urandom});
      add_cin = 1'($urandom);
      ea = add_a + add_b + (AU*W)'(add_cin);
      @(negedge clk); checks++;
      if (add_s !== ea) begin failures++; $display("FAIL add %0h+%0h=%0h", add_a, add_b, add_s); end
    end
    // wide multiplication
    mode = ARR_MUL;
    for (int i = 0; i < 300; i++) begin
      logic [PW-1:0] ep;
      mul_k = {$urandom, $urandom};
      mul_x = (i == 0) ? '1 : XW'($urandom);
      if (i == 0) mul_k = '1;
      ep = PW'(mul_k) * PW'(mul_x);
      @(negedge clk); @(negedge clk); checks++;
      if (mul_p !== ep) begin failures++; $display("FAIL mul %0h*%0h=%0h exp %0h", mul_k, mul_x, mul_p, ep); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
