// tb_ntt_stage: one NTT unit (stage 0 of a 16-point transform, q = 12289).
// Streams random blocks through it in forward and inverse mode and checks
// every output against the decimation-in-frequency stage equations
//   out[k]     = x[k] + x[k+D]
//   out[k+D]   = (x[k] - x[k+D]) * omega^(+-k)
// and the latency (start_out D+1 cycles after start).  Also checks that in
// sampling mode the butterfly is reachable as a general adder.
module tb_ntt_stage;
  import lbc_pkg::*;
  localparam int unsigned W = 14, Q = 12289, N = 16, D = N / 2;
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

  localparam int unsigned OMG = 4134;  // 11^768 mod 12289, order 16

  logic clk = 0, rst_n = 0, inv, start, start_out, samp, samp_cin, pe_cout;
  logic [W-1:0] din, dout, samp_u, samp_v, samp_w, pe_hi_q;
  logic [2*W-1:0] pe_lo_q;
  pe_mode_t pe_mode;

  ntt_stage #(.W(W), .Q(Q), .N(N), .STAGE(0), .OMEGA(OMG)) dut (.*);
  always #5 clk = ~clk;

  longint unsigned x [N];

  task automatic run(input logic inverse);
    longint unsigned om, e;
    int t0, lat;
    om = inverse ? mpow(OMG, N - 1) : OMG;
    for (int i = 0; i < N; i++) x[i] = $urandom_range(Q - 1);
    inv = inverse;
    fork
      begin
        for (int i = 0; i < N; i++) begin
          @(negedge clk); start = (i == 0); din = W'(x[i]);
        end
        @(negedge clk); start = 0; din = '0;
      end
      begin
        @(negedge clk); t0 = $time;
        lat = 0;
        while (!start_out) begin @(negedge clk); lat++; end
        checks++;
        if (lat != D + 1) begin failures++; $display("FAIL latency %0d", lat); end
        for (int k = 0; k < N; k++) begin
          if (k < D) e = (x[k] + x[k + D]) % Q;
          else       e = (x[k - D] + Q - x[k]) % Q * mpow(om, k - D) % Q;
          checks++;
          if (dout != W'(e)) begin failures++; $display("FAIL inv=%0d k=%0d got %0d exp %0d", inverse, k, dout, e); end
          @(negedge clk);
        end
      end
    join
    repeat (D + 2) @(negedge clk);
  endtask

  initial begin
    inv = 0; start = 0; din = 0; samp = 0; samp_cin = 0;
    samp_u = 0; samp_v = 0; samp_w = 0; pe_mode = PE_ORD;
    #12 rst_n = 1;
    for (int r = 0; r < 5; r++) begin
      run(0);
      run(1);
    end
    // sampling access: general add
    @(negedge clk);
    samp = 1; pe_mode = PE_ADD; samp_u = 14'h3fff; samp_v = 14'h0002; samp_cin = 1;
    #1 checks++;
    if (pe_cout !== 1'b1) begin failures++; $display("FAIL cout"); end
    @(negedge clk); checks++;
    if (pe_hi_q !== 14'h0002) begin failures++; $display("FAIL samp add %0h", pe_hi_q); end
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
