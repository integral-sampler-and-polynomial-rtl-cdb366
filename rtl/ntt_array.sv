// ntt_array: the reconfigurable ring polynomial multiplier datapath.
//
// Two modular pre-multipliers (the weighting step of the negative wrapped
// convolution) feed a chain of NS = log2(N) pipelined NTT units.  In ARR_NTT
// mode the array streams one polynomial: element i enters on din with its
// two weights w0, w1; dout = NTT(din * w0 * w1 mod Q) leaves in bit-reversed
// order (omega = PSI^2, inverse twiddles when inv = 1).  The weighted input
// itself is also available on pre_q, one cycle after din.
//
// For sampling the same arithmetic is borrowed:
//   ARR_ADD: the first ADD_UNITS butterflies, each a general W-bit adder,
//     are cascaded through their carries into one ADD_UNITS*W-bit adder:
//     add_s = add_a + add_b + add_cin, registered (valid one cycle after the
//     operands).  Used by the Knuth-Yao control for its d update.
//   ARR_MUL: the KW-bit constant mul_k is cut into NCH W-bit chunks k_j and
//     every chunk is multiplied by mul_x (at most XW bits) on its own
//     general multiplier: chunks 0 and 1 on the two pre-multipliers, chunks
//     2.. on the first NCH-2 NTT units.  The next NCH-1 NTT units are general
//     adders that add the high part of product j-1 to the low part of
//     product j, rippling their carries, so that mul_p = mul_k * mul_x.
//     Operands must be held two cycles; mul_p is valid in the second cycle
//     after they were applied.  Used by the Ziggurat control for sLine.
// This assignment (pre-multipliers and first units multiply, following
// units add) follows the paper's worked example; that the chunk width is the
// coefficient width W and the latencies are this design's choices.
module ntt_array
  import lbc_pkg::*;
#(
  parameter int unsigned W         = lbc_pkg::W_DEF,
  parameter int unsigned Q         = lbc_pkg::Q_DEF,
  parameter int unsigned N         = lbc_pkg::N_DEF,
  parameter int unsigned PSI       = lbc_pkg::PSI_DEF,
  parameter int unsigned ADD_UNITS = 2,
  parameter int unsigned KW        = 64,
  parameter int unsigned XW        = 11
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  arr_mode_t                 mode,
  // NTT stream
  input  logic                      inv,
  input  logic                      start,
  input  logic [W-1:0]              din,
  input  logic [W-1:0]              w0,
  input  logic [W-1:0]              w1,
  output logic [W-1:0]              pre_q,
  output logic                      pre_start,
  output logic [W-1:0]              dout,
  output logic                      dout_start,
  // wide addition
  input  logic [ADD_UNITS*W-1:0]    add_a,
  input  logic [ADD_UNITS*W-1:0]    add_b,
  input  logic                      add_cin,
  output logic [ADD_UNITS*W-1:0]    add_s,
  // wide multiplication
  input  logic [KW-1:0]             mul_k,
  input  logic [XW-1:0]             mul_x,
  output logic [((KW+XW+W-1)/W)*W-1:0] mul_p
);
  localparam int unsigned NS    = $clog2(N);
  localparam int unsigned NCH   = (KW + XW + W - 1) / W;
  localparam int unsigned OMEGA = modpow(PSI, 2, Q);

  // Static checks of the configuration.
  initial begin
    if (2 * NCH - 3 > NS)
      $fatal(1, "ntt_array: %0d-bit x %0d-bit product needs %0d units, only %0d",
             KW, XW, 2 * NCH - 3, NS);
    if (ADD_UNITS > NS || XW > W)
      $fatal(1, "ntt_array: ADD_UNITS/XW out of range");
  end

  logic [NCH*W-1:0] kpad;
  logic [W-1:0]     xw;
  assign kpad = (NCH*W)'(mul_k);
  assign xw   = W'(mul_x);

  // ---------------- pre-multipliers ----------------
  logic [2*W-1:0] pm0_p, pm1_p;
  logic [2*W-1:0] pm_q [2];
  logic           samp_mul;
  assign samp_mul = (mode == ARR_MUL);

  mod_mul #(.W(W), .Q(Q)) u_pm0 (
    .a(samp_mul ? kpad[0 +: W] : din), .b(samp_mul ? xw : w0),
    .gen(samp_mul), .p(pm0_p));
  mod_mul #(.W(W), .Q(Q)) u_pm1 (
    .a(samp_mul ? kpad[W +: W] : pm0_p[W-1:0]), .b(samp_mul ? xw : w1),
    .gen(samp_mul), .p(pm1_p));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pm_q[0]   <= '0;
      pm_q[1]   <= '0;
      pre_start <= 1'b0;
    end else begin
      pm_q[0]   <= pm0_p;
      pm_q[1]   <= pm1_p;
      pre_start <= start && (mode == ARR_NTT);
    end
  end
  assign pre_q = pm_q[1][W-1:0];

  // ---------------- NTT units ----------------
  logic [W-1:0]   st_din   [NS];
  logic           st_start [NS];
  logic [W-1:0]   st_dout  [NS];
  logic           st_sout  [NS];
  pe_mode_t       pe_mode  [NS];
  logic [W-1:0]   s_u [NS], s_v [NS], s_w [NS];
  logic           s_cin [NS];
  logic [W-1:0]   hi_q [NS];
  logic [2*W-1:0] lo_q [NS];
  logic           cout [NS];

  for (genvar s = 0; s < NS; s++) begin : g_st
    if (s == 0) begin : g_first
      assign st_din[s]   = pre_q;
      assign st_start[s] = pre_start;
    end else begin : g_next
      assign st_din[s]   = st_dout[s-1];
      assign st_start[s] = st_sout[s-1];
    end

    // operands of this unit when it borrowed for sampling
    logic [W-1:0] add_u, add_v, mul_u, mul_v, mul_w;
    logic         add_c, mul_c;
    pe_mode_t     mul_mode;

    if (s < ADD_UNITS) begin : g_add
      assign add_u = add_a[s*W +: W];
      assign add_v = add_b[s*W +: W];
      if (s == 0) begin : g_c0
        assign add_c = add_cin;
      end else begin : g_cn
        assign add_c = cout[s-1];
      end
    end else begin : g_noadd
      assign add_u = '0;
      assign add_v = '0;
      assign add_c = 1'b0;
    end

    if (s < NCH - 2) begin : g_mul
      // general multiplier for chunk s+2
      assign mul_mode = PE_MUL;
      assign mul_u    = '0;
      assign mul_v    = kpad[(s+2)*W +: W];
      assign mul_w    = xw;
      assign mul_c    = 1'b0;
    end else if (s <= 2*NCH - 4) begin : g_acc
      // adder number A = s - (NCH-3): low part of product A plus high part
      // of product A-1
      localparam int unsigned A = s - (NCH - 3);
      logic [W-1:0] p_cur, p_prev;   // low part of product A, high part of A-1
      if (A == 1) begin : g_a1
        assign p_cur  = pm_q[1][W-1:0];
        assign p_prev = pm_q[0][2*W-1:W];
      end else if (A == 2) begin : g_a2
        assign p_cur  = lo_q[0][W-1:0];
        assign p_prev = pm_q[1][2*W-1:W];
      end else begin : g_an
        assign p_cur  = lo_q[A-2][W-1:0];
        assign p_prev = lo_q[A-3][2*W-1:W];
      end
      assign mul_mode = PE_ADD;
      assign mul_u    = p_cur;
      assign mul_v    = p_prev;
      assign mul_w    = '0;
      if (A == 1) begin : g_c1
        assign mul_c = 1'b0;
      end else begin : g_cc
        assign mul_c = cout[s-1];
      end
    end else begin : g_idle
      assign mul_mode = PE_ADD;
      assign mul_u    = '0;
      assign mul_v    = '0;
      assign mul_w    = '0;
      assign mul_c    = 1'b0;
    end

    assign pe_mode[s] = (mode == ARR_MUL) ? mul_mode : PE_ADD;
    assign s_u[s]     = (mode == ARR_MUL) ? mul_u : add_u;
    assign s_v[s]     = (mode == ARR_MUL) ? mul_v : add_v;
    assign s_w[s]     = (mode == ARR_MUL) ? mul_w : '0;
    assign s_cin[s]   = (mode == ARR_MUL) ? mul_c : add_c;

    ntt_stage #(.W(W), .Q(Q), .N(N), .STAGE(s), .OMEGA(OMEGA)) u_stage (
      .clk, .rst_n, .inv,
      .start(st_start[s]), .din(st_din[s]),
      .dout(st_dout[s]), .start_out(st_sout[s]),
      .samp(mode != ARR_NTT), .pe_mode(pe_mode[s]),
      .samp_u(s_u[s]), .samp_v(s_v[s]), .samp_w(s_w[s]), .samp_cin(s_cin[s]),
      .pe_hi_q(hi_q[s]), .pe_lo_q(lo_q[s]), .pe_cout(cout[s]));
  end

  assign dout       = st_dout[NS-1];
  assign dout_start = st_sout[NS-1];

  always_comb begin
    for (int unsigned a = 0; a < ADD_UNITS; a++) add_s[a*W +: W] = hi_q[a];
    mul_p[0 +: W] = pm_q[0][W-1:0];
    for (int unsigned a = 1; a < NCH; a++) mul_p[a*W +: W] = hi_q[NCH - 3 + a];
  end
endmodule
