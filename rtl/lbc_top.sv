// lbc_top: integral discrete Gaussian sampler and NTT polynomial multiplier.
//
// The sampler has no arithmetic of its own for its wide additions and
// multiplications: both sampling controls (Knuth-Yao and discrete
// Ziggurat) borrow the butterfly units of the pipelined NTT, which is idle
// while the error and secret polynomials are being drawn.  The top joins
//   gen_ctrl          phase sequencing of b = a*s + e, host access
//   ntt_array         2 pre-multipliers + log2(N) reconfigurable NTT units
//   ky_sampler_ctrl   Knuth-Yao control (d update on the array's adder)
//   zig_sampler_ctrl  Ziggurat control (sLine product on the array)
//   poly_ram x3       memories for a (later the result), s and e
// samp_sel picks the sampling algorithm for the next operation.  Random
// bits/words and the distribution tables come from outside.  Host access:
// write a(x) through host_we/host_addr/host_wdata while idle, pulse go,
// wait for done, read b(x) through host_addr/host_rdata (one-cycle read
// latency).  Default sizes: q = 12289, n = 512, sigma ~ 215 (KY table
// 1936 x 64 bits); Ziggurat with 8 rectangles, 32-bit y and 64-bit k.
module lbc_top
  import lbc_pkg::*;
#(
  parameter int unsigned W      = lbc_pkg::W_DEF,
  parameter int unsigned Q      = lbc_pkg::Q_DEF,
  parameter int unsigned N      = lbc_pkg::N_DEF,
  parameter int unsigned PSI    = lbc_pkg::PSI_DEF,
  parameter int unsigned NROW   = 1936,
  parameter int unsigned LAMBDA = 64,
  parameter int unsigned M      = 8,
  parameter int unsigned XW     = 11,
  parameter int unsigned LAM    = 32,
  parameter int unsigned KW     = 64,
  // derived
  parameter int unsigned AW     = $clog2(N),
  parameter int unsigned KY_SW  = $clog2(NROW) + 1,
  parameter int unsigned SW     = (KY_SW > XW + 1) ? KY_SW : XW + 1,
  parameter int unsigned DW     = $clog2(NROW * LAMBDA + 1) + 2,
  parameter int unsigned AU     = (DW + W - 1) / W,
  parameter int unsigned PW     = ((KW + XW + W - 1) / W) * W,
  parameter int unsigned IW     = (M > 1) ? $clog2(M) : 1,
  parameter int unsigned RNW    = LAM + XW + IW + 2,
  parameter int unsigned TW     = 2 * XW + LAM + KW + 3
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      go,
  input  samp_sel_t                 samp_sel,
  output logic                      busy,
  output logic                      done,
  input  logic                      host_we,
  input  logic [AW-1:0]             host_addr,
  input  logic [W-1:0]              host_wdata,
  output logic [W-1:0]              host_rdata,
  // randomness
  input  logic                      rbit_valid,
  input  logic                      rbit,
  output logic                      rbit_ready,
  input  logic                      rword_valid,
  input  logic [RNW-1:0]            rword,
  output logic                      rword_ready,
  // Knuth-Yao table
  input  logic                      ky_clr,
  input  logic                      ky_we,
  input  logic [$clog2(NROW)-1:0]   ky_row,
  input  logic [$clog2(LAMBDA)-1:0] ky_col,
  input  logic                      ky_bit,
  // Ziggurat tables
  input  logic                      zg_we,
  input  logic                      zg_sel,
  input  logic [IW+XW-1:0]          zg_addr,
  input  logic [TW-1:0]             zg_data
);
  arr_mode_t      arr_mode;
  logic           arr_inv, arr_start, arr_pre_start, arr_dout_start;
  logic [W-1:0]   arr_din, arr_w0, arr_w1, arr_pre_q, arr_dout;
  logic [AU*W-1:0] add_a, add_b, add_s;
  logic           add_cin;
  logic [KW-1:0]  mul_k;
  logic [XW-1:0]  mul_x;
  logic [PW-1:0]  mul_p;

  logic           samp_en, smp_ready;
  logic [2:0]     m_we;
  logic [AW-1:0]  m_waddr [3];
  logic [W-1:0]   m_wdata [3];
  logic [AW-1:0]  m_raddr [3];
  logic [W-1:0]   m_rdata [3];

  // ---------------- samplers ----------------
  logic [DW-1:0]           ky_a, ky_b;
  logic                    ky_valid, zg_valid;
  logic signed [KY_SW-1:0] ky_smp;
  logic signed [XW:0]      zg_smp;
  logic                    smp_valid;
  logic signed [SW-1:0]    smp;

  ky_sampler_ctrl #(.NROW(NROW), .LAMBDA(LAMBDA), .SW(KY_SW), .DW(DW)) u_ky (
    .clk, .rst_n, .en(samp_en && samp_sel == SAMP_KY),
    .tbl_clr(ky_clr), .tbl_we(ky_we), .tbl_row(ky_row), .tbl_col(ky_col), .tbl_bit(ky_bit),
    .r_valid(rbit_valid), .r_bit(rbit), .r_ready(rbit_ready),
    .op_a(ky_a), .op_b(ky_b), .op_cin(add_cin), .d_in(add_s[DW-1:0]),
    .smp_valid(ky_valid), .smp(ky_smp), .smp_ready(smp_ready && samp_sel == SAMP_KY));

  assign add_a = {{(AU*W-DW){ky_a[DW-1]}}, ky_a};
  assign add_b = {{(AU*W-DW){ky_b[DW-1]}}, ky_b};

  zig_sampler_ctrl #(.M(M), .XW(XW), .LAM(LAM), .KW(KW), .PW(PW)) u_zig (
    .clk, .rst_n, .en(samp_en && samp_sel == SAMP_ZIG),
    .tbl_we(zg_we), .tbl_sel(zg_sel), .tbl_addr(zg_addr), .tbl_data(zg_data),
    .r_valid(rword_valid), .r_word(rword), .r_ready(rword_ready),
    .mul_k, .mul_x, .mul_p,
    .smp_valid(zg_valid), .smp(zg_smp), .smp_ready(smp_ready && samp_sel == SAMP_ZIG));

  assign smp_valid = (samp_sel == SAMP_KY) ? ky_valid : zg_valid;
  assign smp       = (samp_sel == SAMP_KY) ? SW'(ky_smp) : SW'(zg_smp);

  // ---------------- shared butterfly array ----------------
  ntt_array #(.W(W), .Q(Q), .N(N), .PSI(PSI), .ADD_UNITS(AU), .KW(KW), .XW(XW)) u_arr (
    .clk, .rst_n, .mode(arr_mode), .inv(arr_inv), .start(arr_start),
    .din(arr_din), .w0(arr_w0), .w1(arr_w1),
    .pre_q(arr_pre_q), .pre_start(arr_pre_start),
    .dout(arr_dout), .dout_start(arr_dout_start),
    .add_a, .add_b, .add_cin, .add_s,
    .mul_k, .mul_x, .mul_p);

  // ---------------- general control and memories ----------------
  gen_ctrl #(.W(W), .Q(Q), .N(N), .PSI(PSI), .SW(SW)) u_ctrl (
    .clk, .rst_n, .go, .samp_sel, .busy, .done,
    .host_we, .host_addr, .host_wdata, .host_rdata,
    .samp_en, .smp_valid, .smp, .smp_ready,
    .arr_mode, .arr_inv, .arr_start, .arr_din, .arr_w0, .arr_w1,
    .arr_pre_q, .arr_dout, .arr_dout_start,
    .m_we, .m_waddr, .m_wdata, .m_raddr, .m_rdata);

  for (genvar m = 0; m < 3; m++) begin : g_mem
    poly_ram #(.W(W), .DEPTH(N)) u_ram (
      .clk, .we(m_we[m]), .waddr(m_waddr[m]), .wdata(m_wdata[m]),
      .raddr(m_raddr[m]), .rdata(m_rdata[m]));
  end

  logic unused;
  assign unused = ^{arr_pre_start, add_s[AU*W-1:DW]};
endmodule
