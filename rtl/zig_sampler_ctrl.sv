// zig_sampler_ctrl: discrete Ziggurat Gaussian sampling control.
//
// One attempt per random word {y', x, idx, b, s}: rectangle i = idx + 1 of
// M, a candidate |sample| x, a vertical coordinate y' of LAM bits, the
// x = 0 coin b and the sign s.  With the rectangle's precomputed values
// (x_i, x_{i-1}, ybar_{i-1} - ybar_i, the sLine slope constant k and three
// flag bits) the control decides:
//   x > x_i                -> draw x again in the same rectangle (the next
//                             word's idx is ignored), so that x is uniform
//                             in 0..x_i for the chosen i
//   0 < x <= x_{i-1}       -> accept
//   x == 0: b == 0 -> accept, b == 1 -> reject (0 is counted once, not as
//                             both +0 and -0)
//   otherwise compute ybar = y' * (ybar_{i-1} - ybar_i) (own multiplier)
//     and L = k * (x_i - x), the sLine value scaled by 2^LAM, which is the
//     one expensive product: it is computed by the butterfly array (KW-bit
//     by XW-bit), not here.  With E = rho(x) - ybar_i from a table indexed by
//     (i, x), scaled by 2^LAM:
//     flag below (x_i + 1 <= sigma): accept if ybar <= L or  ybar <= E
//     flag above (sigma <= x_{i-1}): reject if ybar >= L or  ybar >  E
//     neither:                       accept if ybar <= E
//     flag flat (x_{i-1} == x_i): sLine is -1, i.e. L is below every ybar.
// All acceptance terms are OR-ed.  An accepted attempt gives the signed
// sample (s ? -x : x).  The two comparisons that depend only on i (the flags)
// are stored bits, not comparators.
//
// Interface: tables are written through tbl_we/tbl_sel/tbl_addr/tbl_data;
// random words arrive with r_valid/r_ready; samples leave with
// smp_valid/smp_ready; mul_k/mul_x go to the array and mul_p comes back two
// cycles later.  An attempt takes 2 cycles when decided without sLine and 4
// cycles otherwise.
//
// The structure (stored flags, sLine on the array, OR-ed acceptance) follows
// the paper.  Three rules depart from its printed algorithm, which as
// printed does not produce a Gaussian: the two sLine shortcuts use OR where
// the printed algorithm has AND (with AND the samples' spread comes out
// about 1.5 sigma), x = 0 with b = 1 is rejected instead of going on to the
// sLine test, and an x outside the rectangle keeps the rectangle.  The
// random-word layout, the table formats, LAM = 32 and M = 8 are this
// design's choices.
module zig_sampler_ctrl #(
  parameter int unsigned M   = 8,
  parameter int unsigned XW  = 11,
  parameter int unsigned LAM = 32,
  parameter int unsigned KW  = 64,
  parameter int unsigned PW  = 84,                  // width of mul_p
  parameter int unsigned IW  = (M > 1) ? $clog2(M) : 1,
  parameter int unsigned RNW = LAM + XW + IW + 2,   // random word width
  parameter int unsigned TW  = 2 * XW + LAM + KW + 3 // rectangle entry width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  // tables: sel 0 = rectangle entry at addr = i-1,
  //         sel 1 = E entry at addr = {i-1, x} (LAM+2-bit signed)
  input  logic                 tbl_we,
  input  logic                 tbl_sel,
  input  logic [IW+XW-1:0]     tbl_addr,
  input  logic [TW-1:0]        tbl_data,
  // random words {y', x, idx, b, s}
  input  logic                 r_valid,
  input  logic [RNW-1:0]       r_word,
  output logic                 r_ready,
  // multiplication in the butterfly array
  output logic [KW-1:0]        mul_k,
  output logic [XW-1:0]        mul_x,
  input  logic [PW-1:0]        mul_p,
  // samples
  output logic                 smp_valid,
  output logic signed [XW:0]   smp,
  input  logic                 smp_ready
);
  typedef struct packed {
    logic [XW-1:0]  xi;       // floor(x_i)
    logic [XW-1:0]  xim1;     // floor(x_{i-1})
    logic [LAM-1:0] dy;       // ybar_{i-1} - ybar_i
    logic [KW-1:0]  k;        // sLine slope * 2^LAM
    logic           flat;     // x_{i-1} == x_i
    logic           below;    // x_i + 1 <= sigma
    logic           above;    // sigma <= x_{i-1}
  } rect_t;

  localparam int unsigned EW = LAM + 2;
  localparam int unsigned CW = ((PW > 2*LAM) ? PW : 2*LAM + EW) + 2;

  typedef enum logic [2:0] {S_DRAW, S_LOOK, S_W1, S_DEC, S_OUT} state_t;

  rect_t               rect_tbl [M];
  logic [EW-1:0]       e_tbl    [M << XW];

  always_ff @(posedge clk) begin
    if (tbl_we && !tbl_sel) rect_tbl[tbl_addr[IW-1:0]] <= rect_t'(tbl_data);
    if (tbl_we &&  tbl_sel) e_tbl[tbl_addr]            <= tbl_data[EW-1:0];
  end

  state_t          st;
  logic [LAM-1:0]  yp;
  logic [XW-1:0]   x;
  logic [IW-1:0]   idx;
  logic            b, s;
  rect_t           rc;
  logic [2*LAM-1:0] ybar;

  assign rc      = rect_tbl[idx];
  assign r_ready = en && (st == S_DRAW);
  assign mul_k   = rc.k;
  assign mul_x   = rc.xi - x;                 // x_i - x >= 0

  // ---------------- comparisons ----------------
  logic signed [CW-1:0] ybar_s, l_s, e_s;
  logic acc_small, acc_zero, rej_zero, c_le_l, c_le_e, c_ge_l, c_gt_e, acc_slow, reject_x;
  logic keep_i;   // last x was outside 0..x_i: redraw x in the same rectangle

  always_comb begin
    ybar_s    = signed'(CW'(ybar));
    l_s       = rc.flat ? -CW'(1) : signed'(CW'(mul_p));
    e_s       = signed'(CW'(signed'(e_tbl[{idx, x}]))) <<< LAM;
    reject_x  = (x > rc.xi);
    acc_small = (x != '0) && (x <= rc.xim1);
    acc_zero  = (x == '0) && !b;
    rej_zero  = (x == '0) &&  b;
    c_le_l    = (ybar_s <= l_s);
    c_le_e    = (ybar_s <= e_s);
    c_ge_l    = (ybar_s >= l_s);
    c_gt_e    = (ybar_s >  e_s);
    acc_slow  = ( rc.below &&  (c_le_l || c_le_e)) |
                (!rc.below &&  rc.above && !(c_ge_l || c_gt_e)) |
                (!rc.below && !rc.above && c_le_e);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_DRAW;
      yp <= '0; x <= '0; idx <= '0; b <= 1'b0; s <= 1'b0;
      keep_i <= 1'b0;
      ybar <= '0;
      smp_valid <= 1'b0;
      smp <= '0;
    end else if (!en) begin
      st <= S_DRAW;
      keep_i <= 1'b0;
      smp_valid <= 1'b0;
    end else begin
      unique case (st)
        S_DRAW: if (r_valid) begin
          {yp, x} <= r_word[RNW-1:IW+2];
          idx     <= keep_i ? idx : r_word[IW+1:2];
          {b, s}  <= r_word[1:0];
          st      <= S_LOOK;
        end
        S_LOOK: begin
          ybar <= yp * rc.dy;
          keep_i <= reject_x;
          if (reject_x || rej_zero)        st <= S_DRAW;
          else if (acc_small || acc_zero) begin
            smp       <= s ? -signed'({1'b0, x}) : signed'({1'b0, x});
            smp_valid <= 1'b1;
            st        <= S_OUT;
          end else                         st <= S_W1;
        end
        S_W1: st <= S_DEC;                 // mul_p settles in the array
        S_DEC: begin
          if (acc_slow) begin
            smp       <= s ? -signed'({1'b0, x}) : signed'({1'b0, x});
            smp_valid <= 1'b1;
            st        <= S_OUT;
          end else st <= S_DRAW;
        end
        S_OUT: if (smp_ready) begin
          smp_valid <= 1'b0;
          st        <= S_DRAW;
        end
        default: st <= S_DRAW;
      endcase
    end
  end
endmodule
