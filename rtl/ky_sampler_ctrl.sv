// ky_sampler_ctrl: Knuth-Yao discrete Gaussian sampling control.
//
// Walks the discrete distribution generating tree column by column, as in
// the Knuth-Yao algorithm with a signed distance d:
//   for each column col:  d = 2d + !r - HD[col]          (one random bit r)
//     if d < 0: for row = 0, 1, ...: d = d + P[row][col]; on d == 0 return
//               (-1)^r' * row                             (one more bit r')
// P is the NROW x LAMBDA probability bit matrix and HD[col] its column
// Hamming weights; HD_sum is the sum of all HD.  The control itself has no
// adder for d: every update is sent to the butterfly array as a wide
// two's-complement addition (op_a + op_b + op_cin) and d is the array's
// registered sum, read back the next cycle.  2d + !r is formed by wiring
// (shift in !r) and -HD by inversion with carry-in 1, so each update is a
// single addition.  Three comparisons steer the walk: the sign bit of d
// (d < 0), d == 0, and d > HD_sum, which abandons a walk that can no longer
// end in a leaf and starts over, as does running out of columns.
//
// Tables: the host clears them (tbl_clr) and then writes P one bit per
// cycle (tbl_we, row, col, bit); HD and HD_sum are accumulated from the
// written ones.  Random bits arrive on r_bit with a valid/ready handshake.
// Samples leave as signed numbers on smp with a valid/ready handshake.
// Timing: one column step takes two cycles, one row step one cycle.
//
// The algorithm, the three comparisons, offloading the addition and the
// widths follow the paper; the handshakes, the restart on the early-stop
// condition and building HD while P is written are this design's choices.
module ky_sampler_ctrl
#(
  parameter int unsigned NROW   = 1936,
  parameter int unsigned LAMBDA = 64,
  parameter int unsigned SW     = $clog2(NROW) + 1,            // sample width
  parameter int unsigned DW     = $clog2(NROW * LAMBDA + 1) + 2 // d width
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  // table loading
  input  logic                      tbl_clr,
  input  logic                      tbl_we,
  input  logic [$clog2(NROW)-1:0]   tbl_row,
  input  logic [$clog2(LAMBDA)-1:0] tbl_col,
  input  logic                      tbl_bit,
  // random bits
  input  logic                      r_valid,
  input  logic                      r_bit,
  output logic                      r_ready,
  // wide adder in the butterfly array
  output logic [DW-1:0]             op_a,
  output logic [DW-1:0]             op_b,
  output logic                      op_cin,
  input  logic [DW-1:0]             d_in,
  // samples
  output logic                      smp_valid,
  output logic signed [SW-1:0]      smp,
  input  logic                      smp_ready
);
  localparam int unsigned RW  = $clog2(NROW);
  localparam int unsigned CLW = $clog2(LAMBDA);
  localparam int unsigned HW  = $clog2(NROW + 1);

  typedef enum logic [2:0] {
    S_INIT, S_COL, S_CHK, S_ROW, S_SIGN, S_OUT
  } state_t;

  logic            pmem [NROW * LAMBDA];
  logic [HW-1:0]   hd   [LAMBDA];
  logic [DW-1:0]   hd_sum;
  logic            clr_busy;
  logic [CLW-1:0]  clr_idx;

  state_t          st;
  logic [CLW:0]    col;         // next column to enter
  logic [CLW-1:0]  col_cur;     // column being scanned
  logic [RW-1:0]   row;

  logic signed [DW-1:0] d;
  assign d = signed'(d_in);

  logic d_neg, d_zero, d_over;
  assign d_neg  = d[DW-1];
  assign d_zero = (d == '0);
  assign d_over = (d > signed'(hd_sum));

  // ---------------- table memory ----------------
  always_ff @(posedge clk) begin
    if (tbl_we) pmem[int'(tbl_col) * NROW + int'(tbl_row)] <= tbl_bit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_busy <= 1'b1;
      clr_idx  <= '0;
      hd_sum   <= '0;
    end else if (tbl_clr) begin
      clr_busy <= 1'b1;
      clr_idx  <= '0;
      hd_sum   <= '0;
    end else if (clr_busy) begin
      hd[clr_idx] <= '0;
      clr_idx     <= clr_idx + 1'b1;
      if (clr_idx == CLW'(LAMBDA - 1)) clr_busy <= 1'b0;
    end else if (tbl_we && tbl_bit) begin
      // each position is written once after a clear
      hd[tbl_col] <= hd[tbl_col] + 1'b1;
      hd_sum      <= hd_sum + 1'b1;
    end
  end

  // ---------------- walk ----------------
  always_comb begin
    op_a    = '0;
    op_b    = '0;
    op_cin  = 1'b0;
    r_ready = 1'b0;
    unique case (st)
      S_INIT: ;                                  // array computes d = 0
      S_COL: begin
        r_ready = en;
        if (r_valid) begin
          op_a   = {d[DW-2:0], ~r_bit};          // 2d + !r
          op_b   = ~DW'(hd[col[CLW-1:0]]);       // - HD[col] ...
          op_cin = 1'b1;                         // ... with the +1
        end else begin
          op_a   = d;
        end
      end
      S_CHK: begin
        op_a = d;                                // first row: d + P[0][col]
        op_b = d_neg ? DW'(pmem[int'(col_cur) * NROW]) : '0;
      end
      S_SIGN: begin
        r_ready = en;
        op_a    = d;
      end
      S_ROW: begin
        op_a = d;                                // d + P[row+1][col]
        op_b = (row == RW'(NROW - 1)) ? '0 :
               DW'(pmem[int'(col_cur) * NROW + int'(row) + 1]);
      end
      default: op_a = d;                         // hold d
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_INIT;
      col       <= '0;
      col_cur   <= '0;
      row       <= '0;
      smp_valid <= 1'b0;
      smp       <= '0;
    end else if (!en || clr_busy) begin
      st        <= S_INIT;
      smp_valid <= 1'b0;
    end else begin
      unique case (st)
        S_INIT: begin
          col <= '0;
          st  <= S_COL;
        end
        S_COL: if (r_valid) begin
          col_cur <= col[CLW-1:0];
          col     <= col + 1'b1;
          st      <= S_CHK;
        end
        S_CHK: begin
          row <= '0;
          if (d_neg)                      st <= S_ROW;   // leaf in this column
          else if (d_over)                st <= S_INIT;  // early stop
          else if (col == (CLW+1)'(LAMBDA)) st <= S_INIT; // out of columns
          else                            st <= S_COL;
        end
        S_ROW: begin
          if (d_zero)                          st  <= S_SIGN;
          else if (row == RW'(NROW - 1))       st  <= S_INIT; // malformed table
          else                                 row <= row + 1'b1;
        end
        S_SIGN: if (r_valid) begin
          smp       <= r_bit ? -signed'(SW'(row)) : signed'(SW'(row));
          smp_valid <= 1'b1;
          st        <= S_OUT;
        end
        S_OUT: if (smp_ready) begin
          smp_valid <= 1'b0;
          st        <= S_INIT;
        end
        default: st <= S_INIT;
      endcase
    end
  end
endmodule
