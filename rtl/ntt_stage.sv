// ntt_stage: one pipelined NTT unit (radix-2, single-path delay feedback,
// decimation in frequency) built around one reconfigurable butterfly_pe.
//
// Stage s of an n-point transform pairs elements D = n >> (s+1) apart.  A
// D-word delay line (a circular buffer addressed by j = cnt mod D) holds the
// first half of each 2D-element block.  While the second half arrives the
// butterfly combines the stored element u with the arriving one v: u + v
// leaves at once, (u - v) * w goes back into the delay line and leaves
// during the next D cycles, while the next block's first half is stored.
// The twiddle is w = omega^(j * 2^s) (forward) or omega^-(j * 2^s)
// (inverse), taken from two ROMs filled at initialisation.  After log2(n)
// stages the transform leaves in bit-reversed order.
//
// Timing: `start` marks the cycle in which element 0 is on `din`; elements
// follow one per cycle.  Element k leaves on `dout` D + 1 cycles after it
// entered and `start_out` marks element 0 on `dout`.  The stage keeps
// counting for D cycles after the n-th element to flush the delay line, so
// a new transform may start only after the previous one has left.
//
// In sampling mode (samp = 1) the delay line is idle and the butterfly is
// driven directly by the samp_* operands in the configuration pe_mode; its
// results are pe_hi_q / pe_lo_q / pe_cout.  The paper adopts a pipelined NTT
// from earlier work without giving its insides; the SDF organisation here is
// this design's choice.
module ntt_stage
  import lbc_pkg::*;
#(
  parameter int unsigned W     = lbc_pkg::W_DEF,
  parameter int unsigned Q     = lbc_pkg::Q_DEF,
  parameter int unsigned N     = lbc_pkg::N_DEF,
  parameter int unsigned STAGE = 0,
  parameter int unsigned OMEGA = (lbc_pkg::PSI_DEF * lbc_pkg::PSI_DEF) % lbc_pkg::Q_DEF
) (
  input  logic           clk,
  input  logic           rst_n,
  // NTT stream
  input  logic           inv,
  input  logic           start,
  input  logic [W-1:0]   din,
  output logic [W-1:0]   dout,
  output logic           start_out,
  // sampling access to the butterfly
  input  logic           samp,
  input  pe_mode_t       pe_mode,
  input  logic [W-1:0]   samp_u,
  input  logic [W-1:0]   samp_v,
  input  logic [W-1:0]   samp_w,
  input  logic           samp_cin,
  output logic [W-1:0]   pe_hi_q,
  output logic [2*W-1:0] pe_lo_q,
  output logic           pe_cout
);
  localparam int unsigned D   = N >> (STAGE + 1);
  localparam int unsigned DW  = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned CW  = $clog2(N + D + 1) + 1;
  localparam int unsigned OMEGA_INV = modpow(OMEGA, N - 1, Q);

  logic [W-1:0] tw_fwd [D];
  logic [W-1:0] tw_inv [D];
  initial begin
    for (int unsigned j = 0; j < D; j++) begin
      tw_fwd[j] = W'(modpow(OMEGA,     j << STAGE, Q));
      tw_inv[j] = W'(modpow(OMEGA_INV, j << STAGE, Q));
    end
  end

  logic [W-1:0]  dline [D];
  logic [CW-1:0] cnt;
  logic          active;
  logic [CW-1:0] cnt_now;        // counter value of the element on din
  logic          act_now;
  logic [DW-1:0] j_now;
  logic          ph_now;         // 0: first half of block, 1: second half
  logic [W-1:0]  u_old, tw;
  logic [W-1:0]  hi_d;
  logic [2*W-1:0] lo_d;

  always_comb begin
    cnt_now = start ? '0 : cnt;
    act_now = start | active;
    j_now   = (D > 1) ? cnt_now[DW-1:0] : '0;
    ph_now  = cnt_now[$clog2(D)];
    u_old   = dline[j_now];
    tw      = inv ? tw_inv[j_now] : tw_fwd[j_now];
  end

  butterfly_pe #(.W(W), .Q(Q)) u_pe (
    .clk, .rst_n, .en(samp),
    .mode(samp ? pe_mode : PE_ORD),
    .ntt_u(u_old), .ntt_v(din), .ntt_w(tw),
    .samp_u, .samp_v, .samp_w, .cin(samp_cin),
    .hi_d, .lo_d, .cout(pe_cout), .hi_q(pe_hi_q), .lo_q(pe_lo_q));

  // sample counter of the current transform
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      active <= 1'b0;
    end else if (start) begin
      cnt    <= CW'(1);
      active <= 1'b1;
    end else if (active) begin
      if (cnt == CW'(N + D - 1)) active <= 1'b0;
      cnt <= cnt + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (act_now && !samp) begin
      if (ph_now) dline[j_now] <= lo_d[W-1:0];
      else        dline[j_now] <= din;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout      <= '0;
      start_out <= 1'b0;
    end else begin
      dout      <= ph_now ? hi_d : dline[j_now];
      start_out <= act_now && !samp && (cnt_now == CW'(D));
    end
  end

  logic unused;
  assign unused = ^lo_d[2*W-1:W];
endmodule
