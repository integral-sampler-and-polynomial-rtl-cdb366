// butterfly_pe: reconfigurable butterfly unit (processing element).
//
// One modular adder on the upper path, one modular subtractor followed by a
// modular multiplier on the lower path, as in a Gentleman-Sande butterfly:
//   PE_ORD: hi = u + v mod Q,  lo = (u - v) * w mod Q   (NTT operation)
//   PE_MUL: lo = v * w (full 2W-bit general product)   (sampling multiply)
//   PE_ADD: {cout, hi} = u + v + cin (general W-bit add)  (sampling add)
// Three input MUXes choose between the NTT operands (ntt_*) and the sampling
// operands (samp_*): con[0] for the upper input, con[1] for the lower input
// and con[2] for the multiplier's second operand; in the two sampling modes
// all three select the sampling operands.  In PE_MUL the lower adder only
// forwards the lower input (the crossing path from the upper input is off),
// and in PE_ADD the lower path is idle.
//
// hi_d / lo_d / cout are the combinational results (cout is meant to feed the
// cin of the next unit of a cascaded adder within the same cycle); hi_q /
// lo_q are the same results registered when en = 1.  The MUX structure and
// the three configurations follow the paper's butterfly figure; how a
// configuration maps onto con[2:0] and the forwarding in PE_MUL are this
// design's choices.
module butterfly_pe
  import lbc_pkg::*;
#(
  parameter int unsigned W = lbc_pkg::W_DEF,
  parameter int unsigned Q = lbc_pkg::Q_DEF
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  pe_mode_t       mode,
  input  logic [W-1:0]   ntt_u,
  input  logic [W-1:0]   ntt_v,
  input  logic [W-1:0]   ntt_w,
  input  logic [W-1:0]   samp_u,
  input  logic [W-1:0]   samp_v,
  input  logic [W-1:0]   samp_w,
  input  logic           cin,
  output logic [W-1:0]   hi_d,
  output logic [2*W-1:0] lo_d,
  output logic           cout,
  output logic [W-1:0]   hi_q,
  output logic [2*W-1:0] lo_q
);
  logic [2:0]     con;
  logic [W-1:0]   u, v, w, lo_in, sum_hi, dif_lo;
  logic           gen, c_hi, c_lo;
  logic [2*W-1:0] prod;

  assign con = (mode == PE_ORD) ? 3'b000 : 3'b111;
  assign gen = (mode != PE_ORD);
  assign u   = con[0] ? samp_u : ntt_u;
  assign v   = con[1] ? samp_v : ntt_v;
  assign w   = con[2] ? samp_w : ntt_w;

  // upper path: modular adder, or general adder with carry
  mod_add #(.W(W), .Q(Q)) u_add_hi (
    .a(u), .b(v), .sub(1'b0), .gen(gen), .cin(cin), .s(sum_hi), .cout(c_hi));

  // lower path: u - v, or v alone (crossing input switched off) for PE_MUL
  mod_add #(.W(W), .Q(Q)) u_add_lo (
    .a((mode == PE_MUL) ? W'(0) : u), .b(v), .sub(mode != PE_MUL), .gen(gen),
    .cin(1'b0), .s(dif_lo), .cout(c_lo));

  assign lo_in = dif_lo;

  mod_mul #(.W(W), .Q(Q)) u_mul (.a(lo_in), .b(w), .gen(gen), .p(prod));

  always_comb begin
    hi_d = (mode == PE_MUL) ? '0 : sum_hi;
    lo_d = (mode == PE_ADD) ? '0 : prod;
    cout = (mode == PE_ADD) ? c_hi : 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hi_q <= '0;
      lo_q <= '0;
    end else if (en) begin
      hi_q <= hi_d;
      lo_q <= lo_d;
    end
  end

  // c_lo is unused: the lower adder never cascades.
  logic unused_c_lo;
  assign unused_c_lo = c_lo;
endmodule
