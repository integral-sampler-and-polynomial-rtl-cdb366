// mod_mul: reconfigurable modular multiplier.
//
// Computes the full 2W-bit product a*b and either returns it unchanged
// (gen = 1, "general multiplier", used to build wide products for the
// sampler) or reduces it modulo Q with Barrett reduction (gen = 0).  The
// Barrett constant is MU = floor(2^(2W) / Q); the estimate t = (a*b*MU) >>
// 2W is at most two below the true quotient, so two conditional
// subtractions of Q finish the reduction.  Operands must be below Q in
// modular mode.  Purely combinational; the caller registers the result.
//
// The paper names Barrett reduction and the bypass of the reduction; the
// particular Barrett variant is this design's choice.
module mod_mul #(
  parameter int unsigned W = lbc_pkg::W_DEF,
  parameter int unsigned Q = lbc_pkg::Q_DEF
) (
  input  logic [W-1:0]   a,
  input  logic [W-1:0]   b,
  input  logic           gen,
  output logic [2*W-1:0] p
);
  localparam longint unsigned MU_L = (64'd1 << (2*W)) / 64'(Q);
  localparam int unsigned     MUW  = W + 2;
  localparam logic [MUW-1:0]  MU   = MUW'(MU_L);

  logic [2*W-1:0]     prod;
  logic [3*W+1:0]     pm;
  logic [W+1:0]       t;
  logic [2*W-1:0]     r0, r1, r2;

  always_comb begin
    prod = {{W{1'b0}}, a} * {{W{1'b0}}, b};
    pm   = (3*W+2)'(prod) * (3*W+2)'(MU);
    t    = (W+2)'(pm >> (2*W));
    r0   = prod - (2*W)'(t) * (2*W)'(Q);
    r1   = (r0 >= (2*W)'(Q)) ? r0 - (2*W)'(Q) : r0;
    r2   = (r1 >= (2*W)'(Q)) ? r1 - (2*W)'(Q) : r1;
    p    = gen ? prod : r2;
  end
endmodule
