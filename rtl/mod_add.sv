// mod_add: reconfigurable modular adder / subtractor.
//
// With gen = 0 it is the modular adder of the butterfly unit: s = a + b mod Q
// (sub = 0) or s = a - b mod Q (sub = 1); both inputs must be below Q and the
// reduction is one conditional correction by Q.  With gen = 1 the reduction is
// bypassed and the unit is a plain W-bit adder {cout, s} = a + (sub ? ~b : b)
// + cin, so that several units can be cascaded through cin/cout into a wider
// general adder.  Purely combinational.
//
// The modular/general split and the cascading follow the paper; the carry
// convention (subtraction in general mode as a + ~b + cin, cin = 1 from the
// caller) is this design's choice.
module mod_add #(
  parameter int unsigned W = lbc_pkg::W_DEF,
  parameter int unsigned Q = lbc_pkg::Q_DEF
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         sub,
  input  logic         gen,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic         cout
);
  localparam logic [W:0] QW = (W+1)'(Q);

  logic [W:0] t_add, t_sub, t_gen;

  always_comb begin
    t_add = {1'b0, a} + {1'b0, b};
    t_sub = {1'b0, a} - {1'b0, b};
    t_gen = {1'b0, a} + {1'b0, (sub ? ~b : b)} + (W+1)'(cin);
    if (gen) begin
      s    = t_gen[W-1:0];
      cout = t_gen[W];
    end else if (sub) begin
      // borrow: a < b, add Q back
      s    = t_sub[W] ? W'(t_sub + QW) : t_sub[W-1:0];
      cout = 1'b0;
    end else begin
      s    = (t_add >= QW) ? W'(t_add - QW) : t_add[W-1:0];
      cout = 1'b0;
    end
  end
endmodule
