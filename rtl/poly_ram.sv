// poly_ram: coefficient memory (one polynomial), a simple dual-port RAM
// with one write port and one synchronous read port, as an FPGA block RAM
// provides.  rdata shows the word at raddr one cycle after raddr was
// applied; a read and a write of the same address in one cycle returns the
// old word.  Depth and width are parameters; the use of block RAM follows
// the paper, the port arrangement is this design's choice.
module poly_ram #(
  parameter int unsigned W     = lbc_pkg::W_DEF,
  parameter int unsigned DEPTH = lbc_pkg::N_DEF,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
