// tb_poly_ram: writes random words to every address, reads them back with
// the one-cycle read latency, and checks read-during-write returns the old
// word.
module tb_poly_ram;
  localparam int unsigned W = 14, DEPTH = 512, AW = 9;
  logic clk = 0, we;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  poly_ram #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = AW'(i); wdata = W'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < DEPTH; i++) begin
      raddr = AW'(DEPTH - 1 - i);
      @(negedge clk);
      checks++;
      if (rdata !== model[DEPTH - 1 - i]) begin failures++; $display("FAIL addr %0d", DEPTH-1-i); end
    end
    // read-during-write: old data
    raddr = 7; waddr = 7; wdata = ~model[7]; we = 1;
    @(negedge clk); we = 0; checks++;
    if (rdata !== model[7]) begin failures++; $display("FAIL rdw"); end
    @(negedge clk); checks++;
    if (rdata !== ~model[7]) begin failures++; $display("FAIL after write"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
