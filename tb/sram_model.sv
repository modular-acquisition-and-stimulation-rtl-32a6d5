// Behavioural model of a 32K x 8 asynchronous SRAM (IDT71256 class) for simulation only.
//
// Reads are combinational: dout_o always shows the byte at addr_i. A write happens at each
// rising clock edge while nwe_i is low, taking din_i (the bus value the controller drives).
// The clock input exists only to give the model a well-defined write instant; the real chip
// has none. Memory starts cleared. Not synthesizable as a model of the real part's timing.
module sram_model #(
  parameter int unsigned AW = 15
) (
  input  logic          clk,
  input  logic [AW-1:0] addr_i,
  input  logic [7:0]    din_i,
  input  logic          doe_i,
  input  logic          nwe_i,
  output logic [7:0]    dout_o
);
  logic [7:0] mem [2**AW];
  int unsigned writes, reads_seen;

  initial begin
    foreach (mem[i]) mem[i] = 8'h00;
    writes = 0;
  end

  assign dout_o = mem[addr_i];

  always @(posedge clk) begin
    if (!nwe_i) begin
      mem[addr_i] <= din_i;
      writes      <= writes + 1;
      if (!doe_i) $display("sram_model: write without data drive at %0h", addr_i);
    end
  end

endmodule
