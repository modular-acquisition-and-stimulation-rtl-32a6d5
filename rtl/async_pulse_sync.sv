// Synchronizer for one asynchronous TTL pulse input.
//
// The input passes through a chain of STAGES flip-flops to settle metastability, and a further
// flip-flop holds the previous settled level. A rising edge of the settled level produces a
// one-cycle pulse on pulse_o, so a pulse of any length counts once. Latency from the input
// edge to pulse_o is STAGES clock cycles (plus up to one cycle of sampling uncertainty). Input
// pulses must be at least one clock period high and one low to be seen.
// The paper names this block and its job only; the two-flop chain and rising-edge detection
// are this design's choice.
module async_pulse_sync #(
  parameter int unsigned STAGES = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic async_i,
  output logic pulse_o
);
  logic [STAGES-1:0] chain;
  logic              last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chain <= '0;
      last  <= 1'b0;
    end else begin
      chain <= {chain[STAGES-2:0], async_i};
      last  <= chain[STAGES-1];
    end
  end

  assign pulse_o = chain[STAGES-1] && !last;

endmodule
