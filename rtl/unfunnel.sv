// Deserializer ("unfunnel"): merges OUT_BYTES consecutive bytes into one word, the first byte
// received becoming the most significant.
//
// Bytes shift into a register through a valid/ready handshake. When OUT_BYTES bytes are in,
// the word is offered on out_data_o with out_valid_o high, and no byte is accepted until the
// word is taken. A word therefore takes at least OUT_BYTES + 1 cycles.
// The paper gives the function (three bytes merged into one DAC request) and says the block
// is a shift register; the handshake and the first-byte-most-significant order are this
// design's choice, matching the serializer.
module unfunnel #(
  parameter int unsigned OUT_BYTES = 3
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid_i,
  input  logic [7:0]             in_data_i,
  output logic                   in_ready_o,
  output logic                   out_valid_o,
  output logic [8*OUT_BYTES-1:0] out_data_o,
  input  logic                   out_ready_i
);
  localparam int unsigned CW = $clog2(OUT_BYTES + 1);

  logic [CW-1:0] count;

  assign in_ready_o  = (count != CW'(OUT_BYTES));
  assign out_valid_o = (count == CW'(OUT_BYTES));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count      <= '0;
      out_data_o <= '0;
    end else if (out_valid_o) begin
      if (out_ready_i) count <= '0;
    end else if (in_valid_i) begin
      out_data_o <= {out_data_o[8*OUT_BYTES-9:0], in_data_i};
      count      <= count + 1'b1;
    end
  end

endmodule
