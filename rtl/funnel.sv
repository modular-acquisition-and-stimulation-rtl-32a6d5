// Serializer ("funnel"): turns each IN_BYTES-byte word into IN_BYTES bytes, one per cycle,
// most significant byte first.
//
// Words wait in an input FIFO of IN_DEPTH entries, whose not-full flag is in_ready_o. In the
// first stage the head word is popped, its top byte goes to the output FIFO and the rest is
// kept in a shift register; each following stage sends the top byte of the shift register and
// shifts it left by one byte. A stage only advances when the output FIFO has room. Bytes leave
// through an output FIFO of OUT_DEPTH entries with a valid/ready handshake.
// Follows the paper's serializer code (first-cycle and later-stage rules, MSB-first shifting,
// input and output FIFOs). The FIFO depths of two are assumed.
module funnel #(
  parameter int unsigned IN_BYTES  = 5,
  parameter int unsigned IN_DEPTH  = 2,
  parameter int unsigned OUT_DEPTH = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid_i,
  input  logic [8*IN_BYTES-1:0] in_data_i,
  output logic                  in_ready_o,
  output logic                  out_valid_o,
  output logic [7:0]            out_data_o,
  input  logic                  out_ready_i
);
  localparam int unsigned W  = 8 * IN_BYTES;
  localparam int unsigned SW = $clog2(IN_BYTES);

  logic [W-1:0]  in_head, shift_reg;
  logic          in_full, in_empty, out_full, out_empty;
  logic [SW-1:0] stage;
  logic          first_cycle, later_cycle;
  logic [7:0]    out_byte;

  sync_fifo #(.WIDTH(W), .DEPTH(IN_DEPTH)) u_infifo (
    .clk, .rst_n, .enq(in_valid_i), .din(in_data_i), .deq(first_cycle),
    .dout(in_head), .full(in_full), .empty(in_empty), .count()
  );

  assign in_ready_o  = !in_full;
  assign first_cycle = (stage == '0) && !in_empty && !out_full;
  assign later_cycle = (stage != '0) && !out_full;
  assign out_byte    = first_cycle ? in_head[W-1 -: 8] : shift_reg[W-1 -: 8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage     <= '0;
      shift_reg <= '0;
    end else if (first_cycle || later_cycle) begin
      shift_reg <= first_cycle ? (in_head << 8) : (shift_reg << 8);
      stage     <= (stage == SW'(IN_BYTES - 1)) ? '0 : stage + 1'b1;
    end
  end

  sync_fifo #(.WIDTH(8), .DEPTH(OUT_DEPTH)) u_outfifo (
    .clk, .rst_n, .enq(first_cycle || later_cycle), .din(out_byte),
    .deq(out_ready_i), .dout(out_data_o), .full(out_full), .empty(out_empty), .count()
  );

  assign out_valid_o = !out_empty;

endmodule
