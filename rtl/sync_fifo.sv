// Synchronous first-in first-out buffer built from flip-flops.
//
// Holds up to DEPTH words of WIDTH bits. The head word is visible on dout whenever empty is
// low. enq is accepted only when full is low and deq only when empty is low; both may happen
// in the same cycle. full, empty and count are registered state, so no output depends
// combinationally on enq or deq. Reset empties the buffer. This helper stands in for the
// small FIFO library modules that the design uses throughout.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       enq,
  input  logic [WIDTH-1:0]           din,
  input  logic                       deq,
  output logic [WIDTH-1:0]           dout,
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;

  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rd_ptr];

  function automatic logic [PW-1:0] next_ptr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (enq && !full) wr_ptr <= next_ptr(wr_ptr);
      if (deq && !empty) rd_ptr <= next_ptr(rd_ptr);
      case ({enq && !full, deq && !empty})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (enq && !full) mem[wr_ptr] <= din;
  end

endmodule
