// Controller for an asynchronous 32K x 8 static RAM (IDT71256 class, 20 ns), two clock cycles
// per access.
//
// Requests enter a request FIFO (reqfifo) and are served strictly in order. A one-bit cycle
// register steps each request through two clock cycles. The head request drives the address
// and, for a write, the data bus with its output enable during both cycles; a write pulls
// nWE low during the first cycle only, so the data is latched on nWE's rising edge with one
// cycle of hold. A read samples the data bus at the end of the second cycle, after 40 ns of
// stable address, and puts the byte into a response FIFO (respfifo). A read only starts when
// respfifo has room. Writes give no response.
//
// Interface: req/resp are valid/ready streams; req_ready_o is reqfifo's not-full flag. Pins:
// sram_addr_o, sram_nwe_o, and the bidirectional data bus split into sram_dout_o,
// sram_doe_o (drive enable of the tri-state buffer) and sram_din_i. Chip select and output
// enable of the SRAM are assumed tied active on the board. Throughput: one access per two
// cycles; a read's data is in respfifo two cycles after it reaches the head.
// The two-cycle sequencing by a cycle register, the reqfifo/respfifo pair and the tri-state
// data bus follow the paper. Which cycle asserts nWE, and the FIFO depth of two, are assumed.
module sram_ctrl
  import acq_pkg::*;
#(
  parameter int unsigned REQ_DEPTH  = 2,
  parameter int unsigned RESP_DEPTH = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid_i,
  input  sram_req_t          req_i,
  output logic               req_ready_o,
  output logic               resp_valid_o,
  output logic [7:0]         resp_data_o,
  input  logic               resp_ready_i,
  output logic [SRAM_AW-1:0] sram_addr_o,
  output logic [7:0]         sram_dout_o,
  output logic               sram_doe_o,
  input  logic [7:0]         sram_din_i,
  output logic               sram_nwe_o
);
  sram_req_t head;
  logic      req_full, req_empty, resp_full, resp_empty;
  logic      cycle;
  logic      advance, finish;

  sync_fifo #(.WIDTH($bits(sram_req_t)), .DEPTH(REQ_DEPTH)) u_reqfifo (
    .clk, .rst_n, .enq(req_valid_i), .din(req_i), .deq(finish),
    .dout(head), .full(req_full), .empty(req_empty), .count()
  );
  assign req_ready_o = !req_full;

  // cycle_machine: first cycle starts when a request is present (and, for a read, respfifo
  // has room); second cycle retires it.
  assign advance = !cycle && !req_empty && (head.write || !resp_full);
  assign finish  = cycle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cycle <= 1'b0;
    else if (advance) cycle <= 1'b1;
    else if (finish) cycle <= 1'b0;
  end

  sync_fifo #(.WIDTH(8), .DEPTH(RESP_DEPTH)) u_respfifo (
    .clk, .rst_n, .enq(finish && !head.write), .din(sram_din_i), .deq(resp_ready_i),
    .dout(resp_data_o), .full(resp_full), .empty(resp_empty), .count()
  );
  assign resp_valid_o = !resp_empty;

  // fifo_to_wires
  assign sram_addr_o = head.addr;
  assign sram_dout_o = head.data;
  assign sram_doe_o  = !req_empty && head.write;
  assign sram_nwe_o  = !(advance && head.write);

  // A request in its second cycle is still the head of reqfifo.
  assert property (@(posedge clk) disable iff (!rst_n) cycle |-> !req_empty);

endmodule
