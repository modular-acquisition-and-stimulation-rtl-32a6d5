// Two-client arbiter in front of one SRAM controller ("SRAMSplit", dynamic arbitration).
//
// Each client (server port A and B) has a request FIFO (reqfifo). Every cycle at most one head
// request is forwarded to the SRAM controller: if only one FIFO holds a request it wins; if
// both do, the one granted less recently wins, tracked by a one-bit turn register that every
// grant updates. A forwarded read pushes its client number into a pending FIFO, and read data
// coming back from the controller is handed to the client at the head of pending, so
// responses return in request order. Client A's addresses are mapped to the lower half of the
// SRAM and client B's to the upper half.
//
// Interface: per client a request stream (valid/ready, ready = reqfifo not full) and a
// response strobe resp_valid_o[c] with the shared byte resp_data_o; clients must accept a
// response whenever it comes. SRAM pins as in sram_ctrl. Latency of a read with both queues
// empty: request accepted in cycle t, forwarded at t+1, SRAM access t+2..t+3, response
// strobe at t+4.
// Request FIFOs, the three mutually exclusive grant cases, the LRU turn register and the
// pending FIFO follow the paper. FIFO depths and the address split are assumed.
module sram_split
  import acq_pkg::*;
#(
  parameter int unsigned REQ_DEPTH     = 2,
  parameter int unsigned PENDING_DEPTH = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [1:0]         req_valid_i,
  input  fifo_req_t [1:0]    req_i,
  output logic [1:0]         req_ready_o,
  output logic [1:0]         resp_valid_o,
  output logic [7:0]         resp_data_o,
  output logic [SRAM_AW-1:0] sram_addr_o,
  output logic [7:0]         sram_dout_o,
  output logic               sram_doe_o,
  input  logic [7:0]         sram_din_i,
  output logic               sram_nwe_o
);
  fifo_req_t [1:0] head;
  logic [1:0]      q_full, q_empty, grant;
  logic            turn;            // client that wins when both request
  logic            pend_full, pend_empty, pend_id;
  logic            ctrl_ready, ctrl_resp_valid;
  sram_req_t       ctrl_req;
  logic            sel, fwd;

  for (genvar c = 0; c < 2; c++) begin : g_client
    sync_fifo #(.WIDTH($bits(fifo_req_t)), .DEPTH(REQ_DEPTH)) u_reqfifo (
      .clk, .rst_n, .enq(req_valid_i[c]), .din(req_i[c]), .deq(grant[c]),
      .dout(head[c]), .full(q_full[c]), .empty(q_empty[c]), .count()
    );
    assign req_ready_o[c] = !q_full[c];
  end

  // getPrioritizeValid(0), getPrioritizeValid(1) and prioritize_current_turn
  always_comb begin
    unique case ({!q_empty[1], !q_empty[0]})
      2'b01:   sel = 1'b0;
      2'b10:   sel = 1'b1;
      2'b11:   sel = turn;
      default: sel = 1'b0;
    endcase
  end

  assign fwd      = (q_empty != 2'b11) && ctrl_ready && !pend_full;
  assign grant    = fwd ? (sel ? 2'b10 : 2'b01) : 2'b00;
  assign ctrl_req = '{write: head[sel].write, addr: {sel, head[sel].addr}, data: head[sel].data};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) turn <= 1'b0;
    else if (fwd) turn <= !sel;
  end

  sync_fifo #(.WIDTH(1), .DEPTH(PENDING_DEPTH)) u_pending (
    .clk, .rst_n, .enq(fwd && !head[sel].write), .din(sel), .deq(ctrl_resp_valid),
    .dout(pend_id), .full(pend_full), .empty(pend_empty), .count()
  );

  sram_ctrl u_sram (
    .clk, .rst_n,
    .req_valid_i(fwd), .req_i(ctrl_req), .req_ready_o(ctrl_ready),
    .resp_valid_o(ctrl_resp_valid), .resp_data_o(resp_data_o), .resp_ready_i(1'b1),
    .sram_addr_o, .sram_dout_o, .sram_doe_o, .sram_din_i, .sram_nwe_o
  );

  assign resp_valid_o = ctrl_resp_valid ? (pend_id ? 2'b10 : 2'b01) : 2'b00;

  // Every read response has a matching pending entry.
  assert property (@(posedge clk) disable iff (!rst_n) ctrl_resp_valid |-> !pend_empty);

endmodule
