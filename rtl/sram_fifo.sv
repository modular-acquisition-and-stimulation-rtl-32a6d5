// Byte FIFO kept in one region of the external SRAM ("SRAMFIFO"), with a one-byte flip-flop
// cache at its output.
//
// The FIFO side behaves like a small hardware FIFO: enq_i with not_full_o, and first_o,
// not_empty_o and deq_i at the output, where first_o always comes from the cache register.
// Bytes that cannot go straight into the cache are queued in a small write buffer and then
// written to the SRAM ring at the tail pointer. Whenever the cache is empty and the ring holds
// data, a read of the head pointer is sent to the SRAM and its response refills the cache. A
// byte enqueued while cache, ring, write buffer and outstanding read are all empty goes
// straight into the cache (also when the cache is dequeued in the same cycle), so an idle FIFO
// passes data through in one cycle without touching the SRAM.
//
// The memory client side (cli) issues one request per cycle over a valid/ready handshake and
// takes read data on resp_valid_i. When a read and a write are both waiting, the operation
// other than the last one issued goes first (least recently used), except that with the head
// and tail pointers equal the read goes first. Capacity: 2**AW bytes in the ring plus the
// cache byte and up to WQ_DEPTH bytes in the write buffer; not_full_o drops when ring and
// write buffer together hold 2**AW bytes or the write buffer is full.
// From the paper: SRAM ring with head/tail pointers, one-byte cache at the output, read on
// cache empty, write when the cache has no room, read-before-write on equal pointers, LRU by
// last operation. Own choices: the write buffer, its depth, and the bypass condition.
module sram_fifo
  import acq_pkg::*;
#(
  parameter int unsigned AW       = FIFO_AW,
  parameter int unsigned WQ_DEPTH = 2
) (
  input  logic      clk,
  input  logic      rst_n,
  // FIFO side
  input  logic      enq_i,
  input  logic [7:0] enq_data_i,
  output logic      not_full_o,
  input  logic      deq_i,
  output logic [7:0] first_o,
  output logic      not_empty_o,
  // memory client side
  output logic      req_valid_o,
  output fifo_req_t req_o,
  input  logic      req_ready_i,
  input  logic      resp_valid_i,
  input  logic [7:0] resp_data_i
);
  localparam int unsigned CW = $clog2(WQ_DEPTH + 1);

  logic          cache_v;
  logic [7:0]    cache_d;
  logic [AW-1:0] head, tail;
  logic [AW:0]   ring_cnt;
  logic          rd_out;
  logic          last_write;   // last memory operation issued was a write

  logic [7:0]    wq_head;
  logic          wq_full, wq_empty;
  logic [CW-1:0] wq_cnt;

  logic enq_ok, deq_ok, path_empty, to_cache, to_wq;
  logic rd_cand, wr_cand, pick_read, issue;

  assign enq_ok     = enq_i && not_full_o;
  assign deq_ok     = deq_i && cache_v;
  assign path_empty = !rd_out && (ring_cnt == '0) && wq_empty;
  assign to_cache   = enq_ok && path_empty && (!cache_v || deq_ok);
  assign to_wq      = enq_ok && !to_cache;

  assign not_full_o  = !wq_full && (({{(AW + 1 - CW){1'b0}}, wq_cnt} + ring_cnt) < (AW + 1)'(2**AW));
  assign not_empty_o = cache_v;
  assign first_o     = cache_d;

  sync_fifo #(.WIDTH(8), .DEPTH(WQ_DEPTH)) u_wq (
    .clk, .rst_n, .enq(to_wq), .din(enq_data_i), .deq(issue && !pick_read),
    .dout(wq_head), .full(wq_full), .empty(wq_empty), .count(wq_cnt)
  );

  // Request selection (compute_req_turn)
  assign rd_cand = (ring_cnt != '0) && !rd_out && !cache_v;
  assign wr_cand = !wq_empty;
  always_comb begin
    if (rd_cand && wr_cand) pick_read = (head == tail) ? 1'b1 : last_write;
    else                    pick_read = rd_cand;
  end

  assign req_valid_o = rd_cand || wr_cand;
  assign req_o       = pick_read ? '{write: 1'b0, addr: head, data: 8'h00}
                                 : '{write: 1'b1, addr: tail, data: wq_head};
  assign issue       = req_valid_o && req_ready_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cache_v    <= 1'b0;
      cache_d    <= '0;
      head       <= '0;
      tail       <= '0;
      ring_cnt   <= '0;
      rd_out     <= 1'b0;
      last_write <= 1'b0;
    end else begin
      // cache register
      if (to_cache) begin
        cache_v <= 1'b1;
        cache_d <= enq_data_i;
      end else if (resp_valid_i) begin
        cache_v <= 1'b1;
        cache_d <= resp_data_i;
      end else if (deq_ok) begin
        cache_v <= 1'b0;
      end
      if (resp_valid_i) rd_out <= 1'b0;
      // memory requests
      if (issue) begin
        last_write <= !pick_read;
        if (pick_read) begin
          head     <= head + 1'b1;
          ring_cnt <= ring_cnt - 1'b1;
          rd_out   <= 1'b1;
        end else begin
          tail     <= tail + 1'b1;
          ring_cnt <= ring_cnt + 1'b1;
        end
      end
    end
  end

  // A read response only arrives for an outstanding read, into an empty cache.
  assert property (@(posedge clk) disable iff (!rst_n) resp_valid_i |-> rd_out && !cache_v);

endmodule
