// Testbench for sram_fifo. Two FIFOs share one behavioural SRAM through sram_split, as in the
// full system: FIFO 0 is reduced to a 16-byte ring so that its full condition is reached,
// FIFO 1 keeps the default 16 KiB ring. Random enqueues and dequeues on both are compared with
// reference queues. Also checked: an idle FIFO passes a byte through its cache in one cycle
// without an SRAM access, and FIFO 0 accepts exactly ring size plus one cache byte before
// not_full drops.
module tb_sram_fifo;
  import acq_pkg::*;
  localparam int SMALL_AW = 4;
  logic clk = 0, rst_n = 0;
  logic [1:0] enq = '0, deq = '0, not_full, not_empty;
  logic [7:0] enq_data [2], first [2];
  logic [1:0] req_valid, req_ready, resp_valid;
  fifo_req_t [1:0] req;
  logic [7:0] resp_data, sdout, sdin;
  logic [SRAM_AW-1:0] saddr;
  logic sdoe, snwe;
  logic [7:0] model [2][$];
  int checks = 0, failures = 0, deqs [2];

  sram_fifo #(.AW(SMALL_AW)) f0 (.clk, .rst_n, .enq_i(enq[0]), .enq_data_i(enq_data[0]),
    .not_full_o(not_full[0]), .deq_i(deq[0]), .first_o(first[0]), .not_empty_o(not_empty[0]),
    .req_valid_o(req_valid[0]), .req_o(req[0]), .req_ready_i(req_ready[0]),
    .resp_valid_i(resp_valid[0]), .resp_data_i(resp_data));
  sram_fifo f1 (.clk, .rst_n, .enq_i(enq[1]), .enq_data_i(enq_data[1]),
    .not_full_o(not_full[1]), .deq_i(deq[1]), .first_o(first[1]), .not_empty_o(not_empty[1]),
    .req_valid_o(req_valid[1]), .req_o(req[1]), .req_ready_i(req_ready[1]),
    .resp_valid_i(resp_valid[1]), .resp_data_i(resp_data));
  sram_split split (.clk, .rst_n, .req_valid_i(req_valid), .req_i(req), .req_ready_o(req_ready),
    .resp_valid_o(resp_valid), .resp_data_o(resp_data),
    .sram_addr_o(saddr), .sram_dout_o(sdout), .sram_doe_o(sdoe), .sram_din_i(sdin),
    .sram_nwe_o(snwe));
  sram_model #(.AW(SRAM_AW)) mem (.clk, .addr_i(saddr), .din_i(sdout), .doe_i(sdoe),
    .nwe_i(snwe), .dout_o(sdin));

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // drives one cycle of random traffic on FIFO c; decisions use pre-edge values
  task automatic step(int c, int p_enq, int p_deq);
    bit e, d;
    @(negedge clk);
    enq[c] = $urandom_range(0, 99) < p_enq;
    deq[c] = $urandom_range(0, 99) < p_deq;
    enq_data[c] = 8'($urandom);
    #1;
    e = enq[c] && not_full[c];
    d = deq[c] && not_empty[c];
    if (d) begin
      check(model[c].size() > 0 && first[c] == model[c][0],
            $sformatf("fifo %0d: first %h, expected %h", c, first[c], model[c][0]));
      void'(model[c].pop_front());
      deqs[c]++;
    end
    if (e) model[c].push_back(enq_data[c]);
    @(posedge clk);
  endtask

  initial begin
    int n;
    deqs = '{0, 0};
    enq_data = '{8'h00, 8'h00};
    repeat (3) @(posedge clk);
    rst_n = 1;
    // bypass: a byte into an idle FIFO is visible after one cycle, with no SRAM write
    @(negedge clk);
    enq[1] = 1; enq_data[1] = 8'hA5;
    @(negedge clk);
    enq[1] = 0;
    check(not_empty[1] && first[1] == 8'hA5, "bypass byte not visible after one cycle");
    check(mem.writes == 0, "bypass byte went through the SRAM");
    deq[1] = 1;
    @(negedge clk);
    deq[1] = 0;
    // capacity of FIFO 0: fill with no dequeue
    n = 0;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      enq[0] = 1; enq_data[0] = 8'(i);
      #1;
      if (not_full[0]) begin model[0].push_back(8'(i)); n++; end
      @(posedge clk);
    end
    @(negedge clk);
    enq[0] = 0;
    check(n == 2**SMALL_AW + 1, $sformatf("small FIFO took %0d bytes", n));
    check(mem.writes == 2**SMALL_AW, $sformatf("%0d SRAM writes while filling", mem.writes));
    // random traffic on both FIFOs
    fork
      repeat (4000) step(0, 50, 50);
      begin
        repeat (1500) step(1, 70, 20);   // build up a backlog in the SRAM
        repeat (2500) step(1, 30, 70);
      end
    join
    // drain
    fork
      while (model[0].size() > 0) step(0, 0, 100);
      while (model[1].size() > 0) step(1, 0, 100);
    join
    @(negedge clk);
    enq = '0; deq = '0;
    repeat (20) @(negedge clk);
    check(!not_empty[0] && !not_empty[1], "FIFO not empty after drain");
    check(deqs[0] > 300 && deqs[1] > 300, "too little traffic");
    $display("dequeues %0d %0d, SRAM writes %0d", deqs[0], deqs[1], mem.writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
