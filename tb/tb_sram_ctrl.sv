// Testbench for sram_ctrl with a behavioural SRAM: random writes and reads over the full
// address space, read data compared with a reference array, in-order responses, and the
// two-cycle access rate when requests arrive back to back.
module tb_sram_ctrl;
  import acq_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, resp_valid, resp_ready = 1;
  sram_req_t req;
  logic [7:0] resp_data, sdout, sdin;
  logic [SRAM_AW-1:0] saddr;
  logic sdoe, snwe;
  logic [7:0] ref_mem [2**SRAM_AW];
  logic [7:0] exp_q [$];
  int checks = 0, failures = 0, cyc = 0, nreq = 0, t0 = 0, nresp = 0;

  sram_ctrl dut (.clk, .rst_n, .req_valid_i(req_valid), .req_i(req), .req_ready_o(req_ready),
    .resp_valid_o(resp_valid), .resp_data_o(resp_data), .resp_ready_i(resp_ready),
    .sram_addr_o(saddr), .sram_dout_o(sdout), .sram_doe_o(sdoe), .sram_din_i(sdin),
    .sram_nwe_o(snwe));
  sram_model #(.AW(SRAM_AW)) mem (.clk, .addr_i(saddr), .din_i(sdout), .doe_i(sdoe),
    .nwe_i(snwe), .dout_o(sdin));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && resp_valid && resp_ready) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected response"); end
    else begin
      logic [7:0] e;
      e = exp_q.pop_front();
      if (resp_data !== e) begin failures++; $display("FAIL: read %h expected %h", resp_data, e); end
    end
    nresp++;
  end

  task automatic send(bit wr, logic [SRAM_AW-1:0] a, logic [7:0] d);
    @(negedge clk);
    req_valid = 1;
    req = '{write: wr, addr: a, data: d};
    forever begin
      bit acc;
      #1 acc = req_ready;
      @(posedge clk);
      if (acc) break;
      @(negedge clk);
    end
    if (wr) ref_mem[a] = d;
    else exp_q.push_back(ref_mem[a]);
    nreq++;
    @(negedge clk);
    req_valid = 0;
  endtask

  initial begin
    foreach (ref_mem[i]) ref_mem[i] = 8'h00;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) send(1, SRAM_AW'(i * 509), 8'(i * 7 + 3));
    for (int i = 0; i < 64; i++) send(0, SRAM_AW'(i * 509), 8'h00);
    // random traffic with random response backpressure
    fork
      for (int i = 0; i < 600; i++)
        send($urandom_range(0, 1), SRAM_AW'($urandom_range(0, 63) * 509), 8'($urandom));
      repeat (3000) begin @(negedge clk); resp_ready = $urandom_range(0, 3) != 0; end
    join_any
    resp_ready = 1;
    repeat (20) @(posedge clk);
    // throughput: 100 writes back to back must take 200 cycles
    @(negedge clk);
    t0 = cyc;
    for (int i = 0; i < 100; i++) begin
      req_valid = 1;
      req = '{write: 1'b1, addr: SRAM_AW'(i), data: 8'(i)};
      ref_mem[i] = 8'(i);
      forever begin
        bit acc;
        #1 acc = req_ready;
        @(posedge clk);
        @(negedge clk);
        if (acc) break;
      end
    end
    req_valid = 0;
    while (!snwe || sdoe) @(posedge clk);
    checks++;
    if (cyc - t0 > 204 || cyc - t0 < 198) begin
      failures++;
      $display("FAIL: 100 writes took %0d cycles", cyc - t0);
    end
    for (int i = 0; i < 100; i++) send(0, SRAM_AW'(i), 8'h00);
    repeat (20) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d responses missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
