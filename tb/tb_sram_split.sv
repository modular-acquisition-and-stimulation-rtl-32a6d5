// Testbench for sram_split with a behavioural SRAM: two clients issue random reads and writes
// into their own halves of the SRAM; each client's read data must match a reference memory and
// arrive at that client in request order. With both clients always requesting, grants must
// alternate (least recently used), so both see the same number of accesses within one.
module tb_sram_split;
  import acq_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [1:0] req_valid = '0, req_ready, resp_valid;
  fifo_req_t [1:0] req;
  logic [7:0] resp_data, sdout, sdin;
  logic [SRAM_AW-1:0] saddr;
  logic sdoe, snwe;
  logic [7:0] ref_mem [2][64];
  logic [7:0] exp_q [2][$];
  int checks = 0, failures = 0, issued [2], grants [2];
  bit both_busy = 0;

  sram_split dut (.clk, .rst_n, .req_valid_i(req_valid), .req_i(req), .req_ready_o(req_ready),
    .resp_valid_o(resp_valid), .resp_data_o(resp_data),
    .sram_addr_o(saddr), .sram_dout_o(sdout), .sram_doe_o(sdoe), .sram_din_i(sdin),
    .sram_nwe_o(snwe));
  sram_model #(.AW(SRAM_AW)) mem (.clk, .addr_i(saddr), .din_i(sdout), .doe_i(sdoe),
    .nwe_i(snwe), .dout_o(sdin));

  always #5 clk = ~clk;

  // grants seen at the SRAM pins: client = top address bit of each access start
  always @(posedge clk) if (rst_n && both_busy && dut.fwd) grants[dut.sel]++;

  // with both request FIFOs holding requests, the client not granted last must win
  int last_grant = -1, lru_checks = 0;
  always @(posedge clk) if (rst_n && dut.fwd) begin
    if (dut.q_empty == 2'b00 && last_grant >= 0) begin
      checks++;
      lru_checks++;
      if (int'(dut.sel) == last_grant) begin
        failures++;
        $display("FAIL: client %0d granted twice while both waited", last_grant);
      end
    end
    last_grant = int'(dut.sel);
  end

  for (genvar c = 0; c < 2; c++) begin : g_cli
    always @(posedge clk) if (rst_n && resp_valid[c]) begin
      checks++;
      if (exp_q[c].size() == 0) begin failures++; $display("FAIL: client %0d extra response", c); end
      else begin
        logic [7:0] e;
        e = exp_q[c].pop_front();
        if (resp_data !== e) begin
          failures++;
          $display("FAIL: client %0d read %h expected %h", c, resp_data, e);
        end
      end
    end
  end

  task automatic client(int c, int n, bit always_on);
    for (int i = 0; i < n; i++) begin
      bit wr, acc;
      int a;
      @(negedge clk);
      wr = $urandom_range(0, 1);
      a  = $urandom_range(0, 63);
      req_valid[c] = always_on || ($urandom_range(0, 1) == 1);
      req[c] = '{write: wr, addr: FIFO_AW'(a), data: 8'($urandom)};
      #1 acc = req_valid[c] && req_ready[c];
      @(posedge clk);
      if (acc) begin
        if (wr) ref_mem[c][a] = req[c].data;
        else exp_q[c].push_back(ref_mem[c][a]);
        issued[c]++;
      end else i--;
    end
    @(negedge clk);
    req_valid[c] = 0;
  endtask

  initial begin
    foreach (ref_mem[c, a]) ref_mem[c][a] = 8'h00;
    issued = '{0, 0};
    grants = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      client(0, 500, 0);
      client(1, 500, 0);
    join
    repeat (30) @(posedge clk);
    // saturation: both clients always requesting
    both_busy = 1;
    fork
      client(0, 300, 1);
      client(1, 300, 1);
    join
    both_busy = 0;
    repeat (30) @(posedge clk);
    checks++;
    if (exp_q[0].size() != 0 || exp_q[1].size() != 0) begin
      failures++;
      $display("FAIL: responses missing");
    end
    checks++;
    if (grants[0] - grants[1] > 2 || grants[1] - grants[0] > 2 || grants[0] < 250) begin
      failures++;
      $display("FAIL: grants under load %0d / %0d", grants[0], grants[1]);
    end
    checks++;
    if (lru_checks < 100) begin failures++; $display("FAIL: contention seen %0d times", lru_checks); end
    // the data really is in separate halves of the chip
    checks++;
    if (mem.mem[{1'b0, 14'd5}] !== ref_mem[0][5] || mem.mem[{1'b1, 14'd5}] !== ref_mem[1][5]) begin
      failures++;
      $display("FAIL: address split");
    end
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
