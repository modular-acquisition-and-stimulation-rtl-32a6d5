// Testbench for dac_sched with a simple DAC stand-in (busy for a few cycles after each
// request). Checked: requests pass through until all four channels are filled and then block;
// a load on channel 0 clears the block and strobes the DAC load; a load with channels missing
// flags an underrun; a request with a wrong command nibble is dropped and flagged; nothing
// happens on channel 0 before start.
module tb_dac_sched;
  import acq_pkg::*;
  logic clk = 0, rst_n = 0, started = 0, ch0 = 0;
  logic in_valid = 0, in_ready, dvalid, dready, dload, e_under, e_bad;
  dac_req_t in_req;
  logic [3:0] dmask;
  logic [15:0] dsample;
  int busy = 0, checks = 0, failures = 0, nsent = 0, nload = 0, nunder = 0, nbad = 0;
  dac_req_t sent [$];

  dac_sched dut (.clk, .rst_n, .started_i(started), .ch0_pulse_i(ch0), .in_valid_i(in_valid),
    .in_req_i(in_req), .in_ready_o(in_ready), .dac_valid_o(dvalid), .dac_mask_o(dmask),
    .dac_sample_o(dsample), .dac_ready_i(dready), .dac_load_o(dload),
    .err_underrun_o(e_under), .err_bad_o(e_bad));

  always #5 clk = ~clk;
  assign dready = (busy == 0);
  always @(posedge clk) begin
    if (dvalid) begin busy <= 4; sent.push_back('{cmd: 4'b0001, mask: dmask, sample: dsample}); end
    else if (dload) busy <= 2;
    else if (busy > 0) busy <= busy - 1;
    if (dvalid && !dready) begin failures++; $display("FAIL: request to busy DAC"); end
    if (dload) nload++;
    if (e_under) nunder++;
    if (e_bad) nbad++;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // offer one request; returns once taken or after 'patience' cycles
  task automatic offer(dac_req_t r, int patience, output bit taken);
    bit acc;
    taken = 0;
    @(negedge clk);
    in_valid = 1; in_req = r;
    repeat (patience) begin
      #1 acc = in_ready;
      @(posedge clk);
      @(negedge clk);
      if (acc) begin taken = 1; break; end
    end
    in_valid = 0;
  endtask

  task automatic pulse0();
    @(negedge clk);
    while (!dready) @(negedge clk);
    ch0 = 1;
    @(negedge clk);
    ch0 = 0;
  endtask

  initial begin
    bit t;
    in_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // before start: channel 0 pulses do nothing
    pulse0();
    check(nload == 0 && nunder == 0, "load before start");
    for (int round = 0; round < 20; round++) begin
      logic [3:0] masks [4];
      masks = '{4'b0001, 4'b0010, 4'b0100, 4'b1000};
      if (round % 3 == 1) masks = '{4'b0011, 4'b1100, 4'b0000, 4'b0000};
      foreach (masks[i]) if (masks[i] != 0) begin
        dac_req_t r;
        r = '{cmd: 4'b0001, mask: masks[i], sample: 16'($urandom)};
        offer(r, 20, t);
        check(t, "request not taken");
        check(sent.size() > 0 && sent[$] == r, "request not forwarded intact");
      end
      // all channels filled: the next request must wait
      offer('{cmd: 4'b0001, mask: 4'b0001, sample: 16'h0}, 12, t);
      check(!t, "request taken while all channels filled");
      if (round == 0) begin
        @(negedge clk); started = 1;
      end
      pulse0();
      check(nload == round + 1, "no load on channel 0 pulse");
    end
    check(nunder == 0, "spurious underrun");
    // underrun: only one channel refilled before the load
    offer('{cmd: 4'b0001, mask: 4'b0001, sample: 16'h5}, 20, t);
    pulse0();
    check(nunder == 1, "underrun not flagged");
    // corrupted request: dropped, flagged, not sent
    begin
      int nbefore;
      nbefore = sent.size();
      offer('{cmd: 4'b0111, mask: 4'b0001, sample: 16'h5}, 20, t);
      check(t && nbad == 1 && sent.size() == nbefore, "corrupted request not caught");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
