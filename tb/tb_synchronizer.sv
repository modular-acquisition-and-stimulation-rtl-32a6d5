// Testbench for synchronizer: random pulses on six inputs; the expected flag byte of every
// timestamp period is built from the driven input edges (synchronizer latency of two cycles,
// pulses kept away from period boundaries), then compared with the records the block emits.
// Also checks the timestamp sequence, records only for periods with activity, and the overflow
// error when the serializer is full.
module tb_synchronizer;
  import acq_pkg::*;
  localparam int DIV = 16;
  localparam int PERIODS = 300;

  logic clk = 0, rst_n = 0, started = 0, ready = 1;
  logic [5:0] acq = '0, synced;
  logic rec_valid, tick, err;
  record_t rec;
  int checks = 0, failures = 0, cyc = 0, start_cyc = 0;
  logic [7:0] exp_flags [PERIODS + 4];
  bit blocked [PERIODS + 4];
  int recs = 0, errs = 0;

  synchronizer #(.NUM_IN(6), .UPDATE_DIV(DIV)) dut (
    .clk, .rst_n, .acq_i(acq), .started_i(started), .synced_o(synced),
    .rec_valid_o(rec_valid), .rec_o(rec), .rec_ready_i(ready), .tick_o(tick), .err_o(err)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // period k spans cycles start_cyc + k*DIV .. start_cyc + (k+1)*DIV - 1 (synced time)
  always @(posedge clk) if (rst_n && started) begin
    if (tick) begin
      int k;
      k = (cyc - start_cyc) / DIV;
      check(((cyc - start_cyc) % DIV) == DIV - 1, "tick not at end of period");
      if (exp_flags[k] != 0 && !blocked[k]) begin
        check(rec_valid, $sformatf("no record for period %0d", k));
        check(rec.ts == TS_BITS'(k), $sformatf("ts %0d, expected %0d", rec.ts, k));
        check(rec.flags == exp_flags[k], $sformatf("period %0d flags %h expected %h", k, rec.flags, exp_flags[k]));
        recs++;
      end else if (exp_flags[k] != 0) begin
        check(err && !rec_valid, "overflow not flagged");
        errs++;
      end else begin
        check(!rec_valid && !err, "record for an idle period");
      end
    end else check(!rec_valid && !err, "record outside a tick");
  end

  initial begin
    foreach (exp_flags[i]) begin exp_flags[i] = 0; blocked[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    started = 1;
    start_cyc = cyc;       // first cycle in which the counter runs
    for (int k = 0; k < PERIODS; k++) begin
      bit blk;
      blk = (k % 37) > 30;
      blocked[k] = blk;
      // drive in the middle of the period: input set at offset 3..DIV-8, seen 2 cycles later
      for (int off = 0; off < DIV; off++) begin
        ready = !blk;
        if (off >= 3 && off <= DIV - 8 && off % 2 == 1) begin
          for (int ch = 0; ch < 6; ch++)
            if ($urandom_range(0, 9) == 0 && !exp_flags[k][ch] && (off == 3 || !acq[ch])) begin
              acq[ch] = 1;
              exp_flags[k][ch] = 1;
            end
        end else acq = '0;
        @(negedge clk);
      end
    end
    acq = '0;
    repeat (2 * DIV) @(negedge clk);
    check(recs > 50, "too few records seen");
    check(errs > 5, "overflow case not exercised");
    $display("records=%0d overflows=%0d", recs, errs);
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
