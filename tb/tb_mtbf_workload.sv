// Resilience workload for acq_system: mean time between failures against input event rate.
//
// The system runs with a timestamp period of 20 clock cycles. The host transmitter takes at
// most one byte every 6 cycles and the host receiver delivers at most one byte every 10
// cycles, streaming 3-byte DAC requests (all four channels) without pause. Input 0 carries a
// frame clock with a mean period of 60 cycles and a small random jitter; inputs 1-5 carry
// independent Bernoulli pulse trains (a discrete Poisson process) whose rate is swept. For
// each rate the system is reset, calibrated with short DAC delays and started, and the test
// measures the number of cycles until the first error flag rises (capped at CAP cycles).
//
// Checks: the record stream read back is well formed (non-zero flags, strictly increasing
// timestamps); the transmit rate never exceeds one byte per 6 cycles; a DAC load follows
// every frame-clock pulse; the only error that ever rises is the transmit overflow (the
// stimulus path keeps up); the highest rate (1/20, one event per timestamp period) fails
// within CAP cycles; the lowest rate does not fail within CAP cycles; and the time to failure
// does not grow with the rate beyond random spread.
module tb_mtbf_workload;
  import acq_pkg::*;
  localparam int DIV = 20;
  localparam int CAP = 600_000;
  localparam int NRATES = 7;
  // total mean event rates to try, in events per 10000 cycles (input 0 included)
  localparam int RATE_E4 [NRATES] = '{500, 450, 400, 350, 300, 250, 200};

  logic clk = 0, rst_n = 0;
  logic [5:0] acq = '0;
  logic tx_valid, tx_ready = 0, rx_valid = 0, rx_ready;
  logic [7:0] tx_data, rx_data = '0;
  logic [SRAM_AW-1:0] saddr;
  logic [7:0] sdout, sdin;
  logic sdoe, snwe, sclk, sdin_dac, ncs, nldac, started;
  logic [3:0] err, led;

  acq_system #(.UPDATE_DIV(DIV), .DAC_STAB_CYCLES(100), .DAC_CAL_CYCLES(100)) dut (
    .clk, .rst_n, .acq_i(acq),
    .tx_valid_o(tx_valid), .tx_data_o(tx_data), .tx_ready_i(tx_ready),
    .rx_valid_i(rx_valid), .rx_data_i(rx_data), .rx_ready_o(rx_ready),
    .sram_addr_o(saddr), .sram_dout_o(sdout), .sram_doe_o(sdoe), .sram_din_i(sdin),
    .sram_nwe_o(snwe),
    .dac_sclk_o(sclk), .dac_din_o(sdin_dac), .dac_ncs_o(ncs), .dac_nldac_o(nldac),
    .started_o(started), .err_o(err), .led_o(led)
  );
  sram_model #(.AW(SRAM_AW)) mem (.clk, .addr_i(saddr), .din_i(sdout), .doe_i(sdoe),
    .nwe_i(snwe), .dout_o(sdin));

  always #10 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // ---------------------------------------------------------------- host transmitter side
  int tx_gap = 0;
  longint tx_bytes = 0, last_tx_cyc = -100;
  int rec_pos = 0, rec_count = 0, rec_bad = 0;
  logic [39:0] rec_sh;
  logic [31:0] last_ts;
  bit have_ts = 0;
  always @(negedge clk) begin
    tx_gap++;
    tx_ready = (tx_gap >= 6);
  end
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    if (cyc - last_tx_cyc < 6) rec_bad++;
    tx_gap = 0;
    last_tx_cyc = cyc;
    tx_bytes++;
    rec_sh = {rec_sh[31:0], tx_data};
    if (rec_pos == RECORD_BYTES - 1) begin
      rec_pos = 0;
      rec_count++;
      if (rec_sh[39:32] == 8'h00 || rec_sh[39:32] > 8'h3F) rec_bad++;
      if (have_ts && rec_sh[31:0] <= last_ts) rec_bad++;
      last_ts = rec_sh[31:0];
      have_ts = 1;
    end else rec_pos++;
  end

  // ---------------------------------------------------------------- host receiver side
  logic [7:0] host_q [$];
  bit stream_on = 0;
  initial begin
    forever begin
      bit acc;
      @(negedge clk);
      if (stream_on && host_q.size() < 3) begin
        host_q.push_back({DAC_WRITE_CMD, 4'hF});
        host_q.push_back(8'($urandom));
        host_q.push_back(8'($urandom));
      end
      if (host_q.size() > 0) begin
        rx_valid = 1;
        rx_data  = host_q[0];
        #1 acc = rx_ready;
        @(posedge clk);
        if (acc) begin
          void'(host_q.pop_front());
          @(negedge clk);
          rx_valid = 0;
          repeat (8) @(negedge clk);
        end
      end else rx_valid = 0;
    end
  end

  int loads = 0;
  always @(negedge nldac) if (rst_n) loads++;

  // ---------------------------------------------------------------- stimulus
  longint events;
  int ch0_pulses;
  int next0;

  // One run: returns cycles to the first error (CAP if none) and the measured event rate.
  task automatic run_rate(int rate_e4, output longint ttf, output real f_meas,
                          output logic [3:0] err_seen);
    // per-channel probability on inputs 1-5, in units of 1/2^20 per cycle
    int unsigned p5;
    longint t0;
    real r5;
    r5 = (rate_e4 / 10000.0 - 1.0 / 60.0) / 5.0;
    p5 = int'(r5 * 1048576.0);
    // reset and calibrate
    rst_n = 0; acq = '0; stream_on = 0; host_q.delete();
    rec_pos = 0; have_ts = 0;
    repeat (5) @(negedge clk);
    rst_n = 1;
    repeat (500) @(negedge clk);
    // one request ahead of the start command, so the DAC holds a sample for the first load
    host_q.push_back({DAC_WRITE_CMD, 4'hF});
    host_q.push_back(8'($urandom));
    host_q.push_back(8'($urandom));
    host_q.push_back(CMD_START);
    wait (started);
    stream_on = 1;
    @(negedge clk);
    t0 = cyc; events = 0; ch0_pulses = 0; loads = 0; next0 = 60;
    while (err == '0 && cyc - t0 < CAP) begin
      logic [5:0] nxt;
      nxt = '0;
      if (int'(cyc - t0) >= next0) begin
        nxt[0] = 1'b1;
        next0 += 59 + $urandom_range(0, 2);
      end
      for (int c = 1; c < 6; c++)
        if (!acq[c] && ($urandom & 32'hFFFFF) < p5) nxt[c] = 1'b1;
      for (int c = 0; c < 6; c++) if (nxt[c]) events++;
      if (nxt[0]) ch0_pulses++;
      acq = nxt;
      @(negedge clk);
    end
    ttf = cyc - t0;
    $display("  ring %0d bytes, %0d tx bytes", dut.u_out_fifo.ring_cnt, tx_bytes);
    f_meas = real'(events) / real'(ttf);
    repeat (3) @(negedge clk);
    err_seen = err;
    acq = '0;
    stream_on = 0;
  endtask

  initial begin
    longint ttf [NRATES];
    real fm [NRATES];
    logic [3:0] es [NRATES];
    int rb0;
    for (int i = 0; i < NRATES; i++) begin
      rb0 = rec_bad;
      run_rate(RATE_E4[i], ttf[i], fm[i], es[i]);
      $display("rate %0.4f (target %0.4f): first error after %0d cycles, flags %b, %0d loads for %0d frame pulses, %0d records",
               fm[i], RATE_E4[i] / 10000.0, ttf[i], es[i], loads, ch0_pulses, rec_count);
      check(rec_bad == rb0, "record stream well formed and tx rate within 1 byte / 6 cycles");
      check(es[i] == 4'b0000 || es[i] == 4'b0001, "only the tx overflow error rises");
      check(loads >= ch0_pulses - 2 && loads <= ch0_pulses, "a DAC load per frame pulse");
      check(fm[i] > RATE_E4[i] / 10000.0 * 0.9 && fm[i] < RATE_E4[i] / 10000.0 * 1.1,
            "measured event rate near target");
    end
    check(ttf[0] < CAP && es[0] == 4'b0001, "rate 1/20 overflows the tx path");
    check(ttf[NRATES-1] == CAP, "lowest rate runs without failure");
    for (int i = 1; i < NRATES; i++)
      check(ttf[i] * 2 >= ttf[i-1], "time to failure does not shrink at lower rates");
    check(tx_bytes > 0, "data transmitted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd20 * 64'd6_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
