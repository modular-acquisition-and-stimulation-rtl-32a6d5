// Bench-validation workload for acq_system at its default parameters (1 us timestamps at
// 50 MHz, 16 KiB FIFOs, full DAC calibration delays).
//
// Six free-running square-wave sources, asynchronous to the system clock and with random
// phases, drive the inputs: input 0 at 500 Hz (the frame clock that loads the DAC), inputs
// 1 and 2 at 6.2 kHz and 6.1 kHz, and inputs 3-5 at three slightly different frequencies
// near 2 kHz, standing for three nominally identical RC oscillators. The host link is
// modelled at about 1 Mbit/s: one byte every 400 cycles in each direction. The host streams
// 3-byte DAC requests for all four channels without pause; the stimulus FIFO holds them until
// the DAC scheduler takes one per frame.
//
// The records read back are decoded per channel and the interval between consecutive rising
// edges is compared with the source period: every interval must be within 1 us of it (a
// missed edge would double it, a spurious one would halve it), and the number of edges seen
// must match the source frequency. The DAC must load once per frame-clock edge, and no error
// flag may rise.
module tb_bench_validation;
  import acq_pkg::*;
  localparam int NCH = NUM_INPUTS;
  localparam longint RUN_NS = 64'd40_000_000;     // 40 ms of acquisition
  localparam int LINK_CYCLES = 400;                // one byte per 8 us each way
  // source periods in ps
  localparam longint PERIOD_PS [NCH] = '{
    64'd2_000_000_000,   // 500 Hz
    64'd161_290_323,     // 6.2 kHz
    64'd163_934_426,     // 6.1 kHz
    64'd500_000_000,     // 2.000 kHz
    64'd497_512_438,     // 2.010 kHz
    64'd502_512_563      // 1.990 kHz
  };

  logic clk = 0, rst_n = 0;
  logic [5:0] acq = '0;
  logic tx_valid, tx_ready = 0, rx_valid = 0, rx_ready;
  logic [7:0] tx_data, rx_data = '0;
  logic [SRAM_AW-1:0] saddr;
  logic [7:0] sdout, sdin;
  logic sdoe, snwe, sclk, sdin_dac, ncs, nldac, started;
  logic [3:0] err, led;

  acq_system dut (
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

  always #10 clk = ~clk;   // 50 MHz

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, msg); end
  endtask

  // ---------------------------------------------------------------- signal sources
  bit sources_on = 0;
  int src_edges [NCH];
  for (genvar c = 0; c < NCH; c++) begin : g_src
    initial begin
      longint half;
      half = PERIOD_PS[c] / 2;
      src_edges[c] = 0;
      wait (sources_on);
      #(real'($urandom_range(0, 1_000_000)) * real'(PERIOD_PS[c]) / 1.0e9);
      forever begin
        if (sources_on) begin acq[c] = 1'b1; src_edges[c]++; end
        #(real'(half) / 1000.0);
        acq[c] = 1'b0;
        #(real'(PERIOD_PS[c] - half) / 1000.0);
      end
    end
  end

  // ---------------------------------------------------------------- host link, device to host
  int tx_gap = 0;
  int rec_pos = 0, nrec = 0;
  logic [39:0] rec_sh;
  longint last_ts [NCH];
  int seen [NCH], bad_dt [NCH];
  real dt_min [NCH], dt_max [NCH];
  initial for (int c = 0; c < NCH; c++) begin
    last_ts[c] = -1; seen[c] = 0; bad_dt[c] = 0; dt_min[c] = 1e9; dt_max[c] = 0;
  end
  always @(negedge clk) begin
    tx_gap++;
    tx_ready = (tx_gap >= LINK_CYCLES);
  end
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    tx_gap = 0;
    rec_sh = {rec_sh[31:0], tx_data};
    if (rec_pos == RECORD_BYTES - 1) begin
      rec_pos = 0;
      nrec++;
      for (int c = 0; c < NCH; c++) if (rec_sh[32 + c]) begin
        if (last_ts[c] >= 0) begin
          real dt, p_us;
          dt = real'(longint'(rec_sh[31:0]) - last_ts[c]);
          p_us = real'(PERIOD_PS[c]) / 1.0e6;
          if (dt < dt_min[c]) dt_min[c] = dt;
          if (dt > dt_max[c]) dt_max[c] = dt;
          if (dt < p_us - 1.0 || dt > p_us + 1.0) bad_dt[c]++;
        end
        last_ts[c] = longint'(rec_sh[31:0]);
        seen[c]++;
      end
    end else rec_pos++;
  end

  // ---------------------------------------------------------------- host link, host to device
  logic [7:0] host_q [$];
  bit stream_on = 0;
  initial begin
    forever begin
      bit acc;
      @(negedge clk);
      if (stream_on && host_q.size() == 0) begin
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
          repeat (LINK_CYCLES - 2) @(negedge clk);
        end
      end else rx_valid = 0;
    end
  end

  int loads = 0;
  always @(negedge nldac) if (rst_n) loads++;

  // ---------------------------------------------------------------- sequence
  initial begin
    repeat (5) @(negedge clk);
    rst_n = 1;
    // two frames of samples ahead of the start command; calibration runs meanwhile
    for (int i = 0; i < 2; i++) begin
      host_q.push_back({DAC_WRITE_CMD, 4'hF});
      host_q.push_back(8'($urandom));
      host_q.push_back(8'($urandom));
    end
    host_q.push_back(CMD_START);
    wait (started);
    // calibration must be over before the first frame-clock edge can load the DAC
    wait (dut.u_dac.req_ready_o);
    repeat (1000) @(negedge clk);
    stream_on = 1;
    sources_on = 1;
    #(real'(RUN_NS));
    sources_on = 0;     // sources finish their current cycle and stay low
    // let the link drain what was recorded
    #(real'(RUN_NS) / 4.0);
    for (int c = 0; c < NCH; c++) begin
      $display("input %0d: %0d edges driven, %0d seen, interval %0.0f..%0.0f us (period %0.2f us), %0d off",
               c, src_edges[c], seen[c], dt_min[c], dt_max[c], real'(PERIOD_PS[c]) / 1.0e6,
               bad_dt[c]);
      check(bad_dt[c] == 0, $sformatf("input %0d: every interval within 1 us of the period", c));
      check(seen[c] == src_edges[c], $sformatf("input %0d: every edge recorded once", c));
      check(seen[c] >= int'(RUN_NS * 1000 / PERIOD_PS[c]) - 1,
            $sformatf("input %0d: edge count matches the frequency", c));
    end
    $display("%0d records, %0d DAC loads, error flags %b", nrec, loads, err);
    check(loads == src_edges[0], "one DAC load per frame-clock edge");
    check(err == '0, "no error flag");
    check(dut.u_out_fifo.ring_cnt == 0 && !tx_valid, "link drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd20 * 64'd5_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
