// End-to-end testbench for acq_system at its default parameters (50-cycle timestamp period,
// two 16 KiB SRAM FIFOs, full DAC calibration delays).
//
// The host side is modelled here: the transmitter takes one byte every 6 cycles and the
// receiver delivers one byte at most every 10 cycles. A behavioural SRAM sits on the memory
// pins and an SPI receiver decodes the DAC frames. The test runs through:
//   1. DAC requests sent before start, waiting in the stimulus FIFO during DAC calibration;
//   2. start; random pulses on inputs 1-5 and a frame clock on input 0; every record read
//      back is checked against the periods in which pulses were driven, every DAC frame
//      against the requests sent, every nLDAC pulse against the frame clock;
//   3. a long transmit stall, so that acquisition data spills into the SRAM and is drained;
//   4. an invalid host byte, a DAC request corrupted inside the SRAM, a frame clock with
//      no refilled DAC channels, and a transmit stall long enough to overflow the 16 KiB
//      FIFO, each of which must raise its error flag.
// Counters show that each mechanism (SRAM spill and refill on both FIFOs, cache bypass, LRU
// arbitration between the FIFOs and inside one FIFO, DAC blocking, loads, every error) was
// exercised; a mechanism that never happened counts as a failure.
module tb_acq_system;
  import acq_pkg::*;
  localparam int DIV = 50;          // default timestamp period of the top
  localparam int FRAMES = 24;       // DAC frames driven by the input-0 clock
  localparam int FRAME_PERIODS = 40;
  localparam int RUN_PERIODS = FRAMES * FRAME_PERIODS;
  localparam int MAXP = 40000;

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

  // ------------------------------------------------------------------ host transmitter side
  bit tx_stall = 0;
  int tx_div = 0;
  logic [7:0] rec_bytes [$];
  always @(negedge clk) begin
    tx_div = (tx_div == 5) ? 0 : tx_div + 1;
    tx_ready = !tx_stall && (tx_div == 0);
  end
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) rec_bytes.push_back(tx_data);

  // ------------------------------------------------------------------ host receiver side
  logic [7:0] host_q [$];
  initial begin
    forever begin
      bit acc;
      @(negedge clk);
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

  dac_req_t sent_reqs [$];
  task automatic host_dac(logic [3:0] m, logic [15:0] s);
    host_q.push_back({DAC_WRITE_CMD, m});
    host_q.push_back(s[15:8]);
    host_q.push_back(s[7:0]);
    sent_reqs.push_back('{cmd: DAC_WRITE_CMD, mask: m, sample: s});
  endtask
  task automatic host_frame();   // refill all four channels, in one of two styles
    if ($urandom_range(0, 1)) host_dac(4'hF, 16'($urandom));
    else for (int c = 0; c < 4; c++) host_dac(4'(1 << c), 16'($urandom));
  endtask

  // ------------------------------------------------------------------ DAC side
  logic [23:0] spi_sh;
  int spi_bits = 0, nframes = 0, nldac_pulses = 0, data_frames = 0;
  always @(negedge sclk) if (!ncs) begin spi_sh = {spi_sh[22:0], sdin_dac}; spi_bits++; end
  always @(posedge ncs) if (rst_n) begin
    check(spi_bits == 24, "DAC frame length");
    if (nframes >= 2) begin
      check(data_frames < sent_reqs.size() && spi_sh == sent_reqs[data_frames],
            $sformatf("DAC frame %0d = %h", data_frames, spi_sh));
      data_frames++;
    end
    nframes++;
    spi_bits = 0;
  end
  always @(negedge nldac) if (rst_n) nldac_pulses++;

  // ------------------------------------------------------------------ acquisition model
  logic [7:0] exp_flags [MAXP];
  longint start_cyc = -1;
  int check_limit = MAXP;          // records from this period on are not checked
  always @(posedge clk) if (rst_n && started && start_cyc < 0) start_cyc = cyc;

  function automatic int cur_period();
    return int'((cyc - start_cyc) / DIV);
  endfunction
  function automatic int cur_offset();
    return int'((cyc - start_cyc) % DIV);
  endfunction

  int ch0_pulses = 0;
  // Drive pulses for periods [p0, p1). Inputs 1..5 pulse with probability prob/100 per
  // period; input 0 pulses every FRAME_PERIODS periods when clock0 is set.
  task automatic drive(int p0, int p1, int prob, bit clock0);
    while (cur_period() < p1) begin
      int k, off;
      @(negedge clk);
      k = cur_period();
      off = cur_offset();
      acq = '0;
      if (k >= p0 && k < p1 && off == 20) begin
        for (int ch = 1; ch < 6; ch++)
          if ($urandom_range(0, 99) < prob) begin acq[ch] = 1; exp_flags[k][ch] = 1; end
        if (clock0 && (k % FRAME_PERIODS) == FRAME_PERIODS - 1) begin
          acq[0] = 1; exp_flags[k][0] = 1; ch0_pulses++;
        end
      end
    end
    @(negedge clk);
    acq = '0;
  endtask

  task automatic pulse_ch0();
    int k;
    while (cur_offset() != 20) @(negedge clk);
    k = cur_period();
    acq[0] = 1; exp_flags[k][0] = 1;
    @(negedge clk);
    acq = '0;
  endtask

  // decode and check all complete records received so far
  int nrecords = 0, last_ts = -1;
  task automatic check_records();
    while (rec_bytes.size() >= 5) begin
      logic [7:0] f;
      logic [31:0] ts;
      f  = rec_bytes.pop_front();
      ts = {rec_bytes[0], rec_bytes[1], rec_bytes[2], rec_bytes[3]};
      repeat (4) void'(rec_bytes.pop_front());
      check(int'(ts) > last_ts, $sformatf("timestamp %0d after %0d", ts, last_ts));
      if (int'(ts) < check_limit) begin
        check(ts < MAXP && exp_flags[ts] == f, $sformatf("record ts=%0d flags=%h expected %h",
              ts, f, (ts < MAXP) ? exp_flags[ts] : 8'h0));
        nrecords++;
      end
      last_ts = int'(ts);
    end
  endtask

  function automatic int expected_records(int p1);
    int n = 0;
    for (int k = 0; k < p1 && k < check_limit; k++) if (exp_flags[k] != 0) n++;
    return n;
  endfunction

  // ------------------------------------------------------------------ mechanism counters
  int n_wr [2], n_rd [2], n_bypass = 0, n_arb_conflict = 0, n_lru = 0, n_dac_block = 0;
  int n_funnel_full = 0;
  int n_err [4];
  always @(posedge clk) if (rst_n) begin
    if (!snwe) n_wr[saddr[SRAM_AW-1]]++;
    if (dut.u_sram.u_sram.advance && !dut.u_sram.u_sram.head.write) n_rd[saddr[SRAM_AW-1]]++;
    if (dut.u_out_fifo.to_cache) n_bypass++;
    if (dut.u_sram.q_empty == 2'b00 && dut.u_sram.fwd) n_arb_conflict++;
    if ((dut.u_out_fifo.rd_cand && dut.u_out_fifo.wr_cand) ||
        (dut.u_in_fifo.rd_cand && dut.u_in_fifo.wr_cand)) n_lru++;
    if (dut.u_dac_sched.filled == 4'hF && dut.unf_valid) n_dac_block++;
    if (!dut.rec_ready) n_funnel_full++;
    for (int i = 0; i < 4; i++) if (dut.err_strobe[i]) n_err[i]++;
  end

  // ------------------------------------------------------------------ test sequence
  initial begin
    int run_end, ovf_start;
    foreach (exp_flags[i]) exp_flags[i] = 0;
    n_wr = '{0, 0}; n_rd = '{0, 0}; n_err = '{0, 0, 0, 0};
    repeat (5) @(negedge clk);
    rst_n = 1;

    // 1. all stimulus for the run is queued up front; most of it waits in the SRAM
    for (int f = 0; f <= FRAMES; f++) host_frame();
    while (nframes < 2) @(negedge clk);
    $display("DAC calibrated at cycle %0d", cyc);
    check(err == 0, "error during calibration");

    // 2. start, then acquisition with a frame clock on input 0
    host_q.push_back(CMD_START);
    while (start_cyc < 0) @(negedge clk);
    fork
      drive(0, RUN_PERIODS, 30, 1);
      begin
        // 3. transmit stall in the middle of the run
        while (cur_period() < 200) @(negedge clk);
        tx_stall = 1;
        while (cur_period() < 600) @(negedge clk);
        tx_stall = 0;
      end
    join
    run_end = cur_period();
    repeat (30000) @(negedge clk);
    check_records();
    check(nrecords == expected_records(run_end),
          $sformatf("%0d records, expected %0d", nrecords, expected_records(run_end)));
    check(nldac_pulses == ch0_pulses && ch0_pulses == FRAMES,
          $sformatf("%0d DAC loads for %0d frame pulses", nldac_pulses, ch0_pulses));
    check(data_frames >= 4 * FRAMES / 4 + FRAMES / 2, $sformatf("only %0d DAC frames", data_frames));
    check(err == 0, $sformatf("errors %b during normal run", err));
    $display("normal run: %0d records, %0d DAC frames, %0d loads", nrecords, data_frames,
             nldac_pulses);

    // 4a. invalid host byte
    host_q.push_back(8'hEE);
    repeat (40) @(negedge clk);
    check(err[ERR_BAD_CMD] && !err[ERR_RX_UNDERRUN] && !err[ERR_BAD_DACREQ], "bad command flag");

    // 4b. DAC request corrupted inside the SRAM. The last refill is waiting (channels full),
    // so three more requests queue up; the last one lies in the SRAM ring.
    for (int i = 0; i < 3; i++) host_dac(4'(1 << i), 16'(i));
    while (host_q.size() > 0) @(negedge clk);
    repeat (50) @(negedge clk);
    begin
      logic [FIFO_AW-1:0] a;
      a = dut.u_in_fifo.tail - 3;
      check(mem.mem[{1'b0, a}] == {DAC_WRITE_CMD, 4'b0100}, "queued request not found in SRAM");
      mem.mem[{1'b0, a}] = 8'h74;
    end
    pulse_ch0();        // load the last refill; the queued requests then flow
    repeat (400) @(negedge clk);
    check(err[ERR_BAD_DACREQ] && !err[ERR_RX_UNDERRUN], "corrupted request flag");

    // 4c. frame clock without a complete refill
    pulse_ch0();
    repeat (20) @(negedge clk);
    check(err[ERR_RX_UNDERRUN], "underrun flag");

    // 4d. transmit stall until the acquisition FIFO overflows
    check_records();
    ovf_start = cur_period() + 1;
    check_limit = ovf_start;
    tx_stall = 1;
    fork
      drive(ovf_start, ovf_start + 4000, 100, 0);
      while (!err[ERR_TX_OVERFLOW] && cur_period() < ovf_start + 4000) @(negedge clk);
    join_any
    disable fork;
    acq = '0;
    check(err[ERR_TX_OVERFLOW], "overflow flag");
    check(!dut.out_not_full, "acquisition FIFO not full at overflow");
    $display("overflow after %0d periods, SRAM ring holds %0d bytes", cur_period() - ovf_start,
             dut.u_out_fifo.ring_cnt);
    tx_stall = 0;
    repeat (2000) @(negedge clk);
    check_records();

    // mechanisms
    check(n_wr[0] > 0 && n_rd[0] > 0, "stimulus FIFO never used the SRAM");
    check(n_wr[1] > 1000 && n_rd[1] > 1000, "acquisition FIFO never spilled to the SRAM");
    check(n_bypass > 0, "cache bypass never happened");
    check(n_arb_conflict > 0, "SRAM arbitration between the FIFOs never needed");
    check(n_lru > 0, "read/write choice inside a FIFO never needed");
    check(n_dac_block > 0, "DAC requests never blocked");
    check(n_funnel_full > 0, "funnel never full");
    for (int i = 0; i < 4; i++) check(n_err[i] > 0, $sformatf("error %0d never raised", i));
    $display("mechanisms: sram wr %0d/%0d rd %0d/%0d, bypass %0d, arbitration %0d, lru %0d, dac block %0d, funnel full %0d, errors %0d %0d %0d %0d",
             n_wr[0], n_wr[1], n_rd[0], n_rd[1], n_bypass, n_arb_conflict, n_lru, n_dac_block,
             n_funnel_full, n_err[0], n_err[1], n_err[2], n_err[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
