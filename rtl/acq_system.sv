// Spike-timestamp acquisition and stimulation system, top level (dynamic SRAM arbitration).
//
// Acquisition path: six asynchronous pulse inputs are synchronized, their pulses are
// collected into a channel-flag byte, and once per timestamp period (UPDATE_DIV cycles, 1 us
// at 50 MHz) a record {flags, 32-bit timestamp} is serialized into five bytes, MSB first, and
// queued in uartOutFifo, a 16 KiB FIFO held in the external SRAM, until the host reads it
// over the JTAG-UART transmitter (tx_* ports).
// Stimulus path: host bytes arrive on rx_*; the command decoder starts the system or passes
// 3-byte DAC requests into uartInFifo, the second 16 KiB SRAM FIFO. They are reassembled into
// 24-bit requests and written to the DAC's input registers; each pulse on input 0 loads all
// four DAC outputs at once, so the analog stimulus follows an external frame clock.
// Both SRAM FIFOs share the single 32K x 8 SRAM through sram_split, which arbitrates them
// dynamically (least-recently-used) in front of a two-cycle SRAM controller.
//
// Ports: the JTAG-UART is vendor IP outside this design, so its transmit and receive byte
// streams are ports (valid/ready). The SRAM data bus is split into out/enable/in for an
// external tri-state pad. err_o holds the four sticky error flags (tx overflow, rx underrun,
// bad command, corrupted DAC request) and led_o blinks them.
// The block structure and data flow follow the paper's block diagram; choices the paper
// leaves open are described in the headers of the individual modules.
module acq_system
  import acq_pkg::*;
#(
  parameter int unsigned UPDATE_DIV      = 50,
  parameter int unsigned FIFO_ADDR_BITS  = FIFO_AW,
  parameter int unsigned DAC_STAB_CYCLES = 500_000,
  parameter int unsigned DAC_CAL_CYCLES  = 500_000,
  parameter int unsigned BLINK_BITS      = 24
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // acquisition inputs (asynchronous)
  input  logic [NUM_INPUTS-1:0] acq_i,
  // JTAG-UART transmitter and receiver
  output logic                  tx_valid_o,
  output logic [7:0]            tx_data_o,
  input  logic                  tx_ready_i,
  input  logic                  rx_valid_i,
  input  logic [7:0]            rx_data_i,
  output logic                  rx_ready_o,
  // external SRAM
  output logic [SRAM_AW-1:0]    sram_addr_o,
  output logic [7:0]            sram_dout_o,
  output logic                  sram_doe_o,
  input  logic [7:0]            sram_din_i,
  output logic                  sram_nwe_o,
  // DAC
  output logic                  dac_sclk_o,
  output logic                  dac_din_o,
  output logic                  dac_ncs_o,
  output logic                  dac_nldac_o,
  // status
  output logic                  started_o,
  output logic [3:0]            err_o,
  output logic [3:0]            led_o
);
  // ---------------- acquisition path ----------------
  logic [NUM_INPUTS-1:0] synced;
  logic                  rec_valid, rec_ready, tick, err_tx;
  record_t               rec;

  synchronizer #(.NUM_IN(NUM_INPUTS), .UPDATE_DIV(UPDATE_DIV)) u_sync (
    .clk, .rst_n, .acq_i, .started_i(started_o), .synced_o(synced),
    .rec_valid_o(rec_valid), .rec_o(rec), .rec_ready_i(rec_ready), .tick_o(tick),
    .err_o(err_tx)
  );

  logic       fun_valid, out_not_full;
  logic [7:0] fun_data;

  funnel #(.IN_BYTES(RECORD_BYTES)) u_funnel (
    .clk, .rst_n, .in_valid_i(rec_valid), .in_data_i(rec), .in_ready_o(rec_ready),
    .out_valid_o(fun_valid), .out_data_o(fun_data), .out_ready_i(out_not_full)
  );

  // uartOutFifo (SRAM region 1, server B)
  logic [1:0]      cli_req_valid, cli_req_ready, cli_resp_valid;
  fifo_req_t [1:0] cli_req;
  logic [7:0]      cli_resp_data;

  sram_fifo #(.AW(FIFO_ADDR_BITS)) u_out_fifo (
    .clk, .rst_n,
    .enq_i(fun_valid), .enq_data_i(fun_data), .not_full_o(out_not_full),
    .deq_i(tx_ready_i), .first_o(tx_data_o), .not_empty_o(tx_valid_o),
    .req_valid_o(cli_req_valid[1]), .req_o(cli_req[1]), .req_ready_i(cli_req_ready[1]),
    .resp_valid_i(cli_resp_valid[1]), .resp_data_i(cli_resp_data)
  );

  // ---------------- stimulus path ----------------
  logic       cmd_valid, in_not_full, err_cmd;
  logic [7:0] cmd_data;

  cmd_handler u_cmd (
    .clk, .rst_n, .rx_valid_i, .rx_data_i, .rx_ready_o,
    .out_valid_o(cmd_valid), .out_data_o(cmd_data), .out_ready_i(in_not_full),
    .started_o, .err_o(err_cmd)
  );

  // uartInFifo (SRAM region 0, server A)
  logic       in_not_empty, unf_in_ready;
  logic [7:0] in_first;

  sram_fifo #(.AW(FIFO_ADDR_BITS)) u_in_fifo (
    .clk, .rst_n,
    .enq_i(cmd_valid), .enq_data_i(cmd_data), .not_full_o(in_not_full),
    .deq_i(unf_in_ready), .first_o(in_first), .not_empty_o(in_not_empty),
    .req_valid_o(cli_req_valid[0]), .req_o(cli_req[0]), .req_ready_i(cli_req_ready[0]),
    .resp_valid_i(cli_resp_valid[0]), .resp_data_i(cli_resp_data)
  );

  logic     unf_valid, unf_ready;
  dac_req_t unf_word;

  unfunnel #(.OUT_BYTES(3)) u_unfunnel (
    .clk, .rst_n, .in_valid_i(in_not_empty), .in_data_i(in_first), .in_ready_o(unf_in_ready),
    .out_valid_o(unf_valid), .out_data_o(unf_word), .out_ready_i(unf_ready)
  );

  logic        dac_valid, dac_ready, dac_load, err_underrun, err_bad;
  logic [3:0]  dac_mask;
  logic [15:0] dac_sample;

  dac_sched u_dac_sched (
    .clk, .rst_n, .started_i(started_o), .ch0_pulse_i(synced[0]),
    .in_valid_i(unf_valid), .in_req_i(unf_word), .in_ready_o(unf_ready),
    .dac_valid_o(dac_valid), .dac_mask_o(dac_mask), .dac_sample_o(dac_sample),
    .dac_ready_i(dac_ready), .dac_load_o(dac_load),
    .err_underrun_o(err_underrun), .err_bad_o(err_bad)
  );

  dac_ctrl #(.STAB_CYCLES(DAC_STAB_CYCLES), .CAL_CYCLES(DAC_CAL_CYCLES)) u_dac (
    .clk, .rst_n, .req_valid_i(dac_valid), .req_mask_i(dac_mask), .req_sample_i(dac_sample),
    .req_ready_o(dac_ready), .load_i(dac_load),
    .dac_sclk_o, .dac_din_o, .dac_ncs_o, .dac_nldac_o
  );

  // ---------------- shared SRAM ----------------
  sram_split u_sram (
    .clk, .rst_n,
    .req_valid_i(cli_req_valid), .req_i(cli_req), .req_ready_o(cli_req_ready),
    .resp_valid_o(cli_resp_valid), .resp_data_o(cli_resp_data),
    .sram_addr_o, .sram_dout_o, .sram_doe_o, .sram_din_i, .sram_nwe_o
  );

  // ---------------- error reporting ----------------
  logic [3:0] err_strobe;
  always_comb begin
    err_strobe                  = '0;
    err_strobe[ERR_TX_OVERFLOW] = err_tx;
    err_strobe[ERR_RX_UNDERRUN] = err_underrun;
    err_strobe[ERR_BAD_CMD]     = err_cmd;
    err_strobe[ERR_BAD_DACREQ]  = err_bad;
  end

  error_led #(.NUM_ERR(4), .BLINK_BITS(BLINK_BITS)) u_err (
    .clk, .rst_n, .err_i(err_strobe), .flags_o(err_o), .led_o
  );

  logic unused_tick;
  assign unused_tick = tick;

endmodule
