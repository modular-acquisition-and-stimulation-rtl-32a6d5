// Acquisition front end: input synchronizers, channel-flag accumulation and the timestamp
// counter.
//
// Each acquisition input has its own async_pulse_sync; their outputs form synced_o. While the
// system is started, every synchronized pulse sets its bit in the channel-flag register
// (blendChannelFlags). Every UPDATE_DIV clock cycles (1 us at 50 MHz by default) the
// timestampUpdate step increments the 32-bit timestamp and, if any input fired during the
// period, offers the record {flags, timestamp} to the serializer and clears the flags. The
// record carries the timestamp value before the increment, and pulses of the update cycle
// itself are included in it. When the serializer is full the record is dropped and err_o
// pulses for one cycle, but the timestamp still advances (the paper's first error check).
//
// Interface: rec_valid_o is a one-cycle strobe; rec_ready_i is the serializer's not-full flag.
// Follows the paper: flag accumulation, atomic increment-send-clear, 32-bit timestamp, overflow
// check. Own choices: records with no flag set are not sent, the prescaler and timestamp only
// run while started, flags are zero-extended to one byte.
module synchronizer
  import acq_pkg::*;
#(
  parameter int unsigned NUM_IN     = NUM_INPUTS,
  parameter int unsigned UPDATE_DIV = 50
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NUM_IN-1:0] acq_i,
  input  logic              started_i,
  output logic [NUM_IN-1:0] synced_o,
  output logic              rec_valid_o,
  output record_t           rec_o,
  input  logic              rec_ready_i,
  output logic              tick_o,
  output logic              err_o
);
  localparam int unsigned DW = (UPDATE_DIV > 1) ? $clog2(UPDATE_DIV) : 1;

  logic [DW-1:0]          div_cnt;
  logic [FLAG_BITS-1:0]   flags;
  logic [TS_BITS-1:0]     ts;
  logic [FLAG_BITS-1:0]   blended;

  for (genvar i = 0; i < NUM_IN; i++) begin : g_in_sync
    async_pulse_sync u_sync (.clk, .rst_n, .async_i(acq_i[i]), .pulse_o(synced_o[i]));
  end

  assign tick_o  = started_i && (div_cnt == DW'(UPDATE_DIV - 1));
  assign blended = flags | FLAG_BITS'(synced_o);

  assign rec_o       = '{flags: blended, ts: ts};
  assign rec_valid_o = tick_o && (blended != '0) && rec_ready_i;
  assign err_o       = tick_o && (blended != '0) && !rec_ready_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cnt <= '0;
      flags   <= '0;
      ts      <= '0;
    end else if (started_i) begin
      if (tick_o) begin
        div_cnt <= '0;
        ts      <= ts + 1'b1;
        flags   <= '0;
      end else begin
        div_cnt <= div_cnt + 1'b1;
        flags   <= blended;
      end
    end
  end

endmodule
