// DAC request scheduler: the dacHandleReq and dacLoad steps of the stimulus path.
//
// dacHandleReq takes 24-bit requests from the deserializer and hands {mask, sample} to the
// DAC controller, recording in a 4-bit filled register which DAC channels have received a new
// sample. Once all four are filled it stops taking requests. A request whose command nibble
// is not the DAC write command is dropped with a one-cycle err_bad_o pulse (the paper's fourth
// check: corruption on the way through the SRAM).
// dacLoad fires on each synchronized pulse of input channel 0 while started: it strobes the
// DAC load and clears filled, which unblocks dacHandleReq. If at that moment the DAC is busy
// or not all four channels were refilled since the previous load, err_underrun_o pulses (the
// paper's second check); the load itself is issued only when the DAC is ready.
//
// Timing: one request per cycle at most, limited by the DAC controller's ready; a load and a
// request never go out in the same cycle (the load wins). dac_mask_o and dac_sample_o are
// wired straight from the request fields; dac_valid_o alone says when they are taken.
// The blocking/unblocking behaviour and both checks follow the paper; the filled-mask
// bookkeeping is this design's reading of "all DAC registers were filled since the last
// load", and the scheduler starts with every channel empty so requests flow before the first
// load.
module dac_sched
  import acq_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        started_i,
  input  logic        ch0_pulse_i,
  input  logic        in_valid_i,
  input  dac_req_t    in_req_i,
  output logic        in_ready_o,
  output logic        dac_valid_o,
  output logic [3:0]  dac_mask_o,
  output logic [15:0] dac_sample_o,
  input  logic        dac_ready_i,
  output logic        dac_load_o,
  output logic        err_underrun_o,
  output logic        err_bad_o
);
  logic [3:0] filled;
  logic       load_ev, handle;

  assign load_ev        = started_i && ch0_pulse_i;
  assign dac_load_o     = load_ev && dac_ready_i;
  assign err_underrun_o = load_ev && (!dac_ready_i || filled != 4'hF);

  assign handle       = in_valid_i && (filled != 4'hF) && dac_ready_i && !load_ev;
  assign in_ready_o   = handle;
  assign dac_valid_o  = handle && (in_req_i.cmd == DAC_WRITE_CMD);
  assign err_bad_o    = handle && (in_req_i.cmd != DAC_WRITE_CMD);
  assign dac_mask_o   = in_req_i.mask;
  assign dac_sample_o = in_req_i.sample;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) filled <= '0;
    else if (dac_load_o) filled <= '0;
    else if (dac_valid_o) filled <= filled | in_req_i.mask;
  end

endmodule
