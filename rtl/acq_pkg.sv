// Shared types and constants of the spike-timestamp acquisition and stimulation system.
//
// The acquisition path produces one 40-bit record per timestamp period in which at least one
// input fired: an 8-bit channel-flag byte followed by the 32-bit timestamp, sent to the host
// most significant byte first. The stimulus path receives 3-byte DAC requests: a command
// nibble, a 4-bit channel mask and a 16-bit sample. The external SRAM is 32K x 8 and is split
// into two 16 KiB FIFO regions, selected by the top address bit.
//
// Record layout, sizes and the DAC write command nibble follow the paper. The start-command
// byte value and the SRAM request encoding are this design's own choices.
package acq_pkg;

  localparam int unsigned NUM_INPUTS = 6;   // acquisition channels
  localparam int unsigned FLAG_BITS  = 8;   // channelFlags field, one byte in the record
  localparam int unsigned TS_BITS    = 32;  // timestamp counter

  localparam int unsigned SRAM_AW = 15;     // 32K x 8 external SRAM
  localparam int unsigned FIFO_AW = 14;     // 16 KiB per SRAM FIFO region

  // Host commands (first byte of a command)
  localparam logic [3:0] DAC_WRITE_CMD = 4'b0001;  // MAX5134 "write input register" nibble
  localparam logic [7:0] CMD_START     = 8'h53;    // start acquisition and DAC loads

  // One acquisition record, channelFlags in the most significant byte.
  typedef struct packed {
    logic [FLAG_BITS-1:0] flags;
    logic [TS_BITS-1:0]   ts;
  } record_t;

  localparam int unsigned RECORD_BYTES = $bits(record_t) / 8;  // 5

  // A 24-bit DAC request as it arrives from the host and as it is shifted to the DAC.
  typedef struct packed {
    logic [3:0]  cmd;
    logic [3:0]  mask;
    logic [15:0] sample;
  } dac_req_t;

  // Memory request issued by one SRAM FIFO (address inside its own region).
  typedef struct packed {
    logic               write;
    logic [FIFO_AW-1:0] addr;
    logic [7:0]         data;
  } fifo_req_t;

  // Memory request as seen by the SRAM controller (full chip address).
  typedef struct packed {
    logic               write;
    logic [SRAM_AW-1:0] addr;
    logic [7:0]         data;
  } sram_req_t;

  // Error conditions, one bit each in the error vector.
  typedef enum logic [1:0] {
    ERR_TX_OVERFLOW = 2'd0,  // record lost because the funnel was full
    ERR_RX_UNDERRUN = 2'd1,  // DAC load while DAC busy or not every register refilled
    ERR_BAD_CMD     = 2'd2,  // host byte that is no valid command
    ERR_BAD_DACREQ  = 2'd3   // DAC request corrupted on its way through the SRAM
  } err_e;

endpackage
