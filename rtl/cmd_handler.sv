// Host command decoder ("uartHandleCmd").
//
// Consumes bytes from the JTAG-UART receiver. A byte whose upper nibble is the DAC write
// command (4'b0001) starts a DAC request: it and the next two bytes are passed unchanged into
// the stimulus FIFO. The byte CMD_START sets the started flag, which stays set until reset and
// enables acquisition and DAC loads. Any other byte outside a DAC request pulses err_o for one
// cycle and is dropped (the paper's third error check).
//
// Interface: rx is a valid/ready byte stream; a byte is taken only when the stimulus FIFO has
// room (out_ready_i), whatever it is. out_valid_o is a strobe aligned with the taken byte.
// out_data_o and rx_ready_o are wired straight from rx_data_i and out_ready_i: the byte is
// forwarded unchanged and only out_valid_o decides whether the FIFO enqueues it.
// The paper gives the two commands and the three-byte forwarding; the byte values and the
// rule of gating every byte on FIFO space are this design's choice.
module cmd_handler
  import acq_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx_valid_i,
  input  logic [7:0] rx_data_i,
  output logic       rx_ready_o,
  output logic       out_valid_o,
  output logic [7:0] out_data_o,
  input  logic       out_ready_i,
  output logic       started_o,
  output logic       err_o
);
  logic [1:0] remaining;   // bytes still to forward of the current DAC request
  logic       take, is_dac, is_start;

  assign rx_ready_o  = out_ready_i;
  assign take        = rx_valid_i && out_ready_i;
  assign is_dac      = (rx_data_i[7:4] == DAC_WRITE_CMD);
  assign is_start    = (rx_data_i == CMD_START);
  assign out_data_o  = rx_data_i;
  assign out_valid_o = take && (remaining != '0 || is_dac);
  assign err_o       = take && remaining == '0 && !is_dac && !is_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remaining <= '0;
      started_o <= 1'b0;
    end else if (take) begin
      if (remaining != '0)  remaining <= remaining - 1'b1;
      else if (is_dac)      remaining <= 2'd2;
      else if (is_start)    started_o <= 1'b1;
    end
  end

endmodule
