// Error latch and LED blinker.
//
// Each of the NUM_ERR error strobes sets a sticky flag that only reset clears. A free-running
// counter of BLINK_BITS bits provides the blink rate: its top bit toggles every
// 2**(BLINK_BITS-1) cycles (about 3 Hz at 50 MHz with the default 24 bits), and each LED
// blinks with that bit while its flag is set, staying dark otherwise.
// The paper says only that errors blink LEDs until reset; one LED per error and the blink
// rate are this design's choice.
module error_led #(
  parameter int unsigned NUM_ERR    = 4,
  parameter int unsigned BLINK_BITS = 24
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NUM_ERR-1:0] err_i,
  output logic [NUM_ERR-1:0] flags_o,
  output logic [NUM_ERR-1:0] led_o
);
  logic [BLINK_BITS-1:0] blink_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flags_o   <= '0;
      blink_cnt <= '0;
    end else begin
      flags_o   <= flags_o | err_i;
      blink_cnt <= blink_cnt + 1'b1;
    end
  end

  assign led_o = flags_o & {NUM_ERR{blink_cnt[BLINK_BITS-1]}};

endmodule
