// SPI controller for a MAX5134 four-channel 16-bit DAC.
//
// After reset the controller runs the DAC calibration sequence: it waits STAB_CYCLES for the
// supply to settle, sends CAL_CMD_1, waits CAL_CYCLES after that frame and sends CAL_CMD_2.
// It then becomes ready (req_ready_o). A request {mask, sample} is sent as the 24-bit frame
// {4'b0001, mask, sample}, which writes the sample into the input registers of the channels
// set in mask. A load strobe (load_i, honoured only while ready) pulls nLDAC low for
// LDAC_CYCLES cycles, moving all input registers to the outputs at once.
//
// Frame timing: chip select falls when the frame starts; each of the 24 bits, most
// significant first, takes two cycles: DIN changes together with the rising SCLK edge and
// holds through the falling edge one cycle later, on which the DAC samples it. The sender keeps a 25-bit shift register {frame, 1'b1}; the marker
// bit tells it that all 24 bits are out once the low 24 bits are zero. Chip select then rises
// and the controller waits 2 more cycles. A frame takes 51 cycles from request to ready.
// From the paper: the shift-register sender with the marker bit, the chip-select and 2-cycle
// delay, the calibration sequence order and the write command. Own choices: SCLK phase, the
// nLDAC pin for the load, and the values of STAB_CYCLES, CAL_CYCLES, CAL_CMD_1/2 and
// LDAC_CYCLES (the calibration commands follow the MAX5134 linearity command as this design
// understands the datasheet).
module dac_ctrl
  import acq_pkg::*;
#(
  parameter int unsigned STAB_CYCLES = 500_000,
  parameter int unsigned CAL_CYCLES  = 500_000,
  parameter logic [23:0] CAL_CMD_1   = 24'h05_0200,
  parameter logic [23:0] CAL_CMD_2   = 24'h05_0000,
  parameter int unsigned LDAC_CYCLES = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid_i,
  input  logic [3:0]  req_mask_i,
  input  logic [15:0] req_sample_i,
  output logic        req_ready_o,
  input  logic        load_i,
  output logic        dac_sclk_o,
  output logic        dac_din_o,
  output logic        dac_ncs_o,
  output logic        dac_nldac_o
);
  typedef enum logic [2:0] {
    S_STAB, S_CAL1, S_CAL_WAIT, S_CAL2, S_IDLE, S_SHIFT, S_CS_HOLD, S_LOAD
  } state_e;

  localparam int unsigned TW = $clog2(((STAB_CYCLES > CAL_CYCLES) ? STAB_CYCLES : CAL_CYCLES) + 3);

  state_e        state, after_frame;
  logic [24:0]   shift_reg;
  logic          phase;
  logic [TW-1:0] timer;
  logic          shift_done;

  assign shift_done  = (shift_reg[23:0] == '0);
  assign req_ready_o = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_STAB;
      after_frame <= S_IDLE;
      shift_reg   <= '0;
      phase       <= 1'b0;
      timer       <= '0;
      dac_sclk_o  <= 1'b0;
      dac_ncs_o   <= 1'b1;
      dac_nldac_o <= 1'b1;
      dac_din_o   <= 1'b0;
    end else begin
      unique case (state)
        S_STAB: begin
          if (timer == TW'(STAB_CYCLES)) begin
            timer <= '0;
            state <= S_CAL1;
          end else timer <= timer + 1'b1;
        end
        S_CAL1: begin                                  // send(commandBits_1)
          shift_reg   <= {CAL_CMD_1, 1'b1};
          dac_ncs_o   <= 1'b0;
          after_frame <= S_CAL_WAIT;
          state       <= S_SHIFT;
        end
        S_CAL_WAIT: begin                              // delay(dacCalibCycles)
          if (timer == TW'(CAL_CYCLES)) begin
            timer <= '0;
            state <= S_CAL2;
          end else timer <= timer + 1'b1;
        end
        S_CAL2: begin                                  // send(commandBits_2)
          shift_reg   <= {CAL_CMD_2, 1'b1};
          dac_ncs_o   <= 1'b0;
          after_frame <= S_IDLE;
          state       <= S_SHIFT;
        end
        S_IDLE: begin
          if (load_i) begin
            dac_nldac_o <= 1'b0;
            timer       <= '0;
            state       <= S_LOAD;
          end else if (req_valid_i) begin
            shift_reg   <= {DAC_WRITE_CMD, req_mask_i, req_sample_i, 1'b1};
            dac_ncs_o   <= 1'b0;
            after_frame <= S_IDLE;
            state       <= S_SHIFT;
          end
        end
        S_SHIFT: begin
          if (!phase) begin
            if (shift_done) begin
              dac_ncs_o <= 1'b1;                       // rnCS <= 1; delay(2)
              timer     <= '0;
              state     <= S_CS_HOLD;
            end else begin
              dac_sclk_o <= 1'b1;
              dac_din_o  <= shift_reg[24];
              shift_reg  <= shift_reg << 1;
              phase      <= 1'b1;
            end
          end else begin
            dac_sclk_o <= 1'b0;
            phase      <= 1'b0;
          end
        end
        S_CS_HOLD: begin
          if (timer == TW'(1)) begin
            timer <= '0;
            state <= after_frame;
          end else timer <= timer + 1'b1;
        end
        S_LOAD: begin
          if (timer == TW'(LDAC_CYCLES - 1)) begin
            dac_nldac_o <= 1'b1;
            timer       <= '0;
            state       <= S_IDLE;
          end else timer <= timer + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
