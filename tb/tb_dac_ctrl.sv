// Testbench for dac_ctrl. A small SPI receiver decodes the frames the controller sends (DIN
// sampled on SCLK falling edges while chip select is low). Checked: the two calibration frames
// and their spacing, each write request arriving as {4'b0001, mask, sample}, ready low while a
// frame is sent, the frame duration, and nLDAC pulses only for loads issued while ready.
module tb_dac_ctrl;
  localparam int STAB = 30, CAL = 40;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, load = 0;
  logic [3:0] mask = '0;
  logic [15:0] sample = '0;
  logic sclk, din, ncs, nldac;
  logic [23:0] frames [$];
  logic [23:0] sh;
  int nbits = 0, checks = 0, failures = 0, cyc = 0, ldac_cycles = 0, ldac_pulses = 0;
  int frame_end [$];

  dac_ctrl #(.STAB_CYCLES(STAB), .CAL_CYCLES(CAL)) dut (.clk, .rst_n, .req_valid_i(req_valid),
    .req_mask_i(mask), .req_sample_i(sample), .req_ready_o(req_ready), .load_i(load),
    .dac_sclk_o(sclk), .dac_din_o(din), .dac_ncs_o(ncs), .dac_nldac_o(nldac));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // SPI receiver (DAC side)
  always @(negedge sclk) if (!ncs) begin sh = {sh[22:0], din}; nbits++; end
  always @(posedge ncs) if (rst_n) begin
    checks++;
    if (nbits != 24) begin failures++; $display("FAIL: frame of %0d bits", nbits); end
    frames.push_back(sh);
    frame_end.push_back(cyc);
    nbits = 0;
  end
  always @(posedge clk) if (rst_n && !nldac) ldac_cycles++;
  always @(negedge nldac) if (rst_n) ldac_pulses++;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic put(logic [3:0] m, logic [15:0] s);
    @(negedge clk);
    while (!req_ready) @(negedge clk);
    req_valid = 1; mask = m; sample = s;
    @(negedge clk);
    req_valid = 0;
  endtask

  initial begin
    int t0;
    logic [3:0] ms [8];
    logic [15:0] ss [8];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!req_ready, "ready during calibration");
    while (!req_ready) @(negedge clk);
    check(frames.size() == 2, "calibration frames missing");
    check(frames[0] == 24'h050200 && frames[1] == 24'h050000, "calibration commands");
    check(frame_end[1] - frame_end[0] > CAL, "calibration delay too short");
    for (int i = 0; i < 8; i++) begin
      ms[i] = 4'($urandom); ss[i] = 16'($urandom);
      t0 = cyc;
      put(ms[i], ss[i]);
      @(negedge clk);
      check(!req_ready, "ready while sending");
      while (!req_ready) @(negedge clk);
      check(cyc - t0 >= 50 && cyc - t0 <= 54, $sformatf("frame took %0d cycles", cyc - t0));
    end
    for (int i = 0; i < 8; i++)
      check(frames[2 + i] == {4'b0001, ms[i], ss[i]},
            $sformatf("frame %0d = %h, expected %h", i, frames[2 + i], {4'b0001, ms[i], ss[i]}));
    // load while ready: one nLDAC pulse of two cycles
    @(negedge clk);
    load = 1;
    @(negedge clk);
    load = 0;
    repeat (5) @(negedge clk);
    check(ldac_pulses == 1 && ldac_cycles == 2, $sformatf("ldac %0d pulses %0d cycles", ldac_pulses, ldac_cycles));
    // load while busy is ignored
    put(4'hF, 16'h1234);
    @(negedge clk);
    load = 1;
    @(negedge clk);
    load = 0;
    while (!req_ready) @(negedge clk);
    check(ldac_pulses == 1, "load accepted while busy");
    check(frames[$] == 24'h1F1234, "frame after ignored load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
