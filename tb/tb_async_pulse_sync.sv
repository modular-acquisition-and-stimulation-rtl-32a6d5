// Testbench for async_pulse_sync: asynchronous pulses of random width and phase must each give
// exactly one one-cycle output pulse, within STAGES+1 cycles of the input edge.
module tb_async_pulse_sync;
  logic clk = 0, rst_n = 0, a = 0, p;
  int checks = 0, failures = 0;
  int in_edges = 0, out_pulses = 0, cyc = 0, last_edge_cyc = 0;

  async_pulse_sync #(.STAGES(2)) dut (.clk, .rst_n, .async_i(a), .pulse_o(p));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && p) begin
    out_pulses++;
    checks++;
    if (cyc - last_edge_cyc > 4) begin
      failures++;
      $display("FAIL: latency %0d cycles", cyc - last_edge_cyc);
    end
  end
  // an output pulse lasts exactly one cycle
  always @(negedge clk) if (rst_n && p) begin
    @(negedge clk);
    checks++;
    if (p) begin failures++; $display("FAIL: pulse longer than one cycle"); end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (200) begin
      #($urandom_range(3, 60));
      a = 1; in_edges++; last_edge_cyc = cyc;
      #($urandom_range(11, 50));
      a = 0;
      #($urandom_range(11, 40));
    end
    repeat (10) @(posedge clk);
    checks++;
    if (in_edges != out_pulses) begin
      failures++;
      $display("FAIL: %0d input pulses, %0d output pulses", in_edges, out_pulses);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
