// Testbench for error_led: error strobes must set sticky flags that only reset clears, and
// each LED must blink with period 2**BLINK_BITS cycles while its flag is set and stay dark
// otherwise.
module tb_error_led;
  localparam int BB = 4;
  logic clk = 0, rst_n = 0;
  logic [3:0] err = '0, flags, led;
  int checks = 0, failures = 0, on_cycles = 0;

  error_led #(.NUM_ERR(4), .BLINK_BITS(BB)) dut (.clk, .rst_n, .err_i(err), .flags_o(flags), .led_o(led));

  always #5 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (40) begin @(negedge clk); check(led == 0 && flags == 0, "LED lit without error"); end
    err = 4'b0100;
    @(negedge clk);
    err = 0;
    check(flags == 4'b0100, "flag not set");
    for (int i = 0; i < 4 * 2**BB; i++) begin
      @(negedge clk);
      check(flags == 4'b0100, "flag not sticky");
      check((led & 4'b1011) == 0, "wrong LED lit");
      if (led[2]) on_cycles++;
    end
    check(on_cycles == 2 * 2**BB, $sformatf("LED on for %0d of %0d cycles", on_cycles, 4 * 2**BB));
    err = 4'b0001;
    @(negedge clk);
    err = 0;
    check(flags == 4'b0101, "second flag");
    rst_n = 0;
    @(negedge clk);
    rst_n = 1;
    check(flags == 0, "reset does not clear flags");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
