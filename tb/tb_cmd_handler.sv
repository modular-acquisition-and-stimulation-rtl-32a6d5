// Testbench for cmd_handler: a random mix of start commands, DAC requests (three bytes, any
// values in the last two) and invalid bytes. The forwarded byte stream, the started flag and
// the error strobes are compared with an independent decoding of the sent stream; forwarding
// must pause while the stimulus FIFO reports full.
module tb_cmd_handler;
  import acq_pkg::*;
  logic clk = 0, rst_n = 0;
  logic rx_valid = 0, rx_ready, out_valid, out_ready = 1, started, err;
  logic [7:0] rx_data = '0, out_data;
  logic [7:0] exp_out [$];
  int checks = 0, failures = 0, exp_err = 0, got_err = 0, starts = 0;

  cmd_handler dut (.clk, .rst_n, .rx_valid_i(rx_valid), .rx_data_i(rx_data), .rx_ready_o(rx_ready),
    .out_valid_o(out_valid), .out_data_o(out_data), .out_ready_i(out_ready),
    .started_o(started), .err_o(err));

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (!out_ready) begin failures++; $display("FAIL: forwarded while FIFO full"); end
      if (exp_out.size() == 0 || exp_out[0] != out_data) begin
        failures++;
        $display("FAIL: forwarded %h", out_data);
      end else void'(exp_out.pop_front());
    end
    if (err) got_err++;
  end

  task automatic send(logic [7:0] b);
    bit acc;
    @(negedge clk);
    rx_valid = 1; rx_data = b;
    forever begin
      out_ready = $urandom_range(0, 3) != 0;
      #1 acc = rx_ready;
      @(posedge clk);
      @(negedge clk);
      if (acc) break;
    end
    rx_valid = 0;
    out_ready = 1;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (300) begin
      int kind;
      kind = $urandom_range(0, 9);
      if (kind < 6) begin
        logic [7:0] b0, b1, b2;
        b0 = {4'b0001, 4'($urandom)}; b1 = 8'($urandom); b2 = 8'($urandom);
        exp_out.push_back(b0); exp_out.push_back(b1); exp_out.push_back(b2);
        send(b0); send(b1); send(b2);
      end else if (kind < 8) begin
        logic [7:0] b;
        do b = 8'($urandom); while (b[7:4] == 4'b0001 || b == CMD_START);
        exp_err++;
        send(b);
        checks++;
        if (started != (starts > 0)) begin failures++; $display("FAIL: started changed"); end
      end else begin
        send(CMD_START);
        starts++;
        checks++;
        if (!started) begin failures++; $display("FAIL: start not taken"); end
      end
    end
    repeat (5) @(negedge clk);
    checks++;
    if (exp_out.size() != 0) begin failures++; $display("FAIL: %0d bytes not forwarded", exp_out.size()); end
    checks++;
    if (got_err != exp_err) begin failures++; $display("FAIL: %0d errors, expected %0d", got_err, exp_err); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
