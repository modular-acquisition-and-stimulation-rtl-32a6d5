// Testbench for unfunnel: random bytes in with random gaps and backpressure; every three bytes
// must come out as one 24-bit word, first byte most significant.
module tb_unfunnel;
  localparam int NW = 300;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [7:0] in_data = '0;
  logic [23:0] out_data;
  logic [7:0] bytes [3 * NW];
  bit acc;
  int checks = 0, failures = 0, nin = 0, nout = 0;

  unfunnel #(.OUT_BYTES(3)) dut (.clk, .rst_n, .in_valid_i(in_valid), .in_data_i(in_data),
    .in_ready_o(in_ready), .out_valid_o(out_valid), .out_data_o(out_data), .out_ready_i(out_ready));

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [23:0] e;
    e = {bytes[3 * nout], bytes[3 * nout + 1], bytes[3 * nout + 2]};
    checks++;
    if (out_data !== e) begin
      failures++;
      $display("FAIL: word %0d = %h, expected %h", nout, out_data, e);
    end
    nout++;
  end

  initial begin
    foreach (bytes[i]) bytes[i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      begin
       while (nin < 3 * NW) begin
        @(negedge clk);
        in_valid = $urandom_range(0, 1);
        in_data  = bytes[nin];
        #1 acc = in_valid && in_ready;
        @(posedge clk);
        if (acc) nin++;
       end
       @(negedge clk);
       in_valid = 0;
      end
      while (nout < NW) begin
        @(negedge clk);
        out_ready = $urandom_range(0, 2) != 0;
      end
    join
    checks++;
    if (nout != NW) begin failures++; $display("FAIL: %0d words", nout); end
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
