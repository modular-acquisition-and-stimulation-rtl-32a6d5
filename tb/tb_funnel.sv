// Testbench for funnel: random 40-bit words in, bytes out under random backpressure. Every
// word must come out as five bytes, most significant first, in order; with the output always
// ready the funnel must sustain one byte per cycle.
module tb_funnel;
  localparam int NW = 400;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [39:0] in_data = '0;
  logic [7:0] out_data;
  logic [39:0] words [NW];
  int checks = 0, failures = 0, nin = 0, nout = 0, cyc = 0;
  bit backpressure = 1, acc;
  int first_out_cyc = -1, last_out_cyc = 0;

  funnel #(.IN_BYTES(5)) dut (.clk, .rst_n, .in_valid_i(in_valid), .in_data_i(in_data),
    .in_ready_o(in_ready), .out_valid_o(out_valid), .out_data_o(out_data), .out_ready_i(out_ready));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [7:0] e;
    e = words[nout / 5][39 - 8 * (nout % 5) -: 8];
    checks++;
    if (out_data !== e) begin
      failures++;
      $display("FAIL: byte %0d = %h, expected %h", nout, out_data, e);
    end
    if (!backpressure) begin
      if (first_out_cyc < 0) first_out_cyc = cyc;
      last_out_cyc = cyc;
    end
    nout++;
  end

  initial begin
    foreach (words[i]) words[i] = {$urandom, $urandom} & 40'hFF_FFFF_FFFF;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: random valid and backpressure
    fork
      begin
       while (nin < NW / 2) begin
        @(negedge clk);
        in_valid = $urandom_range(0, 2) == 0;
        in_data  = words[nin];
        #1 acc = in_valid && in_ready;
        @(posedge clk);
        if (acc) nin++;
       end
       @(negedge clk);
       in_valid = 0;
      end
      while (nout < 5 * NW / 2) begin
        @(negedge clk);
        out_ready = $urandom_range(0, 1);
      end
    join
    @(negedge clk);
    in_valid = 0;
    // phase 2: no backpressure, words offered back to back
    backpressure = 0;
    out_ready = 1;
    while (nin < NW) begin
      @(negedge clk);
      in_valid = 1;
      in_data  = words[nin];
      #1 acc = in_ready;
      @(posedge clk);
      if (acc) nin++;
    end
    @(negedge clk);
    in_valid = 0;
    repeat (20) @(posedge clk);
    checks++;
    if (nout != 5 * NW) begin failures++; $display("FAIL: %0d bytes out", nout); end
    checks++;
    if (last_out_cyc - first_out_cyc + 1 != 5 * NW / 2) begin
      failures++;
      $display("FAIL: %0d bytes took %0d cycles", 5 * NW / 2, last_out_cyc - first_out_cyc + 1);
    end
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
