// tb_skew_buffer: self-checking test of the operand skew delay line.
// Instances with depths 0, 1 and 3 are fed a random stream; each output
// must equal the input DEPTH clocks earlier, and zero right after reset.
`timescale 1ns/1ps
module tb_skew_buffer;

  typedef logic [11:0] word_t;

  logic  clk = 0, rst_n = 0;
  word_t d;
  word_t q0, q1, q3;
  word_t hist [$];
  int checks = 0, failures = 0;

  skew_buffer #(.T(word_t), .DEPTH(0)) u0 (.clk(clk), .rst_n(rst_n), .d_i(d), .q_o(q0));
  skew_buffer #(.T(word_t), .DEPTH(1)) u1 (.clk(clk), .rst_n(rst_n), .d_i(d), .q_o(q1));
  skew_buffer #(.T(word_t), .DEPTH(3)) u3 (.clk(clk), .rst_n(rst_n), .d_i(d), .q_o(q3));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(word_t got, word_t exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    d = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    expect_eq(q1, '0, "depth 1 after reset");
    expect_eq(q3, '0, "depth 3 after reset");
    // history holds three zeros as the reset contents
    repeat (3) hist.push_front('0);
    for (int t = 0; t < 1000; t++) begin
      d = word_t'($urandom);
      #1;
      expect_eq(q0, d, "depth 0");
      hist.push_front(d);
      @(posedge clk);
      @(negedge clk);
      expect_eq(q1, hist[0], "depth 1");
      expect_eq(q3, hist[2], "depth 3");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
