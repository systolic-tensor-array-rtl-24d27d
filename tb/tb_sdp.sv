// tb_sdp: self-checking test of the sparse dot-product unit (SDP8, 4
// multipliers). Random activations, weights and indices (indices may
// repeat, which the unit must handle like any other selection) are
// accumulated over many cycles and compared with an independent model of
// the accumulator; hold cycles (acc_en low), shift-in from the unit above
// and reset are checked too. The result must be visible one clock after
// the beat (single-cycle accumulate).
`timescale 1ns/1ps
module tb_sdp;
  import sta_pkg::*;

  localparam int unsigned B = 8, NNZ = 4, IW = 3;

  logic clk = 0, rst_n = 0;
  op_t           act [B];
  op_t           w   [NNZ];
  logic [IW-1:0] idx [NNZ];
  logic          acc_en, shift;
  acc_t          acc_in, acc_out;
  int checks = 0, failures = 0;
  longint model;

  sdp #(.B(B), .NNZ(NNZ)) dut (
    .clk(clk), .rst_n(rst_n), .act_i(act), .w_i(w), .idx_i(idx),
    .acc_en_i(acc_en), .shift_i(shift), .acc_i(acc_in), .acc_o(acc_out));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what);
    checks++;
    if (acc_out !== acc_t'(model)) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, acc_out, acc_t'(model));
    end
  endtask

  function automatic longint dot();
    longint s = 0;
    for (int j = 0; j < NNZ; j++) s += longint'(act[idx[j]]) * longint'(w[j]);
    return s;
  endfunction

  initial begin
    acc_en = 0; shift = 0; acc_in = 0;
    foreach (act[i]) act[i] = '0;
    foreach (w[j]) begin w[j] = '0; idx[j] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    model = 0;
    check("after reset");
    for (int t = 0; t < 2000; t++) begin
      int r;
      r = $urandom_range(0, 9);
      foreach (act[i]) act[i] = op_t'($urandom);
      foreach (w[j]) begin w[j] = op_t'($urandom); idx[j] = IW'($urandom); end
      // corner values now and then
      if (t % 97 == 0) begin foreach (act[i]) act[i] = -128; foreach (w[j]) w[j] = -128; end
      acc_in = acc_t'($urandom);
      acc_en = (r != 0);
      shift  = (r == 9);
      @(posedge clk);
      if (shift)       model = longint'(acc_in);
      else if (acc_en) model = longint'(acc_t'(model + dot()));
      @(negedge clk);
      check(shift ? "shift" : acc_en ? "accumulate" : "hold");
    end
    // synchronous reset clears the accumulator
    rst_n = 0; @(posedge clk); @(negedge clk); rst_n = 1;
    model = 0; check("reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
