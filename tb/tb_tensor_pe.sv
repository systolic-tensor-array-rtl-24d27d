// tb_tensor_pe: self-checking test of one 4x8x4 tensor PE with 4-of-8 DBB
// weights. A random stream of beats (about 20% of operands zero, about
// 25% of cycles without a valid beat) is applied; every cycle the
// registered pass-through operands (value as seen through the zero flag,
// indices, valid bits) are compared with the inputs of the cycle before,
// and the zero-gating count with the number of zero operands in valid
// beats. The A x C accumulators are then shifted out at the bottom (A
// cycles) while known values enter from the top, and compared with a
// reference (A x 8) by (8 x C) sparse product sum; a second round of A
// shifts must return the values that were shifted in.
`timescale 1ns/1ps
module tb_tensor_pe;
  import sta_pkg::*;

  localparam int unsigned A = 4, B = 8, C = 4, NNZ = 4, IW = 3;

  logic clk = 0, rst_n = 0;
  op_t           act_i [A][B], act_o [A][B];
  logic          anz_i [A][B], anz_o [A][B];
  logic          av_i, av_o;
  op_t           w_i [C][NNZ], w_o [C][NNZ];
  logic          wnz_i [C][NNZ], wnz_o [C][NNZ];
  logic [IW-1:0] idx_i [C][NNZ], idx_o [C][NNZ];
  logic          wv_i, wv_o;
  logic          shift;
  acc_t          acc_i [C], acc_o [C];
  logic [$clog2(A*B+C*NNZ+1)-1:0] gated;
  int checks = 0, failures = 0;
  longint ref_acc [A][C];
  int gated_seen = 0;

  tensor_pe #(.A(A), .B(B), .C(C), .NNZ(NNZ)) dut (
    .clk(clk), .rst_n(rst_n),
    .act_i(act_i), .act_nz_i(anz_i), .act_v_i(av_i),
    .act_o(act_o), .act_nz_o(anz_o), .act_v_o(av_o),
    .w_i(w_i), .w_nz_i(wnz_i), .idx_i(idx_i), .w_v_i(wv_i),
    .w_o(w_o), .w_nz_o(wnz_o), .idx_o(idx_o), .w_v_o(wv_o),
    .shift_i(shift), .acc_i(acc_i), .acc_o(acc_o), .gated_o(gated));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  function automatic op_t rnd_op();
    return ($urandom_range(0, 4) == 0) ? op_t'(0) : op_t'($urandom);
  endfunction

  initial begin
    op_t           pa [A][B];
    op_t           pw [C][NNZ];
    logic [IW-1:0] pidx [C][NNZ];
    logic          pv;
    int            zeros;
    shift = 0; av_i = 0; wv_i = 0;
    foreach (acc_i[c]) acc_i[c] = '0;
    foreach (act_i[a, b]) begin act_i[a][b] = '0; anz_i[a][b] = 0; end
    foreach (w_i[c, j]) begin w_i[c][j] = '0; wnz_i[c][j] = 0; idx_i[c][j] = '0; end
    foreach (ref_acc[a, c]) ref_acc[a][c] = 0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      logic v;
      v = ($urandom_range(0, 3) != 0);
      av_i = v; wv_i = v;
      zeros = 0;
      foreach (act_i[a, b]) begin
        act_i[a][b] = rnd_op(); anz_i[a][b] = (act_i[a][b] != 0);
        if (v && act_i[a][b] == 0) zeros++;
      end
      foreach (w_i[c, j]) begin
        w_i[c][j] = rnd_op(); wnz_i[c][j] = (w_i[c][j] != 0); idx_i[c][j] = IW'($urandom);
        if (v && w_i[c][j] == 0) zeros++;
      end
      #1;
      expect_eq(gated, zeros, "zero-gated lanes");
      gated_seen += zeros;
      if (v)
        foreach (ref_acc[a, c])
          for (int j = 0; j < NNZ; j++)
            ref_acc[a][c] += longint'(act_i[a][idx_i[c][j]]) * longint'(w_i[c][j]);
      pa = act_i; pw = w_i; pidx = idx_i; pv = v;
      @(negedge clk);
      // pipeline registers: last cycle's operands, zero when flagged
      expect_eq(av_o, pv, "act valid out");
      expect_eq(wv_o, pv, "w valid out");
      foreach (act_o[a, b])
        expect_eq(anz_o[a][b] ? act_o[a][b] : 0, pv ? pa[a][b] : 0, "act out");
      foreach (w_o[c, j]) begin
        expect_eq(wnz_o[c][j] ? w_o[c][j] : 0, pv ? pw[c][j] : 0, "w out");
        if (pv) expect_eq(idx_o[c][j], pidx[c][j], "idx out");
      end
    end
    av_i = 0; wv_i = 0;
    // readout: bottom row first, known values enter at the top
    for (int s = 0; s < A; s++) begin
      foreach (acc_i[c]) acc_i[c] = acc_t'(1000 * s + c);
      shift = 1;
      #1;
      foreach (acc_o[c]) expect_eq(acc_o[c], acc_t'(ref_acc[A-1-s][c]), "readout");
      @(negedge clk);
    end
    for (int s = 0; s < A; s++) begin
      foreach (acc_i[c]) acc_i[c] = '0;
      #1;
      foreach (acc_o[c]) expect_eq(acc_o[c], 1000 * s + c, "shifted-in values");
      @(negedge clk);
    end
    shift = 0;
    checks++;
    if (gated_seen == 0) begin failures++; $display("FAIL no zero gating exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
