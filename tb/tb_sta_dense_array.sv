// tb_sta_dense_array: the same grid built as the plain (dense) systolic
// tensor array, STA 4x8x4_2x2, by setting NNZ = B = 8: every unit is then
// an 8-long dot product with one multiplier per element and no activation
// multiplexers. Weight columns are fully dense (index j = element j), and
// the results are compared with the reference X*W after the shift-chain
// readout, for tiles with bubbles.
`timescale 1ns/1ps
module tb_sta_dense_array;
  import sta_pkg::*;

  localparam int unsigned A = 4, B = 8, C = 4, NNZ = 8, M = 2, N = 2, IW = 3;
  localparam int unsigned ROWS = A*M, COLS = C*N, KB = 24;

  logic clk = 0, rst_n = 0;
  op_t           act_i [M][A][B];
  logic          anz_i [M][A][B];
  logic          av_i  [M];
  op_t           w_i   [N][C][NNZ];
  logic          wnz_i [N][C][NNZ];
  logic [IW-1:0] idx_i [N][C][NNZ];
  logic          wv_i  [N];
  logic          shift;
  acc_t          acc_o [N][C];
  logic [$clog2(M*N*(A*B+C*NNZ)+1)-1:0] gated;
  int checks = 0, failures = 0;

  op_t           X   [ROWS][KB*B];
  op_t           Wv  [COLS][KB][NNZ];
  logic [IW-1:0] Wi  [COLS][KB][NNZ];
  longint        O   [ROWS][COLS];
  int            slot [$];   // beat index per slot, -1 = bubble

  sta_array #(.A(A), .B(B), .C(C), .NNZ(NNZ), .M(M), .N(N)) dut (
    .clk(clk), .rst_n(rst_n), .act_i(act_i), .act_nz_i(anz_i), .act_v_i(av_i),
    .w_i(w_i), .w_nz_i(wnz_i), .idx_i(idx_i), .w_v_i(wv_i),
    .shift_i(shift), .acc_o(acc_o), .gated_o(gated));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic make_tile();
    foreach (X[r, k]) X[r][k] = ($urandom_range(0, 3) == 0) ? op_t'(0) : op_t'($urandom);
    foreach (Wv[c, kb]) begin
      bit used [B];
      foreach (used[i]) used[i] = 0;
      for (int j = 0; j < NNZ; j++) begin
        Wi[c][kb][j] = IW'(j);
        Wv[c][kb][j] = ($urandom_range(0, 5) == 0) ? op_t'(0) : op_t'($urandom);
      end
    end
    foreach (O[r, c]) begin
      O[r][c] = 0;
      for (int kb = 0; kb < KB; kb++)
        for (int j = 0; j < NNZ; j++)
          O[r][c] += longint'(X[r][kb*B + Wi[c][kb][j]]) * longint'(Wv[c][kb][j]);
    end
    slot.delete();
    for (int kb = 0; kb < KB; kb++) begin
      if ($urandom_range(0, 4) == 0) slot.push_back(-1);
      slot.push_back(kb);
    end
  endtask

  task automatic run_tile();
    int len = slot.size();
    for (int t = 0; t < len + M + N - 2; t++) begin
      for (int m = 0; m < M; m++) begin
        int s = t - m;
        int kb = (s >= 0 && s < len) ? slot[s] : -1;
        av_i[m] = (kb >= 0);
        for (int a = 0; a < A; a++)
          for (int b = 0; b < B; b++) begin
            act_i[m][a][b] = (kb >= 0) ? X[m*A+a][kb*B+b] : op_t'(0);
            anz_i[m][a][b] = (act_i[m][a][b] != 0);
          end
      end
      for (int n = 0; n < N; n++) begin
        int s = t - n;
        int kb = (s >= 0 && s < len) ? slot[s] : -1;
        wv_i[n] = (kb >= 0);
        for (int c = 0; c < C; c++)
          for (int j = 0; j < NNZ; j++) begin
            w_i[n][c][j]   = (kb >= 0) ? Wv[n*C+c][kb][j] : op_t'(0);
            idx_i[n][c][j] = (kb >= 0) ? Wi[n*C+c][kb][j] : '0;
            wnz_i[n][c][j] = (w_i[n][c][j] != 0);
          end
      end
      @(negedge clk);
    end
    foreach (av_i[m]) av_i[m] = 0;
    foreach (wv_i[n]) wv_i[n] = 0;
    // all products must be in the accumulators M+N-2 cycles after the last
    // beat entered: read out immediately
    shift = 1;
    for (int r = 0; r < ROWS; r++) begin
      #1;
      for (int n = 0; n < N; n++)
        for (int c = 0; c < C; c++)
          expect_eq(acc_o[n][c], acc_t'(O[ROWS-1-r][n*C+c]),
                    $sformatf("O[%0d][%0d]", ROWS-1-r, n*C+c));
      @(negedge clk);
    end
    shift = 0;
  endtask

  initial begin
    shift = 0;
    foreach (av_i[m]) av_i[m] = 0;
    foreach (wv_i[n]) wv_i[n] = 0;
    foreach (act_i[m, a, b]) begin act_i[m][a][b] = '0; anz_i[m][a][b] = 0; end
    foreach (w_i[n, c, j]) begin w_i[n][c][j] = '0; wnz_i[n][c][j] = 0; idx_i[n][c][j] = '0; end
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    repeat (3) begin
      make_tile();
      run_tile();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
