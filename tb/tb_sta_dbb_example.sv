// tb_sta_dbb_example: the end-to-end test of tb_sta_dbb_top run on the
// small 2x4x2_2x2 STA-DBB (SDP4 units with two multipliers, 2-of-4 DBB
// blocks with 2-bit indices, 2 x 2 tensor PEs). Here an output tile is
// 4 x 4 and the readout through the shift chains takes A*M = 4 cycles,
// which the per-tile row count and latency checks confirm. Dense tiles
// run at half throughput, as in the default configuration.
`timescale 1ns/1ps
module tb_sta_dbb_example;
  import sta_pkg::*;

  localparam int unsigned A = 2, B = 4, C = 2, NNZ = 2;
  localparam int unsigned M = DEF_M, N = DEF_N;
  localparam int unsigned ROWS = A*M, COLS = C*N, KBMAX = 64;

  logic clk = 0, rst_n = 0;
  logic start, busy, done, in_valid, in_ready, out_valid, ovf;
  mode_e mode;
  logic [15:0] nbeats;
  op_t   act [M][A][B];
  logic [B*OP_W-1:0] wblk [N][C];
  logic [$clog2(ROWS)-1:0] out_row;
  acc_t  out [N][C];
  logic [$clog2(M*N*(A*B+C*NNZ)+1)-1:0] gated;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_sparse = 0, n_dense = 0, n_bubble = 0, n_backpressure = 0;
  int n_gated = 0, n_shift = 0, n_overflow = 0;

  op_t    X  [ROWS][KBMAX*B];
  op_t    Wd [KBMAX*B][COLS];   // weights as sent (dense, or pre-truncation)
  op_t    We [KBMAX*B][COLS];   // weights the engine must use
  longint O  [ROWS][COLS];
  int     rows_seen;

  sta_dbb_top #(.A(A),.B(B),.C(C),.NNZ(NNZ),.M(M),.N(N)) dut (
    .clk(clk), .rst_n(rst_n), .start_i(start), .mode_i(mode), .nbeats_i(nbeats),
    .busy_o(busy), .done_o(done), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .act_i(act), .wblk_i(wblk), .out_valid_o(out_valid), .out_row_o(out_row),
    .out_o(out), .dbb_overflow_o(ovf), .gated_o(gated));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
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

  // result rows and monitors
  always @(negedge clk) if (rst_n) begin
    n_gated += int'(gated);
    if (ovf) n_overflow++;
    if (out_valid) begin
      n_shift++;
      rows_seen++;
      for (int n = 0; n < N; n++)
        for (int c = 0; c < C; c++)
          expect_eq(out[n][c], acc_t'(O[out_row][n*C+c]),
                    $sformatf("O[%0d][%0d]", out_row, n*C+c));
    end
  end

  // Draw X and W for one tile; ovf_blk >= 0 puts 5 non-zeros in that block
  // of column 0
  task automatic make_tile(mode_e md, int kb_n, int ovf_blk);
    for (int r = 0; r < ROWS; r++)
      for (int k = 0; k < kb_n*B; k++)
        X[r][k] = ($urandom_range(0, 3) == 0) ? op_t'(0) : op_t'($urandom);
    for (int col = 0; col < COLS; col++)
      for (int kb = 0; kb < kb_n; kb++) begin
        int nz_target, placed, p;
        for (int i = 0; i < B; i++) Wd[kb*B+i][col] = '0;
        if (md == MODE_DENSE) begin
          for (int i = 0; i < B; i++)
            Wd[kb*B+i][col] = ($urandom_range(0, 3) == 0) ? op_t'(0) : op_t'($urandom);
        end else begin
          nz_target = (col == 0 && kb == ovf_blk) ? NNZ + 1 : $urandom_range(NNZ - 2, NNZ);
          placed = 0;
          while (placed < nz_target) begin
            p = $urandom_range(0, B-1);
            if (Wd[kb*B+p][col] == 0) begin
              Wd[kb*B+p][col] = op_t'($urandom_range(1, 255));
              placed++;
            end
          end
        end
        // what the engine computes with: the first NNZ non-zeros in sparse mode
        placed = 0;
        for (int i = 0; i < B; i++) begin
          We[kb*B+i][col] = '0;
          if (Wd[kb*B+i][col] != 0) begin
            if (md == MODE_DENSE || placed < NNZ) We[kb*B+i][col] = Wd[kb*B+i][col];
            placed++;
          end
        end
      end
    foreach (O[r, c]) begin
      O[r][c] = 0;
      for (int k = 0; k < kb_n*B; k++) O[r][c] += longint'(X[r][k]) * longint'(We[k][c]);
    end
  endtask

  // Present input beat kb on the ports
  task automatic drive_beat(mode_e md, int kb);
    for (int m = 0; m < M; m++)
      for (int a = 0; a < A; a++)
        for (int b = 0; b < B; b++)
          act[m][a][b] = X[m*A+a][kb*B+b];
    for (int n = 0; n < N; n++)
      for (int c = 0; c < C; c++) begin
        logic [B*OP_W-1:0] blk;
        int cnt;
        blk = '0;
        cnt = 0;
        for (int i = 0; i < B; i++) begin
          op_t v;
          v = Wd[kb*B+i][n*C+c];
          if (md == MODE_DENSE) blk[OP_W*i +: OP_W] = v;
          else if (v != 0) begin
            blk[i] = 1'b1;
            if (cnt < NNZ) blk[OP_W*(cnt+1) +: OP_W] = v;
            cnt++;
          end
        end
        wblk[n][c] = blk;
      end
  endtask

  task automatic run_tile(mode_e md, int kb_n, int bubble_pct, int ovf_blk);
    int kb = 0, cycles = 0;
    make_tile(md, kb_n, ovf_blk);
    rows_seen = 0;
    @(negedge clk);
    start = 1; mode = md; nbeats = 16'(kb_n);
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin
      bit taken;
      taken = 0;
      if (kb < kb_n) begin
        // keep an offered beat until taken; otherwise maybe insert a bubble
        if (!in_valid) in_valid = ($urandom_range(0, 99) >= bubble_pct);
        if (!in_valid) n_bubble++;
        drive_beat(md, kb);
        #1;
        if (in_valid && !in_ready) n_backpressure++;
        taken = in_valid && in_ready;
      end
      @(negedge clk);
      cycles++;
      if (taken) begin
        kb++;
        in_valid = 0;
      end
    end
    in_valid = 0;
    expect_eq(rows_seen, ROWS, "result rows per tile");
    if (bubble_pct == 0)
      expect_eq(cycles, 1 + ((md == MODE_DENSE) ? B/NNZ : 1)*kb_n + (M+N-2) + ROWS,
                "tile latency");
    if (md == MODE_DENSE) n_dense++; else n_sparse++;
  endtask

  initial begin
    start = 0; in_valid = 0; mode = MODE_SPARSE; nbeats = '0;
    foreach (act[m, a, b]) act[m][a][b] = '0;
    foreach (wblk[n, c]) wblk[n][c] = '0;
    foreach (O[r, c]) O[r][c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_tile(MODE_SPARSE, 16, 0, -1);
    run_tile(MODE_DENSE,  16, 0, -1);
    run_tile(MODE_SPARSE, 32, 25, -1);
    run_tile(MODE_DENSE,  24, 25, -1);
    run_tile(MODE_SPARSE, 8,  0, 3);
    run_tile(MODE_SPARSE, 1,  0, -1);
    run_tile(MODE_DENSE,  1,  0, -1);
    run_tile(MODE_SPARSE, KBMAX, 10, -1);
    $display("mechanisms: sparse_tiles=%0d dense_tiles=%0d bubbles=%0d backpressure=%0d zero_gated_lanes=%0d shifts=%0d overflow=%0d",
             n_sparse, n_dense, n_bubble, n_backpressure, n_gated, n_shift, n_overflow);
    checks += 7;
    if (n_sparse == 0)       begin failures++; $display("FAIL no sparse tile"); end
    if (n_dense == 0)        begin failures++; $display("FAIL no dense tile"); end
    if (n_bubble == 0)       begin failures++; $display("FAIL no bubble"); end
    if (n_backpressure == 0) begin failures++; $display("FAIL no back-pressure"); end
    if (n_gated == 0)        begin failures++; $display("FAIL no zero gating"); end
    if (n_shift == 0)        begin failures++; $display("FAIL no readout shift"); end
    if (n_overflow == 0)     begin failures++; $display("FAIL no DBB overflow flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
