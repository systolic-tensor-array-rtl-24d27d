// tb_dbb_decoder: self-checking test of the DBB weight-block decoder.
// Random 8-element blocks with 0..4 non-zeros (and some with 5..8, which
// must raise overflow) are compressed here into bitmask + non-zero bytes;
// the decoder output is expanded back into an 8-element block and compared
// with the original. Dense blocks are checked phase by phase (elements
// 0-3 with indices 0-3, then 4-7 with indices 4-7).
`timescale 1ns/1ps
module tb_dbb_decoder;
  import sta_pkg::*;

  localparam int unsigned B = 8, NNZ = 4, IW = 3;

  logic [B*OP_W-1:0] blk;
  mode_e             mode;
  logic              phase;
  op_t               w   [NNZ];
  logic              nz  [NNZ];
  logic [IW-1:0]     idx [NNZ];
  logic              ovf;
  int checks = 0, failures = 0;

  dbb_decoder #(.B(B), .NNZ(NNZ)) dut (
    .blk_i(blk), .mode_i(mode), .phase_i(phase),
    .w_o(w), .nz_o(nz), .idx_o(idx), .overflow_o(ovf));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    op_t dense [B];
    op_t back  [B];
    op_t kept  [B];
    int  nnz, target;
    for (int t = 0; t < 3000; t++) begin
      // random block with a chosen number of non-zeros
      target = (t % 10 == 9) ? $urandom_range(5, 8) : $urandom_range(0, 4);
      foreach (dense[i]) dense[i] = '0;
      nnz = 0;
      while (nnz < target) begin
        int p;
        p = $urandom_range(0, B-1);
        if (dense[p] == 0) begin
          dense[p] = op_t'($urandom_range(1, 255));
          nnz++;
        end
      end
      // compress: bitmask, then non-zeros in ascending order; the bound
      // keeps only the first NNZ of them
      blk = '0;
      nnz = 0;
      foreach (kept[i]) kept[i] = '0;
      for (int i = 0; i < B; i++) if (dense[i] != 0) begin
        blk[i] = 1'b1;
        if (nnz < NNZ) begin
          blk[OP_W*(nnz+1) +: OP_W] = dense[i];
          kept[i] = dense[i];
        end
        nnz++;
      end
      mode = MODE_SPARSE; phase = 0;
      #1;
      foreach (back[i]) back[i] = '0;
      for (int j = 0; j < NNZ; j++) if (nz[j]) back[idx[j]] = back[idx[j]] + w[j];
      for (int i = 0; i < B; i++) expect_eq(back[i], kept[i], $sformatf("sparse elem %0d", i));
      expect_eq(ovf, target > NNZ, "overflow flag");
      // dense mode on the uncompressed block
      for (int i = 0; i < B; i++) blk[OP_W*i +: OP_W] = dense[i];
      mode = MODE_DENSE;
      for (int ph = 0; ph < 2; ph++) begin
        phase = ph[0];
        #1;
        for (int j = 0; j < NNZ; j++) begin
          expect_eq(idx[j], ph*NNZ + j, "dense index");
          expect_eq(w[j], dense[ph*NNZ + j], "dense value");
          expect_eq(nz[j], dense[ph*NNZ + j] != 0, "dense nz flag");
        end
        expect_eq(ovf, 0, "dense overflow");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
