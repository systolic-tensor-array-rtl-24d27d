// dbb_decoder: unpacks one weight block for a column of SDP units.
//
// Sparse (DBB) mode: the block is a bitmask byte followed by the non-zero
// weights in ascending element order (one byte of overhead per 8-element
// block plus four data bytes, 37.5% smaller than the dense block). The
// decoder walks the bitmask and gives the j-th non-zero weight the index
// of the j-th set bit, which the SDP multiplexers use to pick the matching
// activation. Slots beyond the number of set bits are marked zero.
// A block with more than NNZ set bits violates the density bound; it is
// flagged on overflow_o and only its first NNZ non-zeros are used.
//
// Dense mode: the block is B plain bytes. It is fed to the NNZ multipliers
// in B/NNZ phases (two for 8-of-4, hence half throughput): phase p
// presents elements p*NNZ .. p*NNZ+NNZ-1 with their own indices.
//
// The bitmask format is the paper's; the bit order (bit i = element i),
// byte packing on the port and the overflow flag are this design's
// choices. Purely combinational.
module dbb_decoder
  import sta_pkg::*;
#(
  parameter int unsigned B   = DEF_B,
  parameter int unsigned NNZ = DEF_NNZ,
  localparam int unsigned IW = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned NPH = B / NNZ,
  localparam int unsigned PW = (NPH > 1) ? $clog2(NPH) : 1
) (
  input  logic [B*OP_W-1:0] blk_i,      // packed block, see sta_pkg
  input  mode_e             mode_i,
  input  logic [PW-1:0]     phase_i,    // dense-mode phase
  output op_t               w_o   [NNZ],
  output logic              nz_o  [NNZ],
  output logic [IW-1:0]     idx_o [NNZ],
  output logic              overflow_o
);

  // The sparse format must fit in the dense block width
  if (B < NNZ + 1 || B % NNZ != 0 || B > OP_W) begin : g_bad_shape
    $error("dbb_decoder: unsupported B/NNZ combination");
  end

  logic [OP_W-1:0] mask;
  int unsigned     cnt;

  assign mask = blk_i[OP_W-1:0];

  always_comb begin
    cnt        = 0;
    overflow_o = 1'b0;
    for (int j = 0; j < NNZ; j++) begin
      w_o[j]   = '0;
      nz_o[j]  = 1'b0;
      idx_o[j] = '0;
    end
    if (mode_i == MODE_SPARSE) begin
      for (int i = 0; i < B; i++) begin
        if (mask[i]) begin
          if (cnt < NNZ) begin
            w_o[cnt]   = op_t'(blk_i[OP_W*(cnt+1) +: OP_W]);
            nz_o[cnt]  = (blk_i[OP_W*(cnt+1) +: OP_W] != '0);
            idx_o[cnt] = IW'(i);
          end else begin
            overflow_o = 1'b1;
          end
          cnt = cnt + 1;
        end
      end
    end else begin
      for (int j = 0; j < NNZ; j++) begin
        w_o[j]   = op_t'(blk_i[OP_W*(int'(phase_i)*NNZ+j) +: OP_W]);
        nz_o[j]  = (w_o[j] != '0);
        idx_o[j] = IW'(int'(phase_i)*NNZ + j);
      end
    end
  end

endmodule
