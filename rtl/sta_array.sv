// sta_array: M x N systolic grid of tensor PEs (the STA-DBB core).
//
// Output-stationary dataflow. PE row m receives A x B activations per beat
// at its left edge (act_i[m]); they travel right one PE per clock. PE
// column n receives C DBB-compressed weight columns per beat at its top
// edge (w_i[n], idx_i[n]); they travel down one PE per clock. PE (m,n)
// therefore owns output rows m*A .. m*A+A-1 and output columns
// n*C .. n*C+C-1 of the product, and each beat carries B consecutive
// values of the reduction dimension. The caller must skew the edges: the
// beat of row m / column n has to enter m / n cycles after the beat of
// row 0 / column 0 (see skew_buffer).
//
// Readout: while shift_i is high every accumulator column of A*M units
// shifts down by one; zeros enter at the top and acc_o[n][c] shows the
// bottom accumulator of output column n*C+c. After A*M shifts all results
// have left (bottom output row first) and the accumulators are zero again,
// ready for the next tile.
//
// Follows the paper: grid of tensor PEs, register-to-register operand
// movement only, vertical readout shift chains. The broadcast shift_i
// control and the per-lane valid/zero flags are this design's choices.
module sta_array
  import sta_pkg::*;
#(
  parameter int unsigned A   = DEF_A,
  parameter int unsigned B   = DEF_B,
  parameter int unsigned C   = DEF_C,
  parameter int unsigned NNZ = DEF_NNZ,
  parameter int unsigned M   = DEF_M,
  parameter int unsigned N   = DEF_N,
  localparam int unsigned IW = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned GW = $clog2(M*N*(A*B+C*NNZ)+1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  op_t           act_i    [M][A][B],
  input  logic          act_nz_i [M][A][B],
  input  logic          act_v_i  [M],
  input  op_t           w_i      [N][C][NNZ],
  input  logic          w_nz_i   [N][C][NNZ],
  input  logic [IW-1:0] idx_i    [N][C][NNZ],
  input  logic          w_v_i    [N],
  input  logic          shift_i,
  output acc_t          acc_o    [N][C],
  output logic [GW-1:0] gated_o              // zero-gated operand lanes this cycle
);

  localparam int unsigned PGW = $clog2(A*B+C*NNZ+1);

  // horizontal (activation) and vertical (weight, accumulator) links
  op_t           act_h   [M][N+1][A][B];
  logic          actnz_h [M][N+1][A][B];
  logic          actv_h  [M][N+1];
  op_t           w_v     [M+1][N][C][NNZ];
  logic          wnz_v   [M+1][N][C][NNZ];
  logic [IW-1:0] idx_v   [M+1][N][C][NNZ];
  logic          wv_v    [M+1][N];
  logic [PGW-1:0] pe_gated [M][N];

  for (genvar m = 0; m < M; m++) begin : g_left
    assign act_h[m][0]   = act_i[m];
    assign actnz_h[m][0] = act_nz_i[m];
    assign actv_h[m][0]  = act_v_i[m];
  end
  for (genvar n = 0; n < N; n++) begin : g_top
    assign w_v[0][n]   = w_i[n];
    assign wnz_v[0][n] = w_nz_i[n];
    assign idx_v[0][n] = idx_i[n];
    assign wv_v[0][n]  = w_v_i[n];
    assign acc_o[n] = g_m[M-1].g_n[n].acc_dn;
  end

  for (genvar m = 0; m < M; m++) begin : g_m
    for (genvar n = 0; n < N; n++) begin : g_n
      // shift-chain links, local to each PE so that the chain is not one
      // array read and written by the same PEs
      acc_t acc_up [C];
      acc_t acc_dn [C];
      if (m == 0) begin : g_first
        for (genvar c = 0; c < C; c++) begin : g_c
          assign acc_up[c] = '0;
        end
      end else begin : g_next
        assign acc_up = g_m[m-1].g_n[n].acc_dn;
      end
      tensor_pe #(.A(A), .B(B), .C(C), .NNZ(NNZ)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .act_i    (act_h[m][n]),
        .act_nz_i (actnz_h[m][n]),
        .act_v_i  (actv_h[m][n]),
        .act_o    (act_h[m][n+1]),
        .act_nz_o (actnz_h[m][n+1]),
        .act_v_o  (actv_h[m][n+1]),
        .w_i      (w_v[m][n]),
        .w_nz_i   (wnz_v[m][n]),
        .idx_i    (idx_v[m][n]),
        .w_v_i    (wv_v[m][n]),
        .w_o      (w_v[m+1][n]),
        .w_nz_o   (wnz_v[m+1][n]),
        .idx_o    (idx_v[m+1][n]),
        .w_v_o    (wv_v[m+1][n]),
        .shift_i  (shift_i),
        .acc_i    (acc_up),
        .acc_o    (acc_dn),
        .gated_o  (pe_gated[m][n])
      );
    end
  end

  always_comb begin
    gated_o = '0;
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++)
        gated_o = gated_o + GW'(pe_gated[m][n]);
  end

endmodule
