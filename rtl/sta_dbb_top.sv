// sta_dbb_top: Systolic Tensor Array for density-bound-block sparse
// weights (STA-DBB), default shape 4x8x4_2x2.
//
// The engine computes one output tile O = X * W of (A*M) x (C*N) INT32
// values, with X the INT8 activations ((A*M) x K) and W the INT8 weights
// (K x (C*N)), K a multiple of B. Each column of W is stored as K/B blocks
// of B weights along K. In sparse mode every block holds at most NNZ
// non-zeros and arrives DBB-compressed (bitmask + non-zero bytes); the
// array then retires one block per output column per cycle, i.e.
// A*B*C*M*N effective MACs per cycle (512 for 4x8x4_2x2) on A*C*M*N*NNZ
// physical multipliers (256). In dense mode the blocks arrive
// uncompressed and take B/NNZ cycles each (half throughput).
//
// Interface, per input beat kb = 0 .. nbeats_i-1 (valid/ready):
//   act_i[m][a][b] = X[m*A+a][kb*B+b]
//   wblk_i[n][c]   = block kb of column n*C+c of W (format in sta_pkg)
// Results: while out_valid_o is high, out_o[n][c] = O[out_row_o][n*C+c];
// rows come out last row first, one per cycle, A*M cycles in all.
//
// Structure: per weight column a dbb_decoder turns the block into NNZ
// values with in-block indices (for dense mode, the half selected by the
// controller's phase); activations get a non-zero flag for operand
// gating. skew_buffer instances delay PE row m by m and PE column n by n
// cycles, sta_array does the arithmetic, sta_ctrl sequences a tile.
// Latency of a sparse tile without bubbles: nbeats_i cycles of input,
// M+N-2 cycles of drain, A*M cycles of readout.
//
// The array, SDP datapath, DBB format and dense fallback follow the paper.
// The grid size, handshake, port packing, edge skew registers and the
// gating/overflow monitors are this design's choices.
module sta_dbb_top
  import sta_pkg::*;
#(
  parameter int unsigned A   = DEF_A,
  parameter int unsigned B   = DEF_B,
  parameter int unsigned C   = DEF_C,
  parameter int unsigned NNZ = DEF_NNZ,
  parameter int unsigned M   = DEF_M,
  parameter int unsigned N   = DEF_N,
  parameter int unsigned KW  = 16,
  localparam int unsigned IW  = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned NPH = B / NNZ,
  localparam int unsigned PW  = (NPH > 1) ? $clog2(NPH) : 1,
  localparam int unsigned RW  = (A*M > 1) ? $clog2(A*M) : 1,
  localparam int unsigned GW  = $clog2(M*N*(A*B+C*NNZ)+1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // tile control
  input  logic              start_i,
  input  mode_e             mode_i,
  input  logic [KW-1:0]     nbeats_i,
  output logic              busy_o,
  output logic              done_o,
  // input beats
  input  logic              in_valid_i,
  output logic              in_ready_o,
  input  op_t               act_i  [M][A][B],
  input  logic [B*OP_W-1:0] wblk_i [N][C],
  // result rows
  output logic              out_valid_o,
  output logic [RW-1:0]     out_row_o,
  output acc_t              out_o  [N][C],
  // monitors
  output logic              dbb_overflow_o,  // an issued block broke the NNZ bound
  output logic [GW-1:0]     gated_o          // operand lanes held by zero gating
);

  typedef struct packed {
    logic                               v;
    logic [A-1:0][B-1:0]                nz;
    logic [A-1:0][B-1:0][OP_W-1:0]      d;
  } act_beat_t;

  typedef struct packed {
    logic                               v;
    logic [C-1:0][NNZ-1:0]              nz;
    logic [C-1:0][NNZ-1:0][IW-1:0]      idx;
    logic [C-1:0][NNZ-1:0][OP_W-1:0]    d;
  } w_beat_t;

  logic          beat_v;
  logic          shift;
  mode_e         mode;
  logic [PW-1:0] phase;

  sta_ctrl #(.A(A), .M(M), .N(N), .NPH(NPH), .KW(KW)) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .start_i     (start_i),
    .mode_i      (mode_i),
    .nbeats_i    (nbeats_i),
    .busy_o      (busy_o),
    .in_valid_i  (in_valid_i),
    .in_ready_o  (in_ready_o),
    .beat_v_o    (beat_v),
    .mode_o      (mode),
    .phase_o     (phase),
    .shift_o     (shift),
    .out_valid_o (out_valid_o),
    .out_row_o   (out_row_o),
    .done_o      (done_o)
  );

  // ---- weight decoding -------------------------------------------------
  op_t           dec_w   [N][C][NNZ];
  logic          dec_nz  [N][C][NNZ];
  logic [IW-1:0] dec_idx [N][C][NNZ];
  logic          dec_ovf [N][C];

  for (genvar n = 0; n < N; n++) begin : g_dec_n
    for (genvar c = 0; c < C; c++) begin : g_dec_c
      dbb_decoder #(.B(B), .NNZ(NNZ)) u_dec (
        .blk_i      (wblk_i[n][c]),
        .mode_i     (mode),
        .phase_i    (phase),
        .w_o        (dec_w[n][c]),
        .nz_o       (dec_nz[n][c]),
        .idx_o      (dec_idx[n][c]),
        .overflow_o (dec_ovf[n][c])
      );
    end
  end

  always_comb begin
    dbb_overflow_o = 1'b0;
    for (int n = 0; n < N; n++)
      for (int c = 0; c < C; c++)
        if (beat_v && dec_ovf[n][c]) dbb_overflow_o = 1'b1;
  end

  // ---- edge beats and skew ---------------------------------------------
  act_beat_t act_beat [M];
  act_beat_t act_skew [M];
  w_beat_t   w_beat   [N];
  w_beat_t   w_skew   [N];

  always_comb begin
    for (int m = 0; m < M; m++) begin
      act_beat[m].v = beat_v;
      for (int a = 0; a < A; a++)
        for (int b = 0; b < B; b++) begin
          act_beat[m].d[a][b]  = beat_v ? act_i[m][a][b] : '0;
          act_beat[m].nz[a][b] = beat_v && (act_i[m][a][b] != '0);
        end
    end
    for (int n = 0; n < N; n++) begin
      w_beat[n].v = beat_v;
      for (int c = 0; c < C; c++)
        for (int j = 0; j < NNZ; j++) begin
          w_beat[n].d[c][j]   = beat_v ? dec_w[n][c][j] : '0;
          w_beat[n].nz[c][j]  = beat_v && dec_nz[n][c][j];
          w_beat[n].idx[c][j] = dec_idx[n][c][j];
        end
    end
  end

  for (genvar m = 0; m < M; m++) begin : g_skew_row
    skew_buffer #(.T(act_beat_t), .DEPTH(m)) u_skew (
      .clk (clk), .rst_n (rst_n), .d_i (act_beat[m]), .q_o (act_skew[m])
    );
  end
  for (genvar n = 0; n < N; n++) begin : g_skew_col
    skew_buffer #(.T(w_beat_t), .DEPTH(n)) u_skew (
      .clk (clk), .rst_n (rst_n), .d_i (w_beat[n]), .q_o (w_skew[n])
    );
  end

  // ---- array -------------------------------------------------------------
  op_t           arr_act   [M][A][B];
  logic          arr_actnz [M][A][B];
  logic          arr_actv  [M];
  op_t           arr_w     [N][C][NNZ];
  logic          arr_wnz   [N][C][NNZ];
  logic [IW-1:0] arr_idx   [N][C][NNZ];
  logic          arr_wv    [N];

  always_comb begin
    for (int m = 0; m < M; m++) begin
      arr_actv[m] = act_skew[m].v;
      for (int a = 0; a < A; a++)
        for (int b = 0; b < B; b++) begin
          arr_act[m][a][b]   = op_t'(act_skew[m].d[a][b]);
          arr_actnz[m][a][b] = act_skew[m].nz[a][b];
        end
    end
    for (int n = 0; n < N; n++) begin
      arr_wv[n] = w_skew[n].v;
      for (int c = 0; c < C; c++)
        for (int j = 0; j < NNZ; j++) begin
          arr_w[n][c][j]   = op_t'(w_skew[n].d[c][j]);
          arr_wnz[n][c][j] = w_skew[n].nz[c][j];
          arr_idx[n][c][j] = w_skew[n].idx[c][j];
        end
    end
  end

  sta_array #(.A(A), .B(B), .C(C), .NNZ(NNZ), .M(M), .N(N)) u_array (
    .clk      (clk),
    .rst_n    (rst_n),
    .act_i    (arr_act),
    .act_nz_i (arr_actnz),
    .act_v_i  (arr_actv),
    .w_i      (arr_w),
    .w_nz_i   (arr_wnz),
    .idx_i    (arr_idx),
    .w_v_i    (arr_wv),
    .shift_i  (shift),
    .acc_o    (out_o),
    .gated_o  (gated_o)
  );

endmodule
