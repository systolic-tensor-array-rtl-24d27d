// tensor_pe: one tensor processing element of the systolic tensor array.
//
// The PE holds an A x C grid of sparse dot-product units (sdp). Row a of
// the grid receives B activations act_i[a] from the left; column c receives
// the NNZ non-zero weights of one DBB block, w_i[c], with their in-block
// indices idx_i[c], from the top. Unit (a,c) accumulates
// sum_j act[a][idx[c][j]] * w[c][j], so the whole PE performs an
// (A x B) by (B x C) matrix product per cycle into A*C stationary
// accumulators. Operands are reused A times (weights) and C times
// (activations) inside the PE, which is the point of the tensor PE.
//
// Pipeline registers sit only at the PE boundary: the activations leave
// to the right and the weights leave downwards through one register stage
// each, so a beat moves one PE per clock in either direction.
//
// Zero-operand gating: every operand lane carries a non-zero flag (nz).
// The flag register is always loaded, but the data register of a lane is
// only loaded when a valid, non-zero operand arrives (a clock enable, the
// synthesizable form of clock gating); consumers read a lane as zero when
// its flag is clear. This follows the clock-gated baseline the paper
// builds on; the flag encoding is this design's own.
//
// Readout: with shift_i high every accumulator loads the one above; acc_i
// feeds the top row of units, acc_o is the bottom row.
//
// Timing: act_o/w_o are act_i/w_i delayed one clock; accumulators update
// on the clock edge at which a valid beat is present at the inputs.
module tensor_pe
  import sta_pkg::*;
#(
  parameter int unsigned A   = DEF_A,
  parameter int unsigned B   = DEF_B,
  parameter int unsigned C   = DEF_C,
  parameter int unsigned NNZ = DEF_NNZ,
  localparam int unsigned IW = (B > 1) ? $clog2(B) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // activations from the left
  input  op_t           act_i    [A][B],
  input  logic          act_nz_i [A][B],
  input  logic          act_v_i,
  output op_t           act_o    [A][B],
  output logic          act_nz_o [A][B],
  output logic          act_v_o,
  // DBB weights from the top
  input  op_t           w_i      [C][NNZ],
  input  logic          w_nz_i   [C][NNZ],
  input  logic [IW-1:0] idx_i    [C][NNZ],
  input  logic          w_v_i,
  output op_t           w_o      [C][NNZ],
  output logic          w_nz_o   [C][NNZ],
  output logic [IW-1:0] idx_o    [C][NNZ],
  output logic          w_v_o,
  // accumulator shift chain
  input  logic          shift_i,
  input  acc_t          acc_i    [C],
  output acc_t          acc_o    [C],
  // number of operand lanes whose data register was held this cycle
  // because a zero operand arrived (activity monitor)
  output logic [$clog2(A*B+C*NNZ+1)-1:0] gated_o
);

  op_t  act_eff [A][B];
  op_t  w_eff   [C][NNZ];
  acc_t chain   [A+1][C];

  // Zero-flagged lanes read as zero
  always_comb begin
    for (int a = 0; a < A; a++)
      for (int b = 0; b < B; b++)
        act_eff[a][b] = act_nz_i[a][b] ? act_i[a][b] : '0;
    for (int c = 0; c < C; c++)
      for (int j = 0; j < NNZ; j++)
        w_eff[c][j] = w_nz_i[c][j] ? w_i[c][j] : '0;
  end

  // Boundary pipeline registers with zero-operand gating
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      act_v_o <= 1'b0;
      w_v_o   <= 1'b0;
      for (int a = 0; a < A; a++)
        for (int b = 0; b < B; b++) begin
          act_o[a][b]    <= '0;
          act_nz_o[a][b] <= 1'b0;
        end
      for (int c = 0; c < C; c++)
        for (int j = 0; j < NNZ; j++) begin
          w_o[c][j]    <= '0;
          w_nz_o[c][j] <= 1'b0;
          idx_o[c][j]  <= '0;
        end
    end else begin
      act_v_o <= act_v_i;
      w_v_o   <= w_v_i;
      for (int a = 0; a < A; a++)
        for (int b = 0; b < B; b++) begin
          act_nz_o[a][b] <= act_v_i & act_nz_i[a][b];
          if (act_v_i && act_nz_i[a][b]) act_o[a][b] <= act_i[a][b];
        end
      for (int c = 0; c < C; c++)
        for (int j = 0; j < NNZ; j++) begin
          w_nz_o[c][j] <= w_v_i & w_nz_i[c][j];
          if (w_v_i && w_nz_i[c][j]) w_o[c][j] <= w_i[c][j];
          if (w_v_i)                 idx_o[c][j] <= idx_i[c][j];
        end
    end
  end

  always_comb begin
    gated_o = '0;
    for (int a = 0; a < A; a++)
      for (int b = 0; b < B; b++)
        if (act_v_i && !act_nz_i[a][b]) gated_o = gated_o + 1'b1;
    for (int c = 0; c < C; c++)
      for (int j = 0; j < NNZ; j++)
        if (w_v_i && !w_nz_i[c][j]) gated_o = gated_o + 1'b1;
  end

  // A x C grid of sparse dot-product units
  for (genvar c = 0; c < C; c++) begin : g_col
    assign chain[0][c] = acc_i[c];
    assign acc_o[c]    = chain[A][c];
    for (genvar a = 0; a < A; a++) begin : g_row
      sdp #(.B(B), .NNZ(NNZ)) u_sdp (
        .clk      (clk),
        .rst_n    (rst_n),
        .act_i    (act_eff[a]),
        .w_i      (w_eff[c]),
        .idx_i    (idx_i[c]),
        .acc_en_i (act_v_i),
        .shift_i  (shift_i),
        .acc_i    (chain[a][c]),
        .acc_o    (chain[a+1][c])
      );
    end
  end

  // Skewed operands must meet: a valid activation beat always finds the
  // matching weight beat in the same cycle.
  a_beats_meet: assert property (@(posedge clk) disable iff (!rst_n)
                                 act_v_i == w_v_i)
    else $error("tensor_pe: activation and weight beats misaligned");

  // No accumulation may happen while the accumulators are being shifted out
  a_no_acc_in_shift: assert property (@(posedge clk) disable iff (!rst_n)
                                      !(shift_i && act_v_i))
    else $error("tensor_pe: accumulate during readout shift");

endmodule
