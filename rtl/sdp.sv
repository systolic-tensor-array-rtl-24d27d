// sdp: sparse dot-product unit (SDP_B) with its stationary accumulator.
//
// One unit computes one output element of the GEMM. Each cycle it takes a
// vector of B activations and the up-to-NNZ non-zero weights of one DBB
// block, each with the position (0..B-1) it holds inside the block. For
// every weight a B:1 multiplexer picks the activation at that position,
// so only NNZ multipliers are needed for a B-long dot product. The NNZ
// products and the current accumulator value are summed and, when
// acc_en_i is high, written back into the INT32 accumulator.
//
// A second multiplexer in front of the accumulator selects the value of
// the unit above (acc_i) instead when shift_i is high; chained through a
// column of units this forms the shift chain that reads the results out at
// the bottom of the array. shift_i wins over acc_en_i.
//
// Follows the paper: index-steered activation muxes, NNZ multipliers, one
// adder with accumulator feedback, accumulate/shift mux, ACC register.
// Own choices: signed INT8 x signed INT8, wrap-around INT32 sum, synchronous
// active-low reset to zero. With NNZ == B the multiplexers are dropped and
// the unit is the dense DP_B of the plain systolic tensor array (indices
// are then ignored).
//
// Timing: one accumulate or one shift per clock; acc_o is the register.
module sdp
  import sta_pkg::*;
#(
  parameter int unsigned B   = DEF_B,
  parameter int unsigned NNZ = DEF_NNZ,
  localparam int unsigned IW = (B > 1) ? $clog2(B) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  op_t                act_i [B],    // activation vector (one DBB block span)
  input  op_t                w_i   [NNZ],  // non-zero weights
  input  logic [IW-1:0]      idx_i [NNZ],  // position of each weight in the block
  input  logic               acc_en_i,     // accumulate this cycle's dot product
  input  logic               shift_i,      // load acc_i (readout shift)
  input  acc_t               acc_i,        // accumulator of the unit above
  output acc_t               acc_o
);

  op_t  sel_act [NNZ];
  acc_t sum;

  // Activation selection: B:1 mux per physical multiplier
  if (NNZ == B) begin : g_dense
    for (genvar j = 0; j < NNZ; j++) begin : g_sel
      assign sel_act[j] = act_i[j];
    end
  end else begin : g_sparse
    for (genvar j = 0; j < NNZ; j++) begin : g_sel
      assign sel_act[j] = act_i[idx_i[j]];
    end
  end

  // Multipliers and adder tree with accumulator feedback
  always_comb begin
    sum = acc_o;
    for (int j = 0; j < NNZ; j++) begin
      sum = sum + ACC_W'(sel_act[j] * w_i[j]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n)        acc_o <= '0;
    else if (shift_i)  acc_o <= acc_i;
    else if (acc_en_i) acc_o <= sum;
  end

endmodule
