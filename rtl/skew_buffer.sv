// skew_buffer: fixed delay line that staggers the operands at the array
// edge.
//
// In the systolic array the beat for PE row m (or column n) must enter m
// (or n) cycles after the beat for row 0, so that activation and weight
// beats that belong together meet in every PE while moving one PE per
// clock. One instance per row / column delays its operand bundle by DEPTH
// register stages; DEPTH = 0 is a plain wire. Registers reset to zero, so
// a reset buffer emits invalid, all-zero beats.
//
// The staggering is the data-flow schedule of the paper's example; using
// shift registers to produce it is this design's choice.
module skew_buffer #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  T     d_i,
  output T     q_o
);

  if (DEPTH == 0) begin : g_wire
    assign q_o = d_i;
  end else begin : g_delay
    T stage [DEPTH];
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int i = 0; i < DEPTH; i++) stage[i] <= '0;
      end else begin
        stage[0] <= d_i;
        for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
      end
    end
    assign q_o = stage[DEPTH-1];
  end

endmodule
