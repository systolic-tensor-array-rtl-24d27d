// tb_sta_ctrl: self-checking test of the tile sequencer (A=4, M=N=2,
// two dense phases). For sparse and dense tiles, with and without input
// bubbles, it checks cycle by cycle: in_ready only in RUN (every cycle in
// sparse mode, every second beat cycle in dense mode), the issued beat and
// its phase, the M+N-2 = 2 drain cycles, the A*M = 8 shift cycles with
// output rows 7..0, the done pulse and the total tile latency.
`timescale 1ns/1ps
module tb_sta_ctrl;
  import sta_pkg::*;

  localparam int unsigned A = 4, M = 2, N = 2, NPH = 2, KW = 16;

  logic clk = 0, rst_n = 0;
  logic start, busy, in_valid, in_ready, beat_v, phase, shift, out_valid, done;
  mode_e mode, mode_run;
  logic [KW-1:0] nbeats;
  logic [2:0] out_row;
  int checks = 0, failures = 0;

  sta_ctrl #(.A(A), .M(M), .N(N), .NPH(NPH), .KW(KW)) dut (
    .clk(clk), .rst_n(rst_n), .start_i(start), .mode_i(mode), .nbeats_i(nbeats),
    .busy_o(busy), .in_valid_i(in_valid), .in_ready_o(in_ready), .beat_v_o(beat_v),
    .mode_o(mode_run), .phase_o(phase), .shift_o(shift), .out_valid_o(out_valid),
    .out_row_o(out_row), .done_o(done));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (t=%0t)", what, got, exp, $time);
    end
  endtask

  // Run one tile; bubble_pct = chance of in_valid low in a RUN cycle
  task automatic run_tile(mode_e md, int nb, int bubble_pct);
    int accepted = 0, cycles = 0, issued = 0, ph = 0;
    bit hold = 0;
    @(negedge clk);
    start = 1; mode = md; nbeats = KW'(nb);
    @(negedge clk);
    start = 0;
    cycles = 1;
    // RUN
    while (accepted < nb) begin
      if (!hold) in_valid = ($urandom_range(0, 99) >= bubble_pct);
      #1;
      expect_eq(busy, 1, "busy in run");
      expect_eq(shift, 0, "no shift in run");
      expect_eq(beat_v, in_valid, "beat issued iff valid");
      expect_eq(in_ready, (md == MODE_SPARSE) || (ph == NPH-1), "in_ready");
      if (in_valid) begin
        expect_eq(phase, (md == MODE_DENSE) ? ph : 0, "phase");
        issued++;
        if (md == MODE_DENSE) ph = (ph + 1) % NPH;
        if (in_ready) accepted++;
      end
      hold = in_valid && !in_ready;
      @(negedge clk);
      cycles++;
    end
    in_valid = 0;
    expect_eq(issued, (md == MODE_DENSE) ? NPH*nb : nb, "array beats per tile");
    // DRAIN
    for (int i = 0; i < M+N-2; i++) begin
      #1;
      expect_eq(shift, 0, "no shift in drain");
      expect_eq(in_ready, 0, "not ready in drain");
      @(negedge clk);
      cycles++;
    end
    // SHIFT
    for (int r = 0; r < A*M; r++) begin
      #1;
      expect_eq(shift, 1, "shift");
      expect_eq(out_valid, 1, "out_valid");
      expect_eq(out_row, A*M-1-r, "out_row");
      @(negedge clk);
      cycles++;
    end
    expect_eq(done, 1, "done pulse");
    expect_eq(shift, 0, "shift ends");
    expect_eq(busy, 0, "idle after tile");
    if (bubble_pct == 0)
      expect_eq(cycles, 1 + ((md == MODE_DENSE) ? NPH : 1)*nb + (M+N-2) + A*M, "tile latency");
    @(negedge clk);
    expect_eq(done, 0, "done is one pulse");
  endtask

  initial begin
    start = 0; in_valid = 0; mode = MODE_SPARSE; nbeats = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_tile(MODE_SPARSE, 5, 0);
    run_tile(MODE_DENSE, 5, 0);
    run_tile(MODE_SPARSE, 1, 0);
    for (int i = 0; i < 20; i++) run_tile(i % 2 ? MODE_DENSE : MODE_SPARSE, $urandom_range(1, 12), 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
