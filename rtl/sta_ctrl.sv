// sta_ctrl: sequencer of one output tile of the STA-DBB engine.
//
// A tile is started with start_i, the mode and the number of input beats
// nbeats_i (= K / B, the reduction length in DBB blocks). The controller
// then
//   RUN   accepts nbeats_i input beats over a valid/ready handshake. In
//         sparse mode one beat is accepted per cycle. In dense mode each
//         beat is presented to the array in NPH = B/NNZ phases (two for
//         8-of-4), so in_ready_o is high only in the last phase and the
//         source holds its beat meanwhile: dense GEMM runs at 1/NPH of the
//         sparse rate. A cycle with in_valid_i low is a bubble: nothing is
//         issued and the skewed pipeline simply carries an empty beat.
//   DRAIN waits M+N-2 cycles until the last beat has reached PE (M-1,N-1).
//   SHIFT raises shift_o for A*M cycles; during each of them the bottom of
//         the array shows output row out_row_o (last row first) and
//         out_valid_o is high. The shift leaves zeros behind, which clears
//         the accumulators for the next tile.
// done_o pulses in the cycle after the last shift.
//
// The readout through shift chains after the computation, and dense mode
// at half throughput, follow the paper; the handshake, the phase
// sequencing and the state encoding are this design's choices.
module sta_ctrl
  import sta_pkg::*;
#(
  parameter int unsigned A   = DEF_A,
  parameter int unsigned M   = DEF_M,
  parameter int unsigned N   = DEF_N,
  parameter int unsigned NPH = DEF_B / DEF_NNZ,  // dense-mode phases per beat
  parameter int unsigned KW  = 16,               // width of the beat count
  localparam int unsigned PW = (NPH > 1) ? $clog2(NPH) : 1,
  localparam int unsigned RW = (A*M > 1) ? $clog2(A*M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start_i,
  input  mode_e         mode_i,
  input  logic [KW-1:0] nbeats_i,
  output logic          busy_o,
  // input beat handshake
  input  logic          in_valid_i,
  output logic          in_ready_o,
  // array control
  output logic          beat_v_o,     // issue the current beat to the array
  output mode_e         mode_o,       // mode of the running tile
  output logic [PW-1:0] phase_o,      // dense-mode phase of the issued beat
  output logic          shift_o,
  // result stream
  output logic          out_valid_o,
  output logic [RW-1:0] out_row_o,
  output logic          done_o
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_SHIFT} state_e;

  localparam int unsigned DRAIN = M + N - 2;
  localparam int unsigned CW    = (KW > RW + 1) ? KW : RW + 1;

  state_e        state;
  mode_e         mode_q;
  logic [KW-1:0] nbeats_q;
  logic [KW-1:0] beat_cnt;
  logic [CW-1:0] cnt;
  logic [PW-1:0] phase;
  logic          last_phase;
  logic          accept;

  assign last_phase = (mode_q == MODE_SPARSE) || (phase == PW'(NPH-1));
  assign in_ready_o = (state == S_RUN) && last_phase;
  assign accept     = in_valid_i && in_ready_o;
  assign beat_v_o   = (state == S_RUN) && in_valid_i;
  assign phase_o    = (mode_q == MODE_DENSE) ? phase : '0;
  assign mode_o     = mode_q;
  assign shift_o    = (state == S_SHIFT);
  assign out_valid_o = (state == S_SHIFT);
  assign out_row_o  = RW'(A*M - 1) - RW'(cnt);
  assign busy_o     = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      mode_q   <= MODE_SPARSE;
      nbeats_q <= '0;
      beat_cnt <= '0;
      cnt      <= '0;
      phase    <= '0;
      done_o   <= 1'b0;
    end else begin
      done_o <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start_i) begin
            mode_q   <= mode_i;
            nbeats_q <= nbeats_i;
            beat_cnt <= '0;
            phase    <= '0;
            cnt      <= '0;
            if (nbeats_i != '0)     state <= S_RUN;
            else if (DRAIN != 0)    state <= S_DRAIN;
            else                    state <= S_SHIFT;
          end
        end
        S_RUN: begin
          if (in_valid_i && mode_q == MODE_DENSE)
            phase <= last_phase ? '0 : phase + 1'b1;
          if (accept) begin
            beat_cnt <= beat_cnt + 1'b1;
            if (beat_cnt == nbeats_q - 1'b1) begin
              cnt   <= '0;
              state <= (DRAIN != 0) ? S_DRAIN : S_SHIFT;
            end
          end
        end
        S_DRAIN: begin
          if (cnt == CW'(DRAIN - 1)) begin
            cnt   <= '0;
            state <= S_SHIFT;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_SHIFT: begin
          if (cnt == CW'(A*M - 1)) begin
            cnt    <= '0;
            state  <= S_IDLE;
            done_o <= 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Handshake rule: a beat offered to the engine stays until it is taken
  a_hold_valid: assert property (@(posedge clk) disable iff (!rst_n)
                                 in_valid_i && !in_ready_o && state == S_RUN |=> in_valid_i)
    else $error("sta_ctrl: in_valid dropped before the beat was accepted");

endmodule
