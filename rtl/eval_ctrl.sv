// eval_ctrl: evaluation controller. It starts an evaluation on a start
// pulse, runs `steps` forward-Euler steps over all PEs in lock-step and
// reports completion, which the host can poll.
//
// Each step is the command sequence PH_ACT, PH_MAC with col = 0..N-1, PH_UPD
// (N + 2 cycles) on the seq output, registered. `busy` is high from the cycle
// after start until the last PH_UPD; `done` pulses for one cycle right after
// it. A halt (abort) pulse ends the evaluation after the PH_UPD of the step in
// progress, so the states left behind always hold a whole number of steps.
// A start while busy is ignored; a start with steps = 0 gives done at once.
// cycle_cnt counts the busy cycles of the current or last evaluation and
// step_cnt the completed steps.
// The start/terminate handshake and polling follow the description; halt
// at a step boundary and the counters are this implementation's choices.
module eval_ctrl
  import ctrnn_pkg::*;
#(
  parameter int N = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        halt,
  input  logic [31:0] steps,
  output seq_t        seq,
  output logic        busy,
  output logic        done,
  output logic [31:0] step_cnt,
  output logic [31:0] cycle_cnt
);
  logic [31:0] steps_q;
  logic        halt_q;

  assign busy = (seq.phase != PH_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq       <= '{phase: PH_IDLE, col: '0};
      done      <= 1'b0;
      step_cnt  <= '0;
      cycle_cnt <= '0;
      steps_q   <= '0;
      halt_q   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (busy) begin
        cycle_cnt <= cycle_cnt + 1;
        if (halt) halt_q <= 1'b1;
      end
      unique case (seq.phase)
        PH_IDLE: begin
          if (start) begin
            step_cnt  <= '0;
            cycle_cnt <= '0;
            steps_q   <= steps;
            halt_q   <= 1'b0;
            if (steps == 0) done <= 1'b1;
            else            seq  <= '{phase: PH_ACT, col: '0};
          end
        end
        PH_ACT: seq <= '{phase: PH_MAC, col: '0};
        PH_MAC: begin
          if (seq.col == COL_W'(N - 1)) seq <= '{phase: PH_UPD, col: '0};
          else                          seq.col <= seq.col + 1'b1;
        end
        PH_UPD: begin
          step_cnt <= step_cnt + 1;
          if (halt || halt_q || step_cnt + 1 == steps_q) begin
            seq  <= '{phase: PH_IDLE, col: '0};
            done <= 1'b1;
          end else begin
            seq  <= '{phase: PH_ACT, col: '0};
          end
        end
      endcase
    end
  end

  // The column index never leaves 0..N-1 and done never overlaps busy.
  a_col_range: assert property (@(posedge clk) disable iff (!rst_n)
                                seq.phase == PH_MAC |-> seq.col < COL_W'(N));
  a_done_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                done |-> !busy);
endmodule
