// tb_eval_ctrl: checks the command sequence of the evaluation controller
// against an expected sequence built here (ACT, MAC 0..N-1, UPD per step),
// the evaluation length of steps*(N+2) cycles, the done pulse, that a start
// while busy is ignored, halt at a step boundary and steps = 0.
module tb_eval_ctrl;
  import ctrnn_pkg::*;
  localparam int N = 3;

  logic clk = 0, rst_n = 0;
  logic start = 0, halt = 0;
  logic [31:0] steps = 0, step_cnt, cycle_cnt;
  seq_t seq;
  logic busy, done;
  int checks = 0, failures = 0;

  eval_ctrl #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  // Run an evaluation, compare every cycle's command; optionally halt
  // during step halt_step (1-based). Returns the number of busy cycles.
  task automatic run(int nsteps, int halt_step, int halt_cyc);
    int cyc = 0, exp_steps;
    phase_t ep; int ec;
    exp_steps = (halt_step > 0 && halt_step < nsteps) ? halt_step : nsteps;
    steps = nsteps; start = 1;
    @(posedge clk); #1; start = 0;
    for (int s = 0; s < exp_steps; s++)
      for (int k = 0; k < N + 2; k++) begin
        ep = (k == 0) ? PH_ACT : (k == N + 1) ? PH_UPD : PH_MAC;
        ec = (k >= 1 && k <= N) ? k - 1 : 0;
        chk("phase", longint'(seq.phase), longint'(ep));
        chk("col", longint'(seq.col), longint'(ec));
        chk("busy", busy, 1);
        if (s == 0 && k == 2) begin start = 1; end          // ignored
        if (s + 1 == halt_step && k == halt_cyc) halt = 1;
        @(posedge clk); #1; start = 0; halt = 0; cyc++;
      end
    chk("idle after", longint'(seq.phase), longint'(PH_IDLE));
    chk("done pulse", done, 1);
    chk("cycle_cnt", cycle_cnt, exp_steps * (N + 2));
    chk("step_cnt", step_cnt, exp_steps);
    @(posedge clk); #1;
    chk("done one cycle", done, 0);
    chk("still idle", busy, 0);
  endtask

  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    chk("reset idle", busy, 0);
    run(1, 0, 0);
    run(7, 0, 0);
    run(100, 0, 0);
    run(20, 5, 3);      // halt in the middle of step 5
    run(9, 1, 0);       // halt in the first cycle
    // steps = 0: done at once, never busy
    steps = 0; start = 1; @(posedge clk); #1; start = 0;
    chk("zero steps done", done, 1);
    chk("zero steps idle", busy, 0);
    // halt while idle has no effect on the next run
    halt = 1; @(posedge clk); #1; halt = 0;
    run(4, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
