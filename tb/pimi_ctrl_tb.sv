// pimi_ctrl_tb: runs the sequencer for 3 and for 1 update steps and checks,
// cycle by cycle, that MVM issues follow group / row block / trial-in-group
// order, that activation issues follow trial / lane block order, that the
// drain gaps are exactly MVM_LAT and ACT_LAT cycles, that busy lasts
// steps * P cycles, that done pulses once, that start during a run is
// ignored and that a run of 0 steps finishes at once.
module pimi_ctrl_tb;
  import pimi_pkg::*;
  localparam int N = 8, M = 8, G = 4, RL = 1, AL = 4, T_MAX = 8, ML = 5, AL_LAT = 2;
  localparam int P = M * N / RL + ML + M * N / AL + AL_LAT;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  logic [3:0] cfg_steps;
  phase_e phase;
  logic [2:0] t;
  logic mvm_valid, act_valid;
  logic [2:0] mvm_trial, act_trial, mvm_blk;
  logic [0:0] act_blk;

  pimi_ctrl #(.N(N), .M(M), .G(G), .RL(RL), .AL(AL), .T_MAX(T_MAX),
              .MVM_LAT(ML), .ACT_LAT(AL_LAT)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Expected trace of one step, cycle by cycle.
  task automatic expect_step(input int step);
    for (int g = 0; g < M / G; g++)
      for (int b = 0; b < N / RL; b++)
        for (int a = 0; a < G; a++) begin
          @(posedge clk); #1;
          check(mvm_valid && !act_valid && int'(mvm_trial) == g * G + a && int'(mvm_blk) == b
                && int'(t) == step && busy, "mvm order");
        end
    for (int d = 0; d < ML; d++) begin
      @(posedge clk); #1; check(!mvm_valid && !act_valid && busy, "mvm drain");
    end
    for (int a = 0; a < M; a++)
      for (int b = 0; b < N / AL; b++) begin
        @(posedge clk); #1;
        check(act_valid && !mvm_valid && int'(act_trial) == a && int'(act_blk) == b
              && int'(t) == step, "act order");
      end
    for (int d = 0; d < AL_LAT; d++) begin
      @(posedge clk); #1; check(!mvm_valid && !act_valid && busy && !done, "act drain");
    end
  endtask

  int busy_cycles = 0, done_count = 0;
  always @(posedge clk) begin
    if (rst_n && busy) busy_cycles++;
    if (rst_n && done) done_count++;
  end

  initial begin
    start = 0; cfg_steps = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; cfg_steps = 3;
    @(negedge clk); start = 0;
    // the first MVM cycle is the current one
    check(mvm_valid && mvm_trial == 0 && mvm_blk == 0, "first issue");
    for (int a = 1; a < G; a++) begin
      @(posedge clk); #1; check(mvm_valid && int'(mvm_trial) == a, "first group");
    end
    // start while busy must be ignored
    start = 1; @(posedge clk); #1; start = 0;
    check(mvm_valid && int'(mvm_trial) == 0 && mvm_blk == 1, "start ignored");
    for (int k = 0; k < N * M / RL - G - 1; k++) @(posedge clk);
    for (int d = 0; d < ML + M * N / AL + AL_LAT; d++) @(posedge clk);
    expect_step(1);
    expect_step(2);
    @(posedge clk); #1;
    check(done && !busy, "done after last step");
    @(posedge clk); #1;
    check(!done, "done is a pulse");
    check(busy_cycles == 3 * P, "busy cycles = steps * P");
    $display("busy cycles %0d, expected %0d", busy_cycles, 3 * P);
    // a 0-step run finishes at once
    @(negedge clk); start = 1; cfg_steps = 0;
    @(negedge clk); start = 0;
    check(done && !busy, "zero steps");
    // a 1-step run
    busy_cycles = 0;
    @(negedge clk); start = 1; cfg_steps = 1;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    check(busy_cycles == P, "one step = P cycles");
    @(posedge clk); #1;
    check(done_count == 3, "done count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
