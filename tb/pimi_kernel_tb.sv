// pimi_kernel_tb: one kernel at its default size (32 spins, 32 trials in
// groups of 4, 16-bit data, 4-level tanh) solves three random dense
// instances of 32 update steps each, back to back, in continuous mode.
//
// The schedule and noise are loaded once. Instance 1 is loaded into bank 0
// and started; while it runs, instance 2 is loaded into bank 1. Instance 2
// starts in the cycle after instance 1 reports done, and while it runs the
// results of instance 1 are read out of bank 0 and instance 3 is loaded
// into bank 0. The testbench checks that loads made during a run are
// accepted, that the kernel idles for a single cycle between runs, and
// that reading one bank does not disturb the run in the other.
//
// The schedule is the one used for MIMO detection: beta(t) = 1, eta(t) =
// sqrt(1 / (5 gamma(t))) with gamma rising linearly, xi = 2. Every block of
// spins on the trajectory stream and every final spin vector is compared
// with the bit-level model of pimi_ref_pkg; the run time is checked against
// steps * P with P = M*N + (log2 N + 2) + M*N/4 + 2 cycles. The testbench
// also counts how often the mechanisms of the update rule occur: field
// saturation, spins held by the inertia term against their field, and
// flips, and fails if any never occurs. Bank handling and the sequence
// above are this testbench's; the update rule and sizes follow the paper.
module pimi_kernel_tb;
  import pimi_pkg::*;
  import pimi_ref_pkg::*;
  localparam int W = 16, F = 12, N = 32, M = 32, L = 4, T = 32, AL = 4, T_MAX = 64;
  localparam int P = M * N + ($clog2(N) + 2) + M * N / AL + 2;
  localparam int AW = 12;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_valid;
  ld_sel_e ld_sel;
  logic [AW-1:0] ld_addr;
  logic signed [W-1:0] ld_data, cfg_xi;
  logic [N-1:0] ld_spins, rd_spins;
  logic start, busy, done;
  logic ld_bank, cfg_bank, rd_bank;
  logic [6:0] cfg_steps;
  logic [4:0] rd_trial, traj_trial;
  logic traj_valid;
  logic [5:0] traj_t;
  logic [2:0] traj_blk;
  logic [AL-1:0] traj_spins;

  pimi_kernel dut (.*);

  jmat_t J [2];
  vec_t h [2];
  spins_t s [2];
  longint beta_t [T], eta_t [T];
  vec_t noise_t [T];
  bit hw_traj [2][T][M][N];
  int cyc = 0, busy_cycles = 0, idle_gap = 0;
  int n_sat = 0, n_hold = 0, n_flip = 0, n_busy_loads = 0;
  logic traj_bank;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && busy) busy_cycles++;
    if (rst_n && !busy) idle_gap++;
    if (rst_n && start && !busy) traj_bank <= cfg_bank;
    if (rst_n && ld_valid && busy) n_busy_loads++;
    if (rst_n && traj_valid)
      for (int k = 0; k < AL; k++)
        hw_traj[traj_bank][traj_t][traj_trial][traj_blk * AL + k] = traj_spins[k];
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input ld_sel_e sel, input int addr, input longint data, input logic [N-1:0] sp);
    @(negedge clk);
    ld_valid = 1; ld_sel = sel; ld_addr = AW'(addr); ld_data = W'(data); ld_spins = sp;
    @(negedge clk);
    ld_valid = 0;
  endtask

  task automatic make_schedule();
    for (int t = 0; t < T; t++) begin
      automatic real gamma;
      gamma = 0.5 + (10.0 - 0.5) * real'(t) / real'(T - 1);
      beta_t[t] = 4096;
      eta_t[t]  = to_q($sqrt(1.0 / (5.0 * gamma)), W, F);
      for (int i = 0; i < N; i++) noise_t[t][i] = to_q(gauss(), W, F);
    end
  endtask

  task automatic load_schedule();
    for (int t = 0; t < T; t++) begin
      load(LD_BETA, t, beta_t[t], '0);
      load(LD_ETA, t, eta_t[t], '0);
      for (int i = 0; i < N; i++) load(LD_NOISE, t * N + i, noise_t[t][i], '0);
    end
  endtask

  task automatic make_instance(input int b, input int seed_scale);
    foreach (J[b][i, j]) J[b][i][j] = 0;
    for (int i = 0; i < N; i++) begin
      h[b][i] = longint'($urandom_range(0, 8191)) - 4096;
      for (int j = i + 1; j < N; j++) begin
        J[b][i][j] = longint'($urandom_range(0, 2 * seed_scale)) - seed_scale;
        J[b][j][i] = J[b][i][j];
      end
    end
    for (int a = 0; a < M; a++) for (int i = 0; i < N; i++) s[b][a][i] = 1'($urandom);
  endtask

  task automatic load_instance(input int b);
    ld_bank = 1'(b);
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) load(LD_J, i * N + j, J[b][i][j], '0);
      load(LD_H, i, h[b][i], '0);
    end
    for (int a = 0; a < M; a++) begin
      logic [N-1:0] v;
      for (int i = 0; i < N; i++) v[i] = s[b][a][i];
      load(LD_SPIN, a, 0, v);
    end
  endtask

  // start a run on bank b in the current cycle (called at a negedge)
  task automatic start_run(input int b);
    start = 1; cfg_steps = 7'(T); cfg_xi = 16'sd8192; cfg_bank = 1'(b);
    @(negedge clk); start = 0;
  endtask

  // wait for done, check the run time and the idle gap before the next run
  task automatic wait_done(input string name);
    wait (done);
    @(negedge clk);
    checks++;
    if (busy_cycles != T * P) begin
      failures++;
      $display("%s: busy %0d cycles, expected %0d", name, busy_cycles, T * P);
    end
    $display("%s: %0d cycles for %0d steps (%0d per step)", name, busy_cycles, T, busy_cycles / T);
    busy_cycles = 0;
    idle_gap = 0;
  endtask

  // model the run on bank b and compare trajectory and final spins
  task automatic check_run(input int b, input string name);
    int bad_traj = 0, bad_final = 0;
    for (int t = 0; t < T; t++) begin
      spins_t prev;
      prev = s[b];
      for (int a = 0; a < M; a++)
        for (int i = 0; i < N; i++) begin
          longint f, th;
          longint acc = h[b][i];
          for (int j = 0; j < N; j++) acc += s[b][a][j] ? J[b][i][j] : -J[b][i][j];
          if (sat(acc, W) != acc) n_sat++;
          f  = sat(acc, W);
          th = tanh_q(mul(beta_t[t], f, W, F), F, L);
          if ((th > 0) != s[b][a][i] && th != 0 &&
              update(f, s[b][a][i], noise_t[t][i], beta_t[t], eta_t[t], 8192, W, F, L) == s[b][a][i])
            n_hold++;
        end
      pimi_step(J[b], h[b], s[b], noise_t[t], beta_t[t], eta_t[t], 8192, N, M, W, F, L);
      for (int a = 0; a < M; a++)
        for (int i = 0; i < N; i++) begin
          if (prev[a][i] != s[b][a][i]) n_flip++;
          checks++;
          if (hw_traj[b][t][a][i] != s[b][a][i]) bad_traj++;
        end
    end
    rd_bank = 1'(b);
    for (int a = 0; a < M; a++) begin
      @(negedge clk); rd_trial = 5'(a); #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (rd_spins[i] != s[b][a][i]) bad_final++;
      end
    end
    failures += bad_traj + bad_final;
    $display("%s: trajectory mismatches %0d, final mismatches %0d, best energy %0d",
             name, bad_traj, bad_final, best_energy(b));
  endtask

  function automatic longint best_energy(input int b);
    longint e = energy(J[b], h[b], s[b], 0, N);
    for (int a = 1; a < M; a++) if (energy(J[b], h[b], s[b], a, N) < e) e = energy(J[b], h[b], s[b], a, N);
    return e;
  endfunction

  initial begin
    ld_valid = 0; ld_sel = LD_J; ld_addr = 0; ld_data = 0; ld_spins = 0; ld_bank = 0;
    start = 0; cfg_steps = 0; cfg_xi = 0; cfg_bank = 0; rd_bank = 0; rd_trial = 0;
    traj_bank = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    make_schedule();
    load_schedule();
    make_instance(0, 4096);
    load_instance(0);
    @(negedge clk);
    start_run(0);
    make_instance(1, 1024);
    load_instance(1);                      // while instance 1 runs
    checks++;
    if (!busy) begin
      failures++;
      $display("instance 2 was not loaded during the run of instance 1");
    end
    wait_done("instance 1");
    start_run(1);                          // next cycle after done
    checks++;
    if (idle_gap != 1) begin
      failures++;
      $display("idle cycles between runs: %0d, expected 1", idle_gap);
    end
    check_run(0, "instance 1");            // read out bank 0 during run 2
    make_instance(0, 2048);
    load_instance(0);                      // instance 3, during run 2
    wait_done("instance 2");
    start_run(0);
    check_run(1, "instance 2");
    wait_done("instance 3");
    check_run(0, "instance 3");
    $display("loads accepted while busy %0d, mechanisms: field saturations %0d, inertia holds %0d, flips %0d",
             n_busy_loads, n_sat, n_hold, n_flip);
    checks += 4;
    if (n_busy_loads < 2 * (N * N + N + M)) failures++;
    if (n_sat == 0) failures++;
    if (n_hold == 0) failures++;
    if (n_flip == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
