// pimi_accel_tb: the whole accelerator at its default size (10 kernels of
// 32 spins, 32 trials, 16-bit data) solves 14 random dense instances of 32
// update steps, dispatched the way a host would: one worker per kernel
// takes the next instance number from a shared counter, loads the kernel,
// starts it, waits for done and reads the 32 final spin vectors back.
//
// Each final vector is compared with the bit-level model of pimi_ref_pkg,
// and each run time with steps * P. The testbench counts the events the
// design is built around and fails if one never happens: several kernels
// running at once, a kernel taking a second instance, the inertia term
// holding a spin against its field, a field saturating, a spin flipping,
// the trajectory stream carrying a block, and a kernel running an
// instance from its second bank (successive instances on one kernel
// alternate banks; loading during a run is covered by pimi_kernel_tb).
module pimi_accel_tb;
  import pimi_pkg::*;
  import pimi_ref_pkg::*;
  localparam int K = DEF_K, W = DEF_W, F = DEF_F, N = DEF_N, M = DEF_M, L = DEF_L;
  localparam int AL = DEF_AL, T = 32, B = 14, AW = 12;
  localparam int P = M * N + ($clog2(N) + 2) + M * N / AL + 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [K-1:0] ld_valid, start, busy, done, traj_valid;
  logic [K-1:0] ld_bank, cfg_bank, rd_bank;
  ld_sel_e ld_sel [K];
  logic [AW-1:0] ld_addr [K];
  logic signed [W-1:0] ld_data [K], cfg_xi [K];
  logic [N-1:0] ld_spins [K], rd_spins [K];
  logic [6:0] cfg_steps [K];
  logic all_idle;
  logic [4:0] rd_trial [K], traj_trial [K];
  logic [5:0] traj_t [K];
  logic [2:0] traj_blk [K];
  logic [AL-1:0] traj_spins [K];

  pimi_accel dut (.*);

  int next_batch = 0, completed = 0;
  int max_parallel = 0, reused = 0, traj_blocks = 0;
  int n_sat = 0, n_hold = 0, n_flip = 0, bank1_runs = 0;
  int runs_per_kernel [K];

  // Counted only out of reset: before the first clock edge the registers
  // hold arbitrary values.
  always @(posedge clk) if (rst_n) begin
    if ($countones(busy) > max_parallel) max_parallel = $countones(busy);
    traj_blocks += $countones(traj_valid);
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input int k, input ld_sel_e sel, input int addr, input longint data,
                      input logic [N-1:0] sp);
    @(negedge clk);
    ld_valid[k] = 1; ld_sel[k] = sel; ld_addr[k] = AW'(addr); ld_data[k] = W'(data);
    ld_spins[k] = sp;
    @(negedge clk);
    ld_valid[k] = 0;
  endtask

  // Per-kernel copies of the instance being solved (one per worker).
  jmat_t  Jk  [K];
  vec_t   hk  [K];
  spins_t sk  [K];
  vec_t   nzk [K][T];
  longint btk [K][T], etk [K][T];

  task automatic worker(input int k);
    int b, cycles, bank;
    forever begin
      b = next_batch;
      next_batch++;
      if (b >= B) break;
      if (runs_per_kernel[k] > 0) reused++;
      runs_per_kernel[k]++;
      // a kernel's successive instances alternate between its two banks
      bank = (runs_per_kernel[k] - 1) % 2;
      if (bank == 1) bank1_runs++;
      ld_bank[k] = 1'(bank); cfg_bank[k] = 1'(bank); rd_bank[k] = 1'(bank);
      // build instance b
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) Jk[k][i][j] = 0;
      for (int i = 0; i < N; i++) begin
        hk[k][i] = longint'($urandom_range(0, 8191)) - 4096;
        for (int j = i + 1; j < N; j++) begin
          Jk[k][i][j] = longint'($urandom_range(0, 6144 + 1024 * (b % 4))) - (3072 + 512 * (b % 4));
          Jk[k][j][i] = Jk[k][i][j];
        end
      end
      for (int a = 0; a < M; a++) for (int i = 0; i < N; i++) sk[k][a][i] = 1'($urandom);
      for (int t = 0; t < T; t++) begin
        real gamma;
        gamma = 0.5 + 9.5 * real'(t) / real'(T - 1);
        btk[k][t] = 4096;
        etk[k][t] = to_q($sqrt(1.0 / (5.0 * gamma)), W, F);
        for (int i = 0; i < N; i++) nzk[k][t][i] = to_q(gauss(), W, F);
      end
      // load
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < N; j++) load(k, LD_J, i * N + j, Jk[k][i][j], '0);
        load(k, LD_H, i, hk[k][i], '0);
      end
      for (int a = 0; a < M; a++) begin
        logic [N-1:0] v;
        for (int i = 0; i < N; i++) v[i] = sk[k][a][i];
        load(k, LD_SPIN, a, 0, v);
      end
      for (int t = 0; t < T; t++) begin
        load(k, LD_BETA, t, btk[k][t], '0);
        load(k, LD_ETA, t, etk[k][t], '0);
        for (int i = 0; i < N; i++) load(k, LD_NOISE, t * N + i, nzk[k][t][i], '0);
      end
      // run
      @(negedge clk); start[k] = 1; cfg_steps[k] = 7'(T); cfg_xi[k] = 16'sd8192;
      @(negedge clk); start[k] = 0;
      cycles = 1;
      while (!done[k]) begin @(negedge clk); cycles++; end
      checks++;
      if (cycles != T * P + 1) begin
        failures++;
        $display("kernel %0d instance %0d: %0d cycles, expected %0d", k, b, cycles, T * P + 1);
      end
      // model
      for (int t = 0; t < T; t++) begin
        spins_t prev;
        prev = sk[k];
        for (int a = 0; a < M; a++)
          for (int i = 0; i < N; i++) begin
            longint acc, f, th;
            acc = hk[k][i];
            for (int j = 0; j < N; j++) acc += sk[k][a][j] ? Jk[k][i][j] : -Jk[k][i][j];
            if (sat(acc, W) != acc) n_sat++;
            f  = sat(acc, W);
            th = tanh_q(mul(btk[k][t], f, W, F), F, L);
            if ((th > 0) != sk[k][a][i] &&
                update(f, sk[k][a][i], nzk[k][t][i], btk[k][t], etk[k][t], 8192, W, F, L) == sk[k][a][i]) n_hold++;
          end
        pimi_step(Jk[k], hk[k], sk[k], nzk[k][t], btk[k][t], etk[k][t], 8192, N, M, W, F, L);
        for (int a = 0; a < M; a++) for (int i = 0; i < N; i++) if (prev[a][i] != sk[k][a][i]) n_flip++;
      end
      // read back
      for (int a = 0; a < M; a++) begin
        int bad = 0;
        @(negedge clk); rd_trial[k] = 5'(a); #1;
        for (int i = 0; i < N; i++) if (rd_spins[k][i] != sk[k][a][i]) bad++;
        checks++;
        if (bad != 0) begin
          failures++;
          $display("kernel %0d instance %0d trial %0d: %0d wrong spins", k, b, a, bad);
        end
      end
      completed++;
    end
  endtask

  initial begin
    ld_valid = '0; start = '0; ld_bank = '0; cfg_bank = '0; rd_bank = '0;
    for (int k = 0; k < K; k++) begin
      ld_sel[k] = LD_J; ld_addr[k] = 0; ld_data[k] = 0; ld_spins[k] = 0;
      cfg_steps[k] = 0; cfg_xi[k] = 0; rd_trial[k] = 0; runs_per_kernel[k] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++) begin
      automatic int kk = k;
      fork worker(kk); join_none
    end
    wait (completed == B);
    @(negedge clk);
    checks++;
    if (!all_idle) failures++;
    $display("instances %0d, most kernels busy at once %0d, kernels reused %0d, trajectory blocks %0d",
             completed, max_parallel, reused, traj_blocks);
    $display("field saturations %0d, inertia holds %0d, flips %0d, runs on bank 1 %0d", n_sat, n_hold, n_flip, bank1_runs);
    checks += 7;
    if (max_parallel < 2) failures++;
    if (reused == 0) failures++;
    if (traj_blocks != B * T * M * N / AL) failures++;
    if (n_sat == 0) failures++;
    if (bank1_runs == 0) failures++;
    if (n_hold == 0) failures++;
    if (n_flip == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
