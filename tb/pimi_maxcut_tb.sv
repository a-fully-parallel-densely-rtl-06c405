// pimi_maxcut_tb: the kernel in its fully unrolled Max-Cut configuration
// (all 16 local fields per cycle, all 16 spins updated per cycle, one
// trial, 4-bit data with 2 fractional bits) runs Max-Cut trials on random
// unweighted graphs of 16 nodes with edge probability 0.5.
//
// Couplings are J_ij = -A_ij scaled to one least-significant bit (-0.25)
// by the host, h = 0. Each trial runs 100 N = 1600 update steps with
// beta(t) = beta_scale * tanh(beta_init + dbeta * t), eta(t) =
// sqrt(beta(t) / 5) and xi = 0.7 (0.5 after truncation to the 4-bit grid).
// Every state of the trajectory is compared with the bit-level model, the
// cycles per update step with log2(N) + 6, and the best cut seen is
// compared with the maximum cut found by exhaustive search (reported; the
// run is stochastic, so missing the optimum is not counted as a failure).
module pimi_maxcut_tb;
  import pimi_pkg::*;
  import pimi_ref_pkg::*;
  localparam int W = 4, F = 2, N = 16, L = 4, T = 100 * N, T_MAX = 100 * N;
  localparam int P = 1 + ($clog2(N) + 2) + 1 + 2;
  localparam int AW = idx_w(T_MAX * N + 1);
  localparam int GRAPHS = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ld_valid;
  ld_sel_e ld_sel;
  logic [AW-1:0] ld_addr;
  logic signed [W-1:0] ld_data, cfg_xi;
  logic [N-1:0] ld_spins, rd_spins;
  logic start, busy, done;
  logic ld_bank = 1'b0, cfg_bank = 1'b0, rd_bank = 1'b0;   // single bank used
  logic [$clog2(T_MAX+1)-1:0] cfg_steps;
  logic [0:0] rd_trial, traj_trial, traj_blk;
  logic traj_valid;
  logic [idx_w(T_MAX)-1:0] traj_t;
  logic [N-1:0] traj_spins;

  pimi_kernel #(.W(W), .F(F), .N(N), .M(1), .G(1), .RL(N), .AL(N), .T_MAX(T_MAX), .L(L))
    dut (.*);

  jmat_t J;
  vec_t h;
  spins_t s;
  logic [N-1:0] hw_traj [T];
  int busy_cycles = 0, successes = 0;
  always @(posedge clk) begin
    if (rst_n && busy) busy_cycles++;
    if (rst_n && traj_valid) hw_traj[traj_t] = traj_spins;
  end

  initial begin
    repeat (200000) @(posedge clk);
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

  function automatic int cut_of(input logic [N-1:0] v);
    int c = 0;
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++)
        if (J[i][j] != 0 && v[i] != v[j]) c++;
    return c;
  endfunction

  initial begin
    longint bt [T], et [T];
    vec_t nz [T];
    ld_valid = 0; ld_sel = LD_J; ld_addr = 0; ld_data = 0; ld_spins = 0;
    start = 0; cfg_steps = 0; cfg_xi = 0; rd_trial = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // schedule and noise are shared by all graphs (pre-loaded once)
    for (int t = 0; t < T; t++) begin
      real b;
      b = 1.5 * $tanh(0.1 + 0.004 * real'(t));
      bt[t] = to_q(b, W, F);
      et[t] = to_q($sqrt(b / 5.0), W, F);
      load(LD_BETA, t, bt[t], '0);
      load(LD_ETA, t, et[t], '0);
      for (int i = 0; i < N; i++) begin
        nz[t][i] = to_q(gauss(), W, F);
        load(LD_NOISE, t * N + i, nz[t][i], '0);
      end
    end
    for (int gph = 0; gph < GRAPHS; gph++) begin
      int best_cut = 0, max_cut = 0, bad = 0;
      logic [N-1:0] v0;
      foreach (J[i, j]) J[i][j] = 0;
      for (int i = 0; i < N; i++) begin
        h[i] = 0;
        for (int j = i + 1; j < N; j++) begin
          J[i][j] = $urandom_range(0, 1) ? -1 : 0;
          J[j][i] = J[i][j];
        end
      end
      for (int i = 0; i < N; i++) begin
        for (int j = 0; j < N; j++) load(LD_J, i * N + j, J[i][j], '0);
        load(LD_H, i, 0, '0);
      end
      v0 = N'($urandom);
      for (int i = 0; i < N; i++) s[0][i] = v0[i];
      load(LD_SPIN, 0, 0, v0);
      busy_cycles = 0;
      @(negedge clk); start = 1; cfg_steps = T; cfg_xi = to_q(0.7, W, F);
      @(negedge clk); start = 0;
      wait (done);
      @(negedge clk);
      checks++;
      if (busy_cycles != T * P) begin
        failures++;
        $display("graph %0d: %0d cycles, expected %0d", gph, busy_cycles, T * P);
      end
      for (int t = 0; t < T; t++) begin
        logic [N-1:0] v;
        pimi_step(J, h, s, nz[t], bt[t], et[t], to_q(0.7, W, F), N, 1, W, F, L);
        for (int i = 0; i < N; i++) v[i] = s[0][i];
        checks++;
        if (hw_traj[t] != v) bad++;
        if (cut_of(hw_traj[t]) > best_cut) best_cut = cut_of(hw_traj[t]);
      end
      checks++;
      if (rd_spins != hw_traj[T-1]) bad++;
      failures += bad;
      for (int x = 0; x < (1 << (N - 1)); x++)
        if (cut_of(N'(x)) > max_cut) max_cut = cut_of(N'(x));
      if (best_cut == max_cut) successes++;
      $display("graph %0d: best cut on trajectory %0d, maximum cut %0d, %0d cycles per step, mismatches %0d",
               gph, best_cut, max_cut, busy_cycles / T, bad);
    end
    $display("trials reaching the maximum cut: %0d of %0d", successes, GRAPHS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
