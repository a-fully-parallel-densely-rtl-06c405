// pimi_mimo_tb: 8x8 MIMO detection with 16-QAM on one kernel at its default
// size (32 spins, 32 trials, 32 update steps, Q4.12 data), the application
// the kernel's defaults are sized for.
//
// The testbench plays the host. For each channel use it draws an i.i.d.
// Rayleigh channel, 16-QAM symbols (levels -3, -1, 1, 3 per real dimension)
// and complex Gaussian noise whose power follows the chosen Eb/N0. It
// computes the MMSE estimate, slices it to the constellation (x_m), and
// forms the Delta-Ising instance for corrections d = s1 + s2 in {-2, 0, 2}
// per real dimension: A = T^T H^T H T with T = [I, I], J = -offdiag(A),
// h = 2 (y - H x_m)^T H T. These steps follow the published DI-MIMO
// mapping. Own choices of this testbench:
//   - the kernel computes I = J s + h, and the local field of the energy
//     -h^T s - s^T J s is h + 2 J s, so h/2 is loaded with J;
//   - J and h/2 are scaled by one common factor so that the largest entry
//     is 7.5 (the Q4.12 range is [-8, 8)); the scale does not move the
//     minimum;
//   - the noise schedule eta(t) = sqrt(1 / (5 gamma(t))) uses gamma rising
//     linearly from 0.03 to 0.3 (eta from 2.6 down to 0.8), beta = 1 and
//     xi = 2. The published schedule does not give the end points; these
//     were picked from a short sweep (plusargs +g0=, +g1= and +n= for the
//     number of instances per point change them). With much less noise
//     (gamma up to 10) the inertia term freezes the random initial spins
//     and the detector does worse than MMSE;
//   - the schedule and noise tables are loaded once and reused for every
//     instance, as on-board read-only data would be.
// After each run the final spins of all 32 trials are compared bit for bit
// with the reference model, the run time with 32 * P cycles, and the trial
// of lowest energy is decoded (x = x_m + T s, sliced) and its bit errors
// counted with Gray-coded bits. The bit error rates of the MMSE and PIMI
// detectors are printed per Eb/N0 point (15, 20 and 25 dB, 60 channel uses
// each). Pooled over all points, PIMI must make no more bit errors than
// MMSE, and it must find a state of lower objective ||y - H x||^2 than
// the MMSE point at least once; both are counted as checks.
module pimi_mimo_tb;
  import pimi_pkg::*;
  import pimi_ref_pkg::*;
  localparam int W = 16, F = 12, N = 32, M = 32, L = 4, T = 32, AL = 4;
  localparam int NT = 8, D = 2 * NT;           // real dimensions
  localparam int P = M * N + ($clog2(N) + 2) + M * N / AL + 2;
  localparam int AW = 12;
  localparam int INST_PER_SNR = 60;
  real g0 = 0.03, g1 = 0.3;
  int n_inst = INST_PER_SNR;
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
  logic [6:0] cfg_steps;
  logic [4:0] rd_trial, traj_trial;
  logic traj_valid;
  logic [5:0] traj_t;
  logic [2:0] traj_blk;
  logic [AL-1:0] traj_spins;

  pimi_kernel dut (.*);

  int busy_cycles = 0;
  always @(posedge clk) if (rst_n && busy) busy_cycles++;

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // host-side state
  real Hr [D][D];           // real-valued channel, rows = receive dims
  real xr [D], yr [D], xm [D];
  real A [N][N], hv [N];
  jmat_t J;
  vec_t h;
  spins_t s;
  longint beta_t [T], eta_t [T];
  vec_t noise_t [T];

  task automatic load(input ld_sel_e sel, input int addr, input longint data, input logic [N-1:0] sp);
    @(negedge clk);
    ld_valid = 1; ld_sel = sel; ld_addr = AW'(addr); ld_data = W'(data); ld_spins = sp;
    @(negedge clk);
    ld_valid = 0;
  endtask

  function automatic real rabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic real slice16(input real v);
    // nearest of -3, -1, 1, 3
    if (v < -2.0) return -3.0;
    if (v < 0.0) return -1.0;
    if (v < 2.0) return 1.0;
    return 3.0;
  endfunction

  // Gray code per real dimension: -3 -> 00, -1 -> 01, 1 -> 11, 3 -> 10
  function automatic int gray2(input real v);
    if (v < -2.0) return 0;
    if (v < 0.0) return 1;
    if (v < 2.0) return 3;
    return 2;
  endfunction

  function automatic int bit_errors(input real a, input real b);
    return $countones(2'(gray2(a) ^ gray2(b)));
  endfunction

  // ||y - H x||^2 for a real-valued candidate x
  function automatic real objective(input real x [D]);
    real e = 0.0;
    for (int r = 0; r < D; r++) begin
      real v = yr[r];
      for (int c = 0; c < D; c++) v -= Hr[r][c] * x[c];
      e += v * v;
    end
    return e;
  endfunction

  // draw one channel use and build x_m, J and h (fixed point) for the kernel
  task automatic make_instance(input real ebn0_db);
    real Hc_re [NT][NT], Hc_im [NT][NT];
    real ey, sigma2, es_n0, scale, mx;
    real G [D][D + 1];
    ey = 0.0;
    for (int r = 0; r < NT; r++)
      for (int c = 0; c < NT; c++) begin
        Hc_re[r][c] = gauss() / $sqrt(2.0);
        Hc_im[r][c] = gauss() / $sqrt(2.0);
      end
    for (int r = 0; r < NT; r++)
      for (int c = 0; c < NT; c++) begin
        Hr[r][c]           =  Hc_re[r][c];
        Hr[r][c + NT]      = -Hc_im[r][c];
        Hr[r + NT][c]      =  Hc_im[r][c];
        Hr[r + NT][c + NT] =  Hc_re[r][c];
      end
    for (int k = 0; k < D; k++) xr[k] = real'(2 * int'($urandom_range(0, 3)) - 3);
    for (int r = 0; r < D; r++) begin
      yr[r] = 0.0;
      for (int c = 0; c < D; c++) yr[r] += Hr[r][c] * xr[c];
      ey += yr[r] * yr[r];
    end
    ey = ey / real'(NT);                               // per complex antenna
    es_n0 = 4.0 * $pow(10.0, ebn0_db / 10.0);          // b = 4 bits per symbol
    sigma2 = ey / es_n0;
    for (int r = 0; r < D; r++) yr[r] += $sqrt(sigma2 / 2.0) * gauss();
    // MMSE: (H^T H + sigma2 / Es I) x = H^T y, Es = 10 for 16-QAM
    for (int i = 0; i < D; i++) begin
      for (int j = 0; j < D; j++) begin
        G[i][j] = 0.0;
        for (int r = 0; r < D; r++) G[i][j] += Hr[r][i] * Hr[r][j];
      end
      G[i][i] += sigma2 / 10.0;
      G[i][D] = 0.0;
      for (int r = 0; r < D; r++) G[i][D] += Hr[r][i] * yr[r];
    end
    for (int c = 0; c < D; c++) begin                  // Gaussian elimination
      int piv = c;
      for (int r = c + 1; r < D; r++) if (rabs(G[r][c]) > rabs(G[piv][c])) piv = r;
      for (int k = 0; k <= D; k++) begin
        real tmp = G[c][k]; G[c][k] = G[piv][k]; G[piv][k] = tmp;
      end
      for (int r = 0; r < D; r++)
        if (r != c) begin
          real f = G[r][c] / G[c][c];
          for (int k = c; k <= D; k++) G[r][k] -= f * G[c][k];
        end
    end
    for (int k = 0; k < D; k++) xm[k] = slice16(G[k][D] / G[k][k]);
    // Delta-Ising instance, spin i and i + D both belong to dimension i % D
    mx = 0.0;
    for (int i = 0; i < N; i++) begin
      real rv [D];
      for (int r = 0; r < D; r++) begin
        rv[r] = yr[r];
        for (int c = 0; c < D; c++) rv[r] -= Hr[r][c] * xm[c];
      end
      hv[i] = 0.0;
      for (int r = 0; r < D; r++) hv[i] += 2.0 * rv[r] * Hr[r][i % D];
      for (int j = 0; j < N; j++) begin
        A[i][j] = 0.0;
        if (i != j) for (int r = 0; r < D; r++) A[i][j] -= Hr[r][i % D] * Hr[r][j % D];
        if (rabs(A[i][j]) > mx) mx = rabs(A[i][j]);
      end
      if (rabs(hv[i] / 2.0) > mx) mx = rabs(hv[i] / 2.0);
    end
    scale = 7.5 / mx;
    for (int i = 0; i < N; i++) begin
      h[i] = to_q(scale * hv[i] / 2.0, W, F);
      for (int j = 0; j < N; j++) J[i][j] = to_q(scale * A[i][j], W, F);
    end
    for (int a = 0; a < M; a++) for (int i = 0; i < N; i++) s[a][i] = 1'($urandom);
  endtask

  task automatic load_instance();
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) load(LD_J, i * N + j, J[i][j], '0);
      load(LD_H, i, h[i], '0);
    end
    for (int a = 0; a < M; a++) begin
      logic [N-1:0] v;
      for (int i = 0; i < N; i++) v[i] = s[a][i];
      load(LD_SPIN, a, 0, v);
    end
  endtask

  initial begin
    automatic real snr_db [3] = '{15.0, 20.0, 25.0};
    automatic int n_better = 0, n_worse = 0, tot_mmse = 0, tot_pimi = 0;
    ld_valid = 0; ld_sel = LD_J; ld_addr = 0; ld_data = 0; ld_spins = 0;
    start = 0; cfg_steps = 0; cfg_xi = 0; rd_trial = 0;
    if ($value$plusargs("g0=%f", g0)) ;
    if ($value$plusargs("g1=%f", g1)) ;
    if ($value$plusargs("n=%d", n_inst)) ;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // schedule and noise: generated once, loaded once
    for (int t = 0; t < T; t++) begin
      automatic real gamma;
      gamma = g0 + (g1 - g0) * real'(t) / real'(T - 1);
      beta_t[t] = 4096;
      eta_t[t]  = to_q($sqrt(1.0 / (5.0 * gamma)), W, F);
      for (int i = 0; i < N; i++) noise_t[t][i] = to_q(gauss(), W, F);
      load(LD_BETA, t, beta_t[t], '0);
      load(LD_ETA, t, eta_t[t], '0);
      for (int i = 0; i < N; i++) load(LD_NOISE, t * N + i, noise_t[t][i], '0);
    end
    foreach (snr_db[p]) begin
      automatic int err_mmse = 0, err_pimi = 0;
      for (int b = 0; b < n_inst; b++) begin
        automatic int bad = 0, best_a = 0;
        automatic real best_e = 0.0;
        real xd [D], xs [D];
        make_instance(snr_db[p]);
        load_instance();
        busy_cycles = 0;
        @(negedge clk); start = 1; cfg_steps = 7'(T); cfg_xi = 16'sd8192;
        @(negedge clk); start = 0;
        for (int t = 0; t < T; t++)
          pimi_step(J, h, s, noise_t[t], beta_t[t], eta_t[t], 8192, N, M, W, F, L);
        wait (done);
        @(negedge clk);
        checks++;
        if (busy_cycles != T * P) begin
          failures++;
          $display("instance %0d: %0d cycles, expected %0d", b, busy_cycles, T * P);
        end
        // read back, compare with the model, pick the best trial
        best_e = 0.0;
        for (int a = 0; a < M; a++) begin
          automatic real e;
          @(negedge clk); rd_trial = 5'(a); #1;
          for (int i = 0; i < N; i++) begin
            checks++;
            if (rd_spins[i] != s[a][i]) bad++;
          end
          for (int k = 0; k < D; k++)
            xd[k] = xm[k] + (rd_spins[k] ? 1.0 : -1.0) + (rd_spins[k + D] ? 1.0 : -1.0);
          e = objective(xd);
          if (a == 0 || e < best_e) begin best_e = e; best_a = a; end
        end
        failures += bad;
        // decode the chosen trial
        for (int k = 0; k < D; k++) begin
          xd[k] = xm[k] + (s[best_a][k] ? 1.0 : -1.0) + (s[best_a][k + D] ? 1.0 : -1.0);
          xs[k] = slice16(xd[k]);
        end
        checks++;
        if (objective(xd) != best_e) begin
          failures++;
          $display("instance %0d: decoded objective differs from best trial", b);
        end
        if (objective(xs) < objective(xm)) n_better++;
        if (objective(xs) > objective(xm)) n_worse++;
        for (int k = 0; k < D; k++) begin
          err_mmse += bit_errors(xr[k], xm[k]);
          err_pimi += bit_errors(xr[k], xs[k]);
        end
      end
      tot_mmse += err_mmse;
      tot_pimi += err_pimi;
      $display("Eb/N0 %0.0f dB: %0d instances, BER MMSE %0.5f, BER PIMI %0.5f",
               snr_db[p], n_inst, real'(err_mmse) / real'(n_inst * D * 2),
               real'(err_pimi) / real'(n_inst * D * 2));
    end
    $display("PIMI objective below MMSE in %0d instances, above in %0d", n_better, n_worse);
    $display("bit errors pooled: MMSE %0d, PIMI %0d", tot_mmse, tot_pimi);
    checks += 2;
    if (tot_pimi > tot_mmse) failures++;
    if (n_better == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
