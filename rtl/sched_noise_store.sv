// sched_noise_store: pre-loaded update schedule and noise tables.
//
// As in the published kernels, the annealing schedule and the Gaussian
// noise are generated off-line and loaded into on-chip read-only tables
// before runs start: beta(t) and eta(t) for every update step t < T_MAX,
// and one standard-normal sample N_i(t) for every step t and spin i. The
// same N_i(t) is used by every trial of a step (the published notation
// indexes the noise by spin and step only); trials differ through their
// initial spins.
//
// Interface: beta_we/eta_we write entry wr_t; noise_we writes sample
// noise_addr = t*N + i. Reads are combinational: rd_t selects beta and
// eta, and (rd_t, rd_blk) selects the AL samples N_{blk*AL+k}(t).
module sched_noise_store #(
  parameter int unsigned W     = 16,
  parameter int unsigned N     = 32,
  parameter int unsigned T_MAX = 64,
  parameter int unsigned AL    = 4
) (
  input  logic                          clk,
  input  logic                          beta_we,
  input  logic                          eta_we,
  input  logic [pimi_pkg::idx_w(T_MAX)-1:0]      wr_t,
  input  logic signed [W-1:0]           wdata,
  input  logic                          noise_we,
  input  logic [pimi_pkg::idx_w(T_MAX*N)-1:0]    noise_addr,
  input  logic [pimi_pkg::idx_w(T_MAX)-1:0]      rd_t,
  input  logic [pimi_pkg::idx_w(N/AL)-1:0]     rd_blk,
  output logic signed [W-1:0]           beta,
  output logic signed [W-1:0]           eta,
  output logic signed [W-1:0]           noise [AL]
);
  logic signed [W-1:0] beta_mem  [T_MAX];
  logic signed [W-1:0] eta_mem   [T_MAX];
  logic signed [W-1:0] noise_mem [T_MAX*N];

  always_ff @(posedge clk) begin
    if (beta_we)  beta_mem[wr_t]        <= wdata;
    if (eta_we)   eta_mem[wr_t]         <= wdata;
    if (noise_we) noise_mem[noise_addr] <= wdata;
  end

  assign beta = beta_mem[rd_t];
  assign eta  = eta_mem[rd_t];
  always_comb
    for (int k = 0; k < int'(AL); k++)
      noise[k] = noise_mem[int'(rd_t) * int'(N) + int'(rd_blk) * int'(AL) + k];
endmodule
