// pimi_accel: K independent PIMI solver kernels placed side by side.
//
// The published MIMO detector reaches its throughput by instantiating many
// identical solver kernels on one device; the host hands each kernel a new
// instance as soon as the previous one is finished, so throughput grows
// linearly with K while the latency of one instance stays that of a single
// kernel. The kernels share nothing but the clock and reset. Measured
// configurations used 2 to 10 kernels; K defaults to 10.
//
// Every kernel port of pimi_kernel appears here as an array indexed by the
// kernel number k (see pimi_kernel for the meaning and timing of each).
// In addition, all_idle is high when no kernel is busy.
module pimi_accel
  import pimi_pkg::*;
#(
  parameter int unsigned K     = DEF_K,
  parameter int unsigned W     = DEF_W,
  parameter int unsigned F     = DEF_F,
  parameter int unsigned N     = DEF_N,
  parameter int unsigned M     = DEF_M,
  parameter int unsigned G     = DEF_G,
  parameter int unsigned RL    = DEF_RL,
  parameter int unsigned AL    = DEF_AL,
  parameter int unsigned T_MAX = DEF_T_MAX,
  parameter int unsigned L     = DEF_L,
  localparam int unsigned AW   = idx_w(((T_MAX > N) ? T_MAX : N) * N + M)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [K-1:0]                ld_valid,
  input  ld_sel_e                     ld_sel     [K],
  input  logic [AW-1:0]               ld_addr    [K],
  input  logic signed [W-1:0]         ld_data    [K],
  input  logic [N-1:0]                ld_spins   [K],
  input  logic [K-1:0]                ld_bank,
  input  logic [K-1:0]                start,
  input  logic [K-1:0]                cfg_bank,
  input  logic [$clog2(T_MAX+1)-1:0]  cfg_steps  [K],
  input  logic signed [W-1:0]         cfg_xi     [K],
  output logic [K-1:0]                busy,
  output logic [K-1:0]                done,
  output logic                        all_idle,
  input  logic [K-1:0]                rd_bank,
  input  logic [idx_w(M)-1:0]         rd_trial   [K],
  output logic [N-1:0]                rd_spins   [K],
  output logic [K-1:0]                traj_valid,
  output logic [idx_w(T_MAX)-1:0]     traj_t     [K],
  output logic [idx_w(M)-1:0]         traj_trial [K],
  output logic [idx_w(N/AL)-1:0]      traj_blk   [K],
  output logic [AL-1:0]               traj_spins [K]
);
  for (genvar k = 0; k < K; k++) begin : g_kernel
    pimi_kernel #(.W(W), .F(F), .N(N), .M(M), .G(G), .RL(RL), .AL(AL),
                  .T_MAX(T_MAX), .L(L)) u_kernel (
      .clk, .rst_n,
      .ld_valid  (ld_valid[k]),
      .ld_sel    (ld_sel[k]),
      .ld_addr   (ld_addr[k]),
      .ld_data   (ld_data[k]),
      .ld_spins  (ld_spins[k]),
      .ld_bank   (ld_bank[k]),
      .start     (start[k]),
      .cfg_bank  (cfg_bank[k]),
      .cfg_steps (cfg_steps[k]),
      .cfg_xi    (cfg_xi[k]),
      .busy      (busy[k]),
      .done      (done[k]),
      .rd_bank   (rd_bank[k]),
      .rd_trial  (rd_trial[k]),
      .rd_spins  (rd_spins[k]),
      .traj_valid(traj_valid[k]),
      .traj_t    (traj_t[k]),
      .traj_trial(traj_trial[k]),
      .traj_blk  (traj_blk[k]),
      .traj_spins(traj_spins[k]));
  end

  assign all_idle = ~|busy;
endmodule
