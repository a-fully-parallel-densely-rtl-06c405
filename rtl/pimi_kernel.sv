// pimi_kernel: one probabilistic-Ising-machine-with-inertia solver kernel.
//
// The kernel holds one Ising instance (couplings J, biases h), the initial
// spins of M independent trials, a schedule beta(t), eta(t) and a table of
// pre-generated Gaussian noise. On start it runs cfg_steps update steps.
// In each step every spin of every trial is updated at once:
//   I_{i,a} = sum_j J_ij s_{j,a} + h_i
//   s_{i,a} <- sign(tanhLUT(beta(t) I_{i,a}) + xi s_{i,a} + eta(t) N_i(t))
// The first line is computed by RL adder-tree rows (mvm_row) fed from a
// row-wide J store and a broadcast spin vector; the fields of all trials
// are parked in a field buffer; the second line is computed by AL
// activation lanes (spin_update) that write the new spins back.
//
// The defaults are the published MIMO kernel (N = 32, M = 32 trials in
// groups of G = 4, one field per cycle, four activation lanes, 16-bit
// Q4.12 data, 4-level tanh). Setting RL = AL = N, M = G = 1, W = 4, F = 2
// gives the fully unrolled Max-Cut / SK-1 kernel, which updates a whole
// spin vector in log2(N) + 6 cycles.
//
// Host side (stands in for the AXI/HBM path of the original platform):
//   ld_valid/ld_sel/ld_addr/ld_data/ld_spins write one table entry per
//   cycle (see pimi_pkg::ld_sel_e for addressing). start/cfg_steps/cfg_xi/
//   cfg_bank begin a run (cfg_xi is the self-alignment constant xi; both it
//   and cfg_bank are sampled with start); busy is high for exactly
//   cfg_steps * P cycles with P = M*N/RL + (log2(N)+2) + M*N/AL + 2, then
//   done pulses. rd_bank/rd_trial/rd_spins read a trial's spins (final
//   ones after done). traj_* streams every updated block of spins as it is
//   written, which serves hosts that keep the whole trajectory (the
//   Max-Cut / SK-1 use).
// Continuous operation: the instance data (J, h and the initial spins) is
// held in two banks, each a coupling_store and a spin_store. A run uses
// bank cfg_bank; meanwhile the host may load the next instance into the
// other bank (ld_bank) and, after done, start it at once while it reads
// the finished results out of the first bank (rd_bank). This follows the
// published kernels, where new instances enter while earlier ones are
// being solved; the two-bank scheme and its ports are this design's own.
// The schedule and noise tables are shared and are loaded only while idle,
// as they are pre-loaded once. A load that would violate this is ignored.
// The Max-Cut normalisation of J (a post-multiplication scale in the
// published design) is left to the host, which loads J already scaled.
// Lint note: rst_n also appears in the assertions' `disable iff`, so a
// warning that it is used both synchronously and asynchronously is expected.
module pimi_kernel
  import pimi_pkg::*;
#(
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
  // host load port
  input  logic                        ld_valid,
  input  ld_sel_e                     ld_sel,
  input  logic [AW-1:0]               ld_addr,
  input  logic signed [W-1:0]         ld_data,
  input  logic [N-1:0]                ld_spins,
  input  logic                        ld_bank,
  // run control
  input  logic                        start,
  input  logic                        cfg_bank,
  input  logic [$clog2(T_MAX+1)-1:0]  cfg_steps,
  input  logic signed [W-1:0]         cfg_xi,
  output logic                        busy,
  output logic                        done,
  // result read-out
  input  logic                        rd_bank,
  input  logic [idx_w(M)-1:0]         rd_trial,
  output logic [N-1:0]                rd_spins,
  // trajectory stream
  output logic                        traj_valid,
  output logic [idx_w(T_MAX)-1:0]     traj_t,
  output logic [idx_w(M)-1:0]         traj_trial,
  output logic [idx_w(N/AL)-1:0]      traj_blk,
  output logic [AL-1:0]               traj_spins
);
  localparam int unsigned NW      = $clog2(N);
  localparam int unsigned MW      = idx_w(M);
  localparam int unsigned RBW     = idx_w(N/RL);
  localparam int unsigned ABW     = idx_w(N/AL);
  localparam int unsigned TW      = idx_w(T_MAX);
  localparam int unsigned MVM_LAT = NW + 2;
  localparam int unsigned ACT_LAT = 2;

  // ---------------------------------------------------------------- control
  phase_e              phase;
  logic [TW-1:0]       t;
  logic                mvm_valid, act_valid;
  logic [MW-1:0]       mvm_trial, act_trial;
  logic [RBW-1:0]      mvm_blk;
  logic [ABW-1:0]      act_blk;
  logic signed [W-1:0] xi_q;

  pimi_ctrl #(.N(N), .M(M), .G(G), .RL(RL), .AL(AL), .T_MAX(T_MAX),
              .MVM_LAT(MVM_LAT), .ACT_LAT(ACT_LAT)) u_ctrl (
    .clk, .rst_n, .start, .cfg_steps, .busy, .done, .phase, .t,
    .mvm_valid, .mvm_trial, .mvm_blk, .act_valid, .act_trial, .act_blk);

  logic run_bank;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xi_q     <= '0;
      run_bank <= 1'b0;
    end else if (start && !busy) begin
      xi_q     <= cfg_xi;
      run_bank <= cfg_bank;
    end
  end

  // ---------------------------------------------------------------- loading
  // Instance data (J, h, initial spins) may be loaded into the bank that is
  // not running; the shared schedule and noise tables only while idle.
  logic ld_ok, ld_inst_ok;
  assign ld_ok      = ld_valid && !busy;
  assign ld_inst_ok = ld_valid && (!busy || ld_bank != run_bank);

  logic signed [W-1:0] j_rows_b [2][RL][N];
  logic signed [W-1:0] h_rows_b [2][RL];
  logic signed [W-1:0] j_rows [RL][N];
  logic signed [W-1:0] h_rows [RL];

  for (genvar b = 0; b < 2; b++) begin : g_jh_bank
    coupling_store #(.W(W), .N(N), .RL(RL)) u_jh (
      .clk,
      .j_we   (ld_inst_ok && ld_bank == 1'(b) && ld_sel == LD_J),
      .j_row  (NW'(ld_addr >> NW)),
      .j_col  (NW'(ld_addr)),
      .j_wdata(ld_data),
      .h_we   (ld_inst_ok && ld_bank == 1'(b) && ld_sel == LD_H),
      .h_addr (NW'(ld_addr)),
      .h_wdata(ld_data),
      .rd_blk (mvm_blk),
      .rd_rows(j_rows_b[b]),
      .rd_h   (h_rows_b[b]));
  end
  assign j_rows = j_rows_b[run_bank];
  assign h_rows = h_rows_b[run_bank];

  logic signed [W-1:0] beta, eta;
  logic signed [W-1:0] noise [AL];

  sched_noise_store #(.W(W), .N(N), .T_MAX(T_MAX), .AL(AL)) u_sched (
    .clk,
    .beta_we   (ld_ok && ld_sel == LD_BETA),
    .eta_we    (ld_ok && ld_sel == LD_ETA),
    .wr_t      (TW'(ld_addr)),
    .wdata     (ld_data),
    .noise_we  (ld_ok && ld_sel == LD_NOISE),
    .noise_addr(idx_w(T_MAX*N)'(ld_addr)),
    .rd_t      (t),
    .rd_blk    (act_blk),
    .beta, .eta, .noise);

  // ------------------------------------------------------------ spin state
  logic [N-1:0]    mvm_spins;
  logic [AL-1:0]   act_old;
  logic            upd_valid;
  logic [MW+ABW-1:0] upd_tag;
  logic [AL-1:0]   upd_spins;

  logic [N-1:0]  mvm_spins_b [2];
  logic [AL-1:0] act_old_b   [2];
  logic [N-1:0]  rd_spins_b  [2];

  for (genvar b = 0; b < 2; b++) begin : g_spin_bank
    spin_store #(.N(N), .M(M), .AL(AL)) u_spins (
      .clk,
      .ld_we       (ld_inst_ok && ld_bank == 1'(b) && ld_sel == LD_SPIN),
      .ld_trial    (MW'(ld_addr)),
      .ld_spins    (ld_spins),
      .mvm_trial   (mvm_trial),
      .mvm_spins   (mvm_spins_b[b]),
      .act_rd_trial(act_trial),
      .act_rd_blk  (act_blk),
      .act_rd_spins(act_old_b[b]),
      .act_we      (upd_valid && run_bank == 1'(b)),
      .act_wr_trial(upd_tag[ABW +: MW]),
      .act_wr_blk  (upd_tag[ABW-1:0]),
      .act_wr_spins(upd_spins),
      .host_trial  (rd_trial),
      .host_spins  (rd_spins_b[b]));
  end
  assign mvm_spins = mvm_spins_b[run_bank];
  assign act_old   = act_old_b[run_bank];
  assign rd_spins  = rd_spins_b[rd_bank];

  // ------------------------------------------------------------ MVM stage
  logic                fld_valid [RL];
  logic [MW+RBW-1:0]   fld_tag   [RL];
  logic signed [W-1:0] fld       [RL];

  for (genvar r = 0; r < RL; r++) begin : g_row
    mvm_row #(.W(W), .N(N), .TAG_W(MW + RBW)) u_row (
      .clk, .rst_n,
      .in_valid (mvm_valid),
      .in_tag   ({mvm_trial, mvm_blk}),
      .j_row    (j_rows[r]),
      .spins    (mvm_spins),
      .h        (h_rows[r]),
      .out_valid(fld_valid[r]),
      .out_tag  (fld_tag[r]),
      .field    (fld[r]));
  end

  logic signed [W-1:0] act_field [AL];

  field_buffer #(.W(W), .N(N), .M(M), .RL(RL), .AL(AL)) u_fields (
    .clk,
    .we     (fld_valid[0]),
    .w_trial(fld_tag[0][RBW +: MW]),
    .w_blk  (fld_tag[0][RBW-1:0]),
    .wdata  (fld),
    .r_trial(act_trial),
    .r_blk  (act_blk),
    .rdata  (act_field));

  // ----------------------------------------------------- activation stage
  spin_update #(.W(W), .F(F), .L(L), .LANES(AL), .TAG_W(MW + ABW)) u_act (
    .clk, .rst_n,
    .in_valid (act_valid),
    .in_tag   ({act_trial, act_blk}),
    .field    (act_field),
    .s_old    (act_old),
    .noise    (noise),
    .beta, .eta,
    .xi       (xi_q),
    .out_valid(upd_valid),
    .out_tag  (upd_tag),
    .s_new    (upd_spins));

  assign traj_valid = upd_valid;
  assign traj_t     = t;
  assign traj_trial = upd_tag[ABW +: MW];
  assign traj_blk   = upd_tag[ABW-1:0];
  assign traj_spins = upd_spins;

  // During a run the host may load only instance data, and only into the
  // bank that is not running.
  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (ld_valid && busy) |-> (ld_bank != run_bank &&
                            (ld_sel == LD_J || ld_sel == LD_H || ld_sel == LD_SPIN)));
  // All RL rows of one issue leave the adder trees together.
  a_rows_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    fld_valid[0] |-> (phase == PH_MVM || phase == PH_MVM_DRAIN));
endmodule
