// pimi_pkg: shared types and default sizes of the PIMI (probabilistic Ising
// machine with inertia) solver kernel.
//
// The defaults describe the MIMO-detection kernel for 8x8 MIMO with 16-QAM:
// 32 spins, 32 trials run in groups of 4, 32 update steps (up to 64 held on
// chip), a signed 16-bit fixed-point datapath with 12 fractional bits
// (4 integer bits including sign), and a 4-level tanh look-up table. These
// numbers follow the published design. The load-port encoding below is this
// design's own choice.
package pimi_pkg;

  // Datapath word: total bits and fractional bits (Q4.12).
  localparam int unsigned DEF_W      = 16;
  localparam int unsigned DEF_F      = 12;
  // Number of spins N (8x8 MIMO, 16-QAM, two spins per real dimension).
  localparam int unsigned DEF_N      = 32;
  // Trials per instance and trials per group.
  localparam int unsigned DEF_M      = 32;
  localparam int unsigned DEF_G      = 4;
  // MVM rows produced per cycle and activation lanes per cycle.
  localparam int unsigned DEF_RL     = 1;
  localparam int unsigned DEF_AL     = 4;
  // Depth of the schedule / noise tables in update steps.
  localparam int unsigned DEF_T_MAX  = 64;
  // Levels of the tanh look-up table.
  localparam int unsigned DEF_L      = 4;
  // Kernels placed side by side in the accelerator.
  localparam int unsigned DEF_K      = 10;

  // Width of an index that counts 0 .. n-1 (at least one bit).
  function automatic int unsigned idx_w(input int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  // Target of one beat on a kernel's load port.
  typedef enum logic [2:0] {
    LD_J     = 3'd0,  // J[i][j]        addr = i*N + j, data = ld_data
    LD_H     = 3'd1,  // h[i]           addr = i
    LD_SPIN  = 3'd2,  // s_a(0)         addr = trial a, data = ld_spins
    LD_BETA  = 3'd3,  // beta(t)        addr = t
    LD_ETA   = 3'd4,  // eta(t)         addr = t
    LD_NOISE = 3'd5   // N_i(t)         addr = t*N + i
  } ld_sel_e;

  // Phase of the update-step controller.
  typedef enum logic [2:0] {
    PH_IDLE      = 3'd0,
    PH_MVM       = 3'd1,
    PH_MVM_DRAIN = 3'd2,
    PH_ACT       = 3'd3,
    PH_ACT_DRAIN = 3'd4
  } phase_e;

endpackage
