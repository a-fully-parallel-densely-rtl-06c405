// pimi_ctrl: update-step sequencer of a PIMI kernel.
//
// One run executes cfg_steps update steps. Each step has two phases, as in
// the published kernel's loop nest:
//   MVM phase - one (trial, row block) pair is issued per cycle. The loop
//     order is group g (outer), row block rb, trial a within the group
//     (inner), so the G trials of a group reuse the same J rows on
//     consecutive cycles. M*N/RL issue cycles, then MVM_LAT cycles to let
//     the last fields leave the adder-tree pipeline.
//   ACT phase  - one (trial, lane block) pair per cycle is sent through the
//     activation stage, trial outer, lane block inner. M*N/AL issue cycles,
//     then ACT_LAT cycles to let the last spins be written back.
// A step therefore takes P = M*N/RL + MVM_LAT + M*N/AL + ACT_LAT cycles and
// a run T*P cycles with busy high. Draining each phase before the next is
// this design's choice; it keeps the update exactly parallel (no spin of a
// step changes before all its fields exist).
//
// Handshake: start is taken in idle only. cfg_steps is sampled with start;
// a value of 0 finishes at once. done pulses for one cycle in the first
// idle cycle after the run; busy is high while running. The step index t
// is valid throughout the run and selects the schedule and noise entries.
//
// Lint note: rst_n is an asynchronous reset of the registers and is also
// used in the `disable iff` of the assertions; a lint warning that the net
// is used both synchronously and asynchronously is expected.
module pimi_ctrl
  import pimi_pkg::*;
#(
  parameter int unsigned N       = DEF_N,
  parameter int unsigned M       = DEF_M,
  parameter int unsigned G       = DEF_G,
  parameter int unsigned RL      = DEF_RL,
  parameter int unsigned AL      = DEF_AL,
  parameter int unsigned T_MAX   = DEF_T_MAX,
  parameter int unsigned MVM_LAT = 7,
  parameter int unsigned ACT_LAT = 2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [$clog2(T_MAX+1)-1:0]   cfg_steps,
  output logic                         busy,
  output logic                         done,
  output phase_e                       phase,
  output logic [idx_w(T_MAX)-1:0]      t,
  output logic                         mvm_valid,
  output logic [idx_w(M)-1:0]          mvm_trial,
  output logic [idx_w(N/RL)-1:0]       mvm_blk,
  output logic                         act_valid,
  output logic [idx_w(M)-1:0]          act_trial,
  output logic [idx_w(N/AL)-1:0]       act_blk
);
  localparam int unsigned NG  = M / G;
  localparam int unsigned NRB = N / RL;
  localparam int unsigned NAB = N / AL;
  localparam int unsigned DW  = idx_w(((MVM_LAT > ACT_LAT) ? MVM_LAT : ACT_LAT) + 1);

  logic [idx_w(NG)-1:0]        g;
  logic [idx_w(G)-1:0]         ai;
  logic [$clog2(T_MAX+1)-1:0]  steps_q;
  logic [DW-1:0]               dcnt;

  logic last_mvm, last_act;
  assign last_mvm = (int'(g) == int'(NG) - 1) && (int'(mvm_blk) == int'(NRB) - 1) &&
                    (int'(ai) == int'(G) - 1);
  assign last_act = (int'(act_trial) == int'(M) - 1) && (int'(act_blk) == int'(NAB) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= PH_IDLE;
      done      <= 1'b0;
      t         <= '0;
      steps_q   <= '0;
      g         <= '0;
      ai        <= '0;
      mvm_blk   <= '0;
      act_trial <= '0;
      act_blk   <= '0;
      dcnt      <= '0;
    end else begin
      done <= 1'b0;
      unique case (phase)
        PH_IDLE: begin
          if (start) begin
            steps_q <= cfg_steps;
            t       <= '0;
            g       <= '0;
            ai      <= '0;
            mvm_blk <= '0;
            if (cfg_steps == '0) done  <= 1'b1;
            else                 phase <= PH_MVM;
          end
        end
        PH_MVM: begin
          if (last_mvm) begin
            phase <= PH_MVM_DRAIN;
            dcnt  <= DW'(MVM_LAT - 1);
          end
          if (int'(ai) == int'(G) - 1) begin
            ai <= '0;
            if (int'(mvm_blk) == int'(NRB) - 1) begin
              mvm_blk <= '0;
              g       <= (int'(g) == int'(NG) - 1) ? '0 : g + 1'b1;
            end else begin
              mvm_blk <= mvm_blk + 1'b1;
            end
          end else begin
            ai <= ai + 1'b1;
          end
        end
        PH_MVM_DRAIN: begin
          if (dcnt == '0) begin
            phase     <= PH_ACT;
            act_trial <= '0;
            act_blk   <= '0;
          end else begin
            dcnt <= dcnt - 1'b1;
          end
        end
        PH_ACT: begin
          if (last_act) begin
            phase <= PH_ACT_DRAIN;
            dcnt  <= DW'(ACT_LAT - 1);
          end
          if (int'(act_blk) == int'(NAB) - 1) begin
            act_blk   <= '0;
            act_trial <= (int'(act_trial) == int'(M) - 1) ? '0 : act_trial + 1'b1;
          end else begin
            act_blk <= act_blk + 1'b1;
          end
        end
        PH_ACT_DRAIN: begin
          if (dcnt == '0) begin
            if (32'(t) + 1 == 32'(steps_q)) begin
              phase <= PH_IDLE;
              done  <= 1'b1;
            end else begin
              phase <= PH_MVM;
              t     <= t + 1'b1;
            end
          end else begin
            dcnt <= dcnt - 1'b1;
          end
        end
        default: phase <= PH_IDLE;
      endcase
    end
  end

  assign busy      = (phase != PH_IDLE);
  assign mvm_valid = (phase == PH_MVM);
  assign act_valid = (phase == PH_ACT);
  assign mvm_trial = idx_w(M)'(int'(g) * int'(G) + int'(ai));

  // The tables hold T_MAX steps.
  a_steps_fit: assert property (@(posedge clk) disable iff (!rst_n)
    (phase == PH_IDLE && start) |-> (32'(cfg_steps) <= 32'(T_MAX)));
endmodule
