// spin_store: spin configurations of all M trials of the running instance.
//
// Each trial's N spins are kept as one N-bit word (bit 1 = spin +1). Three
// asynchronous read ports serve the three users: the MVM stage reads a whole
// trial vector per cycle and hands the same bits to every adder tree (the
// published kernels duplicate the spin vector for exactly this broadcast),
// the activation stage reads AL old spins of one trial, and the host reads
// a final vector. Two write ports: the host loads an initial vector, and the
// activation stage writes back AL new spins. The host port wins if both
// address the same bits in one cycle; the controller never lets that happen.
//
// Interface: all reads combinational, all writes at the clock edge.
module spin_store #(
  parameter int unsigned N  = 32,
  parameter int unsigned M  = 32,
  parameter int unsigned AL = 4
) (
  input  logic                      clk,
  // host load
  input  logic                      ld_we,
  input  logic [pimi_pkg::idx_w(M)-1:0]      ld_trial,
  input  logic [N-1:0]              ld_spins,
  // MVM read
  input  logic [pimi_pkg::idx_w(M)-1:0]      mvm_trial,
  output logic [N-1:0]              mvm_spins,
  // activation read / write
  input  logic [pimi_pkg::idx_w(M)-1:0]      act_rd_trial,
  input  logic [pimi_pkg::idx_w(N/AL)-1:0] act_rd_blk,
  output logic [AL-1:0]             act_rd_spins,
  input  logic                      act_we,
  input  logic [pimi_pkg::idx_w(M)-1:0]      act_wr_trial,
  input  logic [pimi_pkg::idx_w(N/AL)-1:0] act_wr_blk,
  input  logic [AL-1:0]             act_wr_spins,
  // host read
  input  logic [pimi_pkg::idx_w(M)-1:0]      host_trial,
  output logic [N-1:0]              host_spins
);
  logic [N-1:0] mem [M];

  always_ff @(posedge clk) begin
    if (act_we) mem[act_wr_trial][int'(act_wr_blk) * int'(AL) +: AL] <= act_wr_spins;
    if (ld_we)  mem[ld_trial] <= ld_spins;
  end

  assign mvm_spins    = mem[mvm_trial];
  assign act_rd_spins = mem[act_rd_trial][int'(act_rd_blk) * int'(AL) +: AL];
  assign host_spins   = mem[host_trial];
endmodule
