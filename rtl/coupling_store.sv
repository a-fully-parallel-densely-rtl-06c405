// coupling_store: on-chip copy of one instance's couplings J and biases h.
//
// J is an N x N array of W-bit fixed-point words, h a vector of N words.
// The host writes them one word at a time before a run. During a run the
// MVM stage reads RL whole rows of J (and the RL matching biases) per cycle,
// so the array is organised as a register file with row-wide asynchronous
// read ports; the published kernels partition J the same way so that every
// product of a row is available at once. Write-then-read ordering: a word
// written at a clock edge is visible on the read ports after that edge.
//
// Interface: j_we/j_row/j_col/j_wdata writes J[j_row][j_col]; h_we/h_addr/
// h_wdata writes h[h_addr]; rd_blk selects rows rd_blk*RL .. rd_blk*RL+RL-1,
// returned on rd_rows / rd_h in the same cycle.
module coupling_store #(
  parameter int unsigned W  = 16,
  parameter int unsigned N  = 32,
  parameter int unsigned RL = 1
) (
  input  logic                       clk,
  input  logic                       j_we,
  input  logic [$clog2(N)-1:0]       j_row,
  input  logic [$clog2(N)-1:0]       j_col,
  input  logic signed [W-1:0]        j_wdata,
  input  logic                       h_we,
  input  logic [$clog2(N)-1:0]       h_addr,
  input  logic signed [W-1:0]        h_wdata,
  input  logic [pimi_pkg::idx_w(N/RL)-1:0]  rd_blk,
  output logic signed [W-1:0]        rd_rows [RL][N],
  output logic signed [W-1:0]        rd_h    [RL]
);
  logic signed [W-1:0] jm [N][N];
  logic signed [W-1:0] hm [N];

  always_ff @(posedge clk) begin
    if (j_we) jm[j_row][j_col] <= j_wdata;
    if (h_we) hm[h_addr]       <= h_wdata;
  end

  always_comb begin
    for (int r = 0; r < int'(RL); r++) begin
      rd_rows[r] = jm[int'(rd_blk) * int'(RL) + r];
      rd_h[r]    = hm[int'(rd_blk) * int'(RL) + r];
    end
  end
endmodule
