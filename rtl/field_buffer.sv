// field_buffer: local fields I_{i,a}(t) of every spin i and trial a.
//
// In each update step the MVM stage fills the buffer RL fields at a time
// (one trial, RL consecutive spins per write) and, once all fields exist,
// the activation stage reads them back AL at a time. Holding all M*N fields
// is what makes the update parallel: no spin changes until every field of
// the step has been computed from the old spins. Buffer size and port
// widths are this design's choices; the published loop nest only implies
// that the fields of a step are kept between its two loops.
//
// Interface: write at the clock edge, read combinational.
module field_buffer #(
  parameter int unsigned W  = 16,
  parameter int unsigned N  = 32,
  parameter int unsigned M  = 32,
  parameter int unsigned RL = 1,
  parameter int unsigned AL = 4
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [pimi_pkg::idx_w(M)-1:0]      w_trial,
  input  logic [pimi_pkg::idx_w(N/RL)-1:0] w_blk,
  input  logic signed [W-1:0]       wdata [RL],
  input  logic [pimi_pkg::idx_w(M)-1:0]      r_trial,
  input  logic [pimi_pkg::idx_w(N/AL)-1:0] r_blk,
  output logic signed [W-1:0]       rdata [AL]
);
  logic signed [W-1:0] mem [M][N];

  always_ff @(posedge clk) begin
    if (we)
      for (int r = 0; r < int'(RL); r++)
        mem[w_trial][int'(w_blk) * int'(RL) + r] <= wdata[r];
  end

  always_comb
    for (int k = 0; k < int'(AL); k++)
      rdata[k] = mem[r_trial][int'(r_blk) * int'(AL) + k];
endmodule
