// mvm_row: one local field I_i = sum_j J_ij * s_j + h_i per cycle.
//
// Spins are +1/-1, so every product J_ij * s_j is J_ij or -J_ij: the N
// "multipliers" are sign selects. The N terms are summed by a pipelined
// binary adder tree of log2(N) registered levels, as in the published
// design, whose sweep latency grows with log2(N) for this reason. The tree
// carries ACC_W = W + log2(N) + 1 bits so that no partial sum can overflow;
// the bias h_i is added at the end and only the final field is truncated to
// the W-bit datapath format with saturation. Keeping the wide accumulator is
// this design's choice (the published text states both that accumulation is
// wider and that every intermediate value is W bits; see the documentation).
//
// Interface: in_valid/in_tag accompany j_row, spins (bit 1 = spin +1,
// bit 0 = spin -1) and h. out_valid/out_tag/field appear LAT = log2(N) + 2
// cycles later. Fully pipelined, one new row per cycle. N must be a power
// of two.
module mvm_row #(
  parameter int unsigned W     = 16,
  parameter int unsigned N     = 32,
  parameter int unsigned TAG_W = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [TAG_W-1:0]        in_tag,
  input  logic signed [W-1:0]     j_row [N],
  input  logic [N-1:0]            spins,
  input  logic signed [W-1:0]     h,
  output logic                    out_valid,
  output logic [TAG_W-1:0]        out_tag,
  output logic signed [W-1:0]     field
);
  localparam int unsigned LOGN  = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned ACC_W = W + LOGN + 1;
  localparam int unsigned LAT   = LOGN + 2;
  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((1 << (W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(1 << (W - 1));

  // Tree level l holds N >> l partial sums. Level 0 holds the products.
  logic signed [ACC_W-1:0] lvl [LOGN+1][N];
  // The bias travels alongside the tree.
  logic signed [W-1:0]     h_pipe [LOGN+1];
  logic [LAT-1:0]          v_pipe;
  logic [TAG_W-1:0]        t_pipe [LAT];

  always_ff @(posedge clk) begin
    for (int j = 0; j < int'(N); j++)
      lvl[0][j] <= spins[j] ? ACC_W'(j_row[j]) : -ACC_W'(j_row[j]);
    h_pipe[0] <= h;
    for (int l = 1; l <= int'(LOGN); l++) begin
      for (int j = 0; j < int'(N >> l); j++)
        lvl[l][j] <= lvl[l-1][2*j] + lvl[l-1][2*j+1];
      for (int j = int'(N >> l); j < int'(N); j++)
        lvl[l][j] <= '0;
      h_pipe[l] <= h_pipe[l-1];
    end
  end

  // Final stage: add the bias and saturate to W bits.
  logic signed [ACC_W-1:0] sum;
  always_comb sum = lvl[LOGN][0] + ACC_W'(h_pipe[LOGN]);

  always_ff @(posedge clk) begin
    if (sum > MAXV)      field <= MAXV[W-1:0];
    else if (sum < MINV) field <= MINV[W-1:0];
    else                 field <= sum[W-1:0];
  end

  // Valid and tag shift registers.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_pipe <= '0;
    else        v_pipe <= {v_pipe[LAT-2:0], in_valid};
  end
  always_ff @(posedge clk) begin
    t_pipe[0] <= in_tag;
    for (int k = 1; k < int'(LAT); k++) t_pipe[k] <= t_pipe[k-1];
  end
  assign out_valid = v_pipe[LAT-1];
  assign out_tag   = t_pipe[LAT-1];
endmodule
