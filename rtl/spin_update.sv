// spin_update: the PIMI activation stage for LANES spins per cycle.
//
// For every lane it evaluates the inertia update rule
//   delta = tanhLUT(beta * I) + xi * s_old + eta * n
//   s_new = sign(delta)
// where I is the local field, s_old the current spin, n a pre-generated
// standard-normal noise sample and beta, eta the inverse temperature and
// noise amplitude of the current update step. The self-alignment term
// xi * s_old is what lets every spin be updated at once without the
// synchronous oscillations of a plain parallel probabilistic Ising machine.
//
// Arithmetic follows the published fixed-point rules: W-bit words with F
// fractional bits, products truncated toward zero, every result saturated
// to the W-bit range, additions done pairwise in the order written above.
// sign(0) is taken as +1, which is this design's choice.
//
// Timing: two registered stages. Stage 1 forms beta*I and eta*n; stage 2
// looks up tanh, adds the terms and takes the sign. out_valid, out_tag and
// s_new follow in_valid by LAT = 2 cycles; one new set of lanes per cycle.
// Spins are encoded as one bit: 1 = +1, 0 = -1.
module spin_update #(
  parameter int unsigned W     = 16,
  parameter int unsigned F     = 12,
  parameter int unsigned L     = 4,
  parameter int unsigned LANES = 4,
  parameter int unsigned TAG_W = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [TAG_W-1:0]    in_tag,
  input  logic signed [W-1:0] field [LANES],
  input  logic [LANES-1:0]    s_old,
  input  logic signed [W-1:0] noise [LANES],
  input  logic signed [W-1:0] beta,
  input  logic signed [W-1:0] eta,
  input  logic signed [W-1:0] xi,
  output logic                out_valid,
  output logic [TAG_W-1:0]    out_tag,
  output logic [LANES-1:0]    s_new
);
  localparam logic signed [W-1:0] MAXW = {1'b0, {(W-1){1'b1}}};
  localparam logic signed [W-1:0] MINW = {1'b1, {(W-1){1'b0}}};

  // Saturate a wider signed value to W bits.
  function automatic logic signed [W-1:0] sat(input logic signed [2*W:0] v);
    if (v > (2*W+1)'(MAXW))      return MAXW;
    else if (v < (2*W+1)'(MINW)) return MINW;
    else                         return v[W-1:0];
  endfunction

  // Fixed-point product, truncated toward zero, saturated.
  function automatic logic signed [W-1:0] mul_q(input logic signed [W-1:0] a,
                                                input logic signed [W-1:0] b);
    logic signed [2*W:0] p;
    p = (2*W+1)'(a) * (2*W+1)'(b);
    if (p < 0) p = p + (2*W+1)'((1 << F) - 1);
    return sat(p >>> F);
  endfunction

  // Saturating sum.
  function automatic logic signed [W-1:0] add_q(input logic signed [W-1:0] a,
                                                input logic signed [W-1:0] b);
    return sat((2*W+1)'(a) + (2*W+1)'(b));
  endfunction

  // Stage 1.
  logic signed [W-1:0] bi_q [LANES];
  logic signed [W-1:0] en_q [LANES];
  logic [LANES-1:0]    s1;
  logic signed [W-1:0] xi1;
  logic                v1, v2;
  logic [TAG_W-1:0]    t1, t2;

  always_ff @(posedge clk) begin
    for (int k = 0; k < int'(LANES); k++) begin
      bi_q[k] <= mul_q(beta, field[k]);
      en_q[k] <= mul_q(eta, noise[k]);
    end
    s1  <= s_old;
    xi1 <= xi;
    t1  <= in_tag;
    t2  <= t1;
  end

  // Stage 2.
  logic signed [W-1:0] th    [LANES];
  logic signed [W-1:0] delta [LANES];
  for (genvar k = 0; k < LANES; k++) begin : g_lane
    tanh_lut #(.W(W), .F(F), .L(L)) u_tanh (.x(bi_q[k]), .y(th[k]));
    always_comb begin
      delta[k] = add_q(add_q(th[k], s1[k] ? xi1 : sat(-(2*W+1)'(xi1))), en_q[k]);
    end
    always_ff @(posedge clk) s_new[k] <= (delta[k] >= 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
    end
  end
  assign out_valid = v2;
  assign out_tag   = t2;
endmodule
