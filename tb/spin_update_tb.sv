// spin_update_tb: random fields, old spins, noise, schedule values and xi
// go through the four-lane activation stage at one set per cycle; every
// output lane is compared with the reference update rule of pimi_ref_pkg,
// and the two-cycle latency is checked. Directed cases cover inertia
// holding a spin against a weak field, sign(0) = +1, and saturation of the
// sum.
module spin_update_tb;
  import pimi_ref_pkg::*;
  localparam int W = 16, F = 12, L = 4, LN = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic [7:0] in_tag, out_tag;
  logic signed [W-1:0] field [LN];
  logic signed [W-1:0] noise [LN];
  logic [LN-1:0] s_old, s_new;
  logic signed [W-1:0] beta, eta, xi;

  spin_update #(.W(W), .F(F), .L(L), .LANES(LN), .TAG_W(8)) dut (.*);

  typedef struct { bit [LN-1:0] s; int cyc; logic [7:0] tag; } exp_t;
  exp_t q[$];
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    exp_t e;
    e = q.pop_front();
    checks++;
    if (s_new != e.s || out_tag != e.tag || cyc - e.cyc != 2) begin
      failures++;
      if (failures < 10) $display("got %b exp %b tag %0d/%0d lat %0d", s_new, e.s, out_tag, e.tag, cyc - e.cyc);
    end
  end

  task automatic issue(input int n);
    exp_t e;
    for (int k = 0; k < LN; k++)
      e.s[k] = update(field[k], s_old[k], noise[k], beta, eta, xi, W, F, L);
    e.cyc = cyc + 1;
    e.tag = 8'(n);
    in_tag = 8'(n);
    q.push_back(e);
  endtask

  initial begin
    in_valid = 0; in_tag = 0; s_old = 0; beta = 0; eta = 0; xi = 0;
    foreach (field[k]) begin field[k] = 0; noise[k] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed: zero field, zero noise, xi = 2 -> spins keep their value
    @(negedge clk);
    in_valid = 1; beta = 16'sd4096; eta = 0; xi = 16'sd8192; s_old = 4'b1010;
    issue(0);
    // directed: weak opposing field (tanh level 1/3) loses to xi
    @(negedge clk);
    foreach (field[k]) field[k] = s_old[k] ? -16'sd100 : 16'sd100;
    issue(1);
    // directed: everything zero -> delta = tanh(0) = +1/3 >= 0 -> +1
    @(negedge clk);
    xi = 0; foreach (field[k]) field[k] = 16'sd0; s_old = 4'b0000;
    issue(2);
    // directed: saturation, huge noise against xi
    @(negedge clk);
    xi = 16'sh7fff; eta = 16'sh7fff; s_old = 4'b1111;
    foreach (noise[k]) noise[k] = -16'sh7fff;
    issue(3);
    for (int n = 4; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      beta = W'($urandom_range(0, 8192));
      eta  = W'($urandom_range(0, 8192));
      xi   = W'($urandom_range(0, 12288));
      s_old = 4'($urandom);
      foreach (field[k]) begin
        field[k] = W'($urandom);
        noise[k] = W'(to_q(gauss(), W, F));
      end
      if (in_valid) issue(n);
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
