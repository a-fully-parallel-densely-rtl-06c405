// mvm_row_tb: drives random rows of J, spin vectors and biases into the
// adder-tree row at one per cycle (with random idle cycles), and checks
// every field that comes out against an exact sum saturated to 16 bits,
// in order, with the stated latency of log2(N) + 2 cycles. Rows of large
// same-sign couplings exercise positive and negative saturation.
module mvm_row_tb;
  import pimi_ref_pkg::*;
  localparam int W = 16, N = 32, LAT = 7;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  logic [7:0] in_tag, out_tag;
  logic signed [W-1:0] j_row [N];
  logic [N-1:0] spins;
  logic signed [W-1:0] h, field;

  mvm_row #(.W(W), .N(N), .TAG_W(8)) dut (.*);

  longint exp_q[$];
  int     issue_cyc[$];
  int     cyc = 0;
  int     sat_hits = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) if (rst_n && out_valid) begin
    longint e; int c;
    e = exp_q.pop_front();
    c = issue_cyc.pop_front();
    checks++;
    if (longint'(field) != e || cyc - c != LAT) begin
      failures++;
      if (failures < 10) $display("field %0d exp %0d latency %0d", field, e, cyc - c);
    end
  end

  initial begin
    in_valid = 0; in_tag = 0; h = 0; spins = 0;
    foreach (j_row[j]) j_row[j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      if (in_valid) begin
        longint s;
        int big = (n % 50 == 7) ? 1 : ((n % 50 == 8) ? -1 : 0);
        spins = {$urandom, $urandom};
        for (int j = 0; j < N; j++)
          j_row[j] = big > 0 ? 16'sh7000 : big < 0 ? -16'sh7000 : W'($urandom_range(0, 8191) - 4096);
        if (big != 0) spins = '1;
        h = W'($urandom_range(0, 16383) - 8192);
        s = h;
        for (int j = 0; j < N; j++) s += spins[j] ? longint'(j_row[j]) : -longint'(j_row[j]);
        if (sat(s, W) != s) sat_hits++;
        exp_q.push_back(sat(s, W));
        issue_cyc.push_back(cyc + 1);
        in_tag = 8'(n);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || sat_hits < 2) begin
      failures++;
      $display("left %0d saturations %0d", exp_q.size(), sat_hits);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
