// field_buffer_tb: writes the fields of all 32 trials of 32 spins one per
// cycle in the MVM order (group, spin, trial), then reads them back four
// lanes at a time in the activation order and compares with a shadow copy.
// A second instance with four rows per write checks the wide write port.
module field_buffer_tb;
  localparam int W = 16, N = 32, M = 32;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic we;
  logic [4:0] w_trial, r_trial;
  logic [4:0] w_blk;
  logic [2:0] r_blk;
  logic signed [W-1:0] wdata [1];
  logic signed [W-1:0] rdata [4];
  field_buffer #(.W(W), .N(N), .M(M), .RL(1), .AL(4)) dut (.*);

  logic b_we;
  logic [1:0] b_trial, b_rtrial;
  logic [2:0] b_wblk;
  logic [3:0] b_rblk;
  logic signed [W-1:0] b_wdata [4];
  logic signed [W-1:0] b_rdata [2];
  field_buffer #(.W(W), .N(N), .M(4), .RL(4), .AL(2)) dut_b (
    .clk, .we(b_we), .w_trial(b_trial), .w_blk(b_wblk), .wdata(b_wdata),
    .r_trial(b_rtrial), .r_blk(b_rblk), .rdata(b_rdata));

  logic signed [W-1:0] sh [M][N];
  logic signed [W-1:0] bsh [4][N];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; b_we = 0; w_trial = 0; r_trial = 0; w_blk = 0; r_blk = 0; wdata[0] = 0;
    b_trial = 0; b_rtrial = 0; b_wblk = 0; b_rblk = 0;
    foreach (b_wdata[k]) b_wdata[k] = 0;
    for (int g = 0; g < M / 4; g++)
      for (int i = 0; i < N; i++)
        for (int a = 0; a < 4; a++) begin
          @(negedge clk);
          we = 1; w_trial = 5'(g * 4 + a); w_blk = 5'(i); wdata[0] = W'($urandom);
          sh[g * 4 + a][i] = wdata[0];
          b_we = (g < 1); b_trial = 2'(a); b_wblk = 3'(i / 4);
          if (i % 4 == 0 && g < 1) for (int k = 0; k < 4; k++) begin
            b_wdata[k] = W'($urandom); bsh[a][i + k] = b_wdata[k];
          end
          if (i % 4 != 0) b_we = 0;
        end
    @(negedge clk); we = 0; b_we = 0;
    for (int a = 0; a < M; a++)
      for (int b = 0; b < N / 4; b++) begin
        @(negedge clk); r_trial = 5'(a); r_blk = 3'(b);
        b_rtrial = 2'(a % 4); b_rblk = 4'(b * 2 + a / 16);
        #1;
        for (int k = 0; k < 4; k++) begin
          checks++; if (rdata[k] != sh[a][b * 4 + k]) failures++;
        end
        for (int k = 0; k < 2; k++) begin
          checks++; if (b_rdata[k] != bsh[a % 4][(b * 2 + a / 16) * 2 + k]) failures++;
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
