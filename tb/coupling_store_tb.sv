// coupling_store_tb: fills J and h of a 32-spin store (one row per read
// block) and of an 8-spin store read four rows at a time with random words,
// then reads every row block back and compares each word with a shadow copy.
module coupling_store_tb;
  localparam int W = 16;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  // 32 spins, RL = 1
  logic j_we, h_we;
  logic [4:0] j_row, j_col, h_addr;
  logic signed [W-1:0] j_wdata, h_wdata;
  logic [4:0] rd_blk;
  logic signed [W-1:0] rd_rows [1][32];
  logic signed [W-1:0] rd_h [1];
  coupling_store #(.W(W), .N(32), .RL(1)) dut (.*);

  // 8 spins, RL = 4
  logic b_j_we, b_h_we;
  logic [2:0] b_j_row, b_j_col, b_h_addr;
  logic signed [W-1:0] b_j_wdata, b_h_wdata;
  logic [0:0] b_rd_blk;
  logic signed [W-1:0] b_rd_rows [4][8];
  logic signed [W-1:0] b_rd_h [4];
  coupling_store #(.W(W), .N(8), .RL(4)) dut_b (
    .clk, .j_we(b_j_we), .j_row(b_j_row), .j_col(b_j_col), .j_wdata(b_j_wdata),
    .h_we(b_h_we), .h_addr(b_h_addr), .h_wdata(b_h_wdata), .rd_blk(b_rd_blk),
    .rd_rows(b_rd_rows), .rd_h(b_rd_h));

  logic signed [W-1:0] sj [32][32];
  logic signed [W-1:0] sh [32];
  logic signed [W-1:0] bj [8][8];
  logic signed [W-1:0] bh [8];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    j_we = 0; h_we = 0; b_j_we = 0; b_h_we = 0; rd_blk = 0; b_rd_blk = 0;
    j_row = 0; j_col = 0; h_addr = 0; j_wdata = 0; h_wdata = 0;
    b_j_row = 0; b_j_col = 0; b_h_addr = 0; b_j_wdata = 0; b_h_wdata = 0;
    for (int i = 0; i < 32; i++) for (int j = 0; j < 32; j++) begin
      @(negedge clk);
      j_we = 1; j_row = 5'(i); j_col = 5'(j); j_wdata = W'($urandom); sj[i][j] = j_wdata;
      h_we = (j == 0); h_addr = 5'(i); h_wdata = W'($urandom); if (j == 0) sh[i] = h_wdata;
      b_j_we = (i < 8 && j < 8); b_j_row = 3'(i); b_j_col = 3'(j); b_j_wdata = W'($urandom);
      if (i < 8 && j < 8) bj[i][j] = b_j_wdata;
      b_h_we = (i < 8 && j == 0); b_h_addr = 3'(i); b_h_wdata = W'($urandom);
      if (i < 8 && j == 0) bh[i] = b_h_wdata;
    end
    @(negedge clk); j_we = 0; h_we = 0; b_j_we = 0; b_h_we = 0;
    for (int b = 0; b < 32; b++) begin
      @(negedge clk); rd_blk = 5'(b); #1;
      for (int j = 0; j < 32; j++) begin
        checks++; if (rd_rows[0][j] != sj[b][j]) failures++;
      end
      checks++; if (rd_h[0] != sh[b]) failures++;
    end
    for (int b = 0; b < 2; b++) begin
      @(negedge clk); b_rd_blk = 1'(b); #1;
      for (int r = 0; r < 4; r++) begin
        for (int j = 0; j < 8; j++) begin
          checks++; if (b_rd_rows[r][j] != bj[b*4+r][j]) failures++;
        end
        checks++; if (b_rd_h[r] != bh[b*4+r]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
