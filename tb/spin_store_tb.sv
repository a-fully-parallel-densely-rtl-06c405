// spin_store_tb: loads random initial vectors for 32 trials, then mixes
// activation write-backs of random 4-spin blocks with reads on all three
// read ports, checking every read against a shadow copy.
module spin_store_tb;
  localparam int N = 32, M = 32, AL = 4;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic ld_we, act_we;
  logic [4:0] ld_trial, mvm_trial, act_rd_trial, act_wr_trial, host_trial;
  logic [N-1:0] ld_spins, mvm_spins, host_spins;
  logic [2:0] act_rd_blk, act_wr_blk;
  logic [AL-1:0] act_rd_spins, act_wr_spins;
  spin_store #(.N(N), .M(M), .AL(AL)) dut (.*);

  logic [N-1:0] shadow [M];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ld_we = 0; act_we = 0; ld_trial = 0; mvm_trial = 0; act_rd_trial = 0;
    act_wr_trial = 0; host_trial = 0; ld_spins = 0; act_rd_blk = 0; act_wr_blk = 0; act_wr_spins = 0;
    for (int a = 0; a < M; a++) begin
      @(negedge clk); ld_we = 1; ld_trial = 5'(a); ld_spins = $urandom; shadow[a] = ld_spins;
    end
    @(negedge clk); ld_we = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      mvm_trial = 5'($urandom); act_rd_trial = 5'($urandom); act_rd_blk = 3'($urandom);
      host_trial = 5'($urandom);
      #1;
      checks += 3;
      if (mvm_spins != shadow[mvm_trial]) failures++;
      if (host_spins != shadow[host_trial]) failures++;
      if (act_rd_spins != shadow[act_rd_trial][act_rd_blk*AL +: AL]) failures++;
      act_we = $urandom_range(0, 1);
      act_wr_trial = 5'($urandom); act_wr_blk = 3'($urandom); act_wr_spins = 4'($urandom);
      @(posedge clk);
      if (act_we) shadow[act_wr_trial][act_wr_blk*AL +: AL] = act_wr_spins;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
