// sched_noise_store_tb: loads a schedule (beta rising, eta falling) and a
// noise table for 64 steps of 32 spins, then reads every step and every
// four-sample block back and compares with the values written.
module sched_noise_store_tb;
  localparam int W = 16, N = 32, T = 64, AL = 4;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic beta_we, eta_we, noise_we;
  logic [5:0] wr_t, rd_t;
  logic signed [W-1:0] wdata, beta, eta;
  logic [10:0] noise_addr;
  logic [2:0] rd_blk;
  logic signed [W-1:0] noise [AL];
  sched_noise_store #(.W(W), .N(N), .T_MAX(T), .AL(AL)) dut (.*);

  logic signed [W-1:0] sb [T], se [T], sn [T*N];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    beta_we = 0; eta_we = 0; noise_we = 0; wr_t = 0; rd_t = 0; wdata = 0; noise_addr = 0; rd_blk = 0;
    for (int t = 0; t < T; t++) begin
      @(negedge clk); beta_we = 1; eta_we = 0; wr_t = 6'(t); wdata = W'(t * 64); sb[t] = wdata;
      @(negedge clk); beta_we = 0; eta_we = 1; wdata = W'(8192 - t * 100); se[t] = wdata;
    end
    @(negedge clk); eta_we = 0;
    for (int a = 0; a < T * N; a++) begin
      @(negedge clk); noise_we = 1; noise_addr = 11'(a); wdata = W'($urandom); sn[a] = wdata;
    end
    @(negedge clk); noise_we = 0;
    for (int t = 0; t < T; t++)
      for (int b = 0; b < N / AL; b++) begin
        @(negedge clk); rd_t = 6'(t); rd_blk = 3'(b); #1;
        checks += 2;
        if (beta != sb[t]) failures++;
        if (eta != se[t]) failures++;
        for (int k = 0; k < AL; k++) begin
          checks++; if (noise[k] != sn[t * N + b * AL + k]) failures++;
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
