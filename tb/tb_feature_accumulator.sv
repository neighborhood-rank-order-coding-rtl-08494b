// tb_feature_accumulator -- self-checking testbench of the edge accumulators.
//
// 8 cells, N4 features (16 numbers), normalisation over 2**4 = 16 features.
// A random stream of (cell, feature) words, each cell biased towards a few
// feature numbers, is fed in. The reference counts occurrences per cell and,
// on a cell's 16th feature, expects the vector b'_k = (N_k / 16 >= theta_M)
// computed in real arithmetic, one clock later, and the cell's counts restart.
// Words sent while the array is still being cleared after reset must be
// ignored, and ready must rise after exactly CELLS clocks. theta_M is changed
// between phases, including 0.1 and 0.2 as used in the paper.
module tb_feature_accumulator;
  localparam int unsigned CELLS = 8, NB = 4, NORM_SHIFT = 4, THETA_W = 8;
  localparam int unsigned NFEAT = 16, NORM = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic ready, feat_valid, b_valid;
  logic [2:0] feat_addr, b_addr;
  logic [NB-1:0] feat;
  logic [THETA_W-1:0] theta_m;
  logic [NFEAT-1:0] b_vec;
  int checks = 0, failures = 0, vectors = 0, ones = 0, zeros = 0;

  feature_accumulator #(.CELLS(CELLS), .NB(NB), .NORM_SHIFT(NORM_SHIFT), .THETA_W(THETA_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cnt [CELLS][NFEAT];
  int tot [CELLS];

  initial begin
    int wait_cycles;
    logic exp_v; logic [2:0] exp_a; logic [NFEAT-1:0] exp_vec;
    int unsigned thetas [4] = '{26, 52, 0, 128};   // 0.10, 0.20, 0, 0.5
    for (int a = 0; a < CELLS; a++) begin
      tot[a] = 0;
      for (int k = 0; k < NFEAT; k++) cnt[a][k] = 0;
    end
    feat_valid = 0; feat_addr = '0; feat = '0; theta_m = 8'(thetas[0]);
    exp_v = 0; exp_a = '0; exp_vec = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // words during clearing are ignored
    wait_cycles = 0;
    while (!ready) begin
      @(negedge clk);
      feat_valid = 1; feat_addr = 3'($urandom); feat = NB'($urandom);
      @(posedge clk); #1; wait_cycles++;
    end
    checks++;
    if (wait_cycles != CELLS) begin
      failures++; $display("FAIL ready after %0d clocks, expected %0d", wait_cycles, CELLS);
    end
    @(negedge clk); feat_valid = 0;
    for (int phase = 0; phase < 4; phase++) begin
      theta_m = 8'(thetas[phase]);
      for (int t = 0; t < 3000; t++) begin
        int a, k;
        @(negedge clk);
        checks++;
        if (b_valid !== exp_v || (exp_v && (b_addr !== exp_a || b_vec !== exp_vec))) begin
          failures++;
          if (failures < 10) $display("FAIL out %b/%0d/%h expected %b/%0d/%h", b_valid, b_addr, b_vec,
                                      exp_v, exp_a, exp_vec);
        end
        feat_valid = ($urandom_range(2) != 0);
        a = $urandom_range(CELLS - 1);
        k = ($urandom_range(3) == 0) ? $urandom_range(NFEAT - 1) : ((a * 3 + $urandom_range(2)) % NFEAT);
        feat_addr = 3'(a); feat = NB'(k);
        exp_v = 0;
        if (feat_valid) begin
          cnt[a][k]++; tot[a]++;
          if (tot[a] == NORM) begin
            exp_v = 1; exp_a = 3'(a); vectors++;
            for (int j = 0; j < NFEAT; j++) begin
              exp_vec[j] = (real'(cnt[a][j]) / real'(NORM) >= real'(thetas[phase]) / 256.0);
              if (exp_vec[j]) ones++; else zeros++;
              cnt[a][j] = 0;
            end
            tot[a] = 0;
          end
        end
      end
    end
    checks++;
    if (vectors < 100 || ones == 0 || zeros == 0) failures++;
    $display("vectors=%0d set bits=%0d clear bits=%0d", vectors, ones, zeros);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
