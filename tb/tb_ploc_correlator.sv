// tb_ploc_correlator -- self-checking testbench of the correlation unit.
//
// 4 x 5 map of random feature vectors (16 features each) written through the
// vector port, then one sweep per configuration. The reference computes, in
// real arithmetic, A = |b & n & K| / |(b | n) & K| >= theta_corr for each of the
// eight neighbours inside the image (A = 0 for an empty union) and
// b_korr = (sum A >= n_corr). Configurations: single feature 7 with n_corr 5
// (the paper's Fig. 4 setting), the salient-point subset {1,2,3,4,5,6,8,9,10,12}
// with theta_corr 0.3, and random ones. The sweep must take one clock per cell after one clock of start latency.
module tb_ploc_correlator;
  localparam int unsigned ROWS = 4, COLS = 5, NB = 4, THETA_W = 8;
  localparam int unsigned CELLS = ROWS * COLS, NFEAT = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic b_valid, start, busy, k_valid, k_bit, done;
  logic [4:0] b_addr, k_addr;
  logic [NFEAT-1:0] b_vec, k_mask;
  logic [THETA_W-1:0] theta_corr;
  logic [3:0] n_corr;
  int checks = 0, failures = 0, ones = 0, zeros = 0;

  ploc_correlator #(.ROWS(ROWS), .COLS(COLS), .NB(NB), .THETA_W(THETA_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NFEAT-1:0] map [CELLS];

  function automatic int pop(logic [NFEAT-1:0] v);
    int n = 0;
    for (int i = 0; i < NFEAT; i++) n += v[i];
    return n;
  endfunction

  function automatic logic ref_korr(int idx);
    int r = idx / COLS, c = idx % COLS, s = 0;
    for (int dr = -1; dr <= 1; dr++)
      for (int dc = -1; dc <= 1; dc++) begin
        int nr = r + dr, nc = c + dc;
        if ((dr != 0 || dc != 0) && nr >= 0 && nr < ROWS && nc >= 0 && nc < COLS) begin
          int i = pop(map[idx] & map[nr * COLS + nc] & k_mask);
          int u = pop((map[idx] | map[nr * COLS + nc]) & k_mask);
          if (u > 0 && real'(i) / real'(u) >= real'(theta_corr) / 256.0) s++;
        end
      end
    return s >= n_corr;
  endfunction

  task automatic sweep();
    int seen = 0, cyc = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (seen < CELLS && cyc < 100) begin
      if (k_valid) begin
        logic e = ref_korr(seen);
        checks++;
        if (k_addr !== 5'(seen) || k_bit !== e) begin
          failures++;
          if (failures < 10) $display("FAIL cell %0d: got %0d/%b expected %b", seen, k_addr, k_bit, e);
        end
        if (e) ones++; else zeros++;
        seen++;
        checks++;
        if (done !== (seen == CELLS)) failures++;
      end
      @(negedge clk); cyc++;
    end
    checks++;
    if (seen != CELLS || cyc != CELLS + 1) begin  // one clock to enter the sweep
      failures++; $display("FAIL sweep gave %0d results in %0d clocks", seen, cyc);
    end
  endtask

  initial begin
    b_valid = 0; b_addr = '0; b_vec = '0; start = 0;
    k_mask = '1; theta_corr = 8'd1; n_corr = 4'd5;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    wait (!busy);
    for (int trial = 0; trial < 30; trial++) begin
      for (int i = 0; i < CELLS; i++) begin
        @(negedge clk);
        b_valid = 1; b_addr = 5'(i);
        case (trial % 3)
          0: b_vec = NFEAT'($urandom_range(4) != 0) << 7;        // feature 7 mostly set
          1: b_vec = NFEAT'($urandom) & NFEAT'($urandom);
          default: b_vec = NFEAT'($urandom);
        endcase
        map[i] = b_vec;
      end
      @(negedge clk); b_valid = 0;
      case (trial % 3)
        0: begin k_mask = 16'h0080; theta_corr = 8'd1; n_corr = 4'd5; end
        1: begin k_mask = 16'h177E; theta_corr = 8'd77; n_corr = 4'(1 + $urandom_range(3)); end
        default: begin k_mask = NFEAT'($urandom); theta_corr = 8'($urandom); n_corr = 4'($urandom_range(8)); end
      endcase
      sweep();
    end
    checks++;
    if (ones == 0 || zeros == 0) failures++;
    $display("b_korr set=%0d clear=%0d", ones, zeros);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
