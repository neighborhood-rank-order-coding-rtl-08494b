// tb_readout_scanner -- self-checking testbench of the bus scanner.
//
// A 3 x 5 behavioural bus: each position holds a random valid flag and
// feature, answers combinationally to the scanner's address and clears its flag
// when read, while new features appear at random. The scanner must visit the
// cells in row-major order, one per enabled clock, wrap after the last one,
// and forward exactly the valid cells with the right address, one clock later.
module tb_readout_scanner;
  localparam int unsigned ROWS = 3, COLS = 5, NB = 4;
  logic clk = 1'b0, rst_n = 1'b0, enable;
  logic sel_en, feat_valid, scan_wrap, bus_valid;
  logic [1:0] row_addr;
  logic [2:0] col_addr;
  logic [3:0] feat_addr;
  logic [NB-1:0] bus_feature, feat;
  int checks = 0, failures = 0, forwarded = 0, skipped = 0, wraps = 0;

  readout_scanner #(.ROWS(ROWS), .COLS(COLS), .NB(NB)) dut (.*);

  logic          v [ROWS*COLS];
  logic [NB-1:0] f [ROWS*COLS];
  int exp_pos;
  logic exp_fv; int exp_fa; logic [NB-1:0] exp_f;

  always_comb begin
    bus_valid   = sel_en && v[row_addr * COLS + col_addr];
    bus_feature = sel_en ? f[row_addr * COLS + col_addr] : '0;
  end

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < ROWS * COLS; i++) begin v[i] = 0; f[i] = '0; end
    enable = 0; exp_pos = 0; exp_fv = 0; exp_fa = 0; exp_f = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      enable = ($urandom_range(7) != 0);
      #1;
      checks++;
      if (feat_valid !== exp_fv || (exp_fv && (feat_addr !== 4'(exp_fa) || feat !== exp_f))) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d stream %b/%0d/%0d expected %b/%0d/%0d", t,
                                    feat_valid, feat_addr, feat, exp_fv, exp_fa, exp_f);
      end
      checks++;
      if (enable && (int'(row_addr) * COLS + int'(col_addr) != exp_pos)) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d address %0d,%0d expected pos %0d", t, row_addr, col_addr, exp_pos);
      end
      checks++;
      if (scan_wrap !== (enable && exp_pos == ROWS * COLS - 1)) failures++;
      @(posedge clk);
      exp_fv = enable && v[exp_pos];
      #1;  // change the bus model only after the scanner has sampled it
      if (exp_fv) begin exp_fa = exp_pos; exp_f = f[exp_pos]; v[exp_pos] = 0; forwarded++; end
      else if (enable) skipped++;
      if (enable) begin
        if (exp_pos == ROWS * COLS - 1) wraps++;
        exp_pos = (exp_pos + 1) % (ROWS * COLS);
      end
      for (int i = 0; i < ROWS * COLS; i++)
        if ($urandom_range(15) == 0) begin v[i] = 1; f[i] = NB'($urandom); end
    end
    checks++;
    if (forwarded < 100 || skipped < 100 || wraps < 10) failures++;
    $display("forwarded=%0d skipped=%0d wraps=%0d", forwarded, skipped, wraps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
