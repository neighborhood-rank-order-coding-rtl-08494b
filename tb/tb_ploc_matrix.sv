// tb_ploc_matrix -- self-checking testbench of the PLOC cell matrix.
//
// A 4 x 5 matrix with random grey values and start phases. The reference
// models every pixel (integrate-and-fire closed form), builds each cell's
// feature from the pulses of its N4 neighbours (top 1, left 2, right 4,
// bottom 8; nothing beyond the border) and tracks the valid flags. Random cells
// are selected over the bus; every bus word and every pulse is compared.
module tb_ploc_matrix;
  localparam int unsigned ROWS = 4, COLS = 5, NB = 4, GRAY_W = 8, ACC_W = 9;
  localparam int unsigned P = 1 << ACC_W;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [GRAY_W-1:0] gray       [ROWS][COLS];
  logic [ACC_W-1:0]  init_phase [ROWS][COLS];
  logic              pulse      [ROWS][COLS];
  logic sel_en;
  logic [1:0] row_addr;
  logic [2:0] col_addr;
  logic [NB-1:0] bus_feature;
  logic bus_valid;
  int checks = 0, failures = 0, reads_valid = 0, border_hits = 0;

  ploc_matrix #(.ROWS(ROWS), .COLS(COLS), .NB(NB), .GRAY_W(GRAY_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int unsigned   acc   [ROWS][COLS];
  logic          exp_p [ROWS][COLS];
  logic [NB-1:0] latch [ROWS][COLS];
  logic [NB-1:0] feat  [ROWS][COLS];
  logic          vld   [ROWS][COLS];

  function automatic logic nbp(int r, int c);
    if (r < 0 || r >= ROWS || c < 0 || c >= COLS) return 1'b0;
    return exp_p[r][c];
  endfunction

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        gray[r][c] = GRAY_W'(20 + $urandom_range(180));
        init_phase[r][c] = ACC_W'($urandom_range(P - 1));
        acc[r][c] = init_phase[r][c]; exp_p[r][c] = 0;
        latch[r][c] = '0; feat[r][c] = '0; vld[r][c] = 0;
      end
    sel_en = 0; row_addr = '0; col_addr = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 20000; t++) begin
      int rr, cc;
      @(negedge clk);
      sel_en = ($urandom_range(3) != 0);
      rr = $urandom_range(ROWS - 1); cc = $urandom_range(COLS - 1);
      row_addr = 2'(rr); col_addr = 3'(cc);
      #1;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (pulse[r][c] !== exp_p[r][c]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d pulse[%0d][%0d]", t, r, c);
          end
        end
      checks++;
      if (sel_en) begin
        if (bus_valid !== vld[rr][cc] || bus_feature !== feat[rr][cc]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d read (%0d,%0d) %b/%0d expected %b/%0d", t, rr, cc,
                                      bus_valid, bus_feature, vld[rr][cc], feat[rr][cc]);
        end
        if (vld[rr][cc]) reads_valid++;
      end else if (bus_valid !== 1'b0 || bus_feature !== '0) failures++;
      @(posedge clk);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          logic [NB-1:0] np;
          np = {nbp(r + 1, c), nbp(r, c + 1), nbp(r, c - 1), nbp(r - 1, c)};
          if (exp_p[r][c]) begin
            feat[r][c] = latch[r][c] | np; latch[r][c] = '0; vld[r][c] = 1;
            if ((r == 0 || c == 0 || r == ROWS - 1 || c == COLS - 1) && feat[r][c] != 0) border_hits++;
          end else begin
            latch[r][c] |= np;
            if (sel_en && r == rr && c == cc) vld[r][c] = 0;
          end
        end
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          acc[r][c] += gray[r][c];
          exp_p[r][c] = (acc[r][c] >= P);
          if (exp_p[r][c]) acc[r][c] -= P;
        end
    end
    checks++;
    if (reads_valid < 100 || border_hits == 0) failures++;
    $display("valid reads=%0d border features=%0d", reads_valid, border_hits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
