// feature_accumulator -- per-cell feature accumulators at the edge of the
// PLOC matrix, with normalisation and the global significance threshold.
//
// For every cell the accumulator keeps one occurrence counter N_k per feature
// number k and a count of all features received. When the cell's 2**N-th
// feature arrives, the significance vector b'(m,n) is formed:
//   b'_k = 1  if  N_k / 2**N >= theta_M,
// where dividing by 2**N is only a shift: N_k, a fraction with N fractional
// bits, is shifted left by THETA_W-N bits and compared with theta_M (THETA_W
// fractional bits). The vector is sent out with the cell address and all of
// that cell's counters restart from zero, so each cell is normalised over its
// own 2**N inter-spike intervals.
//
// Counters of all cells are kept in one array, one word per cell, read and
// written back in the clock a feature word arrives (one per clock at most).
// After reset a sequencer zeroes the array, one cell per clock; ready is low
// until then, and feature words arriving before ready are ignored.
//
// Timing: b_valid/b_addr/b_vec are registered, one clock after the feature
// word that completed the cell.
module feature_accumulator #(
  parameter int unsigned CELLS      = ploc_pkg::DEF_ROWS * ploc_pkg::DEF_COLS,
  parameter int unsigned NB         = ploc_pkg::DEF_NB,
  parameter int unsigned NORM_SHIFT = ploc_pkg::DEF_NORM_SHIFT,
  parameter int unsigned THETA_W    = ploc_pkg::DEF_THETA_W,
  localparam int unsigned AW        = (CELLS > 1) ? $clog2(CELLS) : 1,
  localparam int unsigned NFEAT     = 1 << NB,
  localparam int unsigned CNT_W     = NORM_SHIFT + 1
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic               ready,
  input  logic               feat_valid,
  input  logic [AW-1:0]      feat_addr,
  input  logic [NB-1:0]      feat,
  input  logic [THETA_W-1:0] theta_m,
  output logic               b_valid,
  output logic [AW-1:0]      b_addr,
  output logic [NFEAT-1:0]   b_vec
);

  typedef struct packed {
    logic [NORM_SHIFT-1:0]           total;
    logic [NFEAT-1:0][CNT_W-1:0]     cnt;
  } acc_word_t;

  acc_word_t       mem [CELLS];
  acc_word_t       rd_word, wr_word;
  logic            complete;
  logic [NFEAT-1:0] vec_next;
  logic [AW-1:0]   clr_addr;

  // Read-modify-write of one cell's counters.
  always_comb begin
    rd_word  = mem[feat_addr];
    wr_word  = rd_word;
    wr_word.cnt[feat] = rd_word.cnt[feat] + 1'b1;
    wr_word.total     = rd_word.total + 1'b1;
    complete = (rd_word.total == {NORM_SHIFT{1'b1}});
    for (int k = 0; k < NFEAT; k++) begin
      vec_next[k] = ({wr_word.cnt[k], {(THETA_W - NORM_SHIFT){1'b0}}}
                     >= (THETA_W + 1)'(theta_m));
    end
    if (complete) wr_word = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ready    <= 1'b0;
      clr_addr <= '0;
      b_valid  <= 1'b0;
      b_addr   <= '0;
      b_vec    <= '0;
    end else begin
      b_valid <= 1'b0;
      if (!ready) begin
        mem[clr_addr] <= '0;
        clr_addr      <= clr_addr + 1'b1;
        if (clr_addr == AW'(CELLS - 1)) ready <= 1'b1;
      end else if (feat_valid) begin
        mem[feat_addr] <= wr_word;
        if (complete) begin
          b_valid <= 1'b1;
          b_addr  <= feat_addr;
          b_vec   <= vec_next;
        end
      end
    end
  end

  initial begin
    assert (NORM_SHIFT >= 1 && NORM_SHIFT <= THETA_W)
      else $error("feature_accumulator: NORM_SHIFT must be in 1..THETA_W");
  end

endmodule
