// ploc_top -- PLOC feature-extraction sensor.
//
// Chain: a ROWS x COLS matrix of PLOC cells (each a pulsing pixel with
// neighbour acquisition latches and interim storage) -> readout scanner on the
// central bus -> feature accumulators with 2**N normalisation and global
// threshold theta_M, whose vectors b'(m,n) are the sensor's main output ->
// correlation post-processor giving b_korr(m,n) on request.
//
// Ports: gray/init_phase feed the behavioural pixel models (in silicon these
// are the light on the photo diodes and the oscillators' random start phase).
// theta_m is the global significance threshold (THETA_W fractional bits).
// The b_* stream carries one significance vector per cell and 2**N features.
// k_mask, theta_corr, n_corr configure the correlation; corr_start runs one
// sweep over the stored vectors, giving one k_* word per cell and corr_done.
// feat_* exposes the raw feature stream from the bus for observation and
// scan_wrap marks the last cell of every scan.
//
// Sizing rule: a full scan (ROWS*COLS clocks) must not be longer than the
// shortest pixel inter-spike interval, 2**ACC_W / (2**GRAY_W - 1) clocks, or a
// bright cell may produce a new feature before its last one was read.
module ploc_top #(
  parameter int unsigned ROWS       = ploc_pkg::DEF_ROWS,
  parameter int unsigned COLS       = ploc_pkg::DEF_COLS,
  parameter int unsigned NB         = ploc_pkg::DEF_NB,
  parameter int unsigned GRAY_W     = ploc_pkg::DEF_GRAY_W,
  parameter int unsigned ACC_W      = ploc_pkg::DEF_ACC_W,
  parameter int unsigned NORM_SHIFT = ploc_pkg::DEF_NORM_SHIFT,
  parameter int unsigned THETA_W    = ploc_pkg::DEF_THETA_W,
  localparam int unsigned CELLS     = ROWS * COLS,
  localparam int unsigned AW        = (CELLS > 1) ? $clog2(CELLS) : 1,
  localparam int unsigned RW        = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW        = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned NFEAT     = 1 << NB
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [GRAY_W-1:0]  gray       [ROWS][COLS],
  input  logic [ACC_W-1:0]   init_phase [ROWS][COLS],
  input  logic [THETA_W-1:0] theta_m,
  input  logic [NFEAT-1:0]   k_mask,
  input  logic [THETA_W-1:0] theta_corr,
  input  logic [3:0]         n_corr,
  input  logic               corr_start,
  output logic               pulse      [ROWS][COLS],
  output logic               scan_wrap,
  output logic               feat_valid,
  output logic [AW-1:0]      feat_addr,
  output logic [NB-1:0]      feat,
  output logic               b_valid,
  output logic [AW-1:0]      b_addr,
  output logic [NFEAT-1:0]   b_vec,
  output logic               corr_busy,
  output logic               k_valid,
  output logic [AW-1:0]      k_addr,
  output logic               k_bit,
  output logic               corr_done
);

  logic          acc_ready;
  logic          sel_en;
  logic [RW-1:0] row_addr;
  logic [CW-1:0] col_addr;
  logic [NB-1:0] bus_feature;
  logic          bus_valid;

  ploc_matrix #(
    .ROWS(ROWS), .COLS(COLS), .NB(NB), .GRAY_W(GRAY_W), .ACC_W(ACC_W)
  ) u_matrix (
    .clk, .rst_n, .gray, .init_phase, .pulse,
    .sel_en, .row_addr, .col_addr, .bus_feature, .bus_valid
  );

  // Scanning starts once the accumulators are cleared; features captured
  // earlier wait in the cells' interim storage.
  readout_scanner #(.ROWS(ROWS), .COLS(COLS), .NB(NB)) u_scan (
    .clk, .rst_n, .enable(acc_ready),
    .sel_en, .row_addr, .col_addr, .bus_feature, .bus_valid,
    .feat_valid, .feat_addr, .feat, .scan_wrap
  );

  feature_accumulator #(
    .CELLS(CELLS), .NB(NB), .NORM_SHIFT(NORM_SHIFT), .THETA_W(THETA_W)
  ) u_acc (
    .clk, .rst_n, .ready(acc_ready),
    .feat_valid, .feat_addr, .feat, .theta_m,
    .b_valid, .b_addr, .b_vec
  );

  ploc_correlator #(.ROWS(ROWS), .COLS(COLS), .NB(NB), .THETA_W(THETA_W)) u_corr (
    .clk, .rst_n, .b_valid, .b_addr, .b_vec,
    .k_mask, .theta_corr, .n_corr, .start(corr_start),
    .busy(corr_busy), .k_valid, .k_addr, .k_bit, .done(corr_done)
  );

  initial begin
    assert (CELLS <= ((1 << ACC_W) / ((1 << GRAY_W) - 1)))
      else $error("ploc_top: scan period exceeds the shortest pixel interval");
  end

endmodule
