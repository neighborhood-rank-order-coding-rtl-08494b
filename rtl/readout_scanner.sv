// readout_scanner -- scans the PLOC matrix over the central readout bus.
//
// While enabled, the scanner selects one cell per clock, row by row, and
// starts over after the last cell, so every cell is visited once every
// ROWS*COLS clocks. For no feature to be lost this period must not exceed the
// shortest inter-spike interval of any pixel (the paper scans "at the maximum
// pixel pulse rate"; ploc_top checks the sizes). A cell whose valid flag is set
// is forwarded as one word of the feature stream: feat_valid, the linear cell
// address row*COLS+col and the feature number. Cells without a valid flag are
// skipped; this is the duplicate suppression the valid bit provides.
//
// Timing: the bus is sampled in the select clock; the stream word appears one
// clock later (registered). scan_wrap pulses in the clock that selects the
// last cell. sel_en is enable itself: the select lines are active whenever
// the scanner runs.
module readout_scanner #(
  parameter int unsigned ROWS = ploc_pkg::DEF_ROWS,
  parameter int unsigned COLS = ploc_pkg::DEF_COLS,
  parameter int unsigned NB   = ploc_pkg::DEF_NB,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW  = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned AW  = ((ROWS * COLS) > 1) ? $clog2(ROWS * COLS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enable,
  output logic          sel_en,
  output logic [RW-1:0] row_addr,
  output logic [CW-1:0] col_addr,
  input  logic [NB-1:0] bus_feature,
  input  logic          bus_valid,
  output logic          feat_valid,
  output logic [AW-1:0] feat_addr,
  output logic [NB-1:0] feat,
  output logic          scan_wrap
);

  logic last_col, last_row;

  assign sel_en    = enable;
  assign last_col  = (col_addr == CW'(COLS - 1));
  assign last_row  = (row_addr == RW'(ROWS - 1));
  assign scan_wrap = enable && last_col && last_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_addr   <= '0;
      col_addr   <= '0;
      feat_valid <= 1'b0;
      feat_addr  <= '0;
      feat       <= '0;
    end else begin
      feat_valid <= enable && bus_valid;
      if (enable && bus_valid) begin
        feat_addr <= AW'(row_addr * COLS + col_addr);
        feat      <= bus_feature;
      end
      if (enable) begin
        if (last_col) begin
          col_addr <= '0;
          row_addr <= last_row ? '0 : row_addr + 1'b1;
        end else begin
          col_addr <= col_addr + 1'b1;
        end
      end
    end
  end

endmodule
