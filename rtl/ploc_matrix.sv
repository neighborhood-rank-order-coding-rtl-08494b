// ploc_matrix -- ROWS x COLS array of PLOC cells with their neighbour pulse
// wiring, row/column select decoders and the central readout bus.
//
// Every cell receives the pulse lines of its N4 (or N8) neighbours in the
// coefficient order of ploc_pkg. Neighbour positions outside the array are tied
// to zero, so border cells never set those bits (not specified by the paper;
// a choice of this design). row_addr and col_addr are decoded into one-hot row
// and column select lines; the selected cell drives the bus, which is the OR of
// all cells' gated outputs (every other cell drives zeros).
//
// Ports: gray/init_phase per cell (pixel model inputs), pulse per cell (for
// observation), row_addr/col_addr/sel_en choose the cell on the bus,
// bus_feature/bus_valid the combinational bus contents.
module ploc_matrix #(
  parameter int unsigned ROWS   = ploc_pkg::DEF_ROWS,
  parameter int unsigned COLS   = ploc_pkg::DEF_COLS,
  parameter int unsigned NB     = ploc_pkg::DEF_NB,
  parameter int unsigned GRAY_W = ploc_pkg::DEF_GRAY_W,
  parameter int unsigned ACC_W  = ploc_pkg::DEF_ACC_W,
  localparam int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW    = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [GRAY_W-1:0] gray       [ROWS][COLS],
  input  logic [ACC_W-1:0]  init_phase [ROWS][COLS],
  output logic              pulse      [ROWS][COLS],
  input  logic              sel_en,
  input  logic [RW-1:0]     row_addr,
  input  logic [CW-1:0]     col_addr,
  output logic [NB-1:0]     bus_feature,
  output logic              bus_valid
);

  logic [ROWS-1:0] row_sel;
  logic [COLS-1:0] col_sel;
  logic [NB-1:0]   cell_feature [ROWS][COLS];
  logic            cell_valid   [ROWS][COLS];

  // Row and column select decoders.
  always_comb begin
    for (int r = 0; r < ROWS; r++) row_sel[r] = sel_en && (row_addr == RW'(r));
    for (int c = 0; c < COLS; c++) col_sel[c] = sel_en && (col_addr == CW'(c));
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      logic [NB-1:0] nb_pulse;
      for (genvar i = 0; i < NB; i++) begin : g_nb
        localparam int NR = r + ploc_pkg::nb_drow(NB, i);
        localparam int NC = c + ploc_pkg::nb_dcol(NB, i);
        if (NR >= 0 && NR < ROWS && NC >= 0 && NC < COLS) begin : g_in
          assign nb_pulse[i] = pulse[NR][NC];
        end else begin : g_edge
          assign nb_pulse[i] = 1'b0;
        end
      end

      ploc_cell #(.NB(NB), .GRAY_W(GRAY_W), .ACC_W(ACC_W)) u_cell (
        .clk, .rst_n,
        .gray        (gray[r][c]),
        .init_phase  (init_phase[r][c]),
        .nb_pulse    (nb_pulse),
        .pulse_out   (pulse[r][c]),
        .row_sel     (row_sel[r]),
        .col_sel     (col_sel[c]),
        .bus_feature (cell_feature[r][c]),
        .bus_valid   (cell_valid[r][c])
      );
    end
  end

  // Central readout bus: OR of the gated cell outputs.
  always_comb begin
    bus_feature = '0;
    bus_valid   = 1'b0;
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        bus_feature = bus_feature | cell_feature[r][c];
        bus_valid   = bus_valid   | cell_valid[r][c];
      end
    end
  end

endmodule
