// ploc_store -- interim storage of a recognised feature and bus control.
//
// Slave flip-flops take the acquisition word on every pulse of the cell's own
// pixel, so they hold the feature of the last complete inter-spike interval.
// A valid flag is set on the same pulse and cleared when the cell is read, so
// that a scan which visits the cell again before its next pulse does not read
// the same feature twice. The cell is selected when both its row and column
// select lines are high (the AND gate). While selected it drives the feature
// and the valid flag onto the central readout bus.
//
// The paper's tristate bus drivers are replaced by AND gating (unselected
// cells drive zeros) and the bus is the OR of all cells (ploc_matrix): a
// design choice so that the bus is plain synthesizable logic. If a new pulse
// and a read fall in the same clock, the bus shows the old feature and the
// flag stays set for the new one.
//
// Timing: bus outputs are combinational from the select lines; the flag is
// cleared at the clock edge that ends the select cycle.
module ploc_store #(
  parameter int unsigned NB = ploc_pkg::DEF_NB
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          centre_pulse,
  input  logic [NB-1:0] acq_state,
  input  logic          row_sel,
  input  logic          col_sel,
  output logic [NB-1:0] bus_feature,
  output logic          bus_valid
);

  logic [NB-1:0] slave_q;
  logic          valid_q;
  logic          sel;

  assign sel = row_sel & col_sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slave_q <= '0;
      valid_q <= 1'b0;
    end else begin
      if (centre_pulse) slave_q <= acq_state;
      if (centre_pulse)  valid_q <= 1'b1;
      else if (sel)      valid_q <= 1'b0;
    end
  end

  assign bus_feature = sel ? slave_q : '0;
  assign bus_valid   = sel & valid_q;

endmodule
