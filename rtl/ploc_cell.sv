// ploc_cell -- one PLOC cell: pixel oscillator, acquisition latches and
// interim storage with bus control.
//
// The cell's own pixel pulse (pulse_out) goes to its neighbours and, inside
// the cell, marks the end of one inter-spike interval: the acquisition word
// (which neighbours pulsed during the interval) is stored as the cell's
// feature number and flagged valid for readout. The feature number is the sum
// of the orientation coefficients (ploc_pkg) of the neighbours that pulsed.
//
// Ports: gray / init_phase drive the pixel model; nb_pulse[i] are the pulses of
// neighbour i (tie to 0 where there is none); row_sel/col_sel select the cell
// for the central bus; bus_feature/bus_valid are zero unless selected.
module ploc_cell #(
  parameter int unsigned NB     = ploc_pkg::DEF_NB,
  parameter int unsigned GRAY_W = ploc_pkg::DEF_GRAY_W,
  parameter int unsigned ACC_W  = ploc_pkg::DEF_ACC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [GRAY_W-1:0] gray,
  input  logic [ACC_W-1:0]  init_phase,
  input  logic [NB-1:0]     nb_pulse,
  output logic              pulse_out,
  input  logic              row_sel,
  input  logic              col_sel,
  output logic [NB-1:0]     bus_feature,
  output logic              bus_valid
);

  logic [NB-1:0] acq_state;

  pulse_pixel #(.GRAY_W(GRAY_W), .ACC_W(ACC_W)) u_pixel (
    .clk, .rst_n, .gray, .init_phase, .pulse(pulse_out)
  );

  ploc_acquire #(.NB(NB)) u_acq (
    .clk, .rst_n, .nb_pulse, .centre_pulse(pulse_out), .acq_state
  );

  ploc_store #(.NB(NB)) u_store (
    .clk, .rst_n, .centre_pulse(pulse_out), .acq_state,
    .row_sel, .col_sel, .bus_feature, .bus_valid
  );

endmodule
