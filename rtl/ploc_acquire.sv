// ploc_acquire -- feature acquisition latches of one PLOC cell.
//
// One set/reset latch per neighbour. A pulse from neighbour i sets latch i; a
// pulse of the cell's own pixel (centre_pulse) resets all of them, so between
// two own pulses the latches record which neighbours fired at least once
// during that inter-spike interval.
//
// The paper resets the latches with a slightly delayed copy of the centre
// pulse so that the slave latches (ploc_store) safely take the old contents
// first. In this clocked version the same order is obtained within one clock
// edge: acq_state (latches OR the neighbour pulses of the present clock) is what
// the slaves take on a centre pulse, and the latches are cleared on that same
// edge. A neighbour pulse in the same clock as the centre pulse therefore
// counts towards the interval that ends (a choice of this design).
//
// Ports: nb_pulse[i] one-clock pulses of the neighbours, centre_pulse the
// cell's own pulse, acq_state the combinational feature word to be stored.
module ploc_acquire #(
  parameter int unsigned NB = ploc_pkg::DEF_NB
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NB-1:0] nb_pulse,
  input  logic          centre_pulse,
  output logic [NB-1:0] acq_state
);

  logic [NB-1:0] latch_q;

  assign acq_state = latch_q | nb_pulse;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            latch_q <= '0;
    else if (centre_pulse) latch_q <= '0;          // delayed reset
    else                   latch_q <= acq_state;   // set by neighbour pulses
  end

endmodule
