// pulse_pixel -- behavioural model of the pulsing pixel cell.
//
// Behavioural model: in silicon this is an analog photo-current driven
// oscillator (photo diode, integrator, threshold and reset). Here it is a
// discrete-time, synthesizable stand-in so that the digital PLOC logic can be
// simulated from a grey-value image.
//
// Each clock the integrator adds the grey value; when it passes 2**ACC_W it
// wraps (keeping the remainder, as an ideal integrate-and-fire cell would) and
// the cell emits a one-clock pulse. The pulse rate is therefore exactly
// gray / 2**ACC_W pulses per clock, linear in the grey value, which is the
// conversion the PLOC operator assumes. init_phase is loaded at reset and sets
// the arbitrary starting phase of the free-running oscillator. A grey value of
// zero never pulses. Jitter is not modelled. Reset is asynchronous; the first
// clock after reset integrates from init_phase.
//
// Ports: gray (grey value, may change at any time), init_phase (integrator
// value the first clock after reset starts from), pulse (registered, one clock wide).
module pulse_pixel #(
  parameter int unsigned GRAY_W = ploc_pkg::DEF_GRAY_W,
  parameter int unsigned ACC_W  = ploc_pkg::DEF_ACC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [GRAY_W-1:0] gray,
  input  logic [ACC_W-1:0]  init_phase,
  output logic              pulse
);

  logic [ACC_W-1:0] acc;
  logic             loaded;   // low until the first clock after reset
  logic [ACC_W:0]   sum;

  // The first clock after reset integrates from init_phase, later clocks
  // from the integrator.
  assign sum = {1'b0, loaded ? acc : init_phase} + (ACC_W + 1)'(gray);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc    <= '0;
      loaded <= 1'b0;
      pulse  <= 1'b0;
    end else begin
      acc    <= sum[ACC_W-1:0];
      loaded <= 1'b1;
      pulse  <= sum[ACC_W];
    end
  end

endmodule
