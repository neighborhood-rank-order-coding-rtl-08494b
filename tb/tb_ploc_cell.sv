// tb_ploc_cell -- self-checking testbench of one complete PLOC cell.
//
// The cell's own pixel runs from a fixed grey value; the four neighbour pulse
// lines are driven with random sparse pulses, and the cell is read at random
// clocks. An independent reference predicts the own pulse times from the
// integrate-and-fire closed form, the feature number of every inter-spike
// interval (sum of coefficients 1/2/4/8 of the neighbours that pulsed), and the
// valid flag. Every read is compared with it, and the pulse output too.
module tb_ploc_cell;
  localparam int unsigned NB = 4, GRAY_W = 8, ACC_W = 9;
  localparam int unsigned P = 1 << ACC_W;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [GRAY_W-1:0] gray;
  logic [ACC_W-1:0]  init_phase;
  logic [NB-1:0]     nb_pulse, bus_feature;
  logic pulse_out, row_sel, col_sel, bus_valid;
  int checks = 0, failures = 0, reads = 0, isis = 0;

  ploc_cell #(.NB(NB), .GRAY_W(GRAY_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned acc_total, seen;
    logic [NB-1:0] ref_latch, ref_feat;
    logic ref_valid, exp_pulse;
    gray = 8'd37; init_phase = 9'd300; nb_pulse = '0; row_sel = 0; col_sel = 0;
    ref_latch = '0; ref_feat = '0; ref_valid = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    acc_total = 300; exp_pulse = 0;                    // integrator value at reset release
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      for (int i = 0; i < NB; i++) nb_pulse[i] = ($urandom_range(40) == 0);
      row_sel = ($urandom_range(3) == 0);
      col_sel = ($urandom_range(1) == 0);
      #1;
      checks++;
      if (pulse_out !== exp_pulse) begin
        failures++;
        $display("FAIL t=%0d pulse=%b expected %b", t, pulse_out, exp_pulse);
      end
      if (row_sel && col_sel) begin
        checks++; reads++;
        if (bus_valid !== ref_valid || (ref_valid && bus_feature !== ref_feat)) begin
          failures++;
          $display("FAIL t=%0d read %b/%0d expected %b/%0d", t, bus_valid, bus_feature, ref_valid, ref_feat);
        end
      end else begin
        checks++;
        if (bus_valid !== 1'b0 || bus_feature !== '0) failures++;
      end
      @(posedge clk);
      if (pulse_out) begin
        ref_feat = ref_latch | nb_pulse; ref_latch = '0; ref_valid = 1; isis++;
      end else begin
        ref_latch |= nb_pulse;
        if (row_sel && col_sel) ref_valid = 0;
      end
      // own pulse: high in the clock after the integrator passes P
      acc_total += gray;
      exp_pulse = (acc_total >= P);
      if (exp_pulse) acc_total -= P;
    end
    checks++;
    if (isis < 100 || reads < 100) failures++;
    $display("intervals=%0d reads=%0d", isis, reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
