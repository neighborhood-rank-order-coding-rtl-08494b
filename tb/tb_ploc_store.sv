// tb_ploc_store -- self-checking testbench of interim storage and bus control.
//
// Random centre pulses, acquisition words and row/column selects. Reference:
// the slave word is the acquisition word of the last centre pulse; the valid
// flag is set by a centre pulse and cleared by a read (both select lines high),
// a centre pulse winning over a read in the same clock. The bus must be zero
// unless the cell is selected. Counts reads of a cell without a new feature
// (duplicate suppression) and same-clock read/pulse collisions.
module tb_ploc_store;
  localparam int unsigned NB = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic centre_pulse, row_sel, col_sel;
  logic [NB-1:0] acq_state, bus_feature;
  logic bus_valid;
  logic [NB-1:0] ref_slave;
  logic ref_valid;
  int checks = 0, failures = 0, dup = 0, collide = 0;

  ploc_store #(.NB(NB)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    centre_pulse = 0; row_sel = 0; col_sel = 0; acq_state = '0;
    ref_slave = '0; ref_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 8000; t++) begin
      @(negedge clk);
      centre_pulse = ($urandom_range(5) == 0);
      acq_state    = NB'($urandom);
      row_sel      = $urandom_range(1);
      col_sel      = $urandom_range(1);
      #1;
      checks++;
      if ((row_sel && col_sel) ? (bus_valid !== ref_valid || bus_feature !== ref_slave)
                               : (bus_valid !== 1'b0 || bus_feature !== '0)) begin
        failures++;
        $display("FAIL t=%0d sel=%b%b bus=%b/%b expected %b/%b", t, row_sel, col_sel,
                 bus_valid, bus_feature, ref_valid, ref_slave);
      end
      if (row_sel && col_sel && !ref_valid) dup++;
      if (row_sel && col_sel && centre_pulse) collide++;
      @(posedge clk);
      if (centre_pulse) begin ref_slave = acq_state; ref_valid = 1; end
      else if (row_sel && col_sel) ref_valid = 0;
    end
    checks++;
    if (dup == 0 || collide == 0) failures++;
    $display("duplicate reads suppressed=%0d read/pulse collisions=%0d", dup, collide);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
