// tb_ploc_acquire -- self-checking testbench of the acquisition latches.
//
// Random neighbour and centre pulses. A reference keeps, per neighbour, whether
// it pulsed since the last centre pulse; acq_state must equal that OR the
// pulses of the present clock, and must be exactly the present pulses in the
// clock after a centre pulse (latches reset).
module tb_ploc_acquire;
  localparam int unsigned NB = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NB-1:0] nb_pulse;
  logic centre_pulse;
  logic [NB-1:0] acq_state;
  logic [NB-1:0] ref_latch;
  int checks = 0, failures = 0, resets_seen = 0;

  ploc_acquire #(.NB(NB)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    nb_pulse = '0; centre_pulse = 1'b0; ref_latch = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      for (int i = 0; i < NB; i++) nb_pulse[i] = ($urandom_range(9) == 0);
      centre_pulse = ($urandom_range(7) == 0);
      #1;
      checks++;
      if (acq_state !== (ref_latch | nb_pulse)) begin
        failures++;
        $display("FAIL t=%0d acq=%b expected %b", t, acq_state, ref_latch | nb_pulse);
      end
      @(posedge clk);
      if (centre_pulse) begin ref_latch = '0; resets_seen++; end
      else ref_latch = ref_latch | nb_pulse;
    end
    checks++;
    if (resets_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
