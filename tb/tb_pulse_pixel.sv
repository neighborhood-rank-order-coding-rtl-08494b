// tb_pulse_pixel -- self-checking testbench of the pixel oscillator model.
//
// For several grey values and start phases the number of pulses after n
// clocks must equal floor((init_phase + n*gray) / 2**ACC_W), the pulse count
// of an ideal integrate-and-fire cell, and every interval between two pulses
// must be floor or ceil of 2**ACC_W / gray clocks (rate linear in grey value).
module tb_pulse_pixel;
  localparam int unsigned GRAY_W = 8;
  localparam int unsigned ACC_W  = 10;
  localparam int unsigned P      = 1 << ACC_W;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [GRAY_W-1:0] gray;
  logic [ACC_W-1:0]  init_phase;
  logic pulse;
  int checks = 0, failures = 0;

  pulse_pixel #(.GRAY_W(GRAY_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_case(int unsigned g, int unsigned ph, int unsigned n);
    int unsigned cnt = 0, last = 0, isi_lo, isi_hi;
    bit seen = 0;
    rst_n = 1'b0; gray = GRAY_W'(g); init_phase = ACC_W'(ph);
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    isi_lo = P / g; isi_hi = (P + g - 1) / g;
    for (int unsigned t = 1; t <= n; t++) begin
      @(posedge clk); #1;
      if (pulse) begin
        cnt++;
        if (seen) begin
          checks++;
          if ((t - last) < isi_lo || (t - last) > isi_hi) begin
            failures++;
            $display("FAIL gray=%0d interval %0d not in [%0d,%0d]", g, t - last, isi_lo, isi_hi);
          end
        end
        seen = 1; last = t;
      end
    end
    checks++;
    if (cnt != (ph + n * g) / P) begin
      failures++;
      $display("FAIL gray=%0d phase=%0d: %0d pulses, expected %0d", g, ph, cnt, (ph + n * g) / P);
    end
  endtask

  initial begin
    gray = '0; init_phase = '0;
    run_case(255, 0, 3000);
    run_case(128, 1000, 3000);
    run_case(100, 17, 5000);
    run_case(3, 500, 4000);
    run_case(0, 900, 2000);
    for (int i = 0; i < 10; i++) run_case(1 + $urandom_range(254), $urandom_range(P - 1), 4000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
