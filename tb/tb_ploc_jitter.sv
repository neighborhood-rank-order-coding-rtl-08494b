// tb_ploc_jitter -- pixel-jitter workload on one PLOC cell.
//
// The centre pixel pulses with period T2 = 2048 clocks (grey 1, ACC_W 11).
// Each of the four neighbours pulses at the same rate, so ideally every
// neighbour bit is set in every interval. Each neighbour pulse is shifted
// by a triangular jitter in [-Tj, +Tj] (the sum of two uniform variates),
// with Tj = 102 clocks, about T2/20 like the 1 ms / 20 ms example of the
// jitter analysis. The relative phase is redrawn uniformly every 16 intervals.
//
// Checks:
// * every feature the cell reports equals the reference built from the
//   driven pulses;
// * the fraction of neighbour pulses jittered out of their nominal interval
//   matches Tj / (3 T2) (about 1.7 %);
// * every omitted bit is caused by such a pulse, i.e. the omitted-bit rate is
//   at most that fraction.
module tb_ploc_jitter;
  localparam int unsigned NB = 4, GRAY_W = 8, ACC_W = 11;
  localparam int T2 = 1 << ACC_W, TJ = 102, K = 8000, SEG = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [GRAY_W-1:0] gray;
  logic [ACC_W-1:0]  init_phase;
  logic [NB-1:0]     nb_pulse, bus_feature;
  logic pulse_out, row_sel, col_sel, bus_valid;
  int checks = 0, failures = 0;

  ploc_cell #(.NB(NB), .GRAY_W(GRAY_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat ((K + 4) * T2) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pulse schedule: time (clocks after reset release) of each neighbour pulse
  int sched [NB][K];
  int nxt [NB];

  // interval index of a clock: a pulse in the clock of centre pulse k
  // (clock k*T2) belongs to interval k, which spans clocks (k-1)*T2+1 .. k*T2
  function automatic int interval_of(int t);
    return (t + T2 - 1) / T2;
  endfunction

  initial begin
    int outs = 0, pulses = 0, missed = 0, intervals = 0, feats = 0;
    logic [NB-1:0] latch, exp_feat;
    logic exp_valid;
    int phase [NB];
    for (int i = 0; i < NB; i++) begin
      nxt[i] = 0;
      for (int k = 0; k < K; k++) begin
        int nominal, j;
        if (k % SEG == 0) phase[i] = 1 + $urandom_range(T2 - 1);
        nominal = k * T2 + phase[i];               // lies in interval k+1
        j = int'($urandom_range(TJ)) + int'($urandom_range(TJ)) - TJ;
        sched[i][k] = nominal + j;
        pulses++;
        if (interval_of(nominal + j) != interval_of(nominal)) outs++;
      end
    end
    gray = 8'd1; init_phase = '0; nb_pulse = '0; row_sel = 1; col_sel = 1;
    latch = '0; exp_feat = '0; exp_valid = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // t counts rising edges since reset release; the clock observed after
    // edge t+1 shows the pulses scheduled for time t
    for (int t = 0; t <= K * T2; t++) begin
      logic exp_centre;
      @(negedge clk);
      for (int i = 0; i < NB; i++) begin
        nb_pulse[i] = 1'b0;
        while (nxt[i] < K && sched[i][nxt[i]] <= t) begin
          if (sched[i][nxt[i]] == t) nb_pulse[i] = 1'b1;
          nxt[i]++;
        end
      end
      exp_centre = (t > 0 && t % T2 == 0);
      #1;
      checks++;
      if (pulse_out !== exp_centre) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d centre pulse %b", t, pulse_out);
      end
      // the cell is selected in every clock: each feature is read once
      checks++;
      if (bus_valid !== exp_valid || (exp_valid && bus_feature !== exp_feat)) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d bus %b/%b expected %b/%b", t, bus_valid, bus_feature, exp_valid, exp_feat);
      end
      exp_valid = 0;
      if (exp_centre) begin
        exp_feat = latch | nb_pulse; latch = '0; exp_valid = 1;
        // skip the first interval (it starts at reset, not at a centre pulse)
        if (t > T2 && t < K * T2) begin
          intervals++;
          for (int i = 0; i < NB; i++) if (!exp_feat[i]) missed++;
        end
        feats++;
      end else latch |= nb_pulse;
      @(posedge clk);
    end
    begin
      real r_out, r_miss, paper;
      r_out  = real'(outs) / real'(pulses);
      r_miss = real'(missed) / real'(intervals * NB);
      paper  = real'(TJ) / (3.0 * real'(T2));
      $display("pulses=%0d jittered out of their interval=%0d (%0.2f %%), Tj/(3 T2) = %0.2f %%",
               pulses, outs, 100.0 * r_out, 100.0 * paper);
      $display("neighbour bits omitted=%0d of %0d (%0.2f %%), features read=%0d",
               missed, intervals * NB, 100.0 * r_miss, feats);
      checks++;
      if (r_out < 0.75 * paper || r_out > 1.25 * paper) begin
        failures++; $display("FAIL out-of-interval rate");
      end
      checks++;
      if (missed == 0 || r_miss > r_out) begin
        failures++; $display("FAIL omitted-bit rate");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
