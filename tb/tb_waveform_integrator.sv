// Self-checking testbench of the waveform integral block.
//
// Drives random 12-bit ADC codes, below and above the trigger threshold in
// random runs. An independent reference keeps the ADC history and its own
// armed/busy state: a sample above the threshold while idle and armed, in
// cycle n, must give the sum of the codes of cycles n..n+26 with charge_valid
// in cycle n+27 exactly, and busy high in cycles n+1..n+26. Samples above the
// threshold during a sum (dead time) and before re-arming must not trigger;
// the test counts both and fails if either never occurred. Full-scale codes
// check that the largest sum fits.
`timescale 1ns / 1ps
module tb_waveform_integrator;
  localparam int ADC_W = 12, N_SUM = 27, CHARGE_W = 17;

  logic clk = 1'b0, rst_n, busy, charge_valid;
  logic [ADC_W-1:0]    thr = 12'd200;
  logic [ADC_W-1:0]    adc_data;
  logic [CHARGE_W-1:0] charge;

  int checks = 0, failures = 0;
  int cycle = 0;
  int ignored_starts = 0, unarmed = 0, sums = 0;
  bit armed = 0;
  bit hi_run = 0;

  always #8 clk = ~clk;   // 62.5 MHz

  waveform_integrator #(.ADC_W(ADC_W), .N_SUM(N_SUM)) dut (
    .clk(clk), .rst_n(rst_n), .adc_data(adc_data), .trig_threshold(thr),
    .busy(busy), .charge_valid(charge_valid), .charge(charge)
  );

  int adc_hist [int];
  int ref_busy_until = -1;   // last cycle of the running sum
  int ref_done_cycle = -1;
  longint ref_sum;

  // Drive inputs after the edge, check before the next one.
  always @(posedge clk) begin
    cycle <= cycle + 1;
  end

  initial begin
    adc_data = '0;
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      // stimulus for this cycle
      if ($urandom_range(7) == 0) hi_run = !hi_run;   // runs of high / low codes
      if (c >= 1000 && c < 1100) adc_data = '1;
      else if (hi_run)           adc_data = ADC_W'($urandom_range(201, 4095));
      else                       adc_data = ADC_W'($urandom_range(0, 200));
      adc_hist[cycle] = int'(adc_data);
      // busy must equal the reference dead time (cycles n+1 .. n+26)
      checks++;
      if (busy !== (cycle <= ref_busy_until && cycle >= ref_busy_until - (N_SUM - 2))) begin
        failures++;
        $display("FAIL: busy=%0b in cycle %0d", busy, cycle);
      end
      // charge_valid only in the completion cycle, with the right sum
      if (cycle == ref_done_cycle || charge_valid) begin
        checks++;
        ref_sum = 0;
        for (int k = ref_done_cycle - N_SUM; k < ref_done_cycle; k++) ref_sum += adc_hist[k];
        if (!(charge_valid && cycle == ref_done_cycle && longint'(charge) == ref_sum)) begin
          failures++;
          $display("FAIL: cycle %0d valid=%0b charge=%0d, expected valid in %0d with %0d",
                   cycle, charge_valid, charge, ref_done_cycle, ref_sum);
        end
        if (charge_valid) sums++;
      end
      // reference model
      if (adc_data > thr) begin
        if (cycle <= ref_busy_until) ignored_starts++;
        else if (!armed)             unarmed++;
        else begin
          ref_busy_until = cycle + N_SUM - 1;
          ref_done_cycle = cycle + N_SUM;
          armed = 0;
        end
      end else if (cycle > ref_busy_until) begin
        armed = 1;
      end
    end
    checks++;
    if (ignored_starts == 0 || unarmed == 0 || sums < 10) begin
      failures++;
      $display("FAIL: dead-time samples %0d, unarmed %0d, sums %0d", ignored_starts, unarmed, sums);
    end
    $display("sums=%0d above threshold in dead time=%0d before re-arm=%0d", sums, ignored_starts, unarmed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
