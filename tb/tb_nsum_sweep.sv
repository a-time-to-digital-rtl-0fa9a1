// Summation-point sweep of the waveform integral: the same shaped pulses
// summed over 27, 29 and 31 ADC samples by three waveform_integrator
// instances fed from one ADC stream.
//
// Each pulse is v(t) = A * (t / 80 ns)^2 * exp(2 - t / 40 ns) with A = 3500
// codes, noise-free, so the only thing that changes from pulse to pulse is
// its phase to the 16 ns ADC clock. The start time is stepped through all 48
// fine-time bins of one period (1/3 ns steps); pulses are 64 periods apart so
// none overlaps the previous tail. The testbench finds the trigger sample and
// adds up the N samples itself and compares every charge and its cycle with
// each instance. It then prints, for each N, RMS/mean of the 48 charges and
// checks that the phase-dependent error shrinks as N grows, the trend the
// method's analysis predicts: a longer sum cuts off less of the tail.
//
// The amplitude, pulse spacing and threshold are this testbench's choices;
// the three N values are the ones whose error curves the method compares.
`timescale 1ns / 1ps
module tb_nsum_sweep;
  import charge_meas_pkg::*;

  localparam int N_CFG = 3;
  localparam int NS [N_CFG] = '{27, 29, 31};
  localparam int SPACING = 64, N_PULSE = 48, THR = 30;
  localparam real AMP = 3500.0;

  logic             clk = 1'b0, rst_n = 1'b0;
  logic [ADC_W-1:0] adc_data = '0;
  logic [N_CFG-1:0] busy, charge_valid;
  logic [17:0]      charge [N_CFG];

  always #8 clk = ~clk;

  for (genvar g = 0; g < N_CFG; g++) begin : g_int
    logic [CHARGE_W-1:0] q;
    waveform_integrator #(.N_SUM(NS[g])) u_int (
      .clk(clk), .rst_n(rst_n), .adc_data(adc_data), .trig_threshold(ADC_W'(THR)),
      .busy(busy[g]), .charge_valid(charge_valid[g]), .charge(q)
    );
    assign charge[g] = 18'(q);
  end

  int checks = 0, failures = 0;
  longint cyc = 0;

  // ADC code of the sample taken at the start of cycle c
  function automatic int code_at(input longint c);
    real t, v;
    int  p;
    p = int'(c / longint'(SPACING));
    v = 0.0;
    if (p < N_PULSE) begin
      t = real'(c) * 16.0 - (real'(p * SPACING) * 16.0 + 160.0 + real'(p) / 3.0);
      if (t > 0.0) v = AMP * (t / 80.0) ** 2 * $exp(2.0 - t / 40.0);
    end
    return int'($floor(v + 0.5));
  endfunction

  // expected charge of pulse p for summation length n, and its report cycle
  function automatic void expect_pulse(input int p, input int n, output longint q,
                                       output longint when);
    longint c;
    c = longint'(p) * SPACING;
    while (code_at(c) <= THR) c++;
    q = 0;
    for (longint k = c; k < c + longint'(n); k++) q += longint'(code_at(k));
    when = c + longint'(n);
  endfunction

  real qsum [N_CFG], qsq [N_CFG];
  int  seen [N_CFG];

  always @(negedge clk) begin
    adc_data <= ADC_W'(code_at(cyc));
  end

  always @(posedge clk) begin
    if (rst_n) begin
      for (int g = 0; g < N_CFG; g++) begin
        if (charge_valid[g]) begin
          longint q, when;
          expect_pulse(seen[g], NS[g], q, when);
          checks++;
          if (longint'(charge[g]) != q || cyc != when) begin
            failures++;
            $display("FAIL N=%0d pulse %0d: charge %0d at %0d, expected %0d at %0d",
                     NS[g], seen[g], charge[g], cyc, q, when);
          end
          qsum[g] += real'(charge[g]);
          qsq[g]  += real'(charge[g]) ** 2;
          seen[g]++;
        end
      end
    end
    cyc <= cyc + 1;
  end

  initial begin
    real res [N_CFG];
    for (int g = 0; g < N_CFG; g++) begin
      qsum[g] = 0.0;
      qsq[g]  = 0.0;
      seen[g] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (cyc == longint'(SPACING) * N_PULSE + 8);
    for (int g = 0; g < N_CFG; g++) begin
      real m;
      checks++;
      if (seen[g] != N_PULSE) begin
        failures++;
        $display("FAIL N=%0d: %0d charges, expected %0d", NS[g], seen[g], N_PULSE);
      end
      m      = qsum[g] / real'(N_PULSE);
      res[g] = $sqrt(qsq[g] / real'(N_PULSE) - m * m) / m;
      $display("N_SUM=%0d  mean charge %0.1f  RMS/mean %0.3f permille", NS[g], m,
               1000.0 * res[g]);
    end
    for (int g = 1; g < N_CFG; g++) begin
      checks++;
      if (!(res[g] < res[g-1])) begin
        failures++;
        $display("FAIL RMS/mean does not fall from N=%0d to N=%0d", NS[g-1], NS[g]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(16.0 * (SPACING * N_PULSE + 1000));
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
