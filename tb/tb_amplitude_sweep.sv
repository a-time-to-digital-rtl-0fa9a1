// Amplitude-sweep run of the charge measurement logic at default sizes: the
// resolution of both correction algorithms over pulse amplitudes 1.0 V to
// 2.0 V in 0.1 V steps.
//
// The behavioural front end is the one of tb_charge_meas_top: (RC)^2 pulses
//   v(t) = A * (t / 80 ns)^2 * exp(2 - t / 40 ns), 30 ns after the pulse start,
// +-1 code of noise, and a discriminator time walk of 3000 / A ns (A in codes),
// so the jump of charge against fine time moves with amplitude. 2.0 V is
// taken as 3500 codes of peak amplitude (an assumption: the ADC range is not
// given). Each amplitude is played with crossings in all 48 TDC bins, twice.
//
// Three passes go through the unchanged hardware:
//   0  all coefficients 1.0: raw charge per amplitude and fine time
//   1  dual-LUT correction with tables computed from pass 0
//   2  sectional-LUT correction with tables computed from pass 0
// Calibration, in the testbench: m_{a,k} = mean charge of amplitude a at fine
// time k over its mean. Amplitudes are grouped into four charge sections
// (1.0-1.2, 1.3-1.5, 1.6-1.8, 1.9-2.0 V) with bounds halfway between groups.
// Sectional LUT of a section: C_k = sum_a m_{a,k} / sum_a m_{a,k}^2 over its
// amplitudes (the least-squares optimum for normalised data). Dual LUT: the
// time walk of a zone is the cyclic shift, in bins, that best matches (least
// squares) its mean curve to the first zone's, and LUT II is the same optimum
// over all amplitudes after that shift.
//
// Checks: every pulse gives one packet carrying its expected fine time; each
// algorithm lowers the mean resolution over the sweep. The table of RMS/mean
// per amplitude is printed.
`timescale 1ps / 1ps
module tb_amplitude_sweep;
  import charge_meas_pkg::*;

  logic             clk_sys, rst_n, hit, pkt_valid;
  logic [3:0]       clk_fast;
  longint           tick;
  logic [ADC_W-1:0] adc_data;
  corr_alg_e        alg;
  cfg_wr_t          cfg;
  logic [PKT_W-1:0] pkt_data;
  logic [15:0]      drop_count;
  logic             dead_time;

  localparam int N_AMP = 11, REPS = 2, SPACING = 48;

  tdc_clkgen u_clk (.clk_sys(clk_sys), .clk_fast(clk_fast), .tick(tick));

  charge_meas_top dut (
    .clk_sys(clk_sys), .clk_fast(clk_fast), .rst_n(rst_n), .hit(hit), .adc_data(adc_data),
    .trig_threshold(ADC_W'(30)), .alg(alg), .cfg(cfg), .pkt_valid(pkt_valid),
    .pkt_data(pkt_data), .pkt_ready(1'b1), .drop_count(drop_count), .dead_time(dead_time)
  );

  int checks = 0, failures = 0;

  // ---------------- front-end model ----------------
  real ev_t0 [$];
  real ev_amp [$];

  function automatic real tick_ns(input longint b);
    return real'((b * 1000) / 3) / 1000.0;
  endfunction

  function automatic int adc_code(input real t_ns);
    real v = 0.0;
    foreach (ev_t0[e]) begin
      real x = t_ns - ev_t0[e] - 30.0;
      if (x > 0.0) v += ev_amp[e] * (x / 80.0) ** 2 * $exp(2.0 - x / 40.0);
    end
    v += real'(int'($urandom_range(2)) - 1);
    if (v < 0.0) v = 0.0;
    if (v > 4095.0) v = 4095.0;
    return int'($floor(v + 0.5));
  endfunction

  always @(negedge clk_sys) adc_data = ADC_W'(adc_code(tick_ns(48 * (tick / 48))));

  task automatic pulse(input longint w, input int b, input real amp);
    wait (tick == 48 * w + b);
    #100;
    ev_t0.push_back(tick_ns(48 * w + b) + 0.1 - 3000.0 / amp);
    ev_amp.push_back(amp);
    if (ev_t0.size() > 4) begin void'(ev_t0.pop_front()); void'(ev_amp.pop_front()); end
    hit = 1'b1;
    #10000;
    hit = 1'b0;
  endtask

  task automatic write_cfg(input cfg_table_e t, input int addr, input int data);
    @(negedge clk_sys);
    cfg.we = 1'b1; cfg.table_sel = t; cfg.addr = CFG_ADDR_W'(addr); cfg.data = CFG_DATA_W'(data);
    @(negedge clk_sys);
    cfg.we = 1'b0;
  endtask

  // ---------------- packet capture ----------------
  int     exp_fine [$];
  int     exp_amp  [$];
  real    qsum  [3][N_AMP][FINE_BINS];   // per pass, amplitude, fine time
  int     qcnt  [3][N_AMP][FINE_BINS];
  real    s1 [3][N_AMP], s2 [3][N_AMP];
  int     sn [3][N_AMP];
  int     pass_no = 0;

  always @(posedge clk_sys) begin
    if (rst_n && pkt_valid) begin
      int f, q, a;
      a = 0;
      f = int'(pkt_data[PKT_W-1 -: FINE_W]);
      q = int'(pkt_data[QCORR_W-1:0]);
      checks++;
      if (exp_fine.size() == 0) begin
        failures++;
        $display("FAIL: packet with no pulse");
      end else begin
        a = exp_amp[0];
        if (f != exp_fine[0]) begin
          failures++;
          $display("FAIL: fine time %0d, expected %0d", f, exp_fine[0]);
        end
        qsum[pass_no][a][f-1] += real'(q);
        qcnt[pass_no][a][f-1]++;
        s1[pass_no][a] += real'(q);
        s2[pass_no][a] += real'(q) * real'(q);
        sn[pass_no][a]++;
        void'(exp_fine.pop_front());
        void'(exp_amp.pop_front());
      end
    end
  end

  // ---------------- calibration helpers ----------------
  function automatic real m_of(input int a, input int k);   // normalised, pass 0
    real mean = s1[0][a] / sn[0][a];
    return (qsum[0][a][k] / qcnt[0][a][k]) / mean;
  endfunction

  function automatic int group_of(input int a);
    return (a <= 2) ? 0 : (a <= 5) ? 1 : (a <= 8) ? 2 : 3;
  endfunction

  function automatic real curve_of(input int g, input int k);   // group mean of m
    real c;
    int n;
    c = 0; n = 0;
    for (int a = 0; a < N_AMP; a++) if (group_of(a) == g) begin c += m_of(a, k); n++; end
    return c / n;
  endfunction

  function automatic real res_of(input int p, input int a);
    real mean = s1[p][a] / sn[p][a];
    return 1000.0 * $sqrt(s2[p][a] / sn[p][a] - mean * mean) / mean;
  endfunction

  int     order [FINE_BINS];
  longint w;
  real    amps [N_AMP];
  int     bounds [N_ZONES-1];
  int     walk_z [N_ZONES];
  real    mean_res [3];

  initial begin
    hit = 0; rst_n = 0; alg = ALG_SECTIONAL_LUT; cfg = '0;
    foreach (amps[a]) amps[a] = 1750.0 * (1.0 + 0.1 * a);
    wait (tick >= 48 * 4 + 12);
    rst_n = 1;
    // pass 0 tables: unit coefficients, no walk, bounds anywhere
    for (int z = 0; z < N_ZONES - 1; z++) begin
      write_cfg(TBL_DUAL_THRESH, z, 131071);
      write_cfg(TBL_SECT_THRESH, z, 131071);
    end
    for (int z = 0; z < N_ZONES; z++) write_cfg(TBL_DUAL_WALK, z, 0);
    for (int k = 0; k < FINE_BINS; k++) write_cfg(TBL_DUAL_COEF, k, 32768);
    for (int k = 0; k < N_ZONES * FINE_BINS; k++) write_cfg(TBL_SECT_COEF, k, 32768);

    for (int p = 0; p < 3; p++) begin
      pass_no = p;
      alg = (p == 1) ? ALG_DUAL_LUT : ALG_SECTIONAL_LUT;
      w = tick / 48 + 10;
      for (int a = 0; a < N_AMP; a++) begin
        for (int r = 0; r < REPS; r++) begin
          foreach (order[i]) order[i] = i;
          order.shuffle();
          foreach (order[i]) begin
            exp_fine.push_back(order[i] + 1);
            exp_amp.push_back(a);
            pulse(w, order[i], amps[a]);
            w += SPACING;
          end
        end
      end
      wait (tick >= 48 * (w + 40));
      checks++;
      if (exp_fine.size() != 0) begin
        failures++;
        $display("FAIL: pass %0d, %0d pulses gave no packet", p, exp_fine.size());
        exp_fine.delete();
        exp_amp.delete();
      end
      if (p == 0) begin
        // ---- calibration from the raw pass ----
        for (int g = 0; g < N_ZONES - 1; g++) begin
          int lo;
          lo = (g == 0) ? 2 : (g == 1) ? 5 : 8;       // last amplitude of group g
          bounds[g] = int'((s1[0][lo] / sn[0][lo] + s1[0][lo+1] / sn[0][lo+1]) / 2.0);
          write_cfg(TBL_DUAL_THRESH, g, bounds[g]);
          write_cfg(TBL_SECT_THRESH, g, bounds[g]);
        end
        // sectional: per-section least-squares coefficients
        for (int g = 0; g < N_ZONES; g++) begin
          for (int k = 0; k < FINE_BINS; k++) begin
            real num, den;
            num = 0; den = 0;
            for (int a = 0; a < N_AMP; a++) if (group_of(a) == g) begin
              num += m_of(a, k);
              den += m_of(a, k) ** 2;
            end
            write_cfg(TBL_SECT_COEF, g * FINE_BINS + k, int'($floor(32768.0 * num / den + 0.5)));
          end
        end
        // dual: time walk per zone from the jump points, then a common LUT II
        for (int g = 0; g < N_ZONES; g++) begin
          real best, err;
          best = 1.0e30;
          for (int d = 0; d < FINE_BINS; d++) begin
            err = 0;
            for (int k = 0; k < FINE_BINS; k++)
              err += (curve_of(g, (k + d) % FINE_BINS) - curve_of(0, k)) ** 2;
            if (err < best) begin best = err; walk_z[g] = d; end
          end
          write_cfg(TBL_DUAL_WALK, g, walk_z[g]);
        end
        for (int k = 0; k < FINE_BINS; k++) begin
          real num, den;
          num = 0; den = 0;
          for (int a = 0; a < N_AMP; a++) begin
            int i;
            i = (k + walk_z[group_of(a)]) % FINE_BINS;         // i - dt = k
            num += m_of(a, i);
            den += m_of(a, i) ** 2;
          end
          write_cfg(TBL_DUAL_COEF, k, int'($floor(32768.0 * num / den + 0.5)));
        end
        $display("section bounds %p, time walk per zone %p bins", bounds, walk_z);
      end
    end

    $display("amplitude   uncorrected   dual-LUT   sectional-LUT   (RMS/mean, permille)");
    foreach (amps[a]) begin
      $display("  %0.1f V      %6.3f      %6.3f      %6.3f", 1.0 + 0.1 * a,
               res_of(0, a), res_of(1, a), res_of(2, a));
      for (int p = 0; p < 3; p++) mean_res[p] += res_of(p, a) / N_AMP;
    end
    $display("  mean       %6.3f      %6.3f      %6.3f", mean_res[0], mean_res[1], mean_res[2]);
    checks++;
    if (!(mean_res[1] < mean_res[0] && mean_res[2] < mean_res[0])) begin
      failures++;
      $display("FAIL: a correction did not lower the mean resolution");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    wait (tick == 48 * 200000);
    $display("FAIL: watchdog");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
