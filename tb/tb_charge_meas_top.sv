// End-to-end testbench of the charge measurement logic, at default sizes.
//
// A behavioural front end stands in for the analog chain: each PMT pulse
// (arrival T0, peak amplitude A in ADC codes) gives a discriminator crossing at
// T0 + time walk and, after a 30 ns path delay, an (RC)^2-shaped pulse
//   v(t) = A * (t / 80 ns)^2 * exp(2 - t / 40 ns)
// (40 ns time constant, peak after 80 ns), sampled by the ADC at every rising
// clk_sys edge with +-1 code of noise and clipped to 12 bits. Pulses add up, so
// pile-up is modelled. The crossing is placed 100 ps into a chosen TDC bin.
//
// The reference model, written from the intended behaviour rather than from
// the RTL: a crossing in ADC period W gives fine time (bin within W) + 1,
// reported in cycle W+3; the first report after each charge is kept, later
// ones (piled-up pulses) are dropped; an ADC code above the trigger threshold
// while idle and re-armed starts a sum of that cycle's and the next 26 codes;
// the corrected charge follows the selected algorithm with the testbench's own
// copy of the tables; the word {fine, corrected charge} enters the packager 30
// cycles after the trigger, and the packager holds one word under valid/ready,
// dropping what arrives while it is full. Every cycle the packet outputs and
// the drop counter are compared with that model.
//
// Part A plays random amplitudes and bins with random tables, with close
// pairs of pulses (dead time, piled-up reports), a long stall of the receiver (hold and drop),
// algorithm switches and time walks that wrap modulo 48; each of these must
// happen. Part B runs a calibration like the one described for the correction:
// pulses of one amplitude in all 48 bins with unit coefficients, C_i = mean(Q)
// / Q_i loaded into the sectional LUT, the same pulses again; the spread of the
// corrected charge (RMS / mean) must fall below half of the raw one.
`timescale 1ps / 1ps
module tb_charge_meas_top;
  import charge_meas_pkg::*;

  // ---------------- DUT and clocks ----------------
  logic             clk_sys, rst_n, hit, pkt_valid, pkt_ready;
  logic [3:0]       clk_fast;
  longint           tick;
  logic [ADC_W-1:0] adc_data;
  corr_alg_e        alg;
  cfg_wr_t          cfg;
  logic [PKT_W-1:0] pkt_data;
  logic [15:0]      drop_count;
  logic             dead_time;

  tdc_clkgen u_clk (.clk_sys(clk_sys), .clk_fast(clk_fast), .tick(tick));

  charge_meas_top dut (
    .clk_sys(clk_sys), .clk_fast(clk_fast), .rst_n(rst_n), .hit(hit), .adc_data(adc_data),
    .trig_threshold(ADC_W'(TRIG_THR)), .alg(alg), .cfg(cfg), .pkt_valid(pkt_valid), .pkt_data(pkt_data), .pkt_ready(pkt_ready),
    .drop_count(drop_count), .dead_time(dead_time)
  );

  int checks = 0, failures = 0;

  // ---------------- front-end model ----------------
  localparam real TAU_NS = 40.0, SHAPER_DELAY_NS = 30.0;
  real ev_t0 [$];          // arrival time of each pulse, ns
  real ev_amp [$];         // peak amplitude, ADC codes

  function automatic real tick_ns(input longint b);
    return real'((b * 1000) / 3) / 1000.0;
  endfunction

  function automatic int adc_code(input real t_ns);
    real v = 0.0;
    foreach (ev_t0[e]) begin
      real x = t_ns - ev_t0[e] - SHAPER_DELAY_NS;
      if (x > 0.0) v += ev_amp[e] * (x / (2.0 * TAU_NS)) ** 2 * $exp(2.0 - x / TAU_NS);
    end
    v += real'(int'($urandom_range(2)) - 1);
    if (v < 0.0) v = 0.0;
    if (v > 4095.0) v = 4095.0;
    return int'($floor(v + 0.5));
  endfunction

  // time walk of the leading-edge discriminator: larger for small pulses
  function automatic real walk_ns(input real amp);
    return 4.0 * 300.0 / amp;
  endfunction

  // ---------------- reference tables ----------------
  int d_bounds [N_ZONES-1];
  int walks    [N_ZONES];
  int d_coef   [FINE_BINS];
  int s_bounds [N_ZONES-1];
  int s_coef   [N_ZONES*FINE_BINS];

  function automatic int zone_of(input int q, input int bounds [N_ZONES-1]);
    int z = N_ZONES - 1;
    for (int b = N_ZONES - 2; b >= 0; b--) if (q <= bounds[b]) z = b;
    return z;
  endfunction

  // ---------------- reference of the whole chain ----------------
  int            adc_hist [longint];
  longint        cross_cycle [$];   // ADC period of each crossing, in order
  int            cross_fine  [$];
  localparam int TRIG_THR = 30;     // integration trigger threshold, ADC codes
  longint        sum_start = -1;    // trigger cycle of the running sum
  bit            armed = 0, kept = 0, rep_now;
  int            kept_fine = 1, rep_fine;
  logic [PKT_W-1:0] corr_in [longint];   // word entering the packager, by cycle
  bit            ref_full = 0;
  logic [PKT_W-1:0] ref_word;
  int            ref_drops = 0;

  // mechanism counters
  int n_rejected = 0, n_sums = 0, n_wrap = 0, n_held = 0, n_alg_switch = 0;
  int n_dead = 0, n_unarmed = 0;
  int n_zone [2][N_ZONES];
  corr_alg_e alg_prev = ALG_DUAL_LUT;

  // per-run statistics of part B
  bit     collect = 0;
  real    q_raw_sum [FINE_BINS];
  int     q_raw_cnt [FINE_BINS];
  real    stat_s = 0, stat_ss = 0;
  int     stat_n = 0;

  longint cyc;

  always @(negedge clk_sys) begin
    cyc = tick / 48;   // ADC period of this cycle
    // ADC sample taken at the rising edge that started this cycle
    adc_data = ADC_W'(adc_code(tick_ns(48 * cyc)));
    adc_hist[cyc] = int'(adc_data);
    if (rst_n) begin
      // TDC report of a crossing in period W: enable in cycle W+3
      rep_now = 0;
      while (cross_cycle.size() != 0 && cross_cycle[0] + 3 <= cyc) begin
        if (cross_cycle[0] + 3 == cyc) begin
          rep_now = 1;
          rep_fine = cross_fine[0];
        end
        void'(cross_cycle.pop_front());
        void'(cross_fine.pop_front());
      end
      // sum complete: charge_valid in cycle start+27, with alg of that cycle
      if (sum_start >= 0 && sum_start + longint'(N_SUM) == cyc) begin
        int q, fine, z, k;
        longint qc;
        q = 0;
        fine = kept_fine;
        for (longint c = sum_start; c < sum_start + longint'(N_SUM); c++) q += adc_hist[c];
        if (alg == ALG_DUAL_LUT) begin
          z = zone_of(q, d_bounds);
          k = fine - walks[z];
          if (k < 1) begin k += FINE_BINS; n_wrap++; end
          qc = (longint'(q) * d_coef[k-1] + 16384) >>> 15;
        end else begin
          z = zone_of(q, s_bounds);
          qc = (longint'(q) * s_coef[z*FINE_BINS + fine - 1] + 16384) >>> 15;
        end
        n_zone[alg][z]++;
        n_sums++;
        if (collect) begin
          q_raw_sum[fine-1] += real'(q);
          q_raw_cnt[fine-1]++;
          stat_s  += real'(qc);
          stat_ss += real'(qc) * real'(qc);
          stat_n++;
        end
        corr_in[cyc + 3] = {FINE_W'(fine), QCORR_W'(qc)};
        sum_start = -1;
        kept = rep_now;
        if (rep_now) kept_fine = rep_fine;
      end else if (rep_now) begin
        if (!kept) begin kept = 1; kept_fine = rep_fine; end
        else       n_rejected++;       // piled-up pulse
      end
      // integration trigger on the ADC data
      if (sum_start < 0) begin
        if (adc_hist[cyc] > TRIG_THR) begin
          if (armed) begin sum_start = cyc; armed = 0; end
          else       n_unarmed++;
        end else begin
          armed = 1;
        end
      end else if (adc_hist[cyc] > TRIG_THR && cyc > sum_start) begin
        n_dead++;
      end
      if (alg != alg_prev) n_alg_switch++;
      alg_prev = alg;
      // packager outputs of this cycle
      checks++;
      if (pkt_valid != ref_full || (ref_full && pkt_data != ref_word) ||
          int'(drop_count) != ref_drops) begin
        failures++;
        $display("FAIL: cycle %0d pkt_valid=%0b data=%h drops=%0d, expected %0b %h %0d",
                 cyc, pkt_valid, pkt_data, drop_count, ref_full, ref_word, ref_drops);
      end
      if (ref_full && !pkt_ready) n_held++;
      if (corr_in.exists(cyc) && (!ref_full || pkt_ready)) begin
        ref_full = 1;
        ref_word = corr_in[cyc];
      end else begin
        if (corr_in.exists(cyc)) ref_drops++;
        if (pkt_ready) ref_full = 0;
      end
      corr_in.delete(cyc);
    end
  end

  // ---------------- stimulus ----------------
  task automatic wait_cycle(input longint c);
    wait (tick >= 48 * c + 12);
  endtask

  task automatic write_cfg(input cfg_table_e t, input int addr, input int data);
    @(negedge clk_sys);
    cfg.we = 1'b1; cfg.table_sel = t; cfg.addr = CFG_ADDR_W'(addr); cfg.data = CFG_DATA_W'(data);
    @(negedge clk_sys);
    cfg.we = 1'b0;
  endtask

  // one PMT pulse whose crossing lies 100 ps into TDC bin b of ADC period w
  task automatic pulse(input longint w, input int b, input real amp);
    longint tb_bin = 48 * w + longint'(b);
    real t_cross;
    wait (tick == tb_bin);
    #100;
    t_cross = tick_ns(tb_bin) + 0.1;
    ev_t0.push_back(t_cross - walk_ns(amp));
    ev_amp.push_back(amp);
    if (ev_t0.size() > 8) begin void'(ev_t0.pop_front()); void'(ev_amp.pop_front()); end
    cross_cycle.push_back(w);
    cross_fine.push_back(b + 1);
    hit = 1'b1;
    #10000;
    hit = 1'b0;
  endtask

  longint w;
  int order [48];
  real amp_b = 3500.0;

  initial begin
    hit = 0; rst_n = 0; pkt_ready = 1; alg = ALG_DUAL_LUT; cfg = '0; adc_data = '0;
    wait_cycle(4);
    rst_n = 1;

    // ---- Part A: random tables ----
    d_bounds = '{9000, 17000, 26000};
    s_bounds = '{10000, 18000, 27000};
    walks    = '{0, 1, 2, 46};
    foreach (d_coef[k]) d_coef[k] = 31000 + int'($urandom_range(3500));
    foreach (s_coef[k]) s_coef[k] = 31000 + int'($urandom_range(3500));
    foreach (d_bounds[z]) write_cfg(TBL_DUAL_THRESH, z, d_bounds[z]);
    foreach (walks[z])    write_cfg(TBL_DUAL_WALK, z, walks[z]);
    foreach (d_coef[k])   write_cfg(TBL_DUAL_COEF, k, d_coef[k]);
    foreach (s_bounds[z]) write_cfg(TBL_SECT_THRESH, z, s_bounds[z]);
    foreach (s_coef[k])   write_cfg(TBL_SECT_COEF, k, s_coef[k]);

    w = tick / 48 + 10;
    for (int n = 0; n < 240; n++) begin
      if (n % 30 == 0) begin
        wait_cycle(w - 2);
        alg = corr_alg_e'((n / 30) % 2);
      end
      pulse(w, int'($urandom_range(47)), 300.0 + real'($urandom_range(3400)));
      if (n % 10 == 5) w += 8 + longint'($urandom_range(10));     // inside dead time
      else             w += 45 + longint'($urandom_range(30));
    end
    // receiver stall: two results arrive while the first is not taken
    wait_cycle(w);
    pkt_ready = 0;
    pulse(w + 2, 10, 2000.0);
    pulse(w + 50, 20, 2500.0);
    wait_cycle(w + 120);
    pkt_ready = 1;
    w += 140;

    // ---- Part B: calibration of the sectional LUT at one amplitude ----
    alg = ALG_SECTIONAL_LUT;
    s_bounds = '{5000, 10000, 15000};
    foreach (s_bounds[z]) write_cfg(TBL_SECT_THRESH, z, s_bounds[z]);
    foreach (s_coef[k]) begin s_coef[k] = 32768; write_cfg(TBL_SECT_COEF, k, 32768); end
    for (int pass = 0; pass < 2; pass++) begin
      real mean_all, rms;
      w = tick / 48 + 10;
      foreach (q_raw_sum[i]) begin q_raw_sum[i] = 0; q_raw_cnt[i] = 0; end
      stat_s = 0; stat_ss = 0; stat_n = 0;
      collect = 1;
      for (int rep = 0; rep < 2; rep++) begin
        foreach (order[i]) order[i] = i;
        order.shuffle();
        foreach (order[i]) begin
          pulse(w, order[i], amp_b);
          w += 60;
        end
      end
      wait_cycle(w + 40);
      collect = 0;
      mean_all = stat_s / stat_n;
      rms = $sqrt(stat_ss / stat_n - mean_all * mean_all);
      $display("pass %0d (%s): %0d pulses, mean %0.1f, RMS/mean %0.3f permille", pass,
               pass == 0 ? "uncorrected" : "corrected", stat_n, mean_all, 1000.0 * rms / mean_all);
      if (pass == 0) begin
        // C_i = mean(Q) / Q_i, written into the section these charges fall in
        int z, c;
        real qbar;
        z = zone_of(int'(mean_all), s_bounds);
        qbar = 0;
        foreach (q_raw_sum[i]) qbar += q_raw_sum[i] / q_raw_cnt[i];
        qbar /= FINE_BINS;
        foreach (q_raw_sum[i]) begin
          c = int'($floor(32768.0 * qbar / (q_raw_sum[i] / q_raw_cnt[i]) + 0.5));
          s_coef[z*FINE_BINS + i] = c;
          write_cfg(TBL_SECT_COEF, z*FINE_BINS + i, c);
        end
        stat_raw = 1000.0 * rms / mean_all;
      end else begin
        checks++;
        if (!(1000.0 * rms / mean_all < 0.5 * stat_raw)) begin
          failures++;
          $display("FAIL: correction did not halve the spread");
        end
      end
    end

    // ---- mechanisms that must have happened ----
    checks++;
    if (n_rejected == 0 || n_dead == 0) begin
      failures++;
      $display("FAIL: no piled-up report or no sample above threshold in dead time");
    end
    checks++;
    if (ref_drops == 0 || n_held == 0) begin failures++; $display("FAIL: no drop or hold"); end
    checks++;
    if (n_wrap == 0) begin failures++; $display("FAIL: no mod-48 wrap of the time walk"); end
    checks++;
    if (n_alg_switch < 2) begin failures++; $display("FAIL: algorithm never switched"); end
    foreach (n_zone[a, z]) begin
      checks++;
      if (n_zone[a][z] == 0) begin
        failures++;
        $display("FAIL: algorithm %0d never used zone %0d", a, z);
      end
    end
    $display("sums=%0d piled-up reports dropped=%0d dead-time samples above threshold=%0d",
             n_sums, n_rejected, n_dead);
    $display("wraps=%0d held=%0d dropped=%0d alg switches=%0d",
             n_wrap, n_held, ref_drops, n_alg_switch);
    $display("zone use dual=%p sectional=%p", n_zone[0], n_zone[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real stat_raw = 0;

  initial begin : watchdog
    wait (tick == 48 * 40000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
