// Self-checking testbench of the charge measurement correction block.
//
// Loads the tables of both algorithms, then plays measurements: an enable
// pulse with a fine time, sometimes further enables (piled-up pulses, which
// must be ignored), a charge some clocks later, sometimes with the next
// measurement's enable in the same cycle (which must be kept for the next
// charge). The algorithm is chosen at random per measurement and flipped
// right after each charge (the flip must not affect a measurement already in
// flight). The reference computes both
// algorithms independently and expects the selected result, with the fine time
// given at enable, exactly 3 clocks after charge_valid. Both algorithms must be
// used.
`timescale 1ns / 1ps
module tb_charge_correction;
  import charge_meas_pkg::*;

  logic clk = 1'b0, rst_n;
  cfg_wr_t cfg;
  corr_alg_e alg;
  logic enable, charge_valid, out_valid;
  logic [FINE_W-1:0]   fine_time;
  logic [CHARGE_W-1:0] charge;
  meas_t out;

  int checks = 0, failures = 0, cycle = 0;
  int used [2];
  int n_ignored = 0, n_same_cycle = 0;

  always #8 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  charge_correction dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .alg(alg), .enable(enable),
    .fine_time(fine_time), .charge_valid(charge_valid), .charge(charge),
    .out_valid(out_valid), .out(out)
  );

  int d_bounds [N_ZONES-1] = '{20000, 45000, 80000};
  int s_bounds [N_ZONES-1] = '{25000, 50000, 70000};
  int walks    [N_ZONES]   = '{0, 2, 5, 47};
  int d_coef   [FINE_BINS];
  int s_coef   [N_ZONES*FINE_BINS];

  task automatic write_cfg(input cfg_table_e t, input int addr, input int data);
    @(negedge clk);
    cfg.we = 1'b1; cfg.table_sel = t; cfg.addr = CFG_ADDR_W'(addr); cfg.data = CFG_DATA_W'(data);
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  function automatic int zone_of(input int q, input int bounds [N_ZONES-1]);
    int z = N_ZONES - 1;
    for (int b = N_ZONES - 2; b >= 0; b--) if (q <= bounds[b]) z = b;
    return z;
  endfunction

  function automatic longint ref_dual(input int q, input int i);
    int k = i - walks[zone_of(q, d_bounds)];
    if (k < 1) k += FINE_BINS;
    return (longint'(q) * d_coef[k-1] + 16384) >>> 15;
  endfunction

  function automatic longint ref_sect(input int q, input int i);
    return (longint'(q) * s_coef[zone_of(q, s_bounds)*FINE_BINS + i - 1] + 16384) >>> 15;
  endfunction

  initial begin
    int fine, q, a, wait_cycles, c_done, pre_fine;
    longint expq;
    cfg = '0; alg = ALG_DUAL_LUT; enable = 0; charge_valid = 0; fine_time = 1; charge = '0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    foreach (d_coef[k]) d_coef[k] = 30000 + int'($urandom_range(5000));
    foreach (s_coef[k]) s_coef[k] = 30000 + int'($urandom_range(5000));
    foreach (d_bounds[z]) write_cfg(TBL_DUAL_THRESH, z, d_bounds[z]);
    foreach (walks[z])    write_cfg(TBL_DUAL_WALK, z, walks[z]);
    foreach (d_coef[k])   write_cfg(TBL_DUAL_COEF, k, d_coef[k]);
    foreach (s_bounds[z]) write_cfg(TBL_SECT_THRESH, z, s_bounds[z]);
    foreach (s_coef[k])   write_cfg(TBL_SECT_COEF, k, s_coef[k]);
    pre_fine = -1;
    for (int n = 0; n < 400; n++) begin
      q    = int'($urandom_range(110565));
      a    = int'($urandom_range(1));
      if (pre_fine < 0) begin
        // enable with the fine time
        fine = 1 + int'($urandom_range(47));
        @(negedge clk);
        enable = 1; fine_time = FINE_W'(fine);
      end else begin
        fine = pre_fine;
      end
      @(negedge clk);
      enable = 0; fine_time = FINE_W'($urandom_range(1, 48));   // must be ignored
      wait_cycles = int'($urandom_range(5));
      for (int c = 0; c < wait_cycles; c++) begin
        @(negedge clk);
        enable = ($urandom_range(2) == 0);                       // piled-up report
        if (enable) n_ignored++;
      end
      @(negedge clk);
      enable = 0;
      charge_valid = 1; charge = CHARGE_W'(q); alg = corr_alg_e'(a);
      pre_fine = -1;
      if ($urandom_range(3) == 0) begin                          // next pulse's report
        pre_fine = 1 + int'($urandom_range(47));
        enable = 1; fine_time = FINE_W'(pre_fine);
        n_same_cycle++;
      end
      c_done = cycle + 3;
      expq = a ? ref_sect(q, fine) : ref_dual(q, fine);
      used[a]++;
      @(negedge clk);
      charge_valid = 0; enable = 0; alg = corr_alg_e'(1 - a);
      while (cycle < c_done) begin
        checks++;
        if (out_valid) begin failures++; $display("FAIL: early out_valid in cycle %0d", cycle); end
        @(negedge clk);
      end
      checks++;
      if (!(out_valid && longint'(out.charge) == expq && int'(out.fine_time) == fine)) begin
        failures++;
        $display("FAIL: meas %0d alg %0d: valid=%0b q=%0d fine=%0d, expected q=%0d fine=%0d",
                 n, a, out_valid, out.charge, out.fine_time, expq, fine);
      end
    end
    foreach (used[a]) begin
      checks++;
      if (used[a] == 0) begin failures++; $display("FAIL: algorithm %0d never used", a); end
    end
    checks++;
    if (n_ignored == 0 || n_same_cycle == 0) begin
      failures++;
      $display("FAIL: ignored reports %0d, same-cycle reports %0d", n_ignored, n_same_cycle);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
