// Self-checking testbench of the dual-LUT correction.
//
// Loads LUT I (three zone bounds, four time walks, one of them large enough to
// wrap) and LUT II (48 random coefficients around 1.0) through the
// configuration port, then feeds random (Q_i, i) pairs, one per clock with
// gaps. The reference computes the zone, k = i - dt wrapped into 1..48,
// C_k and round(Q_i * C_k / 2^15) in 64-bit integers and expects the result
// exactly 3 clocks after the input. Every zone and at least one wrap of the
// mod-48 correction must occur.
`timescale 1ns / 1ps
module tb_dual_lut_correction;
  import charge_meas_pkg::*;

  logic clk = 1'b0, rst_n;
  cfg_wr_t cfg;
  logic in_valid, out_valid;
  logic [CHARGE_W-1:0] q_in;
  logic [FINE_W-1:0]   fine_in, fine_out;
  logic [QCORR_W-1:0]  q_out;

  int checks = 0, failures = 0, cycle = 0;
  int zone_seen [N_ZONES];
  int wraps = 0;

  always #8 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  dual_lut_correction dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .in_valid(in_valid), .q_in(q_in),
    .fine_in(fine_in), .out_valid(out_valid), .q_out(q_out), .fine_out(fine_out)
  );

  int bounds [N_ZONES-1] = '{30000, 60000, 90000};
  int walks  [N_ZONES]   = '{0, 1, 3, 40};
  int coefs  [FINE_BINS];

  task automatic write_cfg(input cfg_table_e t, input int addr, input int data);
    @(negedge clk);
    cfg.we = 1'b1; cfg.table_sel = t; cfg.addr = CFG_ADDR_W'(addr); cfg.data = CFG_DATA_W'(data);
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  // expected outputs, keyed by cycle
  longint exp_q [int];
  int     exp_f [int];

  initial begin
    cfg = '0; in_valid = 0; q_in = '0; fine_in = 1; rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    foreach (coefs[k]) coefs[k] = 32768 - 1500 + int'($urandom_range(3000));
    foreach (bounds[z]) write_cfg(TBL_DUAL_THRESH, z, bounds[z]);
    foreach (walks[z])  write_cfg(TBL_DUAL_WALK, z, walks[z]);
    foreach (coefs[k])  write_cfg(TBL_DUAL_COEF, k, coefs[k]);
    // the other algorithm's tables must not disturb this one
    for (int a = 0; a < 4; a++) write_cfg(TBL_SECT_THRESH, a, 5);
    for (int a = 0; a < 48; a++) write_cfg(TBL_SECT_COEF, a, 0);
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      q_in     = (n == 0) ? '1 : CHARGE_W'($urandom_range(110565));
      if (n == 1) q_in = CHARGE_W'(bounds[0]);        // on a bound: lower zone
      if (n == 2) q_in = CHARGE_W'(bounds[0] + 1);
      fine_in  = FINE_W'(1 + $urandom_range(47));
      if (in_valid) begin : model
        int z, dt, k;
        z = N_ZONES - 1;
        for (int b = N_ZONES - 2; b >= 0; b--) if (int'(q_in) <= bounds[b]) z = b;
        dt = walks[z];
        k = int'(fine_in) - dt;
        if (k < 1) begin k += FINE_BINS; wraps++; end
        zone_seen[z]++;
        exp_q[cycle + 3] = (longint'(q_in) * longint'(coefs[k-1]) + 16384) >>> 15;
        exp_f[cycle + 3] = int'(fine_in);
      end
      // check outputs of this cycle
      if (out_valid || exp_q.exists(cycle)) begin
        checks++;
        if (!(out_valid && exp_q.exists(cycle) && longint'(q_out) == exp_q[cycle]
              && int'(fine_out) == exp_f[cycle])) begin
          failures++;
          $display("FAIL: cycle %0d valid=%0b q=%0d fine=%0d expected q=%0d fine=%0d", cycle,
                   out_valid, q_out, fine_out, exp_q.exists(cycle) ? exp_q[cycle] : -1,
                   exp_f.exists(cycle) ? exp_f[cycle] : -1);
        end
        exp_q.delete(cycle);
      end
    end
    foreach (zone_seen[z]) begin
      checks++;
      if (zone_seen[z] == 0) begin failures++; $display("FAIL: zone %0d never used", z); end
    end
    checks++;
    if (wraps == 0) begin failures++; $display("FAIL: no mod-48 wrap"); end
    $display("wraps=%0d zones=%p", wraps, zone_seen);
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
