// Self-checking testbench of the TDC.
//
// Places a discriminator crossing inside every one of the 48 bins of an ADC
// period (100 ps after the bin starts, so never on a sampling instant), in a
// shuffled order and at spaced ADC periods, and expects for a crossing in bin j
// of period n (time T1 + j*bin + 100 ps) the fine time j + 1, from
// [(T_th - T1) / bin] + 1, in the cycle of period n + 3. Also checks that
// a pulse that stays high across a period boundary gives a single code, and
// that nothing else ever raises fine_valid.
`timescale 1ps / 1ps
module tb_tdc;
  import charge_meas_pkg::*;

  logic              clk_sys, rst_n, hit;
  logic [3:0]        clk_fast;
  longint            tick;
  logic              fine_valid;
  logic [FINE_W-1:0] fine_time;

  int checks = 0, failures = 0;
  longint cycle = 0;                // index of the current ADC period

  tdc_clkgen u_clk (.clk_sys(clk_sys), .clk_fast(clk_fast), .tick(tick));

  tdc dut (
    .clk_sys    (clk_sys),
    .clk_fast   (clk_fast),
    .rst_n      (rst_n),
    .hit        (hit),
    .fine_valid (fine_valid),
    .fine_time  (fine_time)
  );

  always @(posedge clk_sys) if (tick > 0) cycle <= tick / 48;

  // expected reports: cycle and code
  longint exp_cycle [$];
  int     exp_fine  [$];

  always @(negedge clk_sys) begin
    if (rst_n && fine_valid) begin
      checks++;
      if (exp_cycle.size() == 0) begin
        failures++;
        $display("FAIL: unexpected fine_valid in cycle %0d (code %0d)", cycle, fine_time);
      end else begin
        if (exp_cycle[0] != cycle || exp_fine[0] != int'(fine_time)) begin
          failures++;
          $display("FAIL: got code %0d in cycle %0d, expected %0d in cycle %0d",
                   fine_time, cycle, exp_fine[0], exp_cycle[0]);
        end
        void'(exp_cycle.pop_front());
        void'(exp_fine.pop_front());
      end
    end
  end

  task automatic crossing(input longint n, input int j, input int width_ps);
    wait (tick == 48 * n + longint'(j));
    #100;
    hit = 1'b1;
    exp_cycle.push_back(n + 3);
    exp_fine.push_back(j + 1);
    #(width_ps);
    hit = 1'b0;
  endtask

  int order [48];
  longint n;

  initial begin
    hit   = 1'b0;
    rst_n = 1'b0;
    wait (tick == 48 * 4);
    rst_n = 1'b1;
    foreach (order[j]) order[j] = j;
    order.shuffle();
    n = 6;
    foreach (order[j]) begin
      // width 3..40 ns, the discriminator's time over threshold
      crossing(n, order[j], 3000 + int'($urandom_range(37000)));
      n += 4 + longint'($urandom_range(3));
    end
    // last bin, pulse much longer than one period: one report only
    crossing(n, 47, 60000);
    n += 8;
    crossing(n, 0, 1000);
    n += 6;
    wait (tick == 48 * n);
    checks++;
    if (exp_cycle.size() != 0) begin
      failures++;
      $display("FAIL: %0d expected codes never reported", exp_cycle.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    wait (tick == 48 * 2000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
