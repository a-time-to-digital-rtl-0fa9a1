// Time-to-digital converter for the fine time of a trigger.
//
// Multi-phase clock interpolation: four 375 MHz clocks at 0, 45, 90 and 135
// degrees, used on both edges, split each 2.67 ns fast period into eight
// 333 ps bins; six fast periods make one 16 ns ADC clock period, so the ADC
// period holds 48 bins. The fine time is the bin, 1..48, in which the
// discriminator output crossed its threshold, counted from the last ADC
// clock edge: T_fine = [(T_th - T1) / 333 ps] + 1.
//
// Interface: clk_fast[3:0] are the PLL's phase clocks, clk_sys the 62.5 MHz
// ADC clock (rising with clk_fast[0]), hit the discriminator output. One clk_sys
// cycle pulse on fine_valid, with fine_time held until the next pulse; this
// pulse is the enable signal to the correction block. Latency: fine_valid is
// high in the cycle that starts three clk_sys edges after the ADC period
// (T1, T2] holding the crossing, i.e. after the edges at T2, T3 and T4.
//
// Clock count, phases, bin size and the fine time formula follow the design
// description; the TDC's coarse time stamp is not part of this block.
module tdc
  import charge_meas_pkg::*;
#(
  parameter int unsigned N_PHASE      = 4,
  parameter int unsigned FAST_PER_SYS = 6,
  parameter int unsigned BINS         = 2 * N_PHASE * FAST_PER_SYS  // 48
) (
  input  logic               clk_sys,
  input  logic [N_PHASE-1:0] clk_fast,
  input  logic               rst_n,
  input  logic               hit,
  output logic               fine_valid,
  output logic [FINE_W-1:0]  fine_time
);

  logic [BINS-1:0] samples;

  tdc_sampler #(
    .N_PHASE      (N_PHASE),
    .FAST_PER_SYS (FAST_PER_SYS)
  ) u_sampler (
    .clk_sys  (clk_sys),
    .clk_fast (clk_fast),
    .hit      (hit),
    .samples  (samples)
  );

  tdc_fine_encoder #(
    .FINE_BINS (BINS),
    .FINE_W    (FINE_W)
  ) u_encoder (
    .clk        (clk_sys),
    .rst_n      (rst_n),
    .samples    (samples),
    .fine_valid (fine_valid),
    .fine_time  (fine_time)
  );

endmodule
