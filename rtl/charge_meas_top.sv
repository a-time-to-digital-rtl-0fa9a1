// FPGA logic of the charge measurement with fine-time correction.
//
// The discriminator hit goes to the TDC, which measures its fine time, 1..48,
// within the 16 ns ADC clock period. The waveform integral block triggers on
// the ADC data itself (first sample above trig_threshold) and sums 27 samples.
// The TDC's report is the enable signal of the correction block, which keeps
// the first fine time reported after each charge for the next charge; later
// reports come from piled-up pulses and are dropped. dead_time is high while
// a sum runs. When the sum is done, the correction block multiplies it by the
// coefficient looked up from charge and fine time, with the dual-LUT or the
// sectional-LUT algorithm (alg), and the data packaging block offers
// {fine time, corrected charge} to the data interface.
//
// External parts enter as ports: the four 375 MHz PLL phase clocks clk_fast
// (clk_fast[0] rising with clk_sys), the 12-bit ADC samples on clk_sys, the
// integration trigger threshold and table writes from slow control (cfg), and
// the packet stream to the data interface (pkt_valid/pkt_data/pkt_ready).
//
// Timing, in clk_sys cycles: a threshold crossing in ADC period (T1, T2]
// raises the enable in the cycle starting at the third edge after T2. A
// sample above trig_threshold in cycle n is the first of 27; the raw charge
// is ready in cycle n+27, the corrected one in n+30 and the packet in n+31.
// The block structure and its connections follow the design description; the
// integration trigger, the dead-time rule, the run-time algorithm select and
// the port formats are this design's.
//
// Lint reports rst_n as used both synchronously and asynchronously. That
// comes from the assertions inside the sub-blocks, which are disabled during
// reset; every flip-flop that is reset uses rst_n as an asynchronous reset.
module charge_meas_top
  import charge_meas_pkg::*;
(
  input  logic              clk_sys,
  input  logic [3:0]        clk_fast,
  input  logic              rst_n,
  input  logic              hit,
  input  logic [ADC_W-1:0]  adc_data,
  input  logic [ADC_W-1:0]  trig_threshold,
  input  corr_alg_e         alg,
  input  cfg_wr_t           cfg,
  output logic              pkt_valid,
  output logic [PKT_W-1:0]  pkt_data,
  input  logic              pkt_ready,
  output logic [15:0]       drop_count,
  output logic              dead_time
);

  logic                fine_valid;
  logic [FINE_W-1:0]   fine_time;
  logic                enable;
  logic                charge_valid;
  logic [CHARGE_W-1:0] charge;
  logic                corr_valid;
  meas_t               corr;

  tdc #(
    .N_PHASE      (4),
    .FAST_PER_SYS (6)
  ) u_tdc (
    .clk_sys    (clk_sys),
    .clk_fast   (clk_fast),
    .rst_n      (rst_n),
    .hit        (hit),
    .fine_valid (fine_valid),
    .fine_time  (fine_time)
  );

  // The TDC's enable signal to the correction block, which keeps the first
  // report after each charge.
  assign enable = fine_valid;

  waveform_integrator #(
    .ADC_W    (ADC_W),
    .N_SUM    (N_SUM),
    .CHARGE_W (CHARGE_W)
  ) u_integ (
    .clk          (clk_sys),
    .rst_n        (rst_n),
    .adc_data       (adc_data),
    .trig_threshold (trig_threshold),
    .busy         (dead_time),
    .charge_valid (charge_valid),
    .charge       (charge)
  );

  charge_correction u_corr (
    .clk          (clk_sys),
    .rst_n        (rst_n),
    .cfg          (cfg),
    .alg          (alg),
    .enable       (enable),
    .fine_time    (fine_time),
    .charge_valid (charge_valid),
    .charge       (charge),
    .out_valid    (corr_valid),
    .out          (corr)
  );

  data_packager #(
    .DROP_W (16)
  ) u_pack (
    .clk        (clk_sys),
    .rst_n      (rst_n),
    .in_valid   (corr_valid),
    .in         (corr),
    .pkt_valid  (pkt_valid),
    .pkt_data   (pkt_data),
    .pkt_ready  (pkt_ready),
    .drop_count (drop_count)
  );

endmodule
