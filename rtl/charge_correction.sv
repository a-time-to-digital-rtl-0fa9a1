// Charge measurement correction block.
//
// Pairs each charge from the waveform integral block with the fine time of the
// pulse that produced it, and corrects the charge with one of the two
// look-up-table algorithms:
//   ALG_DUAL_LUT       time-walk LUT I, then the common coefficient LUT II
//   ALG_SECTIONAL_LUT  one coefficient LUT per charge section
// The fine time is captured when the TDC's enable signal (enable) is high,
// but only the first report after the previous charge is kept: later reports
// before the next charge come from pulses piled up on the one being summed
// and are dropped. A report in the same cycle as charge_valid is kept for the
// following charge. If no report came since the last charge, the charge is
// corrected with the last fine time kept.
// Both algorithms run on every measurement; alg is sampled with the charge and
// carried along, so a change of algorithm takes effect from the next charge on.
//
// Interface: cfg writes the tables of both algorithms. out_valid pulses
// 3 clocks after charge_valid, with the corrected charge and the (uncorrected)
// fine time in out. The description runs the two algorithms as separate FPGA
// builds; holding both behind a run-time select is this design's choice.
//
// Lint reports rst_n as used both synchronously and asynchronously. That
// comes from the assertions below, which are disabled during reset; every
// flip-flop that is reset uses rst_n as an asynchronous reset.
module charge_correction
  import charge_meas_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_wr_t             cfg,
  input  corr_alg_e           alg,
  input  logic                enable,
  input  logic [FINE_W-1:0]   fine_time,
  input  logic                charge_valid,
  input  logic [CHARGE_W-1:0] charge,
  output logic                out_valid,
  output meas_t               out
);

  localparam int unsigned LAT = 3;   // latency of both algorithm pipelines

  logic [FINE_W-1:0] fine_q;
  logic              held;     // a fine time was kept since the last charge

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fine_q <= FINE_W'(1);
      held   <= 1'b0;
    end else if (charge_valid) begin
      held <= enable;
      if (enable) fine_q <= fine_time;
    end else if (enable && !held) begin
      fine_q <= fine_time;
      held   <= 1'b1;
    end
  end

  logic               d_valid, s_valid;
  logic [QCORR_W-1:0] d_q, s_q;
  logic [FINE_W-1:0]  d_fine, s_fine;

  dual_lut_correction u_dual (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg       (cfg),
    .in_valid  (charge_valid),
    .q_in      (charge),
    .fine_in   (fine_q),
    .out_valid (d_valid),
    .q_out     (d_q),
    .fine_out  (d_fine)
  );

  sectional_lut_correction u_sect (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg       (cfg),
    .in_valid  (charge_valid),
    .q_in      (charge),
    .fine_in   (fine_q),
    .out_valid (s_valid),
    .q_out     (s_q),
    .fine_out  (s_fine)
  );

  // algorithm choice travels with the measurement
  corr_alg_e alg_pipe [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < LAT; n++) alg_pipe[n] <= ALG_DUAL_LUT;
    end else begin
      alg_pipe[0] <= alg;
      for (int n = 1; n < LAT; n++) alg_pipe[n] <= alg_pipe[n-1];
    end
  end

  always_comb begin
    if (alg_pipe[LAT-1] == ALG_SECTIONAL_LUT) begin
      out_valid     = s_valid;
      out.charge    = s_q;
      out.fine_time = s_fine;
    end else begin
      out_valid     = d_valid;
      out.charge    = d_q;
      out.fine_time = d_fine;
    end
  end

  a_paths_aligned: assert property (@(posedge clk) disable iff (!rst_n) d_valid == s_valid)
    else $error("correction pipelines out of step");

endmodule
