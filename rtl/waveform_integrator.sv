// Waveform integral block: charge by area integration of the ADC samples.
//
// The block triggers itself on the ADC data: when it is idle and armed, the
// first sample above trig_threshold starts a sum of N_SUM consecutive samples,
// that sample being the first. The sum is then reported as the charge Q_i.
// N_SUM is 27: the dead time allows only that many points, so the sum ends
// before the shaped pulse (80 ns rise, 280 ns fall) is back at its baseline.
// Because the window is tied to the waveform while the ADC clock is free
// running, where the 27 samples fall on the pulse depends on the pulse's phase
// to the clock; this and the truncated tail are what the fine-time correction
// removes. After a sum the block re-arms only once a sample is at or below
// the threshold again, so the tail of one pulse cannot start a second sum.
//
// Interface: busy is high while a sum runs (the dead time). charge_valid
// pulses for one cycle with charge, N_SUM cycles after the trigger cycle
// (trigger sample in cycle n, last sample in cycle n+26, charge_valid in
// cycle n+27). busy is high in cycles n+1..n+26.
//
// The ADC width, the number of summation points and the integral block's own
// trigger (its only input in the block diagram is the ADC stream; the TDC
// feeds the correction block) follow the design description. The threshold
// trigger, the re-arm rule and the absence of baseline subtraction and of a
// pre-trigger delay are this implementation's choices.
module waveform_integrator #(
  parameter int unsigned ADC_W    = 12,
  parameter int unsigned N_SUM    = 27,
  parameter int unsigned CHARGE_W = $clog2(N_SUM * ((1 << ADC_W) - 1) + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [ADC_W-1:0]    adc_data,
  input  logic [ADC_W-1:0]    trig_threshold,
  output logic                busy,
  output logic                charge_valid,
  output logic [CHARGE_W-1:0] charge
);

  localparam int unsigned CNT_W = $clog2(N_SUM + 1);

  logic [CHARGE_W-1:0] acc;
  logic [CNT_W-1:0]    remaining;   // samples still to add after this cycle
  logic                armed;
  logic                above;

  assign above = adc_data > trig_threshold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc          <= '0;
      remaining    <= '0;
      busy         <= 1'b0;
      armed        <= 1'b0;
      charge_valid <= 1'b0;
      charge       <= '0;
    end else begin
      charge_valid <= 1'b0;
      if (!busy) begin
        if (armed && above) begin
          acc       <= CHARGE_W'(adc_data);
          remaining <= CNT_W'(N_SUM - 1);
          busy      <= 1'b1;
          armed     <= 1'b0;
        end else if (!above) begin
          armed     <= 1'b1;
        end
      end else begin
        if (remaining == CNT_W'(1)) begin
          charge       <= acc + CHARGE_W'(adc_data);
          charge_valid <= 1'b1;
          busy         <= 1'b0;
        end
        acc       <= acc + CHARGE_W'(adc_data);
        remaining <= remaining - 1'b1;
      end
    end
  end

  // The sum of N_SUM codes fits the output width; at least two points.
  initial begin
    assert (CHARGE_W >= $clog2(N_SUM * ((1 << ADC_W) - 1) + 1))
      else $error("CHARGE_W too small for N_SUM samples");
    assert (N_SUM >= 2) else $error("N_SUM must be at least 2");
  end

endmodule
