// Fine-time encoder of the TDC.
//
// Receives one 48-sample window per system clock, samples[j] being the hit
// level at T1 + j*bin (see tdc_sampler). Together with the window of the
// previous cycle it forms the sequence of samples taken at T1 + s*bin,
// s = 0..48, and reports the first s in 1..48 where the hit goes from 0 to 1.
// That s equals [(T_th - T1) / bin] + 1, the fine time of the design
// description, for a threshold crossing T_th in (T1, T2].
//
// Timing: the window samples[47:0] of one cycle covers [T1, T2); the sample at
// T2 arrives with the next window, so a crossing in (T1, T2] is reported one
// system clock later than the window, registered: fine_valid rises two
// clk_sys edges after the edge that delivered the window holding T1..T2.
// Only the first rising edge within one ADC period is reported.
module tdc_fine_encoder #(
  parameter int unsigned FINE_BINS = 48,
  parameter int unsigned FINE_W    = $clog2(FINE_BINS + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [FINE_BINS-1:0] samples,
  output logic                 fine_valid,
  output logic [FINE_W-1:0]    fine_time
);

  logic [FINE_BINS-1:0] prev;
  logic [FINE_BINS:0]   seq;      // seq[s] = hit at T1 + s*bin, s = 0..48
  logic                 found;
  logic [FINE_W-1:0]    first;

  always_comb begin
    seq = {samples[0], prev};
    found = 1'b0;
    first = '0;
    for (int s = FINE_BINS; s >= 1; s--) begin
      if (seq[s] && !seq[s-1]) begin
        found = 1'b1;
        first = FINE_W'(s);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev       <= '1;        // no edge reported right after reset
      fine_valid <= 1'b0;
      fine_time  <= '0;
    end else begin
      prev       <= samples;
      fine_valid <= found;
      fine_time  <= found ? first : fine_time;
    end
  end

endmodule
