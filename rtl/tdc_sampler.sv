// Multi-phase sampler and 1:6 deserializer of the TDC.
//
// The discriminator hit is sampled by flip-flops on both edges of four
// 375 MHz clocks that are 0, 45, 90 and 135 degrees apart, so within one fast
// period it is sampled at eight instants 333 ps apart (rising edges give
// phases 0..3, falling edges phases 4..7). Each of the eight sample streams is
// shifted into a 6-bit register in its own clock domain, which plays the role
// of the FPGA's serial-to-parallel input primitive. At every rising edge of the
// 62.5 MHz system clock the 48 latest samples are transferred in time order:
//   samples[8*f + p] = hit at T1 + (8*f + p) * 333 ps,  f = 0..5, p = 0..7,
// where T1 is the previous system clock edge. The window is therefore
// [T1, T1 + 16 ns), one ADC clock period.
//
// The clocks must come from one PLL: the 0-degree fast clock rises together
// with the system clock. No synchronizer is modelled on the asynchronous hit
// (the real sampling flip-flops resolve it; a late decision moves the code by
// at most one bin). The phase arrangement and bin size follow the design
// description; the per-stream shift register form of the deserializer is this
// implementation's choice.
module tdc_sampler #(
  parameter int unsigned N_PHASE      = 4,  // fast clocks
  parameter int unsigned FAST_PER_SYS = 6   // fast periods per system period
) (
  input  logic                                  clk_sys,
  input  logic [N_PHASE-1:0]                    clk_fast,
  input  logic                                  hit,
  output logic [2*N_PHASE*FAST_PER_SYS-1:0]     samples
);

  localparam int unsigned N_STREAM = 2 * N_PHASE;

  // rise_q[p][f] / fall_q[p][f]: sample of stream p in fast period f of the
  // current window; each phase's registers sit in a generate scope of their own
  // so that every register has a single clock.
  logic [FAST_PER_SYS-1:0] rise_q [N_PHASE];
  logic [FAST_PER_SYS-1:0] fall_q [N_PHASE];

  for (genvar p = 0; p < N_PHASE; p++) begin : g_phase
    logic [FAST_PER_SYS-1:0] sr_rise;
    logic [FAST_PER_SYS-1:0] sr_fall;
    always_ff @(posedge clk_fast[p]) begin
      sr_rise <= {hit, sr_rise[FAST_PER_SYS-1:1]};
    end
    always_ff @(negedge clk_fast[p]) begin
      sr_fall <= {hit, sr_fall[FAST_PER_SYS-1:1]};
    end
    assign rise_q[p] = sr_rise;
    assign fall_q[p] = sr_fall;
  end

  // Transfer into the system clock domain, reordered by sampling time.
  always_ff @(posedge clk_sys) begin
    for (int f = 0; f < FAST_PER_SYS; f++) begin
      for (int p = 0; p < N_PHASE; p++) begin
        samples[N_STREAM*f + p]           <= rise_q[p][f];
        samples[N_STREAM*f + N_PHASE + p] <= fall_q[p][f];
      end
    end
  end

endmodule
