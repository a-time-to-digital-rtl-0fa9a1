// Clock source for simulations of the TDC: the 62.5 MHz system clock and the
// four 375 MHz phase clocks (0, 45, 90, 135 degrees) a PLL would deliver.
//
// Time advances in TDC bins of 1000/3 ps (333, 333, 334 ps, so that three bins
// are exactly 1 ns and nothing drifts). At bin b one clock edge happens:
// b mod 8 = p < 4 raises clk_fast[p], b mod 8 = p + 4 lowers it; clk_sys rises
// at b mod 48 = 0 and falls at b mod 48 = 24. tick counts the bins, so stimuli
// can be placed at an exact bin: the ADC period n starts at tick 48*n.
`timescale 1ps / 1ps
module tdc_clkgen (
  output logic       clk_sys,
  output logic [3:0] clk_fast,
  output longint     tick
);
  initial begin
    clk_sys  = 1'b0;
    clk_fast = 4'b0000;
    tick     = 0;
    forever begin
      automatic int s = int'(tick % 8);
      if (s < 4) clk_fast[s] = 1'b1;
      else       clk_fast[s-4] = 1'b0;
      if (tick % 48 == 0)  clk_sys = 1'b1;
      if (tick % 48 == 24) clk_sys = 1'b0;
      if (tick % 3 == 2) #334; else #333;
      tick = tick + 1;
    end
  end
endmodule
