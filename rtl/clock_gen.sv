// clock_gen: the clock generator module.
//
// The PLL multiplies CLKIN by R/M into a 3-6 GHz oscillator.  Two
// separately programmable dividers make sysclk (the memory, address
// generator, buffer and CMAC clock) and the internal output clock.
// outclk, which clocks the output module and is driven out on CLKOUT, is
// either that divided clock or, when `out_sel` is set, the user's clock
// from USROUTCLK passed straight through.  A divider setting of D gives
// f_vco / D (D = 0 or 1 passes the oscillator through); the divided clock
// is high for floor(D/2) of every D oscillator cycles, and comes from a
// flop so it has no glitches.
//
// Follows the chip description (one PLL, f_i R/M, two dividers, USROUTCLK
// selection); divider encoding and duty cycle are this design's choices.
// The clock selection is meant to be static (set during initialisation):
// the output-clock multiplexer is a plain multiplexer, not a glitch-free one.
module clock_gen (
  input  logic       rst_n,
  input  logic       clkin,
  input  logic       usroutclk,
  input  logic [9:0] pll_r,
  input  logic [9:0] pll_m,
  input  logic [7:0] sys_div,
  input  logic [7:0] out_div,
  input  logic       out_sel,
  output logic       sysclk,
  output logic       outclk,
  output logic       pll_lock
);

  logic vco;

  pll_macro u_pll (.REFCLK(clkin), .R(pll_r), .M(pll_m), .VCO(vco), .LOCK(pll_lock));

  logic sys_div_clk, out_div_clk;

  clk_divider u_sysdiv (.rst_n, .clk_in(vco), .div(sys_div), .clk_out(sys_div_clk));
  clk_divider u_outdiv (.rst_n, .clk_in(vco), .div(out_div), .clk_out(out_div_clk));

  assign sysclk = sys_div_clk;
  assign outclk = out_sel ? usroutclk : out_div_clk;

endmodule
