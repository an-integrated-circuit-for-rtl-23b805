// pll_macro: behavioural model of the foundry PLL hard macro (not a design;
// the real part is an analog vendor cell).
//
// The macro's oscillator runs in the 3-6 GHz range, locked to f_ref * R / M
// with R and M integers set from the control registers.  The model measures
// the REFCLK period in simulation time, and after three reference edges
// starts a square-wave VCO with period T_ref * M / R, re-measured every
// reference cycle so that a change of R or M (or of the reference) takes
// effect within a cycle.  LOCK rises once the oscillator runs.  Frequency
// range limits are not modelled.
//
// The ports other than REFCLK, R and M, and all timing, are assumptions.
module pll_macro (
  input  logic       REFCLK,
  input  logic [9:0] R,
  input  logic [9:0] M,
  output logic       VCO,
  output logic       LOCK
);

  realtime t_last;
  realtime t_ref;
  int      n_edges;
  realtime half;

  initial begin
    t_last  = 0.0;
    t_ref   = 0.0;
    n_edges = 0;
  end

  always @(posedge REFCLK) begin
    t_ref   = $realtime - t_last;
    t_last  = $realtime;
    if (n_edges < 3) n_edges = n_edges + 1;
  end

  initial begin
    VCO  = 1'b0;
    LOCK = 1'b0;
    wait (n_edges == 3);
    LOCK = 1'b1;
    forever begin
      half = t_ref * real'((M == 10'd0) ? 10'd1 : M)
                   / (2.0 * real'((R == 10'd0) ? 10'd1 : R));
      #(half) VCO = ~VCO;
    end
  end

endmodule
