// clk_divider: programmable integer clock divider used by clock_gen.
//
// Counts input clock cycles modulo `div` and produces an output that is
// high for the first floor(div/2) counts of each period, from a flop.
// div = 0 or 1 passes the input clock through unchanged.  The setting may
// change at any time; a new value takes effect at the next wrap of the
// counter.  This helper is this design's own; the chip description only
// says that the dividers are programmable.
module clk_divider (
  input  logic       rst_n,
  input  logic       clk_in,
  input  logic [7:0] div,
  output logic       clk_out
);

  logic [7:0] cnt;
  logic       q;

  always_ff @(posedge clk_in or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      q   <= 1'b0;
    end else begin
      if (cnt + 8'd1 >= div) cnt <= '0;
      else                   cnt <= cnt + 8'd1;
      q <= ((cnt + 8'd1 >= div) ? 8'd0 : cnt + 8'd1) < (div >> 1);
    end
  end

  assign clk_out = (div <= 8'd1) ? clk_in : q;

endmodule
