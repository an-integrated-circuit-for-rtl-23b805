// output_if: the chip's output module.
//
// At the start of every sub-integration the CMAC read-out registers take
// the results of the previous one and then hold them for a whole
// sub-integration.  This module sends them out on the 16-bit DATAOUT bus,
// one 16-bit half per outclk cycle, in 2*n*n = 8192 cycles: cell (r,c) in
// row-major order (index r*n+c), real half first, then imaginary half.
// SYNCOUT is high during the cycle that carries the first word.  If outclk
// is faster than needed, DATAOUT holds the last word after the 8192 valid
// ones until the next SYNCOUT.
//
// The load event (`load`, sysclk domain, high on the CMAC cycle that
// copies accumulators into the read-out registers) is turned into a toggle
// and passed to outclk through a two-flop synchroniser.  The read-out
// registers are not synchronised: they are stable from before the toggle
// is seen until the next load, one sub-integration later; the user must
// choose outclk fast enough to finish in that time, as the chip requires.
//
// Follows the chip description for the bus width, word count and SYNCOUT;
// the word order and the clock-domain crossing are this design's choices.
module output_if
  import corr_pkg::*;
#(
  parameter int unsigned NS = 64
) (
  input  logic              rst_n,
  input  logic              sysclk,
  input  logic              load,
  input  result_t           result [NS*NS],
  input  logic              outclk,
  output logic [DOUT_W-1:0] dataout,
  output logic              syncout
);

  localparam int unsigned NWORDS = 2 * NS * NS;
  localparam int unsigned CW     = $clog2(NWORDS);

  logic load_tgl;
  always_ff @(posedge sysclk or negedge rst_n) begin
    if (!rst_n)    load_tgl <= 1'b0;
    else if (load) load_tgl <= ~load_tgl;
  end

  logic [2:0]  tgl_s;              // two synchroniser flops and one for edge
  logic [CW:0] cnt;                // NWORDS means idle
  logic        start;

  assign start = tgl_s[2] ^ tgl_s[1];

  always_ff @(posedge outclk or negedge rst_n) begin
    if (!rst_n) begin
      tgl_s   <= '0;
      cnt     <= (CW+1)'(NWORDS);
      dataout <= '0;
      syncout <= 1'b0;
    end else begin
      tgl_s   <= {tgl_s[1:0], load_tgl};
      syncout <= 1'b0;
      if (start) begin
        cnt <= (CW+1)'(1);
        dataout <= result[0].re;
        syncout <= 1'b1;
      end else if (cnt < (CW+1)'(NWORDS)) begin
        cnt     <= cnt + 1'b1;
        dataout <= cnt[0] ? result[cnt[CW-1:1]].im : result[cnt[CW-1:1]].re;
      end
    end
  end

endmodule
