// input_if: the chip's input module.
//
// DATAIN is a 32-bit bus sampled on the rising edge of CLKIN; each word
// carries four 8-bit samples (4b real in the upper nibble, 4b imaginary in
// the lower) of four different signals at the same sampling time.  The
// module packs WORD_W/32 successive input words (32 for n = 64) into one
// 1024-bit memory word: input word k goes to bits [32k+31:32k], so the
// first 16 words are time t of signals 0..63 and the next 16 are time t+1.
// In bypass mode the same word carries one sample of two sets of 64
// signals.  INTEGRATE, high with the first input word of an integration,
// restarts the packing and tags the memory word it starts; the tag is the
// delayed INTEGRATE seen by the address generator.
//
// Completed words cross from CLKIN to sysclk through a 4-word asynchronous
// FIFO with Gray-coded pointers.  The sysclk side is show-ahead: `out_word`
// and `out_first` show the oldest word, `out_count` how many are waiting,
// and `out_pop` consumes one.  A word that arrives when the FIFO is full is
// dropped and `overrun_toggle` changes state (the sysclk domain then
// reports an input-overrun error).
//
// The 32-input-word packing and the INTEGRATE hand-off follow the chip
// description; the order of samples in the bus and in the memory word, the
// FIFO and the overrun report are this design's choices.
module input_if
  import corr_pkg::*;
#(
  parameter int unsigned NS     = 64,
  localparam int unsigned WORD_W = 2 * NS * SAMP_W
) (
  input  logic              rst_n,
  // CLKIN domain
  input  logic              clkin,
  input  logic [DIN_W-1:0]  datain,
  input  logic              integrate,
  output logic              overrun_toggle,
  // sysclk domain
  input  logic              sysclk,
  input  logic              out_pop,
  output logic [2:0]        out_count,
  output logic [WORD_W-1:0] out_word,
  output logic              out_first
);

  localparam int unsigned NWORDS = WORD_W / DIN_W;
  localparam int unsigned CW     = $clog2(NWORDS);

  // ---- packing (CLKIN) ------------------------------------------------------
  logic [WORD_W-1:0] pack;
  logic [CW-1:0]     cnt;
  logic              pack_first;
  logic              word_done;
  logic [WORD_W-1:0] done_word;
  logic              done_first;

  always_ff @(posedge clkin or negedge rst_n) begin
    if (!rst_n) begin
      cnt        <= '0;
      pack       <= '0;
      pack_first <= 1'b0;
      word_done  <= 1'b0;
      done_word  <= '0;
      done_first <= 1'b0;
    end else begin
      word_done <= 1'b0;
      if (integrate) begin
        pack[DIN_W-1:0] <= datain;
        pack_first      <= 1'b1;
        cnt             <= CW'(1);
      end else begin
        pack[cnt*DIN_W +: DIN_W] <= datain;
        cnt <= cnt + 1'b1;
        if (cnt == CW'(NWORDS-1)) begin
          word_done  <= 1'b1;
          done_word  <= {datain, pack[WORD_W-DIN_W-1:0]};
          done_first <= pack_first;
          pack_first <= 1'b0;
        end
      end
    end
  end

  // ---- asynchronous FIFO, 4 entries ------------------------------------------
  logic [WORD_W:0] fifo [4];
  logic [2:0] wptr, rptr;                 // binary, one wrap bit
  logic [2:0] wgray, rgray;
  logic [2:0] wgray_s1, wgray_s2, rgray_s1, rgray_s2;
  logic [2:0] wptr_s, rptr_s;

  function automatic logic [2:0] bin2gray(input logic [2:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [2:0] gray2bin(input logic [2:0] g);
    return {g[2], g[2] ^ g[1], g[2] ^ g[1] ^ g[0]};
  endfunction

  assign wgray = bin2gray(wptr);
  assign rgray = bin2gray(rptr);

  // write side
  always_ff @(posedge clkin or negedge rst_n) begin
    if (!rst_n) begin
      rgray_s1 <= '0;
      rgray_s2 <= '0;
      wptr     <= '0;
      overrun_toggle <= 1'b0;
    end else begin
      rgray_s1 <= rgray;
      rgray_s2 <= rgray_s1;
      if (word_done) begin
        if (wptr - rptr_s == 3'd4) overrun_toggle <= ~overrun_toggle;
        else                       wptr <= wptr + 3'd1;
      end
    end
  end
  assign rptr_s = gray2bin(rgray_s2);

  always_ff @(posedge clkin) begin
    if (word_done && (wptr - rptr_s != 3'd4)) fifo[wptr[1:0]] <= {done_first, done_word};
  end

  // read side
  always_ff @(posedge sysclk or negedge rst_n) begin
    if (!rst_n) begin
      wgray_s1 <= '0;
      wgray_s2 <= '0;
      rptr     <= '0;
    end else begin
      wgray_s1 <= wgray;
      wgray_s2 <= wgray_s1;
      if (out_pop && out_count != 0) rptr <= rptr + 3'd1;
    end
  end
  assign wptr_s    = gray2bin(wgray_s2);
  assign out_count = wptr_s - rptr;
  assign {out_first, out_word} = fifo[rptr[1:0]];

endmodule
