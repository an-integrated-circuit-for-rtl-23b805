// dram_buffer: reorders memory words into CMAC-array samples.
//
// A 1024-bit memory word holds two consecutive time samples of 64 signals:
// bits [511:0] are time t (signal s in bits [8s+7:8s]) and bits [1023:512]
// are time t+1.  The address generator reads in sets of four words:
//   word 0: row data, samples t and t+1      word 2: column data, t and t+1
//   word 1: row data, samples t+2 and t+3    word 3: column data, t+2 and t+3
// The CMAC array needs row and column samples of the same time on each
// clock, so this buffer stores a complete set and replays it as
//   (row t, col t), (row t+1, col t+1), (row t+2, col t+2), (row t+3, col t+3).
// It holds two sets (8 words, double-buffered): while set k is being
// written, set k-1 is replayed, one CMAC sample per incoming read word, so
// the latency is one set (four read cycles).  The sub-integration sync and
// split flags that arrive with the first word of a set leave with the first
// CMAC sample of that set.
//
// In memory-bypass mode (N = 32) the input word goes straight to the array:
// its low half is used as the 64 row signals and its high half as the 64
// column signals (two independent sets of 64 signals, e.g. two frequency
// channels), always in split mode, one CMAC cycle per input word.
//
// Interface: rd_* is the memory read stream (valid one clock per read word),
// byp_* the bypass stream; cm_* drives the CMAC array, registered, one clock
// after the word that causes it.  The reordering and the 8-word double
// buffer follow the chip description; the bit layout of a word, replaying
// the previous set while the next is read, and the bypass word layout are
// this design's choices.
module dram_buffer
  import corr_pkg::*;
#(
  parameter int unsigned NS     = 64,
  localparam int unsigned WORD_W = 2 * NS * SAMP_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // memory read stream
  input  logic              rd_valid,
  input  logic [WORD_W-1:0] rd_data,
  input  logic              rd_sync,
  input  logic              rd_split,
  // memory bypass stream
  input  logic              byp_valid,
  input  logic [WORD_W-1:0] byp_data,
  input  logic              byp_sync,
  // to the CMAC array
  output logic              cm_en,
  output logic              cm_sync,
  output logic              cm_split,
  output sample_t           row [NS],
  output sample_t           col [NS]
);

  localparam int unsigned HALF_W = NS * SAMP_W;

  logic [WORD_W-1:0] set_mem [2][4];
  logic [1:0]        set_sync, set_split, set_full;
  logic              wr_bank;
  logic [1:0]        wr_idx;
  logic              rd_bank;

  assign rd_bank = ~wr_bank;

  function automatic sample_t pick(input logic [WORD_W-1:0] wd, input logic hi,
                                   input int unsigned s);
    return hi ? sample_t'(wd[HALF_W + s*SAMP_W +: SAMP_W])
              : sample_t'(wd[s*SAMP_W +: SAMP_W]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_bank   <= 1'b0;
      wr_idx    <= '0;
      set_sync  <= '0;
      set_split <= '0;
      set_full  <= '0;
    end else if (rd_valid) begin
      if (wr_idx == 2'd0) begin
        set_sync[wr_bank]  <= rd_sync;
        set_split[wr_bank] <= rd_split;
      end
      wr_idx <= wr_idx + 2'd1;
      if (wr_idx == 2'd3) begin
        wr_bank           <= ~wr_bank;
        set_full[wr_bank] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rd_valid) set_mem[wr_bank][wr_idx] <= rd_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cm_en    <= 1'b0;
      cm_sync  <= 1'b0;
      cm_split <= 1'b0;
      for (int s = 0; s < NS; s++) begin
        row[s] <= '0;
        col[s] <= '0;
      end
    end else if (byp_valid) begin
      cm_en    <= 1'b1;
      cm_sync  <= byp_sync;
      cm_split <= 1'b1;
      for (int s = 0; s < NS; s++) begin
        row[s] <= pick(byp_data, 1'b0, s);
        col[s] <= pick(byp_data, 1'b1, s);
      end
    end else if (rd_valid && set_full[rd_bank]) begin
      cm_en    <= 1'b1;
      cm_sync  <= set_sync[rd_bank] && (wr_idx == 2'd0);
      cm_split <= set_split[rd_bank];
      for (int s = 0; s < NS; s++) begin
        row[s] <= pick(set_mem[rd_bank][{1'b0, wr_idx[1]}], wr_idx[0], s);
        col[s] <= pick(set_mem[rd_bank][{1'b1, wr_idx[1]}], wr_idx[0], s);
      end
    end else begin
      cm_en   <= 1'b0;
      cm_sync <= 1'b0;
    end
  end

endmodule
