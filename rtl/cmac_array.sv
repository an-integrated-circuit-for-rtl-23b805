// cmac_array: the n x n array of CMAC cells (n = 64, 4096 cells).
//
// In normal mode cell (r,c) correlates row signal r with column signal c,
// so one sub-integration (SI) yields all n*n cross-products of two groups of
// n signals.  In split mode, used for the SIs on the diagonal of the SI
// half-matrix and in memory-bypass mode, the array is re-organised so that
// it correlates each group with itself:
//   r > c : row[r] * conj(row[c])     (row group, below the diagonal)
//   r < c : col[r] * conj(col[c])     (column group, above the diagonal)
//   r = c : |row[r]|^2 in the real half and |col[c]|^2 in the imaginary half
// The diagonal cells have 21b+21b accumulators for the self-correlations;
// all others are 20b+20b.
//
// Interface: `row`/`col` carry one sample of each of the n row and n column
// signals per enabled clock; `en` is the CMAC clock enable (high on memory
// read cycles), `sync` marks the first sample of an SI and `split` selects
// the mode for that sample.  `result[r*NS+c]` is the read-out register of
// cell (r,c), valid from the clock after en && sync until the next one.
//
// The split-mode arrangement (which triangle holds which group, the
// diagonal doing two self-correlations) follows the chip description; the
// exact routing of rows and columns into the triangles, and conjugating the
// second operand, are this design's choices.
module cmac_array
  import corr_pkg::*;
#(
  parameter int unsigned NS = 64      // n: signals per row / column group
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  logic    sync,
  input  logic    split,
  input  sample_t row [NS],
  input  sample_t col [NS],
  output result_t result [NS*NS]
);

  for (genvar r = 0; r < NS; r++) begin : g_row
    for (genvar c = 0; c < NS; c++) begin : g_col
      sample_t cx, cy;
      if (r == c) begin : g_diag
        assign cx = row[r];
        assign cy = col[c];
        cmac #(.ACC_W(SACC_W), .SPLIT_CAPABLE(1'b1)) u_cmac (
          .clk, .rst_n, .en, .sync, .split, .x(cx), .y(cy),
          .result(result[r*NS+c]));
      end else begin : g_off
        if (r > c) begin : g_lower
          assign cx = row[r];
          assign cy = split ? row[c] : col[c];
        end else begin : g_upper
          assign cx = split ? col[r] : row[r];
          assign cy = col[c];
        end
        cmac #(.ACC_W(XACC_W), .SPLIT_CAPABLE(1'b0)) u_cmac (
          .clk, .rst_n, .en, .sync, .split, .x(cx), .y(cy),
          .result(result[r*NS+c]));
      end
    end
  end

endmodule
