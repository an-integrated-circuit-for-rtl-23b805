// cmac: one complex multiply-accumulate cell of the correlator array.
//
// On every enabled clock the cell forms the product x * conj(y) of two
// 4b+4b complex samples with four 4x4 multipliers and two adders, giving an
// 8b+8b product, and adds it into a 20b+20b signed accumulator.  When `sync`
// is high (the first sample of a new sub-integration) the accumulator is not
// fed back: the new product is loaded directly, and the old accumulator
// contents are rounded to 16b+16b and copied into the read-out register
// `result`, which then holds steady for a whole sub-integration while the
// output interface reads it.
//
// Overflow is checked on every clock; once an accumulation overflows, the
// result of that sub-integration is forced to the largest positive or
// negative 16-bit value in the direction of the first overflow.  Rounding
// drops the 4 low bits with the half-way case rounded away from zero.
//
// Cells with SPLIT_CAPABLE=1 sit on the array diagonal and have 21b+21b
// accumulators.  In split mode such a cell accumulates two self-correlations
// at once: |x|^2 in the real half and |y|^2 in the imaginary half, both as
// unsigned 21-bit sums, rounded by dropping 5 bits (half-way rounded up) and
// saturated to 16-bit unsigned 65535.  In normal mode a diagonal cell works
// like any other cell, on the low 20 bits of its accumulators.  The mode
// that applies when a sub-integration is rounded is the mode that was
// presented with its first sample.
//
// Follows the chip description: bit widths, sync behaviour, 4-multiplier
// product, overflow-to-maximum, rounding away from zero, split mode with
// 21-bit accumulators and 5-bit rounding.  This design's own choices:
// conjugating y, the unsigned reading of the split-mode sums, the direction
// of saturation (first overflow), and a clock enable `en` in place of the
// gated CMAC clock.  Inputs must lie in [-7,+7]; -8 is excluded by the
// chip's data format and would overflow the 8-bit product.
//
// Timing: one clock per sample, `result` updated on the clock where
// en && sync.  Reset (rst_n low, asynchronous) clears everything.
module cmac
  import corr_pkg::*;
#(
  parameter int unsigned ACC_W         = XACC_W,  // accumulator bits per part
  parameter bit          SPLIT_CAPABLE = 1'b0     // diagonal cell
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,      // CMAC clock enable (memory read cycle)
  input  logic    sync,    // first sample of a sub-integration
  input  logic    split,   // split (self-correlation) mode, diagonal cells only
  input  sample_t x,       // row sample
  input  sample_t y,       // column sample
  output result_t result   // read-out register
);

  localparam int unsigned XRND = XACC_W - RES_W;   // 4 bits dropped
  localparam int unsigned SRND = ACC_W - RES_W;    // 5 bits dropped in split mode

  // ---- complex multiplier ------------------------------------------------
  logic signed [PROD_W-1:0] m_rr, m_ii, m_ir, m_ri;
  logic signed [PROD_W-1:0] prod_re, prod_im;
  logic        [PROD_W-1:0] self_x, self_y;
  logic                     use_split;

  assign use_split = SPLIT_CAPABLE && split;

  always_comb begin
    m_rr    = PROD_W'(x.re) * PROD_W'(y.re);
    m_ii    = PROD_W'(x.im) * PROD_W'(y.im);
    m_ir    = PROD_W'(x.im) * PROD_W'(y.re);
    m_ri    = PROD_W'(x.re) * PROD_W'(y.im);
    // x * conj(y)
    prod_re = m_rr + m_ii;
    prod_im = m_ir - m_ri;
    // |x|^2 and |y|^2 for split mode: the same multipliers, squared inputs
    self_x  = PROD_W'(x.re) * PROD_W'(x.re) + PROD_W'(x.im) * PROD_W'(x.im);
    self_y  = PROD_W'(y.re) * PROD_W'(y.re) + PROD_W'(y.im) * PROD_W'(y.im);
  end

  // ---- accumulators --------------------------------------------------------
  logic [ACC_W-1:0] acc_re, acc_im;
  logic             ovf_re, ovf_im;        // sticky overflow flags
  logic             neg_re, neg_im;        // direction of the first overflow
  logic             mode_q;                // split mode of the running SI

  // One accumulator part: returns {overflow, direction, new value}.
  function automatic logic [ACC_W+1:0] acc_step(
      input logic [ACC_W-1:0]  base,
      input logic [PROD_W-1:0] p,
      input logic              unsig);
    logic [ACC_W:0]  su;
    logic [XACC_W:0] ss;
    logic [ACC_W-1:0] v;
    if (unsig) begin
      su = {1'b0, base} + (ACC_W+1)'(p);
      return {su[ACC_W], 1'b0, su[ACC_W-1:0]};
    end else begin
      ss = {base[XACC_W-1], base[XACC_W-1:0]}
         + {{(XACC_W+1-PROD_W){p[PROD_W-1]}}, p};
      v  = ACC_W'({{(ACC_W-XACC_W+1){ss[XACC_W-1]}}, ss[XACC_W-2:0]});
      return {ss[XACC_W] ^ ss[XACC_W-1], ss[XACC_W], v};
    end
  endfunction

  // Round one signed 20-bit part to 16 bits, half away from zero, saturating.
  function automatic logic [RES_W-1:0] round_signed(
      input logic [ACC_W-1:0] a, input logic ovf, input logic neg);
    logic signed [XACC_W-1:0] v;
    logic        [XACC_W:0]   mag;
    logic        [XACC_W:0]   r;
    v   = signed'(a[XACC_W-1:0]);
    mag = v[XACC_W-1] ? (XACC_W+1)'(-v) : (XACC_W+1)'(v);
    r   = (mag + (XACC_W+1)'(1 << (XRND-1))) >> XRND;
    if (ovf)
      return neg ? {1'b1, {(RES_W-1){1'b0}}} : {1'b0, {(RES_W-1){1'b1}}};
    else if (v[XACC_W-1])
      return RES_W'(-r);                                   // r <= 2^15 here
    else if (r > (XACC_W+1)'((1 << (RES_W-1)) - 1))
      return {1'b0, {(RES_W-1){1'b1}}};
    else
      return RES_W'(r);
  endfunction

  // Round one unsigned split-mode part to 16 bits, half up, saturating.
  function automatic logic [RES_W-1:0] round_unsigned(
      input logic [ACC_W-1:0] a, input logic ovf);
    logic [ACC_W:0] r;
    r = ({1'b0, a} + (ACC_W+1)'(1 << (SRND-1))) >> SRND;
    if (ovf || r > (ACC_W+1)'((1 << RES_W) - 1))
      return {RES_W{1'b1}};
    else
      return RES_W'(r);
  endfunction

  logic [ACC_W+1:0] step_re, step_im;
  logic [PROD_W-1:0] p_re, p_im;

  always_comb begin
    p_re    = use_split ? self_x : prod_re;
    p_im    = use_split ? self_y : prod_im;
    step_re = acc_step(sync ? '0 : acc_re, p_re, use_split);
    step_im = acc_step(sync ? '0 : acc_im, p_im, use_split);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_re <= '0;
      acc_im <= '0;
      ovf_re <= 1'b0;
      ovf_im <= 1'b0;
      neg_re <= 1'b0;
      neg_im <= 1'b0;
      mode_q <= 1'b0;
      result <= '0;
    end else if (en) begin
      if (sync) begin
        // round and hold the finished sub-integration
        if (SPLIT_CAPABLE && mode_q) begin
          result.re <= round_unsigned(acc_re, ovf_re);
          result.im <= round_unsigned(acc_im, ovf_im);
        end else begin
          result.re <= round_signed(acc_re, ovf_re, neg_re);
          result.im <= round_signed(acc_im, ovf_im, neg_im);
        end
        mode_q <= use_split;
      end
      acc_re <= step_re[ACC_W-1:0];
      acc_im <= step_im[ACC_W-1:0];
      // the overflow flags restart with the accumulation
      ovf_re <= (ovf_re && !sync) || step_re[ACC_W+1];
      ovf_im <= (ovf_im && !sync) || step_im[ACC_W+1];
      if ((!ovf_re || sync) && step_re[ACC_W+1]) neg_re <= step_re[ACC_W];
      if ((!ovf_im || sync) && step_im[ACC_W+1]) neg_im <= step_im[ACC_W];
    end
  end

endmodule
