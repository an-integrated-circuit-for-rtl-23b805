// tb_cmac: self-checking test of one CMAC cell and one diagonal CMAC cell.
//
// Drives random sub-integrations of 4b+4b samples in [-7,+7] and compares
// each rounded result with a reference computed here with plain integers
// (x * conj(y), round half away from zero to 16 bits).  Also checks the
// half-way rounding cases, saturation after positive and negative
// overflow, split mode (two self-correlations, 5-bit rounding, unsigned
// saturation) on the diagonal cell, that the result register changes only
// on the clock with sync, and that idle (en low) clocks change nothing.
module tb_cmac;
  import corr_pkg::*;

  logic    clk = 1'b0;
  logic    rst_n = 1'b0;
  logic    en = 1'b0, sync = 1'b0, split = 1'b0;
  sample_t x = '0, y = '0;
  result_t res_n, res_d;
  int      checks = 0, failures = 0;

  cmac #(.ACC_W(XACC_W), .SPLIT_CAPABLE(1'b0)) dut_n (
    .clk, .rst_n, .en, .sync, .split, .x, .y, .result(res_n));
  cmac #(.ACC_W(SACC_W), .SPLIT_CAPABLE(1'b1)) dut_d (
    .clk, .rst_n, .en, .sync, .split, .x, .y, .result(res_d));

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference ------------------------------------------------------------
  longint acc_re, acc_im;
  bit     ovf_re, ovf_im, neg_re, neg_im, mode;

  function automatic int rnd_s(longint v, bit ovf, bit neg);
    longint r;
    if (ovf) return neg ? -32768 : 32767;
    if (v >= 0) begin r = (v + 8) / 16; if (r > 32767) r = 32767; end
    else        r = -((-v + 8) / 16);
    return int'(r);
  endfunction
  function automatic int rnd_u(longint v, bit ovf);
    longint r;
    r = (v + 16) / 32;
    if (ovf || r > 65535) r = 65535;
    return int'(r);
  endfunction

  task automatic ref_add(longint pr, longint pi, bit self);
    acc_re += pr;
    acc_im += pi;
    if (self) begin
      if (!ovf_re && acc_re > 2097151) ovf_re = 1;
      if (!ovf_im && acc_im > 2097151) ovf_im = 1;
    end else begin
      if (!ovf_re && (acc_re > 524287 || acc_re < -524288)) begin ovf_re = 1; neg_re = acc_re < 0; end
      if (!ovf_im && (acc_im > 524287 || acc_im < -524288)) begin ovf_im = 1; neg_im = acc_im < 0; end
    end
  endtask

  function automatic sample_t mk(int re, int im);
    sample_t s;
    s.re = 4'(re);
    s.im = 4'(im);
    return s;
  endfunction

  task automatic check(string what, result_t got, int exp_re, int exp_im);
    checks++;
    if (got.re !== 16'(exp_re) || got.im !== 16'(exp_im)) begin
      failures++;
      $display("FAIL %s: got (%0d,%0d) expected (%0d,%0d)", what,
               $signed(got.re), $signed(got.im), exp_re, exp_im);
    end
  endtask

  // One sub-integration of len samples from function-generated data; the
  // result is checked on the sync of the following SI.
  // kind: 0 random, 1 constant (xr,xi,yr,yi).
  int xr_c, xi_c, yr_c, yi_c;
  task automatic run_si(int len, bit sp, int kind, string what, bit diag_only);
    int xr, xi, yr, yi;
    int e_re, e_im;
    longint sr, si;
    acc_re = 0; acc_im = 0; ovf_re = 0; ovf_im = 0; neg_re = 0; neg_im = 0;
    sr = 0; si = 0;
    for (int t = 0; t < len; t++) begin
      if (kind == 0) begin
        xr = int'($urandom_range(14)) - 7; xi = int'($urandom_range(14)) - 7;
        yr = int'($urandom_range(14)) - 7; yi = int'($urandom_range(14)) - 7;
      end else begin
        xr = xr_c; xi = xi_c; yr = yr_c; yi = yi_c;
      end
      @(negedge clk);
      x = mk(xr, xi); y = mk(yr, yi);
      en = 1'b1; sync = (t == 0); split = sp;
      if (sp) ref_add(xr*xr + xi*xi, yr*yr + yi*yi, 1'b1);
      else    ref_add(xr*yr + xi*yi, xi*yr - xr*yi, 1'b0);
      // idle cycle now and then: must change nothing
      if (t % 7 == 3) begin
        @(negedge clk);
        en = 1'b0; sync = 1'b0;
        x = mk(7, 7); y = mk(7, 7);
      end
    end
    // start the next SI with one sample and check the finished one
    @(negedge clk);
    en = 1'b0;
    if (sp) begin e_re = rnd_u(acc_re, ovf_re); e_im = rnd_u(acc_im, ovf_im); end
    else    begin e_re = rnd_s(acc_re, ovf_re, neg_re); e_im = rnd_s(acc_im, ovf_im, neg_im); end
    // the read-out register is checked after the clock that carries sync
    @(negedge clk);
    x = '0; y = '0; en = 1'b1; sync = 1'b1; split = 1'b0;
    @(posedge clk);
    #1;
    if (!diag_only) check({what, " normal cell"}, res_n, e_re, e_im);
    if (!sp || diag_only) check({what, " diagonal cell"}, res_d, e_re, e_im);
    @(negedge clk);
    en = 1'b0; sync = 1'b0;
    // one zero sample already accumulated as the first of the next SI
  endtask

  result_t res_prev;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // random sub-integrations, normal mode
    for (int k = 0; k < 20; k++) run_si(1 + int'($urandom_range(300)), 1'b0, 0, "random", 1'b0);
    // half-way rounding cases: single-sample SIs
    xr_c = -2; xi_c = 0; yr_c = 4; yi_c = 0;  run_si(1, 1'b0, 1, "round -8", 1'b0);   // -8 -> -1
    xr_c = 2;                                 run_si(1, 1'b0, 1, "round +8", 1'b0);   // 8 -> 1
    xr_c = 6;                                 run_si(1, 1'b0, 1, "round 24", 1'b0);   // 24 -> 2
    xr_c = -6;                                run_si(1, 1'b0, 1, "round -24", 1'b0);  // -24 -> -2
    xr_c = 7; yr_c = 1;                       run_si(1, 1'b0, 1, "round 7", 1'b0);    // 7 -> 0
    // positive and negative overflow (imaginary part +/-98 per sample)
    xr_c = 7; xi_c = 7; yr_c = 7;  yi_c = -7; run_si(5400, 1'b0, 1, "overflow +", 1'b0);
    xr_c = 7; xi_c = 7; yr_c = -7; yi_c = 7;  run_si(5400, 1'b0, 1, "overflow -", 1'b0);
    // large but legal: no saturation
    xr_c = 7; xi_c = 7; yr_c = 7;  yi_c = -7; run_si(5000, 1'b0, 1, "no overflow", 1'b0);
    // split mode on the diagonal cell
    for (int k = 0; k < 10; k++) run_si(1 + int'($urandom_range(2000)), 1'b1, 0, "split random", 1'b1);
    xr_c = 7; xi_c = 7; yr_c = 3; yi_c = 1;   run_si(21500, 1'b1, 1, "split overflow", 1'b1);
    // cycle check: result only changes on the clock with en && sync
    res_prev = res_n;
    @(negedge clk); x = mk(7, 7); y = mk(7, -7); en = 1'b1; sync = 1'b0;
    @(negedge clk); en = 1'b0;
    checks++;
    if (res_n !== res_prev) begin failures++; $display("FAIL result changed without sync"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
