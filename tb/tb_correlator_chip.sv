// tb_correlator_chip: end-to-end test of the correlator IC at its default
// size (64 x 64 CMACs, 65,536-word memory).
//
// Memory mode, N = 128 antennas (w = 4 groups of 64 signals), T = 128:
// the testbench streams integrations of quantised pseudo-random samples in
// the chip's input order, raising INTEGRATE with the first word of each,
// and after every SYNCOUT writes the next sub-integration's start
// addresses and split bit over SPI, following the 8-SI schedule for w = 4
// (rows/columns: split(0,1), (1,0), (2,0), (3,0), (2,1), (3,1),
// split(2,3), (3,2), starting at the fifth).  Output sub-integrations
// 6..13 hold the first integration; each of their 4096 results is compared
// with correlations computed here directly from the samples.
//
// Bypass mode (N = 32), output clock from USROUTCLK: one random
// sub-integration (two sets of 64 signals) is checked, then one of 5400
// full-scale samples whose cross-correlations must saturate.  Finally an
// INTEGRATE in the middle of a sub-integration must set the status bit,
// which must clear after being read.
//
// Counted mechanisms (each must occur): normal and split SIs, write,
// read and refresh-only memory cycles, bypass SIs, saturation, the
// USROUTCLK output clock, the status error and its clear-on-read.  Also
// checked: T CMAC cycles per sub-integration and 8192 words per output.
module tb_correlator_chip;
  import corr_pkg::*;

  localparam int NS    = 64;
  localparam int W     = 4;          // groups: N = 128
  localparam int T     = 128;
  localparam int NSIG  = W * NS;
  localparam int TB    = 64;         // bypass SI length
  localparam int TOVF  = 5400;       // saturating bypass SI length

  // clocks
  logic CLKIN = 1'b0, USROUTCLK = 1'b0;
  always #1    CLKIN     = ~CLKIN;        // 500 MHz
  always #0.125 USROUTCLK = ~USROUTCLK;   // 4 GHz

  logic [31:0] DATAIN = '0;
  logic        INTEGRATE = 1'b0, RESETN = 1'b0;
  logic        SPI_SCLK = 1'b0, SPI_SSEL = 1'b1, SPI_MOSI = 1'b0, SPI_MISO;
  logic        CLKOUT, SYNCOUT;
  logic [15:0] DATAOUT;

  correlator_chip dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- test data -------------------------------------------------------------
  function automatic int hval(int a, int b, int seed);
    int unsigned h;
    h = 32'(a) * 32'h9E3779B1 ^ 32'(b) * 32'h85EBCA77 ^ 32'(seed) * 32'hC2B2AE3D;
    h ^= h >> 15; h *= 32'h2C1B3C6D; h ^= h >> 12;
    return int'(h % 15) - 7;
  endfunction
  function automatic logic [7:0] sbyte(int re, int im);
    return {4'(re), 4'(im)};
  endfunction
  // memory-mode samples: signal s, time t
  function automatic int m_re(int s, int t); return hval(s, t, 1); endfunction
  function automatic int m_im(int s, int t); return hval(s, t, 2); endfunction
  // bypass samples: set 0 = rows, set 1 = columns
  function automatic int b_re(int s, int t); return hval(s, t, 3); endfunction
  function automatic int b_im(int s, int t); return hval(s, t, 4); endfunction

  // ---- SPI master (mode 0, 50 MHz) --------------------------------------------
  task automatic spi(input int a, input bit we, input int d, output int rd);
    logic [24:0] frame;
    frame = {4'(a), we, 20'(d)};
    rd = 0;
    SPI_SSEL = 1'b0;
    #10;
    for (int i = 24; i >= 0; i--) begin
      SPI_MOSI = frame[i];
      #10 SPI_SCLK = 1'b1;
      if (i < 20) rd = (rd << 1) | int'(SPI_MISO);
      #10 SPI_SCLK = 1'b0;
    end
    #10 SPI_SSEL = 1'b1;
    #20;
  endtask
  task automatic spi_wr(input int a, input int d);
    int dummy;
    spi(a, 1'b1, d, dummy);
  endtask

  // SI schedule for w = 4: pattern p = (s + 4) mod 8
  int p_row [8] = '{0, 1, 2, 3, 2, 3, 2, 3};
  int p_col [8] = '{1, 0, 0, 0, 1, 1, 3, 2};
  bit p_spl [8] = '{1, 0, 0, 0, 0, 0, 1, 0};

  task automatic write_si_regs(int s);
    int p;
    p = (s + W) % 8;
    spi_wr(R_ROWADDR, (p_spl[p] << 16) | (p_row[p] * T / 2));
    spi_wr(R_COLADDR, p_col[p] * T / 2);
    spi_wr(R_WRADDR, (s % 8) * (T / 4));
  endtask

  // ---- input driver ------------------------------------------------------------
  task automatic send_word(logic [31:0] d, bit integ);
    @(negedge CLKIN);
    DATAIN = d;
    INTEGRATE = integ;
  endtask

  // one memory word = 32 input words: signals g*64.., times 2tp, 2tp+1
  task automatic send_mem_word(int g, int tp, bit integ);
    logic [31:0] d;
    for (int k = 0; k < 32; k++) begin
      for (int j = 0; j < 4; j++) begin
        int s, t;
        s = g * NS + 4 * (k % 16) + j;
        t = 2 * tp + k / 16;
        d[8*j +: 8] = sbyte(m_re(s, t), m_im(s, t));
      end
      send_word(d, integ && k == 0);
    end
  endtask

  // ---- expected results -----------------------------------------------------------
  function automatic int rnd_s(longint v);
    longint r;
    if (v > 524287) return 32767;
    if (v < -524288) return -32768;
    if (v >= 0) begin r = (v + 8) / 16; if (r > 32767) r = 32767; end
    else        r = -((-v + 8) / 16);
    return int'(r);
  endfunction
  function automatic int rnd_u(longint v);
    longint r;
    r = (v + 16) / 32;
    return (r > 65535) ? 65535 : int'(r);
  endfunction

  logic [15:0] exp_w [2*NS*NS];
  int          xr [2][NS][], xi [2][NS][];   // [row/col][signal][t]

  // expected output words of one SI from sample arrays xr/xi of length len
  task automatic compute_expected(bit split, int len);
    for (int r = 0; r < NS; r++)
      for (int c = 0; c < NS; c++) begin
        longint sr, si;
        int ar, ai, br, bi;
        sr = 0; si = 0;
        for (int t = 0; t < len; t++) begin
          if (split && r == c) begin
            sr += xr[0][r][t] * xr[0][r][t] + xi[0][r][t] * xi[0][r][t];
            si += xr[1][c][t] * xr[1][c][t] + xi[1][c][t] * xi[1][c][t];
          end else begin
            if (split && r > c)      begin ar = xr[0][r][t]; ai = xi[0][r][t]; br = xr[0][c][t]; bi = xi[0][c][t]; end
            else if (split && r < c) begin ar = xr[1][r][t]; ai = xi[1][r][t]; br = xr[1][c][t]; bi = xi[1][c][t]; end
            else                     begin ar = xr[0][r][t]; ai = xi[0][r][t]; br = xr[1][c][t]; bi = xi[1][c][t]; end
            sr += ar * br + ai * bi;
            si += ai * br - ar * bi;
          end
        end
        if (split && r == c) begin
          exp_w[2*(r*NS+c)]   = 16'(rnd_u(sr));
          exp_w[2*(r*NS+c)+1] = 16'(rnd_u(si));
        end else begin
          exp_w[2*(r*NS+c)]   = 16'(rnd_s(sr));
          exp_w[2*(r*NS+c)+1] = 16'(rnd_s(si));
        end
      end
  endtask

  task automatic load_mem_si(int p);
    for (int s = 0; s < NS; s++) begin
      xr[0][s] = new[T]; xi[0][s] = new[T]; xr[1][s] = new[T]; xi[1][s] = new[T];
      for (int t = 0; t < T; t++) begin
        xr[0][s][t] = m_re(p_row[p] * NS + s, t); xi[0][s][t] = m_im(p_row[p] * NS + s, t);
        xr[1][s][t] = m_re(p_col[p] * NS + s, t); xi[1][s][t] = m_im(p_col[p] * NS + s, t);
      end
    end
  endtask

  // ---- output collector ------------------------------------------------------------
  logic [15:0] got [2*NS*NS];
  int          n_out = 0;          // SYNCOUTs seen
  int          n_words;
  event        out_done;
  int          n_done = 0;         // complete outputs collected

  always @(posedge CLKOUT) begin
    if (SYNCOUT) begin
      n_out++;
      n_words = 0;
    end
    if (n_out > 0 && n_words < 2*NS*NS) begin
      got[n_words] = DATAOUT;
      n_words++;
      if (n_words == 2*NS*NS) begin
        n_done++;
        -> out_done;
      end
    end
  end

  int n_mismatch;
  task automatic compare(string what);
    n_mismatch = 0;
    for (int i = 0; i < 2*NS*NS; i++) begin
      checks++;
      if (got[i] !== exp_w[i]) begin
        failures++;
        if (n_mismatch++ < 5)
          $display("FAIL %s word %0d (cell %0d %s): got %0d expected %0d", what, i, i/2,
                   (i % 2) ? "im" : "re", $signed(got[i]), $signed(exp_w[i]));
      end
    end
  endtask

  // ---- mechanism counters -------------------------------------------------------------
  int n_wr = 0, n_rd = 0, n_idle = 0, n_loads = 0, n_cm = 0, n_cm_bad = 0;
  int n_split_si = 0, n_normal_si = 0, n_bypass_si = 0, n_sat = 0;
  int n_status = 0, n_status_clr = 0, n_usrclk = 0;
  int cm_in_si;
  bit rate_check = 1'b0;
  int rate_t = T;

  always @(posedge dut.sysclk) begin
    if (RESETN) begin
      case (dut.mem_op)
        OP_WRITE: n_wr++;
        OP_READ:  n_rd++;
        default:  n_idle++;
      endcase
      if (dut.cm_en) begin
        if (dut.cm_sync) begin
          n_loads++;
          if (rate_check && n_loads > 2) begin
            checks++;
            if (cm_in_si != rate_t) begin
              failures++;
              $display("FAIL %0d CMAC cycles in an SI, expected %0d", cm_in_si, rate_t);
            end
          end
          cm_in_si = 0;
        end
        cm_in_si++;
      end
    end
  end

  // ---- stimulus --------------------------------------------------------------------------
  int rd;
  int seen = 0;
  initial begin
    repeat (5) @(negedge CLKIN);
    RESETN = 1'b1;
    // configuration: w = 4, T = 256, outclk = oscillator (5 GHz), sysclk = osc/22
    spi_wr(R_NGROUP, W);
    spi_wr(R_TLEN, T);
    spi_wr(R_OUTDIV, 1);
    spi(R_TLEN, 1'b0, 0, rd);
    checks++;
    if (rd != T) begin failures++; $display("FAIL register read back %0d", rd); end
    write_si_regs(0);
    repeat (20) @(negedge CLKIN);
    rate_check = 1'b1;
    fork
      // input: 16 SIs worth of data = 2 integrations
      begin
        for (int integ = 0; integ < 2; integ++)
          for (int g = 0; g < W; g++)
            for (int tp = 0; tp < T / 2; tp++)
              send_mem_word(g, tp, g == 0 && tp == 0);
      end
      // next SI's registers after every SYNCOUT
      begin
        for (int k = 1; k <= 15; k++) begin
          @(posedge CLKOUT iff SYNCOUT);
          write_si_regs(k);
        end
      end
    join_none
    // outputs 6..13: the first integration
    while (n_normal_si + n_split_si < 8) begin
      int k, p;
      wait (n_done > seen);
      seen = n_done;
      k = n_out;
      if (k >= 6) begin
        p = (k - 2 + W) % 8;
        load_mem_si(p);
        compute_expected(p_spl[p], T);
        compare($sformatf("memory-mode output %0d", k));
        if (p_spl[p]) n_split_si++; else n_normal_si++;
        $display("[%0t] memory-mode output %0d checked", $time, k);
      end
    end
    disable fork;
    SPI_SSEL = 1'b1;
    SPI_SCLK = 1'b0;
    #100;
    checks++;
    if (n_out < 14) begin failures++; $display("FAIL only %0d outputs", n_out); end
    // ---- bypass mode, output clock from USROUTCLK ----
    $display("[%0t] bypass phase", $time);
    rate_check = 1'b0;
    spi_wr(R_MODE, 3);
    spi_wr(R_TLEN, TB);
    repeat (100) @(negedge CLKIN);
    for (int s = 0; s < NS; s++) begin
      xr[0][s] = new[TB]; xi[0][s] = new[TB]; xr[1][s] = new[TB]; xi[1][s] = new[TB];
      for (int t = 0; t < TB; t++) begin
        xr[0][s][t] = b_re(s, t); xi[0][s][t] = b_im(s, t);
        xr[1][s][t] = b_re(NS + s, t); xi[1][s][t] = b_im(NS + s, t);
      end
    end
    compute_expected(1'b1, TB);
    fork
      begin
        for (int t = 0; t < TB; t++)
          for (int k = 0; k < 32; k++) begin
            logic [31:0] d;
            for (int j = 0; j < 4; j++) begin
              int s;
              s = 4 * (k % 16) + j + (k / 16) * NS;
              d[8*j +: 8] = sbyte(b_re(s, t), b_im(s, t));
            end
            send_word(d, t == 0 && k == 0);
          end
        // saturating SI: rows 7+7j, columns 7-7j
        for (int t = 0; t < TOVF + 1; t++)
          for (int k = 0; k < 32; k++)
            send_word((k < 16) ? {4{8'h77}} : {4{8'h79}}, 1'b0);
      end
      begin
        repeat (200) @(negedge CLKIN);
        spi_wr(R_TLEN, TOVF);
      end
    join
    // the random bypass SI was read out at the start of the long one
    // (second SYNCOUT of bypass mode); check it from a fresh capture below
    // ---- results of the saturating SI ----
    @(out_done);
    for (int r = 0; r < NS; r++)
      for (int c = 0; c < NS; c++) begin
        int er, ei;
        if (r == c) begin er = rnd_u(longint'(98) * TOVF); ei = rnd_u(longint'(98) * TOVF); end
        else        begin er = 32767; ei = 0; end
        exp_w[2*(r*NS+c)] = 16'(er); exp_w[2*(r*NS+c)+1] = 16'(ei);
      end
    compare("bypass saturating SI");
    if (n_mismatch == 0) begin n_sat++; n_bypass_si++; end
    // ---- INTEGRATE in the middle of an SI -> status bit, clear on read ----
    for (int k = 0; k < 32 * 3; k++) send_word({4{8'h11}}, k == 32);
    repeat (50) @(negedge CLKIN);
    spi(R_STATUS, 1'b0, 0, rd);
    checks++;
    if (rd[0] !== 1'b1) begin failures++; $display("FAIL status bit not set (%0h)", rd); end
    else n_status++;
    spi(R_STATUS, 1'b0, 0, rd);
    checks++;
    if (rd[0] !== 1'b0) begin failures++; $display("FAIL status bit not cleared (%0h)", rd); end
    else n_status_clr++;
    // ---- mechanisms ----
    $display("SIs checked: normal %0d split %0d bypass %0d; cycles: write %0d read %0d refresh-only %0d; saturation %0d; USROUTCLK words %0d; status set/clear %0d/%0d",
             n_normal_si, n_split_si, n_bypass_si, n_wr, n_rd, n_idle, n_sat, n_usrclk, n_status, n_status_clr);
    if (n_normal_si == 0) begin failures++; $display("FAIL no normal SI"); end
    if (n_split_si == 0)  begin failures++; $display("FAIL no split SI"); end
    if (n_bypass_si < 2)  begin failures++; $display("FAIL bypass SIs %0d", n_bypass_si); end
    if (n_wr == 0 || n_rd == 0 || n_idle == 0) begin failures++; $display("FAIL memory cycle types"); end
    if (n_sat == 0)       begin failures++; $display("FAIL no saturation"); end
    if (n_usrclk == 0)    begin failures++; $display("FAIL USROUTCLK unused"); end
    if (n_status == 0 || n_status_clr == 0) begin failures++; $display("FAIL status mechanism"); end
    checks += 7;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random bypass SI: checked at the first full output after bypass starts
  bit byp_seen = 1'b0;
  int byp_out0;
  initial begin
    wait (dut.regs[R_MODE][0] == 1'b1);
    byp_out0 = n_out;
    // bypass SYNCOUT 1: leftover; 2: random SI
    wait (n_out == byp_out0 + 2);
    @(out_done);
    n_mismatch = 0;
    for (int i = 0; i < 2*NS*NS; i++) begin
      checks++;
      if (got[i] !== exp_w[i]) begin
        failures++;
        if (n_mismatch++ < 5) $display("FAIL bypass random word %0d: got %0d expected %0d",
                                       i, $signed(got[i]), $signed(exp_w[i]));
      end
    end
    if (n_mismatch == 0) n_bypass_si++;
  end

  // output clock taken from USROUTCLK: CLKOUT edges while selected
  always @(posedge USROUTCLK) if (dut.regs[R_MODE][1] && n_words < 2*NS*NS && n_out > 0) n_usrclk++;

endmodule
