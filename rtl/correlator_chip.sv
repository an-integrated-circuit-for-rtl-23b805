// correlator_chip: top level of the cross-correlator IC.
//
// The chip computes all cross-correlations of 2N signals for one slice of
// bandwidth in an FX correlator.  Input samples (4b+4b complex) arrive 4 per
// CLKIN cycle on DATAIN, are packed into 1024-bit words and written into a
// 64 Mib on-chip memory holding T samples of every signal.  The memory is
// then re-read many times: on each CMAC cycle one sample of 64 "row"
// signals and one of 64 "column" signals reach a 64 x 64 array of complex
// multiply-accumulators.  After T CMAC cycles (one sub-integration, SI) the
// 4096 complex results are latched and read out as 8192 16-bit words on
// DATAOUT, with SYNCOUT marking the first word.  w^2/2 SIs (w = 2N/64) give
// all correlations of one integration; new input data are written into
// memory regions that are no longer needed while the current integration
// is still being processed.  The start addresses of each SI are written by
// the user over SPI; N = 32 is served by a memory bypass mode.
//
//   DATAIN/INTEGRATE -> input_if -> corr_memory -> dram_buffer -> cmac_array
//                        -> output_if -> DATAOUT/SYNCOUT
//   addr_gen sequences the memory; spi_control holds the registers;
//   clock_gen makes sysclk and outclk from CLKIN (or USROUTCLK).
//
// Clock domains: CLKIN (input packing), sysclk (everything from the input
// FIFO to the CMAC read-out registers), outclk (output), SCLK (registers).
// RESETN is an asynchronous active-low reset of all modules.  The pins are
// those of the chip (39 in, 19 out); pad cells are not modelled.
//
// The module set and their connections follow the chip's block diagram;
// SSEL is taken as active low.
module correlator_chip
  import corr_pkg::*;
#(
  parameter int unsigned NS     = 64,      // n: CMAC array is NS x NS
  parameter int unsigned WORDS  = 65536,   // memory words of 2*NS samples
  parameter int unsigned RD_LAT = 2        // DRAM read latency, sysclk cycles
) (
  input  logic              CLKIN,
  input  logic [DIN_W-1:0]  DATAIN,
  input  logic              INTEGRATE,
  input  logic              RESETN,
  input  logic              USROUTCLK,
  input  logic              SPI_SCLK,
  input  logic              SPI_SSEL,
  input  logic              SPI_MOSI,
  output logic              SPI_MISO,
  output logic              CLKOUT,
  output logic [DOUT_W-1:0] DATAOUT,
  output logic              SYNCOUT
);

  localparam int unsigned WORD_W = 2 * NS * SAMP_W;
  localparam int unsigned AW     = $clog2(WORDS);

  // ---- control registers and clocks --------------------------------------
  logic [REG_W-1:0]      regs [NUM_REGS];
  logic [NUM_STATUS-1:0] status_tgl;
  logic                  sysclk, outclk;

  spi_control u_control (
    .rst_n(RESETN), .sclk(SPI_SCLK), .ssel_n(SPI_SSEL), .mosi(SPI_MOSI),
    .miso(SPI_MISO), .sysclk, .status_tgl, .regs);

  clock_gen u_clkgen (
    .rst_n(RESETN), .clkin(CLKIN), .usroutclk(USROUTCLK),
    .pll_r(regs[R_PLL][9:0]), .pll_m(regs[R_PLL][19:10]),
    .sys_div(regs[R_SYSDIV][7:0]), .out_div(regs[R_OUTDIV][7:0]),
    .out_sel(regs[R_MODE][1]), .sysclk, .outclk, .pll_lock());

  assign CLKOUT = outclk;

  // ---- input ----------------------------------------------------------------
  logic [2:0]        in_count;
  logic              in_first, in_pop;
  logic [WORD_W-1:0] in_word;

  input_if #(.NS(NS)) u_input (
    .rst_n(RESETN), .clkin(CLKIN), .datain(DATAIN), .integrate(INTEGRATE),
    .overrun_toggle(status_tgl[1]), .sysclk, .out_pop(in_pop),
    .out_count(in_count), .out_word(in_word), .out_first(in_first));

  // ---- address generator ----------------------------------------------------
  mem_op_e           mem_op;
  logic [15:0]       mem_addr;
  logic [BANK_W-1:0] mem_cra;
  logic              mem_sync, mem_split, byp_valid, byp_sync;

  addr_gen u_addrgen (
    .clk(sysclk), .rst_n(RESETN),
    .cfg_bypass(regs[R_MODE][0]), .cfg_ngroup(regs[R_NGROUP][7:0]),
    .cfg_tlen(regs[R_TLEN]), .cfg_row_base(regs[R_ROWADDR][15:0]),
    .cfg_col_base(regs[R_COLADDR][15:0]), .cfg_wr_base(regs[R_WRADDR][15:0]),
    .cfg_split(regs[R_ROWADDR][16]),
    .in_count, .in_first, .in_pop,
    .mem_op, .mem_addr, .mem_cra, .mem_sync, .mem_split,
    .byp_valid, .byp_sync, .si_start(), .err_integrate_tgl(status_tgl[0]));

  // ---- memory ---------------------------------------------------------------
  logic              rd_valid, rd_sync, rd_split;
  logic [WORD_W-1:0] rd_data;

  corr_memory #(.WORD_W(WORD_W), .WORDS(WORDS), .RD_LAT(RD_LAT)) u_memory (
    .clk(sysclk), .rst_n(RESETN), .op(mem_op), .addr(mem_addr[AW-1:0]),
    .cra(mem_cra), .wdata(in_word), .sync_in(mem_sync), .split_in(mem_split),
    .rd_valid, .rdata(rd_data), .rd_sync, .rd_split);

  // ---- buffer and CMAC array -------------------------------------------------
  logic    cm_en, cm_sync, cm_split;
  sample_t row [NS];
  sample_t col [NS];
  result_t result [NS*NS];

  dram_buffer #(.NS(NS)) u_buffer (
    .clk(sysclk), .rst_n(RESETN),
    .rd_valid, .rd_data, .rd_sync, .rd_split,
    .byp_valid, .byp_data(in_word), .byp_sync,
    .cm_en, .cm_sync, .cm_split, .row, .col);

  cmac_array #(.NS(NS)) u_array (
    .clk(sysclk), .rst_n(RESETN), .en(cm_en), .sync(cm_sync), .split(cm_split),
    .row, .col, .result);

  // ---- output ---------------------------------------------------------------
  output_if #(.NS(NS)) u_output (
    .rst_n(RESETN), .sysclk, .load(cm_en && cm_sync), .result,
    .outclk, .dataout(DATAOUT), .syncout(SYNCOUT));

endmodule
