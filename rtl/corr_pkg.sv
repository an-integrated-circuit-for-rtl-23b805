// corr_pkg: constants and types shared by the correlator IC modules.
//
// The numbers here are the fixed design choices of the chip: 4-bit real and
// 4-bit imaginary input samples, 8b+8b products, 20b+20b cross-correlation
// accumulators (21b+21b on the array diagonal), 16b+16b results, a 16-bit
// memory address split into an 11-bit row-within-bank and a 5-bit bank
// number, and twelve 20-bit control registers.  The register map (which
// register holds what) is this design's own choice; the chip description
// only says that the registers hold the PLL settings, w, T, the three
// per-sub-integration start addresses and a split-mode bit.
package corr_pkg;

  // ---- data formats -------------------------------------------------------
  localparam int unsigned COMP_W   = 4;            // bits per real / imag part
  localparam int unsigned SAMP_W   = 2 * COMP_W;   // bits per complex sample
  localparam int unsigned PROD_W   = 8;            // bits per product part (w_x/2)
  localparam int unsigned XACC_W   = 20;           // cross-correlation accumulator part
  localparam int unsigned SACC_W   = 21;           // self-correlation accumulator part
  localparam int unsigned RES_W    = 16;           // rounded result part (w_o/2)
  localparam int unsigned DIN_W    = 32;           // DATAIN bus width
  localparam int unsigned DOUT_W   = 16;           // DATAOUT bus width

  // A complex sample: real part in the upper nibble, imaginary in the lower.
  typedef struct packed {
    logic signed [COMP_W-1:0] re;
    logic signed [COMP_W-1:0] im;
  } sample_t;

  // A complex result as held in a CMAC read-out register.
  typedef struct packed {
    logic [RES_W-1:0] re;
    logic [RES_W-1:0] im;
  } result_t;

  // ---- memory ---------------------------------------------------------------
  localparam int unsigned MEM_ADDR_W = 16;         // 65,536 words
  localparam int unsigned BANK_W     = 5;          // 32 banks of 2048 words
  localparam int unsigned NUM_BANKS  = 1 << BANK_W;

  typedef enum logic [1:0] {
    OP_IDLE  = 2'd0,   // refresh-only cycle
    OP_READ  = 2'd1,   // read with concurrent refresh
    OP_WRITE = 2'd2    // write with concurrent refresh
  } mem_op_e;

  // ---- control registers ----------------------------------------------------
  localparam int unsigned NUM_REGS   = 12;
  localparam int unsigned REG_W      = 20;
  localparam int unsigned REG_ADDR_W = 4;
  localparam int unsigned SPI_BITS   = REG_ADDR_W + 1 + REG_W;   // 25

  typedef enum logic [REG_ADDR_W-1:0] {
    R_ROWADDR = 4'd0,   // [15:0] row start address of next SI, [16] split mode
    R_COLADDR = 4'd1,   // [15:0] column start address of next SI
    R_WRADDR  = 4'd2,   // [15:0] write start address of next SI
    R_NGROUP  = 4'd3,   // [7:0]  w = 2N/n, number of 64-signal groups
    R_TLEN    = 4'd4,   // [19:0] T, CMAC cycles per sub-integration
    R_MODE    = 4'd5,   // [0] memory bypass mode, [1] outclk from USROUTCLK
    R_PLL     = 4'd6,   // [9:0] R, [19:10] M  (oscillator = f_i * R / M)
    R_SYSDIV  = 4'd7,   // [7:0] sysclk divider
    R_OUTDIV  = 4'd8,   // [7:0] outclk divider
    R_STATUS  = 4'd9,   // read-only, clear on read: [0] INTEGRATE misaligned,
                        //                           [1] input overrun
    R_SPARE0  = 4'd10,  // general purpose
    R_SPARE1  = 4'd11   // general purpose
  } reg_idx_e;

  localparam int unsigned NUM_STATUS = 2;

  // Reset values: N = 128 (w = 4), T = 1032, and a 5 GHz oscillator from a
  // 500 MHz CLKIN divided by 22 (sysclk 227.3 MHz) and by 10 (outclk 500 MHz),
  // the operating point of the chip's reference simulation.
  localparam logic [REG_W-1:0] REG_RESET [NUM_REGS] = '{
    20'h0_0000, 20'h0_0000, 20'h0_0000, 20'd4, 20'd1032, 20'h0_0000,
    {10'd1, 10'd10}, 20'd22, 20'd10, 20'h0_0000, 20'h0_0000, 20'h0_0000
  };

endpackage
