// spi_control: control module -- SPI slave and the twelve 20-bit registers.
//
// A transfer is 25 SCLK cycles with SSEL held low (SPI mode 0: MOSI is
// sampled on rising SCLK, MISO changes on falling SCLK, most significant
// bit first): 4 register-address bits, one write-enable bit, then 20 data
// bits.  During the 20 data cycles the slave returns the addressed
// register's contents on MISO; if the write-enable bit was set, the 20
// bits received replace the register at the 25th rising edge.  Everything
// on the SPI side runs on SCLK alone, so registers can be read and written
// while the PLL or CLKIN is not running.  Raising SSEL aborts a transfer.
//
// The status register (R_STATUS) is read-only.  Its bits are set by
// internal events, each signalled as a toggle from whatever clock domain
// it arises in and synchronised to sysclk here; a bit stays set until the
// status register has been read, and is then cleared.
//
// Reset (RESETN low) loads the default register values (corr_pkg), which
// let the chip run for N = 128, T = 1032.  The register contents are used
// by the other modules as quasi-static settings; the per-SI address
// registers are latched by the address generator at the start of each
// sub-integration, so they must be written inside an SI, never across its
// end.
//
// The transfer format (25 bits: 4 address, 1 write enable, 20 data),
// read-on-every-transfer and clear-on-read status follow the chip
// description; the SPI mode, SSEL polarity (active low), bit order and the
// register map are this design's choices.  MISO is driven low when the
// chip is not selected (the real pad would be released).
module spi_control
  import corr_pkg::*;
(
  input  logic             rst_n,
  // SPI
  input  logic             sclk,
  input  logic             ssel_n,
  input  logic             mosi,
  output logic             miso,
  // status events (toggles) and their sysclk domain
  input  logic             sysclk,
  input  logic [NUM_STATUS-1:0] status_tgl,
  // register values
  output logic [REG_W-1:0] regs [NUM_REGS]
);

  // ---- SPI shift logic (SCLK) ---------------------------------------------
  logic                  spi_idle;
  logic [4:0]            bitcnt;            // bits received in this transfer
  logic [REG_ADDR_W-1:0] addr;
  logic                  we;
  logic [REG_W-1:0]      din;
  logic [REG_W-1:0]      dout;
  logic                  clr_tgl;
  logic [NUM_STATUS-1:0] status;

  assign spi_idle = ssel_n || !rst_n;

  always_ff @(posedge sclk or posedge spi_idle) begin
    if (spi_idle) begin
      bitcnt <= '0;
      addr   <= '0;
      we     <= 1'b0;
      din    <= '0;
    end else begin
      if (bitcnt != 5'd31) bitcnt <= bitcnt + 1'b1;
      if (bitcnt < 5'd4)       addr <= {addr[REG_ADDR_W-2:0], mosi};
      else if (bitcnt == 5'd4) we   <= mosi;
      else                     din  <= {din[REG_W-2:0], mosi};
    end
  end

  function automatic logic [REG_W-1:0] read_value(input logic [REG_ADDR_W-1:0] a,
                                                  input logic [REG_W-1:0] r [NUM_REGS],
                                                  input logic [NUM_STATUS-1:0] st);
    if (a == R_STATUS)               return REG_W'(st);
    else if (a < REG_ADDR_W'(NUM_REGS)) return r[a];
    else                             return '0;
  endfunction

  // MISO: load the addressed register after the write-enable bit
  always_ff @(negedge sclk or posedge spi_idle) begin
    if (spi_idle) begin
      dout <= '0;
    end else if (bitcnt == 5'd5) begin
      dout <= read_value(addr, regs, status);
    end else begin
      dout <= {dout[REG_W-2:0], 1'b0};
    end
  end
  assign miso = !ssel_n && dout[REG_W-1];

  // clear-on-read request for the status register
  always_ff @(negedge sclk or negedge rst_n) begin
    if (!rst_n)                                        clr_tgl <= 1'b0;
    else if (!ssel_n && bitcnt == 5'd5 && addr == R_STATUS) clr_tgl <= ~clr_tgl;
  end

  // register write at the 25th rising edge
  always_ff @(posedge sclk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_REGS; i++) regs[i] <= REG_RESET[i];
    end else if (!ssel_n && bitcnt == 5'd24 && we
                 && addr < REG_ADDR_W'(NUM_REGS) && addr != R_STATUS) begin
      regs[addr] <= {din[REG_W-2:0], mosi};
    end
  end

  // ---- status bits (sysclk) ---------------------------------------------------
  logic [NUM_STATUS-1:0] st_s1, st_s2, st_s3;
  logic [2:0]            clr_s;

  always_ff @(posedge sysclk or negedge rst_n) begin
    if (!rst_n) begin
      st_s1  <= '0;
      st_s2  <= '0;
      st_s3  <= '0;
      clr_s  <= '0;
      status <= '0;
    end else begin
      st_s1 <= status_tgl;
      st_s2 <= st_s1;
      st_s3 <= st_s2;
      clr_s <= {clr_s[1:0], clr_tgl};
      status <= ((clr_s[2] ^ clr_s[1]) ? '0 : status) | (st_s3 ^ st_s2);
    end
  end

endmodule
