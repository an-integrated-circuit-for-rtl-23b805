// dram_macro: behavioural model of the foundry's 512 x 65,536 embedded DRAM
// hard macro.  It is a model, not a design: the real macro is a vendor cell.
//
// The model stores 65,536 words of 512 bits in 32 banks of 2048 words; the
// low 5 address bits are the bank number (address = {withinBank, bank}).
// Control pins are active low: READN (read), WRTN (write), REFN (refresh
// of bank CRA, concurrent with a read or write).  Reads return data on Q
// RD_LAT clocks after the command; the macro is internally pipelined, which
// is why the same bank may not be addressed on two successive clocks, and
// why the concurrently refreshed bank must differ from the banks accessed
// and refreshed on the previous and current clocks (checked against the
// next clock when that clock arrives).  The model checks these rules with
// assertions and counts refreshes per bank.
//
// Modelled from the chip description (size, banks, pins, refresh rules);
// the read latency and the exact pin names of the address and data buses
// are assumptions.
module dram_macro #(
  parameter int unsigned WORDS  = 65536,
  parameter int unsigned DW     = 512,
  parameter int unsigned BANK_W = 5,
  parameter int unsigned RD_LAT = 2,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic              CLK,
  input  logic              READN,
  input  logic              WRTN,
  input  logic              REFN,
  input  logic [AW-1:0]     A,
  input  logic [BANK_W-1:0] CRA,
  input  logic [DW-1:0]     D,
  output logic [DW-1:0]     Q
);

  logic [DW-1:0] mem [WORDS];
  logic [DW-1:0] q_pipe [RD_LAT];

  // previous-cycle state for the bank rules
  logic              prev_acc  = 1'b0;
  logic              prev_ref  = 1'b0;
  logic [BANK_W-1:0] prev_bank = '0;
  logic [BANK_W-1:0] prev_cra  = '0;
  logic              acc;
  logic [BANK_W-1:0] bank;

  assign acc  = !READN || !WRTN;
  assign bank = A[BANK_W-1:0];

  always_ff @(posedge CLK) begin
    if (!WRTN) mem[A] <= D;
    q_pipe[0] <= mem[A];
    for (int i = 1; i < RD_LAT; i++) q_pipe[i] <= q_pipe[i-1];
  end
  assign Q = q_pipe[RD_LAT-1];

  // ---- protocol checks --------------------------------------------------
  always @(posedge CLK) begin
    prev_acc  <= acc;
    prev_ref  <= !REFN;
    prev_bank <= bank;
    prev_cra  <= CRA;
  end

  always @(posedge CLK) begin
    assert (READN || WRTN)
      else $error("dram_macro: read and write on the same cycle");
    if (acc && prev_acc)
      assert (bank != prev_bank)
        else $error("dram_macro: bank %0d addressed on successive cycles", bank);
    if (!REFN) begin
      if (acc)      assert (CRA != bank)      else $error("dram_macro: refresh bank = access bank");
      if (prev_acc) assert (CRA != prev_bank) else $error("dram_macro: refresh bank = previous access bank");
      if (prev_ref) assert (CRA != prev_cra)  else $error("dram_macro: same bank refreshed twice in a row");
    end
    if (acc && prev_ref)
      assert (bank != prev_cra) else $error("dram_macro: access bank = previous refresh bank");
  end

  // refresh counters, for observation by a testbench
  int unsigned refresh_count [1 << BANK_W];
  initial foreach (refresh_count[i]) refresh_count[i] = 0;
  always @(posedge CLK) if (!REFN) refresh_count[CRA] <= refresh_count[CRA] + 1;

endmodule
