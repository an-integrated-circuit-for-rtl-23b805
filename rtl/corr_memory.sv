// corr_memory: the chip's 1024-bit x 65,536-word buffer memory.
//
// Two 512-bit DRAM macros side by side make one 1024-bit word (the low
// macro holds bits [511:0]).  Each clock is a read, a write or a
// refresh-only cycle, as chosen by the address generator, and every clock
// out of reset refreshes bank `cra` concurrently (none during reset).  Read data appear RD_LAT clocks after
// the read command, marked by `rd_valid`.  The sub-integration sync and the
// CMAC-mode flag that accompany a read command are delayed by the same
// latency and otherwise unused, so they stay aligned with the data.
//
// Follows the chip description (two 512 x 65,536 macros, concurrent
// refresh, sync passed through with the read latency); the latency value
// is an assumption about the macro.
module corr_memory
  import corr_pkg::*;
#(
  parameter int unsigned WORD_W = 1024,
  parameter int unsigned WORDS  = 65536,
  parameter int unsigned RD_LAT = 2,
  localparam int unsigned AW    = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mem_op_e           op,
  input  logic [AW-1:0]     addr,
  input  logic [BANK_W-1:0] cra,
  input  logic [WORD_W-1:0] wdata,
  input  logic              sync_in,
  input  logic              split_in,
  output logic              rd_valid,
  output logic [WORD_W-1:0] rdata,
  output logic              rd_sync,
  output logic              rd_split
);

  localparam int unsigned HW = WORD_W / 2;

  logic readn, wrtn;
  assign readn = (op != OP_READ);
  assign wrtn  = (op != OP_WRITE);

  for (genvar h = 0; h < 2; h++) begin : g_macro
    dram_macro #(.WORDS(WORDS), .DW(HW), .BANK_W(BANK_W), .RD_LAT(RD_LAT)) u_dram (
      .CLK(clk), .READN(readn), .WRTN(wrtn), .REFN(!rst_n),
      .A(addr), .CRA(cra), .D(wdata[h*HW +: HW]), .Q(rdata[h*HW +: HW]));
  end

  // tag pipeline: {valid, sync, split}
  logic [2:0] tag [RD_LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < RD_LAT; i++) tag[i] <= '0;
    end else begin
      tag[0] <= {op == OP_READ, sync_in && op == OP_READ, split_in};
      for (int i = 1; i < RD_LAT; i++) tag[i] <= tag[i-1];
    end
  end
  assign {rd_valid, rd_sync, rd_split} = tag[RD_LAT-1];

endmodule
