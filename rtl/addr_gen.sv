// addr_gen: memory address generator and sequencer of the correlator.
//
// Every sysclk cycle is a memory write, a memory read or a refresh-only
// (idle) cycle.  Work is done in groups of 2(w+1) cycles:
//     write, write,  then w/2 sets of  { row a, row a+1, col b, col b+1 }
// where w = 2N/n is the number of 64-signal groups, so that one memory word
// of new input data is written for every w words read, which is the ratio
// needed to keep up with the input.  A group starts only when two input
// words are waiting; otherwise the cycle is refresh-only, so the processing
// rate follows CLKIN and any extra sysclk cycles become idle cycles.  Each
// read cycle is one CMAC cycle; a sub-integration (SI) ends after T read
// cycles (T/(2w) groups).
//
// The row, column and write start addresses and the split-mode bit of an SI
// come from control registers and are latched when the SI begins (values
// written during an SI apply to the next one); inside an SI each address
// simply increments.  Start addresses are forced even, so that the pairs
// of adjacent addresses read or written back to back always alternate
// between even and odd banks and no bank is addressed on successive cycles
// (address = {withinBank[10:0], bank[4:0]}).
//
// Every cycle also names a bank to refresh concurrently (CRA).  It must
// differ from the banks accessed on the previous, current and next cycles
// and from the previous and next refresh banks.  The generator therefore
// decides each operation one cycle ahead and picks the refresh bank
// round-robin, skipping excluded banks (at most four, so one of five
// consecutive candidates is always free).  All 32 banks are refreshed in
// turn at close to one bank per cycle.
//
// Start-up: input words are discarded until one tagged with INTEGRATE
// reaches the head of the input queue; the first SI then starts.  A tagged
// word that arrives anywhere but at the start of an SI changes
// `err_integrate_tgl`, which the control block reports as a status bit.
// In bypass mode no memory cycles are made:
// every input word is passed to the CMAC array as one split-mode sample,
// and an SI is T input words.  A change of the bypass bit while running
// stops the sequencer until the next INTEGRATE.
//
// Interface/timing: the input queue is show-ahead (`in_count` words
// available, `in_first` = head word tagged); the word is consumed on the
// cycle `in_pop` is high, which for writes is the cycle the write command
// is on `mem_op`.  Memory outputs are registered, two cycles behind the
// decision.  The group sequence, the address structure, the refresh rules
// and the per-SI register use follow the chip description; the refresh
// algorithm (no published one exists), start-up and error
// handling are this design's choices.
module addr_gen
  import corr_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration (control registers)
  input  logic                  cfg_bypass,
  input  logic [7:0]            cfg_ngroup,    // w, even, >= 2
  input  logic [REG_W-1:0]      cfg_tlen,      // T, multiple of 2w
  input  logic [MEM_ADDR_W-1:0] cfg_row_base,
  input  logic [MEM_ADDR_W-1:0] cfg_col_base,
  input  logic [MEM_ADDR_W-1:0] cfg_wr_base,
  input  logic                  cfg_split,
  // input word queue
  input  logic [2:0]            in_count,
  input  logic                  in_first,
  output logic                  in_pop,
  // memory
  output mem_op_e               mem_op,
  output logic [MEM_ADDR_W-1:0] mem_addr,
  output logic [BANK_W-1:0]     mem_cra,
  output logic                  mem_sync,
  output logic                  mem_split,
  // bypass path
  output logic                  byp_valid,
  output logic                  byp_sync,
  // status
  output logic                  si_start,
  output logic                  err_integrate_tgl  // toggles on each error
);

  typedef enum logic [1:0] {S_IDLE, S_START, S_RUN, S_BYPASS} state_e;

  state_e                state;
  logic [1:0]            step;       // 0: write 0, 1: write 1, 2: reads
  logic [1:0]            q;          // position within a read set
  logic [6:0]            set_cnt;    // sets done in this group
  logic [REG_W-1:0]      rd_cnt;     // reads (CMAC cycles) done in this SI
  logic [MEM_ADDR_W-1:0] row_ptr, col_ptr, wr_ptr;
  logic                  split_cur, sync_pend;
  logic [7:0]            w_cur;
  logic [REG_W-1:0]      t_cur;

  // decided operation (one cycle ahead of nxt, two ahead of the outputs)
  mem_op_e               dec_op, nxt_op;
  logic [MEM_ADDR_W-1:0] dec_addr, nxt_addr;
  logic                  dec_sync, nxt_sync, nxt_split;
  logic                  write_pending, comb_pop, dec_err;

  assign write_pending = (nxt_op == OP_WRITE) || (mem_op == OP_WRITE);

  always_comb begin
    dec_op   = OP_IDLE;
    dec_addr = '0;
    dec_sync = 1'b0;
    comb_pop = 1'b0;
    dec_err  = 1'b0;
    unique case (state)
      S_IDLE:
        // drop untagged words until an INTEGRATE-tagged one is at the head
        if (in_count != 0 && !write_pending && !in_first) comb_pop = 1'b1;
      S_START: ;
      S_RUN:
        unique case (step)
          2'd0: if (in_count >= 3'd2 && !write_pending) begin
                  dec_op   = OP_WRITE;
                  dec_addr = wr_ptr;
                  dec_err  = in_first && (rd_cnt != 0);
                end
          2'd1: begin
                  dec_op   = OP_WRITE;
                  dec_addr = wr_ptr;
                end
          default: begin
                  dec_op   = OP_READ;
                  dec_addr = (q[1] ? col_ptr : row_ptr) + MEM_ADDR_W'(q[0]);
                  dec_sync = sync_pend && (q == 2'd0);
                end
        endcase
      S_BYPASS:
        if (in_count != 0) begin
          comb_pop = 1'b1;
          dec_err  = in_first && (rd_cnt != 0);
        end
      default: ;
    endcase
  end

  assign in_pop    = comb_pop || (mem_op == OP_WRITE);
  assign byp_valid = (state == S_BYPASS) && comb_pop;
  assign byp_sync  = byp_valid && (rd_cnt == 0);

  // ---- sequencing state -------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      step      <= '0;
      q         <= '0;
      set_cnt   <= '0;
      rd_cnt    <= '0;
      row_ptr   <= '0;
      col_ptr   <= '0;
      wr_ptr    <= '0;
      split_cur <= 1'b0;
      sync_pend <= 1'b0;
      w_cur     <= 8'd2;
      t_cur     <= '0;
      si_start  <= 1'b0;
      err_integrate_tgl <= 1'b0;
    end else begin
      si_start      <= 1'b0;
      if (dec_err) err_integrate_tgl <= ~err_integrate_tgl;
      unique case (state)
        S_IDLE:
          if (in_count != 0 && !write_pending && in_first)
            state <= cfg_bypass ? S_BYPASS : S_START;
        S_START: begin
          // latch the first SI's parameters
          row_ptr   <= {cfg_row_base[MEM_ADDR_W-1:1], 1'b0};
          col_ptr   <= {cfg_col_base[MEM_ADDR_W-1:1], 1'b0};
          wr_ptr    <= {cfg_wr_base[MEM_ADDR_W-1:1], 1'b0};
          split_cur <= cfg_split;
          w_cur     <= cfg_ngroup;
          t_cur     <= cfg_tlen;
          sync_pend <= 1'b1;
          step      <= '0;
          q         <= '0;
          set_cnt   <= '0;
          rd_cnt    <= '0;
          si_start  <= 1'b1;
          state     <= S_RUN;
        end
        S_RUN: begin
          if (cfg_bypass) begin
            state <= S_IDLE;
          end else if (dec_op == OP_WRITE) begin
            wr_ptr <= wr_ptr + 1'b1;
            step   <= step + 2'd1;
          end else if (dec_op == OP_READ) begin
            sync_pend <= 1'b0;
            q         <= q + 2'd1;
            rd_cnt    <= rd_cnt + 1'b1;
            if (q == 2'd3) begin
              row_ptr <= row_ptr + MEM_ADDR_W'(2);
              col_ptr <= col_ptr + MEM_ADDR_W'(2);
              if (rd_cnt + 1'b1 >= t_cur) begin
                // end of the sub-integration: latch the next one's parameters
                row_ptr   <= {cfg_row_base[MEM_ADDR_W-1:1], 1'b0};
                col_ptr   <= {cfg_col_base[MEM_ADDR_W-1:1], 1'b0};
                wr_ptr    <= {cfg_wr_base[MEM_ADDR_W-1:1], 1'b0};
                split_cur <= cfg_split;
                w_cur     <= cfg_ngroup;
                t_cur     <= cfg_tlen;
                sync_pend <= 1'b1;
                rd_cnt    <= '0;
                set_cnt   <= '0;
                step      <= '0;
                si_start  <= 1'b1;
              end else if (set_cnt + 1'b1 >= 7'(w_cur >> 1)) begin
                set_cnt <= '0;
                step    <= '0;
              end else begin
                set_cnt <= set_cnt + 1'b1;
              end
            end
          end
        end
        S_BYPASS: begin
          if (!cfg_bypass) begin
            state <= S_IDLE;
          end else if (comb_pop) begin
            if (rd_cnt == 0) begin
              si_start <= 1'b1;
              t_cur    <= cfg_tlen;
            end
            rd_cnt <= (rd_cnt + 1'b1 >= ((rd_cnt == 0) ? cfg_tlen : t_cur)) ? '0 : rd_cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- operation pipeline and refresh bank -----------------------------
  logic [BANK_W-1:0] rr, cra_pick;

  always_comb begin
    logic [BANK_W-1:0] cand;
    logic              found;
    cra_pick = rr;
    found    = 1'b0;
    for (int k = 0; k < 5; k++) begin
      cand = rr + BANK_W'(k);
      if (!found
          && !(nxt_op != OP_IDLE && cand == nxt_addr[BANK_W-1:0])
          && !(mem_op != OP_IDLE && cand == mem_addr[BANK_W-1:0])
          && !(dec_op != OP_IDLE && cand == dec_addr[BANK_W-1:0])
          && cand != mem_cra) begin
        cra_pick = cand;
        found    = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nxt_op    <= OP_IDLE;
      nxt_addr  <= '0;
      nxt_sync  <= 1'b0;
      nxt_split <= 1'b0;
      mem_op    <= OP_IDLE;
      mem_addr  <= '0;
      mem_sync  <= 1'b0;
      mem_split <= 1'b0;
      mem_cra   <= '0;
      rr        <= BANK_W'(1);
    end else begin
      nxt_op    <= dec_op;
      nxt_addr  <= dec_addr;
      nxt_sync  <= dec_sync;
      mem_op    <= nxt_op;
      mem_addr  <= nxt_addr;
      mem_sync  <= nxt_sync;
      nxt_split <= split_cur;
      mem_split <= nxt_split;
      mem_cra   <= cra_pick;
      rr        <= cra_pick + 1'b1;
    end
  end

endmodule
