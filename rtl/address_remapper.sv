// address_remapper: relocates scratchpad accesses of the running task into
// the banks it has been given, so that several tasks can keep data resident
// in the scratchpad at once and a context switch need not save it.
//
// State: one banklock semaphore and owner task per bank, a fill point per
// bank (banks fill from row 0 upward), and the remapping block, ENTRIES
// entries of {valid, task, laddr, real_laddr, rows}. Each entry maps a run of
// 'rows' consecutive local rows of one task, starting at laddr, onto the
// physical rows starting at real_laddr.
//
// Write path (DMA into the scratchpad): in the cycle of wr_valid the address
// is translated combinationally (wr_ok, wr_real) and the state is updated at
// the clock edge:
//   1. an entry of cur_task already covers the row: overwrite in place;
//   2. the row continues the last run written into a bank of cur_task and the
//      bank has room: that entry grows by one row;
//   3. otherwise a new entry is made in the first bank the task holds with
//      room left or, if the task holds fewer than bank_quota banks, in the
//      first unlocked bank, which is then locked for the task;
//   4. otherwise the write is refused (wr_ok = 0) and alloc_error is set.
// Read path: rd_laddr is looked up among cur_task's entries, combinationally;
// a miss passes the address through unchanged with rd_hit = 0.
// flush_valid releases every bank owned by flush_task, invalidates its
// entries, and reports the released banks on 'released' for one cycle (the
// scratchpad clears them). ent_* read and write whole entries for
// mvout/mvin_remapping_block; writing a valid entry locks its bank for the
// entry's task. The accumulator is not remapped.
//
// Follows the paper: banklocks, the remapping block with laddr / real_laddr /
// rows, allocation into a partly filled bank of the task or an unlocked one,
// the bank quota. This design's choices: the bottom-up fill, run extension,
// a one-cycle parallel search, and the remapping block kept in registers.
// The assertions are disabled during reset with the same rst_n the flops
// use asynchronously; a lint tool may report rst_n as used both ways, which
// concerns only the assertions and no logic.
module address_remapper
  import mesc_pkg::*;
#(
  parameter int SP_BANKS_P  = 8,
  parameter int BANK_ROWS_P = 2048,
  parameter int ENTRIES     = 256
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic [TASK_W-1:0]                      cur_task,
  input  logic [3:0]                             bank_quota,
  input  logic                                   wr_valid,
  input  logic [31:0]                            wr_laddr,
  output logic                                   wr_ok,
  output logic [$clog2(SP_BANKS_P*BANK_ROWS_P)-1:0] wr_real,
  input  logic [31:0]                            rd_laddr,
  output logic                                   rd_hit,
  output logic [$clog2(SP_BANKS_P*BANK_ROWS_P)-1:0] rd_real,
  input  logic                                   flush_valid,
  input  logic [TASK_W-1:0]                      flush_task,
  output logic [SP_BANKS_P-1:0]                  released,
  input  logic [$clog2(ENTRIES)-1:0]             ent_idx,
  output remap_entry_t                           ent_rdata,
  input  logic                                   ent_we,
  input  remap_entry_t                           ent_wdata,
  output logic [SP_BANKS_P-1:0]                  banklock,
  output logic [SP_BANKS_P-1:0][TASK_W-1:0]      bank_owner,
  output logic                                   alloc_error
);
  localparam int RW = $clog2(SP_BANKS_P * BANK_ROWS_P);
  localparam int OW = $clog2(BANK_ROWS_P);
  localparam int BW = $clog2(SP_BANKS_P);
  localparam int EW = $clog2(ENTRIES);

  remap_entry_t [ENTRIES-1:0] ent;  // packed view of the entries (g_ent[i].e)
  logic [OW:0]             fill     [SP_BANKS_P];
  logic [EW-1:0]           last_ent [SP_BANKS_P];
  logic [SP_BANKS_P-1:0]   last_ok;

  assign ent_rdata = ent[ent_idx];

  // ---------------- lookup of a local row among cur_task's runs
  function automatic logic covers(remap_entry_t e, logic [TASK_W-1:0] t, logic [31:0] a);
    return e.valid && e.task_id == t && a >= e.laddr && (a - e.laddr) < 32'(e.rows);
  endfunction

  // per-entry match vectors, then priority encoders (lowest index wins)
  logic [ENTRIES-1:0] m_wr, m_rd, m_free;
  for (genvar i = 0; i < ENTRIES; i++) begin : g_match
    assign m_wr[i]   = covers(ent[i], cur_task, wr_laddr);
    assign m_rd[i]   = covers(ent[i], cur_task, rd_laddr);
    assign m_free[i] = !ent[i].valid;
  end

  function automatic logic [EW-1:0] first_one(logic [ENTRIES-1:0] v);
    logic [EW-1:0] r;
    r = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) if (v[i]) r = EW'(i);
    return r;
  endfunction

  logic          wr_hit, rd_found, ent_free_ok;
  logic [EW-1:0] wr_hit_idx, rd_hit_idx, free_idx;
  assign wr_hit      = |m_wr;
  assign rd_found    = |m_rd;
  assign ent_free_ok = |m_free;
  assign wr_hit_idx  = first_one(m_wr);
  assign rd_hit_idx  = first_one(m_rd);
  assign free_idx    = first_one(m_free);

  assign rd_hit  = rd_found;
  assign rd_real = rd_found ? RW'(ent[rd_hit_idx].real_laddr + (rd_laddr - ent[rd_hit_idx].laddr))
                            : rd_laddr[RW-1:0];

  // ---------------- extension of a run, choice of a bank
  remap_entry_t  last_e [SP_BANKS_P];
  for (genvar b = 0; b < SP_BANKS_P; b++) begin : g_last
    assign last_e[b] = ent[last_ent[b]];
  end

  logic          ext_ok;
  logic [BW-1:0] ext_bank;
  logic          own_ok, free_ok;
  logic [BW-1:0] own_bank, free_bank;
  logic [4:0]    held;
  always_comb begin
    ext_ok = 1'b0; ext_bank = '0;
    own_ok = 1'b0; own_bank = '0;
    free_ok = 1'b0; free_bank = '0;
    held = '0;
    for (int b = SP_BANKS_P - 1; b >= 0; b--) begin
      if (banklock[b] && bank_owner[b] == cur_task) begin
        if (last_ok[b] && last_e[b].valid && last_e[b].task_id == cur_task &&
            wr_laddr == last_e[b].laddr + 32'(last_e[b].rows) &&
            fill[b] < (OW+1)'(BANK_ROWS_P)) begin
          ext_ok = 1'b1; ext_bank = BW'(b);
        end
        if (fill[b] < (OW+1)'(BANK_ROWS_P)) begin own_ok = 1'b1; own_bank = BW'(b); end
      end
      if (!banklock[b]) begin free_ok = 1'b1; free_bank = BW'(b); end
    end
    for (int b = 0; b < SP_BANKS_P; b++)
      if (banklock[b] && bank_owner[b] == cur_task) held = held + 5'd1;
  end

  typedef enum logic [1:0] {W_HIT, W_EXT, W_NEW, W_FAIL} wmode_e;
  wmode_e        wmode;
  logic [BW-1:0] new_bank;
  always_comb begin
    new_bank = own_ok ? own_bank : free_bank;
    if (wr_hit)                                                   wmode = W_HIT;
    else if (ext_ok)                                              wmode = W_EXT;
    else if (ent_free_ok && (own_ok || (free_ok && 5'(bank_quota) > held))) wmode = W_NEW;
    else                                                          wmode = W_FAIL;
    case (wmode)
      W_HIT:   wr_real = RW'(ent[wr_hit_idx].real_laddr + (wr_laddr - ent[wr_hit_idx].laddr));
      W_EXT:   wr_real = {ext_bank, fill[ext_bank][OW-1:0]};
      W_NEW:   wr_real = {new_bank, fill[new_bank][OW-1:0]};
      default: wr_real = '0;
    endcase
    wr_ok = (wmode != W_FAIL);
  end

  // ---------------- state update
  // the remapping block: one register process per entry, written by a
  // decoded enable from each source (later sources take precedence)
  logic [EW-1:0] ext_idx;
  assign ext_idx = last_ent[ext_bank];
  for (genvar i = 0; i < ENTRIES; i++) begin : g_ent
    remap_entry_t e;
    assign ent[i] = e;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        e <= '0;
      end else begin
        if (wr_valid && wmode == W_NEW && free_idx == EW'(i))
          e <= '{valid: 1'b1, task_id: cur_task, laddr: wr_laddr,
                      real_laddr: 32'({new_bank, fill[new_bank][OW-1:0]}), rows: 16'd1, pad: '0};
        if (wr_valid && wmode == W_EXT && ext_idx == EW'(i))
          e.rows <= e.rows + 16'd1;
        if (ent_we && ent_idx == EW'(i))
          e <= '{valid: ent_wdata.valid, task_id: ent_wdata.task_id, laddr: ent_wdata.laddr,
                      real_laddr: 32'(ent_wdata.real_laddr[RW-1:0]), rows: ent_wdata.rows, pad: '0};
        if (flush_valid && e.task_id == flush_task)
          e.valid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < SP_BANKS_P; b++) begin
        fill[b]     <= '0;
        last_ent[b] <= '0;
      end
      last_ok     <= '0;
      banklock    <= '0;
      bank_owner  <= '0;
      released    <= '0;
      alloc_error <= 1'b0;
    end else begin
      released <= '0;
      if (wr_valid) begin
        case (wmode)
          W_EXT: fill[ext_bank] <= fill[ext_bank] + 1'b1;
          W_NEW: begin
            fill[new_bank]       <= fill[new_bank] + 1'b1;
            banklock[new_bank]   <= 1'b1;
            bank_owner[new_bank] <= cur_task;
            last_ent[new_bank]   <= free_idx;
            last_ok[new_bank]    <= 1'b1;
          end
          W_FAIL: alloc_error <= 1'b1;
          default: ;
        endcase
      end
      if (ent_we && ent_wdata.valid) begin
        banklock[ent_wdata.real_laddr[RW-1:OW]]   <= 1'b1;
        bank_owner[ent_wdata.real_laddr[RW-1:OW]] <= ent_wdata.task_id;
        if ({1'b0, ent_wdata.real_laddr[OW-1:0]} + (OW+1)'(ent_wdata.rows) > fill[ent_wdata.real_laddr[RW-1:OW]])
          fill[ent_wdata.real_laddr[RW-1:OW]] <= {1'b0, ent_wdata.real_laddr[OW-1:0]} + (OW+1)'(ent_wdata.rows);
        last_ent[ent_wdata.real_laddr[RW-1:OW]] <= ent_idx;
        last_ok[ent_wdata.real_laddr[RW-1:OW]]  <= 1'b1;
      end
      if (flush_valid) begin
        for (int b = 0; b < SP_BANKS_P; b++)
          if (banklock[b] && bank_owner[b] == flush_task) begin
            banklock[b] <= 1'b0;
            fill[b]     <= '0;
            last_ok[b]  <= 1'b0;
            released[b] <= 1'b1;
          end
      end
    end
  end

  // a task never holds more banks than its quota through the write path
  a_no_fail_silently: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && wmode == W_FAIL |=> alloc_error);
endmodule
