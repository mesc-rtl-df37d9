// gemmini_rt: a Gemmini-style DNN accelerator that can be preempted between
// any two instructions, so that a real-time OS can take it away from a
// low-priority or low-criticality task within one instruction's time.
//
// Blocks: the reservation station (queues, configuration, freeze/flush), the
// config-copy buffer, a load, an execute and a store controller, one default
// configuration channel for loads and one for stores, the address remapper in
// front of the scratchpad, the scratchpad (8 x 32 KB banks), the accumulator
// (64 KB) and a 16 x 16 systolic array.
//
// Ports: the CPU sends instructions on cmd_valid/cmd_ready/cmd (id, funct7,
// rs1, rs2) and sees completions on resp_valid/resp_id (one lane per source:
// configuration, load, execute, store, freeze/flush). The OS sets cur_task
// (whose scratchpad data is moving) and bank_quota (banks that task may
// hold). One DRAM port of 128-bit beats: mem_req_valid/ready/mem_req (write
// when mem_req.we) and in-order read data on mem_resp_valid/mem_resp_rdata.
// Status: frozen, busy, inflight (what the OS polls after a freeze),
// banklock, alloc_error, clear_busy.
//
// Sharing inside: the scratchpad read port goes to the execute controller
// first, then the store controller; the accumulator write port to the execute
// controller first, then the load controller; the DRAM port to the load
// controller first, then the store controller. A local address with bit 19
// set (0x0008_0000) is an accumulator row; scratchpad addresses pass through
// the address remapper, accumulator addresses do not.
//
// A preemption, as driven by the OS: instruction_freeze; wait for !inflight;
// flush queues; flush freeze (resume); step_wise_mvout of the accumulator and,
// if the next task needs the banks, of the scratchpad rows; mvout_config_buffer;
// mvout_remapping_block; once the saves have responded, flush bank. Resuming
// mirrors it with the mvin instructions and reconfig, after which the CPU
// re-sends the instructions that had no response, together with the task's
// last preload (its operand addresses are held in the execute controller and
// are not part of the saved context).
//
// The block structure, the new instructions, the default configuration
// channel, the config-copy buffer and the address remapper follow the paper;
// the port sharing, the instruction operand layouts and the OS-visible status
// signals are this design's choices.
module gemmini_rt
  import mesc_pkg::*;
#(
  parameter int SP_BANKS_P      = SP_BANKS,
  parameter int SP_BANK_ROWS_P  = SP_BANK_ROWS,
  parameter int REMAP_ENTRIES_P = REMAP_ENTRIES
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cmd_valid,
  output logic                   cmd_ready,
  input  cmd_t                   cmd,
  output logic [4:0]             resp_valid,
  output logic [4:0][ID_W-1:0]   resp_id,
  input  logic [TASK_W-1:0]      cur_task,
  input  logic [3:0]             bank_quota,
  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output mem_req_t               mem_req,
  input  logic                   mem_resp_valid,
  input  logic [BUS_W-1:0]       mem_resp_rdata,
  output logic                   frozen,
  output logic                   busy,
  output logic                   inflight,
  output logic [SP_BANKS_P-1:0]  banklock,
  output logic                   alloc_error,
  output logic                   clear_busy
);
  localparam int RW = $clog2(SP_BANKS_P * SP_BANK_ROWS_P);
  localparam int EW = $clog2(REMAP_ENTRIES_P);
  localparam int AW = $clog2(ACC_ROWS);

  // ---------------- reservation station
  logic ld_v, ld_r, ex_v, ex_r, st_v, st_r;
  cmd_t ld_c, ex_c, st_c;
  logic ld_done, ex_done, st_done;
  logic [ID_W-1:0] ld_did, ex_did, st_did;
  logic cfg_valid, cfg_reset, cb_replay_start, cb_replay_valid, cb_replay_busy, cb_clear;
  logic [63:0] cfg_rs1, cfg_rs2, cb_replay_rs1, cb_replay_rs2;
  logic bank_flush_valid;
  logic [TASK_W-1:0] bank_flush_task;

  reservation_station u_rs (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .ld_valid(ld_v), .ld_ready(ld_r), .ld_cmd(ld_c), .ld_done, .ld_done_id(ld_did),
    .ex_valid(ex_v), .ex_ready(ex_r), .ex_cmd(ex_c), .ex_done, .ex_done_id(ex_did),
    .st_valid(st_v), .st_ready(st_r), .st_cmd(st_c), .st_done, .st_done_id(st_did),
    .cfg_valid, .cfg_rs1, .cfg_rs2, .cfg_reset,
    .cb_replay_start, .cb_replay_valid, .cb_replay_rs1, .cb_replay_rs2, .cb_replay_busy, .cb_clear,
    .bank_flush_valid, .bank_flush_task,
    .resp_valid, .resp_id, .frozen, .busy, .inflight);

  // ---------------- config-copy buffer
  logic [1:0]  cb_ridx, cb_widx;
  cfg_entry_t  cb_rentry, cb_wentry;
  logic [3:0]  cb_vmask;
  logic        cb_wen;

  config_copy_buffer u_ccb (
    .clk, .rst_n, .cfg_valid, .cfg_rs1, .cfg_rs2,
    .rd_idx(cb_ridx), .rd_entry(cb_rentry), .valid_mask(cb_vmask),
    .wr_en(cb_wen), .wr_idx(cb_widx), .wr_entry(cb_wentry),
    .replay_start(cb_replay_start), .replay_valid(cb_replay_valid),
    .replay_rs1(cb_replay_rs1), .replay_rs2(cb_replay_rs2), .replay_busy(cb_replay_busy),
    .clear(cb_clear));

  // ---------------- default configuration channels
  logic [6:0]  ld_cf, st_cf;
  logic [15:0] ld_rb, st_rb;
  mv_cfg_t     ld_eff, st_eff, ld_cur, st_cur;

  default_config_channel #(.STEP_WISE_FUNCT(F_STEP_WISE_MVIN)) u_ld_cfg (
    .clk, .rst_n, .cfg_valid(cfg_valid && cfg_rs1[1:0] == CFG_LD), .cfg_rs1, .cfg_rs2,
    .rst_cfg(cfg_reset), .funct7(ld_cf), .row_bytes(ld_rb), .eff(ld_eff), .cur(ld_cur));
  default_config_channel #(.STEP_WISE_FUNCT(F_STEP_WISE_MVOUT)) u_st_cfg (
    .clk, .rst_n, .cfg_valid(cfg_valid && cfg_rs1[1:0] == CFG_ST), .cfg_rs1, .cfg_rs2,
    .rst_cfg(cfg_reset), .funct7(st_cf), .row_bytes(st_rb), .eff(st_eff), .cur(st_cur));

  // ---------------- controllers
  logic ld_mv, ld_mr, st_mv, st_mr;
  mem_req_t ld_mq, st_mq;
  logic ld_spw, ld_spw_rdy, ld_accw, ld_accw_rdy;
  logic [31:0] ld_spw_a;
  logic [SP_ROW_W-1:0] ld_spw_d, sp_rdata;
  logic [AW-1:0] ld_accw_a, st_acc_ra;
  logic [ACC_ROW_W-1:0] ld_accw_d, acc_rdata;
  logic ld_rbwe;
  logic [EW-1:0] ld_rbidx, st_rbidx;
  remap_entry_t ld_rbd, rb_rdata;
  logic st_spr, st_spg, st_accr;
  logic [31:0] st_spa;

  load_controller #(.ENTRIES(REMAP_ENTRIES_P)) u_ld (
    .clk, .rst_n, .cmd_valid(ld_v), .cmd_ready(ld_r), .cmd(ld_c),
    .cfg_funct(ld_cf), .cfg_row_bytes(ld_rb), .cfg_eff(ld_eff),
    .mem_req_valid(ld_mv), .mem_req_ready(ld_mr), .mem_req(ld_mq),
    .mem_resp_valid, .mem_resp_rdata,
    .sp_wvalid(ld_spw), .sp_wready(ld_spw_rdy), .sp_wladdr(ld_spw_a), .sp_wdata(ld_spw_d),
    .acc_wvalid(ld_accw), .acc_wready(ld_accw_rdy), .acc_waddr(ld_accw_a), .acc_wdata(ld_accw_d),
    .cb_wen, .cb_widx, .cb_wentry,
    .rb_we(ld_rbwe), .rb_idx(ld_rbidx), .rb_wdata(ld_rbd),
    .done(ld_done), .done_id(ld_did));

  store_controller #(.ENTRIES(REMAP_ENTRIES_P)) u_st (
    .clk, .rst_n, .cmd_valid(st_v), .cmd_ready(st_r), .cmd(st_c),
    .cfg_funct(st_cf), .cfg_row_bytes(st_rb), .cfg_eff(st_eff),
    .mem_req_valid(st_mv), .mem_req_ready(st_mr), .mem_req(st_mq),
    .sp_rvalid(st_spr), .sp_rgnt(st_spg), .sp_rladdr(st_spa), .sp_rdata,
    .acc_ren(st_accr), .acc_raddr(st_acc_ra), .acc_rdata,
    .cb_ridx, .cb_rentry, .cb_valid_mask(cb_vmask),
    .rb_idx(st_rbidx), .rb_rdata,
    .done(st_done), .done_id(st_did));

  logic ex_spr;
  logic [31:0] ex_spa;
  logic sa_bwe, sa_av, sa_cv;
  logic [$clog2(DIM)-1:0] sa_brow;
  logic [SP_ROW_W-1:0] sa_bd, sa_ad;
  logic [ACC_ROW_W-1:0] sa_cd;
  logic ex_accw, ex_acca;
  logic [AW-1:0] ex_accw_a;
  logic [ACC_ROW_W-1:0] ex_accw_d;

  execute_controller u_ex (
    .clk, .rst_n, .cmd_valid(ex_v), .cmd_ready(ex_r), .cmd(ex_c),
    .sp_rvalid(ex_spr), .sp_rladdr(ex_spa), .sp_rdata,
    .sa_b_we(sa_bwe), .sa_b_row(sa_brow), .sa_b_data(sa_bd),
    .sa_a_valid(sa_av), .sa_a_data(sa_ad), .sa_c_valid(sa_cv), .sa_c_data(sa_cd),
    .acc_wen(ex_accw), .acc_wacc(ex_acca), .acc_waddr(ex_accw_a), .acc_wdata(ex_accw_d),
    .done(ex_done), .done_id(ex_did));

  systolic_array #(.DIM(DIM), .ELEM_W(ELEM_W), .ACC_W(ACC_W)) u_sa (
    .clk, .rst_n, .b_we(sa_bwe), .b_row(sa_brow), .b_data(sa_bd),
    .a_valid(sa_av), .a_data(sa_ad), .c_valid(sa_cv), .c_data(sa_cd));

  // ---------------- DRAM port: load first
  assign mem_req_valid = ld_mv || st_mv;
  assign mem_req       = ld_mv ? ld_mq : st_mq;
  assign ld_mr         = mem_req_ready;
  assign st_mr         = mem_req_ready && !ld_mv;

  // ---------------- address remapper and scratchpad
  logic [31:0] rd_laddr;
  logic rd_hit, wr_ok, sp_ren;
  logic [RW-1:0] rd_real, wr_real;
  logic [SP_BANKS_P-1:0] released;
  logic [SP_BANKS_P-1:0][TASK_W-1:0] bank_owner;
  logic [EW-1:0] ent_idx;

  assign st_spg    = !ex_spr;
  assign rd_laddr  = ex_spr ? ex_spa : st_spa;
  assign sp_ren    = ex_spr || st_spr;
  assign ld_spw_rdy = !clear_busy;
  assign ent_idx   = ld_rbwe ? ld_rbidx : st_rbidx;

  address_remapper #(.SP_BANKS_P(SP_BANKS_P), .BANK_ROWS_P(SP_BANK_ROWS_P), .ENTRIES(REMAP_ENTRIES_P)) u_remap (
    .clk, .rst_n, .cur_task, .bank_quota,
    .wr_valid(ld_spw && ld_spw_rdy), .wr_laddr(ld_spw_a), .wr_ok, .wr_real,
    .rd_laddr, .rd_hit, .rd_real,
    .flush_valid(bank_flush_valid), .flush_task(bank_flush_task), .released,
    .ent_idx, .ent_rdata(rb_rdata), .ent_we(ld_rbwe), .ent_wdata(ld_rbd),
    .banklock, .bank_owner, .alloc_error);

  scratchpad #(.BANKS(SP_BANKS_P), .BANK_ROWS(SP_BANK_ROWS_P), .ROW_W(SP_ROW_W)) u_sp (
    .clk, .rst_n,
    .wen(ld_spw && ld_spw_rdy && wr_ok), .waddr(wr_real), .wdata(ld_spw_d),
    .ren(sp_ren), .raddr(rd_real), .rdata(sp_rdata),
    .clear_start(released != '0), .clear_mask(released), .clear_busy);

  // ---------------- accumulator: execute first
  assign ld_accw_rdy = !ex_accw;

  accumulator #(.ROWS(ACC_ROWS), .DIM(DIM), .ACC_W(ACC_W)) u_acc (
    .clk,
    .wen(ex_accw || ld_accw), .wacc(ex_accw && ex_acca),
    .waddr(ex_accw ? ex_accw_a : ld_accw_a), .wdata(ex_accw ? ex_accw_d : ld_accw_d),
    .ren(st_accr), .raddr(st_acc_ra), .rdata(acc_rdata));

  // rd_hit, bank_owner and the stored configurations are observation points
  logic unused;
  assign unused = ^{rd_hit, bank_owner, ld_cur, st_cur};
endmodule
