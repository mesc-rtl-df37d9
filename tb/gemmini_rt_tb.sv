// gemmini_rt_tb: end-to-end test of the accelerator at its default sizes.
// The testbench plays the CPU and the OS; DRAM is the behavioural model.
//
// Task A computes C = 2*A*B (mvin A, mvin B, preload, compute_preloaded,
// compute_accumulated, mvout C) with its own strides. Part way through, the
// OS preempts it the way the context switch routine does:
//   instruction_freeze, wait until nothing is in flight, flush the queues,
//   resume, step_wise_mvout of A's accumulator rows, mvout_config_buffer,
//   mvout_remapping_block, then either keep A's banks (enough banks for the
//   next task) or step_wise_mvout A's scratchpad rows and flush A's banks,
//   and finally flush everything else (queues, configuration).
// Task B then runs a whole matrix product with different strides and its
// banks are flushed when it completes. A is restored: scratchpad rows (if
// they were saved) and accumulator rows by step_wise_mvin, its configuration
// by mvin_config_buffer + reconfig, and the instructions without a response
// are sent again (with A's last preload, whose operands live in the execute
// controller and are not part of the saved context).
// This is done twice: once with the banks kept, once with the banks saved.
// Both results are compared with products computed here. A last step shows
// the bank quota refusing a write. Each mechanism is counted; one that never
// happens is a failure. Also reported: the cycles from freeze to an idle
// accelerator (the blocking a preempting task sees from the hardware).
module gemmini_rt_tb;
  import mesc_pkg::*;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cmd_valid, cmd_ready; cmd_t cmd;
  logic [4:0] resp_valid; logic [4:0][7:0] resp_id;
  logic [7:0] cur_task; logic [3:0] bank_quota;
  logic mem_req_valid, mem_req_ready, mem_resp_valid; mem_req_t mem_req; logic [127:0] mem_resp_rdata;
  logic frozen, busy, inflight, alloc_error, clear_busy; logic [7:0] banklock;

  gemmini_rt dut (.*);
  dram_model #(.LAT(6), .STALL_EVERY(11)) u_mem (.clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .resp_valid(mem_resp_valid), .resp_rdata(mem_resp_rdata));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- responses
  bit responded [256];
  always @(posedge clk) if (rst_n) for (int s = 0; s < 5; s++) if (resp_valid[s]) responded[resp_id[s]] = 1'b1;

  // ---------------- mechanism counters
  int n_freeze_busy = 0, n_dropped = 0, n_resent = 0, n_save_acc = 0, n_save_sp = 0, n_restore_sp = 0,
      n_restore_acc = 0, n_cfg_save = 0, n_reconfig = 0, n_remap_save = 0, n_banks_kept = 0,
      n_bank_release = 0, n_clear = 0, n_refused = 0, n_relocated = 0;
  always @(posedge clk) if (rst_n && dut.u_sp.clear_start) n_clear++;

  task automatic send(logic [7:0] id, logic [6:0] f, logic [63:0] r1, logic [63:0] r2);
    @(negedge clk); cmd_valid = 1; cmd = '{id: id, funct: f, rs1: r1, rs2: r2};
    responded[id] = 1'b0;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
  endtask
  task automatic wait_resp(logic [7:0] id);
    int t = 0;
    while (!responded[id] && t < 200000) begin @(negedge clk); t++; end
    check(responded[id], $sformatf("response of instruction %0d", id));
  endtask
  task automatic wait_idle();
    int t = 0;
    while ((busy || clear_busy) && t < 200000) begin @(negedge clk); t++; end
    repeat (2) @(negedge clk);
  endtask

  function automatic logic [63:0] mv(int rows, logic [31:0] laddr);
    return {16'(rows), 16'(D), laddr};
  endfunction

  // ---------------- data
  logic signed [7:0] Am [2][D][D], Bm [2][D][D];
  task automatic put_matrix(logic signed [7:0] M [D][D], longint base, int stride);
    for (int i = 0; i < D; i++) begin
      logic [127:0] row;
      for (int j = 0; j < D; j++) row[j*8 +: 8] = M[i][j];
      u_mem.poke(base + i * stride, row);
    end
  endtask
  task automatic check_product(int w, int mult, longint base, int stride, string name);
    int bad = 0;
    for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
      logic signed [31:0] e; logic [127:0] beat;
      e = 0;
      for (int k = 0; k < D; k++) e += 32'(Am[w][i][k]) * 32'(Bm[w][k][j]);
      e = e * mult;
      beat = u_mem.peek(base + i * stride + (j / 4) * 16);
      if (beat[(j % 4)*32 +: 32] != e) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d wrong elements", name, bad));
  endtask

  // task programs: ids start at 'base'
  localparam longint A_IN = 64'h1_0000, A_W = 64'h1_1000, A_OUT = 64'h3_0000;
  localparam longint B_IN = 64'h2_0000, B_W = 64'h2_2000, B_OUT = 64'h4_0000;
  localparam longint CTX = 64'h10_0000;

  task automatic send_a(int from);
    // strides: loads 32 bytes, stores 128 bytes
    if (from <= 1) send(1, F_CONFIG, 64'(CFG_LD), 64'd32);
    if (from <= 2) send(2, F_CONFIG, 64'(CFG_ST), 64'd128);
    if (from <= 3) send(3, F_CONFIG, {32'h1, 30'd0, 2'(CFG_EX)}, 64'd0);
    if (from <= 4) send(4, F_MVIN, A_IN, mv(D, 32'd0));
    if (from <= 5) send(5, F_MVIN, A_W, mv(D, 32'd16));
    if (from <= 6) send(6, F_PRELOAD, 64'd16, 64'h0008_0000);
    if (from <= 7) send(7, F_COMPUTE_PRELOADED, 64'd0, 64'd0);
    if (from <= 8) send(8, F_COMPUTE_ACCUMULATED, 64'd0, 64'd0);
    if (from <= 9) send(9, F_MVOUT, A_OUT, mv(D, 32'h0008_0000));
  endtask

  task automatic run_b();
    send(101, F_CONFIG, 64'(CFG_LD), 64'd48);
    send(102, F_CONFIG, 64'(CFG_ST), 64'd64);
    send(103, F_MVIN, B_IN, mv(D, 32'd0));
    send(104, F_MVIN, B_W, mv(D, 32'd16));
    send(105, F_PRELOAD, 64'd16, 64'h0008_0000 + 64'd64);
    send(106, F_COMPUTE_PRELOADED, 64'd0, 64'd0);
    send(107, F_MVOUT, B_OUT, mv(D, 32'h0008_0000 + 32'd64));
    wait_resp(107);
  endtask

  int blocking_max = 0;

  task automatic scenario(bit keep_banks, int a_task, int b_task);
    int t0, first_missing;
    bit was_busy;
    logic [7:0] a_banks;
    cur_task = 8'(a_task); bank_quota = 4'd1;
    send_a(1);
    // preempt once the weights are in
    wait_resp(5);
    repeat (3) @(negedge clk);
    // ---- Context_switch: freeze and wait for running instructions
    send(200, F_INSTR_FREEZE, 64'd0, 64'd0);
    t0 = cyc; was_busy = inflight;
    while (inflight) @(negedge clk);
    if (was_busy) n_freeze_busy++;
    if (cyc - t0 > blocking_max) blocking_max = cyc - t0;
    first_missing = 0;
    for (int i = 9; i >= 1; i--) if (!responded[i]) first_missing = i;
    check(first_missing != 0, "some of A's instructions were still pending");
    check(busy, "pending instructions queued at the freeze");
    // ---- Context_save: flush queues, resume, save
    send(201, F_FLUSH, 64'(FL_QUEUE), 64'd0);
    if (!busy) n_dropped++;
    send(202, F_FLUSH, 64'(FL_FREEZE), 64'd0);
    send(203, F_STEP_WISE_MVOUT, CTX, mv(D, 32'h0008_0000)); n_save_acc++;
    send(204, F_MVOUT_CFGBUF, CTX + 64'h1000, 64'd0); n_cfg_save++;
    send(205, F_MVOUT_REMAP, CTX + 64'h2000, 64'd0); n_remap_save++;
    wait_idle();
    a_banks = banklock;
    check($countones(banklock) == 1, "task A holds one bank");
    check(u_mem.peek(CTX + 64'h1000) == 128'b0111, "saved configuration mask: ex, ld, st");
    check(u_mem.peek(CTX + 64'h2000 + 64'h0) != '0, "remapping block saved");
    if (!keep_banks) begin
      send(206, F_STEP_WISE_MVOUT, CTX + 64'h4000, mv(2 * D, 32'd0)); n_save_sp++;
      wait_resp(206);  // a flush acts at once: the save must be complete first
      send(207, F_FLUSH, 64'(FL_BANK), 64'(a_task)); n_bank_release++;
      wait_idle();
      check(banklock == 8'b0, "A's bank released");
      begin
        int bad = 0;
        for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
          logic [127:0] ra, rb;
          ra = u_mem.peek(CTX + 64'h4000 + 16 * i);
          rb = u_mem.peek(CTX + 64'h4000 + 16 * (D + i));
          if (ra[j*8 +: 8] != Am[0][i][j] || rb[j*8 +: 8] != Bm[0][i][j]) bad++;
        end
        check(bad == 0, $sformatf("saved scratchpad image of A: %0d wrong bytes", bad));
      end
    end else n_banks_kept++;
    send(208, F_FLUSH, 64'(FL_ALL), 64'd0);
    wait_idle();
    // ---- task B
    cur_task = 8'(b_task); bank_quota = keep_banks ? 4'd1 : 4'd8;
    run_b();
    check_product(1, 1, B_OUT, 64, $sformatf("task B result (%s)", keep_banks ? "banks kept" : "banks saved"));
    if (keep_banks) check($countones(banklock) == 2 && (banklock & a_banks) == a_banks, "A's bank stayed locked beside B's");
    send(210, F_FLUSH, 64'(FL_BANK), 64'(b_task)); n_bank_release++;
    send(211, F_FLUSH, 64'(FL_ALL), 64'd0);
    wait_idle();
    // ---- Context_restore of A
    cur_task = 8'(a_task); bank_quota = 4'd1;
    if (!keep_banks) begin
      send(212, F_STEP_WISE_MVIN, CTX + 64'h4000, mv(2 * D, 32'd0)); n_restore_sp++;
    end
    send(213, F_STEP_WISE_MVIN, CTX, mv(D, 32'h0008_0000)); n_restore_acc++;
    send(214, F_MVIN_CFGBUF, CTX + 64'h1000, 64'd0);
    send(215, F_RECONFIG, 64'd0, 64'd0); n_reconfig++;
    wait_idle();
    check(dut.u_ld_cfg.cur.stride == 40'd32 && dut.u_st_cfg.cur.stride == 40'd128, "A's strides restored by reconfig");
    if (keep_banks) check(banklock == a_banks, "A's data never left its bank");
    // ---- re-send what had no response (and A's last preload)
    if (first_missing > 6) send(6, F_PRELOAD, 64'd16, 64'h0008_0000);
    for (int i = first_missing; i <= 9; i++) begin
      case (i)
        4: send(4, F_MVIN, A_IN, mv(D, 32'd0));
        5: send(5, F_MVIN, A_W, mv(D, 32'd16));
        6: send(6, F_PRELOAD, 64'd16, 64'h0008_0000);
        7: send(7, F_COMPUTE_PRELOADED, 64'd0, 64'd0);
        8: send(8, F_COMPUTE_ACCUMULATED, 64'd0, 64'd0);
        default: send(9, F_MVOUT, A_OUT, mv(D, 32'h0008_0000));
      endcase
      n_resent++;
    end
    wait_resp(9);
    wait_idle();
    check_product(0, 2, A_OUT, 128, $sformatf("task A result after preemption (%s)", keep_banks ? "banks kept" : "banks saved"));
    send(216, F_FLUSH, 64'(FL_BANK), 64'(a_task));
    send(217, F_FLUSH, 64'(FL_ALL), 64'd0);
    wait_idle();
    check(banklock == 8'b0, "all banks free at the end");
  endtask

  initial begin
    cmd_valid = 0; cmd = '0; cur_task = 0; bank_quota = 0;
    for (int i = 0; i < 256; i++) responded[i] = 1'b0;
    for (int w = 0; w < 2; w++) for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
      Am[w][i][j] = 8'($urandom); Bm[w][i][j] = 8'($urandom);
    end
    put_matrix(Am[0], A_IN, 32); put_matrix(Bm[0], A_W, 32);
    put_matrix(Am[1], B_IN, 48); put_matrix(Bm[1], B_W, 48);
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);

    scenario(1'b1, 1, 2);
    // clear the output area so the second run is checked afresh
    for (int i = 0; i < D * 8; i++) u_mem.poke(A_OUT + 16 * i, '0);
    scenario(1'b0, 3, 4);

    // the bank quota: a task allowed no bank cannot write the scratchpad
    cur_task = 8'd5; bank_quota = 4'd0;
    check(!alloc_error, "no refusal so far");
    send(230, F_MVIN, A_IN, mv(1, 32'd0));
    wait_resp(230);
    if (alloc_error) n_refused++;

    $display("mechanisms: freeze-with-work-in-flight=%0d dropped-by-queue-flush=%0d re-sent=%0d",
             n_freeze_busy, n_dropped, n_resent);
    $display("  step-wise save acc=%0d sp=%0d, restore acc=%0d sp=%0d, config save=%0d reconfig=%0d",
             n_save_acc, n_save_sp, n_restore_acc, n_restore_sp, n_cfg_save, n_reconfig);
    $display("  remap-block save=%0d banks kept=%0d bank releases=%0d clear sweeps=%0d quota refusals=%0d",
             n_remap_save, n_banks_kept, n_bank_release, n_clear, n_refused);
    $display("  longest freeze-to-idle wait: %0d cycles", blocking_max);
    check(n_freeze_busy > 0, "a freeze met a running instruction");
    check(n_dropped > 0, "a queue flush dropped instructions");
    check(n_resent > 0, "instructions re-sent after restore");
    check(n_save_acc > 0 && n_save_sp > 0 && n_restore_acc > 0 && n_restore_sp > 0, "step-wise save and restore");
    check(n_cfg_save > 0 && n_reconfig > 0, "configuration saved and replayed");
    check(n_remap_save > 0, "remapping block saved");
    check(n_banks_kept > 0 && n_bank_release > 0, "banks kept and banks released");
    check(n_clear > 0, "released banks cleared");
    check(n_refused > 0, "bank quota refused a write");
    check(blocking_max > 0 && blocking_max <= 2 * D + 3 + 16 * 20, "freeze waits at most one instruction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
