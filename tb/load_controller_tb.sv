// load_controller_tb: DRAM is the behavioural model with a 4-cycle latency
// and periodic stalls; the write targets are modelled here and accept
// writes only some of the time. The load configuration channel is modelled
// here too: the task's stride (48 bytes) unless the funct7 is 0x18, which gets
// packed rows. Checks every scratchpad and accumulator row (address and
// data, beat order in accumulator rows), the config-copy buffer entries with
// their valid mask, remapping block entries, the done id, and the cycle count
// of an mvin (one DRAM round trip per beat).
module load_controller_tb;
  import mesc_pkg::*;
  localparam int ENT = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cmd_valid, cmd_ready; cmd_t cmd;
  logic [6:0] cfg_funct; logic [15:0] cfg_row_bytes; mv_cfg_t cfg_eff;
  logic mem_req_valid, mem_req_ready, mem_resp_valid; mem_req_t mem_req; logic [127:0] mem_resp_rdata;
  logic sp_wvalid, sp_wready, acc_wvalid, acc_wready, cb_wen, rb_we, done;
  logic [31:0] sp_wladdr; logic [127:0] sp_wdata;
  logic [9:0] acc_waddr; logic [511:0] acc_wdata;
  logic [1:0] cb_widx; cfg_entry_t cb_wentry;
  logic [3:0] rb_idx; remap_entry_t rb_wdata; logic [7:0] done_id;

  load_controller #(.ENTRIES(ENT)) dut (.*);
  dram_model #(.LAT(4), .STALL_EVERY(7)) u_mem (.clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .resp_valid(mem_resp_valid), .resp_rdata(mem_resp_rdata));

  always_comb begin
    cfg_eff = '{scale: 32'h3F80_0000, shrink: 1'b0, block_stride: 16'd0, pixel_repeat: 8'd1, stride: 40'd48};
    if (cfg_funct == F_STEP_WISE_MVIN) cfg_eff.stride = 40'(cfg_row_bytes);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // write sinks
  logic [127:0] sp_got [int]; logic [511:0] acc_got [int]; cfg_entry_t cb_got [4]; remap_entry_t rb_got [ENT];
  int n_sp = 0, n_acc = 0, n_cb = 0, n_rb = 0, n_done = 0; logic [7:0] last_id;
  always @(posedge clk) begin
    sp_wready  <= ($urandom_range(0, 2) != 0);
    acc_wready <= ($urandom_range(0, 2) != 0);
    if (sp_wvalid && sp_wready) begin sp_got[int'(sp_wladdr)] = sp_wdata; n_sp++; end
    if (acc_wvalid && acc_wready) begin acc_got[int'(acc_waddr)] = acc_wdata; n_acc++; end
    if (cb_wen) begin cb_got[cb_widx] = cb_wentry; n_cb++; end
    if (rb_we) begin rb_got[rb_idx] = rb_wdata; n_rb++; end
    if (rst_n && done) begin n_done++; last_id = done_id; end
  end

  task automatic issue(logic [7:0] id, logic [6:0] f, logic [63:0] r1, logic [63:0] r2);
    @(negedge clk); cmd_valid = 1; cmd = '{id: id, funct: f, rs1: r1, rs2: r2};
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  function automatic logic [127:0] pat(int a);
    return {32'(a), 32'(a * 3 + 1), 32'hA5A5_0000 + 32'(a), 32'(a ^ 32'h5555)};
  endfunction

  int t0, nd;
  initial begin
    cmd_valid = 0; cmd = '0; sp_wready = 1; acc_wready = 1;
    for (int a = 0; a < 4096; a += 16) u_mem.poke(longint'(32'h1000 + a), pat(32'h1000 + a));
    repeat (3) @(negedge clk); rst_n = 1;
    // mvin of 5 scratchpad rows with the task's stride (48)
    issue(1, F_MVIN, 64'h1000, {16'd5, 16'd16, 32'd100});
    check(n_sp == 5 && last_id == 1, "5 scratchpad rows, id 1");
    for (int r = 0; r < 5; r++) check(sp_got[100 + r] == pat(32'h1000 + 48 * r), $sformatf("sp row %0d (strided)", r));
    // step_wise_mvin of 3 scratchpad rows: packed
    issue(2, F_STEP_WISE_MVIN, 64'h1200, {16'd3, 16'd16, 32'd7});
    for (int r = 0; r < 3; r++) check(sp_got[7 + r] == pat(32'h1200 + 16 * r), $sformatf("step-wise sp row %0d (packed)", r));
    // mvin of 2 accumulator rows (bit 19), stride 48 between rows, 4 beats each
    issue(3, F_MVIN, 64'h1400, {16'd2, 16'd16, 32'h0008_0000 + 32'd10});
    for (int r = 0; r < 2; r++)
      for (int k = 0; k < 4; k++)
        check(acc_got[10 + r][k*128 +: 128] == pat(32'h1400 + 48 * r + 16 * k), $sformatf("acc row %0d beat %0d", r, k));
    // step_wise_mvin of accumulator rows: 64-byte packed
    issue(4, F_STEP_WISE_MVIN, 64'h1800, {16'd2, 16'd16, 32'h0008_0000 + 32'd20});
    for (int r = 0; r < 2; r++)
      for (int k = 0; k < 4; k++)
        check(acc_got[20 + r][k*128 +: 128] == pat(32'h1800 + 64 * r + 16 * k), $sformatf("step-wise acc row %0d beat %0d", r, k));
    // mvin_config_buffer: header mask 0b1010, entries at +16..+64
    u_mem.poke(64'h2000, 128'hA);
    for (int k = 0; k < 4; k++) u_mem.poke(longint'(64'h2010 + 16 * k), {64'(200 + k), 64'(k)});
    issue(5, F_MVIN_CFGBUF, 64'h2000, 64'd0);
    check(n_cb == 4, "four config-copy buffer entries written");
    for (int k = 0; k < 4; k++)
      check(cb_got[k].valid == ((4'hA >> k) & 1) && cb_got[k].rs2 == 64'(200 + k) && cb_got[k].rs1 == 64'(k), $sformatf("config entry %0d", k));
    // mvin_remapping_block: ENT entries
    for (int k = 0; k < ENT; k++)
      u_mem.poke(longint'(64'h3000 + 16 * k), 128'({1'b1, 8'(k), 32'(k * 4), 32'(k * 8), 16'(2), 39'd0}));
    issue(6, F_MVIN_REMAP, 64'h3000, 64'd0);
    check(n_rb == ENT, "all remapping block entries written");
    for (int k = 0; k < ENT; k++)
      check(rb_got[k].valid && rb_got[k].task_id == 8'(k) && rb_got[k].real_laddr == 32'(k * 8), $sformatf("remap entry %0d", k));
    // timing: no stalls from the targets; one DRAM round trip per row
    nd = n_done;
    @(negedge clk); cmd_valid = 1; cmd = '{id: 8'd7, funct: F_STEP_WISE_MVIN, rs1: 64'h1000, rs2: {16'd8, 16'd16, 32'd300}};
    t0 = cyc; @(negedge clk); cmd_valid = 0;
    while (n_done == nd) @(negedge clk);
    check(cyc - t0 >= 8 * 5 && cyc - t0 <= 8 * 9 + 10, $sformatf("8-row mvin time %0d cycles", cyc - t0));
    check(n_done == 7, "seven completions");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
