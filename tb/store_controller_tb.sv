// store_controller_tb: the scratchpad and accumulator read ports are modelled
// here (one cycle of latency, scratchpad grant withheld at random, as when
// the execute controller holds the port); DRAM is the behavioural model with
// stalls. The store configuration channel is modelled here: the task's
// stride (80 bytes) unless the funct7 is 0x19 (step_wise_mvout), which gets
// packed rows. Checks every beat written to DRAM for mvout, step_wise_mvout
// from both memories, mvout_config_buffer (header mask and entries) and
// mvout_remapping_block, and the done ids.
module store_controller_tb;
  import mesc_pkg::*;
  localparam int ENT = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready; cmd_t cmd;
  logic [6:0] cfg_funct; logic [15:0] cfg_row_bytes; mv_cfg_t cfg_eff;
  logic mem_req_valid, mem_req_ready, mem_resp_valid; mem_req_t mem_req; logic [127:0] mem_resp_rdata;
  logic sp_rvalid, sp_rgnt, acc_ren, done;
  logic [31:0] sp_rladdr; logic [127:0] sp_rdata;
  logic [9:0] acc_raddr; logic [511:0] acc_rdata;
  logic [1:0] cb_ridx; cfg_entry_t cb_rentry; logic [3:0] cb_valid_mask;
  logic [2:0] rb_idx; remap_entry_t rb_rdata; logic [7:0] done_id;

  store_controller #(.ENTRIES(ENT)) dut (.*);
  dram_model #(.LAT(3), .STALL_EVERY(5)) u_mem (.clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .resp_valid(mem_resp_valid), .resp_rdata(mem_resp_rdata));

  always_comb begin
    cfg_eff = '{scale: 32'h3F80_0000, shrink: 1'b0, block_stride: 16'd0, pixel_repeat: 8'd1, stride: 40'd80};
    if (cfg_funct == F_STEP_WISE_MVOUT) cfg_eff.stride = 40'(cfg_row_bytes);
  end

  function automatic logic [127:0] sp_row(int a); return {4{32'(a * 7 + 3)}}; endfunction
  function automatic logic [511:0] acc_row(int a);
    logic [511:0] r; for (int j = 0; j < 16; j++) r[j*32 +: 32] = 32'(a * 1000 + j); return r;
  endfunction
  cfg_entry_t cb [4];
  remap_entry_t rb [ENT];
  always @(posedge clk) begin
    sp_rgnt <= ($urandom_range(0, 1) == 1);
    if (sp_rvalid && sp_rgnt) sp_rdata <= sp_row(int'(sp_rladdr));
    if (acc_ren) acc_rdata <= acc_row(int'(acc_raddr));
  end
  assign cb_rentry = cb[cb_ridx];
  always_comb for (int k = 0; k < 4; k++) cb_valid_mask[k] = cb[k].valid;
  assign rb_rdata = rb[rb_idx];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int n_done = 0; logic [7:0] last_id;
  always @(posedge clk) if (rst_n && done) begin n_done++; last_id = done_id; end

  task automatic issue(logic [7:0] id, logic [6:0] f, logic [63:0] r1, logic [63:0] r2);
    @(negedge clk); cmd_valid = 1; cmd = '{id: id, funct: f, rs1: r1, rs2: r2};
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
    repeat (2) @(negedge clk);
    check(last_id == id, $sformatf("done id %0d", id));
  endtask

  initial begin
    cmd_valid = 0; cmd = '0; sp_rgnt = 0; sp_rdata = 0; acc_rdata = 0;
    for (int k = 0; k < 4; k++) cb[k] = '{valid: (k != 2), rs1: 64'(k), rs2: 64'(50 + k)};
    for (int k = 0; k < ENT; k++) rb[k] = '{valid: 1'b1, task_id: 8'(k), laddr: 32'(k), real_laddr: 32'(k + 100), rows: 16'(k), pad: '0};
    repeat (3) @(negedge clk); rst_n = 1;
    issue(1, F_MVOUT, 64'h10000, {16'd4, 16'd16, 32'd30});
    for (int r = 0; r < 4; r++) check(u_mem.peek(longint'(64'h10000 + 80 * r)) == sp_row(30 + r), $sformatf("mvout sp row %0d", r));
    issue(2, F_STEP_WISE_MVOUT, 64'h20000, {16'd4, 16'd16, 32'd40});
    for (int r = 0; r < 4; r++) check(u_mem.peek(longint'(64'h20000 + 16 * r)) == sp_row(40 + r), $sformatf("step-wise sp row %0d", r));
    issue(3, F_STEP_WISE_MVOUT, 64'h30000, {16'd3, 16'd16, 32'h0008_0000 + 32'd5});
    for (int r = 0; r < 3; r++) for (int k = 0; k < 4; k++)
      check(u_mem.peek(longint'(64'h30000 + 64 * r + 16 * k)) == acc_row(5 + r)[k*128 +: 128], $sformatf("step-wise acc row %0d beat %0d", r, k));
    issue(4, F_MVOUT, 64'h40000, {16'd2, 16'd16, 32'h0008_0000 + 32'd9});
    for (int r = 0; r < 2; r++) for (int k = 0; k < 4; k++)
      check(u_mem.peek(longint'(64'h40000 + 80 * r + 16 * k)) == acc_row(9 + r)[k*128 +: 128], $sformatf("mvout acc row %0d beat %0d", r, k));
    issue(5, F_MVOUT_CFGBUF, 64'h50000, 64'd0);
    check(u_mem.peek(64'h50000) == 128'b1011, "config header mask");
    for (int k = 0; k < 4; k++) check(u_mem.peek(longint'(64'h50010 + 16 * k)) == {cb[k].rs2, cb[k].rs1}, $sformatf("config entry %0d", k));
    issue(6, F_MVOUT_REMAP, 64'h60000, 64'd0);
    for (int k = 0; k < ENT; k++) check(u_mem.peek(longint'(64'h60000 + 16 * k)) == 128'(rb[k]), $sformatf("remap entry %0d", k));
    check(n_done == 6, "six completions");
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
