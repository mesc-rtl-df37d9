// reservation_station_tb: controllers are modelled here as simple stubs that
// accept an instruction when idle and finish it a set number of cycles later.
// Checks: routing of each class to its controller, issue in program order
// (a younger load waits behind an older compute that waits for the execute
// controller), responses with the right ids on the right lanes, 2-cycle
// configuration, freeze stopping issue while running work finishes, flush of
// the queues, resume, flush of banks and of everything, and reconfig
// forwarding the replayed configurations.
module reservation_station_tb;
  import mesc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cmd_valid, cmd_ready; cmd_t cmd;
  logic ld_valid, ld_ready, ld_done, ex_valid, ex_ready, ex_done, st_valid, st_ready, st_done;
  cmd_t ld_cmd, ex_cmd, st_cmd; logic [7:0] ld_done_id, ex_done_id, st_done_id;
  logic cfg_valid, cfg_reset, cb_replay_start, cb_replay_valid, cb_replay_busy, cb_clear;
  logic [63:0] cfg_rs1, cfg_rs2, cb_replay_rs1, cb_replay_rs2;
  logic bank_flush_valid; logic [7:0] bank_flush_task;
  logic [4:0] resp_valid; logic [4:0][7:0] resp_id;
  logic frozen, busy, inflight;
  reservation_station dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- controller stubs: latency per class
  int lat [3] = '{5, 5, 5};
  int issue_t [256];
  int issue_cls [256];
  int n_issued = 0;
  int order [$];
  for (genvar g = 0; g < 3; g++) begin : g_stub
    int cnt = 0; logic [7:0] id;
    logic v, r, d; cmd_t c;
    if (g == 0) begin : g_l assign v = ld_valid; assign c = ld_cmd; assign ld_ready = r; assign ld_done = d; assign ld_done_id = id; end
    if (g == 1) begin : g_e assign v = ex_valid; assign c = ex_cmd; assign ex_ready = r; assign ex_done = d; assign ex_done_id = id; end
    if (g == 2) begin : g_s assign v = st_valid; assign c = st_cmd; assign st_ready = r; assign st_done = d; assign st_done_id = id; end
    assign r = (cnt == 0);
    always @(posedge clk) begin
      d <= 1'b0;
      if (cnt == 1) d <= 1'b1;
      if (cnt > 0) cnt <= cnt - 1;
      if (v && r) begin
        cnt <= lat[g]; id <= c.id;
        issue_t[c.id] = cyc; issue_cls[c.id] = g; order.push_back(int'(c.id)); n_issued++;
      end
    end
    initial begin d = 0; id = 0; end
  end

  int resp_t [256];
  int resp_lane [256];
  always @(posedge clk) for (int s = 0; s < 5; s++) if (resp_valid[s]) begin
    resp_t[resp_id[s]] = cyc; resp_lane[resp_id[s]] = s;
  end
  int ncfg = 0; logic [63:0] last_cfg_rs2;
  always @(posedge clk) if (cfg_valid) begin ncfg++; last_cfg_rs2 = cfg_rs2; end
  int nbank = 0, nreset = 0, nclear = 0;
  always @(posedge clk) begin
    if (rst_n && bank_flush_valid) begin nbank++; check(bank_flush_task == 8'd9, "flush bank task id"); end
    if (rst_n && cfg_reset) nreset++;
    if (rst_n && cb_clear) nclear++;
  end

  task automatic send(logic [7:0] id, logic [6:0] f, logic [63:0] r1 = 0, logic [63:0] r2 = 0);
    @(negedge clk); cmd_valid = 1; cmd = '{id: id, funct: f, rs1: r1, rs2: r2};
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
  endtask
  task automatic idle_wait();
    int t = 0;
    while (busy && t < 1000) begin @(negedge clk); t++; end
    repeat (2) @(negedge clk);
  endtask

  int t0;
  initial begin
    for (int i = 0; i < 256; i++) begin issue_t[i] = -1; resp_t[i] = -1; resp_lane[i] = -1; end
    cmd_valid = 0; cmd = '0; cb_replay_valid = 0; cb_replay_busy = 0; cb_replay_rs1 = 0; cb_replay_rs2 = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // 1. routing, order, responses
    send(1, F_CONFIG, 64'(CFG_LD), 64'd77);
    send(2, F_MVIN); send(3, F_PRELOAD); send(4, F_COMPUTE_PRELOADED); send(5, F_MVOUT);
    send(6, F_STEP_WISE_MVIN); send(7, F_MVOUT_REMAP); send(8, F_MVIN_CFGBUF);
    idle_wait();
    check(last_cfg_rs2 == 64'd77 && ncfg == 1, "configuration executed once");
    check(resp_lane[1] == 0, "config response lane");
    check(issue_cls[2] == 0 && issue_cls[6] == 0 && issue_cls[8] == 0, "loads to load controller");
    check(issue_cls[3] == 1 && issue_cls[4] == 1, "preload/compute to execute controller");
    check(issue_cls[5] == 2 && issue_cls[7] == 2, "stores to store controller");
    check(order.size() == 7, "seven issued");
    for (int i = 1; i < order.size(); i++) check(issue_t[order[i]] >= issue_t[order[i-1]], "program order");
    check(order[0] == 2 && order[1] == 3 && order[2] == 4 && order[3] == 5, "order 2,3,4,5");
    for (int i = 2; i <= 8; i++) check(resp_t[i] > issue_t[i] && resp_lane[i] == issue_cls[i] + 1, $sformatf("response of %0d", i));

    // 2. configuration latency: one cycle in the queue, two executing, then
    //    the response (3 cycles from the accepting edge)
    @(negedge clk); cmd_valid = 1; cmd = '{id: 10, funct: F_CONFIG, rs1: 64'(CFG_ST), rs2: 64'd5};
    t0 = cyc; @(negedge clk); cmd_valid = 0;
    idle_wait();
    check(resp_t[10] - t0 == 3, $sformatf("configuration takes 2 cycles after issue (%0d)", resp_t[10] - t0));

    // 3. in-order issue: a younger load waits for an older compute
    lat[1] = 40;
    send(20, F_COMPUTE_PRELOADED); send(21, F_COMPUTE_ACCUMULATED); send(22, F_MVIN);
    idle_wait();
    check(issue_t[21] >= issue_t[20] + 40, "second compute waits for the execute controller");
    check(issue_t[22] > issue_t[21], "younger load not issued before the older compute");
    lat[1] = 5;

    // 4. freeze while something runs
    lat[0] = 30;
    send(30, F_MVIN);
    send(31, F_INSTR_FREEZE);
    check(frozen && inflight, "frozen while the load still runs");
    send(32, F_MVIN); send(33, F_MVOUT);
    repeat (60) @(negedge clk);
    check(resp_t[30] > 0 && !inflight, "running load completed under freeze");
    check(issue_t[32] == -1 && issue_t[33] == -1, "nothing issued while frozen");
    check(busy, "queued instructions keep busy high");
    check(resp_lane[31] == 4, "freeze answered on the direct lane");
    send(34, F_FLUSH, 64'(FL_QUEUE));
    check(!busy, "flush of the queues empties them");
    send(35, F_MVIN);
    repeat (10) @(negedge clk);
    check(issue_t[35] == -1, "still frozen after a queue flush");
    send(36, F_FLUSH, 64'(FL_FREEZE));
    idle_wait();
    check(!frozen && issue_t[35] > 0, "resumed");
    check(issue_t[32] == -1 && issue_t[33] == -1, "flushed instructions never issue");
    lat[0] = 5;

    // 5. bank flush, flush all
    send(40, F_FLUSH, 64'(FL_BANK), 64'd9);
    send(41, F_FLUSH, 64'(FL_ALL));
    repeat (2) @(negedge clk);
    check(nbank == 1 && nreset == 1 && nclear == 1, "flush bank / flush all pulses");

    // 6. reconfig forwards the replayed configurations
    ncfg = 0;
    fork
      send(50, F_RECONFIG);
      begin
        @(posedge clk iff cb_replay_start);
        @(negedge clk); cb_replay_busy = 1;
        for (int k = 0; k < 3; k++) begin
          @(negedge clk); cb_replay_valid = 1; cb_replay_rs1 = 64'(k); cb_replay_rs2 = 64'(100 + k);
          @(negedge clk); cb_replay_valid = 0;
        end
        @(negedge clk); cb_replay_busy = 0;
      end
    join
    idle_wait();
    check(ncfg == 3 && last_cfg_rs2 == 64'd102, "replayed configurations forwarded");
    check(resp_t[50] > 0 && resp_lane[50] == 0, "reconfig answered after the replay");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
