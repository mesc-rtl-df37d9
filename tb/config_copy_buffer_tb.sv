// config_copy_buffer_tb: records configurations of the four classes, checks
// that a later one of a class overrides the earlier, reads and writes entries
// (the mvout/mvin_config_buffer paths), replays them with reconfig (one every
// 2 cycles, buffer cleared and re-recorded from the replayed stream, as the
// reservation station does) and clears.
module config_copy_buffer_tb;
  import mesc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_valid; logic [63:0] cfg_rs1, cfg_rs2;
  logic [1:0] rd_idx, wr_idx; cfg_entry_t rd_entry, wr_entry; logic [3:0] vmask;
  logic wr_en, replay_start, replay_valid, replay_busy, clear;
  logic [63:0] replay_rs1, replay_rs2;
  logic feed;  // re-record replayed configurations

  config_copy_buffer dut (.clk, .rst_n, .cfg_valid(cfg_valid || (feed && replay_valid)),
    .cfg_rs1(feed && replay_valid ? replay_rs1 : cfg_rs1), .cfg_rs2(feed && replay_valid ? replay_rs2 : cfg_rs2),
    .rd_idx, .rd_entry, .valid_mask(vmask), .wr_en, .wr_idx, .wr_entry,
    .replay_start, .replay_valid, .replay_rs1, .replay_rs2, .replay_busy, .clear);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cfg(logic [63:0] r1, logic [63:0] r2);
    @(negedge clk); cfg_valid = 1; cfg_rs1 = r1; cfg_rs2 = r2;
    @(negedge clk); cfg_valid = 0;
  endtask

  logic [63:0] exp1 [4], exp2 [4];
  int seen, last_t, t;

  initial begin
    cfg_valid = 0; cfg_rs1 = 0; cfg_rs2 = 0; rd_idx = 0; wr_idx = 0; wr_entry = '0;
    wr_en = 0; replay_start = 0; clear = 0; feed = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    check(vmask == 4'b0000, "empty after reset");
    // one config per class, then an override of the load class
    for (int k = 0; k < 4; k++) begin
      exp1[k] = {32'(k * 100 + 7), 30'd0, 2'(k)}; exp2[k] = 64'(1000 + k);
      cfg(exp1[k], exp2[k]);
    end
    exp1[1] = {32'hCAFE, 30'd5, 2'd1}; exp2[1] = 64'd4242;
    cfg(exp1[1], exp2[1]);
    check(vmask == 4'b1111, "all four classes held");
    for (int k = 0; k < 4; k++) begin
      rd_idx = 2'(k); #1;
      check(rd_entry.valid && rd_entry.rs1 == exp1[k] && rd_entry.rs2 == exp2[k], $sformatf("entry %0d", k));
    end
    // replay: each entry once, two cycles apart, in class order
    feed = 1;
    @(negedge clk); replay_start = 1; @(negedge clk); replay_start = 0;
    check(vmask == 4'b0000, "cleared when replay starts");
    seen = 0; last_t = -10; t = 0;
    while (replay_busy && t < 50) begin
      if (replay_valid) begin
        check(replay_rs1 == exp1[seen] && replay_rs2 == exp2[seen], $sformatf("replay %0d", seen));
        if (seen > 0) check(t - last_t == 2, "2 cycles between replayed configurations");
        last_t = t; seen++;
      end
      @(negedge clk); t++;
    end
    check(seen == 4, "four entries replayed");
    feed = 0;
    check(vmask == 4'b1111, "re-recorded after replay");
    rd_idx = 2'd1; #1; check(rd_entry.rs2 == 64'd4242, "re-recorded load entry");
    // clear, then mvin_config_buffer path
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    check(vmask == 4'b0000, "clear empties");
    @(negedge clk); wr_en = 1; wr_idx = 2; wr_entry = '{valid: 1'b1, rs1: 64'h2, rs2: 64'h77};
    @(negedge clk); wr_en = 0;
    rd_idx = 2; #1;
    check(vmask == 4'b0100 && rd_entry.rs2 == 64'h77, "mvin write of one entry");
    // replay with a single valid entry
    @(negedge clk); replay_start = 1; @(negedge clk); replay_start = 0;
    seen = 0; t = 0;
    while (replay_busy && t < 50) begin
      if (replay_valid) begin seen++; check(replay_rs2 == 64'h77, "single replay"); end
      @(negedge clk); t++;
    end
    check(seen == 1, "only valid entries replayed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
