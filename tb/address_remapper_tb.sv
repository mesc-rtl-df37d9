// address_remapper_tb: small banks (8 rows) so that runs cross banks.
// Checks, against addresses worked out by hand: a run filling a bank and
// spilling into a second bank, read translation, a second task landing in the
// first unlocked bank, a new run in a partly filled bank of the same task,
// refusal when the bank quota is used up, release of a task's banks by flush,
// and reading and writing remapping block entries.
module address_remapper_tb;
  import mesc_pkg::*;
  localparam int BR = 8, NB = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [7:0] cur_task, flush_task; logic [3:0] bank_quota;
  logic wr_valid, wr_ok, rd_hit, flush_valid, ent_we, alloc_error;
  logic [31:0] wr_laddr, rd_laddr;
  logic [5:0] wr_real, rd_real;
  logic [NB-1:0] released, banklock;
  logic [NB-1:0][7:0] bank_owner;
  logic [7:0] ent_idx; remap_entry_t ent_rdata, ent_wdata;

  address_remapper #(.SP_BANKS_P(NB), .BANK_ROWS_P(BR), .ENTRIES(256)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(logic [31:0] la, bit exp_ok, int exp_real);
    @(negedge clk); wr_valid = 1; wr_laddr = la; #1;
    check(wr_ok == exp_ok, $sformatf("wr_ok laddr %0d", la));
    if (exp_ok) check(wr_real == 6'(exp_real), $sformatf("laddr %0d -> %0d, got %0d", la, exp_real, wr_real));
    @(negedge clk); wr_valid = 0;
  endtask

  task automatic rd(logic [31:0] la, bit exp_hit, int exp_real);
    rd_laddr = la; #1;
    check(rd_hit == exp_hit, $sformatf("rd_hit laddr %0d", la));
    if (exp_hit) check(rd_real == 6'(exp_real), $sformatf("read laddr %0d -> %0d, got %0d", la, exp_real, rd_real));
  endtask

  initial begin
    cur_task = 1; bank_quota = 2; wr_valid = 0; wr_laddr = 0; rd_laddr = 0;
    flush_valid = 0; flush_task = 0; ent_we = 0; ent_idx = 0; ent_wdata = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    // task 1: rows 0..11 -> bank 0 rows 0..7, bank 1 rows 0..3
    for (int i = 0; i < 12; i++) wr(32'(i), 1, (i < 8) ? i : 8 + (i - 8));
    check(banklock == 8'b0000_0011 && bank_owner[0] == 1 && bank_owner[1] == 1, "task 1 holds banks 0,1");
    for (int i = 0; i < 12; i++) rd(32'(i), 1, (i < 8) ? i : 8 + (i - 8));
    rd(32'd12, 0, 0);
    // rewrite inside a run: same place
    wr(32'd5, 1, 5);
    ent_idx = 0; #1;
    check(ent_rdata.valid && ent_rdata.laddr == 0 && ent_rdata.real_laddr == 0 && ent_rdata.rows == 8, "entry 0 = (0,0,8)");
    ent_idx = 1; #1;
    check(ent_rdata.laddr == 8 && ent_rdata.real_laddr == 8 && ent_rdata.rows == 4, "entry 1 = (8,8,4)");
    // task 2, quota 1: first unlocked bank is 2
    cur_task = 2; bank_quota = 1;
    rd(32'd0, 0, 0);  // task 1's mapping is not visible to task 2
    for (int i = 0; i < 3; i++) wr(32'(i), 1, 16 + i);
    // non-contiguous laddr: new run in the same partly filled bank
    wr(32'd100, 1, 19);
    wr(32'd101, 1, 20);
    rd(32'd101, 1, 20);
    wr(32'd200, 1, 21); wr(32'd201, 1, 22); wr(32'd202, 1, 23);
    check(!alloc_error, "no error yet");
    // bank 2 is full and the quota is one bank: refused
    wr(32'd203, 0, 0);
    check(alloc_error, "alloc_error after refusal");
    check(banklock == 8'b0000_0111, "task 2 did not take a second bank");
    // task 1 again: its bank 1 has room
    cur_task = 1; bank_quota = 2;
    wr(32'd12, 1, 12);
    rd(32'd3, 1, 3);
    // flush task 1: banks 0 and 1 released
    @(negedge clk); flush_valid = 1; flush_task = 1; @(negedge clk); flush_valid = 0;
    check(released == 8'b0000_0011, "released banks 0,1");
    check(banklock == 8'b0000_0100, "only task 2's bank locked");
    rd(32'd3, 0, 0);
    @(negedge clk);
    check(released == 8'b0, "released is a pulse");
    // task 1 restarts: lands in bank 0 again
    wr(32'd40, 1, 0);
    // mvin_remapping_block: an entry for task 7 in bank 5 rows 2..4
    @(negedge clk); ent_we = 1; ent_idx = 8'd200;
    ent_wdata = '{valid: 1'b1, task_id: 8'd7, laddr: 32'd64, real_laddr: 32'(5 * BR + 2), rows: 16'd3, pad: '0};
    @(negedge clk); ent_we = 0;
    check(banklock[5] && bank_owner[5] == 7, "restored entry locks its bank");
    cur_task = 7; bank_quota = 1;
    rd(32'd65, 1, 5 * BR + 3);
    wr(32'd67, 1, 5 * BR + 5);   // continues the restored run past its fill point
    ent_idx = 8'd200; #1;
    check(ent_rdata.rows == 4, "restored run extended");
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
