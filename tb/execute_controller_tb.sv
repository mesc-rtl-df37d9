// execute_controller_tb: the controller drives a real systolic_array; the
// scratchpad (one cycle read latency) and the accumulator are modelled here.
// Checks preload + compute_preloaded (C = A*B) and compute_accumulated
// (C += A*B) against products computed here, the accumulator addresses
// written, the done ids and the compute latency of 2*DIM + 3 cycles.
module execute_controller_tb;
  import mesc_pkg::*;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cmd_valid, cmd_ready; cmd_t cmd;
  logic sp_rvalid; logic [31:0] sp_rladdr; logic [127:0] sp_rdata;
  logic sa_b_we, sa_a_valid, sa_c_valid; logic [3:0] sa_b_row; logic [127:0] sa_b_data, sa_a_data; logic [511:0] sa_c_data;
  logic acc_wen, acc_wacc, done; logic [9:0] acc_waddr; logic [511:0] acc_wdata; logic [7:0] done_id;

  execute_controller dut (.*);
  systolic_array u_sa (.clk, .rst_n, .b_we(sa_b_we), .b_row(sa_b_row), .b_data(sa_b_data),
    .a_valid(sa_a_valid), .a_data(sa_a_data), .c_valid(sa_c_valid), .c_data(sa_c_data));

  logic [127:0] sp [int];
  logic [511:0] acc [int];
  always @(posedge clk) begin
    if (sp_rvalid) sp_rdata <= sp.exists(int'(sp_rladdr)) ? sp[int'(sp_rladdr)] : '0;
    if (acc_wen) begin
      if (acc_wacc && acc.exists(int'(acc_waddr)))
        for (int j = 0; j < D; j++) acc[int'(acc_waddr)][j*32 +: 32] = acc[int'(acc_waddr)][j*32 +: 32] + acc_wdata[j*32 +: 32];
      else acc[int'(acc_waddr)] = acc_wdata;
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int n_done = 0, t_done; logic [7:0] last_id;
  always @(posedge clk) if (rst_n && done) begin n_done++; last_id = done_id; t_done = cyc; end

  logic signed [7:0] A [D][D], B [D][D], A2 [D][D];
  logic signed [31:0] C [D][D];
  int t0;

  task automatic issue(logic [7:0] id, logic [6:0] f, logic [63:0] r1, logic [63:0] r2);
    @(negedge clk); cmd_valid = 1; cmd = '{id: id, funct: f, rs1: r1, rs2: r2}; t0 = cyc;
    @(negedge clk); cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
    repeat (2) @(negedge clk);
    check(last_id == id, $sformatf("done id %0d", id));
  endtask

  initial begin
    cmd_valid = 0; cmd = '0;
    for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
      A[i][j] = 8'($urandom); B[i][j] = 8'($urandom); A2[i][j] = 8'($urandom_range(0, 20)) - 8'sd10;
    end
    for (int i = 0; i < D; i++) begin
      for (int j = 0; j < D; j++) begin
        sp[200 + i][j*8 +: 8] = A[i][j]; sp[300 + i][j*8 +: 8] = B[i][j]; sp[400 + i][j*8 +: 8] = A2[i][j];
      end
    end
    repeat (3) @(negedge clk); rst_n = 1;
    issue(1, F_PRELOAD, 64'd300, 64'h0008_0000 + 64'd32);
    issue(2, F_COMPUTE_PRELOADED, 64'd200, 64'd0);
    check(t_done - t0 == 2 * D + 3, $sformatf("compute latency %0d cycles", t_done - t0));
    for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
      C[i][j] = 0;
      for (int k = 0; k < D; k++) C[i][j] += 32'(A[i][k]) * 32'(B[k][j]);
      check(acc[32 + i][j*32 +: 32] == C[i][j], $sformatf("C[%0d][%0d]", i, j));
    end
    issue(3, F_COMPUTE_ACCUMULATED, 64'd400, 64'd0);
    for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
      for (int k = 0; k < D; k++) C[i][j] += 32'(A2[i][k]) * 32'(B[k][j]);
      check(acc[32 + i][j*32 +: 32] == C[i][j], $sformatf("C+=[%0d][%0d]", i, j));
    end
    check(n_done == 3, "three completions");
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
