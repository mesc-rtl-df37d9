// default_config_channel_tb: checks that a load configuration is stored and
// used by mvin, that step_wise_mvin (funct7 0x18) always sees the default
// configuration (packed rows, scale 1.0, pixel_repeat 1) while the stored one
// stays unchanged, that other classes' configurations are ignored by the
// caller's qualification, and that a configuration flush restores defaults.
module default_config_channel_tb;
  import mesc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_valid, rst_cfg; logic [63:0] cfg_rs1, cfg_rs2; logic [6:0] funct7; logic [15:0] row_bytes;
  mv_cfg_t eff, cur;
  default_config_channel dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    cfg_valid = 0; rst_cfg = 0; cfg_rs1 = 0; cfg_rs2 = 0; funct7 = F_MVIN; row_bytes = 16;
    repeat (3) @(negedge clk); rst_n = 1;
    check(eff.stride == 16 && eff.scale == 32'h3F80_0000 && eff.pixel_repeat == 1, "reset default");
    @(negedge clk); cfg_valid = 1;
    cfg_rs1 = {32'h4000_0000, 16'd3, 8'd2, 5'd0, 1'b1, 2'(CFG_LD)}; cfg_rs2 = 64'd1024;
    @(negedge clk); cfg_valid = 0;
    funct7 = F_MVIN; #1;
    check(eff.stride == 1024 && eff.scale == 32'h4000_0000 && eff.block_stride == 3 &&
          eff.pixel_repeat == 2 && eff.shrink, "mvin uses the task's configuration");
    funct7 = F_STEP_WISE_MVIN; row_bytes = 64; #1;
    check(eff.stride == 64 && eff.scale == 32'h3F80_0000 && eff.block_stride == 0 &&
          eff.pixel_repeat == 1 && !eff.shrink, "step_wise_mvin uses the default configuration");
    row_bytes = 16; #1;
    check(eff.stride == 16, "default stride follows the row size");
    check(cur.stride == 1024, "stored configuration untouched by step-wise use");
    funct7 = F_STEP_WISE_MVOUT; #1;
    check(eff.stride == 1024, "another funct7 does not select the default");
    @(negedge clk); rst_cfg = 1; @(negedge clk); rst_cfg = 0;
    funct7 = F_MVIN; #1;
    check(eff.stride == 16 && cur.scale == 32'h3F80_0000, "flush restores the default");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
