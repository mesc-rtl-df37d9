// default_config_channel: configuration registers of one move class (load or
// store) with a bypass that supplies a fixed default configuration to the
// step-wise move instructions.
//
// A config instruction of this class (cfg_valid) writes the registers:
// scale = rs1[63:32], block_stride = rs1[31:16], pixel_repeat = rs1[15:8],
// shrink = rs1[2], stride = rs2[39:0]. rst_cfg (a flush of configuration
// data) and reset restore the defaults. 'cur' shows the stored registers.
// 'eff' is what a move that starts now must use: if funct7 equals
// STEP_WISE_FUNCT it is the default configuration (rows packed densely in
// DRAM, stride = row_bytes, scale 1.0, no shrink, block_stride 0,
// pixel_repeat 1), otherwise the stored one. Step-wise saves and restores
// therefore never depend on, nor alter, the task's own configuration.
// Combinational select; registers update at the clock edge.
// The field names and the funct7 value 0x18 of the load channel follow the
// paper's diagram; the bit positions and the default values are this
// design's choices.
module default_config_channel
  import mesc_pkg::*;
#(
  parameter logic [6:0] STEP_WISE_FUNCT = F_STEP_WISE_MVIN
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_valid,
  input  logic [63:0] cfg_rs1,
  input  logic [63:0] cfg_rs2,
  input  logic        rst_cfg,
  input  logic [6:0]  funct7,
  input  logic [15:0] row_bytes,
  output mv_cfg_t     eff,
  output mv_cfg_t     cur
);
  localparam logic [31:0] SCALE_ONE = 32'h3F80_0000;  // 1.0f

  function automatic mv_cfg_t default_cfg(logic [15:0] rb);
    return '{scale: SCALE_ONE, shrink: 1'b0, block_stride: 16'd0, pixel_repeat: 8'd1,
             stride: 40'(rb)};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        cur <= default_cfg(16'd16);
    else if (rst_cfg)  cur <= default_cfg(16'd16);
    else if (cfg_valid)
      cur <= '{scale: cfg_rs1[63:32], shrink: cfg_rs1[2], block_stride: cfg_rs1[31:16],
               pixel_repeat: cfg_rs1[15:8], stride: cfg_rs2[39:0]};
  end

  assign eff = (funct7 == STEP_WISE_FUNCT) ? default_cfg(row_bytes) : cur;
endmodule
