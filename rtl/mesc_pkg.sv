// mesc_pkg: types and constants shared by the preemptible Gemmini-style
// accelerator (Gemmini-RT).
//
// Sizes are those of the evaluated configuration: a 16x16 PE array, a 256 KB
// scratchpad of 8 banks (32 KB each, 2048 rows of 16 int8 elements), a 64 KB
// accumulator (1024 rows of 16 x 32-bit), a 128-bit DMA bus and a 4 KB
// remapping block (256 entries of 128 bits).
//
// Instruction encoding: the classic Gemmini funct7 values are kept for the
// ordinary instructions. The preemption instructions get 0x18..0x1F; 0x18 for
// step_wise_mvin is the value printed next to funct7 in the default
// configuration channel diagram, the rest are this design's choice.
// A local address uses bit 19 (mask 0x0008_0000) to select the accumulator,
// the low bits give the row.
package mesc_pkg;

  localparam int DIM          = 16;
  localparam int ELEM_W       = 8;
  localparam int ACC_W        = 32;
  localparam int SP_ROW_W     = DIM * ELEM_W;   // 128
  localparam int ACC_ROW_W    = DIM * ACC_W;    // 512
  localparam int BUS_W        = 128;
  localparam int BEAT_BYTES   = BUS_W / 8;      // 16
  localparam int ACC_BEATS    = ACC_ROW_W / BUS_W; // 4
  localparam int SP_BANKS     = 8;
  localparam int SP_BANK_ROWS = 2048;
  localparam int ACC_ROWS     = 1024;
  localparam int REMAP_ENTRIES = 256;
  localparam int TASK_W       = 8;
  localparam int ID_W         = 8;
  localparam int DRAM_AW      = 40;

  localparam logic [31:0] ACC_ADDR_MASK = 32'h0008_0000;

  // funct7 values
  localparam logic [6:0] F_CONFIG              = 7'h00;
  localparam logic [6:0] F_MVIN                = 7'h02;
  localparam logic [6:0] F_MVOUT               = 7'h03;
  localparam logic [6:0] F_COMPUTE_PRELOADED   = 7'h04;
  localparam logic [6:0] F_COMPUTE_ACCUMULATED = 7'h05;
  localparam logic [6:0] F_PRELOAD             = 7'h06;
  localparam logic [6:0] F_FLUSH               = 7'h07;
  localparam logic [6:0] F_STEP_WISE_MVIN      = 7'h18;
  localparam logic [6:0] F_STEP_WISE_MVOUT     = 7'h19;
  localparam logic [6:0] F_MVIN_CFGBUF         = 7'h1A;
  localparam logic [6:0] F_MVOUT_CFGBUF        = 7'h1B;
  localparam logic [6:0] F_RECONFIG            = 7'h1C;
  localparam logic [6:0] F_MVIN_REMAP          = 7'h1D;
  localparam logic [6:0] F_MVOUT_REMAP         = 7'h1E;
  localparam logic [6:0] F_INSTR_FREEZE        = 7'h1F;

  // flush_x sub-operation, rs1[2:0]
  localparam logic [2:0] FL_FREEZE = 3'd1;  // resume issue
  localparam logic [2:0] FL_QUEUE  = 3'd2;  // drop queued, unissued instructions
  localparam logic [2:0] FL_BANK   = 3'd3;  // release banks of task rs2[7:0]
  localparam logic [2:0] FL_ALL    = 3'd4;  // queues, configuration, config-copy buffer

  // configuration classes, rs1[1:0] of a config instruction
  typedef enum logic [1:0] {CFG_EX = 2'd0, CFG_LD = 2'd1, CFG_ST = 2'd2, CFG_NORM = 2'd3} cfg_type_e;

  typedef enum logic [1:0] {CLS_CFG = 2'd0, CLS_LD = 2'd1, CLS_EX = 2'd2, CLS_ST = 2'd3} cls_e;

  typedef struct packed {
    logic [ID_W-1:0] id;
    logic [6:0]      funct;
    logic [63:0]     rs1;
    logic [63:0]     rs2;
  } cmd_t;

  typedef struct packed {
    logic        valid;
    logic [63:0] rs1;
    logic [63:0] rs2;
  } cfg_entry_t;

  // configuration of one move class (fields named as in the channel diagram)
  typedef struct packed {
    logic [31:0] scale;
    logic        shrink;
    logic [15:0] block_stride;
    logic [7:0]  pixel_repeat;
    logic [39:0] stride;
  } mv_cfg_t;

  // one remapping block entry, packed in 128 bits
  typedef struct packed {
    logic              valid;
    logic [TASK_W-1:0] task_id;
    logic [31:0]       laddr;
    logic [31:0]       real_laddr;
    logic [15:0]       rows;
    logic [38:0]       pad;
  } remap_entry_t;

  typedef struct packed {
    logic               we;
    logic [DRAM_AW-1:0] addr;
    logic [BUS_W-1:0]   wdata;
  } mem_req_t;

  function automatic cls_e classify(logic [6:0] f);
    case (f)
      F_MVIN, F_STEP_WISE_MVIN, F_MVIN_CFGBUF, F_MVIN_REMAP:     return CLS_LD;
      F_MVOUT, F_STEP_WISE_MVOUT, F_MVOUT_CFGBUF, F_MVOUT_REMAP: return CLS_ST;
      F_PRELOAD, F_COMPUTE_PRELOADED, F_COMPUTE_ACCUMULATED:     return CLS_EX;
      default:                                                   return CLS_CFG;
    endcase
  endfunction

endpackage
