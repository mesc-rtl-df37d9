// load_controller: executes the instructions that move data from DRAM into
// the accelerator:
//   mvin / step_wise_mvin   rs1 = DRAM address, rs2[31:0] = local address,
//                           rs2[63:48] = rows. A local address with bit 19 set
//                           (mask 0x0008_0000) names accumulator rows (4 beats
//                           of 128 bits each, 16 x 32-bit), otherwise
//                           scratchpad rows (1 beat, 16 x int8), which are
//                           written through the address remapper.
//   mvin_config_buffer      rs1 = DRAM address of a header beat (valid mask in
//                           bits 3:0) and four entry beats {rs2, rs1}, written
//                           into the config-copy buffer.
//   mvin_remapping_block    rs1 = DRAM address of ENTRIES beats, one remapping
//                           block entry each.
// Row r of a mvin is read from base + r*stride, beat k of that row from
// +16*k. The stride comes from the load configuration channel: the task's
// configured stride for mvin, densely packed rows for step_wise_mvin (the
// channel compares funct7 itself; this controller shows it the funct7 of the
// instruction it holds).
// Timing: one DRAM read outstanding at a time (request, then wait for its
// response); a finished row is written in the next cycle if the target port
// is ready. done pulses with the instruction's id when the last row is
// written. cmd_ready is high only when idle. A scratchpad write the remapper
// refuses is dropped (the remapper flags it).
// The instruction set follows the paper; operand layout, beat order and the
// single outstanding read are this design's choices.
module load_controller
  import mesc_pkg::*;
#(
  parameter int ENTRIES = 256
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cmd_valid,
  output logic                       cmd_ready,
  input  cmd_t                       cmd,
  output logic [6:0]                 cfg_funct,
  output logic [15:0]                cfg_row_bytes,
  input  mv_cfg_t                    cfg_eff,
  output logic                       mem_req_valid,
  input  logic                       mem_req_ready,
  output mem_req_t                   mem_req,
  input  logic                       mem_resp_valid,
  input  logic [BUS_W-1:0]           mem_resp_rdata,
  output logic                       sp_wvalid,
  input  logic                       sp_wready,
  output logic [31:0]                sp_wladdr,
  output logic [SP_ROW_W-1:0]        sp_wdata,
  output logic                       acc_wvalid,
  input  logic                       acc_wready,
  output logic [$clog2(ACC_ROWS)-1:0] acc_waddr,
  output logic [ACC_ROW_W-1:0]       acc_wdata,
  output logic                       cb_wen,
  output logic [1:0]                 cb_widx,
  output cfg_entry_t                 cb_wentry,
  output logic                       rb_we,
  output logic [$clog2(ENTRIES)-1:0] rb_idx,
  output remap_entry_t               rb_wdata,
  output logic                       done,
  output logic [ID_W-1:0]            done_id
);
  typedef enum logic [2:0] {S_IDLE, S_START, S_REQ, S_WAIT, S_WRITE} state_e;
  typedef enum logic [1:0] {M_SP, M_ACC, M_CB, M_RB} mode_e;

  state_e        st;
  mode_e         mode;
  cmd_t          c;
  logic [39:0]   row_addr, stride;
  logic [15:0]   row, rows;
  logic [1:0]    beat, nbeats;
  logic [3:0]    cb_mask;
  logic [ACC_ROW_W-1:0] buf_q;

  assign cmd_ready     = (st == S_IDLE);
  assign cfg_funct     = c.funct;
  assign cfg_row_bytes = (mode == M_ACC) ? 16'(ACC_ROW_W / 8) : 16'(SP_ROW_W / 8);

  assign mem_req_valid = (st == S_REQ);
  assign mem_req       = '{we: 1'b0, addr: row_addr + 40'(beat) * 40'(BUS_W / 8), wdata: '0};

  // write of a finished row
  logic wr_phase;
  assign wr_phase   = (st == S_WRITE);
  assign sp_wvalid  = wr_phase && mode == M_SP;
  assign sp_wladdr  = c.rs2[31:0] + 32'(row);
  assign sp_wdata   = buf_q[SP_ROW_W-1:0];
  assign acc_wvalid = wr_phase && mode == M_ACC;
  assign acc_waddr  = $clog2(ACC_ROWS)'(c.rs2[31:0] + 32'(row));
  assign acc_wdata  = buf_q;
  assign cb_wen     = wr_phase && mode == M_CB && row != 16'd0;
  assign cb_widx    = 2'(row - 16'd1);
  assign cb_wentry  = '{valid: cb_mask[2'(row - 16'd1)], rs1: buf_q[63:0], rs2: buf_q[127:64]};
  assign rb_we      = wr_phase && mode == M_RB;
  assign rb_idx     = $clog2(ENTRIES)'(row);
  assign rb_wdata   = remap_entry_t'(buf_q[127:0]);

  logic wr_go;
  always_comb begin
    case (mode)
      M_SP:    wr_go = sp_wready;
      M_ACC:   wr_go = acc_wready;
      default: wr_go = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; mode <= M_SP; c <= '0;
      row_addr <= '0; stride <= '0; row <= '0; rows <= '0;
      beat <= '0; nbeats <= '0; cb_mask <= '0; buf_q <= '0;
      done <= 1'b0; done_id <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (cmd_valid) begin
          c        <= cmd;
          row_addr <= cmd.rs1[39:0];
          row      <= '0;
          beat     <= '0;
          case (cmd.funct)
            F_MVIN_CFGBUF: begin mode <= M_CB; rows <= 16'd5; nbeats <= 2'd0; end
            F_MVIN_REMAP:  begin mode <= M_RB; rows <= 16'(ENTRIES); nbeats <= 2'd0; end
            default: begin
              rows <= cmd.rs2[63:48];
              if ((cmd.rs2[31:0] & ACC_ADDR_MASK) != 32'd0) begin
                mode <= M_ACC; nbeats <= 2'(ACC_BEATS - 1);
              end else begin
                mode <= M_SP;  nbeats <= 2'd0;
              end
            end
          endcase
          st <= S_START;
        end
        S_START: begin
          // the configuration channel now sees this instruction's funct7
          stride <= (mode == M_CB || mode == M_RB) ? 40'(BUS_W / 8) : cfg_eff.stride;
          st     <= (rows == 16'd0) ? S_IDLE : S_REQ;
          if (rows == 16'd0) begin done <= 1'b1; done_id <= c.id; end
        end
        S_REQ:  if (mem_req_ready) st <= S_WAIT;
        S_WAIT: if (mem_resp_valid) begin
          buf_q[beat*BUS_W +: BUS_W] <= mem_resp_rdata;
          if (mode == M_CB && row == 16'd0) cb_mask <= mem_resp_rdata[3:0];
          if (beat == nbeats) begin
            beat <= '0;
            st   <= S_WRITE;
          end else begin
            beat <= beat + 2'd1;
            st   <= S_REQ;
          end
        end
        S_WRITE: if (wr_go) begin
          if (row + 16'd1 == rows) begin
            st <= S_IDLE; done <= 1'b1; done_id <= c.id;
          end else begin
            row      <= row + 16'd1;
            row_addr <= row_addr + stride;
            st       <= S_REQ;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
