// store_controller: executes the instructions that move data from the
// accelerator out to DRAM:
//   mvout / step_wise_mvout  rs1 = DRAM address, rs2[31:0] = local address,
//                            rs2[63:48] = rows. Accumulator rows (bit 19 of
//                            the local address set) go out at full 32-bit
//                            precision as 4 beats; scratchpad rows, read
//                            through the address remapper, as 1 beat.
//   mvout_config_buffer      a header beat with the valid mask in bits 3:0,
//                            then the four config-copy buffer entries as
//                            {rs2, rs1} beats.
//   mvout_remapping_block    the ENTRIES remapping block entries, one beat
//                            each.
// Row r goes to base + r*stride (+16 per beat); the stride comes from the
// store configuration channel, which gives densely packed rows to
// step_wise_mvout regardless of the task's configuration.
// Timing per row: request the local read (sp_rvalid until sp_rgnt; the
// accumulator port is always free), take the row one cycle later, then send
// its beats, each waiting for mem_req_ready. done pulses with the id after
// the last beat is accepted. cmd_ready is high only when idle.
// The instruction set follows the paper; layouts, full-precision output and
// the row-at-a-time sequencing are this design's choices.
module store_controller
  import mesc_pkg::*;
#(
  parameter int ENTRIES = 256
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        cmd_valid,
  output logic                        cmd_ready,
  input  cmd_t                        cmd,
  output logic [6:0]                  cfg_funct,
  output logic [15:0]                 cfg_row_bytes,
  input  mv_cfg_t                     cfg_eff,
  output logic                        mem_req_valid,
  input  logic                        mem_req_ready,
  output mem_req_t                    mem_req,
  output logic                        sp_rvalid,
  input  logic                        sp_rgnt,
  output logic [31:0]                 sp_rladdr,
  input  logic [SP_ROW_W-1:0]         sp_rdata,
  output logic                        acc_ren,
  output logic [$clog2(ACC_ROWS)-1:0] acc_raddr,
  input  logic [ACC_ROW_W-1:0]        acc_rdata,
  output logic [1:0]                  cb_ridx,
  input  cfg_entry_t                  cb_rentry,
  input  logic [3:0]                  cb_valid_mask,
  output logic [$clog2(ENTRIES)-1:0]  rb_idx,
  input  remap_entry_t                rb_rdata,
  output logic                        done,
  output logic [ID_W-1:0]             done_id
);
  typedef enum logic [2:0] {S_IDLE, S_START, S_READ, S_TAKE, S_SEND} state_e;
  typedef enum logic [1:0] {M_SP, M_ACC, M_CB, M_RB} mode_e;

  state_e        st;
  mode_e         mode;
  cmd_t          c;
  logic [39:0]   row_addr, stride;
  logic [15:0]   row, rows;
  logic [1:0]    beat, nbeats;
  logic [ACC_ROW_W-1:0] buf_q;

  assign cmd_ready     = (st == S_IDLE);
  assign cfg_funct     = c.funct;
  assign cfg_row_bytes = (mode == M_ACC) ? 16'(ACC_ROW_W / 8) : 16'(SP_ROW_W / 8);

  assign sp_rvalid = (st == S_READ) && mode == M_SP;
  assign sp_rladdr = c.rs2[31:0] + 32'(row);
  assign acc_ren   = (st == S_READ) && mode == M_ACC;
  assign acc_raddr = $clog2(ACC_ROWS)'(c.rs2[31:0] + 32'(row));
  assign cb_ridx   = 2'(row - 16'd1);
  assign rb_idx    = $clog2(ENTRIES)'(row);

  assign mem_req_valid = (st == S_SEND);
  assign mem_req       = '{we: 1'b1, addr: row_addr + 40'(beat) * 40'(BUS_W / 8),
                           wdata: buf_q[beat*BUS_W +: BUS_W]};


  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; mode <= M_SP; c <= '0;
      row_addr <= '0; stride <= '0; row <= '0; rows <= '0;
      beat <= '0; nbeats <= '0; buf_q <= '0;
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
            F_MVOUT_CFGBUF: begin mode <= M_CB; rows <= 16'd5; nbeats <= 2'd0; end
            F_MVOUT_REMAP:  begin mode <= M_RB; rows <= 16'(ENTRIES); nbeats <= 2'd0; end
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
          stride <= (mode == M_CB || mode == M_RB) ? 40'(BUS_W / 8) : cfg_eff.stride;
          if (rows == 16'd0) begin
            st <= S_IDLE; done <= 1'b1; done_id <= c.id;
          end else begin
            st <= S_READ;
          end
        end
        S_READ: begin
          case (mode)
            M_SP:   if (sp_rgnt) st <= S_TAKE;
            M_ACC:  st <= S_TAKE;
            M_CB:   begin
              buf_q <= '0;
              if (row == 16'd0) buf_q[3:0] <= cb_valid_mask;
              else              buf_q[127:0] <= {cb_rentry.rs2, cb_rentry.rs1};
              st <= S_SEND;
            end
            default: begin
              buf_q <= '0;
              buf_q[127:0] <= rb_rdata;
              st <= S_SEND;
            end
          endcase
        end
        S_TAKE: begin
          buf_q <= '0;
          if (mode == M_SP) buf_q[SP_ROW_W-1:0] <= sp_rdata;
          else              buf_q <= acc_rdata;
          st <= S_SEND;
        end
        S_SEND: if (mem_req_ready) begin
          if (beat == nbeats) begin
            beat <= '0;
            if (row + 16'd1 == rows) begin
              st <= S_IDLE; done <= 1'b1; done_id <= c.id;
            end else begin
              row      <= row + 16'd1;
              row_addr <= row_addr + stride;
              st       <= S_READ;
            end
          end else begin
            beat <= beat + 2'd1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
