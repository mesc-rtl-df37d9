// execute_controller: runs matrix multiplications on the systolic array.
//   preload                rs1[31:0] = scratchpad address of B (DIM rows),
//                          rs2[31:0] = accumulator address of C (bit 19 set);
//                          only recorded, completes in one cycle.
//   compute_preloaded      rs1[31:0] = scratchpad address of A (DIM rows):
//                          C = A * B, overwriting the DIM rows of C.
//   compute_accumulated    as above, C += A * B.
// A compute reads the DIM rows of B from the scratchpad (through the address
// remapper), one per cycle, and loads them into the array; then reads the
// DIM rows of A, one per cycle, and writes each result row into the
// accumulator one cycle after the array produces it. A compute takes
// 2*DIM + 3 cycles from issue to done; the controller owns the scratchpad
// read port and the accumulator write port by priority while it runs
// (sp_rvalid is always granted). cmd_ready is high only when idle.
// The preload/compute pair follows Gemmini's instruction set; reading B again
// for every compute and this operand layout are this design's simplifications.
module execute_controller
  import mesc_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         cmd_valid,
  output logic                         cmd_ready,
  input  cmd_t                         cmd,
  output logic                         sp_rvalid,
  output logic [31:0]                  sp_rladdr,
  input  logic [SP_ROW_W-1:0]          sp_rdata,
  output logic                         sa_b_we,
  output logic [$clog2(DIM)-1:0]       sa_b_row,
  output logic [SP_ROW_W-1:0]          sa_b_data,
  output logic                         sa_a_valid,
  output logic [SP_ROW_W-1:0]          sa_a_data,
  input  logic                         sa_c_valid,
  input  logic [ACC_ROW_W-1:0]         sa_c_data,
  output logic                         acc_wen,
  output logic                         acc_wacc,
  output logic [$clog2(ACC_ROWS)-1:0]  acc_waddr,
  output logic [ACC_ROW_W-1:0]         acc_wdata,
  output logic                         done,
  output logic [ID_W-1:0]              done_id
);
  localparam int RW = $clog2(DIM);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  state_e        st;
  logic [31:0]   b_addr, c_addr, a_addr;
  logic          accumulate;
  logic [ID_W-1:0] id;
  logic [RW+1:0] rd_cnt;          // 0..2*DIM-1: B rows, then A rows
  logic          rd_v1, rd_isb1;  // read issued last cycle
  logic [RW-1:0] rd_row1;
  logic [RW-1:0] c_row;

  assign cmd_ready = (st == S_IDLE);

  assign sp_rvalid = (st == S_RUN);
  assign sp_rladdr = (rd_cnt < (RW+2)'(DIM)) ? b_addr + 32'(rd_cnt) : a_addr + 32'(rd_cnt - (RW+2)'(DIM));

  assign sa_b_we    = rd_v1 && rd_isb1;
  assign sa_b_row   = rd_row1;
  assign sa_b_data  = sp_rdata;
  assign sa_a_valid = rd_v1 && !rd_isb1;
  assign sa_a_data  = sp_rdata;

  assign acc_wen   = sa_c_valid;
  assign acc_wacc  = accumulate;
  assign acc_waddr = $clog2(ACC_ROWS)'(c_addr + 32'(c_row));
  assign acc_wdata = sa_c_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; b_addr <= '0; c_addr <= '0; a_addr <= '0; accumulate <= 1'b0; id <= '0;
      rd_cnt <= '0; rd_v1 <= 1'b0; rd_isb1 <= 1'b0; rd_row1 <= '0; c_row <= '0;
      done <= 1'b0; done_id <= '0;
    end else begin
      done  <= 1'b0;
      rd_v1 <= (st == S_RUN);
      rd_isb1 <= rd_cnt < (RW+2)'(DIM);
      rd_row1 <= rd_cnt[RW-1:0];
      if (sa_c_valid) c_row <= c_row + 1'b1;
      case (st)
        S_IDLE: if (cmd_valid) begin
          if (cmd.funct == F_PRELOAD) begin
            b_addr <= cmd.rs1[31:0];
            c_addr <= cmd.rs2[31:0];
            done <= 1'b1; done_id <= cmd.id;
          end else begin
            a_addr     <= cmd.rs1[31:0];
            accumulate <= (cmd.funct == F_COMPUTE_ACCUMULATED);
            id         <= cmd.id;
            rd_cnt     <= '0;
            c_row      <= '0;
            st         <= S_RUN;
          end
        end
        S_RUN: begin
          rd_cnt <= rd_cnt + 1'b1;
          if (rd_cnt == (RW+2)'(2 * DIM - 1)) st <= S_DRAIN;
        end
        S_DRAIN: if (sa_c_valid && c_row == RW'(DIM - 1)) begin
          st <= S_IDLE; done <= 1'b1; done_id <= id;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
