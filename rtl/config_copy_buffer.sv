// config_copy_buffer: keeps a copy of the most recent configuration
// instruction of each class (execute, load, store, norm), so that a task's
// configuration can be saved to DRAM on a context switch and re-applied when
// the task resumes.
//
// A configuration executed by the reservation station (cfg_valid) overwrites
// the entry of its class, selected by rs1[1:0]; a later one of the same class
// replaces the earlier, as in Gemmini. The store controller reads entries
// through rd_idx/rd_entry and valid_mask (mvout_config_buffer); the load controller writes
// them through wr_en/wr_idx/wr_entry (mvin_config_buffer).
//
// reconfig (replay_start) copies the valid entries aside, clears the buffer
// and then emits the saved entries one after the other on replay_valid,
// one every 2 cycles (a configuration takes 2 cycles to execute). Each
// replayed configuration is executed by the station and therefore recorded
// again, so after the replay the buffer holds the configuration in force.
// replay_busy is high from replay_start until the last entry is emitted.
// clear empties the buffer (flush).
module config_copy_buffer
  import mesc_pkg::*;
#(
  parameter int N_TYPES = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cfg_valid,
  input  logic [63:0]                cfg_rs1,
  input  logic [63:0]                cfg_rs2,
  input  logic [$clog2(N_TYPES)-1:0] rd_idx,
  output cfg_entry_t                 rd_entry,
  output logic [N_TYPES-1:0]          valid_mask,
  input  logic                       wr_en,
  input  logic [$clog2(N_TYPES)-1:0] wr_idx,
  input  cfg_entry_t                 wr_entry,
  input  logic                       replay_start,
  output logic                       replay_valid,
  output logic [63:0]                replay_rs1,
  output logic [63:0]                replay_rs2,
  output logic                       replay_busy,
  input  logic                       clear
);
  localparam int IW = $clog2(N_TYPES);

  cfg_entry_t entries [N_TYPES];
  cfg_entry_t saved   [N_TYPES];
  logic [IW:0] rp_idx;
  logic        rp_gap;

  assign rd_entry = entries[rd_idx];
  always_comb for (int i = 0; i < N_TYPES; i++) valid_mask[i] = entries[i].valid;

  // replay: walk the saved copy, emit valid entries every other cycle
  logic rp_emit;
  assign rp_emit      = replay_busy && !rp_gap && rp_idx < (IW+1)'(N_TYPES) && saved[rp_idx[IW-1:0]].valid;
  assign replay_valid = rp_emit;
  assign replay_rs1   = saved[rp_idx[IW-1:0]].rs1;
  assign replay_rs2   = saved[rp_idx[IW-1:0]].rs2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_TYPES; i++) begin
        entries[i] <= '0;
        saved[i]   <= '0;
      end
      replay_busy <= 1'b0;
      rp_idx      <= '0;
      rp_gap      <= 1'b0;
    end else begin
      if (replay_start && !replay_busy) begin
        for (int i = 0; i < N_TYPES; i++) begin
          saved[i]   <= entries[i];
          entries[i] <= '0;
        end
        replay_busy <= 1'b1;
        rp_idx      <= '0;
        rp_gap      <= 1'b0;
      end else if (replay_busy) begin
        if (rp_gap)                         rp_gap <= 1'b0;
        else if (rp_idx == (IW+1)'(N_TYPES)) replay_busy <= 1'b0;
        else begin
          rp_gap <= saved[rp_idx[IW-1:0]].valid;
          rp_idx <= rp_idx + 1'b1;
        end
      end
      if (clear) begin
        for (int i = 0; i < N_TYPES; i++) entries[i] <= '0;
      end else begin
        if (wr_en) entries[wr_idx] <= wr_entry;
        if (cfg_valid) entries[cfg_rs1[IW-1:0]] <= '{valid: 1'b1, rs1: cfg_rs1, rs2: cfg_rs2};
      end
    end
  end
endmodule
