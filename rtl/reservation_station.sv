// reservation_station: front end of the accelerator. It accepts instructions
// from the CPU, sorts them into four queues (configuration, load, execute,
// store), executes configurations itself and issues the rest to the load,
// execute and store controllers. It also carries the preemption controls.
//
// Issue order: every queued instruction gets a sequence number; only the
// oldest unissued instruction may issue, when its controller is ready, the
// station is not frozen and no instruction of another class is still running
// (so a compute sees the rows its mvin wrote, and a mvout the compute's
// result). Instructions of one class follow each other back to back, since
// a controller accepts the next one as soon as it is idle.
// Configuration: executed in the station in 2 cycles; cfg_valid/cfg_rs1/
// cfg_rs2 then pulse once to the configuration registers and the config-copy
// buffer. reconfig starts the config-copy buffer's replay (cb_replay_start),
// forwards each replayed entry on cfg_* and completes when the replay ends.
// Preemption controls, executed on arrival and never queued, so that they act
// even while the queues are frozen (so software waits for the response of a
// save before it flushes the banks the save reads):
//   instruction_freeze     stop issuing (running instructions finish);
//   flush, rs1[2:0] = 1    resume issuing;
//   flush, rs1[2:0] = 2    drop every queued, unissued instruction;
//   flush, rs1[2:0] = 3    release the scratchpad banks of task rs2[7:0];
//   flush, rs1[2:0] = 4    drop the queues, reset configuration registers
//                          and empty the config-copy buffer.
// Responses: resp_valid[s] pulses with the id of each completed instruction,
// s = 0 configuration, 1 load, 2 execute, 3 store, 4 freeze/flush.
// busy: something is queued or running; inflight: something issued (or a
// configuration) has not completed, what the OS polls after a freeze.
// Classification, configuration in the station and freeze/flush follow the
// paper; in-order issue with the class-wait rule in place of dependency tracking, the queue depths and
// the response format are this design's choices.
// The assertions are disabled during reset with the same rst_n the flops
// use asynchronously; a lint tool may report rst_n as used both ways, which
// concerns only the assertions and no logic.
module reservation_station
  import mesc_pkg::*;
#(
  parameter int CFG_Q = 4,
  parameter int LD_Q  = 8,
  parameter int EX_Q  = 16,
  parameter int ST_Q  = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  cmd_t                  cmd,
  output logic                  ld_valid,
  input  logic                  ld_ready,
  output cmd_t                  ld_cmd,
  input  logic                  ld_done,
  input  logic [ID_W-1:0]       ld_done_id,
  output logic                  ex_valid,
  input  logic                  ex_ready,
  output cmd_t                  ex_cmd,
  input  logic                  ex_done,
  input  logic [ID_W-1:0]       ex_done_id,
  output logic                  st_valid,
  input  logic                  st_ready,
  output cmd_t                  st_cmd,
  input  logic                  st_done,
  input  logic [ID_W-1:0]       st_done_id,
  output logic                  cfg_valid,
  output logic [63:0]           cfg_rs1,
  output logic [63:0]           cfg_rs2,
  output logic                  cfg_reset,
  output logic                  cb_replay_start,
  input  logic                  cb_replay_valid,
  input  logic [63:0]           cb_replay_rs1,
  input  logic [63:0]           cb_replay_rs2,
  input  logic                  cb_replay_busy,
  output logic                  cb_clear,
  output logic                  bank_flush_valid,
  output logic [TASK_W-1:0]     bank_flush_task,
  output logic [4:0]            resp_valid,
  output logic [4:0][ID_W-1:0]  resp_id,
  output logic                  frozen,
  output logic                  busy,
  output logic                  inflight
);
  typedef struct packed {
    logic [7:0] seq;
    cmd_t       c;
  } qent_t;

  // ---------------- dispatch
  logic direct;
  cls_e cls;
  assign direct = (cmd.funct == F_FLUSH) || (cmd.funct == F_INSTR_FREEZE);
  assign cls    = classify(cmd.funct);

  logic [3:0] q_push, q_pop, q_empty, q_full;
  qent_t      q_head [4];
  logic [7:0] tail_seq, next_seq;
  logic       flush_q;

  always_comb begin
    q_push = '0;
    if (cmd_valid && !direct && !q_full[cls]) q_push[cls] = 1'b1;
  end
  assign cmd_ready = direct || !q_full[cls];

  logic dir_fire;
  assign dir_fire = cmd_valid && direct;
  assign flush_q  = dir_fire && cmd.funct == F_FLUSH &&
                    (cmd.rs1[2:0] == FL_QUEUE || cmd.rs1[2:0] == FL_ALL);

  for (genvar i = 0; i < 4; i++) begin : g_q
    localparam int D = (i == 0) ? CFG_Q : (i == 1) ? LD_Q : (i == 2) ? EX_Q : ST_Q;
    rs_queue #(.DEPTH(D), .T(qent_t)) u_q (
      .clk, .rst_n, .flush(flush_q), .push(q_push[i]),
      .din('{seq: tail_seq, c: cmd}), .pop(q_pop[i]),
      .head(q_head[i]), .empty(q_empty[i]), .full(q_full[i]));
  end

  // ---------------- configuration unit (2 cycles, or a replay)
  typedef enum logic [1:0] {C_IDLE, C_EXEC, C_REPLAY} cstate_e;
  cstate_e   cst;
  cmd_t      ccmd;
  logic      cfg_ready;
  assign cfg_ready = (cst == C_IDLE);

  // ---------------- issue of the oldest instruction
  logic [3:0] can, busy_cls;
  logic ld_out, ex_out, st_out;
  assign busy_cls = {st_out, ex_out, ld_out, cst != C_IDLE};
  always_comb begin
    for (int i = 0; i < 4; i++)
      can[i] = !q_empty[i] && q_head[i].seq == next_seq && !frozen &&
               ((busy_cls & ~(4'b1 << i)) == 4'b0);
    q_pop    = '0;
    ld_valid = can[CLS_LD];
    ex_valid = can[CLS_EX];
    st_valid = can[CLS_ST];
    if (can[CLS_CFG] && cfg_ready) q_pop[CLS_CFG] = 1'b1;
    if (ld_valid && ld_ready) q_pop[CLS_LD] = 1'b1;
    if (ex_valid && ex_ready) q_pop[CLS_EX] = 1'b1;
    if (st_valid && st_ready) q_pop[CLS_ST] = 1'b1;
  end
  assign ld_cmd = q_head[CLS_LD].c;
  assign ex_cmd = q_head[CLS_EX].c;
  assign st_cmd = q_head[CLS_ST].c;

  // ---------------- outstanding work
  assign inflight = ld_out || ex_out || st_out || (cst != C_IDLE);
  assign busy     = inflight || (q_empty != 4'hF);

  // ---------------- configuration output
  always_comb begin
    cfg_valid = 1'b0;
    cfg_rs1   = ccmd.rs1;
    cfg_rs2   = ccmd.rs2;
    if (cst == C_EXEC) cfg_valid = 1'b1;
    else if (cst == C_REPLAY && cb_replay_valid) begin
      cfg_valid = 1'b1;
      cfg_rs1   = cb_replay_rs1;
      cfg_rs2   = cb_replay_rs2;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tail_seq <= '0; next_seq <= '0;
      cst <= C_IDLE; ccmd <= '0;
      ld_out <= 1'b0; ex_out <= 1'b0; st_out <= 1'b0;
      frozen <= 1'b0;
      cfg_reset <= 1'b0; cb_clear <= 1'b0; cb_replay_start <= 1'b0;
      bank_flush_valid <= 1'b0; bank_flush_task <= '0;
      resp_valid <= '0; resp_id <= '0;
    end else begin
      cfg_reset <= 1'b0; cb_clear <= 1'b0; cb_replay_start <= 1'b0;
      bank_flush_valid <= 1'b0;
      resp_valid <= '0;

      // sequence numbers
      if (flush_q) begin
        tail_seq <= '0;
        next_seq <= '0;
      end else begin
        if (q_push != '0) tail_seq <= tail_seq + 8'd1;
        if (q_pop != '0)  next_seq <= next_seq + 8'd1;
      end

      // direct (freeze / flush) instructions
      if (dir_fire) begin
        resp_valid[4] <= 1'b1;
        resp_id[4]    <= cmd.id;
        if (cmd.funct == F_INSTR_FREEZE) frozen <= 1'b1;
        else case (cmd.rs1[2:0])
          FL_FREEZE: frozen <= 1'b0;
          FL_BANK: begin
            bank_flush_valid <= 1'b1;
            bank_flush_task  <= cmd.rs2[TASK_W-1:0];
          end
          FL_ALL: begin
            cfg_reset <= 1'b1;
            cb_clear  <= 1'b1;
          end
          default: ;
        endcase
      end

      // configuration unit
      case (cst)
        C_IDLE: if (q_pop[CLS_CFG]) begin
          ccmd <= q_head[CLS_CFG].c;
          if (q_head[CLS_CFG].c.funct == F_RECONFIG) begin
            cst <= C_REPLAY;
            cb_replay_start <= 1'b1;
          end else begin
            cst <= C_EXEC;
          end
        end
        C_EXEC: begin
          cst <= C_IDLE;
          resp_valid[0] <= 1'b1;
          resp_id[0]    <= ccmd.id;
        end
        C_REPLAY: if (!cb_replay_start && !cb_replay_busy) begin
          cst <= C_IDLE;
          resp_valid[0] <= 1'b1;
          resp_id[0]    <= ccmd.id;
        end
        default: cst <= C_IDLE;
      endcase

      // controllers
      if (q_pop[CLS_LD]) ld_out <= 1'b1; else if (ld_done) ld_out <= 1'b0;
      if (q_pop[CLS_EX]) ex_out <= 1'b1; else if (ex_done) ex_out <= 1'b0;
      if (q_pop[CLS_ST]) st_out <= 1'b1; else if (st_done) st_out <= 1'b0;
      if (ld_done) begin resp_valid[1] <= 1'b1; resp_id[1] <= ld_done_id; end
      if (ex_done) begin resp_valid[2] <= 1'b1; resp_id[2] <= ex_done_id; end
      if (st_done) begin resp_valid[3] <= 1'b1; resp_id[3] <= st_done_id; end
    end
  end

  // at most one instruction leaves the queues per cycle
  a_one_issue: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(q_pop));
  // nothing issues while frozen
  a_frozen: assert property (@(posedge clk) disable iff (!rst_n) frozen |-> q_pop == '0);
endmodule
