// dram_model: behavioural stand-in for external DRAM in testbenches (not
// synthesizable). 128-bit beats addressed by byte address (low 4 bits
// ignored), stored sparsely. A request is accepted when req_valid and
// req_ready; req_ready is high except on a pseudo-random 1 cycle in
// STALL_EVERY (0 = never stalls). Reads answer in order, LAT cycles after
// acceptance. Unwritten beats read as zero. poke/peek give the testbench
// direct access.
module dram_model #(
  parameter int LAT         = 4,
  parameter int STALL_EVERY = 0
) (
  input  logic                 clk,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  mesc_pkg::mem_req_t   req,
  output logic                 resp_valid,
  output logic [127:0]         resp_rdata
);
  logic [127:0] mem [longint];
  logic [127:0] pipe_d [LAT];
  logic         pipe_v [LAT];
  int unsigned  cyc = 0;

  function automatic void poke(longint addr, logic [127:0] d);
    mem[addr >> 4] = d;
  endfunction
  function automatic logic [127:0] peek(longint addr);
    return mem.exists(addr >> 4) ? mem[addr >> 4] : '0;
  endfunction

  assign req_ready  = (STALL_EVERY == 0) ? 1'b1 : ((cyc % STALL_EVERY) != 3);
  assign resp_valid = pipe_v[LAT-1];
  assign resp_rdata = pipe_d[LAT-1];

  initial for (int i = 0; i < LAT; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int i = LAT - 1; i > 0; i--) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    pipe_v[0] <= 1'b0;
    if (req_valid && req_ready) begin
      if (req.we) poke(longint'(req.addr), req.wdata);
      else begin
        pipe_v[0] <= 1'b1;
        pipe_d[0] <= peek(longint'(req.addr));
      end
    end
  end
endmodule
