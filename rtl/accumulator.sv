// accumulator: local memory for results of the systolic array.
//
// ROWS rows of DIM signed ACC_W-bit elements (defaults 1024 x 16 x 32 bits =
// 64 KB). One write port: with wacc the row is added element-wise to what is
// stored, otherwise it is overwritten; the add happens in the write cycle.
// One read port with one cycle of latency. Accumulator addresses are not
// remapped. The memory is written as an array; latency and the accumulate
// port are this design's choices.
module accumulator #(
  parameter int ROWS  = 1024,
  parameter int DIM   = 16,
  parameter int ACC_W = 32
) (
  input  logic                            clk,
  input  logic                            wen,
  input  logic                            wacc,
  input  logic [$clog2(ROWS)-1:0]         waddr,
  input  logic [DIM-1:0][ACC_W-1:0]       wdata,
  input  logic                            ren,
  input  logic [$clog2(ROWS)-1:0]         raddr,
  output logic [DIM-1:0][ACC_W-1:0]       rdata
);
  logic [DIM-1:0][ACC_W-1:0] mem [ROWS];
  logic [DIM-1:0][ACC_W-1:0] sum;

  always_comb
    for (int j = 0; j < DIM; j++) sum[j] = mem[waddr][j] + wdata[j];

  always_ff @(posedge clk) begin
    if (ren) rdata <= mem[raddr];
    if (wen) mem[waddr] <= wacc ? sum : wdata;
  end
endmodule
