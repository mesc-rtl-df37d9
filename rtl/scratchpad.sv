// scratchpad: the banked local memory that holds input matrices.
//
// BANKS banks of BANK_ROWS rows, ROW_W bits per row (defaults 8 x 2048 x 128
// bits = 256 KB, 16 int8 elements per row). The row address is
// {bank, row-in-bank}. One write port and one read port; a read returns its
// row on rdata one cycle after ren.
//
// clear_start with a bank mask starts a sweep that writes zeros into every row
// of those banks, one row per cycle, to drop the data of banks whose banklock
// was released. While clear_busy is high the sweep owns the write port and
// normal writes are ignored; callers wait for clear_busy to fall.
// The memory is written as an array (no SRAM macro); the read latency and the
// clear sweep are this design's choices.
module scratchpad #(
  parameter int BANKS     = 8,
  parameter int BANK_ROWS = 2048,
  parameter int ROW_W     = 128
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 wen,
  input  logic [$clog2(BANKS*BANK_ROWS)-1:0]   waddr,
  input  logic [ROW_W-1:0]                     wdata,
  input  logic                                 ren,
  input  logic [$clog2(BANKS*BANK_ROWS)-1:0]   raddr,
  output logic [ROW_W-1:0]                     rdata,
  input  logic                                 clear_start,
  input  logic [BANKS-1:0]                     clear_mask,
  output logic                                 clear_busy
);
  localparam int AW = $clog2(BANKS * BANK_ROWS);
  localparam int OW = $clog2(BANK_ROWS);

  logic [ROW_W-1:0] mem [BANKS*BANK_ROWS];
  logic [BANKS-1:0] cl_mask;
  logic [AW-1:0]    cl_addr;

  always_ff @(posedge clk) begin
    if (ren) rdata <= mem[raddr];
    if (clear_busy) begin
      if (cl_mask[cl_addr[AW-1:OW]]) mem[cl_addr] <= '0;
    end else if (wen) begin
      mem[waddr] <= wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clear_busy <= 1'b0;
      cl_mask    <= '0;
      cl_addr    <= '0;
    end else if (!clear_busy) begin
      if (clear_start && clear_mask != '0) begin
        clear_busy <= 1'b1;
        cl_mask    <= clear_mask;
        cl_addr    <= '0;
      end
    end else begin
      cl_addr <= cl_addr + 1'b1;
      if (cl_addr == AW'(BANKS * BANK_ROWS - 1)) clear_busy <= 1'b0;
    end
  end
endmodule
