// rs_queue: one instruction queue of the reservation station, a plain FIFO
// of DEPTH entries of type T with push/pop and a flush that empties it.
// head is valid whenever !empty; push is ignored when full.
module rs_queue #(
  parameter int  DEPTH = 8,
  parameter type T     = logic [7:0]
) (
  input  logic clk,
  input  logic rst_n,
  input  logic flush,
  input  logic push,
  input  T     din,
  input  logic pop,
  output T     head,
  output logic empty,
  output logic full
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T              q [DEPTH];
  logic [PW-1:0] rp, wp;
  logic [PW:0]   cnt;

  assign empty = (cnt == '0);
  assign full  = (cnt == (PW+1)'(DEPTH));
  assign head  = q[rp];

  always_ff @(posedge clk) if (push && !full) q[wp] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else if (flush) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else begin
      if (push && !full) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop && !empty) rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (PW+1)'(push && !full) - (PW+1)'(pop && !empty);
    end
  end
endmodule
