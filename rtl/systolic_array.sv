// systolic_array: one tile of DIM x DIM processing elements (256 for DIM=16)
// in weight-stationary form.
//
// PE (k, j) holds the int8 weight B[k][j], loaded one row of B at a time
// through b_we/b_row/b_data. A row a of the input matrix A enters on a_data
// with a_valid; PE (k, j) multiplies a[k] by its weight and adds the partial
// sum arriving from PE (k-1, j) above it, so column j produces
// c[j] = sum_k a[k] * B[k][j]. The result row appears on c_data with c_valid
// one cycle after a_valid, so DIM rows of A take DIM cycles.
// The partial sums travel down a column within one cycle and only the bottom
// row is registered: this computes what the pipelined, skewed Gemmini mesh
// computes, without its skew. Elements are signed; sums are ACC_W bits.
module systolic_array #(
  parameter int DIM    = 16,
  parameter int ELEM_W = 8,
  parameter int ACC_W  = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         b_we,
  input  logic [$clog2(DIM)-1:0]       b_row,
  input  logic [DIM-1:0][ELEM_W-1:0]   b_data,
  input  logic                         a_valid,
  input  logic [DIM-1:0][ELEM_W-1:0]   a_data,
  output logic                         c_valid,
  output logic [DIM-1:0][ACC_W-1:0]    c_data
);
  logic signed [ELEM_W-1:0] w    [DIM][DIM];

  // weights held in the PEs
  always_ff @(posedge clk) begin
    if (b_we)
      for (int j = 0; j < DIM; j++) w[b_row][j] <= b_data[j];
  end

  // the PE grid: row k adds a[k] * w[k][j] to the partial sum from above
  for (genvar k = 0; k < DIM; k++) begin : g_row
    logic signed [ACC_W-1:0] ps [DIM];
    for (genvar j = 0; j < DIM; j++) begin : g_pe
      logic signed [ACC_W-1:0] prod;
      assign prod = ACC_W'($signed(a_data[k]) * $signed(w[k][j]));
      if (k == 0) begin : g_top
        assign ps[j] = prod;
      end else begin : g_mid
        assign ps[j] = g_row[k-1].ps[j] + prod;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_valid <= 1'b0;
      c_data  <= '0;
    end else begin
      c_valid <= a_valid;
      if (a_valid)
        for (int j = 0; j < DIM; j++) c_data[j] <= g_row[DIM-1].ps[j];
    end
  end
endmodule
