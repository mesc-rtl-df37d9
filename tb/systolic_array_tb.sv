// systolic_array_tb: loads random signed 16x16 int8 matrices B, streams the
// 16 rows of random A, one per cycle, and compares every result row with
// A*B computed here; also checks the one-cycle latency from a row in to its
// result out and that DIM rows take DIM cycles.
module systolic_array_tb;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic b_we, a_valid, c_valid; logic [3:0] b_row;
  logic [D-1:0][7:0] b_data, a_data; logic [D-1:0][31:0] c_data;
  systolic_array dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic signed [7:0] A [D][D], Bm [D][D];
  logic signed [31:0] exp_c;
  int got, t_first, t_last, cyc;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    cyc = 0;
    b_we = 0; a_valid = 0; b_row = 0; b_data = 0; a_data = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      for (int i = 0; i < D; i++) for (int j = 0; j < D; j++) begin
        A[i][j] = 8'($urandom); Bm[i][j] = 8'($urandom);
        if (trial == 0) begin A[i][j] = (i == j) ? 8'sd1 : 8'sd0; end
        if (trial == 1) begin A[i][j] = -8'sd128; Bm[i][j] = -8'sd128; end
      end
      for (int k = 0; k < D; k++) begin
        @(negedge clk); b_we = 1; b_row = 4'(k);
        for (int j = 0; j < D; j++) b_data[j] = Bm[k][j];
      end
      @(negedge clk); b_we = 0;
      got = 0;
      fork
        for (int i = 0; i < D; i++) begin
          a_valid = 1;
          for (int k = 0; k < D; k++) a_data[k] = A[i][k];
          if (i == 0) t_first = cyc;
          @(negedge clk);
        end
        begin
          while (got < D) begin
            @(posedge clk); #1;
            if (c_valid) begin
              for (int j = 0; j < D; j++) begin
                exp_c = 0;
                for (int k = 0; k < D; k++) exp_c += 32'(A[got][k]) * 32'(Bm[k][j]);
                check(c_data[j] == exp_c, $sformatf("trial %0d C[%0d][%0d]", trial, got, j));
              end
              if (got == 0) check(cyc - t_first == 1, "result one cycle after its row");
              got++;
              t_last = cyc;
            end
          end
        end
      join
      a_valid = 0;
      check(t_last - t_first == D, "16 rows in 16 cycles");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
