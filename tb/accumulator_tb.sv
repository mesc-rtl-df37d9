// accumulator_tb: overwrites and accumulates random rows and reads them back
// one cycle after the read request, comparing with a model kept here.
module accumulator_tb;
  localparam int ROWS = 1024, D = 16, AW = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wen, wacc, ren; logic [9:0] waddr, raddr;
  logic [D-1:0][AW-1:0] wdata, rdata;
  accumulator dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [D-1:0][AW-1:0] model [int];
  int a;

  initial begin
    wen = 0; wacc = 0; ren = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 200; i++) begin
      a = int'($urandom_range(0, 31));
      @(negedge clk);
      wen = 1; waddr = 10'(a);
      for (int j = 0; j < D; j++) wdata[j] = $urandom;
      wacc = model.exists(a) && ($urandom_range(0, 2) != 0);
      if (wacc) for (int j = 0; j < D; j++) model[a][j] = model[a][j] + wdata[j];
      else model[a] = wdata;
      @(negedge clk); wen = 0; ren = 1; raddr = 10'(a);
      @(negedge clk); ren = 0;
      check(rdata == model[a], $sformatf("row %0d after %s", a, wacc ? "accumulate" : "write"));
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
