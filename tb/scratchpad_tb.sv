// scratchpad_tb: writes random rows across all banks, reads them back with
// one cycle of latency, clears two banks and checks that exactly those banks
// read as zero afterwards, that the sweep takes one cycle per row and that
// writes are held off while it runs. Runs at the default size.
module scratchpad_tb;
  localparam int B = 8, R = 2048, W = 128, AW = $clog2(B * R);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wen, ren, clear_start, clear_busy;
  logic [AW-1:0] waddr, raddr; logic [W-1:0] wdata, rdata; logic [B-1:0] clear_mask;
  scratchpad dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [W-1:0] model [int];
  int addrs [64];
  int t0, n;

  initial begin
    wen = 0; ren = 0; clear_start = 0; clear_mask = 0; waddr = 0; raddr = 0; wdata = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      addrs[i] = (i % B) * R + int'($urandom_range(0, R - 1));
      @(negedge clk); wen = 1; waddr = AW'(addrs[i]); wdata = {$urandom, $urandom, $urandom, $urandom};
      model[addrs[i]] = wdata;
    end
    @(negedge clk); wen = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); ren = 1; raddr = AW'(addrs[i]);
      @(negedge clk); ren = 0;
      check(rdata == model[addrs[i]], $sformatf("read back row %0d", addrs[i]));
    end
    // clear banks 1 and 6
    @(negedge clk); clear_start = 1; clear_mask = 8'b0100_0010;
    @(negedge clk); clear_start = 0;
    t0 = 0;
    // a write during the sweep is ignored
    wen = 1; waddr = AW'(3 * R + 5); wdata = '1;
    @(negedge clk); wen = 0;
    while (clear_busy) begin @(negedge clk); t0++; end
    check(t0 == B * R - 1, $sformatf("sweep takes one cycle per row (%0d)", t0 + 1));
    n = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); ren = 1; raddr = AW'(addrs[i]);
      @(negedge clk); ren = 0;
      if ((addrs[i] / R) == 1 || (addrs[i] / R) == 6) check(rdata == '0, "cleared bank reads zero");
      else check(rdata == model[addrs[i]], "other banks intact");
    end
    @(negedge clk); ren = 1; raddr = AW'(3 * R + 5); @(negedge clk); ren = 0;
    check(rdata != '1, "write during sweep was held off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
