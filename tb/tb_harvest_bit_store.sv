// tb_harvest_bit_store: random fills (harvested or not) and evictions of one
// full-size L2 (20480 lines) against a model; an evicted line that arrived by
// write-up must be routed past the LLC, any other line into it. Only lines
// that have been filled are evicted, as in a real cache.
module tb_harvest_bit_store;
  localparam int LINES = 20480, IW = 15;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic fill_valid = 0, fill_harvested = 0, evict_valid = 0;
  logic [IW-1:0] fill_idx = '0, evict_idx = '0;
  logic route_valid, route_bypass_llc;
  bit model [LINES];
  bit filled [LINES];
  always #5 clk = ~clk;

  harvest_bit_store #(.LINES(LINES)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_valid, exp_bypass;
    static int nbypass = 0, nllc = 0;
    for (int i = 0; i < LINES; i++) begin model[i] = 0; filled[i] = 0; end
    exp_valid = 0; exp_bypass = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      check(route_valid == exp_valid, "route_valid one cycle after evict");
      if (exp_valid) begin
        check(route_bypass_llc == exp_bypass, $sformatf("route of line %0d", evict_idx));
        if (exp_bypass) nbypass++; else nllc++;
      end
      // use a small window of lines so that lines are reused often
      fill_valid     = 1'($urandom_range(0, 1));
      fill_idx       = IW'($urandom_range(0, 63) * 320 + (t % 2));
      fill_harvested = 1'($urandom_range(0, 1));
      evict_valid    = 1'($urandom_range(0, 1));
      evict_idx      = IW'($urandom_range(0, 63) * 320 + (t % 2));
      if (t == 100) begin fill_idx = IW'(LINES - 1); fill_valid = 1; end
      if (t == 101) begin evict_idx = IW'(LINES - 1); evict_valid = 1; end
      if (!filled[evict_idx]) evict_valid = 0;
      exp_valid  = evict_valid;
      exp_bypass = evict_valid ? model[evict_idx] : 0;
      if (fill_valid) begin model[fill_idx] = fill_harvested; filled[fill_idx] = 1; end
    end
    check(nbypass > 200 && nllc > 200, "both routes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
