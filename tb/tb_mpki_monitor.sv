// tb_mpki_monitor: random MPKI reports and maps; the two averages are
// recomputed here and compared one cycle after the inputs are applied.
module tb_mpki_monitor;
  localparam int N = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [N-1:0][7:0] core_mpki = '0;
  logic [N-1:0] ctm = '0, icm = '0;
  logic [7:0] crit_avg_mpki, busy_avg_mpki;
  always #5 clk = ~clk;

  mpki_monitor #(.NCORES(N), .MPKI_W(8)) dut (.*);

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
    int cs, cn, bs, bn, ec, eb;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      for (int c = 0; c < N; c++) core_mpki[c] = 8'($urandom_range(0, 255));
      ctm = N'($urandom); icm = N'($urandom);
      if (t == 0) begin ctm = '0; icm = '1; end
      cs = 0; cn = 0; bs = 0; bn = 0;
      for (int c = 0; c < N; c++) begin
        if (ctm[c]) begin cs += int'(core_mpki[c]); cn++; end
        if (!icm[c]) begin bs += int'(core_mpki[c]); bn++; end
      end
      ec = (cn != 0) ? cs / cn : 0;
      eb = (bn != 0) ? bs / bn : 0;
      // reports are registered, then averaged into registers: two edges
      @(posedge clk); @(posedge clk); #1;
      check(crit_avg_mpki == 8'(ec), $sformatf("crit avg %0d exp %0d", crit_avg_mpki, ec));
      check(busy_avg_mpki == 8'(eb), $sformatf("busy avg %0d exp %0d", busy_avg_mpki, eb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
