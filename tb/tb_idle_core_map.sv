// tb_idle_core_map: random idle set/clear and advance pulses against a model
// of the map and of the round-robin pointer.
module tb_idle_core_map;
  localparam int N = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] idle_set = '0, idle_clr = '0, icm;
  logic advance = 0;
  logic [2:0] num_idle;
  logic [1:0] first_idle;
  always #5 clk = ~clk;

  idle_core_map #(.NCORES(N)) dut (.*);

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
    logic [N-1:0] m;
    int ptr, fi, cnt, lenders[N];
    m = '0; ptr = 0;
    for (int c = 0; c < N; c++) lenders[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      cnt = 0; fi = ptr;
      for (int c = 0; c < N; c++) if (m[c]) cnt++;
      for (int i = N - 1; i >= 0; i--) if (m[(ptr + i) % N]) fi = (ptr + i) % N;
      check(icm == m, $sformatf("map %b exp %b", icm, m));
      check(num_idle == 3'(cnt), "num_idle");
      if (cnt > 0) check(first_idle == 2'(fi), $sformatf("first_idle %0d exp %0d (ptr %0d, map %b)", first_idle, fi, ptr, m));
      idle_set = N'($urandom) & N'($urandom);
      idle_clr = N'($urandom) & N'($urandom) & N'($urandom);
      advance  = ($urandom_range(0, 1) == 1) && cnt > 0;
      if (advance) begin ptr = (fi + 1) % N; lenders[fi]++; end
      m = (m | idle_set) & ~idle_clr;
    end
    for (int c = 0; c < N; c++) check(lenders[c] > 100, "every core served as lender");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
