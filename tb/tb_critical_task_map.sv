// tb_critical_task_map: random map writes and owner selects against a model.
module tb_critical_task_map;
  localparam int N = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, we = 0, critical;
  logic [N-1:0] wdata = '0, ctm;
  logic [1:0] owner = '0;
  logic [2:0] num_critical;
  always #5 clk = ~clk;

  critical_task_map #(.NCORES(N)) dut (.*);

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
    int cnt;
    m = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      owner = 2'($urandom);
      #1;
      cnt = 0;
      for (int c = 0; c < N; c++) if (m[c]) cnt++;
      check(ctm == m, "map");
      check(critical == m[owner], $sformatf("critical of core %0d", owner));
      check(num_critical == 3'(cnt), "num_critical");
      we = $urandom_range(0, 3) == 0;
      wdata = N'($urandom);
      if (we) m = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
