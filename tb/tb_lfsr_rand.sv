// tb_lfsr_rand: the generator must hold without `step`, never produce 0,
// return to its seed after exactly 65535 steps, and have a mean near 2^15.
module tb_lfsr_rand;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, step = 0;
  logic [15:0] rnd;
  always #5 clk = ~clk;

  lfsr_rand dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] seed;
    int period, zeros, seen_seed;
    longint sum;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1 seed = rnd;
    check(seed == 16'hACE1, "reset value");
    repeat (5) @(posedge clk);
    #1 check(rnd == seed, "holds without step");
    @(negedge clk) step = 1;
    period = 0; zeros = 0; sum = 0; seen_seed = 0;
    for (int i = 0; i < 65535; i++) begin
      @(posedge clk); #1;
      period++;
      sum += 64'(rnd);
      if (rnd == 0) zeros++;
      if (rnd == seed && seen_seed == 0) seen_seed = period;
    end
    step = 0;
    check(zeros == 0, "never zero");
    check(seen_seed == 65535, $sformatf("period %0d", seen_seed));
    check(sum / 65535 > 32700 && sum / 65535 < 32836, "mean near half range");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
