// tb_load_balancer: exhaustive check of the decision rule over dead, critical
// and idle-count inputs, with the chance recomputed as 65535 * 0.95^MPKI in
// real arithmetic; then a statistical check that non-critical blocks go up
// with a frequency close to 0.95^MPKI for MPKI 5, 15 and 41.
module tb_load_balancer;
  import l2h_pkg::*;
  int checks = 0, failures = 0;
  logic dead, critical, send_up, uses_rand;
  logic [2:0] num_idle;
  logic [1:0] first_idle, lender;
  logic [7:0] crit_mpki;
  logic [15:0] rnd, chance;
  lb_reason_e reason;

  load_balancer dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ec, up, n;
    bit exp_up;
    lb_reason_e exp_r;
    real p;
    for (int t = 0; t < 4000; t++) begin
      dead = 1'($urandom); critical = 1'($urandom);
      num_idle = 3'($urandom_range(0, 4)); first_idle = 2'($urandom);
      crit_mpki = 8'($urandom_range(0, 120)); rnd = 16'($urandom_range(1, 65535));
      #1;
      ec = int'(65535.0 * (0.95 ** real'((crit_mpki > 99) ? 99 : crit_mpki)));
      if (num_idle == 0)      begin exp_up = 0; exp_r = LB_DRAM_NOIDLE; end
      else if (dead)          begin exp_up = 0; exp_r = LB_DRAM_DEAD; end
      else if (critical)      begin exp_up = 1; exp_r = LB_UP_CRIT; end
      else if (int'(rnd) <= ec) begin exp_up = 1; exp_r = LB_UP_CHANCE; end
      else                    begin exp_up = 0; exp_r = LB_DRAM_CHANCE; end
      // the table may be one unit off the exact value: skip draws on the edge
      if (!(num_idle != 0 && !dead && !critical && (int'(rnd) - ec <= 1) && (ec - int'(rnd) <= 1))) begin
        check(send_up == exp_up, $sformatf("send_up idle=%0d dead=%0b crit=%0b mpki=%0d rnd=%0d", num_idle, dead, critical, crit_mpki, rnd));
        check(reason == exp_r, "reason");
        check(uses_rand == (num_idle != 0 && !dead && !critical), "uses_rand");
      end
      if (send_up) check(lender == first_idle, "lender is First Idle");
    end
    for (int k = 0; k < 3; k++) begin
      int m;
      m = (k == 0) ? 5 : (k == 1) ? 15 : 41;
      up = 0; n = 20000;
      dead = 0; critical = 0; num_idle = 2; first_idle = 1; crit_mpki = 8'(m);
      for (int i = 0; i < n; i++) begin
        rnd = 16'($urandom_range(1, 65535)); #1;
        if (send_up) up++;
      end
      p = 0.95 ** real'(m);
      check(real'(up) / n > p - 0.02 && real'(up) / n < p + 0.02,
            $sformatf("MPKI %0d: sent up %0d of %0d, expected %f", m, up, n, p));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
