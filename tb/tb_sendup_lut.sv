// tb_sendup_lut: compares every entry with 65535 * 0.95^m computed in real
// arithmetic (within one unit), checks the clamp above MPKI 99, and the
// likelihoods quoted for MPKI 5, 15, 20 and 41 (0.77, 0.46, 0.36, 0.12).
module tb_sendup_lut;
  int checks = 0, failures = 0;
  logic [7:0]  mpki;
  logic [15:0] chance;

  sendup_lut dut (.mpki, .chance);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real frac(int m);
    return real'(chance) / 65535.0;
  endfunction

  initial begin
    real e;
    int  ei;
    for (int m = 0; m < 256; m++) begin
      mpki = 8'(m); #1;
      e  = 65535.0 * (0.95 ** real'((m > 99) ? 99 : m));
      ei = int'(e);  // rounds to nearest
      check(int'(chance) - ei <= 1 && ei - int'(chance) <= 1,
            $sformatf("mpki %0d: %0d exp %0d", m, chance, ei));
    end
    mpki = 0;  #1; check(chance == 16'hFFFF, "MPKI 0 is certain");
    mpki = 5;  #1; check(frac(5)  > 0.765 && frac(5)  < 0.78, "MPKI 5 -> 0.77");
    mpki = 15; #1; check(frac(15) > 0.455 && frac(15) < 0.47, "MPKI 15 -> 0.46");
    mpki = 20; #1; check(frac(20) > 0.35  && frac(20) < 0.365, "MPKI 20 -> 0.36");
    mpki = 41; #1; check(frac(41) > 0.115 && frac(41) < 0.13, "MPKI 41 -> 0.12");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
