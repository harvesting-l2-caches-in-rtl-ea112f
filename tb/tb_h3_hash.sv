// tb_h3_hash: checks the H3 hash against its definition.
// The reference rows are regenerated here from the documented xorshift rule;
// besides matching them, the hash must map 0 to 0, be linear over XOR, and
// differ between two seeds.
module tb_h3_hash;
  localparam int IN_W = 28, OUT_W = 12;
  int checks = 0, failures = 0;
  logic [IN_W-1:0]  key;
  logic [OUT_W-1:0] h1, h2;
  logic [OUT_W-1:0] row [IN_W];

  h3_hash #(.IN_W(IN_W), .OUT_W(OUT_W), .SEED(1)) dut1 (.key, .hash(h1));
  h3_hash #(.IN_W(IN_W), .OUT_W(OUT_W), .SEED(2)) dut2 (.key, .hash(h2));

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

  initial begin
    logic [31:0] s;
    logic [IN_W-1:0] a, b;
    logic [OUT_W-1:0] ha, hb;
    int differ;
    s = 32'd1 * 32'h9E3779B9 + 32'd1;
    for (int i = 0; i < IN_W; i++) begin
      s ^= s << 13; s ^= s >> 17; s ^= s << 5;
      row[i] = s[OUT_W-1:0];
    end
    key = '0; #1;
    check(h1 == '0, "zero key");
    differ = 0;
    for (int i = 0; i < IN_W; i++) begin
      key = '0; key[i] = 1'b1; #1;
      check(h1 == row[i], $sformatf("row %0d: %h vs %h", i, h1, row[i]));
      if (h1 != h2) differ++;
    end
    check(differ > IN_W / 2, "seeds give different functions");
    for (int t = 0; t < 300; t++) begin
      logic [OUT_W-1:0] ref_h;
      a = IN_W'({$urandom, $urandom});
      ref_h = '0;
      for (int i = 0; i < IN_W; i++) if (a[i]) ref_h ^= row[i];
      key = a; #1; ha = h1;
      check(ha == ref_h, "random key vs reference");
      b = IN_W'({$urandom, $urandom});
      key = b; #1; hb = h1;
      key = a ^ b; #1;
      check(h1 == (ha ^ hb), "linearity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
