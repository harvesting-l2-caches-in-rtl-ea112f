// tb_bloom_filter: inserts random block addresses and looks them up again.
// Checks: no false negatives, (almost) no false positives for a lightly filled
// filter, the NUM_HASH+1-cycle lookup and 2*NUM_HASH-cycle insert, lookup
// priority over a simultaneous insert, and that clear sweeps all words and
// empties the filter.
module tb_bloom_filter;
  localparam int KEY_W = 28, NH = 4, ENT = 4096;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clear = 0;
  logic ins_valid = 0, ins_ready, lk_valid = 0, lk_ready, lk_done, lk_seen, clearing;
  logic [KEY_W-1:0] ins_key = '0, lk_key = '0;
  logic [KEY_W-1:0] keys [200];
  always #5 clk = ~clk;

  bloom_filter #(.KEY_W(KEY_W), .NUM_HASH(NH), .ENTRIES(ENT)) dut (.*);

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

  task automatic insert(logic [KEY_W-1:0] k);
    int busy;
    @(negedge clk);
    ins_valid = 1; ins_key = k;
    while (!ins_ready) @(negedge clk);
    @(posedge clk); #1;
    ins_valid = 0;
    busy = 0;
    while (!ins_ready) begin @(posedge clk); #1; busy++; end
    check(busy == 2 * NH, $sformatf("insert occupies %0d cycles", busy));
  endtask

  task automatic lookup(logic [KEY_W-1:0] k, output bit seen);
    int lat;
    @(negedge clk);
    lk_valid = 1; lk_key = k;
    while (!lk_ready) @(negedge clk);
    @(posedge clk); #1;
    lk_valid = 0;
    lat = 0;
    do begin lat++; #4; if (lk_done) break; @(posedge clk); #1; end while (lat < 20);
    seen = lk_seen;
    check(lat == NH + 1, $sformatf("lookup latency %0d", lat));
    @(posedge clk); #1;
  endtask

  initial begin
    bit seen;
    int fp;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) keys[i] = KEY_W'({$urandom, $urandom});
    for (int i = 0; i < 200; i++) insert(keys[i]);
    for (int i = 0; i < 200; i++) begin
      lookup(keys[i], seen);
      check(seen, "inserted key seen");
    end
    fp = 0;
    for (int i = 0; i < 200; i++) begin
      lookup(keys[i] ^ KEY_W'(32'h5A5_0001 + i), seen);
      if (seen) fp++;
    end
    check(fp <= 2, $sformatf("false positives %0d", fp));
    // lookup wins over a simultaneous insert
    @(negedge clk);
    ins_valid = 1; ins_key = 28'h0ABCDEF; lk_valid = 1; lk_key = keys[3];
    #1 check(lk_ready && !ins_ready, "lookup has priority");
    @(posedge clk); #1;
    lk_valid = 0; ins_valid = 0;
    repeat (NH + 2) @(posedge clk);
    // clear
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    fp = 0;
    while (clearing) begin @(negedge clk); fp++; end
    check(fp == NH * ENT / 64 + 1, $sformatf("clear sweep took %0d cycles", fp));
    fp = 0;
    for (int i = 0; i < 50; i++) begin
      lookup(keys[i], seen);
      if (seen) fp++;
    end
    check(fp == 0, "filter empty after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
