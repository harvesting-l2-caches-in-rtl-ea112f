// tb_l2h_predictor: walks the predictor through its three rules.
// Small thresholds (warm-up after 8 insertions, clear after 32, MPKI_TH 20)
// keep it short. Expected verdicts are worked out from the rule table:
// cold -> !MPPP_Dead; warm and MPKI > 20 -> Seen & !MPPP_Dead; warm and
// MPKI <= 20 -> Seen | !MPPP_Dead. Also checks the response latency, the
// rule counters and that the periodic clear restarts the warm-up.
// The response comes NUM_HASH + 1 cycles after the request is accepted.
module tb_l2h_predictor;
  import l2h_pkg::*;
  localparam int KEY_W = 28, NH = 4, WU = 8, RI = 32, TH = 20;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic ins_valid = 0, ins_ready, req_valid = 0, req_ready, req_mppp_dead = 0;
  logic [KEY_W-1:0] ins_key = '0, req_key = '0;
  logic [7:0] avg_mpki = '0;
  logic rsp_valid, rsp_alive;
  pred_case_e rsp_case;
  logic [31:0] cnt_case1, cnt_case2, cnt_case3, cnt_resets;
  logic clearing;
  logic [KEY_W-1:0] seen_keys [WU];
  always #5 clk = ~clk;

  l2h_predictor #(.WARMUP_TH(WU), .RESET_INTERVAL(RI), .MPKI_TH(TH)) dut (.*);

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

  task automatic insert(logic [KEY_W-1:0] k);
    @(negedge clk);
    ins_valid = 1; ins_key = k;
    while (!ins_ready) @(negedge clk);
    @(posedge clk); #1;
    ins_valid = 0;
  endtask

  task automatic predict(logic [KEY_W-1:0] k, bit mppp_dead, bit exp_alive,
                         pred_case_e exp_case);
    int lat;
    @(negedge clk);
    req_valid = 1; req_key = k; req_mppp_dead = mppp_dead;
    while (!req_ready) @(negedge clk);
    @(posedge clk); #1;
    req_valid = 0;
    lat = 0;
    do begin lat++; #4; if (rsp_valid) break; @(posedge clk); #1; end while (lat < 20);
    check(lat == NH + 1, $sformatf("latency %0d", lat));
    check(rsp_alive == exp_alive, $sformatf("key %h dead=%0b: alive %0b exp %0b", k, mppp_dead, rsp_alive, exp_alive));
    check(rsp_case == exp_case, $sformatf("case %0d exp %0d", rsp_case, exp_case));
    @(posedge clk); #1;
  endtask

  initial begin
    logic [KEY_W-1:0] other;
    repeat (3) @(posedge clk);
    rst_n = 1;
    avg_mpki = 8'd30;
    // cold filter: MPPP alone
    predict(28'h1234, 1, 0, PC_MPPP_ONLY);
    predict(28'h1234, 0, 1, PC_MPPP_ONLY);
    for (int i = 0; i < WU; i++) begin
      seen_keys[i] = KEY_W'(32'h100_0000 + i * 977);
      insert(seen_keys[i]);
    end
    other = 28'h0BAD_0DD;
    // warm, load high: both must agree
    avg_mpki = 8'd30;
    repeat (2) @(posedge clk);
    predict(seen_keys[0], 0, 1, PC_BOTH_AGREE);
    predict(seen_keys[1], 1, 0, PC_BOTH_AGREE);
    predict(other,        0, 0, PC_BOTH_AGREE);
    predict(other,        1, 0, PC_BOTH_AGREE);
    // threshold itself is not "high"
    avg_mpki = 8'd20;
    predict(other,        0, 1, PC_EITHER);
    // warm, load low: either suffices
    avg_mpki = 8'd5;
    predict(seen_keys[2], 1, 1, PC_EITHER);
    predict(other,        0, 1, PC_EITHER);
    predict(other,        1, 0, PC_EITHER);
    predict(seen_keys[3], 0, 1, PC_EITHER);
    check(cnt_case1 == 2 && cnt_case2 == 4 && cnt_case3 == 5, "rule counters");
    check(cnt_resets == 0, "no clear yet");
    // fill up to the reset interval: the filter is cleared and cold again
    for (int i = WU; i < RI; i++) insert(KEY_W'(32'h200_0000 + i));
    repeat (3) @(posedge clk);
    check(cnt_resets == 1, "periodic clear happened");
    predict(seen_keys[0], 1, 0, PC_MPPP_ONLY);
    // warm it again with new keys: old keys are no longer seen
    for (int i = 0; i < WU; i++) insert(KEY_W'(32'h300_0000 + i));
    avg_mpki = 8'd30;
    predict(seen_keys[0], 0, 0, PC_BOTH_AGREE);
    predict(KEY_W'(32'h300_0002), 0, 1, PC_BOTH_AGREE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
