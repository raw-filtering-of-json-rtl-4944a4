// tb_string_matcher: self-checking test of the approximate string matcher.
//
// Three matchers for "temperature" (block lengths 1, 2 and 11 = exact) see
// the same stream: the exact word, block permutations of it, near misses,
// random text and idle cycles. A reference written with SV strings decides
// for every byte whether the last N-B+1 windows of B bytes were each a
// substring of the search string; the matcher's output is compared with it
// exactly two clock edges after each byte, the latency of the block.
module tb_string_matcher;
  import rf_pkg::*;

  localparam string SS = "temperature";
  localparam int    N  = 11;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  in_valid = 1'b0;
  byte_t in_data = '0;
  logic  m1, m2, mn;
  int    checks = 0, failures = 0, cycle = 0;
  int    hits1 = 0, hits2 = 0, hitsn = 0;

  string_matcher #(.N(N), .B(1),  .STR("temperature")) dut1 (.clk, .rst_n, .in_valid, .in_data, .match(m1));
  string_matcher #(.N(N), .B(2),  .STR("temperature")) dut2 (.clk, .rst_n, .in_valid, .in_data, .match(m2));
  string_matcher #(.N(N), .B(N),  .STR("temperature")) dutn (.clk, .rst_n, .in_valid, .in_data, .match(mn));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference: run length of consecutive "window is a substring" bytes.
  string hist = "";
  int    run [3] = '{0, 0, 0};
  int    blen [3] = '{1, 2, N};

  function automatic bit is_sub(string w);
    for (int k = 0; k + w.len() <= SS.len(); k++)
      if (SS.substr(k, k + w.len() - 1) == w) return 1'b1;
    return 1'b0;
  endfunction

  // Expected values, delayed by the block's two-cycle latency.
  bit exp_v [3];

  task automatic send(byte_t c);
    // Inputs change on the falling edge, away from the sampling edge.
    in_valid = 1'b1;
    in_data  = c;
    @(negedge clk);
    in_valid = 1'b0;
    if ($urandom_range(0, 3) == 0) @(negedge clk);   // occasional idle cycle
  endtask

  // Reference model, updated with every byte the block accepts.
  function automatic void model(byte_t c);
    string s;
    s = " ";
    s.putc(0, c);
    hist = {hist, s};
    if (hist.len() > 32) hist = hist.substr(hist.len() - 32, hist.len() - 1);
    for (int d = 0; d < 3; d++) begin
      if (hist.len() >= blen[d] && is_sub(hist.substr(hist.len() - blen[d], hist.len() - 1)))
        run[d]++;
      else
        run[d] = 0;
      exp_v[d] = (run[d] >= N - blen[d] + 1);
    end
  endfunction

  task automatic send_str(string s);
    for (int i = 0; i < s.len(); i++) send(s[i]);
  endtask

  // Check pipeline: the expectation for a byte sent at cycle c is compared
  // at cycle c+2.
  int    pend_c [$];
  logic [2:0] pend_e [$];

  always @(posedge clk) begin
    if (in_valid) begin
      model(in_data);
      pend_c.push_back(cycle + 2);
      pend_e.push_back({exp_v[2], exp_v[1], exp_v[0]});
    end
    if (pend_c.size() > 0 && pend_c[0] == cycle) begin
      logic [2:0] e;
      e = pend_e.pop_front();
      void'(pend_c.pop_front());
      checks += 3;
      if (m1 != e[0]) begin failures++; $display("B=1 mismatch at cycle %0d: got %0b exp %0b", cycle, m1, e[0]); end
      if (m2 != e[1]) begin failures++; $display("B=2 mismatch at cycle %0d: got %0b exp %0b", cycle, m2, e[1]); end
      if (mn != e[2]) begin failures++; $display("B=N mismatch at cycle %0d: got %0b exp %0b", cycle, mn, e[2]); end
      hits1 += int'(m1); hits2 += int'(m2); hitsn += int'(mn);
    end
  end

  string words [8] = '{"\"temperature\"", "tempertaure", "eratureemp", "temperatur",
                       "\"n\":\"temperature\",", "rature temper", "ttttttttttttt", "aeeeprmtrtu"};
  string alpha = "temprau\",:{} xyzTE";

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    // Exact occurrence: all three must fire.
    send_str("{\"n\":\"temperature\"}");
    repeat (3) @(posedge clk);
    for (int r = 0; r < 300; r++) begin
      if ($urandom_range(0, 1) == 0) send_str(words[$urandom_range(0, 7)]);
      else send(alpha[$urandom_range(0, alpha.len() - 1)]);
    end
    repeat (4) @(posedge clk);
    // Each variant must have fired at least once; B=1 fires at least as often as B=N.
    checks++;
    if (hitsn == 0 || hits2 == 0 || hits1 == 0) begin failures++; $display("a matcher never fired"); end
    checks++;
    if (hits1 < hitsn) begin failures++; $display("B=1 fired less often than the exact matcher"); end
    $display("match cycles: B=1 %0d, B=2 %0d, B=N %0d", hits1, hits2, hitsn);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
