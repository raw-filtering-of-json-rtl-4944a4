// tb_raw_filter: the three built-in raw filters on generated data sets.
//
// Two streams are generated: SmartCity-style SenML records (an array "e" of
// sensor objects {"v":"<value>","u":"<unit>","n":"<name>"} plus a time
// stamp) and flat taxi-trip records ("trip_time_in_secs", "tip_amount",
// "fare_amount", "tolls_amount", "trip_distance"). Values are drawn around
// the query bounds; sensors are sometimes missing and the objects come in
// random order. The QS0 and QS1 filters read the SmartCity stream, the QT
// filter the taxi stream, each byte-per-cycle with no gaps.
//
// The bench knows every value it wrote. For each record it computes (a)
// the verdict of the filter configuration, i.e. whether every attribute the
// filter checks is present with a value inside its range, and (b) the
// verdict of the full query. The filter's result must equal (a); (a) must
// hold whenever (b) does (no false negatives); records with (a) and not (b)
// are counted as false positives. The bench also checks one result per
// record, two cycles after its last byte, and that the byte rate is one
// byte per cycle.
module tb_raw_filter;
  import rf_pkg::*;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  sv = 1'b0, sl = 1'b0, tv = 1'b0, tl = 1'b0;
  byte_t sd = '0, td = '0;
  logic  rv0, rm0, rv1, rm1, rvt, rmt;
  int    checks = 0, failures = 0, cycle = 0;
  int    acc [3] = '{0, 0, 0};
  int    fp [3] = '{0, 0, 0};
  int    recs [3] = '{0, 0, 0};

  raw_filter #(.QUERY(Q_QS0)) dut_qs0 (.clk, .rst_n, .in_valid(sv), .in_data(sd), .in_last(sl), .res_valid(rv0), .res_match(rm0));
  raw_filter #(.QUERY(Q_QS1)) dut_qs1 (.clk, .rst_n, .in_valid(sv), .in_data(sd), .in_last(sl), .res_valid(rv1), .res_match(rm1));
  raw_filter #(.QUERY(Q_QT))  dut_qt  (.clk, .rst_n, .in_valid(tv), .in_data(td), .in_last(tl), .res_valid(rvt), .res_match(rmt));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic string ch(byte_t c);
    string s = " ";
    s.putc(0, c);
    return s;
  endfunction

  function automatic string q(string s);
    return {ch(CH_QUOTE), s, ch(CH_QUOTE)};
  endfunction

  // Fixed point, two decimals.
  function automatic string fmt(int v, bit is_float);
    int a = (v < 0) ? -v : v;
    string s = (v < 0) ? "-" : "";
    if (is_float) return {s, $sformatf("%0d.%02d", a / 100, a % 100)};
    return {s, $sformatf("%0d", a / 100)};
  endfunction

  // ---------------------------------------------------------------------
  // SmartCity: sensors and the ranges of QS0 and QS1 (x100).
  // ---------------------------------------------------------------------
  string sc_name [5] = '{"temperature", "humidity", "light", "dust", "airquality_raw"};
  string sc_unit [5] = '{"far", "per", "per", "per", "per"};
  bit    sc_float [5] = '{1, 1, 0, 1, 0};
  int    qs0_lo [5] = '{70, 2030, 0, 8336, 1200};
  int    qs0_hi [5] = '{3510, 6910, 515300, 332267, 4900};
  int    qs1_lo [5] = '{-1250, 1070, 134500, 18661, 1700};
  int    qs1_hi [5] = '{4310, 9520, 2628200, 518821, 36300};
  // Attributes each filter configuration checks.
  bit    qs0_chk [5] = '{1, 1, 1, 1, 1};
  bit    qs1_chk [5] = '{0, 0, 1, 1, 1};

  function automatic int near(int lo, int hi, bit is_float);
    int v;
    case ($urandom_range(0, 5))
      0: v = lo + int'($urandom_range(0, 2)) * 100 - 100;
      1: v = hi + int'($urandom_range(0, 2)) * 100 - 100;
      2: v = lo + int'($urandom_range(0, 2)) - 1;
      3: v = hi + int'($urandom_range(0, 2)) - 1;
      default: v = lo + int'($urandom_range(0, (hi - lo) / 50 + 1)) * 50;
    endcase
    if (!is_float) v = (v / 100) * 100;
    return v;
  endfunction

  // Expected verdicts in record order.
  bit exp_q [3][$];
  int exp_t [3][$];

  task automatic send_sc();
    string r;
    int    val [5];
    bit    present [5];
    int    order [5];
    bit    f0 = 1, f1 = 1, full0 = 1, full1 = 1;
    bit    first = 1;
    for (int i = 0; i < 5; i++) begin
      int lo = ($urandom_range(0, 1) == 0) ? qs0_lo[i] : qs1_lo[i];
      int hi = ($urandom_range(0, 1) == 0) ? qs0_hi[i] : qs1_hi[i];
      present[i] = ($urandom_range(0, 11) != 0);
      val[i] = near(lo, hi, sc_float[i]);
      order[i] = i;
    end
    order.shuffle();
    r = {ch(CH_LBRACE), q("e"), ":", ch(CH_LBRACKET)};
    foreach (order[k]) begin
      int i = order[k];
      if (!present[i]) continue;
      if (!first) r = {r, ch(CH_COMMA)};
      first = 0;
      r = {r, ch(CH_LBRACE), q("v"), ":", q(fmt(val[i], sc_float[i])), ch(CH_COMMA),
           q("u"), ":", q(sc_unit[i]), ch(CH_COMMA), q("n"), ":", q(sc_name[i]), ch(CH_RBRACE)};
    end
    r = {r, ch(CH_RBRACKET), ch(CH_COMMA), q("bt"), ":", $sformatf("%0d", 1422748800 + $urandom_range(0, 99999)), "000", ch(CH_RBRACE)};
    for (int i = 0; i < 5; i++) begin
      bit in0 = present[i] && val[i] >= qs0_lo[i] && val[i] <= qs0_hi[i];
      bit in1 = present[i] && val[i] >= qs1_lo[i] && val[i] <= qs1_hi[i];
      full0 &= in0; full1 &= in1;
      if (qs0_chk[i]) f0 &= in0;
      if (qs1_chk[i]) f1 &= in1;
    end
    exp_q[0].push_back(f0);
    exp_q[1].push_back(f1);
    if (f0 && !full0) fp[0]++;
    if (f1 && !full1) fp[1]++;
    checks += 2;
    if (full0 && !f0) begin failures++; $display("QS0 configuration would drop a matching record"); end
    if (full1 && !f1) begin failures++; $display("QS1 configuration would drop a matching record"); end
    for (int i = 0; i < r.len(); i++) begin
      sv = 1'b1; sd = r[i]; sl = (i == r.len() - 1);
      if (sl) begin exp_t[0].push_back(cycle + 2); exp_t[1].push_back(cycle + 2); end
      @(negedge clk);
    end
    sv = 1'b0; sl = 1'b0;
  endtask

  // ---------------------------------------------------------------------
  // Taxi: attributes and the ranges of QT (x100). The filter checks
  // tip_amount and tolls_amount.
  // ---------------------------------------------------------------------
  string tx_name [5] = '{"trip_time_in_secs", "tip_amount", "fare_amount", "tolls_amount", "trip_distance"};
  bit    tx_float [5] = '{0, 1, 1, 1, 1};
  int    qt_lo [5] = '{14000, 65, 600, 250, 137};
  int    qt_hi [5] = '{315500, 3855, 20100, 1800, 2986};
  bit    qt_chk [5] = '{0, 1, 0, 1, 0};

  task automatic send_taxi();
    string r;
    int    val [5];
    bit    ft = 1, full = 1;
    r = ch(CH_LBRACE);
    for (int i = 0; i < 5; i++) begin
      val[i] = near(qt_lo[i], qt_hi[i], tx_float[i]);
      if (i > 0) r = {r, ch(CH_COMMA)};
      r = {r, q(tx_name[i]), ":", fmt(val[i], tx_float[i])};
      if (val[i] < qt_lo[i] || val[i] > qt_hi[i]) full = 0;
      if (qt_chk[i] && (val[i] < qt_lo[i] || val[i] > qt_hi[i])) ft = 0;
    end
    r = {r, ch(CH_RBRACE)};
    exp_q[2].push_back(ft);
    if (ft && !full) fp[2]++;
    checks++;
    if (full && !ft) begin failures++; $display("QT configuration would drop a matching record"); end
    for (int i = 0; i < r.len(); i++) begin
      tv = 1'b1; td = r[i]; tl = (i == r.len() - 1);
      if (tl) exp_t[2].push_back(cycle + 2);
      @(negedge clk);
    end
    tv = 1'b0; tl = 1'b0;
  endtask

  // ---------------------------------------------------------------------
  // Result checking.
  // ---------------------------------------------------------------------
  task automatic check_result(int k, logic m);
    bit e;
    int t;
    checks += 2;
    if (exp_q[k].size() == 0) begin failures++; $display("filter %0d: result without a record", k); return; end
    e = exp_q[k].pop_front();
    t = exp_t[k].pop_front();
    recs[k]++;
    if (m != e) begin failures++; $display("filter %0d record %0d: got %0b expected %0b", k, recs[k], m, e); end
    if (t != cycle) begin failures++; $display("filter %0d: result at cycle %0d, expected %0d", k, cycle, t); end
    acc[k] += int'(m);
  endtask

  always @(posedge clk) begin
    if (rst_n && rv0) check_result(0, rm0);
    if (rst_n && rv1) check_result(1, rm1);
    if (rst_n && rvt) check_result(2, rmt);
  end

  int n_bytes_sc = 0, t0 = 0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    fork
      begin
        for (int n = 0; n < 400; n++) send_sc();
      end
      begin
        for (int n = 0; n < 400; n++) send_taxi();
      end
    join
    repeat (5) @(negedge clk);
    for (int k = 0; k < 3; k++) begin
      checks += 2;
      if (recs[k] != 400) begin failures++; $display("filter %0d: %0d results for 400 records", k, recs[k]); end
      if (acc[k] == 0 || acc[k] == 400) begin failures++; $display("filter %0d accepted %0d of 400", k, acc[k]); end
    end
    $display("accepted: QS0 %0d, QS1 %0d, QT %0d of 400 each; false positives w.r.t. the full query: %0d %0d %0d",
             acc[0], acc[1], acc[2], fp[0], fp[1], fp[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
