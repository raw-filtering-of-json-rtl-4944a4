// tb_rf_array: end-to-end test of the seven-lane raw-filter array with its
// default parameters (seven filters, the QS0 configuration).
//
// Every lane receives its own stream of SmartCity-style SenML records, the
// way a DMA engine would hand out records to the filters. The streams mix
// ordinary records with records that exercise each mechanism of the filter:
//   - context separation: "temperature" is present and some number in the
//     temperature range is present, but in another sensor object, so the
//     record must be rejected;
//   - exponent notation: the temperature value is written as e.g. "2.1e1"
//     and must be accepted whatever its value;
//   - strings with escaped quotes, brackets and commas ahead of the sensor
//     array, which must not disturb the nesting level;
//   - idle cycles inside a record (the source pausing) on some lanes.
// Each of these is counted and must occur. For every record the bench
// computes the expected verdict from the values it wrote and checks the
// lane's result and its timing (two cycles after the last byte). With no
// idle cycles a lane must take exactly one cycle per byte.
module tb_rf_array;
  import rf_pkg::*;

  localparam int L = 7;
  localparam int RECS = 60;   // records per lane

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic [L-1:0] in_valid = '0, in_last = '0;
  byte_t       in_data [L];
  logic [L-1:0] res_valid, res_match;
  int          checks = 0, failures = 0, cycle = 0;
  int          n_split = 0, n_expo = 0, n_escape = 0, n_stall = 0, n_acc = 0, n_rej = 0;
  int          busy_cycles = 0;

  rf_array dut (.clk, .rst_n, .in_valid, .in_data, .in_last, .res_valid, .res_match);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (|in_valid) busy_cycles <= busy_cycles + 1;

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

  function automatic string fmt(int v, bit is_float);
    int a = (v < 0) ? -v : v;
    string s = (v < 0) ? "-" : "";
    if (is_float) return {s, $sformatf("%0d.%02d", a / 100, a % 100)};
    return {s, $sformatf("%0d", a / 100)};
  endfunction

  // QS0 ranges, x100.
  string nm [5] = '{"temperature", "humidity", "light", "dust", "airquality_raw"};
  bit    fl [5] = '{1, 1, 0, 1, 0};
  int    lo [5] = '{70, 2030, 0, 8336, 1200};
  int    hi [5] = '{3510, 6910, 515300, 332267, 4900};

  // Expected verdict and result cycle per lane and record.
  bit exp_m [L][RECS];
  int exp_c [L][RECS];
  int wr [L];
  int rd [L];

  function automatic int pick(int i, bit in_rng);
    int v;
    if (in_rng) v = lo[i] + int'($urandom_range(0, (hi[i] - lo[i]) / 100)) * 100;
    else        v = hi[i] + 100 + int'($urandom_range(0, 5000));
    if (!fl[i]) v = (v / 100) * 100;
    if (v > hi[i] && in_rng) v = lo[i];
    return v;
  endfunction

  // Builds the next record for a lane and stores its expected verdict.
  function automatic string make_record(int lane);
    string r, pre;
    int    val [5];
    bit    in_rng [5];
    bit    expo = 0, split = 0, esc = 0, m = 1;
    int    kind = $urandom_range(0, 5);
    for (int i = 0; i < 5; i++) begin
      in_rng[i] = ($urandom_range(0, 5) != 0);
      val[i] = pick(i, in_rng[i]);
    end
    if (kind == 0) begin
      // Temperature out of range, humidity value inside the temperature range.
      in_rng[0] = 0; val[0] = 9000;
      in_rng[1] = 1; val[1] = 2500;
      split = 1;
    end else if (kind == 1) begin
      expo = 1;
      in_rng[0] = 1;
    end
    esc = (kind == 2);
    for (int i = 0; i < 5; i++) m &= in_rng[i];
    pre = esc ? {q("note"), ":", ch(CH_QUOTE), "a", ch(CH_BACKSLASH), ch(CH_QUOTE), ch(CH_RBRACE),
                 ch(CH_RBRACKET), ch(CH_COMMA), ch(CH_BACKSLASH), ch(CH_BACKSLASH), ch(CH_QUOTE), ch(CH_COMMA)} : "";
    r = {ch(CH_LBRACE), pre, q("e"), ":", ch(CH_LBRACKET)};
    for (int i = 0; i < 5; i++) begin
      string v = (i == 0 && expo) ? "2.1e1" : fmt(val[i], fl[i]);
      if (i > 0) r = {r, ch(CH_COMMA)};
      r = {r, ch(CH_LBRACE), q("v"), ":", q(v), ch(CH_COMMA), q("u"), ":", q("per"), ch(CH_COMMA),
           q("n"), ":", q(nm[i]), ch(CH_RBRACE)};
    end
    r = {r, ch(CH_RBRACKET), ch(CH_COMMA), q("bt"), ":", "1422748800000", ch(CH_RBRACE)};
    n_split += int'(split); n_expo += int'(expo); n_escape += int'(esc);
    exp_m[lane][wr[lane]] = m;
    return r;
  endfunction

  // Drives n records into every lane, all lanes at once; with stalls set,
  // the even lanes pause at random inside their records.
  task automatic drive(int n, bit stalls);
    string cur [L];
    int    pos [L];
    int    left [L];
    int    active;
    for (int k = 0; k < L; k++) begin
      left[k] = n;
      cur[k]  = make_record(k);
      pos[k]  = 0;
    end
    active = L;
    while (active > 0) begin
      for (int k = 0; k < L; k++) begin
        in_valid[k] = 1'b0;
        in_last[k]  = 1'b0;
        if (left[k] == 0) continue;
        if (stalls && (k % 2 == 0) && pos[k] > 0 && $urandom_range(0, 15) == 0) begin
          n_stall++;
          continue;
        end
        in_valid[k] = 1'b1;
        in_data[k]  = cur[k][pos[k]];
        if (pos[k] == cur[k].len() - 1) begin
          in_last[k] = 1'b1;
          exp_c[k][wr[k]] = cycle + 2;
          wr[k]++;
          left[k]--;
          if (left[k] == 0) active--;
          else begin
            cur[k] = make_record(k);
            pos[k] = 0;
          end
        end else begin
          pos[k]++;
        end
      end
      @(negedge clk);
    end
    in_valid = '0;
    in_last  = '0;
  endtask

  always @(posedge clk) begin
    for (int k = 0; k < L; k++) begin
      if (rst_n && res_valid[k]) begin
        checks += 2;
        if (rd[k] >= wr[k]) begin
          failures++;
          $display("lane %0d: result without a record", k);
        end else begin
          bit e;
          int t;
          e = exp_m[k][rd[k]];
          t = exp_c[k][rd[k]];
          rd[k]++;
          if (res_match[k] != e) begin failures++; $display("lane %0d: got %0b expected %0b", k, res_match[k], e); end
          if (t != cycle) begin failures++; $display("lane %0d: result at %0d, expected %0d", k, cycle, t); end
          if (res_match[k]) n_acc++; else n_rej++;
        end
      end
    end
  end

  initial begin
    int c0;
    for (int k = 0; k < L; k++) begin
      in_data[k] = '0;
      wr[k] = 0;
      rd[k] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    // Phase 1: all lanes, no pauses: one byte per cycle per lane.
    c0 = cycle;
    drive(RECS / 2, 1'b0);
    checks++;
    if (busy_cycles != cycle - c0) begin
      failures++;
      $display("lanes idle during back-to-back phase: %0d busy of %0d cycles", busy_cycles, cycle - c0);
    end
    // Phase 2: pauses inside records on every other lane.
    drive(RECS / 2, 1'b1);
    repeat (5) @(negedge clk);
    for (int k = 0; k < L; k++) begin
      checks++;
      if (rd[k] != RECS) begin failures++; $display("lane %0d: %0d results for %0d records", k, rd[k], RECS); end
    end
    checks += 6;
    if (n_split == 0)  begin failures++; $display("no context-separation record"); end
    if (n_expo == 0)   begin failures++; $display("no exponent record"); end
    if (n_escape == 0) begin failures++; $display("no escaped-string record"); end
    if (n_stall == 0)  begin failures++; $display("no stall"); end
    if (n_acc == 0)    begin failures++; $display("nothing accepted"); end
    if (n_rej == 0)    begin failures++; $display("nothing rejected"); end
    $display("records %0d: accepted %0d rejected %0d; context-separation %0d, exponent %0d, escaped strings %0d, stall cycles %0d",
             n_acc + n_rej, n_acc, n_rej, n_split, n_expo, n_escape, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
