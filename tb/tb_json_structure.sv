// tb_json_structure: self-checking test of the structure tracker.
//
// Random JSON records are generated (nested objects and arrays, strings
// holding brackets, commas, escaped quotes and escaped backslashes) and
// streamed with random idle cycles. For each record the bench first works
// out, byte by byte and on its own, the nesting level before each byte,
// whether the byte is inside a string, and whether it is a structural
// bracket or comma. The block's registered outputs are compared with that
// one clock edge after each byte. Every record must also end at level 0.
module tb_json_structure;
  import rf_pkg::*;

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  in_valid = 1'b0;
  byte_t in_data = '0;
  logic  in_last = 1'b0;
  logic  ev_valid, ev_open, ev_close, ev_comma, ev_last, in_str;
  logic [3:0] level;
  int    checks = 0, failures = 0, cycle = 0;
  int    n_open = 0, n_close = 0, n_comma = 0, n_esc = 0, max_level = 0;

  json_structure #(.LEVEL_W(4)) dut (
    .clk, .rst_n, .in_valid, .in_data, .in_last,
    .ev_valid, .ev_open, .ev_close, .ev_comma, .ev_last, .level, .in_str
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic string ch(byte_t c);
    string s = " ";
    s.putc(0, c);
    return s;
  endfunction

  // A JSON string with awkward contents.
  function automatic string gen_string();
    string s = ch(CH_QUOTE);
    int n = $urandom_range(0, 6);
    for (int i = 0; i < n; i++) begin
      case ($urandom_range(0, 7))
        0: s = {s, ch(CH_BACKSLASH), ch(CH_QUOTE)};      // \"
        1: s = {s, ch(CH_BACKSLASH), ch(CH_BACKSLASH)};  // \\
        2: s = {s, ch(CH_LBRACE)};
        3: s = {s, ch(CH_RBRACKET)};
        4: s = {s, ch(CH_COMMA)};
        5: s = {s, ch(CH_BACKSLASH), "n"};
        default: s = {s, "ab"};
      endcase
    end
    return {s, ch(CH_QUOTE)};
  endfunction

  function automatic string gen_value(int depth);
    int k = (depth >= 4) ? $urandom_range(0, 1) : $urandom_range(0, 3);
    case (k)
      0: return gen_string();
      1: return $sformatf("%0d.%0d", $urandom_range(0, 999), $urandom_range(0, 99));
      2: begin
        string s = ch(CH_LBRACE);
        int n = $urandom_range(0, 3);
        for (int i = 0; i < n; i++) begin
          if (i > 0) s = {s, ch(CH_COMMA)};
          s = {s, gen_string(), ":", gen_value(depth + 1)};
        end
        return {s, ch(CH_RBRACE)};
      end
      default: begin
        string s = ch(CH_LBRACKET);
        int n = $urandom_range(0, 3);
        for (int i = 0; i < n; i++) begin
          if (i > 0) s = {s, ch(CH_COMMA)};
          s = {s, gen_value(depth + 1)};
        end
        return {s, ch(CH_RBRACKET)};
      end
    endcase
  endfunction

  // Expected outputs per byte: {open, close, comma, last, in_str, level}.
  typedef struct packed {
    logic       open, close, comma, last, str;
    logic [3:0] level;
  } exp_t;

  exp_t byte_exp [$];
  exp_t pend_e [$];
  int   pend_c [$];

  task automatic send_record(string r);
    // Reference: scan the record with explicit string/escape tracking.
    bit instr = 0, esc = 0;
    int lvl = 0;
    for (int i = 0; i < r.len(); i++) begin
      exp_t e;
      byte_t c = r[i];
      e = '0;
      e.level = 4'(lvl);
      e.last  = (i == r.len() - 1);
      if (instr) begin
        e.str = 1;
        if (esc) begin esc = 0; n_esc++; end
        else if (c == CH_BACKSLASH) esc = 1;
        else if (c == CH_QUOTE) instr = 0;
      end else if (c == CH_QUOTE) begin
        e.str = 1;
        instr = 1;
      end else if (c == CH_LBRACE || c == CH_LBRACKET) begin
        e.open = 1; lvl++; n_open++;
      end else if (c == CH_RBRACE || c == CH_RBRACKET) begin
        e.close = 1; lvl--; n_close++;
      end else if (c == CH_COMMA) begin
        e.comma = 1; n_comma++;
      end
      if (lvl > max_level) max_level = lvl;
      byte_exp.push_back(e);
    end
    checks++;
    if (lvl != 0 || instr) begin failures++; $display("generator produced an unbalanced record"); end
    for (int i = 0; i < r.len(); i++) begin
      in_valid = 1'b1;
      in_data  = r[i];
      in_last  = (i == r.len() - 1);
      @(negedge clk);
      in_valid = 1'b0;
      in_last  = 1'b0;
      if ($urandom_range(0, 4) == 0) @(negedge clk);
    end
  endtask

  always @(posedge clk) begin
    if (in_valid) begin
      pend_e.push_back(byte_exp.pop_front());
      pend_c.push_back(cycle + 1);
    end
    if (pend_c.size() > 0 && pend_c[0] == cycle) begin
      exp_t e, g;
      e = pend_e.pop_front();
      void'(pend_c.pop_front());
      g = '{open: ev_open, close: ev_close, comma: ev_comma, last: ev_last, str: in_str, level: level};
      checks++;
      if (!ev_valid || g != e) begin
        failures++;
        $display("cycle %0d: got %b expected %b", cycle, g, e);
      end
    end else if (!in_valid || pend_c.size() == 0) begin
      // Idle cycle seen at the output: no event may be flagged.
      if (ev_valid === 1'b0) begin
        checks++;
        if (ev_open || ev_close || ev_comma || ev_last) begin
          failures++;
          $display("cycle %0d: event without a byte", cycle);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    for (int r = 0; r < 200; r++) begin
      string s;
      int n;
      s = ch(CH_LBRACE);
      n = $urandom_range(1, 4);
      for (int i = 0; i < n; i++) begin
        if (i > 0) s = {s, ch(CH_COMMA)};
        s = {s, gen_string(), ":", gen_value(1)};
      end
      send_record({s, ch(CH_RBRACE)});
    end
    repeat (3) @(negedge clk);
    checks++;
    if (n_open == 0 || n_close == 0 || n_comma == 0 || n_esc == 0 || max_level < 3) begin
      failures++;
      $display("stimulus too weak");
    end
    $display("opens %0d closes %0d commas %0d escapes %0d max level %0d", n_open, n_close, n_comma, n_esc, max_level);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
