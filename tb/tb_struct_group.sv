// tb_struct_group: self-checking test of the structure-aware conjunction.
//
// The bench drives the structural events (open, close, comma, end of
// record) and the nesting level directly, together with random member hits,
// into two groups: a three-member group scoped by nesting level and a
// two-member group scoped by key/value separators. The reference gives
// every context a unique number (a new one for every opened level, and for
// the key/value group for every separator) and remembers, per member, the
// set of contexts it has hit in; the group must fire exactly when every member
// has hit in the current context, hits of the current cycle included.
module tb_struct_group;
  import rf_pkg::*;

  localparam int KL = 3, KK = 2;

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic [KL-1:0] hl = '0;
  logic [KK-1:0] hk = '0;
  logic          ev_open = 0, ev_close = 0, ev_comma = 0, ev_last = 0;
  logic [3:0]    level = '0;
  logic          gl, gk;
  int            checks = 0, failures = 0;
  int            fired_l = 0, fired_k = 0;

  struct_group #(.K(KL), .SCOPE(SCOPE_LEVEL),    .LEVEL_W(4), .MAX_LEVELS(8)) dut_l (
    .clk, .rst_n, .mem_hit(hl), .ev_open, .ev_close, .ev_comma, .ev_last, .level, .hit(gl));
  struct_group #(.K(KK), .SCOPE(SCOPE_KEYVALUE), .LEVEL_W(4), .MAX_LEVELS(8)) dut_k (
    .clk, .rst_n, .mem_hit(hk), .ev_open, .ev_close, .ev_comma, .ev_last, .level, .hit(gk));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference state.
  int next_id = 1;
  int stack [$];          // context id per open level, index = level
  int kv_id = 0;
  bit seen_l [KL][int];
  bit seen_k [KK][int];

  function automatic void new_record();
    stack.delete();
    stack.push_back(next_id++);
    kv_id = next_id++;
    for (int i = 0; i < KL; i++) seen_l[i].delete();
    for (int i = 0; i < KK; i++) seen_k[i].delete();
  endfunction

  initial begin
    bit el, ek;
    int lv;
    new_record();
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    lv = 0;
    for (int cyc = 0; cyc < 50000; cyc++) begin
      int r;
      r = $urandom_range(0, 9);
      ev_open = 0; ev_close = 0; ev_comma = 0; ev_last = 0;
      if (r <= 1 && lv < 6)        ev_open  = 1;
      else if (r <= 3 && lv > 0)   ev_close = 1;
      else if (r == 5)             ev_comma = 1;
      else if (r == 4 && $urandom_range(0, 30) == 0) ev_last = 1;
      level = 4'(lv);
      for (int i = 0; i < KL; i++) hl[i] = ($urandom_range(0, 29) == 0);
      for (int i = 0; i < KK; i++) hk[i] = ($urandom_range(0, 3) == 0);
      // Expected outputs of this cycle.
      el = 1; ek = 1;
      for (int i = 0; i < KL; i++) if (!(hl[i] || seen_l[i].exists(stack[lv]))) el = 0;
      for (int i = 0; i < KK; i++) if (!(hk[i] || seen_k[i].exists(kv_id))) ek = 0;
      #1;
      checks += 2;
      if (gl !== el) begin failures++; $display("level group: got %0b expected %0b (cycle %0d)", gl, el, cyc); end
      if (gk !== ek) begin failures++; $display("key/value group: got %0b expected %0b (cycle %0d)", gk, ek, cyc); end
      fired_l += int'(el); fired_k += int'(ek);
      // Update the reference.
      for (int i = 0; i < KL; i++) if (hl[i]) seen_l[i][stack[lv]] = 1'b1;
      for (int i = 0; i < KK; i++) if (hk[i]) seen_k[i][kv_id] = 1'b1;
      if (ev_last) begin
        new_record();
        lv = 0;
      end else begin
        if (ev_open)  begin stack.push_back(next_id++); lv++; end
        if (ev_close) begin void'(stack.pop_back()); lv--; end
        if (ev_open || ev_close || ev_comma) kv_id = next_id++;
      end
      @(negedge clk);
    end
    checks++;
    if (fired_l == 0 || fired_k == 0) begin failures++; $display("a group never fired"); end
    $display("level group fired %0d, key/value group fired %0d", fired_l, fired_k);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
