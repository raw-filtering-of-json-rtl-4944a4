// tb_number_range_matcher: self-checking test of the value range automaton.
//
// Five matchers with different bounds (float ranges, a negative lower
// bound, an integer range, a one-sided bound) watch one stream of numbers.
// The test bench writes each number itself, so it knows its value exactly:
// values are kept as integers scaled by 10^4 and compared with the bounds
// in that form, independently of the digit-serial automaton. Numbers come
// with random sign, leading zeros, trailing fraction zeros, values on and
// next to the bounds, and exponent notation (always accepted). Each number
// is followed by a non-numeric terminator; the hit of each matcher is
// checked one clock edge after every byte, so a missing, extra or late hit
// is caught.
module tb_number_range_matcher;
  import rf_pkg::*;

  localparam int ND = 5;
  localparam longint SCALE = 10000;

  // Bounds scaled by 10^4, in the same order as the instances below.
  longint lo [ND] = '{7000, -125000, 120000, 833600, 350000};
  longint hi [ND] = '{351000, 431000, 490000, 33226700, 0};
  bit     has_hi [ND] = '{1, 1, 1, 1, 0};

  logic  clk = 1'b0;
  logic  rst_n = 1'b0;
  logic  in_valid = 1'b0;
  byte_t in_data = '0;
  logic [ND-1:0] hit;
  int    checks = 0, failures = 0, cycle = 0, nums = 0;
  int    hits [ND] = '{0, 0, 0, 0, 0};
  int    misses [ND] = '{0, 0, 0, 0, 0};

  number_range_matcher #(.LOWER("0.7"),   .UPPER("35.1"))    d0 (.clk, .rst_n, .in_valid, .in_data, .hit(hit[0]));
  number_range_matcher #(.LOWER("-12.5"), .UPPER("43.1"))    d1 (.clk, .rst_n, .in_valid, .in_data, .hit(hit[1]));
  number_range_matcher #(.LOWER("12"),    .UPPER("49"))      d2 (.clk, .rst_n, .in_valid, .in_data, .hit(hit[2]));
  number_range_matcher #(.LOWER("83.36"), .UPPER("3322.67")) d3 (.clk, .rst_n, .in_valid, .in_data, .hit(hit[3]));
  number_range_matcher #(.LOWER("35"),    .HAS_UPPER(1'b0))  d4 (.clk, .rst_n, .in_valid, .in_data, .hit(hit[4]));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Characters that end a number: , " space } ] x : n
  localparam byte_t TERMS [8] = '{8'h2C, 8'h22, 8'h20, 8'h7D, 8'h5D, 8'h78, 8'h3A, 8'h6E};

  // Per byte: the expected hits for the cycle after it.
  logic [ND-1:0] byte_exp [$];
  logic [ND-1:0] pend_e [$];
  int            pend_c [$];

  always @(posedge clk) begin
    if (in_valid) begin
      pend_e.push_back(byte_exp.pop_front());
      pend_c.push_back(cycle + 1);
    end
    if (pend_c.size() > 0 && pend_c[0] == cycle) begin
      logic [ND-1:0] e;
      e = pend_e.pop_front();
      void'(pend_c.pop_front());
      for (int d = 0; d < ND; d++) begin
        checks++;
        if (hit[d] !== e[d]) begin
          failures++;
          $display("matcher %0d: got %0b expected %0b at cycle %0d (%s)", d, hit[d], e[d], cycle, prev_num);
        end
        if (e[d]) hits[d]++;
      end
    end
  end

  task automatic send(byte_t c, logic [ND-1:0] e);
    byte_exp.push_back(e);
    in_valid = 1'b1;
    in_data  = c;
    @(negedge clk);
    in_valid = 1'b0;
    if ($urandom_range(0, 5) == 0) @(negedge clk);
  endtask

  // Send a number of value v/10^4 with the given number of fraction digits
  // (the value must be representable with them), then a terminator.
  string last_num, prev_num;
  task automatic send_number(longint v, int fd, int lead0, int trail0, bit expo);
    string  s, t;
    longint a, ip, fp;
    logic [ND-1:0] e;
    a  = (v < 0) ? -v : v;
    ip = a / SCALE;
    fp = a % SCALE;
    s  = (v < 0) ? "-" : "";
    for (int i = 0; i < lead0; i++) s = {s, "0"};
    s = {s, $sformatf("%0d", ip)};
    if (fd > 0 || trail0 > 0) begin
      t = $sformatf("%04d", fp);
      s = {s, ".", t.substr(0, fd - 1)};
      for (int i = 0; i < trail0; i++) s = {s, "0"};
    end
    if (expo) s = {s, ($urandom_range(0, 1) ? "e" : "E"), ($urandom_range(0, 1) ? "+" : "-"), "2"};
    for (int d = 0; d < ND; d++)
      e[d] = expo || ((v >= lo[d]) && (!has_hi[d] || v <= hi[d]));
    prev_num = last_num;
    last_num = s;
    for (int i = 0; i < s.len(); i++) send(s[i], '0);
    send(TERMS[$urandom_range(0, 7)], e);
    nums++;
  endtask

  // Random value close to one of the bounds or anywhere in a wide range.
  function automatic longint pick(output int fd);
    longint v, unit;
    int     k;
    fd   = $urandom_range(0, 4);
    unit = 1;
    for (int i = fd; i < 4; i++) unit *= 10;
    k = $urandom_range(0, 3);
    if (k == 0) v = longint'($urandom_range(0, 40000)) * 10000;
    else if (k == 1) v = longint'($urandom_range(0, 600000));
    else begin
      int d = $urandom_range(0, ND - 1);
      v = ((k == 2) ? lo[d] : hi[d]) + (longint'($urandom_range(0, 4)) - 2) * unit;
    end
    v = (v / unit) * unit;                  // representable with fd digits
    if ($urandom_range(0, 4) == 0) v = -v;
    return v;
  endfunction

  initial begin
    int fd;
    longint v;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(negedge clk);
    // Fixed cases: the paper's running example values and the bounds.
    send_number(352000, 1, 0, 0, 0);    // 35.2
    send_number(120000, 0, 0, 0, 0);    // 12
    send_number(7000, 1, 0, 0, 0);      // 0.7
    send_number(351000, 1, 0, 2, 0);    // 35.100
    send_number(-125000, 1, 0, 0, 0);   // -12.5
    send_number(0, 0, 0, 0, 0);         // 0
    send_number(33226700, 2, 0, 0, 0);  // 3322.67
    send_number(33226800, 2, 0, 0, 0);  // 3322.68
    send_number(21000, 1, 0, 0, 1);     // 2.1e+2
    for (int r = 0; r < 1500; r++) begin
      v = pick(fd);
      send_number(v, fd, ($urandom_range(0, 5) == 0) ? 1 : 0, $urandom_range(0, 1), $urandom_range(0, 20) == 0);
      // Text between numbers: letters and structure, no digits.
      if ($urandom_range(0, 2) == 0) begin
        string txt = "\"n\":\"humidity\",\"v\":";
        for (int i = 0; i < txt.len(); i++) send(txt[i], '0);
      end
    end
    repeat (4) @(negedge clk);
    // Every matcher must have accepted and rejected something.
    for (int d = 0; d < ND; d++) begin
      checks++;
      if (hits[d] == 0 || hits[d] == nums) begin
        failures++;
        $display("matcher %0d accepted %0d of %0d numbers", d, hits[d], nums);
      end
    end
    $display("numbers %0d, accepted: %0d %0d %0d %0d %0d", nums, hits[0], hits[1], hits[2], hits[3], hits[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
