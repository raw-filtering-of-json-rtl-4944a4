// string_matcher: approximate search for one string in a byte stream, s_B(str).
//
// The block keeps only the last B bytes of the stream in a shift register and
// compares that window, every cycle, against all N-B+1 substrings of length B
// of the search string. The comparator results are OR-reduced; a counter
// counts the consecutive cycles in which some comparator matched and is
// cleared in the first cycle in which none does. Once the counter reaches
// N-B+1 the block reports a match and the counter stops (the AND gate with the
// inverted match output in the schematic). A string of N bytes therefore
// matches whenever N-B+1 consecutive windows are each some substring of it;
// this finds every occurrence of the string (no false negatives) and may also
// fire on a permutation of its blocks (rare false positives). B = N gives an
// exact comparison of the full string; B = 1 degenerates to "N consecutive
// characters from the string's alphabet".
//
// Interface: in_valid/in_data carry one byte per cycle; when in_valid is low
// nothing changes. match is high while the counter is at its threshold.
// Timing: the window register and the counter register each add one cycle,
// so match rises two clock edges after the cycle that delivered the last
// byte of the string and stays high for as long as the following windows
// still hit a substring.
//
// From the paper: window, substring comparators, OR, counter with clear,
// saturation through the inverted match, threshold N-B+1. This design's own
// choices: the valid qualifier, the synchronous active-low reset, the
// counter width and the string packing (first character in the most
// significant byte, as an SV string literal is packed).
module string_matcher
  import rf_pkg::*;
#(
  parameter int unsigned       N   = 11,               // length of the search string
  parameter int unsigned       B   = 2,                // block length, 1 <= B <= N
  parameter logic [8*N-1:0]    STR = "temperature"     // search string
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  byte_t in_data,
  output logic  match
);

  localparam int unsigned NSUB = N - B + 1;            // substrings and threshold
  localparam int unsigned CW   = $clog2(NSUB + 1);

  // window[0] is the newest byte, window[B-1] the oldest.
  byte_t            window [B];
  logic [CW-1:0]    count;
  logic [NSUB-1:0]  hit;
  logic             any_hit;

  // Character i of the search string (i = 0 is the first one).
  function automatic byte_t str_char(int unsigned i);
    return STR[8*(N-1-i) +: 8];
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < B; i++) window[i] <= '0;
    end else if (in_valid) begin
      window[0] <= in_data;
      for (int i = 1; i < B; i++) window[i] <= window[i-1];
    end
  end

  // Substring k holds characters k .. k+B-1; its last character must be the
  // newest byte of the window.
  always_comb begin
    for (int k = 0; k < NSUB; k++) begin
      hit[k] = 1'b1;
      for (int j = 0; j < B; j++)
        if (window[B-1-j] != str_char(k + j)) hit[k] = 1'b0;
    end
  end

  assign any_hit = |hit;
  assign match   = (count >= CW'(NSUB));

  // The counter only advances on a new window, i.e. one cycle after a valid
  // byte; win_new marks that cycle.
  logic win_new;
  always_ff @(posedge clk) begin
    if (!rst_n) win_new <= 1'b0;
    else        win_new <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)         count <= '0;
    else if (win_new) begin
      if (!any_hit)     count <= '0;
      else if (!match)  count <= count + 1'b1;
    end
  end

  initial begin
    assert (B >= 1 && B <= N) else $error("string_matcher: need 1 <= B <= N");
  end

endmodule
