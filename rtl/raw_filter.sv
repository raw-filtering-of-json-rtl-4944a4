// raw_filter: one complete, query-specific raw filter.
//
// A raw filter decides, per JSON record, whether the record can satisfy a
// query, without parsing it. It may let records through that the query
// rejects (false positives, removed later by the software parser) but never
// drops a record that the query accepts. The filter is a composition of
// primitives: every term of the query's conjunction is a structural group
// {s_B("name") & v(lower <= x <= upper)} of an approximate string matcher for
// the attribute name and a number range matcher for its value, combined by
// struct_group so that both must be found in the same context. A record
// matches when every term fired at least once between its first and last
// byte.
//
// QUERY selects one of the built-in configurations, each the design point
// with no observed false positives for one of the evaluated queries:
//   Q_QS0: {s1(temperature) & v(0.7..35.1)} & {s1(humidity) & v(20.3..69.1)}
//        & {s1(light) & v(0..5153)} & {s1(dust) & v(83.36..3322.67)}
//        & {s1(airquality_raw) & v(12..49)}                     (same object)
//   Q_QS1: {s1(light) & v(1345..26282)} & {s1(dust) & v(186.61..5188.21)}
//        & {s1(airquality_raw) & v(17..363)}                    (same object)
//   Q_QT:  {s2(tip_amount) & v(0.65..38.55)}
//        & {s2(tolls_amount) & v(2.5..18.0)}                 (same key/value)
// The terms, block lengths and bounds are those of the paper's Pareto
// tables; the scope of each group (object or key/value) is this design's
// choice, matched to the layout of each data set.
//
// Interface: in_valid/in_data/in_last, one byte per cycle, never stalled by
// the filter (there is no ready). For each record the filter returns one
// result: res_valid pulses with res_match two clock edges after the cycle
// that delivered the record's last byte. Records may follow each other
// back to back.
module raw_filter
  import rf_pkg::*;
#(
  parameter query_e      QUERY   = Q_QS0,
  parameter int unsigned LEVEL_W = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  byte_t in_data,
  input  logic  in_last,
  output logic  res_valid,
  output logic  res_match
);

  typedef logic [8*16-1:0] str16_t;

  // ---------------------------------------------------------------------
  // Configuration tables.
  // ---------------------------------------------------------------------
  function automatic int unsigned n_terms(query_e q);
    case (q)
      Q_QS0:   return 5;
      Q_QS1:   return 3;
      default: return 2;
    endcase
  endfunction

  function automatic str16_t term_name(query_e q, int unsigned i);
    case (q)
      Q_QS0: case (i)
               0: return "temperature";
               1: return "humidity";
               2: return "light";
               3: return "dust";
               default: return "airquality_raw";
             endcase
      Q_QS1: case (i)
               0: return "light";
               1: return "dust";
               default: return "airquality_raw";
             endcase
      default: case (i)
               0: return "tip_amount";
               default: return "tolls_amount";
             endcase
    endcase
  endfunction

  function automatic str16_t term_lower(query_e q, int unsigned i);
    case (q)
      Q_QS0: case (i)
               0: return "0.7";
               1: return "20.3";
               2: return "0";
               3: return "83.36";
               default: return "12";
             endcase
      Q_QS1: case (i)
               0: return "1345";
               1: return "186.61";
               default: return "17";
             endcase
      default: case (i)
               0: return "0.65";
               default: return "2.5";
             endcase
    endcase
  endfunction

  function automatic str16_t term_upper(query_e q, int unsigned i);
    case (q)
      Q_QS0: case (i)
               0: return "35.1";
               1: return "69.1";
               2: return "5153";
               3: return "3322.67";
               default: return "49";
             endcase
      Q_QS1: case (i)
               0: return "26282";
               1: return "5188.21";
               default: return "363";
             endcase
      default: case (i)
               0: return "38.55";
               default: return "18.0";
             endcase
    endcase
  endfunction

  function automatic int unsigned term_b(query_e q);
    return (q == Q_QT) ? 2 : 1;
  endfunction

  function automatic scope_e term_scope(query_e q);
    return (q == Q_QT) ? SCOPE_KEYVALUE : SCOPE_LEVEL;
  endfunction

  function automatic int unsigned str_len(str16_t s);
    int unsigned n = 0;
    for (int i = 0; i < 16; i++) if (s[8*i +: 8] != 8'h00) n = i + 1;
    return n;
  endfunction

  localparam int unsigned NT = n_terms(QUERY);

  // ---------------------------------------------------------------------
  // Structure tracking, shared by all terms.
  // ---------------------------------------------------------------------
  logic               ev_valid, ev_open, ev_close, ev_comma, ev_last, ev_str;
  logic [LEVEL_W-1:0] level;

  json_structure #(.LEVEL_W(LEVEL_W)) u_struct (
    .clk, .rst_n, .in_valid, .in_data, .in_last,
    .ev_valid, .ev_open, .ev_close, .ev_comma, .ev_last, .level,
    .in_str(ev_str)
  );

  // ---------------------------------------------------------------------
  // Terms.
  // ---------------------------------------------------------------------
  logic [NT-1:0] term_hit;

  for (genvar t = 0; t < NT; t++) begin : g_term
    localparam str16_t      NAME = term_name(QUERY, t);
    localparam int unsigned LEN  = str_len(NAME);
    logic s_hit, v_hit;

    string_matcher #(
      .N(LEN), .B(term_b(QUERY)), .STR(NAME[8*LEN-1:0])
    ) u_str (
      .clk, .rst_n, .in_valid, .in_data, .match(s_hit)
    );

    number_range_matcher #(
      .LOWER(term_lower(QUERY, t)), .UPPER(term_upper(QUERY, t))
    ) u_num (
      .clk, .rst_n, .in_valid, .in_data, .hit(v_hit)
    );

    struct_group #(
      .K(2), .SCOPE(term_scope(QUERY)), .LEVEL_W(LEVEL_W)
    ) u_grp (
      .clk, .rst_n, .mem_hit({s_hit, v_hit}),
      .ev_open, .ev_close, .ev_comma, .ev_last, .level,
      .hit(term_hit[t])
    );
  end

  // ---------------------------------------------------------------------
  // Record verdict: every term must have fired within the record.
  // ---------------------------------------------------------------------
  logic [NT-1:0] seen;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      seen      <= '0;
      res_valid <= 1'b0;
      res_match <= 1'b0;
    end else begin
      res_valid <= ev_last;
      res_match <= ev_last && (&(seen | term_hit));
      if (ev_last) seen <= '0;
      else         seen <= seen | term_hit;
    end
  end

  // The string mask is part of the structure tracker's interface but not
  // needed by these configurations; ev_valid likewise.
  logic unused;
  assign unused = ev_valid ^ ev_str;

endmodule
