// json_structure: light-weight structural awareness for a JSON byte stream.
//
// Without parsing, the block follows just enough of the JSON syntax to know
// (a) whether a byte lies inside a string, (b) the current nesting level and
// (c) where the structural characters are. A quote toggles the string mask
// unless it is escaped; inside a string a backslash escapes the next byte,
// so "\\" is an escaped backslash and a quote after it closes the string.
// Outside strings, '{' and '[' raise the nesting counter, '}' and ']' lower
// it, and ',' separates members. Brackets and commas inside strings are
// ignored, which keeps the counter consistent.
//
// Interface: in_valid/in_data/in_last, one byte per cycle; in_last marks
// the last byte of a record, after which the counter and the string mask
// restart from zero. All outputs are registered and describe the byte of
// the previous cycle: ev_valid repeats in_valid, ev_open/ev_close/ev_comma
// flag unescaped structural characters outside strings, ev_last repeats
// in_last, level is the nesting level in force *before* that byte, and
// in_str is the string mask of that byte (a quote that opens or closes a
// string counts as inside). Latency: one clock edge.
//
// From the paper: the nesting counter, the string mask with escape handling
// and the comma as key/value separator. This design's own choices: counter
// width and saturation, the per-record restart and the output timing.
module json_structure
  import rf_pkg::*;
#(
  parameter int unsigned LEVEL_W = 4            // nesting counter width
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  byte_t              in_data,
  input  logic               in_last,
  output logic               ev_valid,
  output logic               ev_open,
  output logic               ev_close,
  output logic               ev_comma,
  output logic               ev_last,
  output logic [LEVEL_W-1:0] level,
  output logic               in_str
);

  logic               str_q, esc_q;
  logic [LEVEL_W-1:0] lvl_q;
  logic               is_open, is_close, is_comma;

  assign is_open  = !str_q && (in_data == CH_LBRACE || in_data == CH_LBRACKET);
  assign is_close = !str_q && (in_data == CH_RBRACE || in_data == CH_RBRACKET);
  assign is_comma = !str_q && (in_data == CH_COMMA);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      str_q    <= 1'b0;
      esc_q    <= 1'b0;
      lvl_q    <= '0;
      ev_valid <= 1'b0;
      ev_open  <= 1'b0;
      ev_close <= 1'b0;
      ev_comma <= 1'b0;
      ev_last  <= 1'b0;
      level    <= '0;
      in_str   <= 1'b0;
    end else begin
      ev_valid <= in_valid;
      ev_open  <= in_valid && is_open;
      ev_close <= in_valid && is_close;
      ev_comma <= in_valid && is_comma;
      ev_last  <= in_valid && in_last;
      if (in_valid) begin
        level  <= lvl_q;
        in_str <= str_q || (in_data == CH_QUOTE);
        if (in_last) begin
          str_q <= 1'b0;
          esc_q <= 1'b0;
          lvl_q <= '0;
        end else if (str_q) begin
          if (esc_q)                         esc_q <= 1'b0;
          else if (in_data == CH_BACKSLASH)  esc_q <= 1'b1;
          else if (in_data == CH_QUOTE)      str_q <= 1'b0;
        end else begin
          if (in_data == CH_QUOTE)                 str_q <= 1'b1;
          else if (is_open  && lvl_q != '1)        lvl_q <= lvl_q + 1'b1;
          else if (is_close && lvl_q != '0)        lvl_q <= lvl_q - 1'b1;
        end
      end
    end
  end

endmodule
