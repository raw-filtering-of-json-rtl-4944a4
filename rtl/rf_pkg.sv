// rf_pkg: types and constants shared by the raw-filter blocks.
//
// A raw filter looks at a JSON byte stream one byte per clock and decides,
// per record, whether the record may satisfy a query. The package holds the
// byte-beat type of that stream, the ASCII codes the structural logic reacts
// to, the scope modes of a structural group and the selector of the built-in
// query configurations. The byte-per-cycle stream follows the paper; the
// beat layout (data plus an end-of-record flag) is this design's own choice.
package rf_pkg;

  typedef logic [7:0] byte_t;

  // One beat of the input stream: a byte and a flag marking the last byte
  // of a record.
  typedef struct packed {
    byte_t data;
    logic  last;
  } beat_t;

  // Characters with a structural meaning in JSON.
  localparam byte_t CH_QUOTE     = 8'h22;  // "
  localparam byte_t CH_BACKSLASH = 8'h5C;  // \
  localparam byte_t CH_LBRACE    = 8'h7B;  // {
  localparam byte_t CH_RBRACE    = 8'h7D;  // }
  localparam byte_t CH_LBRACKET  = 8'h5B;  // [
  localparam byte_t CH_RBRACKET  = 8'h5D;  // ]
  localparam byte_t CH_COMMA     = 8'h2C;  // ,
  localparam byte_t CH_MINUS     = 8'h2D;  // -
  localparam byte_t CH_PLUS      = 8'h2B;  // +
  localparam byte_t CH_DOT       = 8'h2E;  // .
  localparam byte_t CH_ZERO      = 8'h30;  // 0
  localparam byte_t CH_NINE      = 8'h39;  // 9

  // Scope of a structural group {RF1 & RF2 ...}:
  //   SCOPE_LEVEL    - all members must hit on the same nesting level
  //                    inside one object/array (sensor objects of SenML),
  //   SCOPE_KEYVALUE - all members must hit before the same unescaped comma
  //                    (a key and its value).
  typedef enum logic [0:0] {
    SCOPE_LEVEL    = 1'b0,
    SCOPE_KEYVALUE = 1'b1
  } scope_e;

  // Built-in raw filter configurations: the zero false-positive design
  // points found for the three evaluated queries.
  typedef enum logic [1:0] {
    Q_QS0 = 2'd0,
    Q_QS1 = 2'd1,
    Q_QT  = 2'd2
  } query_e;

  function automatic logic is_digit(byte_t c);
    return (c >= CH_ZERO) && (c <= CH_NINE);
  endfunction

endpackage
