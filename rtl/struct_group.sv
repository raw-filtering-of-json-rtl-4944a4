// struct_group: structure-aware conjunction {RF1 & RF2 & ...} of raw-filter
// primitives.
//
// The hits of K primitives (string matchers, number range matchers) only
// count together when they fall into the same structural context. Each hit
// sets a per-member flag of the current context; the group fires in every
// cycle in which all K flags of one context are set, counting the hits of
// that very cycle. Two kinds of context are supported:
//
//   SCOPE_LEVEL    - one flag set per nesting level, as deep as MAX_LEVELS.
//                    Closing a level clears its flags, so a sensor name and
//                    a value match only inside the same object. Levels at or
//                    above MAX_LEVELS-1 share the last slot and are never
//                    cleared until the stream climbs back below it: deeper
//                    nesting can give false positives, never false negatives.
//   SCOPE_KEYVALUE - a single flag set, cleared at every unescaped ',' and
//                    at every bracket outside strings, so a key and its
//                    value must appear between the same separators.
//
// All flags are cleared at the end of a record.
//
// Interface: mem_hit[K] are the primitive outputs; the ev_* and level inputs
// come straight from json_structure. Hits must arrive no later than the
// structural event of the character that ends their token, which the
// primitives' latencies (two cycles after the last character of a string,
// one after the character ending a number) and the one-cycle latency of
// json_structure guarantee. Hits that arrive together with an event belong
// to the context that event leaves. hit is combinational, valid in the same
// cycle as its inputs.
//
// From the paper: members combined only when found in the same context,
// nesting levels for objects and the comma for key/value pairs. This
// design's own choices: the per-level flag stack and its depth, brackets as
// additional key/value separators, and the clearing at record ends.
module struct_group
  import rf_pkg::*;
#(
  parameter int unsigned K          = 2,
  parameter scope_e      SCOPE      = SCOPE_LEVEL,
  parameter int unsigned LEVEL_W    = 4,
  parameter int unsigned MAX_LEVELS = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [K-1:0]       mem_hit,
  input  logic               ev_open,
  input  logic               ev_close,
  input  logic               ev_comma,
  input  logic               ev_last,
  input  logic [LEVEL_W-1:0] level,
  output logic               hit
);

  localparam int unsigned SLOTS = (SCOPE == SCOPE_LEVEL) ? MAX_LEVELS : 1;
  localparam int unsigned SW    = (SLOTS > 1) ? $clog2(SLOTS) : 1;

  logic [K-1:0] flags [SLOTS];
  logic [SW-1:0] slot;
  logic          top_slot;  // level is in the shared deepest slot
  logic [K-1:0]  eff;

  always_comb begin
    if (SLOTS == 1) begin
      slot     = '0;
      top_slot = 1'b0;
    end else if (32'(level) >= SLOTS - 1) begin
      slot     = SW'(SLOTS - 1);
      top_slot = 1'b1;
    end else begin
      slot     = SW'(level);
      top_slot = 1'b0;
    end
  end

  assign eff = flags[slot] | mem_hit;
  assign hit = &eff;

  always_ff @(posedge clk) begin
    if (!rst_n || ev_last) begin
      for (int s = 0; s < SLOTS; s++) flags[s] <= '0;
    end else if (SCOPE == SCOPE_KEYVALUE) begin
      if (ev_comma || ev_open || ev_close) flags[0] <= '0;
      else                                 flags[0] <= eff;
    end else begin
      if (ev_close) begin
        // Leaving this level: forget it, unless it is the shared slot and
        // the new level is still inside that slot.
        if (top_slot && 32'(level) > SLOTS - 1) flags[slot] <= eff;
        else                                    flags[slot] <= '0;
      end else begin
        flags[slot] <= eff;
        // Entering a fresh level: start it with no flags.
        if (ev_open && !top_slot) flags[slot + 1'b1] <= '0;
      end
    end
  end

endmodule
