// number_range_matcher: value (range) filter v(lower <= x <= upper).
//
// Scans the byte stream for decimal numbers (optionally signed, optionally
// with a fraction) and reports, at the end of each number, whether its value
// lies inside the closed range [LOWER, UPPER]. It is one finite automaton
// covering both bounds at once: while the digits stream in it keeps, per
// bound, only a three-valued comparison state (less / equal / greater so
// far), the count of significant integer digits and the number's phase
// (integer part, fraction, exponent). The integer part is compared digit by
// digit against the bound's digits of the same position; whether that
// comparison or the digit count decides is known when the integer part ends.
// Leading zeros are skipped, as the s0 self-loop on '0' does in the paper's
// example automaton. Fraction digits then refine an "equal so far" state
// against the bound's fraction, padded with zeros. A number written with an
// exponent (a digit followed by 'e' or 'E') is always accepted, because its
// value cannot be followed by an automaton; this may give a false positive
// but never a false negative.
//
// The characters 0-9, '+', '-', '.', 'e' and 'E' belong to a number; the
// automaton is evaluated at the first other character after at least one
// digit and then returns to its start state. An ill-formed number (second
// '.', '-' after a digit, '+' outside the exponent) is rejected.
//
// Interface: in_valid/in_data, one byte per cycle. hit pulses for one cycle,
// one clock edge after the cycle that delivered the terminating character,
// if the number that ended there is in range. Bounds are given as decimal
// strings, e.g. "0.7", "-12.5", "3322.67"; HAS_LOWER/HAS_UPPER drop a bound
// for one-sided filters such as i >= 35.
//
// From the paper: one automaton per range, digit-serial checking of integer
// and fraction digits, leading-zero skipping, evaluation and restart at a
// non-numeric character, blanket acceptance of exponent notation. This
// design's own choice: instead of a minimised automaton generated from a
// regular expression for each range, the automaton is written once, with the
// bounds as parameters; its states are the comparison registers below.
module number_range_matcher
  import rf_pkg::*;
#(
  parameter logic [8*16-1:0] LOWER     = "0.7",
  parameter logic [8*16-1:0] UPPER     = "35.1",
  parameter bit              HAS_LOWER = 1'b1,
  parameter bit              HAS_UPPER = 1'b1,
  parameter int unsigned     MAXD      = 8     // bound digits kept per part
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  byte_t in_data,
  output logic  hit
);

  // ---------------------------------------------------------------------
  // Bound decoding at elaboration time.
  // ---------------------------------------------------------------------
  localparam int unsigned SW = 16;

  function automatic logic bound_neg(logic [8*SW-1:0] s);
    for (int i = SW - 1; i >= 0; i--)
      if (s[8*i +: 8] == CH_MINUS) return 1'b1;
    return 1'b0;
  endfunction

  // Significant integer digits (leading zeros removed), most significant
  // first in nibble 0; returns their count through the upper bits.
  function automatic logic [4*MAXD+7:0] bound_int(logic [8*SW-1:0] s);
    logic [4*MAXD-1:0] d;
    int unsigned       n;
    logic              frac;
    d = '0; n = 0; frac = 1'b0;
    for (int i = SW - 1; i >= 0; i--) begin
      if (s[8*i +: 8] == CH_DOT) frac = 1'b1;
      else if (!frac && is_digit(s[8*i +: 8])) begin
        if (!(n == 0 && s[8*i +: 8] == CH_ZERO) && n < MAXD) begin
          d[4*n +: 4] = 4'(s[8*i +: 8] - CH_ZERO);
          n++;
        end
      end
    end
    return {8'(n), d};
  endfunction

  function automatic logic [4*MAXD+7:0] bound_frac(logic [8*SW-1:0] s);
    logic [4*MAXD-1:0] d;
    int unsigned       n;
    logic [7:0]        last_nz;
    logic              frac;
    d = '0; n = 0; last_nz = 0; frac = 1'b0;
    for (int i = SW - 1; i >= 0; i--) begin
      if (s[8*i +: 8] == CH_DOT) frac = 1'b1;
      else if (frac && is_digit(s[8*i +: 8]) && n < MAXD) begin
        d[4*n +: 4] = 4'(s[8*i +: 8] - CH_ZERO);
        n++;
        if (s[8*i +: 8] != CH_ZERO) last_nz = 8'(n);
      end
    end
    return {last_nz, d};   // trailing zeros dropped
  endfunction

  localparam logic [4*MAXD+7:0] LI = bound_int(LOWER);
  localparam logic [4*MAXD+7:0] LF = bound_frac(LOWER);
  localparam logic [4*MAXD+7:0] UI = bound_int(UPPER);
  localparam logic [4*MAXD+7:0] UF = bound_frac(UPPER);
  localparam logic              L_NEG = bound_neg(LOWER);
  localparam logic              U_NEG = bound_neg(UPPER);

  // ---------------------------------------------------------------------
  // Automaton state.
  // ---------------------------------------------------------------------
  typedef enum logic [1:0] {CMP_EQ, CMP_LT, CMP_GT} cmp_e;
  typedef enum logic [2:0] {PH_IDLE, PH_SIGN, PH_INT, PH_FRAC, PH_EXP} phase_e;
  localparam int unsigned CW = $clog2(MAXD + 2);

  typedef struct packed {
    phase_e          phase;
    logic            neg;
    logic            digits;    // at least one digit seen
    logic            nonzero;   // a non-zero digit seen
    logic            bad;       // ill-formed
    logic [CW-1:0]   nint;      // significant integer digits, saturating
    logic [CW-1:0]   nfrac;     // fraction digits, saturating
    cmp_e            cl;        // vs lower bound
    cmp_e            cu;        // vs upper bound
  } state_t;

  state_t st, st_nx;
  logic   done, accept;

  function automatic cmp_e digit_cmp(cmp_e c, logic [3:0] d, logic [3:0] b);
    if (c != CMP_EQ) return c;
    if (d < b)       return CMP_LT;
    if (d > b)       return CMP_GT;
    return CMP_EQ;
  endfunction

  // Magnitude verdict once the integer part is complete.
  function automatic cmp_e int_verdict(logic [CW-1:0] n, logic [7:0] blen, cmp_e c);
    if (8'(n) < blen) return CMP_LT;
    if (8'(n) > blen) return CMP_GT;
    return c;
  endfunction

  function automatic logic [3:0] nib(logic [4*MAXD+7:0] v, logic [CW-1:0] i);
    return (8'(i) < v[4*MAXD +: 8]) ? v[4*i +: 4] : 4'd0;
  endfunction

  logic [3:0] dval;
  logic       c_digit, c_numeric;
  cmp_e       ml, mu;   // final magnitude verdicts
  logic       xneg, ge_l, le_u;

  assign dval      = 4'(in_data - CH_ZERO);
  assign c_digit   = is_digit(in_data);
  assign c_numeric = c_digit || in_data == CH_PLUS || in_data == CH_MINUS ||
                     in_data == CH_DOT || in_data == "e" || in_data == "E";

  always_comb begin
    st_nx = st;
    done  = 1'b0;
    unique case (st.phase)
      PH_IDLE: begin
        st_nx = '0;
        st_nx.phase = PH_IDLE;
        if (in_data == CH_MINUS) begin
          st_nx.phase = PH_SIGN;
          st_nx.neg   = 1'b1;
        end else if (c_digit) begin
          st_nx.phase   = PH_INT;
          st_nx.digits  = 1'b1;
          if (dval != 0) begin
            st_nx.nonzero = 1'b1;
            st_nx.nint    = 1;
            st_nx.cl      = digit_cmp(CMP_EQ, dval, nib(LI, 0));
            st_nx.cu      = digit_cmp(CMP_EQ, dval, nib(UI, 0));
          end
        end
      end
      PH_SIGN, PH_INT, PH_FRAC, PH_EXP: begin
        if (!c_numeric) begin
          done  = st.digits;
          st_nx = '0;
          st_nx.phase = PH_IDLE;
        end else if (c_digit) begin
          st_nx.digits = 1'b1;
          if (dval != 0) st_nx.nonzero = 1'b1;
          if (st.phase == PH_SIGN || st.phase == PH_INT) begin
            st_nx.phase = PH_INT;
            if (!(st.nint == 0 && dval == 0)) begin
              if (st.nint <= CW'(MAXD)) st_nx.nint = st.nint + 1'b1;
              st_nx.cl = digit_cmp(st.cl, dval, nib(LI, st.nint));
              st_nx.cu = digit_cmp(st.cu, dval, nib(UI, st.nint));
            end
          end else if (st.phase == PH_FRAC) begin
            if (st.nfrac <= CW'(MAXD)) st_nx.nfrac = st.nfrac + 1'b1;
            st_nx.cl = digit_cmp(st.cl, dval, nib(LF, st.nfrac));
            st_nx.cu = digit_cmp(st.cu, dval, nib(UF, st.nfrac));
          end
        end else if (in_data == CH_DOT) begin
          if (st.phase == PH_INT) begin
            st_nx.phase = PH_FRAC;
            st_nx.cl = int_verdict(st.nint, LI[4*MAXD +: 8], st.cl);
            st_nx.cu = int_verdict(st.nint, UI[4*MAXD +: 8], st.cu);
          end else if (st.phase != PH_EXP) begin
            st_nx.bad = 1'b1;
          end
        end else if (in_data == "e" || in_data == "E") begin
          if (st.digits && st.phase != PH_EXP) st_nx.phase = PH_EXP;
          else                                 st_nx.bad   = 1'b1;
        end else begin
          // '+' or '-': only legal as the sign of an exponent.
          if (st.phase != PH_EXP) st_nx.bad = 1'b1;
        end
      end
      default: st_nx = '0;
    endcase
  end

  // Verdict for the number that ends at this character.
  always_comb begin
    ml   = (st.phase == PH_INT) ? int_verdict(st.nint, LI[4*MAXD +: 8], st.cl) : st.cl;
    mu   = (st.phase == PH_INT) ? int_verdict(st.nint, UI[4*MAXD +: 8], st.cu) : st.cu;
    // Equal so far, but the bound still has non-zero fraction digits left:
    // the number is the smaller one.
    if (ml == CMP_EQ && 8'(st.nfrac) < LF[4*MAXD +: 8]) ml = CMP_LT;
    if (mu == CMP_EQ && 8'(st.nfrac) < UF[4*MAXD +: 8]) mu = CMP_LT;
    xneg = st.neg && st.nonzero;            // -0 counts as 0
    unique case ({L_NEG, xneg})
      2'b00:   ge_l = (ml != CMP_LT);
      2'b01:   ge_l = 1'b0;
      2'b10:   ge_l = 1'b1;
      default: ge_l = (ml != CMP_GT);
    endcase
    unique case ({U_NEG, xneg})
      2'b00:   le_u = (mu != CMP_GT);
      2'b01:   le_u = 1'b1;
      2'b10:   le_u = 1'b0;
      default: le_u = (mu != CMP_LT);
    endcase
    accept = !st.bad && ((st.phase == PH_EXP) ||
             ((!HAS_LOWER || ge_l) && (!HAS_UPPER || le_u)));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st  <= '0;
      hit <= 1'b0;
    end else begin
      hit <= in_valid && done && accept;
      if (in_valid) st <= st_nx;
    end
  end

endmodule
