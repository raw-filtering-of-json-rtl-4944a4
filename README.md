# Raw filters for JSON byte streams

Software that consumes JSON spends much of its time parsing records it then
throws away. A *raw filter* sits in front of the parser and looks at the raw
bytes, one byte per clock, without building any parse tree. For each record it
answers one question: *could this record satisfy the query?* The answer may be
"yes" for records the query later rejects (a false positive, removed by the
software parser), but it must never be "no" for a record the query accepts.
Because of that one-sided guarantee the filters can be small and approximate,
and still remove most of the stream when the query is selective.

This RTL implements the filter primitives and their composition for the
SenML-style IoT records of the RiotBench SmartCity data set and for the flat
records of its Taxi data set, plus an array of seven filters that runs at one
byte per clock per filter.

## The primitives

### Approximate string search, `s_B(str)` — `string_matcher`

An exact matcher for an N-byte string either keeps N states or compares N
buffered bytes at once. This matcher keeps only the last **B** bytes of the
stream. Every cycle it compares that B-byte window with **all N−B+1 substrings
of length B** of the search string and ORs the results. A counter counts how
many consecutive windows hit some substring. It is cleared as soon as a window
misses. When it reaches N−B+1 the block reports a match, and the counter stops
there.

For `"temperature"` with B = 2 the substrings are `te em mp pe er ra at tu ur
re`. The word produces ten hitting windows in a row, so it is always found.
A text such as `"erature temp"` breaks the run at the blank and is not. The
search misfires only on a run of N−B+1 windows that are all substrings but do
not spell the word, e.g. `tolls_amount` against `total_amount` when B = 1.

* B = N gives an exact full-length comparison.
* B = 1 reduces to "N consecutive characters taken from the string's
  alphabet". This is the cheapest setting and is enough for long names.

The window and the counter are both registers. `match` therefore rises two
clock edges after the last character of the string arrives. It stays high
while the following windows still hit.

### Number ranges, `v(lo ≤ x ≤ hi)` — `number_range_matcher`

Numbers in the stream are checked against a closed range by one finite
automaton that covers both bounds. It reads the number digit by digit.

* **Integer part.** Leading zeros are skipped. Each further digit is compared
  with the bound's digit at the same position. The automaton keeps one
  three-valued state per bound (less, equal or greater so far) and a count of
  significant digits. When the integer part ends, the digit count decides if
  the lengths differ. Otherwise the positional comparison decides.
* **Fraction.** If the number still equals a bound, each fraction digit is
  compared with the bound's fraction, padded with zeros. If the number ends
  while still equal and the bound has non-zero fraction digits left, the
  number is the smaller one.
* **Sign.** A leading `-` flips the comparison. `-0` counts as 0.
* **Exponent.** Any number in which a digit is followed by `e` or `E` is
  accepted outright. Its value cannot be followed by an automaton, and
  accepting it cannot cause a false negative.

Digits, `+`, `-`, `.`, `e` and `E` belong to a number. The automaton is
evaluated at the first other character, and `hit` pulses one edge later if
the number was in range. The automaton then restarts. Numbers are found
whether or not they are quoted: SenML stores its values as strings
(`"v":"35.2"`).

The bounds are parameters written as decimal strings, e.g.
`.LOWER("83.36"), .UPPER("3322.67")`. They are decoded into digit tables by
constant functions at elaboration. `HAS_LOWER` / `HAS_UPPER` build one-sided
filters such as `i ≥ 35`.

### Structure without parsing — `json_structure`

Pairing a name with a value needs a little structure. In the record

```
{"e":[{"v":"35.2","u":"far","n":"temperature"},
      {"v":"12","u":"per","n":"humidity"}, ...],"bt":1422748800000}
```

the string `temperature` occurs, and so do numbers inside the range
0.7…35.1. The temperature reading itself (35.2) is outside the range, though.
`json_structure` follows just enough syntax to tell the objects apart:

* A quote toggles a string mask.
* Inside a string a backslash escapes the next byte. So `\"` does not end
  the string, and `\\"` does.
* Outside strings, `{`/`[` raise a nesting counter and `}`/`]` lower it, and
  `,` separates members.

The block outputs one registered event word per byte: open, close, comma,
end of record, the string mask and the nesting level in force *before* the
byte. Its latency is one edge. The counter and the mask restart after every
record.

### Combining within a context, `{RF1 & RF2}` — `struct_group`

A group ANDs the hits of K primitives, but only hits that fall into the same
context count together. Each member hit sets a flag of the current context.
The group fires in any cycle in which all K flags of that context are set,
counting the hits of the cycle itself. There are two scopes:

* `SCOPE_LEVEL`: one flag set per nesting level. Closing a level clears its
  flags, so `"n":"temperature"` and `"v":"35.2"` only pair up inside the same
  sensor object. Levels from `MAX_LEVELS-1` upward share one flag set that is
  not cleared. Unusually deep nesting can therefore add false positives,
  never false negatives.
* `SCOPE_KEYVALUE`: a single flag set, cleared at every unescaped comma and
  bracket. A key and its value must appear between the same separators, as in
  `"tolls_amount":2.5,`.

**Timing contract.** This is the subtle part of the design. A number is
recognised only at the character that ends it, and that character may itself
be the `,` or `}` that closes the context. The latencies are chosen so that
every hit arrives no later than the structural event of the character ending
its token:

| source | latency | relative to |
|---|---|---|
| `string_matcher` | 2 edges | last character of the string |
| `number_range_matcher` | 1 edge | the character ending the number |
| `json_structure` events | 1 edge | the structural character |

The group attributes hits that arrive together with an event to the context
the event *leaves*. If you change a latency, keep this ordering.

## A complete filter — `raw_filter`

A filter is a conjunction of groups `{s_B("name") & v(lo..hi)}`, one per
attribute. Each group has its own string matcher, number matcher and
`struct_group`, and all groups share one `json_structure`. A per-record flag
remembers which groups have fired. At the end of the record (the `in_last`
byte, seen one edge later by the structure tracker) the flags are ANDed. The
result comes out on `res_valid`/`res_match` two edges after the last byte.
Records may follow each other with no gap.

The `QUERY` parameter selects one of three built-in configurations. Each is
the cheapest design point with no false positives found for one benchmark
query. The queries are range predicates over five attributes each:

| `QUERY` | data set | groups | scope |
|---|---|---|---|
| `Q_QS0` (default) | SmartCity | temperature 0.7–35.1, humidity 20.3–69.1, light 0–5153, dust 83.36–3322.67, airquality_raw 12–49; all `s_1` | nesting level |
| `Q_QS1` | SmartCity | light 1345–26282, dust 186.61–5188.21, airquality_raw 17–363; all `s_1` | nesting level |
| `Q_QT` | Taxi | tip_amount 0.65–38.55, tolls_amount 2.5–18.0; both `s_2` | key/value |

QS1 and QT do not filter every attribute of their query. In the benchmark
data the remaining attributes are strongly correlated with the filtered ones,
so the filtered ones are enough to reach zero false positives on that data.
On other data the same filters still produce no false negatives, but they can
let more records through.

Another query is added by extending the tables of functions at the top of
`raw_filter.sv`. Search strings are limited to 16 characters. Bounds are
limited to 16 characters and 8 integer and 8 fraction digits.

## The array — `rf_array`

`rf_array` instantiates `NUM_RF = 7` filters, each fed by its own byte lane.
At 200 MHz that is 7 × 200 MB/s = 1.4 GB/s. A 10 Gbit/s link needs
1.25 GB/s, so the array keeps up with line rate. The blocks around the array
are not part of this RTL:

* the DMA engine that reads records from memory and returns the match bits;
* the processor and memory;
* an optional network interface or PCIe link.

Their sides of the interface are the ports: per lane, `in_valid`, `in_data`
and `in_last` in, and `res_valid` and `res_match` out. A lane never stalls
its source, and a source may pause between any two bytes. Assigning whole
records to lanes is the source's job.

## What follows the reference design and what does not

Taken from the published design:

* the substring-window matcher with OR, counter, clear and threshold N−B+1;
* digit-serial range automata evaluated at the end of a number, with blanket
  acceptance of exponent notation;
* the nesting counter with an escape-aware string mask;
* context-restricted conjunction;
* the query configurations and their bounds;
* seven one-byte-per-cycle filters.

Choices made here, where the reference is silent or differs:

* **Range automata.** The reference derives a regular expression per range
  and synthesises the minimised DFA. Here one parameterised comparison
  automaton is written instead. It accepts the same decimal numbers, but its
  area will differ from a hand-minimised DFA. Ill-formed numbers (two `.`,
  `-` after a digit) are rejected.
* **Integer ranges.** A fraction in the stream is compared exactly, so 49.5
  fails `i ≤ 49`. Negative numbers and negative bounds are supported.
* **Record framing.** Records are framed by an `in_last` flag, and the result
  is one bit per record. The reference does not say how records are
  delimited.
* **Group scopes.** Flags are kept per level, 8 levels deep. Brackets also
  separate key/value pairs. The SmartCity configurations use the level scope,
  and Taxi uses the key/value scope. The reference writes both as `{…}`.
* **Default query.** QS0 is the default configuration. The reference does
  not name the query its hardware ran.
* **Not implemented.** There is no forwarding of the accepted records
  themselves: only match bits are produced, as in the reference experiment.
  There is no built-in disjunction either; all published configurations are
  pure conjunctions.
* **Not checked.** Resource counts (LUTs) and the 200 MHz clock target have
  not been reproduced.

## Files

| file | contents |
|---|---|
| `rtl/rf_pkg.sv` | byte and beat types, JSON character codes, scope and query enums |
| `rtl/string_matcher.sv` | `s_B(str)` |
| `rtl/number_range_matcher.sv` | `v(lo ≤ x ≤ hi)` |
| `rtl/json_structure.sv` | string mask, nesting level, structural events |
| `rtl/struct_group.sv` | `{RF1 & … & RFK}` within a context |
| `rtl/raw_filter.sv` | complete filter, built-in query configurations |
| `rtl/rf_array.sv` | seven-lane top level |
| `tb/tb_*.sv` | one self-checking bench per module |

## Simulating

Every bench prints `TB_RESULT checks=N failures=M` and stops itself through a
cycle-count watchdog. The benches compute their expected results on their
own: string checks use SV string operations, and values are written as
scaled integers and compared arithmetically. Example, from the top of the
tree:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/rf_pkg.sv \
          tb/tb_rf_array.sv --top-module tb_rf_array
./obj_dir/Vtb_rf_array
```

Replace `tb_rf_array` with `tb_string_matcher`, `tb_number_range_matcher`,
`tb_json_structure`, `tb_struct_group` or `tb_raw_filter` to run the others.

* `tb_rf_array` runs the full array with default parameters. Seven lanes carry
  SenML records, first back to back and then with pauses. The records include
  ones where the name and an in-range value sit in different objects (these
  must be rejected), exponent-notation values and strings full of escaped
  quotes and brackets. The bench checks every verdict, the two-cycle result
  latency and one byte per cycle per lane.
* `tb_raw_filter` runs the three built-in configurations on generated
  SmartCity and Taxi streams. It checks every verdict against the
  configuration and confirms that no record accepted by the full query is
  dropped. It also reports the false positives with respect to the full
  query.

All benches run in well under a second with Verilator.
