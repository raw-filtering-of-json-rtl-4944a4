// rf_array: the raw-filter block of the programmable logic.
//
// NUM_RF identical raw filters run side by side, each on a byte stream of
// its own at one byte per clock, so the array consumes NUM_RF bytes per
// cycle: with the seven filters and 200 MHz clock of the reference system
// that is 1.4 GB/s, above the 1.25 GB/s of a 10 Gbit/s link. The streams
// come from a DMA engine reading JSON records from memory, or from a
// network interface; the per-record match bits go back through the DMA.
// Neither of those is part of this module: their sides are the ports.
//
// Interface, per lane i: in_valid[i]/in_data[i]/in_last[i] carry one byte
// of a JSON record per cycle (in_last on its last byte); a lane never
// stalls its source. res_valid[i] pulses once per record with the record's
// verdict on res_match[i], two clock edges after the record's last byte.
// Records on different lanes are independent.
//
// From the paper: seven parallel one-byte-per-cycle filters between the
// DMA and the memory. This design's own choices: how records are assigned
// to lanes (left to the source), the per-lane stream signals and the
// single clock and synchronous reset shared by all lanes.
module rf_array
  import rf_pkg::*;
#(
  parameter int unsigned NUM_RF = 7,
  parameter query_e      QUERY  = Q_QS0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NUM_RF-1:0] in_valid,
  input  byte_t             in_data [NUM_RF],
  input  logic [NUM_RF-1:0] in_last,
  output logic [NUM_RF-1:0] res_valid,
  output logic [NUM_RF-1:0] res_match
);

  for (genvar i = 0; i < NUM_RF; i++) begin : g_rf
    raw_filter #(.QUERY(QUERY)) u_rf (
      .clk,
      .rst_n,
      .in_valid (in_valid[i]),
      .in_data  (in_data[i]),
      .in_last  (in_last[i]),
      .res_valid(res_valid[i]),
      .res_match(res_match[i])
    );
  end

endmodule
