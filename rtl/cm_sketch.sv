// cm_sketch: count-min sketch engine built from HBRICK counter arrays.
//
// Each packet (flow key, size) is hashed by D independent hash functions;
// row d adds the size to entry h_d(key) of its own counter array. The D
// updated counts come back after the same fixed latency and their minimum is
// the flow-size estimate returned for that packet. One packet is accepted per
// cycle whenever ready is high; there is no backpressure after that.
//
// Latency: 1 (hash) + DFU_DEPTH + 2 (bucket read, update) + 1 (minimum) cycles
// = 18 at the defaults. ready falls after reset while the counter arrays are
// zeroed (2^LOG_W / K cycles).
//
// Update-then-estimate per packet, D = 4 rows of 2^15 entries, follows the
// design; the min tree registered once is this design's choice.
module cm_sketch
  import hbrick_pkg::*;
#(
  parameter int unsigned D         = 4,
  parameter int unsigned LOG_W     = 15,
  parameter int unsigned DFU_DEPTH = 14,
  parameter int unsigned CAP       = 144
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               req_valid,
  input  five_tuple_t        req_key,
  input  logic [15:0]        req_size,
  output logic               ready,
  output logic               rsp_valid,
  output logic [CNT_W-1:0]   rsp_estimate,
  output row_events_t        ev [D]
);

  logic [D-1:0]     h_valid, r_valid, r_ready;
  logic [LOG_W-1:0] h_idx [D];
  logic [CNT_W-1:0] h_inc [D];
  logic [CNT_W-1:0] r_val [D];
  logic [CNT_W-1:0] min_v;

  for (genvar d = 0; d < D; d++) begin : g_row
    hash_unit #(.LOG_W(LOG_W), .ROW(d)) u_hash (
      .clk, .rst,
      .in_valid (req_valid && ready),
      .in_key   (req_key),
      .in_inc   (CNT_W'(req_size)),
      .out_valid(h_valid[d]),
      .out_idx  (h_idx[d]),
      .out_inc  (h_inc[d])
    );
    hbrick_counter #(.LOG_W(LOG_W), .DFU_DEPTH(DFU_DEPTH), .CAP(CAP)) u_row (
      .clk, .rst,
      .in_valid (h_valid[d]),
      .in_idx   (h_idx[d]),
      .in_inc   (h_inc[d]),
      .out_valid(r_valid[d]),
      .out_value(r_val[d]),
      .ready    (r_ready[d]),
      .ev       (ev[d])
    );
  end

  always_comb begin
    min_v = CNT_MAX;
    for (int unsigned d = 0; d < D; d++) if (r_val[d] < min_v) min_v = r_val[d];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rsp_valid <= 1'b0;
      ready     <= 1'b0;
    end else begin
      rsp_valid <= r_valid[0];
      ready     <= &r_ready;
    end
    rsp_estimate <= min_v;
  end

  // all rows run in lock step
  always_ff @(posedge clk) if (!rst) assert (r_valid == '0 || r_valid == '1) else $error("cm_sketch: rows out of step");

endmodule
