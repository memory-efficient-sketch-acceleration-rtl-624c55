// hhd_plugin: heavy-hitter detection plugin for a NIC shell (top level).
//
// Sits between the Ethernet MAC and the host DMA engine of the NIC shell.
// Every frame that arrives on s_axis (path 1) is parsed by p4_frontend; its
// five-tuple and size go to the HBRICK count-min sketch (path 2), which adds
// the size to D variable-width counters and returns the minimum as the
// flow-size estimate (path 3). The frame then leaves on m_axis towards the
// host (path 4) with m_axis_tuser_hitter set when the estimate exceeds
// `threshold`. The MAC, the DMA engine and the host are outside this module;
// their streams are the top-level ports.
//
// Timing: one frame can enter the sketch per cycle; a frame leaves about
// 20 cycles after its first beat at the defaults (sketch latency 18 plus the
// FIFOs). After reset, s_axis_tready stays low until the counter arrays are
// cleared (2^LOG_W / 8 cycles). `events` pulses for one cycle per mechanism and
// row (DFU merge, width expansion, eviction, associative hit, saturation), and
// stat_bypass / stat_hitter per frame.
module hhd_plugin
  import hbrick_pkg::*;
#(
  parameter int unsigned D         = 4,
  parameter int unsigned LOG_W     = 15,
  parameter int unsigned DFU_DEPTH = 14,
  parameter int unsigned CAP       = 144,
  parameter int unsigned DATA_W    = 512
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [CNT_W-1:0]      threshold,
  input  logic                  s_axis_tvalid,
  output logic                  s_axis_tready,
  input  logic [DATA_W-1:0]     s_axis_tdata,
  input  logic [DATA_W/8-1:0]   s_axis_tkeep,
  input  logic                  s_axis_tlast,
  output logic                  m_axis_tvalid,
  input  logic                  m_axis_tready,
  output logic [DATA_W-1:0]     m_axis_tdata,
  output logic [DATA_W/8-1:0]   m_axis_tkeep,
  output logic                  m_axis_tlast,
  output logic                  m_axis_tuser_hitter,
  output row_events_t           events [D],
  output logic                  stat_bypass,
  output logic                  stat_hitter
);

  logic             req_valid, sk_ready, rsp_valid;
  five_tuple_t      req_key;
  logic [15:0]      req_size;
  logic [CNT_W-1:0] rsp_est;

  p4_frontend #(.DATA_W(DATA_W)) u_front (
    .clk, .rst, .threshold,
    .s_axis_tvalid, .s_axis_tready, .s_axis_tdata, .s_axis_tkeep, .s_axis_tlast,
    .m_axis_tvalid, .m_axis_tready, .m_axis_tdata, .m_axis_tkeep, .m_axis_tlast,
    .m_axis_tuser_hitter,
    .sk_req_valid(req_valid), .sk_req_key(req_key), .sk_req_size(req_size),
    .sk_ready, .sk_rsp_valid(rsp_valid), .sk_rsp_estimate(rsp_est),
    .stat_bypass, .stat_hitter
  );

  cm_sketch #(.D(D), .LOG_W(LOG_W), .DFU_DEPTH(DFU_DEPTH), .CAP(CAP)) u_sketch (
    .clk, .rst,
    .req_valid, .req_key, .req_size,
    .ready(sk_ready),
    .rsp_valid, .rsp_estimate(rsp_est),
    .ev(events)
  );

endmodule
