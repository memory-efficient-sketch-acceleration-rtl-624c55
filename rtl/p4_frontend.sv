// p4_frontend: packet front end of the heavy-hitter plugin.
//
// Sits in the packet path between the MAC (s_axis) and the host DMA (m_axis),
// an AXI4-Stream of DATA_W bits, byte 0 of the frame in tdata[7:0]. On the
// first beat of each frame it parses Ethernet / IPv4 / TCP-or-UDP and sends the
// five-tuple with the IPv4 total length as packet size to the sketch engine
// (sk_req_*). The frame itself goes into a packet FIFO. Responses come back in
// order (sk_rsp_*); the front end compares the estimate with `threshold` and
// releases the frame with m_axis_tuser_hitter = (estimate > threshold) on all
// of its beats. Frames that are not IPv4 TCP/UDP, or whose IPv4 header puts the
// ports beyond the first beat (IHL > 11 at 512 bits), bypass the sketch and
// leave with hitter = 0, still in arrival order.
//
// Flow control: s_axis_tready drops when the packet FIFO is full, or, on a
// first beat, when the per-frame decision FIFO is full, the sketch is not
// ready, or META_DEPTH sketch results are already outstanding (a credit count
// that guarantees the response FIFO never overflows). The sketch itself has no
// backpressure. Output follows m_axis_tready.
//
// The role (extract the flow key, call the sketch, set a heavy-hitter flag
// when flow_size > THRESHOLD, forward the packet) is that of the P4 program of
// the design. Using the IPv4 length as size, the sideband flag, the bypass
// rule and the buffering are this design's choices.
module p4_frontend
  import hbrick_pkg::*;
#(
  parameter int unsigned DATA_W     = 512,
  parameter int unsigned PKT_DEPTH  = 64,
  parameter int unsigned META_DEPTH = 32
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [CNT_W-1:0]      threshold,
  // from the MAC
  input  logic                  s_axis_tvalid,
  output logic                  s_axis_tready,
  input  logic [DATA_W-1:0]     s_axis_tdata,
  input  logic [DATA_W/8-1:0]   s_axis_tkeep,
  input  logic                  s_axis_tlast,
  // to the host DMA
  output logic                  m_axis_tvalid,
  input  logic                  m_axis_tready,
  output logic [DATA_W-1:0]     m_axis_tdata,
  output logic [DATA_W/8-1:0]   m_axis_tkeep,
  output logic                  m_axis_tlast,
  output logic                  m_axis_tuser_hitter,
  // sketch engine
  output logic                  sk_req_valid,
  output five_tuple_t           sk_req_key,
  output logic [15:0]           sk_req_size,
  input  logic                  sk_ready,
  input  logic                  sk_rsp_valid,
  input  logic [CNT_W-1:0]      sk_rsp_estimate,
  // per-frame status pulses
  output logic                  stat_bypass,
  output logic                  stat_hitter
);

  localparam int unsigned KEEP_W = DATA_W / 8;
  localparam int unsigned BEAT_W = DATA_W + KEEP_W + 1;
  localparam int unsigned MCW    = $clog2(META_DEPTH + 1);
  localparam int unsigned MAX_IHL = (KEEP_W - 18) / 4;   // ports must sit in beat 0

  // ---------------- header parsing on the first beat ----------------
  function automatic logic [7:0] byte_at(input logic [DATA_W-1:0] d, input int unsigned n);
    return d[n*8 +: 8];
  endfunction

  logic        in_first;
  logic [15:0] ethertype, tot_len;
  logic [3:0]  ver, ihl;
  logic [7:0]  proto;
  logic        eligible;
  int unsigned l4;

  always_comb begin
    ethertype = {byte_at(s_axis_tdata, 12), byte_at(s_axis_tdata, 13)};
    ver       = byte_at(s_axis_tdata, 14)[7:4];
    ihl       = byte_at(s_axis_tdata, 14)[3:0];
    tot_len   = {byte_at(s_axis_tdata, 16), byte_at(s_axis_tdata, 17)};
    proto     = byte_at(s_axis_tdata, 23);
    l4        = 14 + 4 * ((ihl > 4'(MAX_IHL)) ? MAX_IHL : 32'(ihl));
    eligible  = (ethertype == 16'h0800) && (ver == 4'd4) && (ihl >= 4'd5) &&
                (ihl <= 4'(MAX_IHL)) && (proto == 8'd6 || proto == 8'd17);
    sk_req_key.src_ip   = {byte_at(s_axis_tdata, 26), byte_at(s_axis_tdata, 27),
                           byte_at(s_axis_tdata, 28), byte_at(s_axis_tdata, 29)};
    sk_req_key.dst_ip   = {byte_at(s_axis_tdata, 30), byte_at(s_axis_tdata, 31),
                           byte_at(s_axis_tdata, 32), byte_at(s_axis_tdata, 33)};
    sk_req_key.src_port = {byte_at(s_axis_tdata, l4),     byte_at(s_axis_tdata, l4 + 1)};
    sk_req_key.dst_port = {byte_at(s_axis_tdata, l4 + 2), byte_at(s_axis_tdata, l4 + 3)};
    sk_req_key.proto    = proto;
    sk_req_size         = tot_len;
  end

  // ---------------- buffers ----------------
  logic              pkt_full, pkt_empty, pkt_pop;
  logic [BEAT_W-1:0] pkt_head;
  logic              pend_full, pend_empty, pend_pop, pend_head;
  logic              rsp_empty, rsp_pop, rsp_head;
  logic [MCW-1:0]    inflight;
  logic              first_ok, accept;

  always_comb begin
    first_ok = !pend_full && (!eligible || (sk_ready && inflight < MCW'(META_DEPTH)));
    s_axis_tready = !pkt_full && (!in_first || first_ok);
    accept        = s_axis_tvalid && s_axis_tready;
    sk_req_valid  = accept && in_first && eligible;
  end

  sync_fifo #(.WIDTH(BEAT_W), .DEPTH(PKT_DEPTH)) u_pkt (
    .clk, .rst,
    .push(accept), .wr_data({s_axis_tlast, s_axis_tkeep, s_axis_tdata}),
    .pop(pkt_pop), .rd_data(pkt_head), .empty(pkt_empty), .full(pkt_full), .count()
  );

  // per-frame decision slot: 1 = bypass (no sketch result expected)
  sync_fifo #(.WIDTH(1), .DEPTH(META_DEPTH)) u_pend (
    .clk, .rst,
    .push(accept && in_first), .wr_data(!eligible),
    .pop(pend_pop), .rd_data(pend_head), .empty(pend_empty), .full(pend_full), .count()
  );

  sync_fifo #(.WIDTH(1), .DEPTH(META_DEPTH)) u_rsp (
    .clk, .rst,
    .push(sk_rsp_valid), .wr_data(sk_rsp_estimate > threshold),
    .pop(rsp_pop), .rd_data(rsp_head), .empty(rsp_empty), .full(), .count()
  );

  // ---------------- output ----------------
  logic out_first, cur_hitter, decided, decision, fire;

  always_comb begin
    decided  = !pend_empty && (pend_head || !rsp_empty);
    decision = !pend_head && rsp_head;
    m_axis_tvalid       = !pkt_empty && (!out_first || decided);
    {m_axis_tlast, m_axis_tkeep, m_axis_tdata} = pkt_head;
    m_axis_tuser_hitter = out_first ? decision : cur_hitter;
    fire     = m_axis_tvalid && m_axis_tready;
    pkt_pop  = fire;
    pend_pop = fire && out_first;
    rsp_pop  = fire && out_first && !pend_head;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      in_first    <= 1'b1;
      out_first   <= 1'b1;
      cur_hitter  <= 1'b0;
      inflight    <= '0;
      stat_bypass <= 1'b0;
      stat_hitter <= 1'b0;
    end else begin
      if (accept) in_first <= s_axis_tlast;
      if (fire) begin
        out_first <= m_axis_tlast;
        if (out_first) cur_hitter <= decision;
      end
      inflight    <= inflight + MCW'(sk_req_valid) - MCW'(rsp_pop);
      stat_bypass <= accept && in_first && !eligible;
      stat_hitter <= fire && out_first && decision;
    end
  end

endmodule
