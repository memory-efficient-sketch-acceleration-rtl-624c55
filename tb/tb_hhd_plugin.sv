// tb_hhd_plugin: end-to-end test of the heavy-hitter plugin at full size
// (D = 4 rows of 2^15 HBRICK counters, 144-slot associative memories).
//
// About 5900 single- and two-beat frames are sent on s_axis with random gaps
// while m_axis applies random backpressure:
//   - background TCP/UDP flows with a skewed popularity (DFU merges);
//   - one heavy flow of 700 packets of 60000 bytes (expansion into A3, flagged
//     as heavy hitter once its estimate passes the threshold);
//   - 1200 flows of three 60000-byte packets whose row-0 index falls in the
//     first 64 buckets, so that A2 pools overflow, entries are evicted, and
//     after 144 evictions the associative memory of row 0 is full and further
//     overflows saturate;
//   - ARP frames, which bypass the sketch.
// The sketch requests and estimates are observed inside the design and an
// independent model (H3 hashes, DFU folding by request cycle, per-entry level
// ownership, pool occupancy, eviction and saturation) recomputes every
// estimate. Every output beat is compared in order, and the hitter flag of
// every frame is checked against estimate > threshold. The estimate latency
// (18 cycles) is checked per request. Each mechanism must occur at least once.
module tb_hhd_plugin;
  import hbrick_pkg::*;
  localparam int unsigned D = 4, LOG_W = 15, DEPTH = 14, CAP = 144, LAT = 18;
  localparam int unsigned DATA_W = 512, KW = 64;
  localparam int unsigned NBG = 1500, NCOLF = 1200, NCOL = 3 * NCOLF, NHV = 700, NARP = 100;
  localparam int unsigned NF = NBG + NCOL + NHV + NARP;

  logic clk = 0, rst = 1;
  logic [CNT_W-1:0] threshold = 32'd500000;
  logic s_axis_tvalid = 0, s_axis_tready, s_axis_tlast = 0;
  logic [DATA_W-1:0] s_axis_tdata = '0;
  logic [KW-1:0] s_axis_tkeep = '0;
  logic m_axis_tvalid, m_axis_tready = 0, m_axis_tlast, m_axis_tuser_hitter;
  logic [DATA_W-1:0] m_axis_tdata;
  logic [KW-1:0] m_axis_tkeep;
  row_events_t events [D];
  logic stat_bypass, stat_hitter;

  hhd_plugin dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic int unsigned h3(input logic [103:0] key, input int row);
    logic [31:0] s;
    logic [LOG_W-1:0] h;
    s = 32'h9E37_79B9 ^ (32'(row + 1) * 32'h85EB_CA6B);
    h = '0;
    for (int b = 0; b < 104; b++) begin
      s = s ^ (s << 13); s = s ^ (s >> 17); s = s ^ (s << 5);
      if (key[b]) h ^= s[31:32-LOG_W];
    end
    return h;
  endfunction

  // ---------------- frames ----------------
  logic [DATA_W-1:0] beat_d [NF][2];
  int          nbeats [NF];
  bit          elig [NF];
  five_tuple_t key [NF];
  int unsigned size [NF];

  function automatic void put(inout logic [DATA_W-1:0] d, input int pos, input logic [7:0] b);
    d[pos*8 +: 8] = b;
  endfunction

  task automatic build_frames();
    five_tuple_t bg [64];
    five_tuple_t heavy;
    five_tuple_t col [NCOLF];
    int kinds [NF];
    int order [NF];
    int n = 0;
    for (int i = 0; i < 64; i++) bg[i] = {$urandom, $urandom, 16'($urandom), 16'($urandom), (i % 2) ? 8'd6 : 8'd17};
    for (int i = 0; i < NCOLF; i++) begin
      logic [103:0] k;
      do k = {$urandom, $urandom, $urandom, 8'd17}; while (h3(k, 0) / K >= 64);
      col[i] = k;
    end
    heavy = {32'h0A00_0001, 32'h0A00_0002, 16'd443, 16'd50000, 8'd6};
    for (int i = 0; i < NF; i++) order[i] = i;
    order.shuffle();
    for (int i = 0; i < NF; i++) begin
      int f, idx;
      logic [DATA_W-1:0] d;
      f = order[i];
      d = {16{$urandom}};
      beat_d[f][1] = {16{$urandom}};
      nbeats[f] = ($urandom_range(3) == 0) ? 2 : 1;
      elig[f] = 1;
      if (i < NBG) begin
        idx = int'(64.0 * ($urandom_range(1000) / 1000.0) ** 3);
        if (idx > 63) idx = 63;
        key[f] = bg[idx];
        size[f] = 64 + $urandom_range(1436);
      end else if (i < NBG + NCOL) begin
        key[f] = col[(i - NBG) / 3];
        size[f] = 60000;
      end else if (i < NBG + NCOL + NHV) begin
        key[f] = heavy;
        size[f] = 60000;
      end else begin
        elig[f] = 0;
        key[f] = '0;
        size[f] = 28;
      end
      put(d, 12, 8'h08); put(d, 13, elig[f] ? 8'h00 : 8'h06);
      put(d, 14, 8'h45);
      put(d, 16, size[f][15:8]); put(d, 17, size[f][7:0]);
      put(d, 23, key[f].proto);
      for (int j = 0; j < 4; j++) begin
        put(d, 26 + j, key[f].src_ip[31 - 8*j -: 8]);
        put(d, 30 + j, key[f].dst_ip[31 - 8*j -: 8]);
      end
      put(d, 34, key[f].src_port[15:8]); put(d, 35, key[f].src_port[7:0]);
      put(d, 36, key[f].dst_port[15:8]); put(d, 37, key[f].dst_port[7:0]);
      beat_d[f][0] = d;
    end
  endtask

  // ---------------- observation ----------------
  longint cyc = 0;
  longint      rq_cyc [$];
  five_tuple_t rq_key [$];
  int unsigned rq_size [$];
  longint      rs_cyc [$];
  longint unsigned rs_est [$];
  bit          out_hit [$];
  int n_ev [6];
  int n_bypass = 0, n_hitter = 0, n_in_stall = 0, n_out_stall = 0, n_notready = 0;

  always @(negedge clk) begin
    cyc++;
    if (!rst) begin
      if (dut.req_valid) begin
        rq_cyc.push_back(cyc); rq_key.push_back(dut.req_key); rq_size.push_back(dut.req_size);
      end
      if (dut.rsp_valid) begin
        rs_cyc.push_back(cyc); rs_est.push_back(dut.rsp_est);
      end
      for (int d = 0; d < D; d++) begin
        n_ev[0] += events[d].merge;    n_ev[1] += events[d].expand2; n_ev[2] += events[d].expand3;
        n_ev[3] += events[d].evict;    n_ev[4] += events[d].assoc_hit; n_ev[5] += events[d].saturate;
      end
      n_bypass += stat_bypass;
      n_hitter += stat_hitter;
      if (!dut.sk_ready) n_notready++;
    end
  end

  // ---------------- model ----------------
  typedef struct {
    longint unsigned val;
    bit own2, own3, dirty;
  } ment_t;
  ment_t           ment [D][int unsigned];
  int              pool2 [D][int unsigned];
  int              pool3 [D][int unsigned];
  int              used [D];

  function automatic longint unsigned model_access(int r, int unsigned idx, longint unsigned inc);
    ment_t e;
    longint unsigned nv, capv;
    bit need2, need3, e2, e3, ovf;
    int unsigned b;
    b = idx / K;
    if (!ment[r].exists(idx)) ment[r][idx] = '{0, 0, 0, 0};
    if (!pool2[r].exists(b)) begin pool2[r][b] = 0; pool3[r][b] = 0; end
    e = ment[r][idx];
    nv = e.val + inc;
    if (nv > 64'hFFFF_FFFF) nv = 64'hFFFF_FFFF;
    if (e.dirty) begin
      e.val = nv; ment[r][idx] = e; return nv;
    end
    need2 = nv >= (64'd1 << W1);
    need3 = nv >= (64'd1 << (W1 + W2));
    e2 = need2 && !e.own2;
    e3 = need3 && !e.own3;
    ovf = (e2 && pool2[r][b] >= K2) || (e3 && pool3[r][b] >= K3);
    if (ovf && used[r] < CAP) begin
      used[r]++;
      pool2[r][b] -= e.own2; pool3[r][b] -= e.own3;
      e = '{nv, 0, 0, 1};
    end else if (ovf) begin
      capv = e.own3 ? 64'hFFFF_FFFF : e.own2 ? (64'd1 << (W1 + W2)) - 1 : (64'd1 << W1) - 1;
      e.val = capv; nv = capv;
    end else begin
      pool2[r][b] += e2; pool3[r][b] += e3;
      e.own2 |= e2; e.own3 |= e3; e.val = nv;
    end
    ment[r][idx] = e;
    return nv;
  endfunction

  task automatic check_estimates();
    int n;
    int unsigned idx [D][];
    bit car [D][];
    longint unsigned tot [D][];
    n = rq_cyc.size();
    check(rs_cyc.size() == n, "one estimate per request");
    for (int d = 0; d < D; d++) begin
      idx[d] = new[n]; car[d] = new[n]; tot[d] = new[n];
      for (int t = 0; t < n; t++) begin
        idx[d][t] = h3(rq_key[t], d);
        car[d][t] = 1;
        tot[d][t] = rq_size[t];
        for (int p = t - 1; p >= 0 && rq_cyc[t] - rq_cyc[p] <= DEPTH - 1; p--)
          if (car[d][p] && idx[d][p] == idx[d][t]) begin
            car[d][t] = 0; tot[d][p] += rq_size[t];
          end
      end
    end
    for (int t = 0; t < n && t < rs_cyc.size(); t++) begin
      longint unsigned m, v;
      m = 64'hFFFF_FFFF;
      for (int d = 0; d < D; d++) begin
        v = model_access(d, idx[d][t], car[d][t] ? tot[d][t] : 0);
        if (v < m) m = v;
      end
      check(rs_cyc[t] - rq_cyc[t] == LAT, "estimate latency");
      check(rs_est[t] == m, "estimate");
      if (rs_est[t] != m && failures < 5) $display("  request %0d: estimate %0d, model %0d", t, rs_est[t], m);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // input driver
  initial begin
    build_frames();
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < NF; f++)
      for (int b = 0; b < nbeats[f]; b++) begin
        while ($urandom_range(4) == 0) begin s_axis_tvalid <= 0; @(posedge clk); end
        s_axis_tvalid <= 1;
        s_axis_tdata  <= beat_d[f][b];
        s_axis_tkeep  <= '1;
        s_axis_tlast  <= (b == nbeats[f] - 1);
        forever begin
          bit go;
          @(negedge clk);
          go = s_axis_tready;
          if (!go) n_in_stall++;
          @(posedge clk);
          if (go) break;
        end
      end
    s_axis_tvalid <= 0;
  end

  // output monitor and final checks
  initial begin
    int f = 0, b = 0, ei = 0;
    wait (!rst);
    while (f < NF) begin
      @(negedge clk);
      m_axis_tready = ($urandom_range(5) != 0);
      #1;
      if (m_axis_tvalid && !m_axis_tready) n_out_stall++;
      if (m_axis_tvalid && m_axis_tready) begin
        check(m_axis_tdata == beat_d[f][b] && m_axis_tlast == (b == nbeats[f] - 1), "beat data and order");
        if (b == 0) out_hit.push_back(m_axis_tuser_hitter);
        b++;
        if (b == nbeats[f]) begin b = 0; f++; end
      end
    end
    check_estimates();
    // hitter flags: eligible frames in order take the estimates in order
    for (int i = 0; i < NF; i++) begin
      if (elig[i]) begin
        check(out_hit[i] == (rs_est[ei] > threshold), "hitter flag = estimate > threshold");
        ei++;
      end else check(out_hit[i] == 0, "bypassed frame not flagged");
    end
    $display("merge=%0d expand2=%0d expand3=%0d evict=%0d assoc_hit=%0d saturate=%0d",
             n_ev[0], n_ev[1], n_ev[2], n_ev[3], n_ev[4], n_ev[5]);
    $display("bypass=%0d hitter=%0d in_stall=%0d out_stall=%0d sketch_not_ready_cycles=%0d cycles=%0d",
             n_bypass, n_hitter, n_in_stall, n_out_stall, n_notready, cyc);
    check(n_notready >= (1 << LOG_W) / K - 2, "counter clearing after reset");
    for (int i = 0; i < 6; i++) check(n_ev[i] > 0, $sformatf("sketch mechanism %0d exercised", i));
    check(n_bypass == NARP && n_hitter > 0 && n_in_stall > 0 && n_out_stall > 0, "front-end mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
