// tb_p4_frontend: packet front end with a behavioural sketch stand-in.
//
// 300 frames of 1 to 3 beats: IPv4/TCP with a 20-byte header, IPv4/UDP with
// a 24-byte header (options), ARP and IPv4/ICMP (both must bypass). The
// stand-in answers each request exactly 18 cycles later with the running sum
// of sizes of that five-tuple, and drops its ready now and then. The test
// checks every request's five-tuple and size against the frame it was built
// from, every output beat (data, keep, last, order), and the hitter flag of
// every frame (estimate > threshold, 0 for bypassed frames). Input gaps and
// output backpressure are random; stalls on both sides, bypasses and flagged
// and unflagged frames must all occur.
module tb_p4_frontend;
  import hbrick_pkg::*;
  localparam int unsigned DATA_W = 512, KW = 64, NF = 300, LAT = 18;

  logic clk = 0, rst = 1;
  logic [CNT_W-1:0] threshold = 32'd6000;
  logic s_axis_tvalid = 0, s_axis_tready, s_axis_tlast = 0;
  logic [DATA_W-1:0] s_axis_tdata = '0;
  logic [KW-1:0] s_axis_tkeep = '0;
  logic m_axis_tvalid, m_axis_tready = 0, m_axis_tlast, m_axis_tuser_hitter;
  logic [DATA_W-1:0] m_axis_tdata;
  logic [KW-1:0] m_axis_tkeep;
  logic sk_req_valid, sk_ready = 1, sk_rsp_valid;
  five_tuple_t sk_req_key;
  logic [15:0] sk_req_size;
  logic [CNT_W-1:0] sk_rsp_estimate;
  logic stat_bypass, stat_hitter;

  p4_frontend dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [DATA_W-1:0] beat_d [NF][3];
  int          nbeats [NF];
  bit          elig [NF];
  five_tuple_t key [NF];
  int unsigned size [NF];
  bit          exp_hit [NF];
  int          elig_list [$];
  longint unsigned flow_sum [five_tuple_t];
  int n_in_stall = 0, n_out_stall = 0, n_bypass = 0, n_hit = 0, n_nohit = 0, n_sk_stall = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic void put(inout logic [DATA_W-1:0] d, input int pos, input logic [7:0] b);
    d[pos*8 +: 8] = b;
  endfunction

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // build frames and the expected decisions
  initial begin
    five_tuple_t pool [12];
    for (int i = 0; i < 12; i++) pool[i] = {$urandom, $urandom, 16'($urandom), 16'($urandom), 8'd0};
    for (int f = 0; f < NF; f++) begin
      int kind, ihl, l4;
      logic [DATA_W-1:0] d;
      for (int b = 0; b < 3; b++) beat_d[f][b] = {16{$urandom}};
      nbeats[f] = 1 + $urandom_range(2);
      kind = $urandom_range(9);
      d = beat_d[f][0];
      key[f] = pool[$urandom_range(11)];
      key[f].proto = (kind < 5) ? 8'd6 : (kind < 8) ? 8'd17 : 8'd1;
      ihl = (kind >= 5 && kind < 8) ? 6 : 5;
      size[f] = 40 + $urandom_range(1460);
      put(d, 12, (kind == 9) ? 8'h08 : 8'h08); put(d, 13, (kind == 9) ? 8'h06 : 8'h00);
      put(d, 14, {4'd4, 4'(ihl)});
      put(d, 16, size[f][15:8]); put(d, 17, size[f][7:0]);
      put(d, 23, key[f].proto);
      for (int i = 0; i < 4; i++) begin
        put(d, 26 + i, key[f].src_ip[31 - 8*i -: 8]);
        put(d, 30 + i, key[f].dst_ip[31 - 8*i -: 8]);
      end
      l4 = 14 + 4 * ihl;
      put(d, l4, key[f].src_port[15:8]); put(d, l4 + 1, key[f].src_port[7:0]);
      put(d, l4 + 2, key[f].dst_port[15:8]); put(d, l4 + 3, key[f].dst_port[7:0]);
      beat_d[f][0] = d;
      elig[f] = (kind <= 7);
      if (elig[f]) begin
        if (!flow_sum.exists(key[f])) flow_sum[key[f]] = 0;
        flow_sum[key[f]] += size[f];
        exp_hit[f] = flow_sum[key[f]] > threshold;
        elig_list.push_back(f);
      end else exp_hit[f] = 0;
    end
  end

  // input driver
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < NF; f++)
      for (int b = 0; b < nbeats[f]; b++) begin
        while ($urandom_range(3) == 0) begin s_axis_tvalid <= 0; @(posedge clk); end
        s_axis_tvalid <= 1;
        s_axis_tdata  <= beat_d[f][b];
        s_axis_tkeep  <= (b == nbeats[f] - 1) ? KW'(64'hFFFF_FFFF) : '1;
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

  // behavioural sketch: fixed latency, checks requests
  int req_n = 0;
  longint unsigned stub_sum [five_tuple_t];
  logic [CNT_W-1:0] pipe_est [LAT];
  bit pipe_v [LAT];
  always @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < LAT; i++) pipe_v[i] <= 0;
    end else begin
      logic [CNT_W-1:0] e;
      e = '0;
      if (sk_req_valid) begin
        int f;
        f = elig_list[req_n];
        check(sk_ready, "request only while ready");
        check(sk_req_key == key[f], "five-tuple extracted");
        check(sk_req_size == 16'(size[f]), "size extracted");
        if (!stub_sum.exists(sk_req_key)) stub_sum[sk_req_key] = 0;
        stub_sum[sk_req_key] += sk_req_size;
        e = CNT_W'(stub_sum[sk_req_key]);
        req_n++;
      end
      pipe_v[0] <= sk_req_valid; pipe_est[0] <= e;
      for (int i = 1; i < LAT; i++) begin pipe_v[i] <= pipe_v[i-1]; pipe_est[i] <= pipe_est[i-1]; end
      sk_ready <= ($urandom_range(15) != 0);
      if (!sk_ready) n_sk_stall++;
    end
  end
  assign sk_rsp_valid    = pipe_v[LAT-1];
  assign sk_rsp_estimate = pipe_est[LAT-1];

  // output monitor
  initial begin
    int f = 0, b = 0;
    wait (!rst);
    while (f < NF) begin
      @(negedge clk);
      m_axis_tready = ($urandom_range(4) != 0);
      #1;
      if (m_axis_tvalid && !m_axis_tready) n_out_stall++;
      if (m_axis_tvalid && m_axis_tready) begin
        check(m_axis_tdata == beat_d[f][b], "beat data");
        check(m_axis_tlast == (b == nbeats[f] - 1), "tlast");
        check(m_axis_tkeep == ((b == nbeats[f] - 1) ? KW'(64'hFFFF_FFFF) : '1), "tkeep");
        check(m_axis_tuser_hitter == exp_hit[f], "hitter flag");
        if (b == 0) begin
          if (!elig[f]) n_bypass++;
          else if (exp_hit[f]) n_hit++;
          else n_nohit++;
        end
        b++;
        if (b == nbeats[f]) begin b = 0; f++; end
      end
    end
    check(req_n == elig_list.size(), "one request per eligible frame");
    $display("in_stall=%0d out_stall=%0d sketch_not_ready=%0d bypass=%0d hitter=%0d normal=%0d",
             n_in_stall, n_out_stall, n_sk_stall, n_bypass, n_hit, n_nohit);
    check(n_in_stall > 0 && n_out_stall > 0 && n_bypass > 0 && n_hit > 0 && n_nohit > 0, "mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
