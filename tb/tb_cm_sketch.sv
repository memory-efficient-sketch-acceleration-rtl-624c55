// tb_cm_sketch: count-min sketch engine, default size (D = 4, W = 2^15).
//
// A model hashes each key with an independent re-implementation of the H3
// rows, applies the DFU folding rule per row, keeps exact per-entry counts and
// takes the minimum over the rows. Traffic: 200 random flows picked with a
// skewed (cubic) distribution, plus six flows that were searched so that they
// occupy six different entries of one bucket of row 0 and carry large sizes (flow 200 most of them), forcing expansion into A2
// and A3 and evictions to the associative memory in that row. Each estimate
// must match the model and arrive 18 cycles (1 + DFU_DEPTH + 2 + 1) after its
// request; merges, expansions, evictions and associative hits must occur.
module tb_cm_sketch;
  import hbrick_pkg::*;
  localparam int unsigned D = 4, LOG_W = 15, DEPTH = 14, LAT = DEPTH + 4, N = 6000;

  logic clk = 0, rst = 1;
  logic req_valid = 0;
  five_tuple_t req_key;
  logic [15:0] req_size = '0;
  logic ready, rsp_valid;
  logic [CNT_W-1:0] rsp_estimate;
  row_events_t ev [D];

  cm_sketch dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [103:0]    flows [206];
  bit              v_h [N + LAT];
  logic [103:0]    key_h [N + LAT];
  longint unsigned inc_h [N + LAT];
  int unsigned     idx_h [D][N + LAT];
  bit              car_h [D][N + LAT];
  longint unsigned tot_h [D][N + LAT];
  longint unsigned exp_h [N + LAT];
  longint unsigned cnt [D][int unsigned];
  int n_merge = 0, n_e2 = 0, n_e3 = 0, n_ev = 0, n_hit = 0;

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

  always @(posedge clk) if (!rst)
    for (int d = 0; d < D; d++) begin
      n_merge += ev[d].merge; n_e2 += ev[d].expand2; n_e3 += ev[d].expand3;
      n_ev += ev[d].evict; n_hit += ev[d].assoc_hit;
    end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nf, f;
    longint unsigned m;
    logic [103:0] k;
    // flows 0..199 random, 200..205 share bucket 77 of row 0
    for (int i = 0; i < 200; i++) flows[i] = {$urandom, $urandom, $urandom, 8'($urandom)};
    nf = 200;
    while (nf < 206) begin
      k = {$urandom, $urandom, $urandom, 8'd17};
      if (h3(k, 0) / K == 77 && h3(k, 0) % K == nf - 200) begin flows[nf] = k; nf++; end
    end
    for (int t = 0; t < N + LAT; t++) begin
      v_h[t] = (t < N) && ($urandom_range(9) < 8);
      if ($urandom_range(3) == 0) begin
        f = ($urandom_range(3) != 0) ? 200 : 200 + $urandom_range(5);
        inc_h[t] = 60000 + $urandom_range(5535);
      end else begin
        f = int'(200.0 * ($urandom_range(1000) / 1000.0) ** 3);
        if (f > 199) f = 199;
        inc_h[t] = 64 + $urandom_range(1436);
      end
      key_h[t] = flows[f];
      for (int d = 0; d < D; d++) begin
        idx_h[d][t] = h3(key_h[t], d);
        car_h[d][t] = v_h[t];
        tot_h[d][t] = inc_h[t];
        if (v_h[t])
          for (int p = t - 1; p >= 0 && p > t - int'(DEPTH); p--)
            if (v_h[p] && car_h[d][p] && idx_h[d][p] == idx_h[d][t]) begin
              car_h[d][t] = 0;
              tot_h[d][p] += inc_h[t];
            end
      end
    end
    for (int t = 0; t < N; t++) if (v_h[t]) begin
      m = 64'hFFFF_FFFF;
      for (int d = 0; d < D; d++) begin
        if (!cnt[d].exists(idx_h[d][t])) cnt[d][idx_h[d][t]] = 0;
        if (car_h[d][t]) cnt[d][idx_h[d][t]] += tot_h[d][t];
        if (cnt[d][idx_h[d][t]] < m) m = cnt[d][idx_h[d][t]];
      end
      exp_h[t] = m;
    end

    req_key = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    check(!ready, "not ready while clearing");
    wait (ready);
    @(posedge clk);
    for (int t = 0; t < N + LAT; t++) begin
      req_valid <= v_h[t]; req_key <= key_h[t]; req_size <= 16'(inc_h[t]);
      @(posedge clk);
      #1;
      if (t + 1 >= LAT) begin
        int s;
        s = t + 1 - int'(LAT);
        check(rsp_valid == v_h[s], "estimate 18 cycles after request");
        if (v_h[s]) check(rsp_estimate == CNT_W'(exp_h[s]), "estimate = min over rows");
      end
    end
    $display("merge=%0d expand2=%0d expand3=%0d evict=%0d assoc_hit=%0d", n_merge, n_e2, n_e3, n_ev, n_hit);
    check(n_merge > 0 && n_e2 > 0 && n_e3 > 0 && n_ev > 0 && n_hit > 0, "mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
