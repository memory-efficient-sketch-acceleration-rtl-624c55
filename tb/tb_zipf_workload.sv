// tb_zipf_workload: accuracy of the HBRICK count-min sketch on Zipf traffic.
//
// Runs the sketch engine at its default size (D = 4, W = 2^15) on synthetic
// packet streams whose flow popularity follows a Zipf law with exponent s,
// for s = 0 to 1.5 in steps of 0.25. Each stream has NPKT = 3 million
// packets drawn from a universe of NFLOW = 2^19 flows (flow i chosen with probability proportional to
// 1/(i+1)^s, sampled by binary search in the cumulative distribution), with
// packet sizes uniform in 64..1500 bytes, one packet per cycle. After the
// stream every flow that occurred is queried with a zero-size request, and the
// estimate is compared with the exact flow size. A count-min sketch must never
// under-estimate, so every estimate below the true size is a failure
// (unless an entry saturated); the
// average absolute error (estimate - true size, averaged over the flows) is
// reported per stream. The engine is reset between streams.
module tb_zipf_workload;
  import hbrick_pkg::*;
  localparam int unsigned NPKT = 3000000, NFLOW = 524288, LAT = 18;

  logic clk = 0, rst = 1;
  logic req_valid = 0;
  five_tuple_t req_key;
  logic [15:0] req_size = '0;
  logic ready, rsp_valid;
  logic [CNT_W-1:0] rsp_estimate;
  row_events_t ev [CFG_D];

  cm_sketch dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  five_tuple_t     fkey [NFLOW];
  real             cdf [NFLOW];
  longint unsigned truth [NFLOW];
  int              qlist [$];
  longint unsigned est [$];
  int n_evict = 0, n_sat = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    if (!rst && rsp_valid) est.push_back(rsp_estimate);
    if (!rst) for (int d = 0; d < CFG_D; d++) begin n_evict += ev[d].evict; n_sat += ev[d].saturate; end
  end

  function automatic int sample();
    real u;
    int lo, hi, mid;
    u = real'($urandom) / 4294967296.0;
    lo = 0; hi = NFLOW - 1;
    while (lo < hi) begin
      mid = (lo + hi) / 2;
      if (cdf[mid] > u) hi = mid; else lo = mid + 1;
    end
    return lo;
  endfunction

  initial begin
    repeat (8 * (NPKT + NFLOW + 10000)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real skew [7] = '{0.0, 0.25, 0.5, 0.75, 1.0, 1.25, 1.5};
    for (int i = 0; i < NFLOW; i++) fkey[i] = {$urandom, $urandom, 16'($urandom), 16'($urandom), 8'd6};
    req_key = '0;
    foreach (skew[si]) begin
      real tot, err;
      int nf, under;
      tot = 0;
      for (int i = 0; i < NFLOW; i++) begin tot += 1.0 / ((i + 1.0) ** skew[si]); cdf[i] = tot; end
      for (int i = 0; i < NFLOW; i++) begin cdf[i] /= tot; truth[i] = 0; end
      est.delete(); qlist.delete();
      n_evict = 0; n_sat = 0;
      rst <= 1;
      repeat (3) @(posedge clk);
      rst <= 0;
      @(posedge clk);
      wait (ready);
      @(posedge clk);
      for (int p = 0; p < NPKT; p++) begin
        int f, sz;
        f = sample();
        sz = 64 + $urandom_range(1436);
        truth[f] += sz;
        req_valid <= 1; req_key <= fkey[f]; req_size <= 16'(sz);
        @(posedge clk);
      end
      for (int i = 0; i < NFLOW; i++) if (truth[i] != 0) begin
        qlist.push_back(i);
        req_valid <= 1; req_key <= fkey[i]; req_size <= '0;
        @(posedge clk);
      end
      req_valid <= 0;
      repeat (LAT + 4) @(posedge clk);
      // the first NPKT estimates belong to the stream, the rest to the queries
      check(est.size() == NPKT + qlist.size(), "one estimate per request");
      err = 0; under = 0;
      nf = qlist.size();
      for (int q = 0; q < nf; q++) begin
        longint unsigned e, t;
        e = est[NPKT + q];
        t = truth[qlist[q]];
        check(e >= t || n_sat > 0, "estimate not below the true flow size");
        if (e < t) under++;
        else err += real'(e - t);
      end
      $display("zipf s=%0.2f packets=%0d flows=%0d avg_abs_error=%0.1f evictions=%0d saturations=%0d underestimates=%0d",
               skew[si], NPKT, nf, err / nf, n_evict, n_sat, under);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
