// tb_hbrick_bucket_update: random update sequences on one HBRICK bucket.
//
// A behavioural model keeps, for each of the K entries, its full count, which
// optional levels it owns and whether it was evicted (with the evicted count
// kept aside, as the associative memory would). After every update the test
// compares the flags and value the block reports, checks the index and dirty
// columns of the new bucket word, and decodes every entry of the word by rank
// to compare it with the model. Increments are mostly packet-sized with
// occasional large jumps so that expansion into A2 and A3, pool overflow,
// eviction and saturation (associative memory full) all occur.
module tb_hbrick_bucket_update;
  import hbrick_pkg::*;

  bucket_t          bkt_in, bkt_out;
  logic [LOG_K-1:0] j;
  logic [CNT_W-1:0] inc, value;
  logic             assoc_free, dirty, evict, expand2, expand3, saturate;

  hbrick_bucket_update dut (.*);

  int checks = 0, failures = 0;
  longint unsigned mval [K];
  bit own2 [K], own3 [K], mdirty [K];
  int n_exp2 = 0, n_exp3 = 0, n_evict = 0, n_sat = 0, n_dirty = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic longint unsigned decode(input bucket_t b, input int e);
    int r2 = 0, r3 = 0;
    longint unsigned v;
    for (int t = 0; t < e; t++) begin r2 += b.i2[t]; r3 += b.i3[t]; end
    v = b.a1[e*W1 +: W1];
    if (b.i2[e]) v |= longint'(b.a2[r2*W2 +: W2]) << W1;
    if (b.i3[e]) v |= longint'(b.a3[r3*W3 +: W3]) << (W1 + W2);
    return v;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned nv, capv, expv;
    bit need2, need3, e2, e3, ovf;
    int n2, n3;
    for (int run = 0; run < 40; run++) begin
      bkt_in = '0;
      for (int e = 0; e < K; e++) begin mval[e] = 0; own2[e] = 0; own3[e] = 0; mdirty[e] = 0; end
      for (int op = 0; op < 400; op++) begin
        j = LOG_K'($urandom_range(K - 1));
        case ($urandom_range(9))
          0:       inc = CNT_W'($urandom_range(1 << 20));
          1:       inc = CNT_W'($urandom_range(1 << 25));
          default: inc = CNT_W'($urandom_range(1500));
        endcase
        if (run % 4 == 3 && op > 300) inc = 32'hFFFF_FFFF;      // drive saturation
        assoc_free = (run % 3 != 2);
        #1;
        if (mdirty[j]) begin
          n_dirty++;
          check(dirty === 1'b1, "dirty flag");
          check(bkt_out === bkt_in, "dirty entry leaves bucket unchanged");
        end else begin
          check(dirty === 1'b0, "clean flag");
          nv = mval[j] + inc;
          if (nv > 64'hFFFF_FFFF) nv = 64'hFFFF_FFFF;
          need2 = nv >= (64'd1 << W1);
          need3 = nv >= (64'd1 << (W1 + W2));
          e2 = need2 && !own2[j];
          e3 = need3 && !own3[j];
          n2 = 0; n3 = 0;
          for (int e = 0; e < K; e++) begin n2 += own2[e]; n3 += own3[e]; end
          ovf = (e2 && n2 >= K2) || (e3 && n3 >= K3);
          if (ovf && assoc_free) begin
            n_evict++;
            check(evict && !saturate && !expand2 && !expand3, "evict flags");
            check(value == CNT_W'(nv), "evicted value");
            mdirty[j] = 1; own2[j] = 0; own3[j] = 0; mval[j] = 0;
          end else if (ovf) begin
            n_sat++;
            capv = own3[j] ? 64'hFFFF_FFFF : own2[j] ? (64'd1 << (W1 + W2)) - 1 : (64'd1 << W1) - 1;
            check(saturate && !evict, "saturate flags");
            check(value == CNT_W'(capv), "saturated value");
            mval[j] = capv;
          end else begin
            n_exp2 += e2; n_exp3 += e3;
            check(!evict && !saturate && expand2 == e2 && expand3 == e3, "expand flags");
            check(value == CNT_W'(nv), "updated value");
            own2[j] |= e2; own3[j] |= e3; mval[j] = nv;
          end
          for (int e = 0; e < K; e++) begin
            check(bkt_out.i2[e] == own2[e] && bkt_out.i3[e] == own3[e] && bkt_out.v[e] == mdirty[e], "index and dirty columns");
            if (!mdirty[e]) check(decode(bkt_out, e) == mval[e], $sformatf("entry %0d value", e));
          end
        end
        bkt_in = bkt_out;
      end
    end
    $display("expand2=%0d expand3=%0d evict=%0d saturate=%0d dirty_access=%0d", n_exp2, n_exp3, n_evict, n_sat, n_dirty);
    check(n_exp2 > 0 && n_exp3 > 0 && n_evict > 0 && n_sat > 0 && n_dirty > 0, "all mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
