// tb_hbrick_counter: one HBRICK counter array at its default size.
//
// After reset the test checks that ready stays low for the clearing walk
// (2^LOG_W / K cycles). It then sends one access per cycle for a few thousand
// cycles. Entries are drawn from 16 buckets (128 entries) so that optional
// pools fill up and entries get evicted; increments are packet sizes with
// occasional jumps of up to 2^26. A model applies the DFU folding rule (a
// carrier takes the increments of later accesses to its entry within DFU_DEPTH
// cycles; those accesses become read-only) and keeps exact counts. Every
// result must equal the model count and arrive exactly DFU_DEPTH + 2 cycles
// after its access. The test requires merges, expansions into A2 and A3,
// evictions and hits on evicted entries to have happened.
module tb_hbrick_counter;
  import hbrick_pkg::*;
  localparam int unsigned LOG_W = 15, DEPTH = 14, LAT = DEPTH + 2, N = 4000;

  logic clk = 0, rst = 1;
  logic in_valid = 0;
  logic [LOG_W-1:0] in_idx = '0;
  logic [CNT_W-1:0] in_inc = '0;
  logic out_valid, ready;
  logic [CNT_W-1:0] out_value;
  row_events_t ev;

  hbrick_counter dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit              v_h [N + LAT];
  int unsigned     idx_h [N + LAT];
  longint unsigned inc_h [N + LAT];
  bit              car_h [N + LAT];
  longint unsigned tot_h [N + LAT];
  longint unsigned exp_h [N + LAT];
  longint unsigned cnt [int unsigned];
  int n_merge = 0, n_e2 = 0, n_e3 = 0, n_ev = 0, n_hit = 0, n_sat = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) if (!rst) begin
    n_merge += ev.merge; n_e2 += ev.expand2; n_e3 += ev.expand3;
    n_ev += ev.evict; n_hit += ev.assoc_hit; n_sat += ev.saturate;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int clr;
    // stimulus and model
    for (int t = 0; t < N + LAT; t++) begin
      v_h[t]   = (t < N) && ($urandom_range(9) < 8);
      idx_h[t] = ($urandom_range(15) * 97 % 4096) * K + $urandom_range(K - 1);
      case ($urandom_range(39))
        0:       inc_h[t] = $urandom_range(1 << 26);
        1, 2:    inc_h[t] = $urandom_range(1 << 16);
        default: inc_h[t] = $urandom_range(1500);
      endcase
      car_h[t] = v_h[t];
      tot_h[t] = inc_h[t];
      if (v_h[t])
        for (int p = t - 1; p >= 0 && p > t - int'(DEPTH); p--)
          if (v_h[p] && car_h[p] && idx_h[p] == idx_h[t]) begin
            car_h[t] = 0;
            tot_h[p] += inc_h[t];
          end
    end
    for (int t = 0; t < N; t++) if (v_h[t]) begin
      if (!cnt.exists(idx_h[t])) cnt[idx_h[t]] = 0;
      if (car_h[t]) cnt[idx_h[t]] += tot_h[t];
      exp_h[t] = cnt[idx_h[t]];
    end

    repeat (2) @(posedge clk);
    rst <= 0;
    clr = 0;
    @(posedge clk);
    while (!ready) begin @(posedge clk); clr++; end
    check(clr >= (1 << LOG_W) / K - 2 && clr <= (1 << LOG_W) / K + 2, "clearing walk length");
    for (int t = 0; t < N + LAT; t++) begin
      in_valid <= v_h[t]; in_idx <= LOG_W'(idx_h[t]); in_inc <= CNT_W'(inc_h[t]);
      @(posedge clk);
      #1;
      if (t + 1 >= LAT) begin
        int s;
        s = t + 1 - int'(LAT);
        check(out_valid == v_h[s], "result exactly DFU_DEPTH+2 cycles after access");
        if (v_h[s]) begin
          check(out_value == CNT_W'(exp_h[s]), "count");
          if (out_value != CNT_W'(exp_h[s]) && failures < 5)
            $display("  access %0d entry %0d: got %0d expected %0d", s, idx_h[s], out_value, exp_h[s]);
        end
      end
    end
    $display("merge=%0d expand2=%0d expand3=%0d evict=%0d assoc_hit=%0d saturate=%0d", n_merge, n_e2, n_e3, n_ev, n_hit, n_sat);
    check(n_merge > 0 && n_e2 > 0 && n_e3 > 0 && n_ev > 0 && n_hit > 0, "mechanisms exercised");
    check(n_sat == 0, "no saturation with free associative slots");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
