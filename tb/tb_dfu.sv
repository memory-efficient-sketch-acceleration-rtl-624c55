// tb_dfu: data forwarding unit against a cycle history model.
//
// Random accesses (about 70% of cycles, entries from a pool of 8 so that many
// fall within one window) enter the unit. For every input cycle t the model
// decides from the input history whether the access becomes a carrier (no
// carrier of the same entry entered in cycles t-DEPTH+1 .. t-1) or is merged
// into that carrier. The test checks that each access leaves exactly DEPTH
// cycles later with the right entry, the right read/write kind and, for
// carriers, its own increment plus all merged ones; and that the sum of
// increments going out equals the sum coming in.
module tb_dfu;
  import hbrick_pkg::*;
  localparam int unsigned DEPTH = 14, LOG_W = 15, N = 3000;

  logic clk = 0, rst = 1;
  logic in_valid = 0;
  logic [LOG_W-1:0] in_idx = '0;
  logic [CNT_W-1:0] in_inc = '0;
  logic out_valid, out_wr, merge;
  logic [LOG_W-1:0] out_idx;
  logic [CNT_W-1:0] out_inc;

  dfu #(.DEPTH(DEPTH), .LOG_W(LOG_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit               v_h [N + DEPTH];
  int unsigned      idx_h [N + DEPTH];
  longint unsigned  inc_h [N + DEPTH];
  bit               car_h [N + DEPTH];
  longint unsigned  tot_h [N + DEPTH];
  longint unsigned  sum_in = 0, sum_out = 0;
  int n_merge = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (N + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    // build the stimulus and its model
    for (int t = 0; t < N + DEPTH; t++) begin
      v_h[t]   = (t < N) && ($urandom_range(9) < 7);
      idx_h[t] = $urandom_range(7) * 1021;
      inc_h[t] = $urandom_range(1500);
      car_h[t] = v_h[t];
      tot_h[t] = inc_h[t];
      if (v_h[t])
        for (int p = t - 1; p >= 0 && p > t - int'(DEPTH); p--)
          if (v_h[p] && car_h[p] && idx_h[p] == idx_h[t]) begin
            car_h[t] = 0;
            tot_h[p] += inc_h[t];
            n_merge++;
          end
    end
    for (int t = 0; t < N + DEPTH; t++) begin
      in_valid <= v_h[t]; in_idx <= LOG_W'(idx_h[t]); in_inc <= CNT_W'(inc_h[t]);
      if (v_h[t]) sum_in += inc_h[t];
      #1;
      check(merge == (v_h[t] && !car_h[t]), "merge flag");
      @(posedge clk);
      #1;
      if (t + 1 >= DEPTH) begin
        int s;
        s = t + 1 - int'(DEPTH);
        check(out_valid == v_h[s], "output valid after DEPTH cycles");
        if (out_valid != v_h[s] && failures < 3) $display("t=%0d s=%0d out_valid=%0d exp=%0d", t, s, out_valid, v_h[s]);
        if (v_h[s]) begin
          check(out_idx == LOG_W'(idx_h[s]), "output entry");
          check(out_wr == car_h[s], "carrier / read-only");
          check(out_inc == (car_h[s] ? CNT_W'(tot_h[s]) : '0), "merged increment");
          sum_out += out_inc;
        end
      end
    end
    check(sum_in == sum_out, "increments conserved");
    $display("merges=%0d", n_merge);
    check(n_merge > 0, "merges happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
