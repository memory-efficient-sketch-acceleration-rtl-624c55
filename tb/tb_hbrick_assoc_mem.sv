// tb_hbrick_assoc_mem: associative memory against a reference table.
//
// Waits for the clearing walk, then issues one lookup per cycle with random
// keys from a small pool (so that chunk addresses are shared between keys and
// back-to-back accesses to the same key occur). In the answer cycle it checks
// hit and value against an associative array, then writes: value+1 on a hit,
// an insert on a miss (refused once all CAP slots are used). The test runs
// with CAP = 16 so that the full condition is reached. Latency (answer one
// cycle after the lookup) is checked implicitly on every access.
module tb_hbrick_assoc_mem;
  localparam int unsigned KEY_W = 15, CAP = 16, VAL_W = 32;

  logic clk = 0, rst = 1;
  logic lk_valid = 0, wr_valid = 0, wr_insert = 0;
  logic [KEY_W-1:0] lk_key = '0;
  logic [VAL_W-1:0] wr_value = '0, rd_value;
  logic hit, full, busy;

  hbrick_assoc_mem #(.KEY_W(KEY_W), .CHUNK_W(9), .CAP(CAP), .VAL_W(VAL_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int unsigned ref_tab [int unsigned];
  int unsigned pool [24];
  int n_hit = 0, n_ins = 0, n_full = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned k, prev_k;
    bit prev_v;
    // keys sharing low or high chunks
    for (int i = 0; i < 24; i++) pool[i] = ((i % 5) << 9) | (i % 7) | ((i / 12) << 13);
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    check(busy, "busy while clearing");
    wait (!busy);
    @(posedge clk);
    prev_v = 0;
    for (int op = 0; op < 600; op++) begin
      k = pool[$urandom_range(23)];
      lk_valid <= 1; lk_key <= KEY_W'(k);
      wr_valid <= 0; wr_insert <= 0;
      if (prev_v) begin
        // answer for prev_k is visible now
        #1;
        if (ref_tab.exists(prev_k)) begin
          n_hit++;
          check(hit && rd_value == ref_tab[prev_k], "hit value");
          wr_valid <= 1; wr_value <= rd_value + 1;
          ref_tab[prev_k] = ref_tab[prev_k] + 1;
        end else begin
          check(!hit, "miss");
          check(full == (ref_tab.num() == CAP), "full flag");
          wr_valid <= 1; wr_insert <= 1; wr_value <= prev_k * 3 + 7;
          if (ref_tab.num() < CAP) begin n_ins++; ref_tab[prev_k] = prev_k * 3 + 7; end
          else n_full++;
        end
      end
      prev_v = 1; prev_k = k;
      @(posedge clk);
    end
    $display("hits=%0d inserts=%0d refused=%0d", n_hit, n_ins, n_full);
    check(n_hit > 0 && n_ins == CAP && n_full > 0, "hit, insert and full all seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
