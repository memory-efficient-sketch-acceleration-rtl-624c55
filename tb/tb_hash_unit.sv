// tb_hash_unit: hash unit against an independent H3 model.
//
// The model builds the xorshift32 matrix of row ROW explicitly (one row per key
// bit) and hashes by XORing the rows of the set key bits. Random keys are
// applied one per cycle; each index must appear one cycle later, with the
// increment passed along. Two instances with different ROW must also differ
// on most keys (independence sanity check), and the index spread over 64
// buckets must be roughly even.
module tb_hash_unit;
  import hbrick_pkg::*;
  localparam int unsigned LOG_W = 15;

  logic clk = 0, rst = 1;
  logic in_valid = 0;
  five_tuple_t in_key;
  logic [CNT_W-1:0] in_inc = '0;
  logic ov0, ov1;
  logic [LOG_W-1:0] oi0, oi1;
  logic [CNT_W-1:0] oc0, oc1;

  hash_unit #(.LOG_W(LOG_W), .ROW(0)) dut0 (.clk, .rst, .in_valid, .in_key, .in_inc,
    .out_valid(ov0), .out_idx(oi0), .out_inc(oc0));
  hash_unit #(.LOG_W(LOG_W), .ROW(3)) dut3 (.clk, .rst, .in_valid, .in_key, .in_inc,
    .out_valid(ov1), .out_idx(oi1), .out_inc(oc1));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int same = 0;
  int hist [64];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic logic [LOG_W-1:0] model(input logic [103:0] key, input int row);
    logic [31:0] m [104];
    logic [31:0] s;
    logic [LOG_W-1:0] h;
    s = 32'h9E37_79B9 ^ (32'(row + 1) * 32'h85EB_CA6B);
    for (int b = 0; b < 104; b++) begin
      s = s ^ (s << 13); s = s ^ (s >> 17); s = s ^ (s << 5);
      m[b] = s;
    end
    h = '0;
    for (int b = 0; b < 104; b++) if (key[b]) h ^= m[b][31:32-LOG_W];
    return h;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [103:0] k;
    logic [CNT_W-1:0] c;
    in_key = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 64; i++) hist[i] = 0;
    for (int n = 0; n < 2000; n++) begin
      k = {$urandom, $urandom, $urandom, 8'($urandom)};
      c = CNT_W'($urandom_range(1500));
      in_valid <= 1; in_key <= k; in_inc <= c;
      @(posedge clk);
      #1;
      check(ov0 && ov1, "valid one cycle later");
      check(oi0 == model(k, 0) && oi1 == model(k, 3), "hash index");
      check(oc0 == c, "increment passed along");
      if (oi0 == oi1) same++;
      hist[oi0[LOG_W-1 -: 6]]++;
    end
    in_valid <= 0;
    @(posedge clk); #1;
    check(!ov0, "valid drops");
    check(same < 20, "rows differ");
    for (int i = 0; i < 64; i++) check(hist[i] > 5 && hist[i] < 70, "spread");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
