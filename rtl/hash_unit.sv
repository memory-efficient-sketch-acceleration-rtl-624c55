// hash_unit: one hash function h_d of the count-min sketch.
//
// Maps the 104-bit five-tuple to an entry index of LOG_W bits with an H3-class
// hash: every key bit that is 1 XORs in its own LOG_W-bit row of a fixed
// pseudo-random matrix. The matrix is a xorshift32 sequence started from a
// seed that depends on ROW, so the D instances are independent functions. The
// chain that produces the rows does not depend on the key, so synthesis folds
// it into constants and the hash is a tree of XOR gates (no multipliers).
// The increment travels along unchanged. One register stage: the index of a
// key presented in cycle t appears in cycle t+1.
//
// The sketch only asks for independent hash functions; the H3 family, the
// seeds and the register stage are this design's choices.
module hash_unit
  import hbrick_pkg::*;
#(
  parameter int unsigned LOG_W = 15,
  parameter int unsigned ROW   = 0
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  input  five_tuple_t        in_key,
  input  logic [CNT_W-1:0]   in_inc,
  output logic               out_valid,
  output logic [LOG_W-1:0]   out_idx,
  output logic [CNT_W-1:0]   out_inc
);

  localparam int unsigned KEY_W = $bits(five_tuple_t);
  localparam logic [31:0] SEED = 32'h9E37_79B9 ^ (32'(ROW + 1) * 32'h85EB_CA6B);

  function automatic logic [LOG_W-1:0] h3(input logic [KEY_W-1:0] key);
    logic [31:0]      s;
    logic [LOG_W-1:0] h;
    s = SEED;
    h = '0;
    for (int unsigned b = 0; b < KEY_W; b++) begin
      s ^= s << 13;
      s ^= s >> 17;
      s ^= s << 5;
      if (key[b]) h ^= s[31 -: LOG_W];
    end
    return h;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= in_valid;
    out_idx <= h3(in_key);
    out_inc <= in_inc;
  end

endmodule
