// dfu: data forwarding unit in front of one HBRICK counter array.
//
// A shift register of DEPTH stages (DEPTH = the fixed update overhead T_c).
// Every access enters at stage 0 and leaves DEPTH cycles later for the
// counter array. When a new access names an entry for which an older update
// ("carrier") is still inside the first DEPTH-1 stages, its increment is added
// to that carrier and the new access continues as a read-only access
// (out_wr = 0, out_inc = 0). The counter array thus receives one update per
// entry per window, while every access still produces its own result, in
// order, at a fixed latency. The carrier's result includes the increments
// folded into it, so it can run ahead of its own packet by at most DEPTH-1
// cycles of traffic to the same entry; the read-only results behind it see
// the full total.
//
// A FIFO of depth T_c that consolidates accesses to one entry follows the
// HBRICK design; one unit per counter array (instead of one per bucket), and
// keeping merged accesses as read-only ones, are this design's choices.
module dfu
  import hbrick_pkg::*;
#(
  parameter int unsigned DEPTH = 14,
  parameter int unsigned LOG_W = 15
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  input  logic [LOG_W-1:0]   in_idx,
  input  logic [CNT_W-1:0]   in_inc,
  output logic               out_valid,
  output logic [LOG_W-1:0]   out_idx,
  output logic [CNT_W-1:0]   out_inc,
  output logic               out_wr,
  output logic               merge
);

  typedef struct packed {
    logic             valid;
    logic             wr;      // carrier of an update
    logic [LOG_W-1:0] idx;
    logic [CNT_W-1:0] inc;
  } slot_t;

  slot_t            q [DEPTH];
  logic [DEPTH-1:0] hit;

  always_comb begin
    hit = '0;
    for (int unsigned m = 0; m + 1 < DEPTH; m++)
      hit[m] = in_valid && q[m].valid && q[m].wr && (q[m].idx == in_idx);
    merge = |hit;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int unsigned m = 0; m < DEPTH; m++) q[m] <= '0;
    end else begin
      for (int unsigned m = 1; m < DEPTH; m++) begin
        q[m] <= q[m-1];
        if (hit[m-1]) begin
          logic [CNT_W:0] s;
          s = {1'b0, q[m-1].inc} + {1'b0, in_inc};
          q[m].inc <= s[CNT_W] ? CNT_MAX : s[CNT_W-1:0];
        end
      end
      q[0] <= '{valid: in_valid, wr: !merge, idx: in_idx, inc: merge ? '0 : in_inc};
    end
  end

  assign out_valid = q[DEPTH-1].valid;
  assign out_idx   = q[DEPTH-1].idx;
  assign out_inc   = q[DEPTH-1].inc;
  assign out_wr    = q[DEPTH-1].wr;

  // only one carrier per entry may sit in the window
  always_ff @(posedge clk) if (!rst) assert ($onehot0(hit)) else $error("dfu: two carriers for one entry");

endmodule
