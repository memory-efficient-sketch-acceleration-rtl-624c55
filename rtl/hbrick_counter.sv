// hbrick_counter: one HBRICK variable-width counter array of 2^LOG_W entries.
//
// An access (entry index, increment) is accepted every cycle and returns the
// updated count of that entry DFU_DEPTH + 2 cycles later. Three stages:
//   pre-processing  the dfu folds accesses to one entry that arrive within
//                   DFU_DEPTH cycles of each other into one update;
//   indexing        cycle E0: the bucket word (idx / K) is read from the bucket
//                   RAM and the entry index is looked up in the associative
//                   memory, both with registered reads;
//   value fetch     cycle E1: hbrick_bucket_update ranks, rebuilds, adds,
//                   expands or evicts; the bucket is written back in the same
//                   cycle. A dirty (evicted) entry takes its value from the
//                   associative memory instead, and an entry evicted now is
//                   inserted there. The result is registered (E2 = output).
// A bucket written in E1 is forwarded to the access that read the same bucket
// in that cycle, so back-to-back accesses to one bucket never see stale data.
// After reset the bucket RAM is zeroed, one bucket per cycle; ready is low
// until both this walk and the associative memory's have finished (2^LOG_W/K
// cycles at the defaults).
//
// The bucket organisation, parallel indexing, DFU and associative memory
// follow the HBRICK architecture; the single wide bucket word, the one-cycle
// forwarding, and the latency split are this design's choices.
module hbrick_counter
  import hbrick_pkg::*;
#(
  parameter int unsigned LOG_W     = 15,
  parameter int unsigned DFU_DEPTH = 14,
  parameter int unsigned CAP       = 144
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  input  logic [LOG_W-1:0]   in_idx,
  input  logic [CNT_W-1:0]   in_inc,
  output logic               out_valid,
  output logic [CNT_W-1:0]   out_value,
  output logic               ready,
  output row_events_t        ev
);

  localparam int unsigned LOG_NB = LOG_W - LOG_K;
  localparam int unsigned NB     = 2 ** LOG_NB;

  // pre-processing
  logic               d_valid, d_wr, d_merge;
  logic [LOG_W-1:0]   d_idx;
  logic [CNT_W-1:0]   d_inc;

  dfu #(.DEPTH(DFU_DEPTH), .LOG_W(LOG_W)) u_dfu (
    .clk, .rst,
    .in_valid (in_valid && ready),
    .in_idx, .in_inc,
    .out_valid(d_valid), .out_idx(d_idx), .out_inc(d_inc), .out_wr(d_wr),
    .merge    (d_merge)
  );

  // bucket RAM
  bucket_t            mem [NB];
  bucket_t            rd_q, fwd_d, bkt;
  logic               fwd_v;
  logic               we;
  logic [LOG_NB-1:0]  waddr, raddr;
  bucket_t            wdata;
  logic               busy;
  logic [LOG_NB-1:0]  clr_addr;

  // E1 pipeline registers
  logic               e1_valid, e1_wr;
  logic [LOG_NB-1:0]  e1_bidx;
  logic [LOG_K-1:0]   e1_j;
  logic [CNT_W-1:0]   e1_inc;

  // associative memory
  logic               a_hit, a_full, a_busy, a_wr, a_ins;
  logic [CNT_W-1:0]   a_rd, a_wv;

  hbrick_assoc_mem #(.KEY_W(LOG_W), .CHUNK_W(9), .CAP(CAP), .VAL_W(CNT_W)) u_assoc (
    .clk, .rst,
    .lk_valid (d_valid),
    .lk_key   (d_idx),
    .hit      (a_hit),
    .rd_value (a_rd),
    .wr_valid (a_wr),
    .wr_insert(a_ins),
    .wr_value (a_wv),
    .full     (a_full),
    .busy     (a_busy)
  );

  // value fetch and update
  bucket_t            upd_bkt;
  logic [CNT_W-1:0]   upd_val;
  logic               u_dirty, u_evict, u_exp2, u_exp3, u_sat;
  logic [CNT_W:0]     a_sum;
  logic [CNT_W-1:0]   value;

  assign bkt = fwd_v ? fwd_d : rd_q;

  hbrick_bucket_update u_upd (
    .bkt_in    (bkt),
    .j         (e1_j),
    .inc       (e1_inc),
    .assoc_free(!a_full),
    .bkt_out   (upd_bkt),
    .value     (upd_val),
    .dirty     (u_dirty),
    .evict     (u_evict),
    .expand2   (u_exp2),
    .expand3   (u_exp3),
    .saturate  (u_sat)
  );

  always_comb begin
    a_sum = {1'b0, a_rd} + {1'b0, e1_inc};
    value = u_dirty ? (a_sum[CNT_W] ? CNT_MAX : a_sum[CNT_W-1:0]) : upd_val;
    a_wr  = e1_valid && e1_wr && (u_dirty || u_evict);
    a_ins = u_evict;
    a_wv  = value;

    raddr = d_idx[LOG_W-1:LOG_K];
    we    = busy || (e1_valid && e1_wr && !u_dirty);
    waddr = busy ? clr_addr : e1_bidx;
    wdata = busy ? '0 : upd_bkt;
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rd_q  <= mem[raddr];
    fwd_v <= we && (waddr == raddr);
    fwd_d <= wdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b1;
      clr_addr  <= '0;
      e1_valid  <= 1'b0;
      out_valid <= 1'b0;
      ev        <= '0;
    end else begin
      if (busy) begin
        clr_addr <= clr_addr + 1'b1;
        if (&clr_addr) busy <= 1'b0;
      end
      e1_valid  <= d_valid;
      out_valid <= e1_valid;
      ev.merge     <= d_merge;
      ev.expand2   <= e1_valid && e1_wr && u_exp2;
      ev.expand3   <= e1_valid && e1_wr && u_exp3;
      ev.evict     <= e1_valid && e1_wr && u_evict;
      ev.assoc_hit <= e1_valid && u_dirty;
      ev.saturate  <= e1_valid && e1_wr && u_sat;
    end
    e1_wr     <= d_wr;
    e1_bidx   <= d_idx[LOG_W-1:LOG_K];
    e1_j      <= d_idx[LOG_K-1:0];
    e1_inc    <= d_inc;
    out_value <= value;
  end

  assign ready = !busy && !a_busy;

  // an evicted entry must be found in the associative memory
  always_ff @(posedge clk) if (!rst && e1_valid && u_dirty) assert (a_hit) else $error("hbrick_counter: evicted entry missing");

endmodule
