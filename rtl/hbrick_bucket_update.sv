// hbrick_bucket_update: one read-modify-write step on an HBRICK bucket.
//
// Purely combinational. Given the stored bucket word, the entry j inside the
// bucket and an increment, it
//   1. indexes all levels at once: the A2 and A3 slot numbers of entry j are the
//      ranks (ones strictly below j) in the two index columns, so no level
//      depends on the previous one;
//   2. rebuilds the counter as {A3 slot, A2 slot, A1 field} and adds inc;
//   3. if the sum needs a level the entry does not own yet, opens a slot in the
//      packed pool word at the rank position by one shift of the upper slots
//      (width expansion) and sets the index bit;
//   4. if that pool is already full, evicts the entry: sets its dirty bit, takes
//      its slots out of the pools (the upper slots shift down) and clears its
//      A1 field; the caller then stores the value in the associative memory;
//   5. writes the new value back into the fields the entry owns.
// An entry whose dirty bit is already set is not touched: `dirty` tells the
// caller to use the associative memory instead, and bkt_out equals bkt_in.
//
// The parallel rank indexing, the single combined index array, the packed
// optional levels with shift-based expansion and the dirty-bit eviction follow
// the HBRICK scheme. Freeing the slots of an evicted entry, saturating at 2^32-1
// and, when the associative memory is full (assoc_free = 0), keeping the entry
// and saturating it at the largest value its owned levels hold, are this
// design's choices.
module hbrick_bucket_update
  import hbrick_pkg::*;
(
  input  bucket_t              bkt_in,
  input  logic [LOG_K-1:0]     j,
  input  logic [CNT_W-1:0]     inc,
  input  logic                 assoc_free,
  output bucket_t              bkt_out,
  output logic [CNT_W-1:0]     value,     // new count (not meaningful when dirty)
  output logic                 dirty,     // entry was evicted earlier
  output logic                 evict,     // entry is evicted by this update
  output logic                 expand2,   // A2 slot opened
  output logic                 expand3,   // A3 slot opened
  output logic                 saturate   // overflow, associative memory full
);

  localparam int unsigned RW = $clog2(K + 1);

  function automatic logic [RW-1:0] popcount(input logic [K-1:0] b);
    logic [RW-1:0] c;
    c = '0;
    for (int unsigned t = 0; t < K; t++) c += RW'(b[t]);
    return c;
  endfunction

  logic [K-1:0]     below;
  logic [RW-1:0]    s2, s3, n2, n3;
  logic             has2, has3, need2, need3, exp2, exp3, ovf;
  logic [W1-1:0]    f1;
  logic [W2-1:0]    f2;
  logic [W3-1:0]    f3;
  logic [CNT_W:0]   sum;
  logic [CNT_W-1:0] nv, wv;

  always_comb begin
    below = K'((1 << j) - 1);
    s2    = popcount(bkt_in.i2 & below);
    s3    = popcount(bkt_in.i3 & below);
    n2    = popcount(bkt_in.i2);
    n3    = popcount(bkt_in.i3);
    has2  = bkt_in.i2[j];
    has3  = bkt_in.i3[j];
    dirty = bkt_in.v[j];

    // value reconstruction, all levels in parallel
    f1 = bkt_in.a1[j*W1 +: W1];
    f2 = has2 ? bkt_in.a2[s2*W2 +: W2] : '0;
    f3 = has3 ? bkt_in.a3[s3*W3 +: W3] : '0;
    sum = {1'b0, f3, f2, f1} + {1'b0, inc};
    nv  = sum[CNT_W] ? CNT_MAX : sum[CNT_W-1:0];

    need2 = |nv[CNT_W-1:W1];
    need3 = |nv[CNT_W-1:W1+W2];
    exp2  = need2 && !has2;
    exp3  = need3 && !has3;
    ovf   = (exp2 && n2 >= RW'(K2)) || (exp3 && n3 >= RW'(K3));

    bkt_out  = bkt_in;
    value    = nv;
    wv       = nv;
    evict    = 1'b0;
    expand2  = 1'b0;
    expand3  = 1'b0;
    saturate = 1'b0;

    if (dirty) begin
      value = '0;
    end else if (ovf && assoc_free) begin
      // eviction: free the optional slots, clear A1, set the dirty bit
      evict = 1'b1;
      bkt_out.v[j]          = 1'b1;
      bkt_out.a1[j*W1 +: W1] = '0;
      if (has2) begin
        bkt_out.i2[j] = 1'b0;
        for (int unsigned t = 0; t < K2; t++)
          if (t >= s2) bkt_out.a2[t*W2 +: W2] = (t + 1 < K2) ? bkt_in.a2[(t+1)*W2 +: W2] : '0;
      end
      if (has3) begin
        bkt_out.i3[j] = 1'b0;
        for (int unsigned t = 0; t < K3; t++)
          if (t >= s3) bkt_out.a3[t*W3 +: W3] = (t + 1 < K3) ? bkt_in.a3[(t+1)*W3 +: W3] : '0;
      end
    end else begin
      if (ovf) begin
        // no room anywhere: stay in the bucket, saturate at the owned width
        saturate = 1'b1;
        wv = has3 ? CNT_MAX : has2 ? CNT_W'((64'd1 << (W1 + W2)) - 1) : CNT_W'((64'd1 << W1) - 1);
        value = wv;
      end else begin
        // width expansion: open a slot at the rank position (upper slots shift up)
        if (exp2) begin
          expand2 = 1'b1;
          bkt_out.i2[j] = 1'b1;
          for (int unsigned t = 0; t < K2; t++)
            if (t > s2) bkt_out.a2[t*W2 +: W2] = bkt_in.a2[(t-1)*W2 +: W2];
        end
        if (exp3) begin
          expand3 = 1'b1;
          bkt_out.i3[j] = 1'b1;
          for (int unsigned t = 0; t < K3; t++)
            if (t > s3) bkt_out.a3[t*W3 +: W3] = bkt_in.a3[(t-1)*W3 +: W3];
        end
      end
      bkt_out.a1[j*W1 +: W1] = wv[W1-1:0];
      if (bkt_out.i2[j]) bkt_out.a2[s2*W2 +: W2] = wv[W1 +: W2];
      if (bkt_out.i3[j]) bkt_out.a3[s3*W3 +: W3] = wv[W1+W2 +: W3];
    end
  end

endmodule
