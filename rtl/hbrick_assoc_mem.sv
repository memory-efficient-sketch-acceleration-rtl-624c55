// hbrick_assoc_mem: fully associative store for counter entries evicted from
// their HBRICK bucket.
//
// The key (an entry index of one counter array) is cut into CHUNK_W-bit
// chunks. Each chunk addresses its own index RAM of 2^CHUNK_W words of CAP bits
// (at the defaults a pair of 512 x 72 BRAMs per chunk, i.e. 144 slots). Slot s
// of the value store belongs to key k when bit s is set in every chunk RAM at
// the address given by that chunk of k. A lookup reads all chunk RAMs, ANDs the
// words, and the single remaining one bit names the value slot; no bit set
// means the key is not stored. This gives a sparse key space of 2^KEY_W keys
// with only CAP stored values.
//
// Timing: a lookup presented in cycle t (lk_valid, lk_key) is answered in cycle
// t+1 (hit, rd_value). In that same cycle t+1 the caller may write (wr_valid):
// the value of the hit slot is replaced, or, on a miss with wr_insert set and a
// free slot, the looked-up key gets the next free slot. Back-to-back accesses
// are safe: a write in cycle t+1 is forwarded to the lookup answered in t+2.
// After reset the index RAMs are cleared, one address per cycle (busy = 1).
//
// The chunked index RAMs with one-hot slot words joined by AND, the 9-bit
// chunks and the 144-slot capacity follow the described associative memory.
// In-order slot allocation without reuse, the combinationally read value store,
// the write forwarding and the clearing walk are this design's choices.
module hbrick_assoc_mem #(
  parameter int unsigned KEY_W   = 15,
  parameter int unsigned CHUNK_W = 9,
  parameter int unsigned CAP     = 144,
  parameter int unsigned VAL_W   = 32
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              lk_valid,
  input  logic [KEY_W-1:0]  lk_key,
  output logic              hit,
  output logic [VAL_W-1:0]  rd_value,
  input  logic              wr_valid,
  input  logic              wr_insert,
  input  logic [VAL_W-1:0]  wr_value,
  output logic              full,
  output logic              busy
);

  localparam int unsigned NCH    = (KEY_W + CHUNK_W - 1) / CHUNK_W;
  localparam int unsigned SLOT_W = $clog2(CAP);
  localparam int unsigned CNT_W  = $clog2(CAP + 1);
  localparam int unsigned PAD_W  = NCH * CHUNK_W;

  logic [PAD_W-1:0]   key_pad;
  logic [PAD_W-1:0]   key_q;
  logic               lk_q;
  logic [CHUNK_W-1:0] clr_addr;
  logic [CNT_W-1:0]   used;
  logic [CAP-1:0]     match;
  logic [SLOT_W-1:0]  slot;
  logic [CAP-1:0]     new_bit;
  logic               do_insert;
  logic [CAP-1:0]     word [NCH];

  logic [VAL_W-1:0]   val_mem [CAP];

  assign key_pad   = PAD_W'(lk_key);
  assign full      = (used == CNT_W'(CAP));
  assign new_bit   = CAP'(1) << used;
  assign do_insert = wr_valid && wr_insert && !hit && !full && lk_q;

  for (genvar c = 0; c < NCH; c++) begin : g_chunk
    logic [CAP-1:0]     mem [2**CHUNK_W];
    logic [CAP-1:0]     rd_q, fwd_d;
    logic               fwd_v;
    logic               we;
    logic [CHUNK_W-1:0] waddr;
    logic [CAP-1:0]     wdata;
    logic [CHUNK_W-1:0] raddr;

    assign raddr = key_pad[c*CHUNK_W +: CHUNK_W];
    always_comb begin
      we    = busy || do_insert;
      waddr = busy ? clr_addr : key_q[c*CHUNK_W +: CHUNK_W];
      wdata = busy ? '0 : (word[c] | new_bit);
    end

    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata;
      rd_q  <= mem[raddr];
      fwd_v <= we && (waddr == raddr);
      fwd_d <= wdata;
    end

    assign word[c] = fwd_v ? fwd_d : rd_q;
  end

  always_comb begin
    match = '1;
    for (int unsigned c = 0; c < NCH; c++) match &= word[c];
    if (!lk_q) match = '0;
    slot = '0;
    for (int unsigned s = 0; s < CAP; s++) if (match[s]) slot = SLOT_W'(s);
    hit      = |match;
    rd_value = val_mem[slot];
  end

  always_ff @(posedge clk) begin
    if (wr_valid && hit)  val_mem[slot]         <= wr_value;
    else if (do_insert)   val_mem[SLOT_W'(used)] <= wr_value;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy     <= 1'b1;
      clr_addr <= '0;
      used     <= '0;
      lk_q     <= 1'b0;
      key_q    <= '0;
    end else begin
      if (busy) begin
        clr_addr <= clr_addr + 1'b1;
        if (&clr_addr) busy <= 1'b0;
      end
      if (do_insert) used <= used + 1'b1;
      lk_q  <= lk_valid && !busy;
      key_q <= key_pad;
    end
  end

  // at most one slot may match a key
  always_ff @(posedge clk) if (!rst && lk_q) assert ($onehot0(match)) else $error("assoc: key in several slots");

endmodule
