// sync_fifo: single-clock first-in first-out buffer.
//
// DEPTH words of WIDTH bits in a circular array. A word pushed in cycle t is
// visible at rd_data (the head, read combinationally) from cycle t+1. Push
// while full and pop while empty are ignored (and flagged by assertions).
// count gives the number of stored words.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       push,
  input  logic [WIDTH-1:0]           wr_data,
  input  logic                       pop,
  output logic [WIDTH-1:0]           rd_data,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_push, do_pop;

  assign empty   = (count == '0);
  assign full    = (count == CW'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign rd_data = mem[rp];

  always_ff @(posedge clk) begin
    if (rst) begin
      wp <= '0;
      rp <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + CW'(do_push) - CW'(do_pop);
    end
    if (do_push) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) if (!rst) begin
    assert (!(push && full))  else $error("sync_fifo: push while full");
    assert (!(pop && empty))  else $error("sync_fifo: pop while empty");
  end

endmodule
