// hit_formatter: attaches to each hit of an input link the box of engines
// that must receive it, ahead of the switching network.
//
// The engine under a hit on layer k is c = floor(x / P(k)) (and likewise r
// from y), computed as (x * ceil(2^20/P(k))) >> 20 with a per-layer
// reciprocal table.  The hit is sent to the 3 x 3 engines around (r, c),
// clipped to the grid; a hit that falls outside the grid gets an empty box
// (lo > hi) and is dropped by the network.  EndEvent words get the full grid
// as box, because every engine has to see them.
//
// The paper places a "pre-switch section" in the receiving/formatting FPGAs
// but does not say what it computes; this per-hit box is this design's way of
// giving the two-way sorters their routing information.
//
// Interface: valid/ready stream in (link_word_t), valid/ready stream out
// (sw_word_t).  One register stage: a word leaves one cycle after it is
// accepted; full throughput of one word per cycle.
module hit_formatter
  import retina_pkg::*;
#(
  parameter int ROWS = 32,  // engine rows of the grid
  parameter int COLS = 32   // engine columns of the grid
) (
  input  logic       clk,
  input  logic       rst_n,
  input  link_word_t in_word,
  input  logic       in_valid,
  output logic       in_ready,
  output sw_word_t   out_word,
  output logic       out_valid,
  input  logic       out_ready
);

  function automatic box_t hit_box(input hit_t h);
    box_t b;
    int k, c, r;
    k = (int'(h.layer) < NLAYERS) ? int'(h.layer) : NLAYERS - 1;
    c = (int'(h.x) * recip(k)) >>> 20;
    r = (int'(h.y) * recip(k)) >>> 20;
    b.col_lo = AW'((c == 0) ? 0 : ((c - 1 > 255) ? 255 : c - 1));
    b.col_hi = AW'((c + 1 > COLS - 1) ? COLS - 1 : c + 1);
    b.row_lo = AW'((r == 0) ? 0 : ((r - 1 > 255) ? 255 : r - 1));
    b.row_hi = AW'((r + 1 > ROWS - 1) ? ROWS - 1 : r + 1);
    return b;
  endfunction

  sw_word_t next_word;

  always_comb begin
    next_word.ee  = in_word.ee;
    next_word.hit = in_word.hit;
    if (in_word.ee) begin
      next_word.box.row_lo = '0;
      next_word.box.row_hi = AW'(ROWS - 1);
      next_word.box.col_lo = '0;
      next_word.box.col_hi = AW'(COLS - 1);
    end else begin
      next_word.box = hit_box(in_word.hit);
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_word  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_word <= next_word;
    end
  end

endmodule
