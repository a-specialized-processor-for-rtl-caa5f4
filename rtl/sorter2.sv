// sorter2: two-way sorter, the node of the hit switching network.
//
// Two input streams are merged and every hit is dispatched to output 0,
// output 1 or both, according to the engines it must reach.  The node holds,
// as parameters, the box of engine addresses that lies below each of its two
// outputs; a hit goes to an output when its own destination box overlaps that
// output's box, and is copied when it overlaps both.  A hit that overlaps
// neither, or whose box is empty (lo > hi), is dropped.  So the addressing information is stored only in the
// node that uses it, as the paper asks.
//
// EndEvent words are synchronised: the node forwards an EndEvent (to both
// outputs) only when both inputs show one, so every hit of an event leaves
// the node before the event's EndEvent.  A hit waiting behind nothing is never
// held up by an EndEvent waiting on the other input.
//
// When both inputs hold hits, they go out in the same cycle if they need
// disjoint outputs; otherwise a round-robin pointer picks one.  A word leaves
// only when every output it needs can take it; otherwise its input is held
// (the "stall from downstream" of the paper).
//
// Interface: two valid/ready inputs, two registered valid/ready outputs.
// Latency one cycle; up to one word per output per cycle.  in_ready depends
// combinationally on out_ready.  The merge, dispatch and stall behaviour
// follow the paper; the box encoding, the pairing rule and the round-robin
// choice are this design's.
module sorter2
  import retina_pkg::*;
#(
  parameter int ROW_LO0 = 0, parameter int ROW_HI0 = 0,
  parameter int COL_LO0 = 0, parameter int COL_HI0 = 0,
  parameter int ROW_LO1 = 0, parameter int ROW_HI1 = 0,
  parameter int COL_LO1 = 1, parameter int COL_HI1 = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  sw_word_t      in_word  [2],
  input  logic    [1:0] in_valid,
  output logic    [1:0] in_ready,
  output sw_word_t      out_word [2],
  output logic    [1:0] out_valid,
  input  logic    [1:0] out_ready
);

  function automatic logic overlaps(input box_t b, input int rlo, input int rhi,
                                    input int clo, input int chi);
    return (b.row_lo <= b.row_hi) && (b.col_lo <= b.col_hi) &&
           (int'(b.row_lo) <= rhi) && (int'(b.row_hi) >= rlo) &&
           (int'(b.col_lo) <= chi) && (int'(b.col_hi) >= clo);
  endfunction

  logic [1:0] need [2];   // outputs wanted by the word at each input
  logic [1:0] can_load;   // output register free this cycle
  logic [1:0] is_hit;     // input shows a hit
  logic [1:0] ok;         // input's hit could leave on its own
  logic [1:0] take;       // inputs consumed this cycle
  logic       both_ee;
  logic       rr;         // round-robin: input favoured on conflict

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      need[i][0] = overlaps(in_word[i].box, ROW_LO0, ROW_HI0, COL_LO0, COL_HI0);
      need[i][1] = overlaps(in_word[i].box, ROW_LO1, ROW_HI1, COL_LO1, COL_HI1);
      is_hit[i]  = in_valid[i] && !in_word[i].ee;
    end
    can_load = ~out_valid | out_ready;
    both_ee  = in_valid[0] && in_valid[1] && in_word[0].ee && in_word[1].ee;
    for (int i = 0; i < 2; i++)
      ok[i] = is_hit[i] && ((need[i] & ~can_load) == 2'b00);

    take = 2'b00;
    if (both_ee) begin
      if (can_load == 2'b11) take = 2'b11;
    end else if (ok[0] && ok[1]) begin
      if ((need[0] & need[1]) == 2'b00) take = 2'b11;
      else take = rr ? 2'b10 : 2'b01;
    end else begin
      take = ok;
    end
  end

  assign in_ready = take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 2'b00;
      rr        <= 1'b0;
      for (int o = 0; o < 2; o++) out_word[o] <= '0;
    end else begin
      for (int o = 0; o < 2; o++) begin
        if (out_ready[o]) out_valid[o] <= 1'b0;
        if (both_ee && take == 2'b11) begin
          out_valid[o] <= 1'b1;
          out_word[o]  <= in_word[0];
        end else begin
          for (int i = 0; i < 2; i++)
            if (take[i] && need[i][o]) begin
              out_valid[o] <= 1'b1;
              out_word[o]  <= in_word[i];
            end
        end
      end
      if (!both_ee && ok == 2'b11 && (need[0] & need[1]) != 2'b00) rr <= ~rr;
    end
  end

  // two consumed hits never compete for one output register
  always_comb begin
    if (rst_n && !both_ee && take == 2'b11)
      assert ((need[0] & need[1]) == 2'b00) else $error("sorter2: output collision");
  end

endmodule
