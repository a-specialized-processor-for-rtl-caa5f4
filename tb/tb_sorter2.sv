// tb_sorter2: self-checking test of the two-way sorter.
//
// The node under test covers rows 0-1 on output 0 and rows 2-3 on output 1
// (8 columns each).  Each input carries EVENTS events of random hits with
// random destination boxes, each event closed by an EndEvent.  Inputs are
// offered with random gaps and outputs are stalled at random.  Every hit is
// tagged with its input, its sequence number and its event (x field).
// Checks: every hit appears on exactly the outputs whose half its box
// overlaps, in input order; each output sees one EndEvent per event and only
// hits of the current event before it; an output word stays put while it is
// stalled; the two-input, two-output case both fire in one cycle at least
// once.
module tb_sorter2;
  import retina_pkg::*;

  localparam int EVENTS = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  sw_word_t   in_word [2];
  logic [1:0] in_valid, in_ready;
  sw_word_t   out_word [2];
  logic [1:0] out_valid, out_ready;

  sorter2 #(.ROW_LO0(0), .ROW_HI0(1), .COL_LO0(0), .COL_HI0(7),
            .ROW_LO1(2), .ROW_HI1(3), .COL_LO1(0), .COL_HI1(7)) dut (.*);

  int checks = 0, failures = 0, cycles = 0;
  sw_word_t stim [2][$];
  sw_word_t expq [2][2][$];   // [output][input]
  int       ee_seen [2];
  int       dual = 0;
  sw_word_t held [2];
  logic [1:0] was_stalled;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic bit ovl(input box_t b, input int rlo, input int rhi);
    return (int'(b.row_lo) <= rhi) && (int'(b.row_hi) >= rlo) &&
           (int'(b.col_lo) <= 7) && (int'(b.col_hi) >= 0);
  endfunction

  initial begin
    for (int i = 0; i < 2; i++) begin
      int seq;
      seq = 0;
      for (int e = 0; e < EVENTS; e++) begin
        int nh;
        nh = $urandom_range(0, 6);
        for (int h = 0; h < nh; h++) begin
          sw_word_t w;
          int a, b;
          w = '0;
          a = $urandom_range(0, 4); b = $urandom_range(0, 4);
          w.box.row_lo = AW'(a < b ? a : b);
          w.box.row_hi = AW'(a < b ? b : a);
          w.box.col_lo = AW'($urandom_range(0, 3));
          w.box.col_hi = AW'($urandom_range(0, 9));
          w.hit.x  = XW'(e);
          w.hit.ts = TSW'((i << 12) | seq);
          seq++;
          stim[i].push_back(w);
          if (ovl(w.box, 0, 1) && w.box.col_lo <= w.box.col_hi) expq[0][i].push_back(w);
          if (ovl(w.box, 2, 3) && w.box.col_lo <= w.box.col_hi) expq[1][i].push_back(w);
        end
        begin
          sw_word_t w;
          w = '0; w.ee = 1'b1; w.hit.ts = TSW'(e);
          stim[i].push_back(w);
        end
      end
    end
  end

  // drivers
  always_ff @(posedge clk) begin
    if (rst_n) begin
      for (int i = 0; i < 2; i++) begin
        if (in_valid[i] && in_ready[i]) void'(stim[i].pop_front());
      end
    end
  end
  always_comb begin
    for (int i = 0; i < 2; i++) begin
      in_word[i]  = (stim[i].size() > 0) ? stim[i][0] : '0;
    end
  end
  logic [1:0] gate;
  always_ff @(posedge clk) begin
    for (int i = 0; i < 2; i++) gate[i] <= ($urandom_range(0, 3) != 0);
    out_ready <= 2'($urandom_range(0, 3));
  end
  always_comb for (int i = 0; i < 2; i++) in_valid[i] = rst_n && gate[i] && stim[i].size() > 0;

  // monitors
  always_ff @(posedge clk) begin
    if (rst_n) begin
      cycles <= cycles + 1;
      if (in_ready == 2'b11 && !in_word[0].ee) dual <= dual + 1;
      for (int o = 0; o < 2; o++) begin
        if (was_stalled[o]) check(out_valid[o] && out_word[o] == held[o], "stalled output changed");
        was_stalled[o] <= out_valid[o] && !out_ready[o];
        held[o] <= out_word[o];
        if (out_valid[o] && out_ready[o]) begin
          sw_word_t w;
          int i;
          w = out_word[o];
          if (w.ee) begin
            check(int'(w.hit.ts) == ee_seen[o], "EndEvent order");
            ee_seen[o]++;
          end else begin
            i = int'(w.hit.ts[12]);
            check(int'(w.hit.x) == ee_seen[o], "hit crossed an EndEvent");
            if (expq[o][i].size() == 0) check(0, "unexpected hit");
            else begin
              check(expq[o][i][0] == w, $sformatf("hit order/routing out%0d in%0d got %h exp %h", o, i, w, expq[o][i][0]));
              void'(expq[o][i].pop_front());
            end
          end
        end
      end
      if (ee_seen[0] == EVENTS && ee_seen[1] == EVENTS && stim[0].size() == 0 && stim[1].size() == 0) begin
        for (int o = 0; o < 2; o++)
          for (int i = 0; i < 2; i++) check(expq[o][i].size() == 0, "hit lost");
        check(dual > 0, "two hits never left in one cycle");
        $display("dual-issue cycles: %0d, cycles: %0d", dual, cycles);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    ee_seen = '{0, 0};
    was_stalled = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
