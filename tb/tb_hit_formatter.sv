// tb_hit_formatter: random hits through a formatter for a 32 x 32 grid.
// The expected box is worked out with integer division by the layer pitch:
// the 3 x 3 engines around (y/P, x/P), clipped to the grid, empty when the
// hit is off the grid.  EndEvent words must get the full grid.  Also checks
// the one-cycle latency, that a stalled output holds its word, and that no
// word is lost or duplicated under random back-pressure.
module tb_hit_formatter;
  import retina_pkg::*;

  localparam int ROWS = 32, COLS = 32, NW = 2000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_word_t in_word;
  logic       in_valid, in_ready;
  sw_word_t   out_word;
  logic       out_valid, out_ready;

  hit_formatter #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;
  link_word_t sent [$];
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic box_t expect_box(input link_word_t w);
    box_t b;
    int k, c, r, lo, hi;
    if (w.ee) return '{row_lo: 0, row_hi: AW'(ROWS - 1), col_lo: 0, col_hi: AW'(COLS - 1)};
    k = (int'(w.hit.layer) > 5) ? 5 : int'(w.hit.layer);
    c = int'(w.hit.x) / pitch(k);
    r = int'(w.hit.y) / pitch(k);
    lo = c - 1; hi = c + 1;
    if (lo < 0) lo = 0;
    if (hi > COLS - 1) hi = COLS - 1;
    b.col_lo = AW'(lo); b.col_hi = AW'(hi);
    lo = r - 1; hi = r + 1;
    if (lo < 0) lo = 0;
    if (hi > ROWS - 1) hi = ROWS - 1;
    b.row_lo = AW'(lo); b.row_hi = AW'(hi);
    return b;
  endfunction

  int nrecv = 0, nsent = 0;
  sw_word_t held;
  logic     stalled = 0;

  always @(posedge clk) if (rst_n) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (stalled) check(out_valid && out_word == held, "stalled word changed");
    stalled <= out_valid && !out_ready;
    held <= out_word;
    if (out_valid && out_ready) begin
      link_word_t w;
      w = sent.pop_front();
      check(out_word.ee == w.ee && out_word.hit == w.hit, "word content");
      check(out_word.box == expect_box(w),
            $sformatf("box for x=%0d y=%0d layer=%0d", w.hit.x, w.hit.y, w.hit.layer));
      nrecv++;
    end
  end

  initial begin
    link_word_t w;
    in_valid = 0; in_word = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency: one word into an idle formatter
    @(negedge clk);
    in_word = '0; in_word.hit.x = 12'd700; in_valid = 1;
    sent.push_back(in_word); nsent++;
    @(posedge clk); #1 in_valid = 0;
    check(out_valid, "output not valid one cycle after acceptance");
    // random stream
    while (nsent < NW) begin
      @(negedge clk);
      w.ee = ($urandom_range(0, 9) == 0);
      w.hit.x = XW'($urandom); w.hit.y = XW'($urandom);
      w.hit.layer = LW'($urandom_range(0, 7)); w.hit.ts = TSW'($urandom);
      in_word = w; in_valid = 1;
      while (!in_ready) @(negedge clk);
      sent.push_back(w); nsent++;
      @(posedge clk); #1 in_valid = 0;
    end
    while (nrecv < nsent) @(posedge clk);
    check(sent.size() == 0, "words lost");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
