// tb_switch_net: self-checking test of the switching network at 16 x 16
// (4 x 4 engines, the size of the paper's example figure).
//
// Every input carries EVENTS events of random hits with random destination
// boxes, each closed by an EndEvent; inputs are offered with random gaps and
// outputs stall at random.  The expected content of every output is worked
// out from the boxes alone.  Checks: each output receives exactly the hits
// whose box holds its address, once, with the hits of one input in input
// order, all before the event's EndEvent; one EndEvent per event reaches
// every output; the no-contention latency of a lone hit is log2(N) cycles.
module tb_switch_net;
  import retina_pkg::*;

  localparam int ROWS = 4, COLS = 4, N = ROWS * COLS, EVENTS = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  sw_word_t in_word [N];
  logic     in_valid [N], in_ready [N];
  sw_word_t out_word [N];
  logic     out_valid [N], out_ready [N];

  switch_net #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;
  sw_word_t stim [N][$];
  sw_word_t expq [N][N][$];   // [output][input]
  int       ee_seen [N];
  logic     phase2 = 0;       // second part: random traffic
  int       done_outputs;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic bit inbox(input box_t b, input int a);
    int r, c;
    r = a / COLS; c = a % COLS;
    return int'(b.row_lo) <= r && r <= int'(b.row_hi) && int'(b.col_lo) <= c && c <= int'(b.col_hi);
  endfunction

  // registered drivers: a word stays on an input until it is taken
  logic drv_valid [N];
  always_comb for (int i = 0; i < N; i++) in_valid[i] = drv_valid[i];
  always @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (!phase2) begin
        drv_valid[i] <= 1'b0;
      end else if (!drv_valid[i] || in_ready[i]) begin
        if (stim[i].size() > 0 && $urandom_range(0, 2) != 0) begin
          in_word[i]   <= stim[i].pop_front();
          drv_valid[i] <= 1'b1;
        end else drv_valid[i] <= 1'b0;
      end
      if (phase2) out_ready[i] <= ($urandom_range(0, 4) != 0);
    end
  end

  // monitor
  always_ff @(posedge clk) begin
    if (rst_n && phase2) begin
      for (int o = 0; o < N; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          sw_word_t w;
          int i;
          w = out_word[o];
          if (w.ee) begin
            check(int'(w.hit.ts) == ee_seen[o], $sformatf("EndEvent order out%0d got %0d exp %0d t=%0t", o, w.hit.ts, ee_seen[o], $time));
            ee_seen[o]++;
          end else begin
            i = int'(w.hit.ts[13:10]);
            check(int'(w.hit.x) == ee_seen[o], "hit crossed an EndEvent");
            check(inbox(w.box, o), "hit at an output outside its box");
            if (expq[o][i].size() == 0) check(0, "unexpected or duplicated hit");
            else begin
              check(expq[o][i][0] == w, $sformatf("hit order out%0d in%0d got %h exp %h", o, i, w, expq[o][i][0]));
              void'(expq[o][i].pop_front());
            end
          end
        end
      end
    end
  end

  initial begin
    int nh, seq, a, b, lat;
    sw_word_t w;
    for (int i = 0; i < N; i++) begin ee_seen[i] = 0; out_ready[i] = 1; drv_valid[i] = 0; in_word[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // part 1: latency of a lone hit from input 5 to output 10
    @(negedge clk);
    force in_word[5] = '{ee: 1'b0, hit: '0, box: '{row_lo: 2, row_hi: 2, col_lo: 2, col_hi: 2}};
    force in_valid[5] = 1'b1;
    force out_ready[10] = 1'b1;
    @(posedge clk);
    @(negedge clk);
    release in_valid[5];
    release in_word[5];
    lat = 0;
    while (!out_valid[10] && lat < 20) begin @(negedge clk); lat++; end
    check(lat == $clog2(N) - 1, $sformatf("lone hit latency %0d after the accepting edge", lat + 1));
    @(negedge clk);
    release out_ready[10];
    // part 2: random traffic
    for (int i = 0; i < N; i++) begin
      seq = 0;
      for (int e = 0; e < EVENTS; e++) begin
        nh = $urandom_range(0, 4);
        for (int h = 0; h < nh; h++) begin
          w = '0;
          a = $urandom_range(0, ROWS - 1); b = $urandom_range(0, ROWS - 1);
          w.box.row_lo = AW'(a < b ? a : b); w.box.row_hi = AW'(a < b ? b : a);
          a = $urandom_range(0, COLS - 1); b = $urandom_range(0, COLS - 1);
          w.box.col_lo = AW'(a < b ? a : b); w.box.col_hi = AW'(a < b ? b : a);
          w.hit.x  = XW'(e);
          w.hit.ts = TSW'((i << 10) | seq);
          seq++;
          stim[i].push_back(w);
          for (int o = 0; o < N; o++) if (inbox(w.box, o)) expq[o][i].push_back(w);
        end
        w = '0; w.ee = 1'b1; w.hit.ts = TSW'(e);
        stim[i].push_back(w);
      end
    end
    phase2 = 1;
    do begin
      @(posedge clk);
      done_outputs = 0;
      for (int o = 0; o < N; o++) if (ee_seen[o] == EVENTS) done_outputs++;
    end while (done_outputs < N);
    repeat (5) @(posedge clk);
    for (int o = 0; o < N; o++)
      for (int i = 0; i < N; i++) check(expq[o][i].size() == 0, "hit lost");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
