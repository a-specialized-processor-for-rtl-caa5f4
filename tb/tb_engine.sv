// tb_engine: self-checking test of one processing engine (row 2, column 3,
// all eight neighbours present; the neighbours are played by the bench).
//
// Per event the bench sends hits close to the engine's cells, then an
// EndEvent, and compares the seven snapshot accumulators with sums of
// round(255*exp(-a/32)) computed here with real arithmetic, allowing one
// count of rounding per hit.  Checks: one hit is taken every seven cycles;
// the last weight of a hit lands ten cycles after the hit was taken; the
// local-maximum decision for neighbours below, above and equal to the centre
// (tie rule); the record read out on a grant; LookAtMe drops on the grant;
// the snapshot bank is held until the neighbours have compared; a second
// EndEvent is held at the input while the bank is busy and hits of the next
// event are accumulated meanwhile.
module tb_engine;
  import retina_pkg::*;

  localparam int ROW = 2, COL = 3, THRESH = 256;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  sw_word_t in_word;
  logic     in_valid, in_ready;
  logic     snap_valid, snap_par, done_par;
  logic [ACCW-1:0] snap_center;
  logic [NNB-1:0]  nb_valid, nb_par, nb_done_par;
  logic [NNB-1:0][ACCW-1:0] nb_center;
  logic     lam, rd_grant;
  cluster_t rd_data;

  engine #(.ROW(ROW), .COL(COL), .THRESH(THRESH)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  real expacc [NCELLS];
  int  nhits;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // independent model of one hit's contribution
  task automatic model_hit(input hit_t h);
    for (int j = 0; j < NCELLS; j++) begin
      longint dx, dy, a;
      dx = longint'(h.x) - longint'(isect_x(COL, j, int'(h.layer)));
      dy = longint'(h.y) - longint'(isect_y(ROW, j, int'(h.layer)));
      a  = (dx * dx + dy * dy) / 64;
      if (a > 255) a = 255;
      expacc[j] += $floor(255.0 * $exp(-real'(a) / 32.0) + 0.5);
    end
  endtask

  task automatic send(input sw_word_t w, output int t);
    @(negedge clk);
    in_word  = w;
    in_valid = 1'b1;
    #1;                                // in_ready depends on the word offered
    while (!in_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk);
    t = cyc;
    #1 in_valid = 1'b0;
  endtask

  function automatic hit_t near_hit(input int layer, input int ddx, input int ddy);
    hit_t h;
    h.x = XW'(isect_x(COL, 0, layer) + ddx);
    h.y = XW'(isect_y(ROW, 0, layer) + ddy);
    h.layer = LW'(layer);
    h.ts = '0;
    return h;
  endfunction

  task automatic send_event_hits(input int n, input bit record_timing);
    int t, tprev;
    sw_word_t w;
    for (int j = 0; j < NCELLS; j++) expacc[j] = 0;
    nhits = n;
    for (int i = 0; i < n; i++) begin
      w = '0;
      w.hit = near_hit(i % NLAYERS, $urandom_range(0, 40) - 20, $urandom_range(0, 40) - 20);
      model_hit(w.hit);
      send(w, t);
      if (record_timing && i > 0) check(t - tprev == NCELLS, $sformatf("hit spacing %0d", t - tprev));
      tprev = t;
    end
    if (record_timing) begin
      // last weight of the last hit enters its accumulator 10 cycles later
      logic [ACCW-1:0] acc_before;
      repeat (9) @(posedge clk);
      #1 acc_before = dut.acc[NCELLS-1];
      @(posedge clk);
      #1 check(dut.acc[NCELLS-1] != acc_before, "last weight not added at cycle 10");
    end
  endtask

  task automatic check_snapshot(input cluster_t r);
    for (int j = 0; j < NCELLS; j++)
      check(real'(r.acc[j]) - expacc[j] <= real'(nhits) && expacc[j] - real'(r.acc[j]) <= real'(nhits),
            $sformatf("acc[%0d]=%0d expected %0.0f", j, r.acc[j], expacc[j]));
  endtask

  // neighbours: offer their centres for the engine's current event
  logic nbv, nbdone;
  always_comb begin
    nb_valid    = {NNB{nbv}};
    nb_par      = {NNB{snap_par}};
    nb_done_par = {NNB{nbdone ? snap_par : ~snap_par}};
  end

  task automatic close_event(input int ts, input logic [NNB-1:0][ACCW-1:0] centres,
                             input bit expect_max);
    sw_word_t w;
    int t;
    w = '0; w.ee = 1'b1; w.hit.ts = TSW'(ts);
    nb_center = centres;
    send(w, t);
    repeat (8) @(posedge clk);
    check(snap_valid, "snapshot not taken");
    check(!lam, "LookAtMe acc_before neighbours");
    nbv <= 1'b1;
    repeat (2) @(posedge clk);
    #1;
    check(lam == expect_max, $sformatf("LookAtMe=%0b expected %0b", lam, expect_max));
  endtask

  task automatic read_and_release(input logic [NNB-1:0][ACCW-1:0] centres, input int ts);
    if (lam) begin
      check_snapshot(rd_data);
      check(rd_data.nb == centres, "neighbour centres in record");
      check(int'(rd_data.ts) == ts && int'(rd_data.row) == ROW && int'(rd_data.col) == COL, "record header");
      rd_grant <= 1'b1;
      @(posedge clk);
      rd_grant <= 1'b0;
      #1 check(!lam, "LookAtMe not dropped on grant");
    end
    repeat (3) @(posedge clk);
    #1 check(snap_valid, "bank released acc_before neighbours compared");
    nbdone <= 1'b1;
    repeat (2) @(posedge clk);
    #1 check(!snap_valid, "bank not released");
    nbv <= 1'b0;
    nbdone <= 1'b0;
    @(posedge clk);
  endtask

  initial begin
    logic [NNB-1:0][ACCW-1:0] c;
    in_valid = 0; in_word = '0; rd_grant = 0; nbv = 0; nbdone = 0; nb_center = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // event 0: clear maximum
    send_event_hits(8, 1'b1);
    for (int n = 0; n < NNB; n++) c[n] = 16'd100;
    close_event(10, c, 1'b1);
    check_snapshot(dut.rd_data);
    read_and_release(c, 10);

    // event 1: a neighbour above is larger -> no maximum
    send_event_hits(6, 1'b0);
    for (int n = 0; n < NNB; n++) c[n] = 16'd50;
    c[1] = 16'hFFF0;
    close_event(11, c, 1'b0);
    read_and_release(c, 11);

    // event 2: ties. Equal to a neighbour below/right -> still a maximum
    send_event_hits(6, 1'b0);
    begin
      int ctr;
      sw_word_t w;
      int t;
      w = '0; w.ee = 1'b1; w.hit.ts = 12;
      send(w, t);
      repeat (8) @(posedge clk);
      ctr = int'(snap_center);
      for (int n = 0; n < NNB; n++) c[n] = 16'd10;
      c[7] = ACCW'(ctr);
      nb_center = c;
      nbv <= 1'b1;
      repeat (2) @(posedge clk);
      #1 check(lam, "tie with lower-right neighbour must keep maximum");
      read_and_release(c, 12);
    end

    // event 3: tie with upper-left neighbour -> not a maximum; meanwhile the
    // next event's hits and EndEvent arrive and the second EndEvent is held
    send_event_hits(6, 1'b0);
    begin
      int ctr;
      sw_word_t w;
      int t;
      w = '0; w.ee = 1'b1; w.hit.ts = 13;
      send(w, t);
      repeat (8) @(posedge clk);
      ctr = int'(snap_center);
      for (int n = 0; n < NNB; n++) c[n] = 16'd10;
      c[0] = ACCW'(ctr);
      nb_center = c;
      send_event_hits(3, 1'b0);        // event 4 hits flow while bank busy
      w.hit.ts = 14;
      in_word  <= w;
      in_valid <= 1'b1;
      repeat (20) @(posedge clk);
      #1 check(!in_ready, "second EndEvent not held while bank busy");
      nbv <= 1'b1;
      repeat (2) @(posedge clk);
      #1 check(!lam, "tie with upper-left neighbour must not be a maximum");
      nbdone <= 1'b1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      in_valid <= 1'b0;
      nbdone <= 1'b0;
      nbv <= 1'b0;
      repeat (12) @(posedge clk);
      #1 check(snap_valid && int'(rd_data.ts) == 14, "held EndEvent taken after release");
      check_snapshot(dut.rd_data);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
