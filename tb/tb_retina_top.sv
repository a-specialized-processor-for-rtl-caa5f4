// tb_retina_top: end-to-end test of the track processor on an 8 x 8 engine
// grid (64 links, 6-stage network, 6 readout groups).
//
// Each event holds one straight track in every 4 x 4 area of the grid, at
// a random position, so tracks are at least about three cells apart.  A track with grid coordinates (u, v), in cell
// units, crosses layer k at x = (u + 1/2) * P(k), y = (v + 1/2) * P(k); its
// six hits are sent on random links, EndEvent words on every link close the
// event, and events follow each other without waiting.  Expected result:
// one track per generated track, with the event's timestamp and u, v within
// half a cell of the truth.  The bench also counts how often each mechanism
// of the design acted - input stall, hit copying in the network, an engine
// holding an EndEvent while its bank is busy, a LookAtMe waiting for the
// busy centroid unit, output back-pressure - and fails if one never did.
module tb_retina_top;
  import retina_pkg::*;

  localparam int ROWS = 8, COLS = 8, N = ROWS * COLS;
  localparam int EVENTS = 6, AC = COLS / 4, TRACKS = (ROWS / 4) * AC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_word_t link_word  [N];
  logic       link_valid [N], link_ready [N];
  track_t     trk_data;
  logic       trk_valid, trk_ready;

  retina_top #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  link_word_t stim [N][$];
  real tu [EVENTS][TRACKS], tv [EVENTS][TRACKS];
  bit  matched [EVENTS][TRACKS];
  int  ntrk = 0, hits_sent = 0;
  int  n_stall = 0, n_deliver = 0, n_eehold = 0, n_lamwait = 0, n_backp = 0;
  int  t_last_ee = 0, t_last_trk = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // link drivers
  logic drv_valid [N];
  bit   go = 0;
  always_comb for (int i = 0; i < N; i++) link_valid[i] = drv_valid[i];
  always @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (!go) drv_valid[i] <= 1'b0;
      else if (!drv_valid[i] || link_ready[i]) begin
        if (drv_valid[i] && link_word[i].ee) t_last_ee <= cyc;
        if (stim[i].size() > 0) begin
          link_word[i]  <= stim[i].pop_front();
          drv_valid[i]  <= 1'b1;
        end else drv_valid[i] <= 1'b0;
      end
    end
  end

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      if (link_valid[i] && !link_ready[i]) n_stall++;
      if (dut.ev[i] && dut.er[i] && !dut.ew[i].ee) n_deliver++;
      if (dut.ev[i] && !dut.er[i] && dut.ew[i].ee) n_eehold++;
      if (dut.lam[i] && !dut.grant[i]) n_lamwait++;
    end
    if (trk_valid && !trk_ready) n_backp++;
  end

  // track checker
  always @(posedge clk) if (rst_n) begin
    trk_ready <= ((cyc / 16) % 4 != 0);
    if (trk_valid && trk_ready) begin
      int e;
      bit found;
      real ru, rv;
      e = int'(trk_data.ts);
      ru = real'(trk_data.u) / 256.0;
      rv = real'(trk_data.v) / 256.0;
      found = 0;
      if (e < EVENTS) begin
        for (int t = 0; t < TRACKS; t++) begin
          if (!matched[e][t] && ru - tu[e][t] < 0.5 && tu[e][t] - ru < 0.5 &&
              rv - tv[e][t] < 0.5 && tv[e][t] - rv < 0.5) begin
            matched[e][t] = 1; found = 1;
          end
        end
      end
      check(found, $sformatf("track ev=%0d u=%0.2f v=%0.2f matches nothing", e, ru, rv));
      check(trk_data.peak >= 16'd256, "track below threshold");
      ntrk++;
      t_last_trk = cyc;
    end
  end

  initial begin
    int cells [$];
    int ci, r0, c0, k, lk;
    real u, v;
    link_word_t w;
    trk_ready = 1;
    for (int i = 0; i < N; i++) begin drv_valid[i] = 0; link_word[i] = '0; end
    // generate the events: one track in each 4 x 4 area of the grid, jittered
    for (int e = 0; e < EVENTS; e++) begin
      for (int t = 0; t < TRACKS; t++) begin
        r0 = 1 + 4 * (t / AC) + $urandom_range(0, 1);
        c0 = 1 + 4 * (t % AC) + $urandom_range(0, 1);
        u = real'(c0) + real'($urandom_range(0, 60)) / 100.0 - 0.3;
        v = real'(r0) + real'($urandom_range(0, 60)) / 100.0 - 0.3;
        tu[e][t] = u; tv[e][t] = v; matched[e][t] = 0;
        for (k = 0; k < NLAYERS; k++) begin
          w = '0;
          w.hit.x = XW'(int'((u + 0.5) * real'(pitch(k))));
          w.hit.y = YW'(int'((v + 0.5) * real'(pitch(k))));
          w.hit.layer = LW'(k);
          w.hit.ts = TSW'(e);
          lk = $urandom_range(0, N - 1);
          stim[lk].push_back(w);
          hits_sent++;
        end
      end
      for (int i = 0; i < N; i++) begin
        w = '0; w.ee = 1'b1; w.hit.ts = TSW'(e);
        stim[i].push_back(w);
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    go = 1;
    while (ntrk < EVENTS * TRACKS && cyc < 20000) @(posedge clk);
    repeat (200) @(posedge clk);
    check(ntrk == EVENTS * TRACKS, $sformatf("%0d tracks out, %0d generated", ntrk, EVENTS * TRACKS));
    for (int e = 0; e < EVENTS; e++)
      for (int t = 0; t < TRACKS; t++)
        check(matched[e][t], $sformatf("track ev=%0d u=%0.2f v=%0.2f not found", e, tu[e][t], tv[e][t]));
    $display("hits sent %0d, delivered to engines %0d", hits_sent, n_deliver);
    $display("input stall cycles %0d, EndEvent holds %0d, LookAtMe waits %0d, output back-pressure %0d",
             n_stall, n_eehold, n_lamwait, n_backp);
    $display("last EndEvent taken at %0d, last track at %0d", t_last_ee, t_last_trk);
    check(n_stall > 0, "input stall never happened");
    check(n_deliver > hits_sent, "hits never copied in the network");
    check(n_eehold > 0, "engine never held an EndEvent");
    check(n_lamwait > 0, "LookAtMe never waited for the centroid unit");
    check(n_backp > 0, "output back-pressure never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
