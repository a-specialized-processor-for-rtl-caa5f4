// tb_centroid_unit: random cluster records through the centroid unit.  The
// expected parameters are worked out here with exact integer arithmetic:
//   u = 256*col + sign * floor(256*|sum(dc*l)| / sum9(l)), likewise v,
//   d = sign * floor(256*|l(+dd)-l(-dd)| / sum7), likewise z and k.
// Checks every field, that a record takes exactly 11 cycles from acceptance
// to a valid track, that the unit takes no record while busy, and that a
// stalled track stays on the output.
module tb_centroid_unit;
  import retina_pkg::*;

  localparam int NREC = 400;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cluster_t in_data;
  logic     in_valid, in_ready;
  track_t   out_data;
  logic     out_valid, out_ready;

  centroid_unit dut (.*);

  int checks = 0, failures = 0, cyc = 0, t_acc, nout = 0;
  cluster_t recs [$];
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic longint q8(input longint num, input longint den);
    longint a;
    if (den == 0) return 0;
    a = (num < 0) ? -num : num;
    a = (a * 256) / den;
    return (num < 0) ? -a : a;
  endfunction

  function automatic track_t expect_track(input cluster_t c);
    track_t t;
    longint s9, s7, nu, nv;
    s9 = c.acc[0]; for (int n = 0; n < NNB; n++) s9 += c.nb[n];
    s7 = 0; for (int j = 0; j < NCELLS; j++) s7 += c.acc[j];
    nu = 0; nv = 0;
    for (int n = 0; n < NNB; n++) begin
      nu += nb_dcol(n) * longint'(c.nb[n]);
      nv += nb_drow(n) * longint'(c.nb[n]);
    end
    t.ts = c.ts;
    t.peak = c.acc[0];
    t.u = PW'(256 * longint'(c.col) + q8(nu, s9));
    t.v = PW'(256 * longint'(c.row) + q8(nv, s9));
    t.d = LPW'(q8(longint'(c.acc[1]) - longint'(c.acc[2]), s7));
    t.z = LPW'(q8(longint'(c.acc[3]) - longint'(c.acc[4]), s7));
    t.k = LPW'(q8(longint'(c.acc[5]) - longint'(c.acc[6]), s7));
    return t;
  endfunction

  // output side
  track_t held;
  logic stalled = 0;
  always @(posedge clk) if (rst_n) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    if (stalled) check(out_valid && out_data == held, "stalled track changed");
    stalled <= out_valid && !out_ready;
    held <= out_data;
    if (out_valid && out_ready) begin
      track_t e;
      e = expect_track(recs.pop_front());
      check(out_data == e, $sformatf("track u=%0d v=%0d d=%0d z=%0d k=%0d expected u=%0d v=%0d d=%0d z=%0d k=%0d",
            out_data.u, out_data.v, out_data.d, out_data.z, out_data.k, e.u, e.v, e.d, e.z, e.k));
      nout++;
    end
  end

  initial begin
    cluster_t c;
    int lat;
    in_valid = 0; in_data = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < NREC; r++) begin
      c.row = AW'($urandom_range(0, 31)); c.col = AW'($urandom_range(0, 31));
      c.ts  = TSW'(r);
      // a peak with smaller surroundings, sometimes extreme values
      for (int j = 0; j < NCELLS; j++) c.acc[j] = ACCW'($urandom_range(0, (r % 5 == 0) ? 65535 : 2000));
      for (int n = 0; n < NNB; n++) c.nb[n] = ACCW'($urandom_range(0, (r % 7 == 0) ? 65535 : 2000));
      if (r == 1) begin c.acc = '0; c.nb = '0; c.acc[0] = 16'd300; end
      @(negedge clk);
      in_data = c; in_valid = 1;
      while (!in_ready) @(negedge clk);
      recs.push_back(c);
      @(posedge clk); t_acc = cyc;
      #1 in_valid = 0;
      check(!in_ready, "unit ready while busy");
      if (r < 3) begin
        // latency with the consumer ready
        lat = 0;
        while (!out_valid) begin @(posedge clk); lat++; #1; end
        check(lat == 11, $sformatf("latency %0d cycles", lat));
      end
    end
    while (nout < NREC) @(posedge clk);
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
