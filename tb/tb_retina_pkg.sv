// tb_retina_pkg: checks the shared definitions: the 41-bit hit word, the
// reciprocal table (x * recip >> 20 must equal x / pitch for every 12-bit x
// on every layer), the weight table against real arithmetic, the neighbour
// offsets and the boundary mask, and the lateral-cell offsets.
module tb_retina_pkg;
  import retina_pkg::*;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  localparam logic [255:0][WW-1:0] T = weight_table();

  initial begin
    int bad;
    real e;
    check($bits(hit_t) == 41, "hit word is not 41 bits");
    check(HIT_W == 41, "HIT_W");
    for (int k = 0; k < NLAYERS; k++) begin
      bad = 0;
      for (int x = 0; x < 4096; x++) if (((x * recip(k)) >> 20) != x / pitch(k)) bad++;
      check(bad == 0, $sformatf("reciprocal of layer %0d wrong for %0d values", k, bad));
      check(pitch(k) > 0 && (k == 0 || pitch(k) > pitch(k - 1)), "pitch grows with layer");
      check(isect_x(5, 1, k) - isect_x(5, 0, k) == 16 && isect_x(5, 0, k) - isect_x(5, 2, k) == 16, "dd offsets");
      check(isect_y(5, 3, k) - isect_y(5, 4, k) == 2 * (4 + 4 * k), "dz offsets");
      check(isect_x(5, 5, k) - isect_x(5, 6, k) == 2 * k * (k + 1), "dk offsets");
      check(isect_x(7, 0, k) == 7 * pitch(k) + pitch(k) / 2, "central intersection");
    end
    for (int a = 0; a < 256; a++) begin
      e = $floor(255.0 * $exp(-real'(a) / 32.0) + 0.5);
      check(real'(T[a]) - e <= 1.0 && e - real'(T[a]) <= 1.0, $sformatf("weight %0d", a));
    end
    for (int n = 0; n < NNB; n++) begin
      check(nb_drow(n) * 3 + nb_dcol(n) == ((n < 4) ? n - 4 : n - 3), $sformatf("neighbour %0d offset", n));
    end
    check(nb_exists(0, 0, 4, 4) == 8'b1101_0000, "corner neighbour mask");
    check(nb_exists(1, 1, 4, 4) == 8'hFF, "inner neighbour mask");
    check(uv_offset(3) == 3 * 256, "uv offset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
