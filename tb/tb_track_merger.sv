// tb_track_merger: five random track streams into the merger, random
// back-pressure on the output.  Checks that every track arrives once, that
// each input's tracks keep their order, that a stalled output holds, and
// that all inputs get served while all are busy (no input waits more than
// NU grants).
module tb_track_merger;
  import retina_pkg::*;

  localparam int NU = 5, PER = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  track_t in_data [NU];
  logic   in_valid [NU], in_ready [NU];
  track_t out_data;
  logic   out_valid, out_ready;

  track_merger #(.NU(NU)) dut (.*);

  int checks = 0, failures = 0, nout = 0;
  int next_sent [NU], next_exp [NU], wait_cnt [NU];
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  track_t held;
  logic stalled = 0;
  always @(posedge clk) if (rst_n) begin
    out_ready <= ($urandom_range(0, 3) != 0);
    for (int i = 0; i < NU; i++) begin
      if (in_valid[i] && in_ready[i]) begin
        next_sent[i] <= next_sent[i] + 1;
        wait_cnt[i] <= 0;
        if (next_sent[i] + 1 < PER) begin
          in_data[i].ts <= TSW'((i << 10) | (next_sent[i] + 1));
          in_data[i].u  <= PW'($urandom);
          in_valid[i]   <= ($urandom_range(0, 1) != 0);
        end else in_valid[i] <= 1'b0;
      end else if (!in_valid[i] && next_sent[i] < PER) begin
        in_valid[i] <= 1'b1;
      end else if (in_valid[i]) begin
        wait_cnt[i] <= wait_cnt[i] + 1;
      end
    end
    if (stalled) check(out_valid && out_data == held, "stalled output changed");
    stalled <= out_valid && !out_ready;
    held <= out_data;
    if (out_valid && out_ready) begin
      int i;
      i = int'(out_data.ts[13:10]);
      check(i < NU && int'(out_data.ts[9:0]) == next_exp[i], "track order or duplicate");
      if (i < NU) next_exp[i] <= next_exp[i] + 1;
      nout <= nout + 1;
    end
    for (int i = 0; i < NU; i++) check(wait_cnt[i] < 8 * NU, "input starved");
  end

  initial begin
    out_ready = 1;
    for (int i = 0; i < NU; i++) begin
      next_sent[i] = 0; next_exp[i] = 0; wait_cnt[i] = 0; in_valid[i] = 0;
      in_data[i] = '0; in_data[i].ts = TSW'(i << 10);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (nout < NU * PER) @(posedge clk);
    repeat (3) @(posedge clk);
    check(!out_valid, "extra output");
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
