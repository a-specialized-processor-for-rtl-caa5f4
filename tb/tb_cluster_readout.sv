// tb_cluster_readout: twelve model engines raise LookAtMe at random; each
// model drops its flag on a grant and then raises it again later with a new
// record.  The consumer is stalled at random.  Checks: grants are one-hot and
// only to engines that ask; every raised flag is served exactly once and the
// record on the output is the granted engine's; no engine waits more than
// one round while others are served repeatedly (round robin).
module tb_cluster_readout;
  import retina_pkg::*;

  localparam int NE = 12, ROUNDS = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NE-1:0] lam, rd_grant;
  cluster_t      rd_data [NE];
  cluster_t      out_data;
  logic          out_valid, out_ready;

  cluster_readout #(.NE(NE)) dut (.*);

  int checks = 0, failures = 0, served = 0, raised = 0;
  int serial [NE];
  int waiting [NE];
  cluster_t expq [$];
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    int nr;
    nr = 0;
    out_ready <= ($urandom_range(0, 2) != 0);
    check($onehot0(rd_grant), "grant not one-hot");
    check((rd_grant & ~lam) == '0, "grant without LookAtMe");
    for (int e = 0; e < NE; e++) begin
      if (rd_grant[e]) begin
        expq.push_back(rd_data[e]);
        lam[e] <= 1'b0;
        waiting[e] <= 0;
      end else if (lam[e]) begin
        waiting[e] <= waiting[e] + 1;
        check(waiting[e] < 4 * NE, "engine starved");
      end else if (raised + nr < ROUNDS && $urandom_range(0, 5) == 0) begin
        lam[e] <= 1'b1;
        serial[e] <= serial[e] + 1;
        rd_data[e].row <= AW'(e);
        rd_data[e].ts  <= TSW'(serial[e] + 1);
        rd_data[e].acc <= {NCELLS{16'($urandom)}};
        rd_data[e].nb  <= {NNB{16'($urandom)}};
        nr++;
      end
    end
    raised <= raised + nr;
    if (out_valid && out_ready) begin
      check(expq.size() > 0 && out_data == expq[0], "record mismatch");
      if (expq.size() > 0) void'(expq.pop_front());
      served <= served + 1;
    end
  end

  initial begin
    lam = '0; out_ready = 1;
    for (int e = 0; e < NE; e++) begin rd_data[e] = '0; serial[e] = 0; waiting[e] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!(raised >= ROUNDS && served == raised)) @(posedge clk);
    repeat (5) @(posedge clk);
    check(served == raised && lam == '0, "not every request served");
    $display("served %0d", served);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired %0d %0d %0d", raised, served, expq.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
