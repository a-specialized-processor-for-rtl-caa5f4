// tb_weight_lut: checks all 256 entries of the weight table against
// round(255*exp(-a/32)) computed with real arithmetic (one count of
// tolerance for the fixed-point construction), that the table falls
// monotonically, and that the read data appears one clock after the address.
module tb_weight_lut;
  import retina_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  logic [7:0]    addr;
  logic [WW-1:0] weight;

  weight_lut dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int prev;
    real e;
    prev = 256;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk) addr = 8'(a);
      @(posedge clk);
      #1;
      e = $floor(255.0 * $exp(-real'(a) / 32.0) + 0.5);
      check(real'(weight) - e <= 1.0 && e - real'(weight) <= 1.0,
            $sformatf("w(%0d)=%0d expected %0.0f", a, weight, e));
      check(int'(weight) <= prev, "table not monotonic");
      prev = int'(weight);
    end
    // registered read: the output holds until the next clock
    @(negedge clk) addr = 8'd0;
    #1 check(weight == 8'd0, "output changed before the clock");
    @(posedge clk);
    #1 check(weight == 8'd255, "w(0) not 255 one clock later");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
