// remap_trigger_tb: measures the remap draw rate.
// 200,000 activations at the default threshold must fire 1% of the time
// (expected 1999, within +-200, about 4.5 sigma). A second instance with
// threshold 32768 must fire half the time. fire must never rise without an
// activation. Besides the rates, every cycle's fire of both instances is
// compared with a model: a separately written xorshift64 started from the
// same seed, whose top 16 bits are compared with the threshold.
module remap_trigger_tb;
  logic clk = 0, rst_n = 0, act = 0;
  logic f1, f50;
  int checks = 0, failures = 0;
  int n1 = 0, n50 = 0, nact = 0, spurious = 0;
  always #5 clk = ~clk;

  remap_trigger u1 (.clk(clk), .rst_n(rst_n), .seed(64'h1234_5678), .act_valid(act), .fire(f1));
  remap_trigger #(.RR_THRESH(32768)) u50 (.clk(clk), .rst_n(rst_n), .seed(64'hAB), .act_valid(act), .fire(f50));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] m1 = 64'h1234_5678, m50 = 64'hAB;
  int mism = 0;

  function automatic logic [63:0] xs(input logic [63:0] x);
    x ^= x << 13;
    x ^= x >> 7;
    x ^= x << 17;
    return x;
  endfunction

  always @(negedge clk) if (rst_n) begin
    checks += 2;
    if (f1 !== (act && m1[63:48] < 16'd655)) mism++;
    if (f50 !== (act && m50[63:48] < 16'd32768)) mism++;
    if (act) begin m1 = xs(m1); m50 = xs(m50); end
    if (act) begin nact++; n1 += int'(f1); n50 += int'(f50); end
    else if (f1 || f50) spurious++;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (nact < 200000) begin
      @(posedge clk);
      act <= ($urandom % 4) != 0;
    end
    @(posedge clk); act <= 0;
    @(negedge clk); @(negedge clk);
    $display("activations=%0d fires(1%%)=%0d fires(50%%)=%0d", nact, n1, n50);
    check(n1 > 1800 && n1 < 2200, $sformatf("1%% rate: %0d of %0d", n1, nact));
    check(n50 > 99000 && n50 < 101000, $sformatf("50%% rate: %0d", n50));
    check(spurious == 0, "no fire without activation");
    failures += mism;
    if (mism != 0) $display("FAIL: %0d cycles where fire differs from the model", mism);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
