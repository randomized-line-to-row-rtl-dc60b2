// prng_tb: checks the xorshift64 generator against a separately written
// model, the zero-seed substitution and the hold when advance is low.
module prng_tb;
  logic clk = 0, rst_n = 0, advance = 0;
  logic [63:0] seed, rnd, model;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  prng dut (.clk(clk), .rst_n(rst_n), .seed(seed), .advance(advance), .rnd(rnd));

  function automatic logic [63:0] xs(input logic [63:0] x);
    logic [63:0] y;
    y = x ^ {x[50:0], 13'b0};
    y = y ^ {7'b0, y[63:7]};
    y = y ^ {y[46:0], 17'b0};
    return y;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seed = 64'h0123_4567_89AB_CDEF;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    model = seed;
    check(rnd == model, "seed loaded");
    advance = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      model = xs(model);
      check(rnd == model, $sformatf("step %0d", i));
    end
    advance = 0;
    repeat (5) @(negedge clk);
    check(rnd == model, "holds without advance");
    // zero seed falls back to the default constant
    rst_n = 0; seed = '0;
    @(negedge clk);
    check(rnd == 64'h9E37_79B9_7F4A_7C15, "zero seed replaced");
    rst_n = 1;
    advance = 1;
    @(negedge clk);
    check(rnd == xs(64'h9E37_79B9_7F4A_7C15), "step from default seed");
    check(rnd != '0, "never zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
