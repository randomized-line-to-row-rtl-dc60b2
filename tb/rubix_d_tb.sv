// rubix_d_tb: runs rubix_d_harness on three small configurations: 10-bit
// line addresses with 2-line gangs and 4 v-groups (no segments, 7 remapped
// row bits), and the same with 4 v-segments per v-group (5 remapped row
// bits), and single-line gangs with 8 v-groups. The remap rate is 25% so that several epochs complete. Each of
// swap, skipped episode, dropped draw, epoch end and host stall must occur.
module rubix_d_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic f0, f1;
  int c0, c1, e0, e1;
  int sw0, sk0, dr0, ep0, st0, sw1, sk1, dr1, ep1, st1;
  logic f2; int c2, e2, sw2, sk2, dr2, ep2, st2;
  int checks, failures;

  rubix_d_harness #(.SEGB(0)) h0 (.clk(clk), .rst_n(rst_n), .finished(f0), .checks(c0), .failures(e0),
    .n_swap(sw0), .n_skip(sk0), .n_drop(dr0), .n_epoch(ep0), .n_stall(st0));
  rubix_d_harness #(.SEGB(2)) h1 (.clk(clk), .rst_n(rst_n), .finished(f1), .checks(c1), .failures(e1),
    .n_swap(sw1), .n_skip(sk1), .n_drop(dr1), .n_epoch(ep1), .n_stall(st1));

  // single-line gangs (GS1): 8 v-groups, no line-in-gang bits
  rubix_d_harness #(.GB(0), .GIRB(3)) h2 (.clk(clk), .rst_n(rst_n), .finished(f2), .checks(c2), .failures(e2),
    .n_swap(sw2), .n_skip(sk2), .n_drop(dr2), .n_epoch(ep2), .n_stall(st2));

  task automatic mech(input int n, input string what);
    checks++;
    if (n == 0) begin failures++; $display("FAIL: mechanism never happened: %s", what); end
  endtask

  initial begin
    #100000000;
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (f0 && f1 && f2);
    checks = c0 + c1 + c2; failures = e0 + e1 + e2;
    $display("no segments : swaps=%0d skips=%0d drops=%0d epochs=%0d stalls=%0d", sw0, sk0, dr0, ep0, st0);
    $display("4 segments  : swaps=%0d skips=%0d drops=%0d epochs=%0d stalls=%0d", sw1, sk1, dr1, ep1, st1);
    mech(sw0, "swap");  mech(sk0, "skip");  mech(dr0, "drop");  mech(ep0, "epoch");  mech(st0, "stall");
    $display("GS1         : swaps=%0d skips=%0d drops=%0d epochs=%0d stalls=%0d", sw2, sk2, dr2, ep2, st2);
    mech(sw2, "swap (GS1)"); mech(ep2, "epoch (GS1)");
    mech(sw1, "swap (seg)"); mech(sk1, "skip (seg)"); mech(ep1, "epoch (seg)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
