// rubix_top_tb: end-to-end test of rubix_top at reduced size (12-bit line
// address, 4-line gangs, 4 v-groups, 64-bit lines, 25% remap rate), once
// strapped to Rubix-S and once to Rubix-D, over the whole 4096-line space.
// Mechanisms that must each happen at least once: Rubix-S requests, host
// stall during a remap episode, memory back-pressure, gang swap, skipped
// episode, dropped draw, epoch end.
// A third run uses the 32-v-segment option at the full 28-bit address width
// (4-line gangs, 32 v-groups of 32 segments, 16 remapped row bits, 1% remap
// rate, 64-bit lines): it must boot all 1024 key sets, swap gangs, and keep
// every read correct.
module rubix_top_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic fs, fd;
  int cs, cd, es, ed;
  int rq_s, st_s, bp_s, sw_s, sk_s, dr_s, ep_s;
  int rq_d, st_d, bp_d, sw_d, sk_d, dr_d, ep_d;
  int cg, eg, rq_g, st_g, bp_g, sw_g, sk_g, dr_g, ep_g;
  logic fg;
  int checks, failures;

  rubix_top_harness #(.DYN(0)) hs (.clk(clk), .rst_n(rst_n), .finished(fs), .checks(cs), .failures(es),
    .n_req(rq_s), .n_stall(st_s), .n_bp(bp_s), .n_swap(sw_s), .n_skip(sk_s), .n_drop(dr_s), .n_epoch(ep_s));
  rubix_top_harness #(.DYN(1)) hd (.clk(clk), .rst_n(rst_n), .finished(fd), .checks(cd), .failures(ed),
    .n_req(rq_d), .n_stall(st_d), .n_bp(bp_d), .n_swap(sw_d), .n_skip(sk_d), .n_drop(dr_d), .n_epoch(ep_d));

  rubix_top_harness #(.DYN(1), .AW(28), .GB(2), .GIRB(5), .SEGB(5), .LB(64), .RR(655),
                      .NLINES(2048), .NREQ(20000)) hg (
    .clk(clk), .rst_n(rst_n), .finished(fg), .checks(cg), .failures(eg),
    .n_req(rq_g), .n_stall(st_g), .n_bp(bp_g), .n_swap(sw_g), .n_skip(sk_g), .n_drop(dr_g), .n_epoch(ep_g));

  task automatic mech(input int n, input string what);
    checks++;
    if (n == 0) begin failures++; $display("FAIL: mechanism never happened: %s", what); end
  endtask

  initial begin
    #200000000;
    $display("TB_RESULT checks=%0d failures=%0d", cs + cd + cg, es + ed + eg + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (fs && fd && fg);
    checks = cs + cd + cg; failures = es + ed + eg;
    $display("Rubix-S: requests=%0d mem-backpressure=%0d swaps=%0d", rq_s, bp_s, sw_s);
    $display("Rubix-D: requests=%0d stalls=%0d mem-backpressure=%0d swaps=%0d skips=%0d drops=%0d epochs=%0d",
             rq_d, st_d, bp_d, sw_d, sk_d, dr_d, ep_d);
    $display("32 segments: requests=%0d stalls=%0d swaps=%0d skips=%0d drops=%0d", rq_g, st_g, sw_g, sk_g, dr_g);
    mech(sw_g, "gang swap with 32 v-segments");
    mech(rq_s, "Rubix-S requests");
    mech(bp_s, "memory back-pressure");
    mech(st_d, "host stall during remap");
    mech(sw_d, "gang swap");
    mech(sk_d, "skipped episode");
    mech(dr_d, "dropped draw");
    mech(ep_d, "epoch end");
    checks++;
    if (sw_s != 0) begin failures++; $display("FAIL: Rubix-S must not remap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
