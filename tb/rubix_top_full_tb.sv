// rubix_top_full_tb: rubix_top with every parameter at its default (28-bit
// line address, 4-line gangs, 32 v-groups, 21 row bits, 512-bit lines, 1%
// remap rate), once strapped to Rubix-S and once to Rubix-D. The host
// writes 4096 lines in whole gangs scattered over 16 GB, issues 20,000
// random reads and writes to them, and reads all back. With 1% of
// activations drawing a remap, Rubix-D performs some hundred gang swaps
// during the run, and every read must still see its last write. A full
// Rubix-D epoch (2^21 episodes per v-group) is far beyond simulation.
module rubix_top_full_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic fs, fd;
  int cs, cd, es, ed;
  int rq_s, st_s, bp_s, sw_s, sk_s, dr_s, ep_s;
  int rq_d, st_d, bp_d, sw_d, sk_d, dr_d, ep_d;
  int checks, failures;

  rubix_top_harness #(.FULL(1), .DYN(0), .AW(28), .GB(2), .GIRB(5), .LB(512), .RR(655),
                      .NLINES(4096), .NREQ(20000)) hs (
    .clk(clk), .rst_n(rst_n), .finished(fs), .checks(cs), .failures(es),
    .n_req(rq_s), .n_stall(st_s), .n_bp(bp_s), .n_swap(sw_s), .n_skip(sk_s), .n_drop(dr_s), .n_epoch(ep_s));
  rubix_top_harness #(.FULL(1), .DYN(1), .AW(28), .GB(2), .GIRB(5), .LB(512), .RR(655),
                      .NLINES(4096), .NREQ(20000)) hd (
    .clk(clk), .rst_n(rst_n), .finished(fd), .checks(cd), .failures(ed),
    .n_req(rq_d), .n_stall(st_d), .n_bp(bp_d), .n_swap(sw_d), .n_skip(sk_d), .n_drop(dr_d), .n_epoch(ep_d));

  initial begin
    #500000000;
    $display("TB_RESULT checks=%0d failures=%0d", cs + cd, es + ed + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (fs && fd);
    checks = cs + cd; failures = es + ed;
    $display("Rubix-S: requests=%0d", rq_s);
    $display("Rubix-D: requests=%0d stalls=%0d swaps=%0d skips=%0d drops=%0d epochs=%0d",
             rq_d, st_d, sw_d, sk_d, dr_d, ep_d);
    checks++;
    if (sw_d == 0) begin failures++; $display("FAIL: no gang swap at 1%% rate"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
