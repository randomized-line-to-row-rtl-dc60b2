// gang_swap_engine_tb: swaps random pairs of 4-line gangs in a small
// memory and compares the whole memory with a reference array after each
// swap. Engine A runs against an always-ready memory with 1-cycle read
// latency: it must issue exactly 8 reads and 8 writes and stay busy for
// 4*4+1 = 17 cycles. Engine B runs against a memory that is ready 60% of
// the time with 3-cycle latency.
module gang_swap_engine_tb;
  localparam int AW = 10, LB = 32, GB = 2, G = 1 << GB;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic          start [2];
  logic [AW-1:0] src [2], dst [2];
  logic          busy [2], done [2];
  logic          rv [2], rr [2], rw [2], sv [2];
  logic [AW-1:0] ra [2];
  logic [LB-1:0] wd [2], sd [2];
  logic          av [2];
  logic [AW-1:0] aa [2];

  for (genvar e = 0; e < 2; e++) begin : g_eng
    gang_swap_engine #(.LINE_ADDR_W(AW), .GANG_BITS(GB), .LINE_BITS(LB)) dut (
      .clk(clk), .rst_n(rst_n), .start(start[e]), .src(src[e]), .dst(dst[e]),
      .busy(busy[e]), .done(done[e]),
      .mem_req_valid(rv[e]), .mem_req_ready(rr[e]), .mem_req_write(rw[e]),
      .mem_req_addr(ra[e]), .mem_req_wdata(wd[e]),
      .mem_rsp_valid(sv[e]), .mem_rsp_rdata(sd[e]));
    mem_model #(.LINE_ADDR_W(AW), .LINE_BITS(LB), .ROW_SHIFT(7),
                .LAT(e == 0 ? 1 : 3), .READY_PCT(e == 0 ? 100 : 60)) mem (
      .clk(clk), .rst_n(rst_n), .req_valid(rv[e]), .req_ready(rr[e]), .req_write(rw[e]),
      .req_addr(ra[e]), .req_wdata(wd[e]), .rsp_valid(sv[e]), .rsp_rdata(sd[e]),
      .act_valid(av[e]), .act_addr(aa[e]));
  end

  logic [LB-1:0] ref_mem [2][1 << AW];

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_swap(input int e, input int sg, input int dg);
    int busy_cycles, r0, w0;
    busy_cycles = 0;
    r0 = (e == 0) ? g_eng[0].mem.reads : g_eng[1].mem.reads;
    w0 = (e == 0) ? g_eng[0].mem.writes : g_eng[1].mem.writes;
    // any line inside the gang may be given
    src[e] = AW'(sg * G + ($urandom % G));
    dst[e] = AW'(dg * G + ($urandom % G));
    start[e] = 1;
    @(negedge clk);
    start[e] = 0;
    while (busy[e]) begin busy_cycles++; @(negedge clk); end
    for (int i = 0; i < G; i++) begin
      logic [LB-1:0] t;
      t = ref_mem[e][sg * G + i];
      ref_mem[e][sg * G + i] = ref_mem[e][dg * G + i];
      ref_mem[e][dg * G + i] = t;
    end
    for (int a = 0; a < (1 << AW); a++) begin
      logic [LB-1:0] got;
      got = (e == 0) ? g_eng[0].mem.peek(AW'(a)) : g_eng[1].mem.peek(AW'(a));
      if (got != ref_mem[e][a]) begin
        check(0, $sformatf("engine %0d line %0d holds %h, expected %h", e, a, got, ref_mem[e][a]));
        break;
      end
    end
    check(1, "memory compared");
    if (e == 0) begin
      check(g_eng[0].mem.reads - r0 == 2 * G, $sformatf("reads %0d", g_eng[0].mem.reads - r0));
      check(g_eng[0].mem.writes - w0 == 2 * G, $sformatf("writes %0d", g_eng[0].mem.writes - w0));
      check(busy_cycles == 4 * G + 1, $sformatf("busy for %0d cycles, expected %0d", busy_cycles, 4 * G + 1));
    end
  endtask

  int done_count [2];
  always @(posedge clk) for (int e = 0; e < 2; e++) if (done[e]) done_count[e]++;

  initial begin
    for (int e = 0; e < 2; e++) begin start[e] = 0; src[e] = 0; dst[e] = 0; done_count[e] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int a = 0; a < (1 << AW); a++) begin
      g_eng[0].mem.poke(AW'(a), LB'(a) ^ 32'hA5A5_0000);
      g_eng[1].mem.poke(AW'(a), LB'(a) ^ 32'h5A5A_0000);
      ref_mem[0][a] = LB'(a) ^ 32'hA5A5_0000;
      ref_mem[1][a] = LB'(a) ^ 32'h5A5A_0000;
    end
    repeat (2) @(negedge clk);
    for (int n = 0; n < 30; n++) begin
      int sg, dg;
      sg = $urandom % ((1 << AW) / G);
      do dg = $urandom % ((1 << AW) / G); while (dg == sg);
      do_swap(0, sg, dg);
      do_swap(1, sg, dg);
    end
    check(done_count[0] == 30 && done_count[1] == 30, "one done pulse per swap");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
