// kernel_harness: runs the three synthetic access kernels (stream,
// stride-64, random) through one rubix_top and counts hot rows.
//
// The model is one bank of 4 KB rows (64 lines) in a 4 GB memory: 26-bit
// line addresses and 64 lines per row: gangs of 2^GB lines (GANG_BITS = GB)
// and 2^(6-GB) gang slots per row (GIR_BITS = 6 - GB). Each kernel covers a 4 MB footprint (64K lines, 1K
// rows under the plain mapping) and makes NACC reads:
//   stream    line j mod 64K, in order;
//   stride-64 one line of each 4 KB page in turn, then the next line of
//             every page;
//   random    a uniformly random line of the footprint.
// Before each kernel the footprint is written with data unique to line and
// kernel, and every read must return it. Activations are taken from the
// behavioural memory (open-page, one bank). Only those of the read phase
// count. A row with THRESH or more activations is a hot row. Hot rows are
// counted twice: from the host's reads alone (hot), and with the Rubix-D
// swap traffic included (hot_all). The same counts are made for the plain mapping
// from the logical addresses in issue order (baseline), and the number of
// distinct physical rows the footprint lands in is reported.
module kernel_harness #(
  parameter bit          DYN = 0,
  parameter int unsigned GB = 0,
  parameter int unsigned NACC = 1000000,
  parameter int unsigned THRESH = 64
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   hot [3],          // hot rows per kernel under the Rubix mapping, host reads only
  output int   hot_all [3],      // the same with the swap traffic included
  output int   base_hot [3],     // hot rows per kernel under the plain mapping
  output int   rows [3],         // distinct physical rows holding the footprint
  output int   n_swap
);
  localparam int unsigned AW = 26, LB = 64, ROWB = 6;
  localparam int unsigned NLINES = 1 << 16;

  logic ready, hq_valid, hq_ready, hq_write, hs_valid;
  logic [AW-1:0] hq_addr, m_addr, act_addr;
  logic [LB-1:0] hq_wdata, hs_rdata, m_wdata, m_rdata;
  logic m_valid, m_ready, m_write, m_rsp, act_valid;
  logic ev_swap, ev_skip, ev_drop, ev_epoch, ev_stall;
  logic [63:0] seed;

  rubix_top #(.LINE_ADDR_W(AW), .GANG_BITS(GB), .GIR_BITS(ROWB - GB), .LINE_BITS(LB)) dut (
    .clk(clk), .rst_n(rst_n), .seed(seed), .cfg_dynamic(DYN), .ready(ready),
    .host_req_valid(hq_valid), .host_req_ready(hq_ready), .host_req_write(hq_write),
    .host_req_addr(hq_addr), .host_req_wdata(hq_wdata),
    .host_rsp_valid(hs_valid), .host_rsp_rdata(hs_rdata),
    .mem_req_valid(m_valid), .mem_req_ready(m_ready), .mem_req_write(m_write),
    .mem_req_addr(m_addr), .mem_req_wdata(m_wdata),
    .mem_rsp_valid(m_rsp), .mem_rsp_rdata(m_rdata),
    .act_valid(act_valid), .act_addr(act_addr),
    .ev_swap(ev_swap), .ev_skip(ev_skip), .ev_drop(ev_drop), .ev_epoch(ev_epoch), .ev_stall(ev_stall));

  mem_model #(.LINE_ADDR_W(AW), .LINE_BITS(LB), .ROW_SHIFT(ROWB), .LAT(2), .READY_PCT(100)) mem (
    .clk(clk), .rst_n(rst_n), .req_valid(m_valid), .req_ready(m_ready), .req_write(m_write),
    .req_addr(m_addr), .req_wdata(m_wdata), .rsp_valid(m_rsp), .rsp_rdata(m_rdata),
    .act_valid(act_valid), .act_addr(act_addr));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL(%m): %s", what); end
  endtask

  bit                 counting;
  int                 acts [int];       // physical row -> activations by host reads
  int                 aacts [int];      // physical row -> all activations
  int                 bacts [int];      // plain-mapping row -> activations
  int                 brow_open;
  logic [LB-1:0]      exp_rd [$];
  int                 mism;

  always @(posedge clk) if (rst_n) begin
    n_swap <= n_swap + int'(ev_swap);
    if (counting && act_valid) begin
      aacts[int'(act_addr >> ROWB)]++;
      if (!dut.swap_busy) acts[int'(act_addr >> ROWB)]++;
    end
  end

  // read data is stable mid-cycle
  always @(negedge clk) if (rst_n && hs_valid) begin
    checks++;
    if (exp_rd.size() == 0 || hs_rdata != exp_rd.pop_front()) mism++;
  end

  function automatic logic [LB-1:0] pattern(input int k, input logic [AW-1:0] a);
    return (LB'(k + 1) << 40) | (LB'(a) << 8) | LB'(8'hA5);
  endfunction

  task automatic issue(input logic wr, input logic [AW-1:0] a, input logic [LB-1:0] d);
    @(negedge clk);
    hq_valid = 1; hq_addr = a; hq_write = wr; hq_wdata = d;
    while (!hq_ready) @(negedge clk);
    @(posedge clk);
    if (!wr) begin
      exp_rd.push_back(d);
      if (int'(a >> ROWB) != brow_open) begin
        bacts[int'(a >> ROWB)]++;
        brow_open = int'(a >> ROWB);
      end
    end
    #1;
    hq_valid = 0;
  endtask

  initial begin
    finished = 0; checks = 0; failures = 0; n_swap = 0; mism = 0; counting = 0;
    hq_valid = 0; hq_addr = 0; hq_write = 0; hq_wdata = 0;
    seed = {$urandom, $urandom};
    @(posedge rst_n);
    while (!ready) @(posedge clk);
    #1;
    for (int k = 0; k < 3; k++) begin
      for (int a = 0; a < NLINES; a++) issue(1, AW'(a), pattern(k, AW'(a)));
      while (exp_rd.size() > 0) @(posedge clk);
      repeat (10) @(posedge clk);
      acts.delete(); aacts.delete(); bacts.delete(); brow_open = -1;
      counting = 1;
      for (int j = 0; j < int'(NACC); j++) begin
        logic [AW-1:0] a;
        case (k)
          0: a = AW'(j % NLINES);
          1: a = AW'(((j % 1024) << ROWB) | ((j / 1024) % 64));
          default: a = AW'($urandom % NLINES);
        endcase
        issue(0, a, pattern(k, a));
      end
      while (exp_rd.size() > 0) @(posedge clk);
      repeat (10) @(posedge clk);
      counting = 0;
      hot[k] = 0; hot_all[k] = 0; base_hot[k] = 0;
      foreach (acts[r]) if (acts[r] >= int'(THRESH)) hot[k]++;
      foreach (aacts[r]) if (aacts[r] >= int'(THRESH)) hot_all[k]++;
      foreach (bacts[r]) if (bacts[r] >= int'(THRESH)) base_hot[k]++;
      // where the footprint lives now
      begin
        bit seen [int];
        foreach (mem.store[p]) if (mem.store[p][47:40] == 8'(k + 1)) seen[int'(p >> ROWB)] = 1;
        rows[k] = seen.num();
      end
    end
    check(mism == 0, $sformatf("%0d reads returned wrong data", mism));
    finished = 1;
  end
endmodule
