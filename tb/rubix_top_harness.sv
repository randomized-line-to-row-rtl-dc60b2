// rubix_top_harness: end-to-end run of one rubix_top against a behavioural
// memory, in the mode given by DYN (0 Rubix-S, 1 Rubix-D).
// The host first writes a working set of NLINES lines, made of whole gangs
// at random places. Then it issues NREQ random reads and writes within the
// set, and finally reads every line back. Every read must return the last
// value written. At the end each written value must sit in exactly one
// physical line, so the mapping lost and duplicated nothing. With FULL = 1
// the top is instantiated with no parameter list (all defaults); otherwise
// AW, GB, GIRB, SEGB, LB and RR set its address fields, line width and
// remap rate.
// Counts: requests, host stalls, memory back-pressure, swaps, skipped
// episodes, dropped draws, epoch ends.
module rubix_top_harness #(
  parameter bit          FULL = 0,
  parameter bit          DYN = 1,
  parameter int unsigned AW = 12, GB = 2, GIRB = 2, SEGB = 0, LB = 64,
  parameter int unsigned RR = 16384,
  parameter int unsigned NLINES = 4096, NREQ = 10000,
  parameter int unsigned READY_PCT = 70
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   n_req, n_stall, n_bp, n_swap, n_skip, n_drop, n_epoch
);
  logic ready, hq_valid, hq_ready, hq_write, hs_valid;
  logic [AW-1:0] hq_addr, m_addr, act_addr;
  logic [LB-1:0] hq_wdata, hs_rdata, m_wdata, m_rdata;
  logic m_valid, m_ready, m_write, m_rsp, act_valid;
  logic ev_swap, ev_skip, ev_drop, ev_epoch, ev_stall;
  logic [63:0] seed;

  if (FULL) begin : g_full
    rubix_top dut (
      .clk(clk), .rst_n(rst_n), .seed(seed), .cfg_dynamic(DYN), .ready(ready),
      .host_req_valid(hq_valid), .host_req_ready(hq_ready), .host_req_write(hq_write),
      .host_req_addr(hq_addr), .host_req_wdata(hq_wdata),
      .host_rsp_valid(hs_valid), .host_rsp_rdata(hs_rdata),
      .mem_req_valid(m_valid), .mem_req_ready(m_ready), .mem_req_write(m_write),
      .mem_req_addr(m_addr), .mem_req_wdata(m_wdata),
      .mem_rsp_valid(m_rsp), .mem_rsp_rdata(m_rdata),
      .act_valid(act_valid), .act_addr(act_addr),
      .ev_swap(ev_swap), .ev_skip(ev_skip), .ev_drop(ev_drop), .ev_epoch(ev_epoch), .ev_stall(ev_stall));
  end else begin : g_small
    rubix_top #(.LINE_ADDR_W(AW), .GANG_BITS(GB), .GIR_BITS(GIRB), .SEG_BITS(SEGB), .LINE_BITS(LB),
                .RR_THRESH(RR)) dut (
      .clk(clk), .rst_n(rst_n), .seed(seed), .cfg_dynamic(DYN), .ready(ready),
      .host_req_valid(hq_valid), .host_req_ready(hq_ready), .host_req_write(hq_write),
      .host_req_addr(hq_addr), .host_req_wdata(hq_wdata),
      .host_rsp_valid(hs_valid), .host_rsp_rdata(hs_rdata),
      .mem_req_valid(m_valid), .mem_req_ready(m_ready), .mem_req_write(m_write),
      .mem_req_addr(m_addr), .mem_req_wdata(m_wdata),
      .mem_rsp_valid(m_rsp), .mem_rsp_rdata(m_rdata),
      .act_valid(act_valid), .act_addr(act_addr),
      .ev_swap(ev_swap), .ev_skip(ev_skip), .ev_drop(ev_drop), .ev_epoch(ev_epoch), .ev_stall(ev_stall));
  end

  mem_model #(.LINE_ADDR_W(AW), .LINE_BITS(LB), .ROW_SHIFT(GB + GIRB), .LAT(3), .READY_PCT(READY_PCT)) mem (
    .clk(clk), .rst_n(rst_n), .req_valid(m_valid), .req_ready(m_ready), .req_write(m_write),
    .req_addr(m_addr), .req_wdata(m_wdata), .rsp_valid(m_rsp), .rsp_rdata(m_rdata),
    .act_valid(act_valid), .act_addr(act_addr));

  always @(posedge clk) if (rst_n) begin
    n_stall <= n_stall + int'(ev_stall);
    n_bp    <= n_bp    + int'(m_valid && !m_ready);
    n_swap  <= n_swap  + int'(ev_swap);
    n_skip  <= n_skip  + int'(ev_skip);
    n_drop  <= n_drop  + int'(ev_drop);
    n_epoch <= n_epoch + int'(ev_epoch);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL(%m): %s", what); end
  endtask

  logic [LB-1:0] ref_mem [logic [AW-1:0]];
  logic [AW-1:0] lines [NLINES];
  logic [LB-1:0] exp_rd [$];
  int            n_rsp, stamp;

  always @(posedge clk) if (rst_n && hs_valid) begin
    n_rsp++;
    check(exp_rd.size() > 0 && hs_rdata == exp_rd.pop_front(), "read returns last write");
  end

  task automatic issue(input logic wr, input logic [AW-1:0] a);
    logic [LB-1:0] d;
    stamp++;
    d = (LB'(stamp) << AW) | LB'(a);      // unique per write
    // inputs change and ready is sampled mid-cycle, away from the clock edge
    @(negedge clk);
    hq_valid = 1; hq_addr = a; hq_write = wr; hq_wdata = d;
    while (!hq_ready) @(negedge clk);
    @(posedge clk);
    n_req++;
    if (wr) ref_mem[a] = d;
    else exp_rd.push_back(ref_mem[a]);
    #1;
    hq_valid = 0;
  endtask

  initial begin
    int ngangs;
    finished = 0; checks = 0; failures = 0; n_rsp = 0; stamp = 0;
    n_req = 0; n_stall = 0; n_bp = 0; n_swap = 0; n_skip = 0; n_drop = 0; n_epoch = 0;
    hq_valid = 0; hq_addr = 0; hq_write = 0; hq_wdata = 0;
    seed = {$urandom, $urandom};
    // working set: whole gangs, distinct
    ngangs = NLINES >> GB;
    if (NLINES == (1 << AW)) begin
      for (int i = 0; i < NLINES; i++) lines[i] = AW'(i);
    end else begin
      bit taken [logic [AW-1:0]];
      for (int g = 0; g < ngangs; g++) begin
        logic [AW-1:0] base;
        do base = AW'({$urandom, $urandom}) & ~AW'((1 << GB) - 1); while (taken.exists(base));
        taken[base] = 1;
        for (int i = 0; i < (1 << GB); i++) lines[g * (1 << GB) + i] = base | AW'(i);
      end
    end
    @(posedge rst_n);
    while (!ready) @(posedge clk);
    #1;
    for (int i = 0; i < NLINES; i++) issue(1, lines[i]);
    for (int n = 0; n < NREQ; n++) begin
      // mostly nearby lines of one gang, as caches would send them
      logic [AW-1:0] a;
      a = lines[$urandom % NLINES];
      issue(($urandom % 3) == 0, a);
    end
    for (int i = 0; i < NLINES; i++) issue(0, lines[i]);
    while (exp_rd.size() > 0) @(posedge clk);
    repeat (200) @(posedge clk);
    // every written value lives in exactly one physical line
    begin
      int where [logic [LB-1:0]];
      int bad;
      bad = 0;
      foreach (ref_mem[a]) where[ref_mem[a]] = 0;
      foreach (mem.store[p]) if (where.exists(mem.store[p])) where[mem.store[p]]++;
      foreach (where[v]) if (where[v] != 1) bad++;
      check(bad == 0, $sformatf("%0d written values not held exactly once", bad));
    end
    finished = 1;
  end
endmodule
