// rubix_d_harness: drives one rubix_d instance against a behavioural memory
// and checks that remapping never loses or misplaces data.
// Phase 1 (activations masked): writes every line once. Each remapped
// address is compared with the boot-time keys, recomputed here from the
// xorshift sequence (ptr = 0, so mapped row = row ^ currKey).
// Phase 2: NREQ random reads and writes. The memory's activation reports
// drive the remap draws. Every read must return the last value written to
// that logical line. At the end every line is read back, and the physical
// memory must hold each logical line exactly once.
// Counts swaps, skipped episodes, dropped draws, epoch ends and host stalls.
module rubix_d_harness #(
  parameter int unsigned AW = 10, GB = 1, GIRB = 2, SEGB = 0,
  parameter int unsigned RR = 16384, NREQ = 12000
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   n_swap, n_skip, n_drop, n_epoch, n_stall
);
  localparam int unsigned LB = 32;
  localparam int unsigned LOW = GB + GIRB;
  localparam int unsigned RW = AW - LOW - SEGB;
  localparam logic [63:0] SEED = 64'h0DDB_A11C_AFE0_0001;

  logic init_done, in_valid, in_ready, out_valid, out_ready;
  logic [LB:0] in_tag, out_tag;
  logic [AW-1:0] in_addr, out_addr, m_addr, sw_addr, act_addr;
  logic act_valid, act_en, swap_busy, sw_valid, sw_write, m_valid, m_ready, m_write, rsp_valid;
  logic [LB-1:0] sw_wdata, m_wdata, rsp_data, in_data, out_data;
  logic ev_swap, ev_skip, ev_drop, ev_epoch;
  int   reads_out;

  rubix_d #(.LINE_ADDR_W(AW), .GANG_BITS(GB), .GIR_BITS(GIRB), .SEG_BITS(SEGB),
            .LINE_BITS(LB), .RR_THRESH(RR), .TAG_W(LB + 1)) dut (
    .clk(clk), .rst_n(rst_n), .seed(SEED), .init_done(init_done),
    .in_valid(in_valid), .in_ready(in_ready), .in_addr(in_addr), .in_tag(in_tag),
    .out_valid(out_valid), .out_ready(out_ready), .out_addr(out_addr), .out_tag(out_tag),
    .act_valid(act_valid && act_en), .act_addr(act_addr), .drained(reads_out == 0),
    .swap_busy(swap_busy), .mem_req_valid(sw_valid), .mem_req_ready(m_ready && swap_busy),
    .mem_req_write(sw_write), .mem_req_addr(sw_addr), .mem_req_wdata(sw_wdata),
    .mem_rsp_valid(rsp_valid && swap_busy), .mem_rsp_rdata(rsp_data),
    .ev_swap(ev_swap), .ev_skip(ev_skip), .ev_drop(ev_drop), .ev_epoch(ev_epoch));

  // the write flag and data ride through rubix_d as its side tag
  assign out_ready = m_ready && !swap_busy;
  assign m_valid   = swap_busy ? sw_valid : out_valid;
  assign m_write   = swap_busy ? sw_write : out_tag[LB];
  assign m_addr    = swap_busy ? sw_addr  : out_addr;
  assign m_wdata   = swap_busy ? sw_wdata : out_data;
  assign out_data  = out_tag[LB-1:0];

  mem_model #(.LINE_ADDR_W(AW), .LINE_BITS(LB), .ROW_SHIFT(LOW), .LAT(2), .READY_PCT(70)) mem (
    .clk(clk), .rst_n(rst_n), .req_valid(m_valid), .req_ready(m_ready), .req_write(m_write),
    .req_addr(m_addr), .req_wdata(m_wdata), .rsp_valid(rsp_valid), .rsp_rdata(rsp_data),
    .act_valid(act_valid), .act_addr(act_addr));

  always @(posedge clk) begin
    if (!rst_n) reads_out <= 0;
    else reads_out <= reads_out + int'(!swap_busy && out_valid && m_ready && !out_tag[LB])
                                - int'(rsp_valid && !swap_busy);
  end

  // bookkeeping of the DUT's events
  always @(posedge clk) if (rst_n) begin
    n_swap  <= n_swap  + int'(ev_swap);
    n_skip  <= n_skip  + int'(ev_skip);
    n_drop  <= n_drop  + int'(ev_drop);
    n_epoch <= n_epoch + int'(ev_epoch);
    n_stall <= n_stall + int'(in_valid && !in_ready && init_done);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL(%m): %s", what); end
  endtask

  function automatic logic [63:0] xs(input logic [63:0] x);
    logic [63:0] y;
    y = x ^ (x << 13); y = y ^ (y >> 7); y = y ^ (y << 17);
    return y;
  endfunction

  logic [LB-1:0] ref_mem [1 << AW];
  logic [LB-1:0] exp_rd [$];
  logic [AW-1:0] exp_addr [$];
  logic          phase1;
  int            n_rsp;

  // check remapped addresses in phase 1
  always @(posedge clk) if (rst_n && !swap_busy && out_valid && m_ready) begin
    if (phase1) begin
      check(exp_addr.size() > 0 && out_addr == exp_addr.pop_front(), "boot-key translation");
    end
  end

  // read responses in order
  always @(posedge clk) if (rst_n && rsp_valid && !swap_busy) begin
    n_rsp++;
    begin
      logic [LB-1:0] e;
      e = (exp_rd.size() > 0) ? exp_rd.pop_front() : 32'hDEAD;
      check(rsp_data == e, $sformatf("read data after remapping: got %h expected %h at %0t", rsp_data, e, $time));
    end
  end

  task automatic issue(input logic wr, input logic [AW-1:0] a, input logic [LB-1:0] d);
    // inputs change and ready is sampled mid-cycle, away from the clock edge
    @(negedge clk);
    in_valid = 1; in_addr = a; in_tag = {wr, d};
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    if (wr) ref_mem[a] = d;
    else exp_rd.push_back(ref_mem[a]);
    #1;
    in_valid = 0;
  endtask

  logic [RW-1:0] curr0 [1 << (GIRB + SEGB)];

  initial begin
    int nv;
    logic [63:0] r;
    finished = 0; checks = 0; failures = 0; n_rsp = 0;
    n_swap = 0; n_skip = 0; n_drop = 0; n_epoch = 0; n_stall = 0;
    in_valid = 0; in_addr = 0; in_tag = 0; act_en = 0; phase1 = 1;
    nv = 1 << (GIRB + SEGB);
    r = SEED;
    for (int i = 0; i < nv; i++) begin curr0[i] = RW'(r); r = xs(r); end
    @(posedge rst_n);
    while (!init_done) @(posedge clk);
    #1;
    // phase 1: fill, checking the boot-key translation
    for (int a = 0; a < (1 << AW); a++) begin
      int row, seg, gir, idx;
      row = a >> LOW; seg = row & ((1 << SEGB) - 1); gir = (a >> GB) & ((1 << GIRB) - 1);
      idx = seg * (1 << GIRB) + gir;
      exp_addr.push_back(AW'((((row >> SEGB) ^ int'(curr0[idx])) << (LOW + SEGB)) |
                             (a & ((1 << (LOW + SEGB)) - 1))));
      issue(1, AW'(a), LB'(a) ^ 32'h7000_0000);
    end
    while (exp_addr.size() > 0) @(posedge clk);
    phase1 = 0;
    act_en = 1;
    // phase 2: random traffic with remapping
    for (int n = 0; n < NREQ; n++) begin
      if ($urandom % 3 == 0) issue(1, AW'($urandom), $urandom);
      else                   issue(0, AW'($urandom), '0);
    end
    // drain, then read everything back
    for (int a = 0; a < (1 << AW); a++) issue(0, AW'(a), '0);
    while (exp_rd.size() > 0 || swap_busy) @(posedge clk);
    repeat (10) @(posedge clk);
    act_en = 0;
    repeat (40) @(posedge clk);
    // physical memory holds every logical line exactly once
    begin
      int cnt [logic [LB-1:0]];
      int bad;
      bad = 0;
      for (int a = 0; a < (1 << AW); a++) cnt[ref_mem[a]] = 0;
      for (int p = 0; p < (1 << AW); p++) begin
        logic [LB-1:0] v;
        v = mem.peek(AW'(p));
        if (!cnt.exists(v)) bad++; else cnt[v]++;
      end
      check(bad == 0, $sformatf("%0d physical lines hold no logical line", bad));
    end
    check(n_rsp > NREQ / 2, "responses arrived");
    finished = 1;
  end
endmodule
