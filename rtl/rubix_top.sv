// rubix_top: Rubix randomized line-to-row mapping at the memory controller.
//
// This block sits between the last-level cache and the DRAM scheduler. It
// rewrites every line address so that lines which are neighbours in the
// address space no longer share a DRAM row. Then a row collects activations
// from only a few unrelated lines, which makes "hot rows" (rows that reach
// the Rowhammer threshold in a refresh window) rare. The block holds both
// flavours:
//   - Rubix-S (rubix_s): a fixed mapping, by encrypting the gang address
//     with a 96-bit key chosen at boot. 3 cycles.
//   - Rubix-D (rubix_d): a mapping that changes all the time, by per-v-group
//     xor keys that roll forward through gang swaps drawn at 1% of
//     activations. 1 cycle.
// cfg_dynamic picks one. It is a strap: it must be set before reset is
// released and held from then on. The two cannot be switched at run time, because data placed under one mapping is not moved
// to the other. Building both behind a strap is this design's own
// arrangement. The paper presents them as two variants.
//
// Data path: a host request carries {write, wdata} as a side tag through
// the mapper. The remapped request goes out on mem_req_*. Read data comes
// back in order on mem_rsp_* and is handed to host_rsp_*. During a Rubix-D
// swap the memory port belongs to the swap engine, and its read data is not
// passed to the host. A counter of host reads still in flight tells
// rubix_d when the port has drained, so that a swap can start.
//
// Interface: host_req and mem_req are valid/ready. host_rsp and mem_rsp
// have no back-pressure. act_valid/act_addr are the activations the DRAM
// scheduler performs (physical line address), which drive the Rubix-D
// remapping rate. ready rises once the boot-time keys are drawn. ev_* are
// one-cycle event pulses (swap, skipped episode, dropped draw, epoch end,
// host stall) for performance counters.
module rubix_top #(
  parameter int unsigned LINE_ADDR_W = rubix_pkg::LINE_ADDR_W_DEF,
  parameter int unsigned GANG_BITS   = rubix_pkg::GANG_BITS_DEF,
  parameter int unsigned GIR_BITS    = rubix_pkg::GIR_BITS_DEF,
  parameter int unsigned SEG_BITS    = 0,
  parameter int unsigned LINE_BITS   = rubix_pkg::LINE_BITS_DEF,
  parameter int unsigned RR_THRESH   = rubix_pkg::RR_THRESH_DEF
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [63:0]            seed,
  input  logic                   cfg_dynamic,
  output logic                   ready,

  input  logic                   host_req_valid,
  output logic                   host_req_ready,
  input  logic                   host_req_write,
  input  logic [LINE_ADDR_W-1:0] host_req_addr,
  input  logic [LINE_BITS-1:0]   host_req_wdata,
  output logic                   host_rsp_valid,
  output logic [LINE_BITS-1:0]   host_rsp_rdata,

  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output logic                   mem_req_write,
  output logic [LINE_ADDR_W-1:0] mem_req_addr,
  output logic [LINE_BITS-1:0]   mem_req_wdata,
  input  logic                   mem_rsp_valid,
  input  logic [LINE_BITS-1:0]   mem_rsp_rdata,

  input  logic                   act_valid,
  input  logic [LINE_ADDR_W-1:0] act_addr,

  output logic                   ev_swap,
  output logic                   ev_skip,
  output logic                   ev_drop,
  output logic                   ev_epoch,
  output logic                   ev_stall
);
  localparam int unsigned TAG_W = LINE_BITS + 1;
  localparam int unsigned OW    = 8;              // reads-in-flight counter

  logic dyn_q;
  assign dyn_q = cfg_dynamic;   // static strap, see above

  // ---- Rubix-S -------------------------------------------------------------
  logic                   s_key_ready, s_in_ready, s_out_valid, s_out_ready;
  logic [LINE_ADDR_W-1:0] s_out_addr;
  logic [TAG_W-1:0]       s_out_tag;

  rubix_s #(.LINE_ADDR_W(LINE_ADDR_W), .GANG_BITS(GANG_BITS), .TAG_W(TAG_W)) u_rubix_s (
    .clk      (clk),
    .rst_n    (rst_n),
    .seed     (seed),
    .key_ready(s_key_ready),
    .in_valid (host_req_valid && !dyn_q),
    .in_ready (s_in_ready),
    .in_addr  (host_req_addr),
    .in_tag   ({host_req_write, host_req_wdata}),
    .out_valid(s_out_valid),
    .out_ready(s_out_ready),
    .out_addr (s_out_addr),
    .out_tag  (s_out_tag)
  );

  // ---- Rubix-D -------------------------------------------------------------
  logic                   d_init_done, d_in_ready, d_out_valid, d_out_ready;
  logic [LINE_ADDR_W-1:0] d_out_addr;
  logic [TAG_W-1:0]       d_out_tag;
  logic                   swap_busy, sw_req_valid, sw_req_write;
  logic [LINE_ADDR_W-1:0] sw_req_addr;
  logic [LINE_BITS-1:0]   sw_req_wdata;
  logic [OW-1:0]          reads_out;
  logic                   d_swap, d_skip, d_drop, d_epoch;

  rubix_d #(
    .LINE_ADDR_W(LINE_ADDR_W), .GANG_BITS(GANG_BITS), .GIR_BITS(GIR_BITS),
    .SEG_BITS(SEG_BITS), .LINE_BITS(LINE_BITS), .RR_THRESH(RR_THRESH), .TAG_W(TAG_W)
  ) u_rubix_d (
    .clk          (clk),
    .rst_n        (rst_n),
    .seed         (seed ^ 64'h5DEE_CE66_D1CE_4E5B),
    .init_done    (d_init_done),
    .in_valid     (host_req_valid && dyn_q),
    .in_ready     (d_in_ready),
    .in_addr      (host_req_addr),
    .in_tag       ({host_req_write, host_req_wdata}),
    .out_valid    (d_out_valid),
    .out_ready    (d_out_ready),
    .out_addr     (d_out_addr),
    .out_tag      (d_out_tag),
    .act_valid    (act_valid && dyn_q),
    .act_addr     (act_addr),
    .drained      (reads_out == '0),
    .swap_busy    (swap_busy),
    .mem_req_valid(sw_req_valid),
    .mem_req_ready(mem_req_ready && swap_busy),
    .mem_req_write(sw_req_write),
    .mem_req_addr (sw_req_addr),
    .mem_req_wdata(sw_req_wdata),
    .mem_rsp_valid(mem_rsp_valid && swap_busy),
    .mem_rsp_rdata(mem_rsp_rdata),
    .ev_swap      (d_swap),
    .ev_skip      (d_skip),
    .ev_drop      (d_drop),
    .ev_epoch     (d_epoch)
  );

  // ---- memory port ---------------------------------------------------------
  logic             h_valid;
  logic [TAG_W-1:0] h_tag;
  logic             h_take;

  assign ready          = dyn_q ? d_init_done : s_key_ready;
  assign host_req_ready = dyn_q ? d_in_ready : s_in_ready;
  assign h_valid        = dyn_q ? d_out_valid : s_out_valid;
  assign h_tag          = dyn_q ? d_out_tag : s_out_tag;
  assign s_out_ready    = !dyn_q && mem_req_ready;
  assign d_out_ready    = dyn_q && mem_req_ready && !swap_busy;

  always_comb begin
    if (swap_busy) begin
      mem_req_valid = sw_req_valid;
      mem_req_write = sw_req_write;
      mem_req_addr  = sw_req_addr;
      mem_req_wdata = sw_req_wdata;
    end else begin
      mem_req_valid = h_valid;
      mem_req_write = h_tag[TAG_W-1];
      mem_req_addr  = dyn_q ? d_out_addr : s_out_addr;
      mem_req_wdata = h_tag[LINE_BITS-1:0];
    end
  end

  assign h_take         = !swap_busy && h_valid && mem_req_ready && !h_tag[TAG_W-1];
  assign host_rsp_valid = mem_rsp_valid && !swap_busy;
  assign host_rsp_rdata = mem_rsp_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) reads_out <= '0;
    else reads_out <= reads_out + OW'(h_take) - OW'(host_rsp_valid);
  end

  assign ev_swap  = d_swap;
  assign ev_skip  = d_skip;
  assign ev_drop  = d_drop;
  assign ev_epoch = d_epoch;
  assign ev_stall = host_req_valid && !host_req_ready && ready;

  a_no_rsp_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    host_rsp_valid |-> reads_out != '0 || h_take);
  a_swap_port_idle: assert property (@(posedge clk) disable iff (!rst_n)
    swap_busy |-> !d_out_valid);
endmodule
