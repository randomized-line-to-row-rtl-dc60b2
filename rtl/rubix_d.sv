// rubix_d: Rubix-D, dynamic randomized line-to-row mapping.
//
// A plain xor of the whole row address with a key would move every row as
// one block: the lines of a row would still share a row. Rubix-D instead
// splits the line address into row | gang-in-row (p bits) | line-in-gang
// (k bits). It keeps the low p+k bits and remaps only the row bits. Each
// gang-in-row position, a "v-group" (the same slot in every row), has its
// own currKey, nextKey and Ptr. Gangs that share a row in the plain mapping
// therefore go to unrelated rows. Optionally each v-group is cut into
// 2^SEG_BITS v-segments (every 2^SEG_BITS-th row). Each segment then has
// its own keys and Ptr, and only the row bits above the segment field are
// remapped. The default SEG_BITS = 0 has no segments.
//
// Translation (one cycle, see xor_remap): L' = row xor currKey; if L' < Ptr
// or L' xor nextKey < Ptr then L' ^= nextKey. The result is registered.
//
// Remapping: each reported activation draws a remap of its v-group with
// probability RR_THRESH/65536 (1% by default). An episode takes P = Ptr and
// D = P xor nextKey. If D > P, the two gangs are swapped in DRAM (see
// gang_swap_engine). Otherwise that pair was already swapped, or
// nextKey = 0, and the episode does no DRAM work. Then Ptr advances. After
// the last row, the epoch ends: currKey ^= nextKey, nextKey takes a new
// PRNG value, and Ptr returns to 0. The rules above follow the paper.
// The following are this design's own choices:
//   - At boot, every v-group's currKey and nextKey come from the PRNG, one
//     v-group per cycle (init_done then rises). Ptr starts at 0.
//   - New requests stall while an episode is under way. The swap starts
//     only when nothing translated earlier is still in flight (out register
//     empty and the caller's `drained`). Ptr advances after the swap, so
//     every request sees either the old or the new placement, never a gang
//     half moved.
//   - A draw that comes while an episode is under way is dropped.
//
// Interface: in_*/out_* are valid/ready channels with a TAG_W side tag.
// act_valid/act_addr report activations (physical line address; its low
// p+k bits and segment bits equal the logical ones). mem_* is the swap
// engine's port, used only while swap_busy is high. ev_* are one-cycle
// event pulses for counters.
module rubix_d #(
  parameter int unsigned LINE_ADDR_W = rubix_pkg::LINE_ADDR_W_DEF,
  parameter int unsigned GANG_BITS   = rubix_pkg::GANG_BITS_DEF,
  parameter int unsigned GIR_BITS    = rubix_pkg::GIR_BITS_DEF,
  parameter int unsigned SEG_BITS    = 0,
  parameter int unsigned LINE_BITS   = rubix_pkg::LINE_BITS_DEF,
  parameter int unsigned RR_THRESH   = rubix_pkg::RR_THRESH_DEF,
  parameter int unsigned TAG_W       = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [63:0]            seed,
  output logic                   init_done,

  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [LINE_ADDR_W-1:0] in_addr,
  input  logic [TAG_W-1:0]       in_tag,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [LINE_ADDR_W-1:0] out_addr,
  output logic [TAG_W-1:0]       out_tag,

  input  logic                   act_valid,
  input  logic [LINE_ADDR_W-1:0] act_addr,
  input  logic                   drained,

  output logic                   swap_busy,
  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output logic                   mem_req_write,
  output logic [LINE_ADDR_W-1:0] mem_req_addr,
  output logic [LINE_BITS-1:0]   mem_req_wdata,
  input  logic                   mem_rsp_valid,
  input  logic [LINE_BITS-1:0]   mem_rsp_rdata,

  output logic                   ev_swap,
  output logic                   ev_skip,
  output logic                   ev_drop,
  output logic                   ev_epoch
);
  import rubix_pkg::*;

  localparam int unsigned LOW_W  = GANG_BITS + GIR_BITS;        // kept bits
  localparam int unsigned ROW_W  = LINE_ADDR_W - LOW_W;         // global row
  localparam int unsigned RW     = ROW_W - SEG_BITS;            // remapped bits
  localparam int unsigned NGIR   = 1 << GIR_BITS;
  localparam int unsigned NV     = NGIR << SEG_BITS;            // key sets
  localparam int unsigned IW     = (NV > 1) ? $clog2(NV) : 1;

  initial begin
    assert (2 * RW <= 64) else $fatal(1, "rubix_d: key pair wider than one PRNG word");
    assert (RW >= 1) else $fatal(1, "rubix_d: no row bits left to remap");
  end

  // Address fields. The segment is the low SEG_BITS of the row address.
  function automatic logic [IW-1:0] vindex(input logic [LINE_ADDR_W-1:0] a);
    logic [ROW_W-1:0] row;
    int unsigned seg, gir;
    row = ROW_W'(a >> LOW_W);
    seg = 32'(row) & ((1 << SEG_BITS) - 1);
    gir = 32'(a >> GANG_BITS) & (NGIR - 1);
    return IW'(seg * NGIR + gir);
  endfunction

  function automatic logic [RW-1:0] rowhi(input logic [LINE_ADDR_W-1:0] a);
    return RW'(a >> (LOW_W + SEG_BITS));
  endfunction

  // Rebuild a line address from remapped row bits and the kept low bits.
  function automatic logic [LINE_ADDR_W-1:0] join_addr(input logic [RW-1:0] hi,
                                                       input logic [LINE_ADDR_W-1:0] a);
    logic [LINE_ADDR_W-1:0] lowmask;
    lowmask = (LINE_ADDR_W'(1) << (LOW_W + SEG_BITS)) - LINE_ADDR_W'(1);
    return (LINE_ADDR_W'(hi) << (LOW_W + SEG_BITS)) | (a & lowmask);
  endfunction

  // ---- remapping-circuit registers, one set per v-group / v-segment -------
  logic [RW-1:0] curr_key [NV];
  logic [RW-1:0] next_key [NV];
  logic [RW-1:0] ptr      [NV];

  rd_state_e       state;
  logic [IW-1:0]   init_idx;
  logic [63:0]     rnd;
  logic            rnd_adv;

  prng u_keys (.clk(clk), .rst_n(rst_n), .seed(seed), .advance(rnd_adv), .rnd(rnd));

  // ---- translation ---------------------------------------------------------
  logic [IW-1:0] in_idx;
  logic [RW-1:0] in_mapped;

  assign in_idx = vindex(in_addr);

  xor_remap #(.W(RW)) u_xlate (
    .addr    (rowhi(in_addr)),
    .curr_key(curr_key[in_idx]),
    .next_key(next_key[in_idx]),
    .ptr     (ptr[in_idx]),
    .mapped  (in_mapped)
  );

  assign init_done = (state != RD_INIT);
  assign in_ready  = (state == RD_IDLE) && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else if (in_valid && in_ready) begin
      out_valid <= 1'b1;
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      out_addr <= join_addr(in_mapped, in_addr);
      out_tag  <= in_tag;
    end
  end

  // ---- remap episodes ------------------------------------------------------
  logic                   fire;
  logic [IW-1:0]          g_q;
  logic [RW-1:0]          p_q, d_q;
  logic [LINE_ADDR_W-1:0] act_low_q;     // kept bits of the episode's gang
  logic                   swap_start, swap_done;
  logic [IW-1:0]          act_idx;
  logic [RW-1:0]          dest;

  remap_trigger #(.RR_THRESH(RR_THRESH)) u_trig (
    .clk(clk), .rst_n(rst_n), .seed(~seed),
    .act_valid(act_valid && init_done), .fire(fire)
  );

  assign act_idx    = vindex(act_addr);
  assign dest       = ptr[act_idx] ^ next_key[act_idx];
  assign swap_start = (state == RD_DRAIN) && !out_valid && drained;
  assign rnd_adv    = (state == RD_INIT) || (state == RD_ADVANCE && ptr[g_q] == '1);

  assign ev_drop  = fire && (state != RD_IDLE);
  assign ev_swap  = swap_start;
  assign ev_skip  = fire && (state == RD_IDLE) && !(dest > ptr[act_idx]);
  assign ev_epoch = (state == RD_ADVANCE) && (ptr[g_q] == '1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= RD_INIT;
      init_idx  <= '0;
      g_q       <= '0;
      p_q       <= '0;
      d_q       <= '0;
      act_low_q <= '0;
      for (int i = 0; i < NV; i++) begin
        ptr[i] <= '0;
      end
    end else begin
      unique case (state)
        RD_INIT: begin
          curr_key[init_idx] <= rnd[RW-1:0];
          next_key[init_idx] <= rnd[2*RW-1:RW];
          init_idx <= init_idx + IW'(1);
          if (32'(init_idx) == NV - 1) state <= RD_IDLE;
        end
        RD_IDLE: begin
          if (fire) begin
            g_q       <= act_idx;
            p_q       <= ptr[act_idx];
            d_q       <= dest;
            act_low_q <= act_addr;
            state     <= (dest > ptr[act_idx]) ? RD_DRAIN : RD_ADVANCE;
          end
        end
        RD_DRAIN:   if (swap_start) state <= RD_SWAP;
        RD_SWAP:    if (swap_done)  state <= RD_ADVANCE;
        RD_ADVANCE: begin
          if (ptr[g_q] == '1) begin
            curr_key[g_q] <= curr_key[g_q] ^ next_key[g_q];
            next_key[g_q] <= rnd[RW-1:0];
            ptr[g_q]      <= '0;
          end else begin
            ptr[g_q] <= ptr[g_q] + RW'(1);
          end
          state <= RD_IDLE;
        end
        default: state <= RD_IDLE;
      endcase
    end
  end

  gang_swap_engine #(.LINE_ADDR_W(LINE_ADDR_W), .GANG_BITS(GANG_BITS), .LINE_BITS(LINE_BITS)) u_swap (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (swap_start),
    .src          (join_addr(p_q, act_low_q)),
    .dst          (join_addr(d_q, act_low_q)),
    .busy         (swap_busy),
    .done         (swap_done),
    .mem_req_valid(mem_req_valid),
    .mem_req_ready(mem_req_ready),
    .mem_req_write(mem_req_write),
    .mem_req_addr (mem_req_addr),
    .mem_req_wdata(mem_req_wdata),
    .mem_rsp_valid(mem_rsp_valid),
    .mem_rsp_rdata(mem_rsp_rdata)
  );

  a_no_accept_in_episode: assert property (@(posedge clk) disable iff (!rst_n)
    (state inside {RD_DRAIN, RD_SWAP}) |-> !in_ready);
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_addr));
endmodule
