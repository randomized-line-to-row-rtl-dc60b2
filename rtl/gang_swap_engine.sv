// gang_swap_engine: exchanges the contents of two gangs in DRAM.
//
// One Rubix-D remap episode swaps the gang at the v-group's Ptr location
// with the gang at Ptr xor nextKey. Both sit in the same gang-in-row slot
// of two rows. With 4-line gangs this takes 8 column reads and 8 column
// writes over the two rows. This engine streams those accesses through an
// ordinary memory request port. First it reads the 2^k lines of the source
// gang, then the 2^k lines of the destination gang, into a buffer of
// 2*2^k lines. When all read data is back, it writes the source data to
// the destination lines and the destination data to the source lines.
// With an open-page scheduler this order costs 3 row activations (source,
// destination, source again), the count the paper gives for a swap.
// The access order and the buffer are this design's choices. The paper
// gives the access counts.
//
// Interface: pulse start with src/dst (any line address inside each gang;
// the line-in-gang bits are ignored) while busy is low. busy stays high
// until the last write is accepted. done pulses for one cycle in that
// cycle. The memory port is valid/ready on requests. Read data must come
// back in request order on mem_rsp_valid/mem_rsp_rdata, which has no
// back-pressure. The port carries nothing else while busy.
//
// Timing: 4*2^k accepted requests plus one read latency. With a memory
// that is always ready and returns read data the cycle after a request,
// busy is high for 4*2^k + 1 cycles (17 for 4-line gangs). done comes in
// the last of them.
module gang_swap_engine #(
  parameter int unsigned LINE_ADDR_W = rubix_pkg::LINE_ADDR_W_DEF,
  parameter int unsigned GANG_BITS   = rubix_pkg::GANG_BITS_DEF,
  parameter int unsigned LINE_BITS   = rubix_pkg::LINE_BITS_DEF
) (
  input  logic                   clk,
  input  logic                   rst_n,

  input  logic                   start,
  input  logic [LINE_ADDR_W-1:0] src,
  input  logic [LINE_ADDR_W-1:0] dst,
  output logic                   busy,
  output logic                   done,

  output logic                   mem_req_valid,
  input  logic                   mem_req_ready,
  output logic                   mem_req_write,
  output logic [LINE_ADDR_W-1:0] mem_req_addr,
  output logic [LINE_BITS-1:0]   mem_req_wdata,
  input  logic                   mem_rsp_valid,
  input  logic [LINE_BITS-1:0]   mem_rsp_rdata
);
  localparam int unsigned G   = 1 << GANG_BITS;   // lines per gang
  localparam int unsigned CW  = GANG_BITS + 3;    // counts up to 4*G

  logic [LINE_ADDR_W-1:0] src_q, dst_q;
  logic [CW-1:0]          iss, rcv;
  logic [LINE_BITS-1:0]   buf_q [2*G];
  logic                   reading, writing;
  logic [CW-1:0]          idx;

  localparam logic [LINE_ADDR_W-1:0] GMASK = LINE_ADDR_W'(G - 1);

  always_comb begin
    reading = iss < CW'(2 * G);
    writing = !reading && (iss < CW'(4 * G)) && (rcv == CW'(2 * G));
    mem_req_valid = busy && (reading || writing);
    mem_req_write = !reading;
    mem_req_wdata = '0;
    mem_req_addr  = '0;
    if (iss < CW'(G)) begin                 // read source gang
      idx = iss;
      mem_req_addr = src_q | LINE_ADDR_W'(idx);
    end else if (iss < CW'(2 * G)) begin    // read destination gang
      idx = iss - CW'(G);
      mem_req_addr = dst_q | LINE_ADDR_W'(idx);
    end else if (iss < CW'(3 * G)) begin    // source data -> destination
      idx = iss - CW'(2 * G);
      mem_req_addr  = dst_q | LINE_ADDR_W'(idx);
      mem_req_wdata = buf_q[(GANG_BITS+1)'(idx)];
    end else begin                          // destination data -> source
      idx = iss - CW'(3 * G);
      mem_req_addr  = src_q | LINE_ADDR_W'(idx);
      mem_req_wdata = buf_q[(GANG_BITS+1)'(G + 32'(idx))];
    end
  end

  assign done = busy && mem_req_valid && mem_req_ready && (iss == CW'(4 * G - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      iss   <= '0;
      rcv   <= '0;
      src_q <= '0;
      dst_q <= '0;
    end else if (!busy) begin
      if (start) begin
        busy  <= 1'b1;
        iss   <= '0;
        rcv   <= '0;
        src_q <= src & ~GMASK;
        dst_q <= dst & ~GMASK;
      end
    end else begin
      if (mem_req_valid && mem_req_ready) iss <= iss + CW'(1);
      if (mem_rsp_valid) rcv <= rcv + CW'(1);
      if (done) busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (busy && mem_rsp_valid && rcv < CW'(2 * G)) buf_q[rcv[GANG_BITS:0]] <= mem_rsp_rdata;
  end

  // Rules of the memory port.
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr) && $stable(mem_req_write));
  a_no_extra_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> busy && rcv < CW'(2 * G));
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
