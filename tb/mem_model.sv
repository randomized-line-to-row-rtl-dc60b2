// mem_model: behavioural DRAM channel for the testbenches (not synthesizable).
//
// A line-granular memory behind a valid/ready request port. It accepts a
// request in a cycle with probability READY_PCT percent. Read data comes
// back in request order, LAT cycles after acceptance, with no back-pressure.
// Lines never written read as zero. The store is an associative array, so
// any address width works. It models one bank with an open-page policy: an
// access whose row (address >> ROW_SHIFT) differs from the previous access's
// row is reported on act_valid/act_addr in the cycle it is accepted. That is
// the activation the real scheduler would do.
module mem_model #(
  parameter int unsigned LINE_ADDR_W = 28,
  parameter int unsigned LINE_BITS   = 512,
  parameter int unsigned ROW_SHIFT   = 7,
  parameter int unsigned LAT         = 2,
  parameter int unsigned READY_PCT   = 100
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   req_valid,
  output logic                   req_ready,
  input  logic                   req_write,
  input  logic [LINE_ADDR_W-1:0] req_addr,
  input  logic [LINE_BITS-1:0]   req_wdata,
  output logic                   rsp_valid,
  output logic [LINE_BITS-1:0]   rsp_rdata,
  output logic                   act_valid,
  output logic [LINE_ADDR_W-1:0] act_addr
);
  logic [LINE_BITS-1:0] store [logic [LINE_ADDR_W-1:0]];
  logic [LINE_BITS-1:0] q_data [$];
  longint unsigned      q_due  [$];
  longint unsigned      now;
  logic [LINE_ADDR_W-1:0] open_row;
  logic                 row_open;
  int unsigned          reads, writes, acts;

  always_ff @(posedge clk) begin
    if (!rst_n) req_ready <= 1'b0;
    else        req_ready <= (($urandom % 100) < READY_PCT);
  end

  assign act_valid = req_valid && req_ready &&
                     (!row_open || (req_addr >> ROW_SHIFT) != open_row);
  assign act_addr  = req_addr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      now       <= 0;
      rsp_valid <= 1'b0;
      row_open  <= 1'b0;
      reads     <= 0;
      writes    <= 0;
      acts      <= 0;
    end else begin
      now <= now + 1;
      if (req_valid && req_ready) begin
        row_open <= 1'b1;
        open_row <= req_addr >> ROW_SHIFT;
        if (act_valid) acts <= acts + 1;
        if (req_write) begin
          store[req_addr] = req_wdata;
          writes <= writes + 1;
        end else begin
          q_data.push_back(store.exists(req_addr) ? store[req_addr] : '0);
          q_due.push_back(now + LAT);
          reads <= reads + 1;
        end
      end
      if (q_due.size() > 0 && q_due[0] <= now + 1) begin
        rsp_valid <= 1'b1;
        rsp_rdata <= q_data.pop_front();
        void'(q_due.pop_front());
      end else begin
        rsp_valid <= 1'b0;
      end
    end
  end

  // Direct access for testbench checks.
  function automatic logic [LINE_BITS-1:0] peek(input logic [LINE_ADDR_W-1:0] a);
    return store.exists(a) ? store[a] : '0;
  endfunction
  function automatic void poke(input logic [LINE_ADDR_W-1:0] a, input logic [LINE_BITS-1:0] d);
    store[a] = d;
  endfunction
endmodule
