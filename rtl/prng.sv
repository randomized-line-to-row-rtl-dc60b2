// prng: hardware pseudo-random generator for Rubix keys and remap draws.
//
// The mapping needs random values in three places: the Rubix-S cipher key at
// boot, the Rubix-D keys at boot and at each epoch end, and the 1% draw per
// activation. The generator algorithm is a choice of this design. It is a
// 64-bit xorshift (shifts 13, 7, 17), period 2^64-1. The seed is loaded in
// reset. A zero seed is replaced by SEED_DEFAULT, because zero is a fixed
// point of xorshift.
//
// Interface: rnd is the current state. It moves to the next value on the
// clock edge after a cycle with advance high.
module prng #(
  parameter logic [63:0] SEED_DEFAULT = rubix_pkg::SEED_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [63:0] seed,
  input  logic        advance,
  output logic [63:0] rnd
);
  logic [63:0] state, nxt;

  always_comb begin
    nxt = state;
    nxt = nxt ^ (nxt << 13);
    nxt = nxt ^ (nxt >> 7);
    nxt = nxt ^ (nxt << 17);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       state <= (seed == '0) ? SEED_DEFAULT : seed;
    else if (advance) state <= nxt;
  end

  assign rnd = state;
endmodule
