// remap_trigger: draws Rubix-D remap episodes at the remapping rate.
//
// Rubix-D remaps a v-group with a fixed probability on each activation of
// that v-group. The default rate is 1%, so busy v-groups remap more often.
// Each activation compares a fresh 16-bit pseudo-random value with RR_THRESH
// and fires when the value is below it. The probability is RR_THRESH/65536,
// and the default 655 gives 0.9995%. How the draw is made is this design's
// own choice.
//
// Interface: fire is combinational with act_valid and is only high in a
// cycle where act_valid is high. The generator advances on every activation,
// so successive draws are independent.
module remap_trigger #(
  parameter int unsigned RR_THRESH = rubix_pkg::RR_THRESH_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [63:0] seed,
  input  logic        act_valid,
  output logic        fire
);
  logic [63:0] rnd;

  prng u_prng (
    .clk    (clk),
    .rst_n  (rst_n),
    .seed   (seed),
    .advance(act_valid),
    .rnd    (rnd)
  );

  // Upper bits of xorshift are the better mixed ones.
  assign fire = act_valid && ({1'b0, rnd[63:48]} < 17'(RR_THRESH));
endmodule
