// gang_cipher: 3-cycle, programmable-width block cipher for Rubix-S.
//
// Rubix-S encrypts the gang address with K-Cipher, a low-latency cipher of
// programmable bit width with a 96-bit key and 3 cycles of latency. K-Cipher's
// internals are published elsewhere and are not reproduced here. This module
// keeps the parts of it the mapping relies on: any width, a 96-bit key,
// 3 pipeline cycles, and a one-to-one mapping of the gang-address space.
// The algorithm itself is this design's own stand-in. It makes no claim to
// K-Cipher's cryptographic strength.
//
// Algorithm: an unbalanced Feistel network of 3*ROUNDS_PER_STAGE rounds. The
// word is split into a high half L (WIDTH - WIDTH/2 bits) and a low half R
// (WIDTH/2 bits). Even rounds do R ^= F(L, rk), odd rounds do L ^= F(R, rk).
// Each round is invertible whatever F is, so the whole network is a
// permutation of the WIDTH-bit space. F is a SIMON-like mix on an HW-bit
// word, HW = WIDTH - WIDTH/2:
//   t = x ^ rk;  F = t ^ (rotl(t,1) & rotl(t,8)) ^ rotl(t,2)
// The round key rk_i is the 96-bit key rotated left by 7*i, cut to HW bits,
// and xor-ed with the round index.
//
// Timing: one register stage per ROUNDS_PER_STAGE rounds, STAGES stages.
// out_* appear STAGES cycles with en high after in_*. With en low the whole
// pipeline holds its contents.
module gang_cipher #(
  parameter int unsigned WIDTH            = 26,
  parameter int unsigned KEY_W            = 96,
  parameter int unsigned STAGES           = 3,
  parameter int unsigned ROUNDS_PER_STAGE = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [KEY_W-1:0] key,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned RW = WIDTH / 2;       // low half
  localparam int unsigned LW = WIDTH - RW;      // high half, LW >= RW
  localparam int unsigned HW = LW;              // round-function width

  initial begin
    assert (WIDTH >= 2) else $fatal(1, "gang_cipher: WIDTH must be at least 2");
    assert (STAGES >= 1) else $fatal(1, "gang_cipher: STAGES must be at least 1");
  end

  function automatic logic [HW-1:0] rotl(input logic [HW-1:0] x, input int unsigned n);
    int unsigned s;
    s = n % HW;
    return (s == 0) ? x : ((x << s) | (x >> (HW - s)));
  endfunction

  function automatic logic [HW-1:0] round_key(input logic [KEY_W-1:0] k, input int unsigned i);
    logic [KEY_W-1:0] r;
    int unsigned s;
    s = (7 * i) % KEY_W;
    r = (s == 0) ? k : ((k << s) | (k >> (KEY_W - s)));
    return r[HW-1:0] ^ HW'(i);
  endfunction

  function automatic logic [HW-1:0] mix(input logic [HW-1:0] x, input logic [HW-1:0] rk);
    logic [HW-1:0] t;
    t = x ^ rk;
    return t ^ (rotl(t, 1) & rotl(t, 8)) ^ rotl(t, 2);
  endfunction

  // Rounds first .. first+ROUNDS_PER_STAGE-1 applied to one word.
  function automatic logic [WIDTH-1:0] stage_rounds(input logic [WIDTH-1:0] w,
                                                    input logic [KEY_W-1:0] k,
                                                    input int unsigned first);
    logic [LW-1:0] l;
    logic [RW-1:0] r;
    logic [HW-1:0] f;
    l = w[WIDTH-1:RW];
    r = w[RW-1:0];
    for (int unsigned j = 0; j < ROUNDS_PER_STAGE; j++) begin
      if (((first + j) % 2) == 0) begin
        f = mix(l, round_key(k, first + j));
        r = r ^ f[RW-1:0];
      end else begin
        f = mix(HW'(r), round_key(k, first + j));
        l = l ^ f[LW-1:0];
      end
    end
    return {l, r};
  endfunction

  logic [WIDTH-1:0] data_q  [STAGES];
  logic             valid_q [STAGES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < STAGES; s++) valid_q[s] <= 1'b0;
    end else if (en) begin
      valid_q[0] <= in_valid;
      for (int s = 1; s < STAGES; s++) valid_q[s] <= valid_q[s-1];
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      data_q[0] <= stage_rounds(in_data, key, 0);
      for (int s = 1; s < STAGES; s++)
        data_q[s] <= stage_rounds(data_q[s-1], key, s * ROUNDS_PER_STAGE);
    end
  end

  assign out_valid = valid_q[STAGES-1];
  assign out_data  = data_q[STAGES-1];
endmodule
