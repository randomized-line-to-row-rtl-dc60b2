// rubix_s: Rubix-S, static randomized line-to-row mapping.
//
// Rubix-S breaks the link between neighbouring lines and the DRAM row they
// share. It sends memory the encrypted line address instead of the plain
// one. To keep some row-buffer hits, only the gang address is encrypted:
// the low GANG_BITS = k bits of the line address pass through unchanged.
// The (n-k) upper bits go through the cipher (gang_cipher, 3 cycles), and
// the two are joined again. So the 2^k lines of a gang stay together in one
// row, and the gangs of a row are scattered over the whole memory. With
// k = 0 every line is placed on its own (GS1). The default k = 2 (GS4)
// gives a 26-bit cipher for a 28-bit line address, as in the paper.
//
// Key: right after reset, two words are drawn from the PRNG (two cycles)
// and 96 bits of them become the cipher key. The key is fixed until the
// next reset. key_ready goes high then, and only then is in_ready raised.
//
// Interface: in_* and out_* are valid/ready channels. in_tag rides along
// unchanged (for the caller's write flag and data index). Latency is
// 3 cycles. One request per cycle is accepted. When out_valid is held
// without out_ready, the whole pipeline stalls. The handshake and the
// boot sequence are this design's choices. The gang split, the 28/26-bit
// widths and the 96-bit key follow the paper.
module rubix_s #(
  parameter int unsigned LINE_ADDR_W = rubix_pkg::LINE_ADDR_W_DEF,
  parameter int unsigned GANG_BITS   = rubix_pkg::GANG_BITS_DEF,
  parameter int unsigned KEY_W       = rubix_pkg::KEY_W_DEF,
  parameter int unsigned TAG_W       = 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [63:0]            seed,
  output logic                   key_ready,

  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [LINE_ADDR_W-1:0] in_addr,
  input  logic [TAG_W-1:0]       in_tag,

  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [LINE_ADDR_W-1:0] out_addr,
  output logic [TAG_W-1:0]       out_tag
);
  localparam int unsigned GA_W   = LINE_ADDR_W - GANG_BITS;
  localparam int unsigned STAGES = rubix_pkg::CIPHER_STAGES;
  localparam int unsigned SIDE_W = GANG_BITS + TAG_W;

  initial assert (KEY_W <= 128) else $fatal(1, "rubix_s: KEY_W above 128 not supported");

  // ---- boot-time key -------------------------------------------------------
  logic [63:0]  rnd;
  logic [1:0]   draws;
  logic [127:0] key_words;
  logic [KEY_W-1:0] key;

  prng u_prng (.clk(clk), .rst_n(rst_n), .seed(seed), .advance(draws != 2'd2), .rnd(rnd));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      draws     <= 2'd0;
      key_words <= '0;
    end else if (draws != 2'd2) begin
      key_words <= {rnd, key_words[127:64]};
      draws     <= draws + 2'd1;
    end
  end

  assign key       = key_words[KEY_W-1:0];
  assign key_ready = (draws == 2'd2);

  // ---- pipeline ------------------------------------------------------------
  logic en;
  logic [GA_W-1:0] gang_enc;
  logic [SIDE_W-1:0] side_q [STAGES];

  assign en       = !out_valid || out_ready;
  assign in_ready = key_ready && en;

  gang_cipher #(.WIDTH(GA_W), .KEY_W(KEY_W), .STAGES(STAGES)) u_cipher (
    .clk      (clk),
    .rst_n    (rst_n),
    .en       (en),
    .key      (key),
    .in_valid (in_valid && key_ready),
    .in_data  (in_addr[LINE_ADDR_W-1:GANG_BITS]),
    .out_valid(out_valid),
    .out_data (gang_enc)
  );

  // The line-in-gang bits and the tag bypass the cipher in a matching delay line.
  always_ff @(posedge clk) begin
    if (en) begin
      side_q[0] <= (SIDE_W'(in_tag) << GANG_BITS) | (SIDE_W'(in_addr) & SIDE_W'((1 << GANG_BITS) - 1));
      for (int s = 1; s < STAGES; s++) side_q[s] <= side_q[s-1];
    end
  end

  always_comb begin
    out_tag  = side_q[STAGES-1][SIDE_W-1:GANG_BITS];
    out_addr = (LINE_ADDR_W'(gang_enc) << GANG_BITS)
             | (LINE_ADDR_W'(side_q[STAGES-1]) & LINE_ADDR_W'((1 << GANG_BITS) - 1));
  end

  // A held output must stay stable until taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_addr);
  endproperty
  a_hold: assert property (p_hold);
endmodule
