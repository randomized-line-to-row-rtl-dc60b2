// rubix_pkg: sizes and constants shared by the Rubix address-mapping blocks.
//
// The defaults describe the main configuration: a 16 GB DDR4 channel has
// 2^28 lines of 64 B (28-bit line address) and 2^21 rows of 8 KB (128K rows
// x 16 banks). There are 128 lines in a row. A gang of 4 lines (GS4) takes
// 2 line-in-gang bits. That leaves 5 gang-in-row bits (32 vertical groups)
// and 21 row bits. The remapping rate of 1% per activation is a 16-bit
// threshold, 655/65536 (this encoding is a design choice).
package rubix_pkg;
  localparam int unsigned LINE_ADDR_W_DEF = 28;
  localparam int unsigned GANG_BITS_DEF   = 2;
  localparam int unsigned GIR_BITS_DEF    = 5;
  localparam int unsigned LINE_BITS_DEF   = 512;
  localparam int unsigned KEY_W_DEF       = 96;
  localparam int unsigned CIPHER_STAGES   = 3;
  localparam int unsigned RR_THRESH_DEF   = 655;   // round(0.01 * 2^16)
  localparam logic [63:0] SEED_DEF        = 64'h9E37_79B9_7F4A_7C15;

  // State of the Rubix-D remap sequencer.
  typedef enum logic [2:0] {
    RD_INIT,      // drawing the boot-time keys, one v-group per cycle
    RD_IDLE,      // translating requests, waiting for a remap draw
    RD_DRAIN,     // swap decided; waiting until issued requests are gone
    RD_SWAP,      // swap engine moving the two gangs
    RD_ADVANCE    // advance Ptr; roll the epoch over at the last row
  } rd_state_e;
endpackage
