// Shared types and constants of the PIM-HBM stack.
//
// The PIM instruction (PIM-Inst) carries eight fields whose names and widths
// follow the published instruction format: opcode 3b, targetAddr 34b, weight 32b,
// nRD 4b, delay 6b, batchTag 2b, subId 2b, transfer 1b (84 bits in all). The
// opcode values, the number format and the address map are this design's own:
//  * data words are 32-bit two's-complement integers with wrap-around;
//  * one bank-group access moves one 32-byte beat (8 words); nRD+1 is the
//    number of beats of a vector, so nRD=15 is a 512-byte vector;
//  * targetAddr[4:0] is the byte in a beat, [26:5] the beat inside a bank
//    group (128 MB), [28:27] the bank group and [31:29] the channel.
//
// Not every module uses every constant, and beat_addr_of() reads only the
// beat bits of an address; the lint tool lists the rest per instance as
// unused.
package ppim_pkg;

  localparam int WORD_W      = 32;
  localparam int BEAT_WORDS  = 8;
  localparam int BEAT_W      = WORD_W * BEAT_WORDS;
  localparam int VMAX_BEATS  = 16;
  localparam int VMAX_WORDS  = VMAX_BEATS * BEAT_WORDS;   // 128 words = 512 B
  localparam int MAC_LANES   = 64;
  localparam int PASSES_MAX  = VMAX_WORDS / MAC_LANES;

  localparam int ADDR_W      = 34;
  localparam int BEAT_ADDR_W = 22;
  localparam int BEAT_LSB    = 5;
  localparam int BG_LSB      = 27;
  localparam int BG_BITS     = 2;
  localparam int CH_LSB      = 29;
  localparam int CH_BITS     = 3;

  localparam int TAG_W       = 2;
  localparam int NUM_TAGS    = 1 << TAG_W;
  localparam int SUBID_W     = 2;

  typedef logic [WORD_W-1:0]                  word_t;
  typedef logic [BEAT_WORDS-1:0][WORD_W-1:0]  beat_t;
  typedef logic [MAC_LANES-1:0][WORD_W-1:0]   lanes_t;
  typedef logic [VMAX_WORDS-1:0][WORD_W-1:0]  vec_t;
  typedef logic [BEAT_ADDR_W-1:0]             beat_addr_t;

  typedef enum logic [2:0] {
    OP_NOP     = 3'd0,  // no work; with transfer=1 it is the transfer command
    OP_LDIN    = 3'd1,  // load to the input register
    OP_MULACC  = 3'd2,  // psum[tag] += weight * (inreg .* vec)      (QR CnR+GnR)
    OP_ACC     = 3'd3,  // psum[tag] += weight * vec                 (plain GnR)
    OP_GEMV    = 3'd4,  // inter     += inreg[k] * vec, k++          (skinny GEMM)
    OP_STC     = 3'd5,  // store the result (inter) in the SRAM cache
    OP_GEMVACC = 3'd6,  // psum[tag] += weight * inreg[k] * vec, k++ (skinny GEMM)
    OP_MMWR    = 3'd7   // write MMReg: start=targetAddr, beats=weight, subtable=subId
  } opcode_e;

  typedef struct packed {
    opcode_e                opcode;
    logic [ADDR_W-1:0]      target_addr;
    logic [WORD_W-1:0]      weight;
    logic [3:0]             nrd;
    logic [5:0]             delay;
    logic [TAG_W-1:0]       batch_tag;
    logic [SUBID_W-1:0]     sub_id;
    logic                   transfer;
  } pim_inst_t;

  localparam int INST_W = $bits(pim_inst_t);

  typedef enum logic [2:0] {
    MAC_PASS   = 3'd0,  // res = b
    MAC_MULACC = 3'd1,  // res = acc + w*(a*b)
    MAC_ACC    = 3'd2,  // res = acc + w*b
    MAC_AXPY   = 3'd3,  // res = acc + s*b
    MAC_AXPYW  = 3'd4   // res = acc + w*s*b
  } mac_mode_e;

  // An instruction after decode, as the bank-group PIM execution engine sees it.
  typedef struct packed {
    opcode_e            op;
    beat_addr_t         addr;        // first beat inside the bank group
    word_t              weight;
    logic [4:0]         nbeats;      // nRD + 1
    logic [TAG_W-1:0]   tag;
    logic [SUBID_W-1:0] sub_id;
    logic               transfer;
    logic               use_cache;   // operand comes from (or goes to) the SRAM cache
    logic [15:0]        cache_idx;   // beat index inside the cache window
    logic               start_pf;    // start the pending prefetch with this transfer
  } dec_t;

  function automatic beat_addr_t beat_addr_of(logic [ADDR_W-1:0] a);
    return a[BEAT_LSB +: BEAT_ADDR_W];
  endfunction

endpackage
