// Helpers shared by the testbenches: instruction builder, the formula that
// fills the bank-group models, and pass/fail counting.
// Interface: mk() packs a PIM-Inst from its fields and a target node; dval()
// gives the word stored at (seed, beat, word) so that every checker can
// compute expected data without storing the arrays. Not part of the paper.
package tb_util_pkg;
  import ppim_pkg::*;

  // Contents of bank-group DRAM: word w of beat b in the bank group seeded s.
  function automatic word_t dval(int s, int b, int w);
    return word_t'((s * 7919 + b * 131 + w * 17 + 5) % 2003) - word_t'(1000);
  endfunction

  // Build a PIM-Inst; beat is the beat inside the bank group, ch/bg the node.
  function automatic pim_inst_t mk(opcode_e op, int beat, word_t weight, int nbeats,
                                   int tag = 0, int sub = 0, bit xfer = 1'b0,
                                   int delay = 0, int ch = 0, int bg = 0);
    pim_inst_t i;
    i = '0;
    i.opcode      = op;
    i.target_addr = '0;
    i.target_addr[BEAT_LSB +: BEAT_ADDR_W] = BEAT_ADDR_W'(beat);
    i.target_addr[BG_LSB +: BG_BITS]       = BG_BITS'(bg);
    i.target_addr[CH_LSB +: CH_BITS]       = CH_BITS'(ch);
    i.weight      = weight;
    i.nrd         = 4'(nbeats - 1);
    i.delay       = 6'(delay);
    i.batch_tag   = TAG_W'(tag);
    i.sub_id      = SUBID_W'(sub);
    i.transfer    = xfer;
    return i;
  endfunction
endpackage
