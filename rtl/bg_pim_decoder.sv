// PIM-Inst decoder of the bank-group PIM, with the memory-mapped register.
//
// It takes the instruction at the head of the PIM-Inst buffer together with the
// cycle it arrived in, and releases it only once `delay` cycles have passed
// since arrival (the delay field gives the decode time after delivery). It owns
// MMReg: the start beat, length and subtable ID of the subtable to prefetch,
// plus a pending flag and a valid flag that the host polls to learn that the
// prefetch has completed.
//  * OP_MMWR is consumed here: MMReg <= {targetAddr, weight[15:0] beats, subId},
//    and only when the execution engine is idle and no prefetch runs. With its
//    transfer bit set it also starts the prefetch at once (pf_kick), which is
//    how the first table's subtable is loaded.
//  * Every other opcode is passed on as a dec_t. A vector is a cache hit when
//    its subId equals the MMReg subtable ID, the prefetch has completed and its
//    beat lies in the CACHE_BEATS window that starts at the MMReg start beat;
//    matching by subtable ID is the paper's, the window rule is this design's.
//  * A transfer instruction picks up a pending prefetch (start_pf); the
//    execution engine starts it when that transfer begins.
// dec is combinational from the buffer head and MMReg; handshake valid/ready.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// disable condition of the concurrent assertions, which are sampled on the
// clock; the tool reports that mix (SYNCASYNCNET). The assertions are not
// hardware, so this is expected.
// Most decoded fields (weight, address, tag, ...) are the buffered
// instruction's fields passed through unchanged; only the hit, cache index,
// beat count and prefetch flags are computed here.
module bg_pim_decoder
  import ppim_pkg::*;
#(
  parameter int CACHE_BEATS = 1280
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [15:0] now,
  // head of the PIM-Inst buffer
  input  logic        in_valid,
  input  pim_inst_t   in_inst,
  input  logic [15:0] in_arrival,
  output logic        in_ready,
  // to the execution engine
  output logic        dec_valid,
  output dec_t        dec,
  input  logic        dec_ready,
  input  logic        exec_idle,
  // prefetch engine
  input  logic        pf_busy,
  input  logic        pf_done,
  output logic        pf_kick,
  output beat_addr_t  pf_addr,
  output logic [15:0] pf_beats,
  // MMReg as the host sees it
  output beat_addr_t  mm_start,
  output logic [15:0] mm_beats,
  output logic [SUBID_W-1:0] mm_subid,
  output logic        mm_valid,
  output logic        mm_pending
);
  logic        age_ok, is_mmwr, mm_take;
  logic [15:0] age;
  beat_addr_t  off;

  assign age     = now - in_arrival;
  assign age_ok  = (age >= 16'(in_inst.delay));
  assign is_mmwr = (in_inst.opcode == OP_MMWR);
  assign mm_take = in_valid && age_ok && is_mmwr && exec_idle && !pf_busy;

  always_comb begin
    off           = beat_addr_of(in_inst.target_addr) - mm_start;
    dec.op        = in_inst.opcode;
    dec.addr      = beat_addr_of(in_inst.target_addr);
    dec.weight    = in_inst.weight;
    dec.nbeats    = 5'(in_inst.nrd) + 5'd1;
    dec.tag       = in_inst.batch_tag;
    dec.sub_id    = in_inst.sub_id;
    dec.transfer  = in_inst.transfer;
    dec.use_cache = (mm_valid || pf_done) && (in_inst.sub_id == mm_subid)
                    && (off < beat_addr_t'(CACHE_BEATS));
    dec.cache_idx = 16'(off);
    dec.start_pf  = in_inst.transfer && mm_pending;
  end

  assign dec_valid = in_valid && age_ok && !is_mmwr;
  assign in_ready  = is_mmwr ? mm_take : (age_ok && dec_ready);

  assign pf_kick  = mm_take && in_inst.transfer;
  assign pf_addr  = pf_kick ? beat_addr_of(in_inst.target_addr) : mm_start;
  assign pf_beats = pf_kick ? in_inst.weight[15:0] : mm_beats;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now        <= '0;
      mm_start   <= '0;
      mm_beats   <= '0;
      mm_subid   <= '0;
      mm_valid   <= 1'b0;
      mm_pending <= 1'b0;
    end else begin
      now <= now + 16'd1;
      if (pf_done) mm_valid <= 1'b1;
      if (dec_valid && dec_ready && dec.start_pf) mm_pending <= 1'b0;
      if (mm_take) begin
        mm_start   <= beat_addr_of(in_inst.target_addr);
        mm_beats   <= in_inst.weight[15:0];
        mm_subid   <= in_inst.sub_id;
        mm_valid   <= 1'b0;
        mm_pending <= !in_inst.transfer;
      end
    end
  end

  // a prefetch longer than the cache would wrap over its own data
  a_pf_len: assert property (@(posedge clk) disable iff (!rst_n)
    mm_take |-> (in_inst.weight[15:0] <= 16'(CACHE_BEATS)))
    else $error("MMReg prefetch length exceeds the cache");
endmodule
