// Self-checking test of one bank-group PIM against a bank-group model.
//  1. MMWR with transfer prefetches table A's R subtable; the prefetch time is
//     checked against (beats-1)*tCCD_L + tCL.
//  2. QR-trick CnR+GnR: LDIN of a Q vector from the bank, MULACC with the R
//     vector from the cache, for 8 lookups into batchTag 0; plus a plain
//     weighted GnR (ACC) into batchTag 2.
//  3. MMWR of table B (pending), then the transfer command: the partial sum
//     leaves on channel I/O while table B's subtable is prefetched; an LDIN
//     sent meanwhile must wait for the prefetch.
//  4. TT-Rec two-stage skinny GEMM on table B: first-subtable row from the
//     cache, 16 GEMV row steps over the second subtable, STC to the cache,
//     read back, 16 GEMVACC steps over the third subtable into batchTag 1.
// Every transferred beat is compared with a reference computed here from the
// same bank formula. Bank reads are checked to be spaced by tCCD_L.
module tb_bg_pim;
  import ppim_pkg::*;
  import tb_util_pkg::*;
  localparam int TCL = 14, TCCDL = 2, SEED = 5;
  localparam int NB = 4;            // QR vector: 4 beats = 32 words = 128 B
  localparam int HC = 6;            // hash collision = rows of the R subtable
  localparam int QB = 100, RB = 1000, TB_ = 2000, S2B = 3000, T3B = 3200;
  localparam int TN = 2, TR = 16;   // TT-Rec: rank 16, 2-beat rows

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // asynchronous reset before the first clock edge
  logic inst_valid, inst_ready;
  pim_inst_t inst;
  logic bk_rd_req, bk_rd_valid;
  beat_addr_t bk_rd_addr;
  beat_t bk_rd_data, xfer_data;
  logic xfer_valid, xfer_last, xfer_ready;
  logic [1:0] xfer_tag;
  logic mm_valid, pf_busy;
  logic ev_cache_beat, ev_bank_beat, ev_pf_beat, ev_pf_stall, ev_overlap;
  int checks = 0, failures = 0;
  int n_hit = 0, n_bank = 0, n_pf = 0, n_stall = 0, n_overlap = 0;
  int cyc = 0, last_rd = -100;
  word_t got [4][$];

  bg_pim #(.T_CCD_L(TCCDL)) dut (.*);
  bank_group_model #(.DEPTH(4096), .TCL(TCL), .SEED(SEED)) u_bank (
    .clk, .rd_req(bk_rd_req), .rd_addr(bk_rd_addr), .rd_valid(bk_rd_valid), .rd_data(bk_rd_data),
    .wr_en(1'b0), .wr_addr('0), .wr_data('0));

  always #5 clk = ~clk;

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // sampled just before the rising edge, where the handshake is decided
  always @(negedge clk) if (rst_n) begin
    #4;
    cyc++;
    n_hit += int'(ev_cache_beat); n_bank += int'(ev_bank_beat); n_pf += int'(ev_pf_beat);
    n_stall += int'(ev_pf_stall); n_overlap += int'(ev_overlap);
    if (bk_rd_req) begin
      if (cyc - last_rd < TCCDL) begin failures++; $display("FAIL: bank reads %0d cycles apart", cyc - last_rd); end
      last_rd = cyc;
    end
    if (xfer_valid && xfer_ready)
      for (int w = 0; w < BEAT_WORDS; w++) got[xfer_tag].push_back(xfer_data[w]);
  end
  always @(negedge clk) xfer_ready <= ($urandom % 3) != 0;

  task automatic send(pim_inst_t i);
    @(negedge clk);
    inst_valid = 1; inst = i;
    forever begin
      #4;
      if (inst_ready) begin @(posedge clk); break; end
      @(negedge clk);
    end
    @(negedge clk);
    inst_valid = 0;
  endtask

  function automatic word_t bw(int beat_base, int word);   // word of a vector in the bank
    return dval(SEED, beat_base + word / BEAT_WORDS, word % BEAT_WORDS);
  endfunction

  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    word_t ref0 [NB*8], ref1 [TN*8], ref2 [3*8], first [TN*8], inter [TN*8];
    int t0, tpf, idx, q, r;
    word_t w;
    inst_valid = 0; inst = '0;
    foreach (ref0[i]) ref0[i] = 0;
    foreach (ref1[i]) ref1[i] = 0;
    foreach (ref2[i]) ref2[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- 1. prefetch table A's R subtable
    send(mk(OP_MMWR, RB, word_t'(HC * NB), 1, 0, 1, 1));
    t0 = cyc;
    while (!mm_valid) @(posedge clk);
    tpf = cyc - t0;
    chk(tpf >= (HC*NB - 1) * TCCDL + TCL && tpf <= (HC*NB - 1) * TCCDL + TCL + 4,
        $sformatf("prefetch of %0d beats took %0d cycles", HC*NB, tpf));
    // ---- 2. QR-trick lookups into batchTag 0
    for (int l = 0; l < 8; l++) begin
      idx = int'($urandom % (50 * HC)); q = idx / HC; r = idx % HC;
      w = word_t'($urandom % 9) + 1;
      send(mk(OP_LDIN, QB + q*NB, 0, NB, 0, 0, 0, l % 4));
      send(mk(OP_MULACC, RB + r*NB, w, NB, 0, 1, 0));
      for (int i = 0; i < NB*8; i++) ref0[i] += w * (bw(QB + q*NB, i) * bw(RB + r*NB, i));
    end
    // plain weighted GnR into batchTag 2
    for (int l = 0; l < 3; l++) begin
      w = word_t'(l + 2);
      send(mk(OP_ACC, 500 + 7*l, w, 3, 2, 0, 0));
      for (int i = 0; i < 24; i++) ref2[i] += w * bw(500 + 7*l, i);
    end
    // ---- 3. program table B, transfer table A while prefetching B
    send(mk(OP_MMWR, TB_, word_t'(40), 1, 0, 1, 0));
    send(mk(OP_NOP, 0, 0, NB, 0, 0, 1));
    send(mk(OP_LDIN, TB_ + 2*TN, 0, TN, 0, 1, 0));  // waits for the prefetch
    // ---- 4. TT-Rec two-stage skinny GEMM
    for (int i = 0; i < TN*8; i++) first[i] = bw(TB_ + 2*TN, i);
    foreach (inter[i]) inter[i] = 0;
    for (int rr = 0; rr < TR; rr++) begin
      send(mk(OP_GEMV, S2B + rr*TN, 0, TN, 0, 0, 0));
      for (int j = 0; j < TN*8; j++) inter[j] += first[rr] * bw(S2B + rr*TN, j);
    end
    send(mk(OP_STC, TB_ + 1000, 0, TN, 0, 1, 0));
    send(mk(OP_LDIN, TB_ + 1000, 0, TN, 0, 1, 0));
    w = 32'd3;
    for (int rr = 0; rr < TR; rr++) begin
      send(mk(OP_GEMVACC, T3B + rr*TN, w, TN, 1, 0, 0));
      for (int j = 0; j < TN*8; j++) ref1[j] += w * (inter[rr] * bw(T3B + rr*TN, j));
    end
    send(mk(OP_NOP, 0, 0, TN, 1, 0, 1));
    // compute with the transfer bit set: last ACC of batchTag 2 then send it
    send(mk(OP_ACC, 900, 32'd1, 3, 2, 0, 1));
    for (int i = 0; i < 24; i++) ref2[i] += bw(900, i);
    repeat (300) @(posedge clk);
    // ---- compare
    chk(got[0].size() == NB*8, $sformatf("tag0 sent %0d words", got[0].size()));
    chk(got[1].size() == TN*8, $sformatf("tag1 sent %0d words", got[1].size()));
    chk(got[2].size() == 24,   $sformatf("tag2 sent %0d words", got[2].size()));
    for (int i = 0; i < NB*8 && i < got[0].size(); i++) chk(got[0][i] == ref0[i], $sformatf("QR psum word %0d", i));
    for (int i = 0; i < TN*8 && i < got[1].size(); i++) chk(got[1][i] == ref1[i], $sformatf("TT psum word %0d", i));
    for (int i = 0; i < 24 && i < got[2].size(); i++) chk(got[2][i] == ref2[i], $sformatf("GnR psum word %0d", i));
    chk(n_hit == 8*NB + 2*TN, $sformatf("cache beats %0d", n_hit));
    chk(n_pf == HC*NB + 40, $sformatf("prefetched beats %0d", n_pf));
    chk(n_stall > 0, "LDIN did not wait for the prefetch");
    chk(n_overlap > 0, "transfer and prefetch never overlapped");
    $display("cache beats %0d, bank beats %0d, prefetch beats %0d, stall cycles %0d, overlap cycles %0d",
             n_hit, n_bank, n_pf, n_stall, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
