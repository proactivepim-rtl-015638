// End-to-end test of the whole stack at its default size (8 channels x 4 bank
// groups), against 32 bank-group models.
//  Preprocessing: the host writes table A's R subtable and table B's first and
//    third TT-Rec subtables with the top address bit set, so the PIM extension
//    duplicates them into every bank group. Q and second subtables are spread
//    over the bank groups (bank-model contents).
//  Table A (QR-trick): MMWR broadcast with transfer prefetches R into every
//    cache; for two batch items, every lookup is LDIN of the Q row (routed by
//    address) then MULACC on the R row (duplicated: routed to the same node,
//    served from the cache). MMWR of table B is left pending; the transfer
//    commands of both items send all partial sums to the base-die PIMs while
//    table B's subtable is prefetched; every channel returns its final sums.
//  Table B (TT-Rec): on one node, LDIN of a first-subtable row (cache),
//    16 GEMV steps over the second subtable, STC into the cache, LDIN back,
//    16 GEMVACC steps over the third subtable, then transfer.
// All final sums are compared with a reference computed here. Counted
// mechanisms, each of which must occur: duplicated writes, re-routed
// instructions, broadcasts, cache hits, prefetch beats, transfer/prefetch
// overlap, prefetch stalls, bd-PIM reductions. The prefetch time of table A is
// checked against (beats-1) x tCCD_L + tCL.
module tb_proactive_pim_top;
  import ppim_pkg::*;
  import tb_util_pkg::*;
  localparam int C = 8, G = 4, N = C * G, TCL = 14, TCCDL = 2;
  localparam int NB = 4, HC = 6, QB = 100, RB = 1000;
  localparam int TB_ = 2000, TB_BEATS = 40, S2B = 3000, T3B = 3200, TN = 2, TR = 16;
  localparam int HSEED = 99;
  localparam int TTC = 3, TTG = 1;   // node that runs the TT-Rec part
  localparam int L = 10;             // lookups per item

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // asynchronous reset before the first clock edge
  logic req_valid, req_dup, req_ready, hw_valid, hw_ready;
  pim_inst_t req_inst;
  logic [ADDR_W:0] hw_addr;
  beat_t hw_data;
  logic       [C-1:0][G-1:0] bk_rd_req, bk_rd_valid, bk_wr_en;
  beat_addr_t [C-1:0][G-1:0] bk_rd_addr;
  beat_t      [C-1:0][G-1:0] bk_rd_data;
  beat_addr_t bk_wr_addr;
  beat_t      bk_wr_data;
  logic [C-1:0] fs_valid, fs_last, fs_ready;
  beat_t [C-1:0] fs_data;
  logic [C-1:0][1:0] fs_tag;
  logic [C-1:0][G-1:0] mm_valid, pf_busy, ev_cache_beat, ev_bank_beat, ev_pf_beat, ev_pf_stall, ev_overlap;
  logic [C-1:0] ev_reduce;
  logic ev_dup_write, ev_dup_route, ev_bcast;

  int checks = 0, failures = 0, cyc = 0;
  int n_dupw = 0, n_dupr = 0, n_bcast = 0, n_hit = 0, n_bank = 0, n_pf = 0, n_ovl = 0, n_stall = 0, n_red = 0;
  word_t fsq [C][4][$];
  word_t ref_ [C][4][VMAX_WORDS];

  proactive_pim_top dut (.*);

  for (genvar c = 0; c < C; c++) begin : g_c
    for (genvar g = 0; g < G; g++) begin : g_g
      bank_group_model #(.DEPTH(4096), .TCL(TCL), .SEED(c * G + g)) u_bank (
        .clk, .rd_req(bk_rd_req[c][g]), .rd_addr(bk_rd_addr[c][g]),
        .rd_valid(bk_rd_valid[c][g]), .rd_data(bk_rd_data[c][g]),
        .wr_en(bk_wr_en[c][g]), .wr_addr(bk_wr_addr), .wr_data(bk_wr_data));
    end
  end

  always #5 clk = ~clk;
  assign fs_ready = '1;

  task automatic chk(bit cnd, string msg);
    checks++;
    if (!cnd) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // monitors, sampled just before the rising edge
  always @(negedge clk) if (rst_n) begin
    #4;
    cyc++;
    n_dupw += int'(ev_dup_write && hw_ready);
    n_dupr += int'(ev_dup_route);
    n_bcast += int'(ev_bcast);
    n_hit += $countones(ev_cache_beat);
    n_bank += $countones(ev_bank_beat);
    n_pf += $countones(ev_pf_beat);
    n_ovl += $countones(ev_overlap);
    n_stall += $countones(ev_pf_stall);
    n_red += $countones(ev_reduce);
    for (int c = 0; c < C; c++)
      if (fs_valid[c] && fs_ready[c])
        for (int w = 0; w < BEAT_WORDS; w++) fsq[c][fs_tag[c]].push_back(fs_data[c][w]);
  end

  initial begin
    #20000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic req(pim_inst_t i, bit dup);
    @(negedge clk);
    req_valid = 1; req_inst = i; req_dup = dup;
    forever begin
      #4;
      if (req_ready) begin @(posedge clk); break; end
      @(negedge clk);
    end
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic host_dup_write(int beat);
    @(negedge clk);
    hw_valid = 1; hw_addr = '0; hw_addr[ADDR_W] = 1'b1;
    hw_addr[BEAT_LSB +: BEAT_ADDR_W] = BEAT_ADDR_W'(beat);
    for (int w = 0; w < BEAT_WORDS; w++) hw_data[w] = dval(HSEED, beat, w);
    forever begin
      #4;
      if (hw_ready) begin @(posedge clk); break; end
      @(negedge clk);
    end
    @(negedge clk);
    hw_valid = 0;
  endtask

  task automatic wait_all_mm();
    int t;
    t = 0;
    while (mm_valid != '1 && t < 100000) begin @(posedge clk); t++; end
  endtask

  // a word of a vector: duplicated regions hold the host's data
  function automatic word_t hv(int base, int i);
    return dval(HSEED, base + i / BEAT_WORDS, i % BEAT_WORDS);
  endfunction
  function automatic word_t nv(int node, int base, int i);
    return dval(node, base + i / BEAT_WORDS, i % BEAT_WORDS);
  endfunction

  initial begin
    int t0, tpf;
    req_valid = 0; req_inst = '0; req_dup = 0; hw_valid = 0; hw_addr = '0; hw_data = '0;
    foreach (ref_[c, t, i]) ref_[c][t][i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- preprocessing: duplicate the small subtables
    for (int b = 0; b < HC * NB; b++) host_dup_write(RB + b);
    for (int b = 0; b < TB_BEATS; b++) host_dup_write(TB_ + b);
    for (int b = 0; b < TR * TN; b++) host_dup_write(T3B + b);
    // ---- table A: prefetch R everywhere
    req(mk(OP_MMWR, RB, word_t'(HC * NB), 1, 0, 1, 1), 1'b0);
    t0 = cyc;
    wait_all_mm();
    tpf = cyc - t0;
    chk(tpf >= (HC*NB - 1) * TCCDL + TCL && tpf <= (HC*NB - 1) * TCCDL + TCL + 12,
        $sformatf("prefetch of %0d beats took %0d cycles", HC*NB, tpf));
    // ---- QR-trick lookups, two batch items
    for (int item = 0; item < 2; item++) begin
      for (int l = 0; l < L; l++) begin
        int idx, q, r, node, lq, ch, bg;
        word_t w;
        idx = int'($urandom % (N * 8 * HC)); q = idx / HC; r = idx % HC;
        node = q % N; lq = q / N; ch = node / G; bg = node % G;
        w = word_t'($urandom % 5) + 1;
        req(mk(OP_LDIN, QB + lq*NB, 0, NB, item, 0, 0, 0, ch, bg), 1'b0);
        req(mk(OP_MULACC, RB + r*NB, w, NB, item, 1, 0, 0, 0, 0), 1'b1);
        for (int i = 0; i < NB * 8; i++)
          ref_[ch][item][i] += w * (nv(node, QB + lq*NB, i) * hv(RB + r*NB, i));
      end
    end
    // ---- table B pending, transfers of table A overlap its prefetch
    req(mk(OP_MMWR, TB_, word_t'(TB_BEATS), 1, 0, 2, 0), 1'b0);
    req(mk(OP_NOP, 0, 0, NB, 0, 0, 1), 1'b0);
    req(mk(OP_NOP, 0, 0, NB, 1, 0, 1), 1'b0);
    // ---- table B, TT-Rec on one node
    begin
      word_t first [TN*8], inter [TN*8];
      word_t w;
      int a;
      a = 3;
      for (int i = 0; i < TN*8; i++) begin first[i] = hv(TB_ + a*TN, i); inter[i] = 0; end
      req(mk(OP_NOP, 0, 0, 1, 0, 0, 0, 0, TTC, TTG), 1'b0);            // select the node
      req(mk(OP_LDIN, TB_ + a*TN, 0, TN, 2, 2, 0), 1'b1);
      for (int rr = 0; rr < TR; rr++) begin
        req(mk(OP_GEMV, S2B + rr*TN, 0, TN, 2, 0, 0, 0, TTC, TTG), 1'b0);
        for (int j = 0; j < TN*8; j++) inter[j] += first[rr] * nv(TTC*G + TTG, S2B + rr*TN, j);
      end
      req(mk(OP_STC, TB_ + 1000, 0, TN, 2, 2, 0), 1'b1);
      req(mk(OP_LDIN, TB_ + 1000, 0, TN, 2, 2, 0), 1'b1);
      w = 32'd7;
      for (int rr = 0; rr < TR; rr++) begin
        req(mk(OP_GEMVACC, T3B + rr*TN, w, TN, 2, 0, 0), 1'b1);
        for (int j = 0; j < TN*8; j++) ref_[TTC][2][j] += w * (inter[rr] * hv(T3B + rr*TN, j));
      end
      req(mk(OP_NOP, 0, 0, TN, 2, 0, 1), 1'b0);
    end
    repeat (400) @(posedge clk);
    // ---- compare final sums
    for (int c = 0; c < C; c++) begin
      for (int t = 0; t < 3; t++) begin
        int nw;
        nw = (t < 2) ? NB * 8 : TN * 8;
        chk(fsq[c][t].size() == nw, $sformatf("channel %0d tag %0d returned %0d words", c, t, fsq[c][t].size()));
        for (int i = 0; i < nw && i < fsq[c][t].size(); i++)
          chk(fsq[c][t][i] == ref_[c][t][i],
              $sformatf("channel %0d tag %0d word %0d got %0d exp %0d", c, t, i, fsq[c][t][i], ref_[c][t][i]));
      end
    end
    $display("dup writes %0d, rerouted %0d, broadcasts %0d, cache beats %0d, bank beats %0d, prefetch beats %0d, overlap %0d, stall %0d, reductions %0d",
             n_dupw, n_dupr, n_bcast, n_hit, n_bank, n_pf, n_ovl, n_stall, n_red);
    chk(n_dupw == HC*NB + TB_BEATS + TR*TN, "duplicated writes");
    chk(n_dupr > 0, "no instruction was re-routed to a duplicated subtable");
    chk(n_bcast == 5, "broadcast count");
    chk(n_hit == 2 * L * NB + 2 * TN, $sformatf("cache beats %0d", n_hit));
    chk(n_pf == N * (HC*NB + TB_BEATS), "prefetched beats");
    chk(n_ovl > 0, "transfer never overlapped a prefetch");
    chk(n_stall > 0, "no instruction waited for a prefetch");
    chk(n_red == 3 * C, "bd-PIM reductions");
    chk(n_bank > 0, "no bank reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
