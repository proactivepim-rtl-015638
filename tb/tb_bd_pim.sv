// Self-checking test of the base-die PIM.
//  * Instruction path: random masks and random bank-group back-pressure; every
//    bank group must see exactly the instructions addressed to it, in order,
//    and all addressed bank groups in the same cycle.
//  * Transfer path: four bank-group senders deliver partial sums for several
//    rounds; the final sum must be their element-wise sum with the right tag.
//    In the first round all four send without gaps, and the channel must carry
//    one beat per cycle: 4 x nbeats beats in 4 x nbeats cycles (Eq. 1 with
//    tCCD_S = 1).
module tb_bd_pim;
  import ppim_pkg::*;
  import tb_util_pkg::*;
  localparam int G = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // asynchronous reset before the first clock edge
  logic cin_valid, cin_ready, fs_valid, fs_last, fs_ready, ev_reduce;
  pim_inst_t cin_inst, bg_inst;
  logic [G-1:0] cin_mask, bg_inst_valid, bg_inst_ready;
  logic [G-1:0] bg_xfer_valid, bg_xfer_last, bg_xfer_ready;
  beat_t [G-1:0] bg_xfer_data;
  logic [G-1:0][1:0] bg_xfer_tag;
  beat_t fs_data;
  logic [1:0] fs_tag;
  int checks = 0, failures = 0;
  pim_inst_t expq [G][$];
  int busy_cycles = 0, beats_seen = 0, n_reduce = 0;
  word_t fsq [$];
  logic [1:0] fstagq [$];

  bd_pim #(.NUM_BG(G)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // instruction receivers
  always @(negedge clk) bg_inst_ready <= G'($urandom);
  // sampled just before the rising edge, where the handshake is decided
  always @(negedge clk) if (rst_n) begin
    #4;
    for (int g = 0; g < G; g++) if (bg_inst_valid[g]) begin
      checks++;
      if (!bg_inst_ready[g]) begin failures++; $display("FAIL: valid to a full bank group"); end
      if (expq[g].size() == 0 || bg_inst !== expq[g][0]) begin
        failures++; $display("FAIL: bank group %0d got an unexpected instruction", g);
      end else void'(expq[g].pop_front());
    end
    if (|bg_xfer_ready) begin
      checks++;
      if (!$onehot(bg_xfer_ready)) begin failures++; $display("FAIL: two grants"); end
      beats_seen++;
    end
    if (fs_valid && fs_ready) begin
      for (int w = 0; w < BEAT_WORDS; w++) fsq.push_back(fs_data[w]);
      fstagq.push_back(fs_tag);
    end
    n_reduce += int'(ev_reduce);
  end
  always @(negedge clk) fs_ready <= ($urandom % 4) != 0;

  // one sender per bank group
  task automatic send_vec(int g, int nb, int tag, int seed, bit gaps);
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      while (gaps && ($urandom % 3) == 0) begin bg_xfer_valid[g] = 0; @(negedge clk); end
      bg_xfer_valid[g] = 1;
      for (int w = 0; w < BEAT_WORDS; w++) bg_xfer_data[g][w] = dval(seed, b, w);
      bg_xfer_last[g] = (b == nb - 1);
      bg_xfer_tag[g]  = 2'(tag);
      forever begin
        #4;
        if (bg_xfer_ready[g]) begin @(posedge clk); break; end
        @(negedge clk);
      end
    end
    @(negedge clk); bg_xfer_valid[g] = 0;
  endtask

  initial begin
    cin_valid = 0; cin_inst = '0; cin_mask = '0;
    bg_xfer_valid = '0; bg_xfer_last = '0; bg_xfer_data = '0; bg_xfer_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- instruction path
    for (int n = 0; n < 60; n++) begin
      pim_inst_t i;
      logic [G-1:0] m;
      i = mk(opcode_e'($urandom % 7), int'($urandom % 1000), $urandom, 1 + int'($urandom % 16), int'($urandom % 4));
      m = (n % 5 == 0) ? '1 : (G'(1) << ($urandom % G));
      @(negedge clk);
      cin_valid = 1; cin_inst = i; cin_mask = m;
      forever begin
        #4;
        if (cin_ready) begin @(posedge clk); break; end
        @(negedge clk);
      end
      for (int g = 0; g < G; g++) if (m[g]) expq[g].push_back(i);
      @(negedge clk); cin_valid = 0;
    end
    repeat (100) @(posedge clk);
    for (int g = 0; g < G; g++) chk(expq[g].size() == 0, $sformatf("bank group %0d missed instructions", g));
    // ---- transfer path: three rounds
    for (int round = 0; round < 3; round++) begin
      int nb, c0;
      word_t ref_ [$];
      ref_.delete();
      nb = (round == 0) ? 16 : 2 + round * 3;
      beats_seen = 0; c0 = $time;
      fork
        send_vec(0, nb, round, 10 + round, round != 0);
        send_vec(1, nb, round, 20 + round, round != 0);
        send_vec(2, nb, round, 30 + round, round != 0);
        send_vec(3, nb, round, 40 + round, round != 0);
      join
      if (round == 0)
        chk(($time - c0) / 10 <= 4 * nb + 2,
            $sformatf("%0d beats took %0d cycles", 4 * nb, ($time - c0) / 10));
      chk(beats_seen == 4 * nb, $sformatf("round %0d channel carried %0d beats", round, beats_seen));
      for (int b = 0; b < nb; b++) for (int w = 0; w < BEAT_WORDS; w++)
        ref_.push_back(dval(10 + round, b, w) + dval(20 + round, b, w) + dval(30 + round, b, w) + dval(40 + round, b, w));
      repeat (60) @(posedge clk);
      chk(fsq.size() == nb * BEAT_WORDS, $sformatf("final sum has %0d words", fsq.size()));
      for (int i = 0; i < ref_.size() && fsq.size() > 0; i++) begin word_t gv; gv = fsq.pop_front(); chk(gv == ref_[i], $sformatf("round %0d final sum word %0d got %0d exp %0d buf %0d %0d %0d %0d", round, i, gv, ref_[i], $signed(dut.bgbuf[0][i]), $signed(dut.bgbuf[1][i]), $signed(dut.bgbuf[2][i]), $signed(dut.bgbuf[3][i]))); end
      while (fstagq.size() > 0) chk(fstagq.pop_front() == 2'(round), "final sum tag");
      fsq.delete();
    end
    chk(n_reduce == 3, $sformatf("%0d reductions", n_reduce));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
