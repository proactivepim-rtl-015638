// Self-checking test of the bank-group PIM decoder: the delay field holds an
// instruction for exactly `delay` cycles after arrival; MMWR programs MMReg and
// (with transfer) starts the prefetch; the cache-hit decision by subtable ID
// and window; a transfer picks up the pending prefetch.
module tb_bg_pim_decoder;
  import ppim_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // asynchronous reset before the first clock edge
  logic [15:0] now, in_arrival, pf_beats, mm_beats;
  logic in_valid, in_ready, dec_valid, dec_ready, exec_idle, pf_busy, pf_done, pf_kick;
  logic mm_valid, mm_pending;
  pim_inst_t in_inst;
  dec_t dec;
  beat_addr_t pf_addr, mm_start;
  logic [1:0] mm_subid;
  int checks = 0, failures = 0;

  bg_pim_decoder #(.CACHE_BEATS(1280)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #500000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; in_inst = '0; in_arrival = '0; dec_ready = 1; exec_idle = 1;
    pf_busy = 0; pf_done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- delay field
    for (int d = 0; d < 64; d += 9) begin
      int waited;
      @(negedge clk);
      in_valid = 1; in_arrival = now;
      in_inst = mk(OP_ACC, 10, 32'd1, 4, 0, 0, 0, d);
      waited = 0;
      dec_ready = 1;
      #1;
      while (!dec_valid) begin
        @(negedge clk); waited++; #1;
        if (waited > 100) break;
      end
      chk(waited == d, $sformatf("delay %0d released after %0d cycles", d, waited));
      chk(in_ready, "released instruction not taken");
      @(posedge clk); #1;
      in_valid = 0;
    end
    // ---- MMWR held while the engine is busy
    @(negedge clk);
    in_valid = 1; in_arrival = now; exec_idle = 0;
    in_inst = mk(OP_MMWR, 200, 32'd40, 1, 0, 2, 0);
    #1;
    chk(!in_ready && !dec_valid, "MMWR taken while engine busy");
    @(negedge clk); exec_idle = 1; #1;
    chk(in_ready && !dec_valid && !pf_kick, "MMWR not consumed");
    @(posedge clk); #1; in_valid = 0;
    chk(mm_start == 200 && mm_beats == 40 && mm_subid == 2 && mm_pending && !mm_valid,
        "MMReg not programmed");
    // ---- no hit before the prefetch completed
    @(negedge clk);
    in_valid = 1; in_arrival = now - 16'd10; in_inst = mk(OP_LDIN, 205, 32'd0, 2, 0, 2, 0);
    #1;
    chk(dec_valid && !dec.use_cache, "hit before prefetch done");
    chk(dec.nbeats == 2 && dec.addr == 205, "decoded fields wrong");
    // ---- a transfer picks up the pending prefetch
    in_inst = mk(OP_NOP, 0, 32'd0, 4, 1, 0, 1);
    #1;
    chk(dec.start_pf, "transfer did not take the pending prefetch");
    @(posedge clk); #1;
    chk(!mm_pending, "pending flag not cleared");
    in_valid = 0;
    @(negedge clk); pf_done = 1; @(negedge clk); pf_done = 0;
    chk(mm_valid, "mm_valid not set by pf_done");
    // ---- hit rules
    in_valid = 1; in_arrival = now - 16'd10;
    in_inst = mk(OP_MULACC, 203, 32'd3, 2, 0, 2, 0); #1;
    chk(dec.use_cache && dec.cache_idx == 3, "in-window same-subtable access must hit");
    in_inst = mk(OP_MULACC, 203, 32'd3, 2, 0, 1, 0); #1;
    chk(!dec.use_cache, "other subtable must miss");
    in_inst = mk(OP_MULACC, 200 + 1280, 32'd3, 2, 0, 2, 0); #1;
    chk(!dec.use_cache, "beyond cache window must miss");
    in_inst = mk(OP_MULACC, 199, 32'd3, 2, 0, 2, 0); #1;
    chk(!dec.use_cache, "below window must miss");
    in_inst = mk(OP_STC, 200 + 1000, 32'd0, 2, 0, 2, 0); #1;
    chk(dec.use_cache && dec.cache_idx == 1000, "scratch store inside window");
    chk(!dec.start_pf, "start_pf without transfer");
    // ---- MMWR with transfer starts the prefetch at once
    @(negedge clk);
    in_inst = mk(OP_MMWR, 512, 32'd64, 1, 0, 3, 1); #1;
    chk(pf_kick && pf_addr == 512 && pf_beats == 64, "immediate prefetch not kicked");
    pf_busy = 0;
    @(posedge clk); #1; in_valid = 0;
    chk(!mm_pending && !mm_valid && mm_subid == 3, "MMReg after immediate prefetch");
    // ---- MMWR waits for a running prefetch
    @(negedge clk); pf_busy = 1; in_valid = 1; in_arrival = now - 16'd10;
    in_inst = mk(OP_MMWR, 0, 32'd8, 1, 0, 0, 0); #1;
    chk(!in_ready, "MMWR taken during prefetch");
    @(negedge clk); in_valid = 0; pf_busy = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
