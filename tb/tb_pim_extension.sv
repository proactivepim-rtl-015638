// Self-checking test of the PIM extension.
//  * normal instructions go to the channel and bank group of their address;
//  * an instruction on a duplicated subtable (top bit 1) goes to the node of
//    the preceding normal instruction, with its address bits rewritten;
//  * MMWR and the transfer command reach every bank group of every channel;
//  * back-pressure of the addressed channel holds the request;
//  * a host write with the top bit 1 is repeated to all NUM_CH x NUM_BG bank
//    groups in NUM_CH x NUM_BG cycles; without it, it goes to one bank group.
module tb_pim_extension;
  import ppim_pkg::*;
  import tb_util_pkg::*;
  localparam int C = 8, G = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // asynchronous reset before the first clock edge
  logic req_valid, req_dup, req_ready, hw_valid, hw_ready, bw_valid;
  pim_inst_t req_inst, ch_inst;
  logic [ADDR_W:0] hw_addr;
  beat_t hw_data, bw_data;
  logic [C-1:0] ch_valid, ch_ready;
  logic [G-1:0] ch_mask;
  logic [2:0] bw_ch;
  logic [1:0] bw_bg;
  beat_addr_t bw_addr;
  logic ev_dup_write, ev_dup_route, ev_bcast;
  int checks = 0, failures = 0;

  pim_extension #(.NUM_CH(C), .NUM_BG(G)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit c, string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int lc, lb, nw;
    bit seen [C][G];
    req_valid = 0; req_dup = 0; req_inst = '0; hw_valid = 0; hw_addr = '0; hw_data = '0;
    ch_ready = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    lc = 0; lb = 0;
    for (int n = 0; n < 300; n++) begin
      int c, b, kind;
      @(negedge clk);
      c = int'($urandom % C); b = int'($urandom % G); kind = int'($urandom % 4);
      ch_ready = (n % 7 == 3) ? ~(C'(1) << c) : '1;
      req_valid = 1;
      req_dup = (kind == 1);
      req_inst = mk(kind == 2 ? OP_MMWR : (kind == 3 ? OP_NOP : OP_MULACC),
                    int'($urandom % 100000), $urandom, 4, 0, kind == 1 ? 1 : 0, kind == 3, 0, c, b);
      #1;
      if (kind == 2 || kind == 3) begin
        chk(ch_mask == '1, "broadcast mask");
        chk(req_ready == &ch_ready, "broadcast ready");
        chk(ch_valid == (req_ready ? '1 : '0), "broadcast valid");
      end else begin
        int ec, eb;
        ec = (kind == 1) ? lc : c; eb = (kind == 1) ? lb : b;
        chk(ch_valid == (ch_ready[ec] ? (C'(1) << ec) : '0), $sformatf("channel select kind %0d", kind));
        chk(ch_mask == (G'(1) << eb), "bank-group mask");
        chk(req_ready == ch_ready[ec], "ready follows addressed channel");
        chk(ch_inst.target_addr[CH_LSB +: CH_BITS] == 3'(ec) && ch_inst.target_addr[BG_LSB +: BG_BITS] == 2'(eb),
            "address bits of routed instruction");
        chk(ch_inst.target_addr[BEAT_LSB +: BEAT_ADDR_W] == req_inst.target_addr[BEAT_LSB +: BEAT_ADDR_W],
            "beat address kept");
        if (kind == 0 && req_ready) begin lc = c; lb = b; end
      end
      @(posedge clk);
    end
    @(negedge clk); req_valid = 0; ch_ready = '1;
    // ---- duplication writes
    foreach (seen[i, j]) seen[i][j] = 0;
    hw_valid = 1; hw_addr = '0; hw_addr[ADDR_W] = 1'b1; hw_addr[BEAT_LSB +: BEAT_ADDR_W] = 22'd77;
    hw_data = '0; hw_data[0] = 32'hCAFE;
    nw = 0;
    forever begin
      #4;
      chk(bw_valid && bw_addr == 77 && bw_data[0] == 32'hCAFE, "duplicated write fields");
      seen[bw_ch][bw_bg] = 1; nw++;
      if (hw_ready) begin @(posedge clk); break; end
      @(negedge clk);
    end
    @(negedge clk); hw_valid = 0;
    chk(nw == C * G, $sformatf("duplicate write took %0d cycles", nw));
    foreach (seen[i, j]) chk(seen[i][j], $sformatf("bank group %0d.%0d not written", i, j));
    // ---- a plain write
    hw_valid = 1; hw_addr = '0; hw_addr[CH_LSB +: CH_BITS] = 3'd5; hw_addr[BG_LSB +: BG_BITS] = 2'd2;
    hw_addr[BEAT_LSB +: BEAT_ADDR_W] = 22'd9; #1;
    chk(hw_ready && bw_valid && bw_ch == 5 && bw_bg == 2 && bw_addr == 9 && !ev_dup_write, "plain write");
    @(negedge clk); hw_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
