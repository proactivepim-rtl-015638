// Self-checking test of the PIM-Inst buffer: random valid/ready traffic
// against a queue model, plus the full and empty flags.
// How: a 10 ns clock; the writer and reader toggle valid/ready at random each
// cycle and handshakes are sampled just before the rising edge. Every popped
// word must equal the queue model's head. The buffer itself is named by the
// paper; depth 8 and the handshake are this design's choices.
module tb_pim_inst_fifo;
  localparam int W = 20, DEPTH = 8;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // asynchronous reset before the first clock edge
  logic wr_valid, wr_ready, rd_valid, rd_ready;
  logic [W-1:0] wr_data, rd_data;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  pim_inst_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n;
    wr_valid = 0; rd_ready = 0; wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (rd_valid !== 1'b0) begin failures++; $display("not empty after reset"); end
    // fill to the top without reading
    n = 0;
    while (wr_ready) begin
      wr_valid = 1; wr_data = W'(n + 100);
      @(posedge clk); q.push_back(wr_data); n++;
      @(negedge clk);
    end
    wr_valid = 0;
    checks++; if (n != DEPTH) begin failures++; $display("accepted %0d before full", n); end
    // random traffic
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      wr_valid = ($urandom % 3) != 0;
      wr_data  = W'($urandom);
      rd_ready = ($urandom % 2) != 0;
      @(posedge clk);
      if (rd_valid && rd_ready) begin
        logic [W-1:0] e;
        checks++;
        e = q.pop_front();
        if (rd_data !== e) begin failures++; $display("got %h expected %h", rd_data, e); end
      end
      if (wr_valid && wr_ready) q.push_back(wr_data);
    end
    // drain
    wr_valid = 0; rd_ready = 1;
    while (q.size() != 0) begin
      @(posedge clk);
      if (rd_valid) begin
        checks++;
        if (rd_data !== q.pop_front()) begin failures++; $display("drain mismatch"); end
      end
    end
    @(negedge clk);
    checks++; if (rd_valid) begin failures++; $display("not empty after drain"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
