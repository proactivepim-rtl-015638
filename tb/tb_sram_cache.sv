// Self-checking test of the SRAM cache: writes to random addresses, reads
// back with the one-cycle latency, and a simultaneous read and write.
// How: a 10 ns clock; a model array tracks every write, and each read result
// is checked the cycle after the read request. The 40 KB size is the paper's;
// the one-cycle latency and port set are this design's choice.
module tb_sram_cache;
  import ppim_pkg::*;
  localparam int DEPTH = 1280;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // asynchronous reset before the first clock edge
  logic wr_en, rd_en, rd_valid;
  logic [10:0] wr_addr, rd_addr;
  logic [BEAT_W-1:0] wr_data, rd_data;
  logic [BEAT_W-1:0] model [DEPTH];
  bit written [DEPTH];
  int checks = 0, failures = 0;

  sram_cache #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data,
                                   .rd_en, .rd_addr, .rd_valid, .rd_data);
  always #5 clk = ~clk;

  function automatic logic [BEAT_W-1:0] rnd();
    logic [BEAT_W-1:0] v;
    for (int i = 0; i < BEAT_W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    #500000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) written[i] = 0;
    // fill every line, including the first and the last
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 11'(i); wr_data = rnd();
      model[i] = wr_data; written[i] = 1;
    end
    @(negedge clk); wr_en = 0;
    // random reads and writes
    for (int c = 0; c < 3000; c++) begin
      logic [10:0] ra;
      @(negedge clk);
      ra = 11'($urandom % DEPTH);
      rd_en = 1; rd_addr = ra;
      wr_en = ($urandom % 2) != 0; wr_addr = 11'($urandom % DEPTH); wr_data = rnd();
      @(posedge clk);
      #1;
      checks++;
      if (!rd_valid || rd_data !== model[ra]) begin
        failures++; if (failures < 10) $display("addr %0d read mismatch", ra);
      end
      if (wr_en) model[wr_addr] = wr_data;
    end
    @(negedge clk); rd_en = 0; wr_en = 0;
    @(posedge clk); #1;
    checks++; if (rd_valid) begin failures++; $display("rd_valid without read"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
