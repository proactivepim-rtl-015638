// Self-checking test of the partial-sum register: lane-slice writes and reads
// for every tag and pass, take-and-clear, and write priority over take.
// How: a 10 ns clock; random lanes are written into each tag and pass, read
// back combinationally and compared with a model array. One register per
// batchTag follows the paper's 2-bit batchTag; the slice interface is this
// design's own.
module tb_psum_regfile;
  import ppim_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // asynchronous reset before the first clock edge
  logic [1:0] tag, take_tag;
  logic [0:0] pass;
  lanes_t rd_lanes, wr_lanes;
  logic wr_en, take;
  vec_t take_vec;
  vec_t model [4];
  int checks = 0, failures = 0;

  psum_regfile dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_en = 0; take = 0; tag = 0; take_tag = 0; pass = 0; wr_lanes = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 4; e++) model[e] = '0;
    @(negedge clk);
    for (int e = 0; e < 4; e++) begin
      take_tag = 2'(e); #1;
      checks++; if (take_vec !== '0) begin failures++; $display("entry %0d not cleared by reset", e); end
    end
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      tag = 2'($urandom); pass = 1'($urandom);
      wr_en = ($urandom % 2) != 0;
      for (int i = 0; i < MAC_LANES; i++) wr_lanes[i] = $urandom;
      take = ($urandom % 5) == 0; take_tag = 2'($urandom);
      #1;
      checks++;
      if (rd_lanes !== model[tag][int'(pass)*MAC_LANES +: MAC_LANES]) begin
        failures++; if (failures < 10) $display("read tag %0d pass %0d mismatch", tag, pass);
      end
      if (take) begin
        checks++;
        if (take_vec !== model[take_tag]) begin failures++; $display("take mismatch"); end
      end
      @(posedge clk);
      if (take) model[take_tag] = '0;
      if (wr_en) model[tag][int'(pass)*MAC_LANES +: MAC_LANES] = wr_lanes;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
