// SRAM cache of the bank-group PIM: DEPTH beats of BEAT_W bits.
//
// It holds the hot subtable that is prefetched before the CnR/GnR of a table,
// and scratch vectors written by the store opcode. One write port and one read
// port; a read returns its data on rd_data in the next cycle (rd_valid marks
// it). The default 1280 x 32 B = 40 KB is the paper's cache size; the port
// structure and latency are this design's choice, and a chip would place an
// SRAM macro here.
module sram_cache
  import ppim_pkg::*;
#(
  parameter int DEPTH  = 1280,
  parameter int BEAT_W_P = BEAT_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [$clog2(DEPTH)-1:0]  wr_addr,
  input  logic [BEAT_W_P-1:0]       wr_data,
  input  logic                      rd_en,
  input  logic [$clog2(DEPTH)-1:0]  rd_addr,
  output logic                      rd_valid,
  output logic [BEAT_W_P-1:0]       rd_data
);
  logic [BEAT_W_P-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end
endmodule
