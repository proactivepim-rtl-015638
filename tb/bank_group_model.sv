// Behavioural model of one HBM2 bank group as the PIM sees it (not a design
// block: the DRAM array itself is not designed here). A read request returns
// its 32 B beat TCL cycles later on rd_valid/rd_data; a write takes effect at
// once. The array starts filled by tb_util_pkg::dval(SEED, beat, word) and
// addresses wrap at DEPTH beats. Row activation and refresh are not modelled.
module bank_group_model
  import ppim_pkg::*;
#(
  parameter int DEPTH = 4096,
  parameter int TCL   = 14,
  parameter int SEED  = 0
) (
  input  logic       clk,
  input  logic       rd_req,
  input  beat_addr_t rd_addr,
  output logic       rd_valid,
  output beat_t      rd_data,
  input  logic       wr_en,
  input  beat_addr_t wr_addr,
  input  beat_t      wr_data
);
  beat_t mem [DEPTH];
  logic  pv [TCL];
  beat_t pd [TCL];

  initial begin
    for (int b = 0; b < DEPTH; b++)
      for (int w = 0; w < BEAT_WORDS; w++) mem[b][w] = tb_util_pkg::dval(SEED, b, w);
    for (int i = 0; i < TCL; i++) begin pv[i] = 1'b0; pd[i] = '0; end
  end

  always_ff @(posedge clk) begin
    pv[0] <= rd_req;
    pd[0] <= mem[int'(rd_addr) % DEPTH];
    for (int i = 1; i < TCL; i++) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    if (wr_en) mem[int'(wr_addr) % DEPTH] <= wr_data;
  end
  assign rd_valid = pv[TCL-1];
  assign rd_data  = pd[TCL-1];
endmodule
