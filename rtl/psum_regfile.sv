// Partial-sum register of the bank-group PIM.
//
// One vector of VWORDS words per batchTag value (2-bit tag, so four entries).
// The MAC reads and writes LANES words of one entry per cycle, addressed by
// (tag, pass). `take` copies a whole entry to take_vec and clears that entry in
// the same cycle, so a finished partial sum can go to the transfer engine while
// the entry is reused. A write in the same cycle as a take of the same entry
// wins. All entries are cleared on reset. Entry count comes from the batchTag
// width; the 512-byte entry length is this design's choice.
module psum_regfile
  import ppim_pkg::*;
#(
  parameter int ENTRIES = NUM_TAGS,
  parameter int VWORDS  = VMAX_WORDS,
  parameter int LANES   = MAC_LANES
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [$clog2(ENTRIES)-1:0]        tag,
  input  logic [$clog2(VWORDS/LANES)-1:0]   pass,
  output logic [LANES-1:0][WORD_W-1:0]      rd_lanes,
  input  logic                              wr_en,
  input  logic [LANES-1:0][WORD_W-1:0]      wr_lanes,
  input  logic                              take,
  input  logic [$clog2(ENTRIES)-1:0]        take_tag,
  output logic [VWORDS-1:0][WORD_W-1:0]     take_vec
);
  logic [VWORDS-1:0][WORD_W-1:0] ps [ENTRIES];

  assign rd_lanes = ps[tag][int'(pass)*LANES +: LANES];
  assign take_vec = ps[take_tag];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) ps[e] <= '0;
    end else begin
      if (take) ps[take_tag] <= '0;
      if (wr_en) ps[tag][int'(pass)*LANES +: LANES] <= wr_lanes;
    end
  end
endmodule
