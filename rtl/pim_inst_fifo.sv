// PIM-Inst buffer: a synchronous FIFO with valid/ready on both sides.
//
// Both PIM levels hold incoming PIM instructions in such a buffer before the
// decoder (bank-group PIM) or the channel forwarder (base-die PIM) takes them.
// A write is accepted when wr_valid && wr_ready, a read when rd_valid &&
// rd_ready; the head entry is visible on rd_data in the cycle after it was
// written. wr_ready depends only on the fill level. The buffer itself is named
// by the paper; its depth and handshake are this design's choice.
module pim_inst_fifo #(
  parameter int W     = 96,
  parameter int DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_valid,
  input  logic [W-1:0] wr_data,
  output logic         wr_ready,
  output logic         rd_valid,
  output logic [W-1:0] rd_data,
  input  logic         rd_ready
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;
  logic          do_wr, do_rd;

  assign wr_ready = (count != (AW+1)'(DEPTH));
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rptr];
  assign do_wr    = wr_valid && wr_ready;
  assign do_rd    = rd_valid && rd_ready;

  function automatic logic [AW-1:0] nxt(logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= nxt(wptr);
      if (do_rd) rptr <= nxt(rptr);
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
  end

endmodule
