// Round-robin arbiter for the channel I/O bus.
//
// The bank-group PIMs of one channel share one channel I/O bus towards the
// base-die PIM, so their partial-sum beats go out one at a time. Each cycle the
// arbiter grants one requester, searching from the one after the last winner,
// so that no bank group waits more than N-1 beats. gnt is combinational from
// req; the pointer moves when `advance` is high and a grant was given. Sharing
// the bus follows the paper's transfer-time formula; round-robin order is this
// design's choice.
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt,
  output logic [$clog2(N)-1:0] gnt_idx
);
  localparam int IW = $clog2(N);
  logic [IW-1:0] last;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    // Later iterations win, so the last hit is the nearest requester after
    // `last` in round-robin order.
    for (int i = N; i >= 1; i--) begin
      if (req[(int'(last) + i) % N]) begin
        gnt     = N'(1) << ((int'(last) + i) % N);
        gnt_idx = IW'((int'(last) + i) % N);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   last <= IW'(N-1);
    else if (advance && |req)     last <= gnt_idx;
  end

endmodule
