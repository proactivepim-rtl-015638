// Base-die PIM (bd-PIM) of one HBM channel.
//
// Instruction path: PIM-Insts from the memory-controller side (through the PHY)
// enter a PIM-Inst buffer together with a bank-group mask. The head is sent on
// the channel to every bank-group PIM named in the mask, in one cycle, once all
// of them can take it (their inst_ready depends only on buffer space).
// Transfer path: the bank-group PIMs send their finished partial sums over the
// shared channel I/O; a round-robin arbiter grants one beat per cycle (tCCD_S =
// 1). Each bank group's vector collects in its BG buffer. When all NUM_BG
// buffers are full, the MAC unit adds them (one buffer and 64 lanes per cycle,
// weight 1) into the final sum, the buffers are freed, and the final sum leaves
// on the fs_* stream towards the host, one 32 B beat per accepted fs_ready.
// The bd-PIM's parts (PHY, PIM-Inst buffer, BG 0..3 buffers, MAC producing the
// final sum) are the paper's; the handshakes, the mask, the rule that a final
// sum needs one vector from every bank group and the arbitration are this
// design's own.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// disable condition of the concurrent assertions, which are sampled on the
// clock; the tool reports that mix (SYNCASYNCNET). The assertions are not
// hardware, so this is expected.
module bd_pim
  import ppim_pkg::*;
#(
  parameter int NUM_BG     = 4,
  parameter int IBUF_DEPTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // from the PIM extension (through the PHY)
  input  logic                     cin_valid,
  input  pim_inst_t                cin_inst,
  input  logic [NUM_BG-1:0]        cin_mask,
  output logic                     cin_ready,
  // PIM-Inst to the bank-group PIMs
  output logic [NUM_BG-1:0]        bg_inst_valid,
  output pim_inst_t                bg_inst,
  input  logic [NUM_BG-1:0]        bg_inst_ready,
  // channel I/O from the bank-group PIMs
  input  logic  [NUM_BG-1:0]       bg_xfer_valid,
  input  beat_t [NUM_BG-1:0]       bg_xfer_data,
  input  logic  [NUM_BG-1:0][TAG_W-1:0] bg_xfer_tag,
  input  logic  [NUM_BG-1:0]       bg_xfer_last,
  output logic  [NUM_BG-1:0]       bg_xfer_ready,
  // final sum towards the host
  output logic                     fs_valid,
  output beat_t                    fs_data,
  output logic [TAG_W-1:0]         fs_tag,
  output logic                     fs_last,
  input  logic                     fs_ready,
  output logic                     ev_reduce
);
  localparam int IW = INST_W + NUM_BG;
  localparam int GW = (NUM_BG > 1) ? $clog2(NUM_BG) : 1;

  // ---------------- instruction path ----------------
  logic [IW-1:0]     head;
  logic              head_valid, go;
  logic [NUM_BG-1:0] head_mask;

  pim_inst_fifo #(.W(IW), .DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk, .rst_n,
    .wr_valid(cin_valid), .wr_data({cin_inst, cin_mask}), .wr_ready(cin_ready),
    .rd_valid(head_valid), .rd_data(head), .rd_ready(go)
  );
  assign head_mask     = head[NUM_BG-1:0];
  assign bg_inst       = pim_inst_t'(head[IW-1:NUM_BG]);
  assign go            = head_valid && ((head_mask & ~bg_inst_ready) == '0);
  assign bg_inst_valid = go ? head_mask : '0;

  // ---------------- channel I/O and BG buffers ----------------
  vec_t              bgbuf  [NUM_BG];
  logic [4:0]        bgcnt  [NUM_BG];
  logic [TAG_W-1:0]  bgtag  [NUM_BG];
  logic [NUM_BG-1:0] bgfull;
  logic [NUM_BG-1:0] req, gnt;
  logic [GW-1:0]     gidx;

  assign req = bg_xfer_valid & ~bgfull;

  rr_arbiter #(.N(NUM_BG)) u_arb (
    .clk, .rst_n, .req, .advance(1'b1), .gnt, .gnt_idx(gidx)
  );
  assign bg_xfer_ready = gnt;

  // ---------------- reduction ----------------
  typedef enum logic [1:0] {R_IDLE, R_SUM, R_OUT} rstate_e;
  rstate_e     rstate;
  vec_t        res;
  logic [GW-1:0] j;
  logic [$clog2(PASSES_MAX)-1:0] pass;
  logic [4:0]  nbeats, ocnt, npass;
  lanes_t      mac_res;
  logic        clear_full;

  assign npass = (nbeats + 5'd7) >> 3;

  mac_array u_mac (
    .mode(MAC_ACC), .weight(32'd1), .scalar(32'd0),
    .a('0), .b(bgbuf[j][int'(pass)*MAC_LANES +: MAC_LANES]),
    .acc(res[int'(pass)*MAC_LANES +: MAC_LANES]), .res(mac_res)
  );

  assign clear_full = (rstate == R_SUM) && (j == GW'(NUM_BG-1)) && (5'(pass) == npass - 5'd1);
  assign ev_reduce  = (rstate == R_IDLE) && (&bgfull);

  assign fs_valid = (rstate == R_OUT);
  assign fs_data  = res[int'(ocnt[3:0])*BEAT_WORDS +: BEAT_WORDS];
  assign fs_last  = (ocnt == nbeats - 5'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < NUM_BG; g++) begin
        bgbuf[g] <= '0;
        bgcnt[g] <= '0;
        bgtag[g] <= '0;
      end
      bgfull <= '0;
      rstate <= R_IDLE;
      res    <= '0;
      j      <= '0;
      pass   <= '0;
      nbeats <= '0;
      ocnt   <= '0;
      fs_tag <= '0;
    end else begin
      // one beat per cycle on the channel I/O
      if (|gnt) begin
        bgbuf[gidx][int'(bgcnt[gidx][3:0])*BEAT_WORDS +: BEAT_WORDS] <= bg_xfer_data[gidx];
        if (bg_xfer_last[gidx]) begin
          bgfull[gidx] <= 1'b1;
          bgtag[gidx]  <= bg_xfer_tag[gidx];
          bgcnt[gidx]  <= bgcnt[gidx] + 5'd1;
        end else begin
          bgcnt[gidx] <= bgcnt[gidx] + 5'd1;
        end
      end

      unique case (rstate)
        R_IDLE: if (&bgfull) begin
          res    <= '0;
          j      <= '0;
          pass   <= '0;
          nbeats <= bgcnt[0];
          fs_tag <= bgtag[0];
          rstate <= R_SUM;
        end
        R_SUM: begin
          res[int'(pass)*MAC_LANES +: MAC_LANES] <= mac_res;
          if (j == GW'(NUM_BG-1)) begin
            j <= '0;
            if (5'(pass) == npass - 5'd1) begin
              ocnt   <= '0;
              rstate <= R_OUT;
            end else begin
              pass <= pass + 1'b1;
            end
          end else begin
            j <= j + 1'b1;
          end
        end
        R_OUT: if (fs_ready) begin
          ocnt <= ocnt + 5'd1;
          if (fs_last) rstate <= R_IDLE;
        end
        default: rstate <= R_IDLE;
      endcase

      if (clear_full) begin
        bgfull <= '0;
        for (int g = 0; g < NUM_BG; g++) bgcnt[g] <= '0;
      end
    end
  end

  for (genvar g = 1; g < NUM_BG; g++) begin : g_chk
    a_same_psum: assert property (@(posedge clk) disable iff (!rst_n)
      (rstate == R_IDLE && (&bgfull)) |-> (bgtag[g] == bgtag[0] && bgcnt[g] == bgcnt[0]))
      else $error("bank groups %0d and 0 sent different partial sums", g);
  end
endmodule
