// PIM extension of the memory controller.
//
// Routing of PIM-Insts. The host's PIM kernel hands over an instruction plus
// the top bit of its physical address (req_dup):
//  * top bit 0: the channel and bank group come from targetAddr ([31:29],
//    [28:27]); that node is remembered as the node of the current CnR;
//  * top bit 1 (the vector belongs to a subtable duplicated in every bank
//    group): the instruction goes to the remembered node, and the channel and
//    bank-group bits of its targetAddr are rewritten to that node;
//  * OP_MMWR and the transfer command (OP_NOP with transfer=1) go to every
//    bank group of every channel, since prefetch ranges are the same in all of
//    them and every bank group must deliver its partial sum.
// ch_valid of a channel carries the instruction and a bank-group mask; the
// instruction leaves when every addressed channel is ready (ready must not
// depend on valid).
//
// Duplication writes. A host write (hw_*) with the top address bit 0 goes to
// one bank group. With the top bit 1 it is repeated to all NUM_CH x NUM_BG bank
// groups, one per cycle, by altering the channel and bank-group bits; hw_ready
// rises with the last copy. Bank-group writes leave on bw_* and need no
// handshake.
// The two top-bit rules are the paper's; the remembered-node rule, the
// broadcast rule and the address map are this design's own.
//
// Most output bits come straight from inputs: the instruction fields and the
// 256-bit write data are forwarded unchanged; only the valid lines, masks,
// node fields and rewritten address bits are computed here.
module pim_extension
  import ppim_pkg::*;
#(
  parameter int NUM_CH = 8,
  parameter int NUM_BG = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // PIM requests from the host
  input  logic                      req_valid,
  input  pim_inst_t                 req_inst,
  input  logic                      req_dup,
  output logic                      req_ready,
  // host writes
  input  logic                      hw_valid,
  input  logic [ADDR_W:0]           hw_addr,
  input  beat_t                     hw_data,
  output logic                      hw_ready,
  // PIM-Inst to the channels
  output logic [NUM_CH-1:0]         ch_valid,
  output pim_inst_t                 ch_inst,
  output logic [NUM_BG-1:0]         ch_mask,
  input  logic [NUM_CH-1:0]         ch_ready,
  // bank-group writes
  output logic                      bw_valid,
  output logic [$clog2(NUM_CH)-1:0] bw_ch,
  output logic [$clog2(NUM_BG)-1:0] bw_bg,
  output beat_addr_t                bw_addr,
  output beat_t                     bw_data,
  // events
  output logic                      ev_dup_write,
  output logic                      ev_dup_route,
  output logic                      ev_bcast
);
  localparam int CW = $clog2(NUM_CH);
  localparam int BW = $clog2(NUM_BG);
  localparam int NN = NUM_CH * NUM_BG;

  // ---------------- instruction routing ----------------
  logic [CW-1:0] last_ch, r_ch;
  logic [BW-1:0] last_bg, r_bg;
  logic          bcast;

  always_comb begin
    bcast   = (req_inst.opcode == OP_MMWR) ||
              (req_inst.opcode == OP_NOP && req_inst.transfer);
    ch_inst = req_inst;
    if (req_dup && !bcast) begin
      r_ch = last_ch;
      r_bg = last_bg;
      ch_inst.target_addr[CH_LSB +: CH_BITS] = CH_BITS'(last_ch);
      ch_inst.target_addr[BG_LSB +: BG_BITS] = BG_BITS'(last_bg);
    end else begin
      r_ch = req_inst.target_addr[CH_LSB +: CW];
      r_bg = req_inst.target_addr[BG_LSB +: BW];
    end
    if (bcast) begin
      ch_mask   = '1;
      req_ready = &ch_ready;
      ch_valid  = (req_valid && req_ready) ? '1 : '0;
    end else begin
      ch_mask   = NUM_BG'(1) << r_bg;
      req_ready = ch_ready[r_ch];
      ch_valid  = (req_valid && req_ready) ? (NUM_CH'(1) << r_ch) : '0;
    end
  end

  assign ev_dup_route = req_valid && req_ready && req_dup && !bcast;
  assign ev_bcast     = req_valid && req_ready && bcast;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_ch <= '0;
      last_bg <= '0;
    end else if (req_valid && req_ready && !req_dup && !bcast) begin
      last_ch <= r_ch;
      last_bg <= r_bg;
    end
  end

  // ---------------- duplication writes ----------------
  logic [$clog2(NN+1)-1:0] dcnt;
  logic                    dup_w;

  assign dup_w    = hw_addr[ADDR_W];
  assign bw_valid = hw_valid;
  assign bw_addr  = beat_addr_of(hw_addr[ADDR_W-1:0]);
  assign bw_data  = hw_data;
  assign bw_ch    = dup_w ? CW'(dcnt / NUM_BG) : hw_addr[CH_LSB +: CW];
  assign bw_bg    = dup_w ? BW'(dcnt % NUM_BG) : hw_addr[BG_LSB +: BW];
  assign hw_ready = !dup_w || (dcnt == ($clog2(NN+1))'(NN-1));
  assign ev_dup_write = hw_valid && dup_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dcnt <= '0;
    else if (hw_valid && dup_w) dcnt <= hw_ready ? '0 : dcnt + 1'b1;
  end
endmodule
