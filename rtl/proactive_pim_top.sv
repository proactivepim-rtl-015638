// One PIM-enabled HBM2 stack with its memory-controller extension.
//
// Structure: the PIM extension (on the host side) feeds NUM_CH channels. Each
// channel has one base-die PIM and NUM_BG bank-group PIMs; the bank-group DRAM
// arrays sit outside this module and are reached on the bk_* ports (one read
// port driven by each bank-group PIM, one write port driven by the extension
// for host and duplication writes). Final sums leave each channel's base-die
// PIM on the fs_* ports, which stand for the DQ path back to the host.
// Per-bank-group MMReg status (mm_valid, pf_busy) is visible for the host to
// poll, and event pulses are brought out for performance counting.
// The hierarchy (extension, bd-PIM per channel, four bg-PIMs with a cache each)
// follows the paper; the PHY and TSVs are wires here.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// disable condition of the concurrent assertions, which are sampled on the
// clock; the tool reports that mix (SYNCASYNCNET). The assertions are not
// hardware, so this is expected.
module proactive_pim_top
  import ppim_pkg::*;
#(
  parameter int NUM_CH      = 8,
  parameter int NUM_BG      = 4,
  parameter int T_CCD_L     = 2,
  parameter int CACHE_BEATS = 1280
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host PIM requests
  input  logic                         req_valid,
  input  pim_inst_t                    req_inst,
  input  logic                         req_dup,
  output logic                         req_ready,
  // host writes (top address bit = duplicate to all bank groups)
  input  logic                         hw_valid,
  input  logic [ADDR_W:0]              hw_addr,
  input  beat_t                        hw_data,
  output logic                         hw_ready,
  // bank-group DRAM arrays
  output logic       [NUM_CH-1:0][NUM_BG-1:0] bk_rd_req,
  output beat_addr_t [NUM_CH-1:0][NUM_BG-1:0] bk_rd_addr,
  input  logic       [NUM_CH-1:0][NUM_BG-1:0] bk_rd_valid,
  input  beat_t      [NUM_CH-1:0][NUM_BG-1:0] bk_rd_data,
  output logic       [NUM_CH-1:0][NUM_BG-1:0] bk_wr_en,
  output beat_addr_t                          bk_wr_addr,
  output beat_t                               bk_wr_data,
  // final sums, one stream per channel
  output logic [NUM_CH-1:0]            fs_valid,
  output beat_t [NUM_CH-1:0]           fs_data,
  output logic [NUM_CH-1:0][TAG_W-1:0] fs_tag,
  output logic [NUM_CH-1:0]            fs_last,
  input  logic [NUM_CH-1:0]            fs_ready,
  // MMReg status
  output logic [NUM_CH-1:0][NUM_BG-1:0] mm_valid,
  output logic [NUM_CH-1:0][NUM_BG-1:0] pf_busy,
  // event pulses
  output logic [NUM_CH-1:0][NUM_BG-1:0] ev_cache_beat,
  output logic [NUM_CH-1:0][NUM_BG-1:0] ev_bank_beat,
  output logic [NUM_CH-1:0][NUM_BG-1:0] ev_pf_beat,
  output logic [NUM_CH-1:0][NUM_BG-1:0] ev_pf_stall,
  output logic [NUM_CH-1:0][NUM_BG-1:0] ev_overlap,
  output logic [NUM_CH-1:0]             ev_reduce,
  output logic                          ev_dup_write,
  output logic                          ev_dup_route,
  output logic                          ev_bcast
);
  logic [NUM_CH-1:0]             ch_valid, ch_ready;
  pim_inst_t                     ch_inst;
  logic [NUM_BG-1:0]             ch_mask;
  logic                          bw_valid;
  logic [$clog2(NUM_CH)-1:0]     bw_ch;
  logic [$clog2(NUM_BG)-1:0]     bw_bg;

  pim_extension #(.NUM_CH(NUM_CH), .NUM_BG(NUM_BG)) u_ext (
    .clk, .rst_n,
    .req_valid, .req_inst, .req_dup, .req_ready,
    .hw_valid, .hw_addr, .hw_data, .hw_ready,
    .ch_valid, .ch_inst, .ch_mask, .ch_ready,
    .bw_valid, .bw_ch, .bw_bg, .bw_addr(bk_wr_addr), .bw_data(bk_wr_data),
    .ev_dup_write, .ev_dup_route, .ev_bcast
  );

  always_comb begin
    bk_wr_en = '0;
    if (bw_valid) bk_wr_en[bw_ch][bw_bg] = 1'b1;
  end

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic  [NUM_BG-1:0]             bi_valid, bi_ready;
    pim_inst_t                      bi_inst;
    logic  [NUM_BG-1:0]             x_valid, x_last, x_ready;
    beat_t [NUM_BG-1:0]             x_data;
    logic  [NUM_BG-1:0][TAG_W-1:0]  x_tag;

    bd_pim #(.NUM_BG(NUM_BG)) u_bd (
      .clk, .rst_n,
      .cin_valid(ch_valid[c]), .cin_inst(ch_inst), .cin_mask(ch_mask), .cin_ready(ch_ready[c]),
      .bg_inst_valid(bi_valid), .bg_inst(bi_inst), .bg_inst_ready(bi_ready),
      .bg_xfer_valid(x_valid), .bg_xfer_data(x_data), .bg_xfer_tag(x_tag),
      .bg_xfer_last(x_last), .bg_xfer_ready(x_ready),
      .fs_valid(fs_valid[c]), .fs_data(fs_data[c]), .fs_tag(fs_tag[c]),
      .fs_last(fs_last[c]), .fs_ready(fs_ready[c]), .ev_reduce(ev_reduce[c])
    );

    for (genvar g = 0; g < NUM_BG; g++) begin : g_bg
      bg_pim #(.T_CCD_L(T_CCD_L), .CACHE_BEATS(CACHE_BEATS)) u_bg (
        .clk, .rst_n,
        .inst_valid(bi_valid[g]), .inst(bi_inst), .inst_ready(bi_ready[g]),
        .bk_rd_req(bk_rd_req[c][g]), .bk_rd_addr(bk_rd_addr[c][g]),
        .bk_rd_valid(bk_rd_valid[c][g]), .bk_rd_data(bk_rd_data[c][g]),
        .xfer_valid(x_valid[g]), .xfer_data(x_data[g]), .xfer_tag(x_tag[g]),
        .xfer_last(x_last[g]), .xfer_ready(x_ready[g]),
        .mm_valid(mm_valid[c][g]), .pf_busy(pf_busy[c][g]),
        .ev_cache_beat(ev_cache_beat[c][g]), .ev_bank_beat(ev_bank_beat[c][g]),
        .ev_pf_beat(ev_pf_beat[c][g]), .ev_pf_stall(ev_pf_stall[c][g]),
        .ev_overlap(ev_overlap[c][g])
      );
    end
  end
endmodule
