// Bank-group PIM (bg-PIM): the near-bank processing unit of one bank group.
//
// PIM-Insts arrive from the channel, wait in the PIM-Inst buffer and are
// decoded (bg_pim_decoder). The execution engine then runs one instruction at
// a time:
//   FETCH  read nRD+1 beats of 32 B, from the SRAM cache when the decoder
//          marked a hit (one beat per cycle), otherwise from the bank group
//          (one read per T_CCD_L cycles, data returned on bk_rd_valid);
//   EXEC   one or two passes of the 64-lane MAC unit into the input register,
//          the partial-sum register of the batchTag, or the intermediate buffer;
//   STC    write the intermediate buffer to the SRAM cache (store opcode);
//   DONE   if the transfer bit is set, hand the partial sum of the batchTag to
//          the transfer engine, and start the pending prefetch.
// The transfer engine sends the finished partial sum over channel I/O, one beat
// per accepted xfer_ready, while the prefetch engine reads the next table's hot
// subtable from the bank group into the cache. The two use different buses, so
// they overlap; instructions that need the bank or the cache wait until the
// prefetch completes (mm_valid then reads 1).
//
// TT-Rec skinny GEMM: LDIN loads a row of the first operand into the input
// register; each GEMV adds inreg[k] times the fetched row to the 64-word
// intermediate buffer and advances k; STC keeps the result in the cache; in
// the second stage LDIN reads it back from the cache and GEMVACC rows of the
// third subtable are accumulated into the partial sum.
//
// The block structure (buffer, decoder with MMReg, cache, MAC, partial-sum
// register, separate transfer and prefetch buses, prefetch started by the
// transfer instruction) follows the paper. The sequencing, opcode meanings,
// the cache-window hit rule and the interlock that stalls fetches during a
// prefetch are this design's own.
//
// Lint note: rst_n is the asynchronous reset of the flops and also the
// disable condition of the concurrent assertions, which are sampled on the
// clock; the tool reports that mix (SYNCASYNCNET). The assertions are not
// hardware, so this is expected.
// The decoder's MMReg contents (mm_start, mm_beats, mm_subid, mm_pending) and
// the sub_id field of the decoded instruction are used inside the decoder for
// the hit decision; this module takes only the decoded result, so the lint
// tool lists those signals as unused here.
module bg_pim
  import ppim_pkg::*;
#(
  parameter int T_CCD_L     = 2,
  parameter int CACHE_BEATS = 1280,
  parameter int IBUF_DEPTH  = 8,
  parameter int INTER_WORDS = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  // PIM-Inst from the channel
  input  logic        inst_valid,
  input  pim_inst_t   inst,
  output logic        inst_ready,
  // bank-group I/O
  output logic        bk_rd_req,
  output beat_addr_t  bk_rd_addr,
  input  logic        bk_rd_valid,
  input  beat_t       bk_rd_data,
  // channel I/O, partial sums towards the base-die PIM
  output logic        xfer_valid,
  output beat_t       xfer_data,
  output logic [TAG_W-1:0] xfer_tag,
  output logic        xfer_last,
  input  logic        xfer_ready,
  // MMReg status
  output logic        mm_valid,
  output logic        pf_busy,
  // event pulses
  output logic        ev_cache_beat,
  output logic        ev_bank_beat,
  output logic        ev_pf_beat,
  output logic        ev_pf_stall,
  output logic        ev_overlap
);
  localparam int CAW = $clog2(CACHE_BEATS);
  localparam int IW  = INST_W + 16;

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_EXEC, S_STC, S_DONE} state_e;

  state_e      state;
  dec_t        cur;
  logic        xfer_busy;

  // ---------------- buffer and decoder ----------------
  logic [15:0]  now, head_arr;
  logic [IW-1:0] head;
  logic         head_valid, head_ready;
  pim_inst_t    head_inst;

  pim_inst_fifo #(.W(IW), .DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk, .rst_n,
    .wr_valid(inst_valid), .wr_data({inst, now}), .wr_ready(inst_ready),
    .rd_valid(head_valid), .rd_data(head), .rd_ready(head_ready)
  );
  assign head_inst = pim_inst_t'(head[IW-1:16]);
  assign head_arr  = head[15:0];

  logic        dec_valid, dec_ready, exec_idle;
  dec_t        dec;
  logic        pf_done, pf_kick_d;
  beat_addr_t  pf_addr_d, mm_start;
  logic [15:0] pf_beats_d, mm_beats;
  logic [SUBID_W-1:0] mm_subid;
  logic        mm_pending;

  bg_pim_decoder #(.CACHE_BEATS(CACHE_BEATS)) u_dec (
    .clk, .rst_n, .now,
    .in_valid(head_valid), .in_inst(head_inst), .in_arrival(head_arr), .in_ready(head_ready),
    .dec_valid, .dec, .dec_ready, .exec_idle,
    .pf_busy, .pf_done, .pf_kick(pf_kick_d), .pf_addr(pf_addr_d), .pf_beats(pf_beats_d),
    .mm_start, .mm_beats, .mm_subid, .mm_valid, .mm_pending
  );

  // ---------------- storage ----------------
  logic            c_wr_en, c_rd_en, c_rd_valid;
  logic [CAW-1:0]  c_wr_addr, c_rd_addr;
  beat_t           c_wr_data, c_rd_data;

  sram_cache #(.DEPTH(CACHE_BEATS)) u_cache (
    .clk, .rst_n,
    .wr_en(c_wr_en), .wr_addr(c_wr_addr), .wr_data(c_wr_data),
    .rd_en(c_rd_en), .rd_addr(c_rd_addr), .rd_valid(c_rd_valid), .rd_data(c_rd_data)
  );

  logic   ps_wr, ps_take;
  logic [$clog2(PASSES_MAX)-1:0] pass;
  lanes_t ps_rd, mac_res;
  vec_t   ps_take_vec;

  psum_regfile u_psum (
    .clk, .rst_n, .tag(cur.tag), .pass, .rd_lanes(ps_rd),
    .wr_en(ps_wr), .wr_lanes(mac_res),
    .take(ps_take), .take_tag(cur.tag), .take_vec(ps_take_vec)
  );

  // ---------------- execution engine ----------------
  vec_t     opnd, inreg;
  lanes_t   inter;
  logic [6:0] k;
  logic [4:0] iss_cnt, rcv_cnt;
  logic [$clog2(T_CCD_L+1)-1:0] ccd;
  logic [4:0] npass;
  mac_mode_e mode;
  lanes_t   mac_a, mac_b, mac_acc;

  logic is_fetch_op, needs_mem, accept;
  always_comb begin
    is_fetch_op = dec.op inside {OP_LDIN, OP_MULACC, OP_ACC, OP_GEMV, OP_GEMVACC};
    needs_mem   = is_fetch_op || dec.op == OP_STC;
  end
  assign exec_idle = (state == S_IDLE);
  assign dec_ready = exec_idle
                     && !(needs_mem && pf_busy)
                     && !(dec.transfer && xfer_busy)
                     && !(dec.start_pf && pf_busy);
  assign accept    = dec_valid && dec_ready;
  assign ev_pf_stall = dec_valid && exec_idle && needs_mem && pf_busy;

  always_comb begin
    unique case (cur.op)
      OP_LDIN:    mode = MAC_PASS;
      OP_MULACC:  mode = MAC_MULACC;
      OP_ACC:     mode = MAC_ACC;
      OP_GEMV:    mode = MAC_AXPY;
      OP_GEMVACC: mode = MAC_AXPYW;
      default:    mode = MAC_PASS;
    endcase
    npass   = (cur.op == OP_GEMV) ? 5'd1 : ((cur.nbeats + 5'd7) >> 3);
    mac_a   = inreg[int'(pass)*MAC_LANES +: MAC_LANES];
    mac_b   = opnd[int'(pass)*MAC_LANES +: MAC_LANES];
    mac_acc = (cur.op == OP_GEMV) ? inter : ps_rd;
  end

  mac_array u_mac (
    .mode, .weight(cur.weight), .scalar(inreg[k]),
    .a(mac_a), .b(mac_b), .acc(mac_acc), .res(mac_res)
  );

  assign ps_wr = (state == S_EXEC) && (cur.op inside {OP_MULACC, OP_ACC, OP_GEMVACC});

  // fetch side of the bank and cache read ports
  logic f_bank_iss, f_cache_iss, f_rcv;
  beat_t f_data;
  assign f_bank_iss  = (state == S_FETCH) && !cur.use_cache && (iss_cnt < cur.nbeats) && (ccd == '0);
  assign f_cache_iss = (state == S_FETCH) &&  cur.use_cache && (iss_cnt < cur.nbeats);
  assign f_rcv       = (state == S_FETCH) && (cur.use_cache ? c_rd_valid : bk_rd_valid);
  assign f_data      = cur.use_cache ? c_rd_data : bk_rd_data;

  // ---------------- prefetch engine ----------------
  beat_addr_t  pf_base;
  logic [15:0] pf_len, pf_iss, pf_rcv;
  logic        pf_kick_e, pf_kick, pf_bank_iss;
  assign pf_kick     = pf_kick_d || pf_kick_e;
  assign pf_bank_iss = pf_busy && (pf_iss < pf_len) && (ccd == '0);

  assign bk_rd_req  = f_bank_iss || pf_bank_iss;
  assign bk_rd_addr = pf_busy ? (pf_base + beat_addr_t'(pf_iss)) : (cur.addr + beat_addr_t'(iss_cnt));

  always_comb begin
    c_rd_en   = f_cache_iss;
    c_rd_addr = CAW'(cur.cache_idx) + CAW'(iss_cnt);
    c_wr_en   = 1'b0;
    c_wr_addr = CAW'(pf_rcv);
    c_wr_data = bk_rd_data;
    if (pf_busy && bk_rd_valid) begin
      c_wr_en = 1'b1;
    end else if (state == S_STC && cur.use_cache && iss_cnt < cur.nbeats) begin
      c_wr_en   = 1'b1;
      c_wr_addr = CAW'(cur.cache_idx) + CAW'(iss_cnt);
      c_wr_data = inter[int'(iss_cnt[2:0])*BEAT_WORDS +: BEAT_WORDS];
    end
  end

  // ---------------- transfer engine ----------------
  vec_t        xbuf;
  logic [4:0]  xbeats, xcnt;
  assign xfer_valid = xfer_busy;
  assign xfer_data  = xbuf[int'(xcnt[3:0])*BEAT_WORDS +: BEAT_WORDS];
  assign xfer_last  = (xcnt == xbeats - 5'd1);
  assign ps_take    = (state == S_DONE) && cur.transfer;
  assign pf_kick_e  = (state == S_DONE) && cur.transfer && cur.start_pf;

  assign ev_cache_beat = f_rcv && cur.use_cache;
  assign ev_bank_beat  = f_rcv && !cur.use_cache;
  assign ev_pf_beat    = pf_busy && bk_rd_valid;
  assign ev_overlap    = pf_busy && xfer_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur       <= '0;
      opnd      <= '0;
      inreg     <= '0;
      inter     <= '0;
      k         <= '0;
      iss_cnt   <= '0;
      rcv_cnt   <= '0;
      ccd       <= '0;
      pass      <= '0;
      pf_busy   <= 1'b0;
      pf_done   <= 1'b0;
      pf_base   <= '0;
      pf_len    <= '0;
      pf_iss    <= '0;
      pf_rcv    <= '0;
      xfer_busy <= 1'b0;
      xbuf      <= '0;
      xbeats    <= '0;
      xcnt      <= '0;
      xfer_tag  <= '0;
    end else begin
      pf_done <= 1'b0;
      // read-command spacing inside the bank group (tCCD_L)
      if (bk_rd_req)      ccd <= ($clog2(T_CCD_L+1))'(T_CCD_L - 1);
      else if (ccd != '0) ccd <= ccd - 1'b1;

      unique case (state)
        S_IDLE: if (accept) begin
          cur     <= dec;
          iss_cnt <= '0;
          rcv_cnt <= '0;
          pass    <= '0;
          if (is_fetch_op) begin
            opnd  <= '0;
            state <= S_FETCH;
          end else if (dec.op == OP_STC) begin
            state <= S_STC;
          end else begin
            state <= S_DONE;
          end
        end
        S_FETCH: begin
          if (f_bank_iss || f_cache_iss) iss_cnt <= iss_cnt + 5'd1;
          if (f_rcv) begin
            opnd[int'(rcv_cnt[3:0])*BEAT_WORDS +: BEAT_WORDS] <= f_data;
            rcv_cnt <= rcv_cnt + 5'd1;
            if (rcv_cnt == cur.nbeats - 5'd1) state <= S_EXEC;
          end
        end
        S_EXEC: begin
          unique case (cur.op)
            OP_LDIN: inreg[int'(pass)*MAC_LANES +: MAC_LANES] <= mac_res;
            OP_GEMV: inter <= mac_res;
            default: ;
          endcase
          if (5'(pass) == npass - 5'd1) begin
            if (cur.op == OP_LDIN) k <= '0;
            if (cur.op inside {OP_GEMV, OP_GEMVACC}) k <= k + 7'd1;
            state <= S_DONE;
          end else begin
            pass <= pass + 1'b1;
          end
        end
        S_STC: begin
          if (iss_cnt < cur.nbeats) iss_cnt <= iss_cnt + 5'd1;
          else begin
            inter <= '0;
            k     <= '0;
            state <= S_DONE;
          end
        end
        S_DONE: begin
          if (cur.transfer) begin
            xfer_busy <= 1'b1;
            xbuf      <= ps_take_vec;
            xbeats    <= cur.nbeats;
            xcnt      <= '0;
            xfer_tag  <= cur.tag;
          end
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase

      // prefetch engine
      if (pf_kick) begin
        pf_busy <= (pf_beats_d != 16'd0);
        pf_done <= (pf_beats_d == 16'd0);
        pf_base <= pf_addr_d;
        pf_len  <= pf_beats_d;
        pf_iss  <= '0;
        pf_rcv  <= '0;
      end else if (pf_busy) begin
        if (pf_bank_iss) pf_iss <= pf_iss + 16'd1;
        if (bk_rd_valid) begin
          pf_rcv <= pf_rcv + 16'd1;
          if (pf_rcv == pf_len - 16'd1) begin
            pf_busy <= 1'b0;
            pf_done <= 1'b1;
          end
        end
      end

      // transfer engine
      if (xfer_busy && xfer_ready) begin
        xcnt <= xcnt + 5'd1;
        if (xfer_last) xfer_busy <= 1'b0;
      end
    end
  end

  // rules of the interfaces
  a_one_prefetch: assert property (@(posedge clk) disable iff (!rst_n) !(pf_kick && pf_busy))
    else $error("prefetch started while one runs");
  a_gemv_row: assert property (@(posedge clk) disable iff (!rst_n)
    (accept && dec.op == OP_GEMV) |-> (dec.nbeats <= 5'(INTER_WORDS / BEAT_WORDS)))
    else $error("GEMV row longer than the intermediate buffer");
  a_bank_data: assert property (@(posedge clk) disable iff (!rst_n)
    bk_rd_valid |-> (pf_busy || (state == S_FETCH && !cur.use_cache)))
    else $error("bank data returned with no read outstanding");
  a_xfer_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (xfer_valid && !xfer_ready) |=> (xfer_valid && $stable(xfer_data)))
    else $error("transfer beat dropped before it was accepted");
endmodule
