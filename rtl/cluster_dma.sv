// cluster_dma: the cluster DMA. It has two channels that work at the same
// time, as in the in-cluster pipeline where DMA reads of the next tile overlap
// DMA writes of the previous one:
//   read channel  (L2 -> L1): fetches 256-bit beats over the wireless channel
//                  and writes them into L1 through L1 port 0 (8 words a beat);
//   write channel (L1 -> L2, or L1 -> another cluster's L1): reads 8 words
//                  from L1 through L1 port 1 and sends them as one beat, then
//                  waits for the channel's write acknowledge.
// Each channel has a command queue of QUEUE_DEPTH entries, so the cores can
// leave several transfers outstanding; every finished command gives a
// one-cycle event (rd_done_o / wr_done_o).
// Register map (byte offsets on the DMA's configuration window):
//   0x00 RD_L1  0x04 RD_L2  0x08 RD_LEN  0x0C RD_PUSH (queue a read command)
//   0x10 WR_L1  0x14 WR_DST 0x18 WR_LEN  0x1C WR_PUSH (wdata[0] = destination
//   is a cluster L1, wdata[7:4] = that cluster)
// Addresses and lengths are multiples of 32 bytes (one beat). Each channel
// has two beat buffers, so the channel transfer of one beat overlaps the L1
// transfer of the next; one channel request at a time is outstanding per
// DMA channel. The two DMA channels share the cluster's transceiver and take
// turns when both request it.
// The paper gives the function (multi-channel, programmed by the cores,
// several outstanding transfers); the beat size follows the 256 bit/cycle
// wireless bandwidth, and the rest is this design's choice.
// Lint note: some command-record bits are reported unused - the length of a
// running command is kept in separate beat counters, the read channel has no
// to_l1/target, and the write staging register's to_l1/target come from the
// WR_PUSH write itself. One record type is kept for queues and channels.
// Lint note: rst_ni is used both as the asynchronous reset of the flops and
// in the 'disable iff' of this design's assertions, so the lint tool reports
// it as a net used synchronously and asynchronously; the logic only uses it
// as an asynchronous reset.
module cluster_dma
  import aimc_pkg::*;
#(
  parameter int unsigned QUEUE_DEPTH = 4
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  cfg_we_i,
  input  logic [7:0]            cfg_addr_i,
  input  logic [31:0]           cfg_wdata_i,
  // L1 ports: 0 = read channel (writes L1), 1 = write channel (reads L1)
  output tcdm_req_t [1:0]       l1_req_o,
  input  tcdm_rsp_t [1:0]       l1_rsp_i,
  // wireless transceiver
  output wl_req_t               wl_req_o,
  input  wl_rsp_t               wl_rsp_i,
  input  logic [BEAT_BITS-1:0]  wl_rdata_i,
  // events and status
  output logic                  rd_done_o,
  output logic                  wr_done_o,
  output logic                  rd_busy_o,
  output logic                  wr_busy_o
);
  localparam int unsigned QW = $clog2(QUEUE_DEPTH > 1 ? QUEUE_DEPTH : 2);

  typedef struct packed {
    logic [31:0] l1;
    logic [31:0] rmt;     // L2 address or remote L1 address
    logic [31:0] len;
    logic        to_l1;
    logic [3:0]  tgt_cl;
  } cmd_t;

  // ---------------- command queues ----------------
  cmd_t rd_stage_q, wr_stage_q;
  cmd_t rq_q [QUEUE_DEPTH];
  cmd_t wq_q [QUEUE_DEPTH];
  logic [QW:0] rq_cnt_q, wq_cnt_q;
  logic [QW-1:0] rq_rd_q, rq_wr_q, wq_rd_q, wq_wr_q;
  logic rq_push, wq_push, rq_pop, wq_pop;

  assign rq_push = cfg_we_i && cfg_addr_i == 8'h0C && rq_cnt_q < (QW+1)'(QUEUE_DEPTH);
  assign wq_push = cfg_we_i && cfg_addr_i == 8'h1C && wq_cnt_q < (QW+1)'(QUEUE_DEPTH);

  // ---------------- read channel ----------------
  // fetch side: requests beats from the channel; store side: writes them to
  // L1. A two-beat buffer lets the next beat arrive while one is stored.
  logic        r_act_q;
  cmd_t        rc_q;                   // fetch address (rmt) / store address (l1)
  logic [31:0] r_fetch_left_q, r_store_left_q;   // beats
  logic        r_infl_q;               // a read granted, data next cycle
  logic [BEAT_BITS-1:0] rbuf_q [2];
  logic [1:0]  rb_cnt_q;
  logic        rb_wr_q, rb_rd_q;
  logic [2:0]  rw_q;                   // word of the beat being stored

  // ---------------- write channel ----------------
  // fill side: reads beats from L1; send side: transmits them and waits for
  // the acknowledge. Two beat buffers let the next beat be read meanwhile.
  logic        w_act_q;
  cmd_t        wc_q;                   // fill address (l1) / send address (rmt)
  logic [31:0] w_fill_left_q, w_send_left_q;
  logic [BEAT_BITS-1:0] wbuf_q [2];
  logic [1:0]  wb_full_q;
  logic        wb_fill_q, wb_send_q;
  logic [3:0]  wi_q, wg_q;             // words issued / received of the beat
  logic        wpend_q;
  logic [2:0]  wpend_idx_q;
  logic        w_wait_ack_q;

  // ---------------- transceiver sharing ----------------
  logic r_want, w_want, sel_w, last_w_q;
  assign r_want = r_act_q && r_fetch_left_q != 0 && !r_infl_q && (rb_cnt_q + {1'b0, r_infl_q}) < 2'd2;
  assign w_want = w_act_q && wb_full_q[wb_send_q] && !w_wait_ack_q;
  assign sel_w  = w_want && (!r_want || !last_w_q);

  always_comb begin
    wl_req_o = '0;
    if (sel_w) begin
      wl_req_o.req    = 1'b1;
      wl_req_o.we     = 1'b1;
      wl_req_o.to_l1  = wc_q.to_l1;
      wl_req_o.tgt_cl = wc_q.tgt_cl;
      wl_req_o.addr   = wc_q.rmt;
      wl_req_o.wdata  = wbuf_q[wb_send_q];
    end else if (r_want) begin
      wl_req_o.req  = 1'b1;
      wl_req_o.addr = rc_q.rmt;
    end
  end

  // ---------------- L1 ports ----------------
  logic w_fill_en;
  assign w_fill_en = w_act_q && w_fill_left_q != 0 && !wb_full_q[wb_fill_q];

  always_comb begin
    l1_req_o = '0;
    l1_req_o[0].be    = 4'hF;
    l1_req_o[1].be    = 4'hF;
    l1_req_o[0].req   = r_act_q && rb_cnt_q != 0;
    l1_req_o[0].we    = 1'b1;
    l1_req_o[0].addr  = rc_q.l1 + {27'd0, rw_q, 2'b00};
    l1_req_o[0].wdata = rbuf_q[rb_rd_q][32*rw_q +: 32];
    l1_req_o[1].req   = w_fill_en && !wi_q[3];
    l1_req_o[1].addr  = wc_q.l1 + {27'd0, wi_q[2:0], 2'b00};
  end

  assign rq_pop = !r_act_q && rq_cnt_q != 0;
  assign wq_pop = !w_act_q && wq_cnt_q != 0;

  logic r_gnt, w_gnt;
  assign r_gnt = wl_req_o.req && !sel_w && wl_rsp_i.gnt;
  assign w_gnt = sel_w && wl_rsp_i.gnt;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_stage_q <= '0; wr_stage_q <= '0;
      rq_cnt_q <= '0; wq_cnt_q <= '0;
      rq_rd_q <= '0; rq_wr_q <= '0; wq_rd_q <= '0; wq_wr_q <= '0;
      for (int i = 0; i < int'(QUEUE_DEPTH); i++) begin rq_q[i] <= '0; wq_q[i] <= '0; end
      r_act_q <= 1'b0; rc_q <= '0; r_fetch_left_q <= '0; r_store_left_q <= '0; r_infl_q <= 1'b0;
      rbuf_q[0] <= '0; rbuf_q[1] <= '0; rb_cnt_q <= '0; rb_wr_q <= 1'b0; rb_rd_q <= 1'b0; rw_q <= '0;
      w_act_q <= 1'b0; wc_q <= '0; w_fill_left_q <= '0; w_send_left_q <= '0;
      wbuf_q[0] <= '0; wbuf_q[1] <= '0; wb_full_q <= '0; wb_fill_q <= 1'b0; wb_send_q <= 1'b0;
      wi_q <= '0; wg_q <= '0; wpend_q <= 1'b0; wpend_idx_q <= '0; w_wait_ack_q <= 1'b0;
      last_w_q <= 1'b0;
      rd_done_o <= 1'b0; wr_done_o <= 1'b0;
    end else begin
      rd_done_o <= 1'b0;
      wr_done_o <= 1'b0;
      // staging registers and queues
      if (cfg_we_i) begin
        unique case (cfg_addr_i)
          8'h00: rd_stage_q.l1  <= cfg_wdata_i;
          8'h04: rd_stage_q.rmt <= cfg_wdata_i;
          8'h08: rd_stage_q.len <= cfg_wdata_i;
          8'h10: wr_stage_q.l1  <= cfg_wdata_i;
          8'h14: wr_stage_q.rmt <= cfg_wdata_i;
          8'h18: wr_stage_q.len <= cfg_wdata_i;
          default: ;
        endcase
      end
      if (rq_push) begin
        rq_q[rq_wr_q] <= rd_stage_q;
        rq_wr_q <= QW'((int'(rq_wr_q) + 1) % QUEUE_DEPTH);
      end
      if (wq_push) begin
        wq_q[wq_wr_q] <= '{l1: wr_stage_q.l1, rmt: wr_stage_q.rmt, len: wr_stage_q.len,
                           to_l1: cfg_wdata_i[0], tgt_cl: cfg_wdata_i[7:4]};
        wq_wr_q <= QW'((int'(wq_wr_q) + 1) % QUEUE_DEPTH);
      end
      rq_cnt_q <= rq_cnt_q + (QW+1)'(rq_push) - (QW+1)'(rq_pop);
      wq_cnt_q <= wq_cnt_q + (QW+1)'(wq_push) - (QW+1)'(wq_pop);

      if (wl_req_o.req && wl_rsp_i.gnt) last_w_q <= sel_w;

      // ---- read channel ----
      if (rq_pop) begin
        rc_q    <= rq_q[rq_rd_q];
        rq_rd_q <= QW'((int'(rq_rd_q) + 1) % QUEUE_DEPTH);
        r_fetch_left_q <= rq_q[rq_rd_q].len >> 5;
        r_store_left_q <= rq_q[rq_rd_q].len >> 5;
        rw_q <= '0;
        if ((rq_q[rq_rd_q].len >> 5) == 0) rd_done_o <= 1'b1;
        else r_act_q <= 1'b1;
      end else if (r_act_q) begin
        logic push, pop;
        push = r_infl_q && wl_rsp_i.rvalid;
        pop  = l1_req_o[0].req && l1_rsp_i[0].gnt && rw_q == 3'd7;
        if (r_gnt) begin
          r_infl_q       <= 1'b1;
          r_fetch_left_q <= r_fetch_left_q - 1'b1;
          rc_q.rmt       <= rc_q.rmt + 32'd32;
        end else if (push) r_infl_q <= 1'b0;
        if (push) begin
          rbuf_q[rb_wr_q] <= wl_rdata_i;
          rb_wr_q <= ~rb_wr_q;
        end
        if (l1_req_o[0].req && l1_rsp_i[0].gnt) rw_q <= rw_q + 1'b1;
        if (pop) begin
          rb_rd_q <= ~rb_rd_q;
          rc_q.l1 <= rc_q.l1 + 32'd32;
          r_store_left_q <= r_store_left_q - 1'b1;
          if (r_store_left_q == 32'd1) begin
            r_act_q   <= 1'b0;
            rd_done_o <= 1'b1;
          end
        end
        rb_cnt_q <= rb_cnt_q + 2'(push) - 2'(pop);
      end

      // ---- write channel ----
      wpend_q <= l1_req_o[1].req && l1_rsp_i[1].gnt;
      if (wq_pop) begin
        wc_q    <= wq_q[wq_rd_q];
        wq_rd_q <= QW'((int'(wq_rd_q) + 1) % QUEUE_DEPTH);
        w_fill_left_q <= wq_q[wq_rd_q].len >> 5;
        w_send_left_q <= wq_q[wq_rd_q].len >> 5;
        wi_q <= '0; wg_q <= '0;
        if ((wq_q[wq_rd_q].len >> 5) == 0) wr_done_o <= 1'b1;
        else w_act_q <= 1'b1;
      end else if (w_act_q) begin
        if (l1_req_o[1].req && l1_rsp_i[1].gnt) begin
          wi_q        <= wi_q + 1'b1;
          wpend_idx_q <= wi_q[2:0];
        end
        if (wpend_q && l1_rsp_i[1].rvalid) begin
          wbuf_q[wb_fill_q][32*wpend_idx_q +: 32] <= l1_rsp_i[1].rdata;
          if (wg_q == 4'd7) begin
            wb_full_q[wb_fill_q] <= 1'b1;
            wb_fill_q     <= ~wb_fill_q;
            wc_q.l1       <= wc_q.l1 + 32'd32;
            w_fill_left_q <= w_fill_left_q - 1'b1;
            wi_q <= '0;
            wg_q <= '0;
          end else wg_q <= wg_q + 1'b1;
        end
        if (w_gnt) w_wait_ack_q <= 1'b1;
        if (w_wait_ack_q && wl_rsp_i.wack) begin
          w_wait_ack_q <= 1'b0;
          wb_full_q[wb_send_q] <= 1'b0;
          wb_send_q <= ~wb_send_q;
          wc_q.rmt  <= wc_q.rmt + 32'd32;
          w_send_left_q <= w_send_left_q - 1'b1;
          if (w_send_left_q == 32'd1) begin
            w_act_q   <= 1'b0;
            wr_done_o <= 1'b1;
          end
        end
      end
    end
  end

  assign rd_busy_o = r_act_q || rq_cnt_q != 0;
  assign wr_busy_o = w_act_q || wq_cnt_q != 0;

  // The cores must not push into a full queue.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (cfg_we_i && cfg_addr_i == 8'h0C) |-> rq_cnt_q < (QW+1)'(QUEUE_DEPTH));
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    (cfg_we_i && cfg_addr_i == 8'h1C) |-> wq_cnt_q < (QW+1)'(QUEUE_DEPTH));
endmodule
