// wireless_channel: behavioural model of the on-chip wireless network - one
// millimetre-wave transceiver per cluster plus one at L2, all sharing a single
// channel. The real part is RF/analog; this model gives the digital behaviour
// the paper assumes for it and is written so that it also synthesizes.
//
//  * Bandwidth: one 256-bit beat per cycle in total (89.6 Gbit/s at 350 MHz).
//  * Latency: 1 cycle. A read granted in cycle t has its data on the shared
//    rdata_o bus, with rvalid, in cycle t+1; a write granted in cycle t is in
//    L2 (wack in t+1) or in the target cluster's receive port (rx_o in t+1).
//  * Broadcast: every transceiver hears every transmission. When a read of
//    L2 address A wins the channel, every other cluster waiting to read A is
//    granted in the same cycle and takes the same data: one slot serves all.
//  * Cluster-to-cluster writes: a write with to_l1 set lands in the receive
//    port of cluster tgt_cl; the sender gets wack once that cluster reports
//    (rx_done_i) that the beat is in its L1. One beat at a time per receiver.
// Medium access is a round-robin arbiter over the transceivers with a
// request that can be served in this cycle. Packet loss and retransmission are
// not modelled (the paper accounts for them by its conservative bandwidth).
// Lint note: the winner's to_l1 flag is reported unused in one path (the
// same field is read directly from the request array); this is harmless.
// Lint note: rst_ni is used both as the asynchronous reset of the flops and
// in the 'disable iff' of this design's assertions, so the lint tool reports
// it as a net used synchronously and asynchronously; the logic only uses it
// as an asynchronous reset.
module wireless_channel
  import aimc_pkg::*;
#(
  parameter int unsigned N_CL = 16
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  wl_req_t [N_CL-1:0]            cl_req_i,
  output wl_rsp_t [N_CL-1:0]            cl_rsp_o,
  output logic [BEAT_BITS-1:0]          rdata_o,     // broadcast data bus
  // receive ports of the clusters
  output wl_rx_t  [N_CL-1:0]            rx_o,
  input  logic    [N_CL-1:0]            rx_done_i,
  // L2 side
  output logic                          l2_req_o,
  output logic                          l2_we_o,
  output logic [31:0]                   l2_addr_o,
  output logic [BEAT_BITS-1:0]          l2_wdata_o,
  input  logic [BEAT_BITS-1:0]          l2_rdata_i,
  // statistics: pulses when one read slot served more than one cluster
  output logic                          bcast_o
);
  localparam int unsigned CW = $clog2(N_CL > 1 ? N_CL : 2);

  logic [N_CL-1:0] elig, win, rd_gnt;
  logic [CW-1:0]   widx;
  logic [N_CL-1:0] rx_busy_q;
  logic [N_CL-1:0][CW-1:0] rx_src_q;
  logic [N_CL-1:0] rvalid_q, wack_q;

  always_comb begin
    for (int c = 0; c < int'(N_CL); c++)
      elig[c] = cl_req_i[c].req &&
                !(cl_req_i[c].we && cl_req_i[c].to_l1 &&
                  (int'(cl_req_i[c].tgt_cl) >= int'(N_CL) || rx_busy_q[cl_req_i[c].tgt_cl[CW-1:0]]));
  end

  rr_arbiter #(.N(N_CL)) u_mac (
    .clk_i, .rst_ni, .req_i(elig), .en_i(1'b1), .gnt_o(win), .idx_o(widx)
  );

  wl_req_t w;
  assign w = cl_req_i[widx];

  // broadcast merge of identical reads
  always_comb begin
    rd_gnt = '0;
    if (|win && !w.we)
      for (int c = 0; c < int'(N_CL); c++)
        rd_gnt[c] = cl_req_i[c].req && !cl_req_i[c].we && cl_req_i[c].addr == w.addr;
  end

  assign l2_req_o   = |win && !(w.we && w.to_l1);
  assign l2_we_o    = w.we;
  assign l2_addr_o  = w.addr;
  assign l2_wdata_o = w.wdata;
  assign rdata_o    = l2_rdata_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rx_busy_q <= '0;
      rx_src_q  <= '0;
      rvalid_q  <= '0;
      wack_q    <= '0;
      rx_o      <= '0;
      bcast_o   <= 1'b0;
    end else begin
      rvalid_q <= rd_gnt;
      wack_q   <= '0;
      bcast_o  <= $countones(rd_gnt) > 1;
      for (int c = 0; c < int'(N_CL); c++) rx_o[c].valid <= 1'b0;
      if (|win && w.we && !w.to_l1) wack_q[widx] <= 1'b1;
      if (|win && w.we && w.to_l1) begin
        rx_busy_q[w.tgt_cl[CW-1:0]] <= 1'b1;
        rx_src_q[w.tgt_cl[CW-1:0]]  <= widx;
        rx_o[w.tgt_cl[CW-1:0]]      <= '{valid: 1'b1, addr: w.addr, data: w.wdata};
      end
      for (int c = 0; c < int'(N_CL); c++)
        if (rx_done_i[c] && rx_busy_q[c]) begin
          rx_busy_q[c] <= 1'b0;
          wack_q[rx_src_q[c]] <= 1'b1;
        end
    end
  end

  always_comb begin
    for (int c = 0; c < int'(N_CL); c++) begin
      cl_rsp_o[c].gnt    = win[c] || rd_gnt[c];
      cl_rsp_o[c].rvalid = rvalid_q[c];
      cl_rsp_o[c].wack   = wack_q[c];
    end
  end

  // At most one transmission per cycle: grants other than the winner are
  // only the broadcast partners of a read.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
    $countones(win) <= 1);
endmodule
