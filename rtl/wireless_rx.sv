// wireless_rx: receive side of a cluster's wireless transceiver. A 256-bit
// beat written into this cluster by another cluster (inter-layer pipelining:
// one cluster's output tile goes straight into the next cluster's L1) is held
// in a one-beat buffer and written into L1 through this port's own L1 master
// port, one 32-bit word per granted cycle. done_o pulses when the last word
// has been granted; the channel then acknowledges the sender and may deliver
// the next beat. The paper only shows the transceiver attached to the cluster
// interconnect; the buffer and its handshake are this design's choice.
// Lint note: only the grant of the L1 response is used - the port only
// writes, so rvalid and rdata are reported unused.
// Lint note: rst_ni is used both as the asynchronous reset of the flops and
// in the 'disable iff' of this design's assertions, so the lint tool reports
// it as a net used synchronously and asynchronously; the logic only uses it
// as an asynchronous reset.
module wireless_rx
  import aimc_pkg::*;
(
  input  logic       clk_i,
  input  logic       rst_ni,
  input  wl_rx_t     rx_i,
  output tcdm_req_t  l1_req_o,
  input  tcdm_rsp_t  l1_rsp_i,
  output logic       done_o
);
  logic                 full_q;
  logic [31:0]          addr_q;
  logic [BEAT_BITS-1:0] data_q;
  logic [2:0]           idx_q;

  always_comb begin
    l1_req_o       = '0;
    l1_req_o.req   = full_q;
    l1_req_o.we    = 1'b1;
    l1_req_o.be    = 4'hF;
    l1_req_o.addr  = addr_q + {27'd0, idx_q, 2'b00};
    l1_req_o.wdata = data_q[32*idx_q +: 32];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      full_q <= 1'b0;
      addr_q <= '0;
      data_q <= '0;
      idx_q  <= '0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (rx_i.valid && !full_q) begin
        full_q <= 1'b1;
        addr_q <= rx_i.addr;
        data_q <= rx_i.data;
        idx_q  <= '0;
      end else if (full_q && l1_rsp_i.gnt) begin
        idx_q <= idx_q + 1'b1;
        if (idx_q == 3'd7) begin
          full_q <= 1'b0;
          done_o <= 1'b1;
        end
      end
    end
  end

  // The channel never delivers a beat while the buffer is full.
  assert property (@(posedge clk_i) disable iff (!rst_ni) rx_i.valid |-> !full_q);
endmodule
