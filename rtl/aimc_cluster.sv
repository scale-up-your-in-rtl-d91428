// aimc_cluster: one heterogeneous cluster of the many-tile system. It holds
// the L1 TCDM (N_BANKS word-interleaved SRAM banks), the logarithmic
// interconnect in front of it, the IMA (analog in-memory accelerator with its
// 16 L1 ports), the two-channel DMA, the event unit and the receive port of
// the cluster's wireless transceiver. The RISC-V cores are not part of this
// RTL: each core's L1 port, its sleep request and its event/clock-enable
// outputs are ports of the cluster, and the cores' programming writes arrive
// on one configuration bus (cfg_i), decoded here:
//   0x000-0x0FF DMA, 0x100-0x1FF IMA, 0x200-0x2FF event unit.
// L1 masters on the interconnect, in order: IMA ports 0..15, DMA read
// channel, DMA write channel, wireless receive port, cores 0..N_CORES-1.
// Block list and connections follow the cluster diagram of the paper; the
// address map and master order are this design's choices.
// Lint note: rst_ni is used both as the asynchronous reset of the flops and
// in the 'disable iff' of the assertions of the modules below, so lint reports
// it as a net used synchronously and asynchronously; the logic only uses it
// as an asynchronous reset.
module aimc_cluster
  import aimc_pkg::*;
#(
  parameter int unsigned N_CORES    = 4,
  parameter int unsigned N_BANKS    = 10,
  parameter int unsigned L1_BYTES   = 64 * 1024,
  parameter int unsigned XB_ROWS    = XBAR_ROWS,
  parameter int unsigned XB_COLS    = XBAR_COLS,
  parameter int unsigned EVAL_CYC   = EVAL_CYCLES
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  // cores (outside this RTL)
  input  cfg_req_t                        cfg_i,
  input  tcdm_req_t [N_CORES-1:0]         core_l1_req_i,
  output tcdm_rsp_t [N_CORES-1:0]         core_l1_rsp_o,
  input  logic      [N_CORES-1:0]         core_sleep_i,
  output logic      [N_CORES-1:0]         core_evt_o,
  output logic      [N_CORES-1:0]         core_clk_en_o,
  output logic [N_CORES-1:0][EVT_W-1:0]   core_buf_o,
  // wireless transceiver
  output wl_req_t                         wl_req_o,
  input  wl_rsp_t                         wl_rsp_i,
  input  logic [BEAT_BITS-1:0]            wl_rdata_i,
  input  wl_rx_t                          wl_rx_i,
  output logic                            wl_rx_done_o,
  // software events between clusters
  output sw_evt_t                         sw_evt_o,
  input  logic [N_SW_EVT-1:0]             sw_evt_i,
  // status
  output logic [1:0]                      ima_phase_o
);
  localparam int unsigned N_MST      = IMA_PORTS + 2 + 1 + N_CORES;
  localparam int unsigned BANK_DEPTH = (L1_BYTES / 4 + N_BANKS - 1) / N_BANKS;
  localparam int unsigned RW         = $clog2(BANK_DEPTH);

  tcdm_req_t [N_MST-1:0] mreq;
  tcdm_rsp_t [N_MST-1:0] mrsp;

  // configuration decode
  logic dma_we, ima_we, eu_we;
  assign dma_we = cfg_i.valid && cfg_i.addr[11:8] == CFG_DMA;
  assign ima_we = cfg_i.valid && cfg_i.addr[11:8] == CFG_IMA;
  assign eu_we  = cfg_i.valid && cfg_i.addr[11:8] == CFG_EU;

  // IMA
  logic ima_done;
  ima #(.ROWS(XB_ROWS), .COLS(XB_COLS), .N_PORTS(IMA_PORTS), .EVAL_CYC(EVAL_CYC)) u_ima (
    .clk_i, .rst_ni,
    .cfg_we_i   (ima_we),
    .cfg_addr_i (cfg_i.addr[7:0]),
    .cfg_wdata_i(cfg_i.wdata),
    .l1_req_o   (mreq[IMA_PORTS-1:0]),
    .l1_rsp_i   (mrsp[IMA_PORTS-1:0]),
    .busy_o     (),
    .done_o     (ima_done),
    .phase_o    (ima_phase_o)
  );

  // DMA
  logic rd_done, wr_done;
  cluster_dma u_dma (
    .clk_i, .rst_ni,
    .cfg_we_i   (dma_we),
    .cfg_addr_i (cfg_i.addr[7:0]),
    .cfg_wdata_i(cfg_i.wdata),
    .l1_req_o   (mreq[IMA_PORTS +: 2]),
    .l1_rsp_i   (mrsp[IMA_PORTS +: 2]),
    .wl_req_o, .wl_rsp_i, .wl_rdata_i,
    .rd_done_o  (rd_done),
    .wr_done_o  (wr_done),
    .rd_busy_o  (),
    .wr_busy_o  ()
  );

  // wireless receive port
  wireless_rx u_rx (
    .clk_i, .rst_ni,
    .rx_i     (wl_rx_i),
    .l1_req_o (mreq[IMA_PORTS + 2]),
    .l1_rsp_i (mrsp[IMA_PORTS + 2]),
    .done_o   (wl_rx_done_o)
  );

  // cores
  assign mreq[IMA_PORTS + 3 +: N_CORES] = core_l1_req_i;
  assign core_l1_rsp_o = mrsp[IMA_PORTS + 3 +: N_CORES];

  // event unit
  event_unit #(.N_CORES(N_CORES)) u_eu (
    .clk_i, .rst_ni,
    .cfg_we_i     (eu_we),
    .cfg_addr_i   (cfg_i.addr[7:0]),
    .cfg_wdata_i  (cfg_i.wdata),
    .dma_rd_done_i(rd_done),
    .dma_wr_done_i(wr_done),
    .ima_done_i   (ima_done),
    .sw_evt_i,
    .sw_evt_o,
    .core_sleep_i,
    .core_evt_o,
    .core_clk_en_o,
    .core_buf_o
  );

  // L1: interconnect and banks
  logic [N_BANKS-1:0]          b_req, b_we;
  logic [N_BANKS-1:0][3:0]     b_be;
  logic [N_BANKS-1:0][RW-1:0]  b_addr;
  logic [N_BANKS-1:0][31:0]    b_wdata, b_rdata;

  tcdm_interconnect #(.N_MASTERS(N_MST), .N_BANKS(N_BANKS), .BANK_DEPTH(BANK_DEPTH)) u_xbar (
    .clk_i, .rst_ni,
    .mst_req_i   (mreq),
    .mst_rsp_o   (mrsp),
    .bank_req_o  (b_req),
    .bank_we_o   (b_we),
    .bank_be_o   (b_be),
    .bank_addr_o (b_addr),
    .bank_wdata_o(b_wdata),
    .bank_rdata_i(b_rdata)
  );

  for (genvar b = 0; b < int'(N_BANKS); b++) begin : g_bank
    tcdm_bank #(.DEPTH(BANK_DEPTH)) u_bank (
      .clk_i,
      .req_i  (b_req[b]),
      .we_i   (b_we[b]),
      .be_i   (b_be[b]),
      .addr_i (b_addr[b]),
      .wdata_i(b_wdata[b]),
      .rdata_o(b_rdata[b])
    );
  end
endmodule
