// aimc_system: top level of the many-tile AIMC inference system. N_CL
// clusters, each with its own analog in-memory accelerator, L1, DMA and event
// unit, share one L2 scratchpad. All traffic between the clusters and L2, and
// between clusters, goes over one shared wireless channel (256 bit/cycle,
// 1-cycle latency) that broadcasts an L2 read to every cluster asking for the
// same data. Software events raised by one cluster's cores are routed here to
// the event units of the clusters they name.
// The cores of every cluster and whatever loads L2 (a host) are outside this
// RTL: their signals are ports, indexed [cluster][core]. The L2 host port is
// granted only in cycles in which the channel does not use L2.
// Structure follows the system diagram of the paper (16 clusters, L2, wireless
// transceivers); the wired cluster-to-L2 interconnect the paper compares
// against is not part of this design.
// Lint note: rst_ni is used both as the asynchronous reset of the flops and
// in the 'disable iff' of the assertions of the modules below, so lint reports
// it as a net used synchronously and asynchronously; the logic only uses it
// as an asynchronous reset.
module aimc_system
  import aimc_pkg::*;
#(
  parameter int unsigned N_CL     = 16,
  parameter int unsigned N_CORES  = 4,
  parameter int unsigned N_BANKS  = 10,
  parameter int unsigned L1_BYTES = 64 * 1024,
  parameter int unsigned L2_BYTES = 512 * 1024,
  parameter int unsigned XB_ROWS  = XBAR_ROWS,
  parameter int unsigned XB_COLS  = XBAR_COLS,
  parameter int unsigned EVAL_CYC = EVAL_CYCLES
) (
  input  logic                                       clk_i,
  input  logic                                       rst_ni,
  // cores
  input  cfg_req_t  [N_CL-1:0]                       cfg_i,
  input  tcdm_req_t [N_CL-1:0][N_CORES-1:0]          core_l1_req_i,
  output tcdm_rsp_t [N_CL-1:0][N_CORES-1:0]          core_l1_rsp_o,
  input  logic      [N_CL-1:0][N_CORES-1:0]          core_sleep_i,
  output logic      [N_CL-1:0][N_CORES-1:0]          core_evt_o,
  output logic      [N_CL-1:0][N_CORES-1:0]          core_clk_en_o,
  output logic      [N_CL-1:0][N_CORES-1:0][EVT_W-1:0] core_buf_o,
  // L2 host port
  input  logic                                       host_req_i,
  input  logic                                       host_we_i,
  input  logic [31:0]                                host_addr_i,
  input  logic [31:0]                                host_wdata_i,
  output logic                                       host_gnt_o,
  output logic                                       host_rvalid_o,
  output logic [31:0]                                host_rdata_o,
  // status
  output logic [N_CL-1:0][1:0]                       ima_phase_o,
  output logic                                       bcast_o
);
  wl_req_t [N_CL-1:0] wl_req;
  wl_rsp_t [N_CL-1:0] wl_rsp;
  wl_rx_t  [N_CL-1:0] wl_rx;
  logic    [N_CL-1:0] rx_done;
  logic [BEAT_BITS-1:0] wl_rdata;
  sw_evt_t [N_CL-1:0] sw_out;
  logic [N_CL-1:0][N_SW_EVT-1:0] sw_in;

  logic                 l2_req, l2_we;
  logic [31:0]          l2_addr;
  logic [BEAT_BITS-1:0] l2_wdata, l2_rdata;

  // software event routing
  always_comb begin
    sw_in = '0;
    for (int d = 0; d < int'(N_CL); d++)
      for (int s = 0; s < int'(N_CL); s++)
        if (sw_out[s].valid && sw_out[s].cl_mask[d]) sw_in[d][sw_out[s].id] = 1'b1;
  end

  for (genvar c = 0; c < int'(N_CL); c++) begin : g_cl
    aimc_cluster #(
      .N_CORES(N_CORES), .N_BANKS(N_BANKS), .L1_BYTES(L1_BYTES),
      .XB_ROWS(XB_ROWS), .XB_COLS(XB_COLS), .EVAL_CYC(EVAL_CYC)
    ) u_cl (
      .clk_i, .rst_ni,
      .cfg_i         (cfg_i[c]),
      .core_l1_req_i (core_l1_req_i[c]),
      .core_l1_rsp_o (core_l1_rsp_o[c]),
      .core_sleep_i  (core_sleep_i[c]),
      .core_evt_o    (core_evt_o[c]),
      .core_clk_en_o (core_clk_en_o[c]),
      .core_buf_o    (core_buf_o[c]),
      .wl_req_o      (wl_req[c]),
      .wl_rsp_i      (wl_rsp[c]),
      .wl_rdata_i    (wl_rdata),
      .wl_rx_i       (wl_rx[c]),
      .wl_rx_done_o  (rx_done[c]),
      .sw_evt_o      (sw_out[c]),
      .sw_evt_i      (sw_in[c]),
      .ima_phase_o   (ima_phase_o[c])
    );
  end

  wireless_channel #(.N_CL(N_CL)) u_wl (
    .clk_i, .rst_ni,
    .cl_req_i  (wl_req),
    .cl_rsp_o  (wl_rsp),
    .rdata_o   (wl_rdata),
    .rx_o      (wl_rx),
    .rx_done_i (rx_done),
    .l2_req_o  (l2_req),
    .l2_we_o   (l2_we),
    .l2_addr_o (l2_addr),
    .l2_wdata_o(l2_wdata),
    .l2_rdata_i(l2_rdata),
    .bcast_o
  );

  l2_mem #(.SIZE_BYTES(L2_BYTES)) u_l2 (
    .clk_i, .rst_ni,
    .ch_req_i   (l2_req),
    .ch_we_i    (l2_we),
    .ch_addr_i  (l2_addr),
    .ch_wdata_i (l2_wdata),
    .ch_rdata_o (l2_rdata),
    .host_req_i, .host_we_i, .host_addr_i, .host_wdata_i,
    .host_gnt_o, .host_rvalid_o, .host_rdata_o
  );
endmodule
