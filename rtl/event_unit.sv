// event_unit: synchronisation hub of one cluster. Hardware events (DMA read
// done, DMA write done, IMA done, barrier) and software events (raised by this
// cluster's cores, or by the cores of another cluster that feeds this one) are
// collected every cycle into a sticky event buffer per core. Each core has an
// event mask; core_evt_o[c] is high while buffer & mask is non-zero. A core
// that goes to sleep (core_sleep_i) has its clock enable dropped until such an
// event arrives: the event wakes it in the next cycle.
// Event numbers: 0 DMA read done, 1 DMA write done, 2 IMA done, 3 barrier,
// 8..15 software events 0..7.
// Register map (byte offsets on the event unit's configuration window):
//   0x00+4c MASK of core c      0x20+4c CLEAR of core c (write 1s to clear)
//   0x40    SW_TRIG: wdata[2:0] event, wdata[31:16] target cluster mask;
//           a zero mask raises the event in this cluster only
//   0x44    BAR_ARRIVE: wdata = arriving core   0x48 BAR_MASK (default all)
// The paper gives the function (hardware and software events, barriers,
// inter-cluster software events, low latency); the numbering, register map
// and one-cycle wake-up are this design's choices.
module event_unit
  import aimc_pkg::*;
#(
  parameter int unsigned N_CORES = 4
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  input  logic                            cfg_we_i,
  input  logic [7:0]                      cfg_addr_i,
  input  logic [31:0]                     cfg_wdata_i,
  input  logic                            dma_rd_done_i,
  input  logic                            dma_wr_done_i,
  input  logic                            ima_done_i,
  input  logic [N_SW_EVT-1:0]             sw_evt_i,      // from other clusters
  output sw_evt_t                         sw_evt_o,      // to other clusters
  input  logic [N_CORES-1:0]              core_sleep_i,
  output logic [N_CORES-1:0]              core_evt_o,
  output logic [N_CORES-1:0]              core_clk_en_o,
  output logic [N_CORES-1:0][EVT_W-1:0]   core_buf_o
);
  logic [N_CORES-1:0][EVT_W-1:0] mask_q, buf_q;
  logic [N_CORES-1:0] bar_arr_q, bar_mask_q;
  logic [EVT_W-1:0] evt;
  logic bar_fire;
  logic [N_CORES-1:0] arrive;

  always_comb begin
    arrive = '0;
    if (cfg_we_i && cfg_addr_i == 8'h44 && cfg_wdata_i < N_CORES)
      arrive[cfg_wdata_i[$clog2(N_CORES > 1 ? N_CORES : 2)-1:0]] = 1'b1;
  end
  assign bar_fire = bar_mask_q != '0 && ((bar_arr_q | arrive) & bar_mask_q) == bar_mask_q;

  always_comb begin
    evt = '0;
    evt[EVT_DMA_RD]  = dma_rd_done_i;
    evt[EVT_DMA_WR]  = dma_wr_done_i;
    evt[EVT_IMA]     = ima_done_i;
    evt[EVT_BARRIER] = bar_fire;
    evt[EVT_SW_BASE +: N_SW_EVT] = sw_evt_i;
    if (cfg_we_i && cfg_addr_i == 8'h40 && cfg_wdata_i[31:16] == '0)
      evt[EVT_SW_BASE + 32'(cfg_wdata_i[2:0])] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      mask_q     <= '0;
      buf_q      <= '0;
      bar_arr_q  <= '0;
      bar_mask_q <= '1;
      sw_evt_o   <= '0;
    end else begin
      sw_evt_o <= '0;
      for (int c = 0; c < int'(N_CORES); c++) begin
        logic [EVT_W-1:0] clr;
        clr = '0;
        if (cfg_we_i && cfg_addr_i == 8'(8'h20 + 4 * c)) clr = cfg_wdata_i;
        buf_q[c] <= (buf_q[c] & ~clr) | evt;
        if (cfg_we_i && cfg_addr_i == 8'(4 * c)) mask_q[c] <= cfg_wdata_i;
      end
      if (cfg_we_i && cfg_addr_i == 8'h48) bar_mask_q <= cfg_wdata_i[N_CORES-1:0];
      bar_arr_q <= bar_fire ? '0 : (bar_arr_q | arrive);
      if (cfg_we_i && cfg_addr_i == 8'h40 && cfg_wdata_i[31:16] != '0) begin
        sw_evt_o.valid   <= 1'b1;
        sw_evt_o.cl_mask <= cfg_wdata_i[31:16];
        sw_evt_o.id      <= cfg_wdata_i[2:0];
      end
    end
  end

  always_comb begin
    for (int c = 0; c < int'(N_CORES); c++) begin
      core_evt_o[c]    = |(buf_q[c] & mask_q[c]);
      core_clk_en_o[c] = !core_sleep_i[c] || core_evt_o[c];
    end
  end
  assign core_buf_o = buf_q;
endmodule
