// tb_aimc_system: end-to-end test of the whole system at its default size:
// 16 clusters, each with a 256 x 256 crossbar, sharing L2 over the wireless
// channel. The testbench plays a host that loads L2 through the host port and
// the cores of every cluster (one process per cluster driving its
// configuration bus and sleeping on its event unit). It runs the two ways of
// distributing a CNN layer over clusters:
//  1. data parallelization: one 1x1 convolution with 256 input and
//     256 * N_CL output channels. Every cluster fetches the same input pixels
//     from L2 - the channel serves the identical reads of all clusters in one
//     broadcast slot - computes its own 256 output channels and writes them
//     back to L2.
//  2. inter-layer pipelining: N_CL identical-shape 1x1 layers, one per
//     cluster (weights stay where they are). Cluster 0 reads input tiles from
//     L2; every cluster sends its output tile straight into the next
//     cluster's L1 over the channel and wakes it with an inter-cluster
//     software event; the last cluster writes the result to L2.
// All results are compared with reference convolutions computed here. Each
// mechanism (barrier, broadcast, channel contention, L1 bank conflicts,
// overlapping DMA channels, cluster-to-cluster writes, software events, core
// sleep) is counted and must happen at least once. Cycle counts and the
// computation efficiency against the ideal 4 + 46 + 4 cycles per vector are
// printed.
module tb_aimc_system;
  import aimc_pkg::*;
  localparam int unsigned NCL = 16, NC = 4, C = 256, SH = 8;
  localparam int unsigned DP_PIX = 4;                 // pixels per cluster (data parallel)
  localparam int unsigned PP_TILES = 2, PP_PIX = 2;   // pipelining: tiles of pixels
  localparam int unsigned L2_IN = 32'h0000, L2_DP_OUT = 32'h1000, L2_PP_IN = 32'h20000, L2_PP_OUT = 32'h21000;

  logic clk = 0, rst_n = 0;
  cfg_req_t  [NCL-1:0] cfg;
  tcdm_req_t [NCL-1:0][NC-1:0] creq;
  tcdm_rsp_t [NCL-1:0][NC-1:0] crsp;
  logic [NCL-1:0][NC-1:0] sleep, cevt, cclk;
  logic [NCL-1:0][NC-1:0][EVT_W-1:0] cbuf;
  logic h_req = 0, h_we = 0, h_gnt, h_rv;
  logic [31:0] h_addr = '0, h_wdata = '0, h_rdata;
  logic [NCL-1:0][1:0] phase;
  logic bcast;
  int checks = 0, failures = 0;

  aimc_system dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .core_l1_req_i(creq), .core_l1_rsp_o(crsp),
    .core_sleep_i(sleep), .core_evt_o(cevt), .core_clk_en_o(cclk), .core_buf_o(cbuf),
    .host_req_i(h_req), .host_we_i(h_we), .host_addr_i(h_addr), .host_wdata_i(h_wdata),
    .host_gnt_o(h_gnt), .host_rvalid_o(h_rv), .host_rdata_o(h_rdata), .ima_phase_o(phase), .bcast_o(bcast));

  always #5 clk = ~clk;
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  logic [NCL-1:0] p_dma_ovl, p_l1_conf, p_bar;
  for (genvar c = 0; c < int'(NCL); c++) begin : g_probe
    assign p_dma_ovl[c] = dut.g_cl[c].u_cl.u_dma.rd_busy_o && dut.g_cl[c].u_cl.u_dma.wr_busy_o;
    assign p_bar[c]     = dut.g_cl[c].u_cl.u_eu.bar_fire;
    always_comb begin
      p_l1_conf[c] = 1'b0;
      for (int p = 0; p < int'(IMA_PORTS); p++)
        if (dut.g_cl[c].u_cl.mreq[p].req && !dut.g_cl[c].u_cl.mrsp[p].gnt) p_l1_conf[c] = 1'b1;
    end
  end
  int unsigned n_bcast = 0, n_wl_wait = 0, n_l1_conf = 0, n_dma_overlap = 0, n_rx = 0,
               n_sw = 0, n_sleep = 0, n_barrier = 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (bcast) n_bcast <= n_bcast + 1;
    n_dma_overlap <= n_dma_overlap + $countones(p_dma_ovl);
    n_l1_conf     <= n_l1_conf + $countones(p_l1_conf);
    n_barrier     <= n_barrier + $countones(p_bar);
    for (int c = 0; c < int'(NCL); c++) begin
      if (dut.wl_req[c].req && !dut.wl_rsp[c].gnt) n_wl_wait <= n_wl_wait + 1;
      if (dut.wl_rx[c].valid) n_rx <= n_rx + 1;
      if (dut.sw_out[c].valid) n_sw <= n_sw + 1;
      if (!cclk[c][1]) n_sleep <= n_sleep + 1;
    end
  end

  // ---------------- helpers ----------------
  logic [3:0] w [NCL][C][C];
  logic [7:0] l2_in [DP_PIX * C];
  logic [7:0] pp_in [PP_TILES * PP_PIX * C];

  function automatic int wv(input logic [3:0] q);
    return q[3] ? -int'(~q[2:0] & 3'h7) : int'(q[2:0]);
  endfunction
  function automatic logic [7:0] adc(input int acc);
    int v; v = acc >>> SH;
    return (v > 127) ? 8'h7F : (v < -128) ? 8'h80 : 8'(v);
  endfunction

  // one configuration write per cycle, as a core storing to a peripheral
  task automatic cw(input int c, input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); cfg[c] = '{valid: 1, addr: a, wdata: d};
    @(posedge clk); #1 cfg[c] = '0;
  endtask
  task automatic wait_evt(input int c, input int core, input int e);
    cw(c, 12'h200 + 12'(4 * core), 32'(1) << e);
    sleep[c][core] = 1;
    @(negedge clk);
    while (!cclk[c][core]) @(negedge clk);
    sleep[c][core] = 0;
    cw(c, 12'h220 + 12'(4 * core), 32'(1) << e);
  endtask
  task automatic dma_rd(input int c, input int l1a, input int l2a, input int len);
    cw(c, 12'h000, l1a); cw(c, 12'h004, l2a); cw(c, 12'h008, len); cw(c, 12'h00C, 0);
  endtask
  task automatic dma_wr(input int c, input int l1a, input int dst, input int len, input int to_l1, input int tgt);
    cw(c, 12'h010, l1a); cw(c, 12'h014, dst); cw(c, 12'h018, len); cw(c, 12'h01C, (tgt << 4) | to_l1);
  endtask
  task automatic ima_job(input int c, input int src, input int dst, input int npix);
    cw(c, 12'h100, src); cw(c, 12'h104, dst); cw(c, 12'h108, C); cw(c, 12'h10C, C); cw(c, 12'h110, npix);
    cw(c, 12'h114, C); cw(c, 12'h118, C); cw(c, 12'h11C, SH); cw(c, 12'h120, 0);
  endtask
  task automatic host_wr(input int a, input logic [31:0] d);
    @(negedge clk); h_req = 1; h_we = 1; h_addr = a; h_wdata = d;
    #1; while (!h_gnt) begin @(negedge clk); #1; end
    @(negedge clk); h_req = 0; h_we = 0;
  endtask
  task automatic host_rd(input int a, output logic [31:0] d);
    @(negedge clk); h_req = 1; h_we = 0; h_addr = a;
    #1; while (!h_gnt) begin @(negedge clk); #1; end
    @(negedge clk); h_req = 0; d = h_rdata;
  endtask
  task automatic program_weights(input int c);
    cw(c, 12'h124, 0);
    for (int r = 0; r < int'(C); r++)
      for (int g = 0; g < int'(C / 8); g++) begin
        logic [31:0] x;
        x = $urandom;
        for (int k = 0; k < 8; k++) w[c][r][8*g+k] = x[4*k +: 4];
        @(negedge clk); cfg[c] = '{valid: 1, addr: 12'h128, wdata: x};
      end
    @(negedge clk); cfg[c] = '0;
  endtask
  task automatic barrier(input int c);
    for (int k = 0; k < int'(NC); k++) cw(c, 12'h244, k);
    wait_evt(c, 3, EVT_BARRIER);
  endtask

  // data-parallel program of cluster c: the in-cluster pipeline over tiles of
  // one pixel, double-buffered - the DMA reads tile t+1 (the same beats for
  // every cluster, so the channel broadcasts them) and writes back tile t-1
  // while the IMA computes tile t.
  task automatic dp_cluster(input int c);
    barrier(c);
    dma_rd(c, 32'h0000, L2_IN, C);
    wait_evt(c, 0, EVT_DMA_RD);
    for (int t = 0; t < int'(DP_PIX); t++) begin
      int b; b = t % 2;
      if (t + 1 < int'(DP_PIX)) dma_rd(c, 32'h0000 + (1 - b) * C, L2_IN + (t + 1) * C, C);
      ima_job(c, 32'h0000 + b * C, 32'h2000 + b * C, 1);
      wait_evt(c, 1, EVT_IMA);
      if (t > 0) wait_evt(c, 2, EVT_DMA_WR);
      dma_wr(c, 32'h2000 + b * C, L2_DP_OUT + c * DP_PIX * C + t * C, C, 0, 0);
      if (t + 1 < int'(DP_PIX)) wait_evt(c, 0, EVT_DMA_RD);
    end
    wait_evt(c, 2, EVT_DMA_WR);
  endtask

  // pipelined program of cluster c (layer c): tile t uses L1 buffers in 0x4000 + t*0x800,
  // out 0x6000 + t*0x800; software event t tells the next cluster that tile t arrived
  task automatic pp_cluster(input int c);
    for (int t = 0; t < int'(PP_TILES); t++) begin
      int inb, outb;
      inb = 32'h4000 + t * 32'h800; outb = 32'h6000 + t * 32'h800;
      if (c == 0) begin
        dma_rd(c, inb, L2_PP_IN + t * PP_PIX * C, PP_PIX * C);
        wait_evt(c, 0, EVT_DMA_RD);
      end else
        wait_evt(c, 3, EVT_SW_BASE + t);
      ima_job(c, inb, outb, PP_PIX);
      wait_evt(c, 1, EVT_IMA);
      if (c == int'(NCL) - 1) begin
        dma_wr(c, outb, L2_PP_OUT + t * PP_PIX * C, PP_PIX * C, 0, 0);
        wait_evt(c, 2, EVT_DMA_WR);
      end else begin
        dma_wr(c, outb, inb, PP_PIX * C, 1, c + 1);
        wait_evt(c, 2, EVT_DMA_WR);
        cw(c, 12'h240, ((32'(1) << (c + 1)) << 16) | t);
      end
    end
  endtask

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    int t0, t1, t2;
    logic [31:0] d;
    cfg = '0; creq = '0; sleep = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // weights of all clusters, in parallel
    for (int c = 0; c < int'(NCL); c++) fork automatic int cc = c; program_weights(cc); join_none
    wait fork;
    // inputs into L2 through the host port
    for (int i = 0; i < int'(DP_PIX * C / 4); i++) begin
      d = $urandom;
      for (int b = 0; b < 4; b++) l2_in[4*i+b] = d[8*b +: 8];
      host_wr(L2_IN + 4 * i, d);
    end
    for (int i = 0; i < int'(PP_TILES * PP_PIX * C / 4); i++) begin
      d = $urandom;
      for (int b = 0; b < 4; b++) pp_in[4*i+b] = d[8*b +: 8];
      host_wr(L2_PP_IN + 4 * i, d);
    end
    // ---- 1. data parallelization ----
    t0 = $time / 10;
    for (int c = 0; c < int'(NCL); c++) fork automatic int cc = c; dp_cluster(cc); join_none
    wait fork;
    t1 = $time / 10;
    // ---- 2. inter-layer pipelining ----
    for (int c = 0; c < int'(NCL); c++) fork automatic int cc = c; pp_cluster(cc); join_none
    wait fork;
    t2 = $time / 10;
    // ---- check data-parallel results ----
    for (int c = 0; c < int'(NCL); c++)
      for (int n = 0; n < int'(DP_PIX); n++)
        for (int k = 0; k < int'(C / 4); k++) begin
          logic [31:0] e;
          for (int b = 0; b < 4; b++) begin
            int acc; acc = 0;
            for (int r = 0; r < int'(C); r++) acc += int'(l2_in[n * C + r]) * wv(w[c][r][4*k+b]);
            e[8*b +: 8] = adc(acc);
          end
          host_rd(L2_DP_OUT + c * DP_PIX * C + n * C + 4 * k, d);
          chk(d == e, $sformatf("data-parallel cl %0d pix %0d word %0d: %h vs %h", c, n, k, d, e));
        end
    // ---- check pipelined results: N_CL layers in sequence ----
    for (int n = 0; n < int'(PP_TILES * PP_PIX); n++) begin
      logic [7:0] v [C];
      logic [7:0] nv [C];
      for (int r = 0; r < int'(C); r++) v[r] = pp_in[n * C + r];
      for (int l = 0; l < int'(NCL); l++) begin
        for (int k = 0; k < int'(C); k++) begin
          int acc; acc = 0;
          for (int r = 0; r < int'(C); r++) acc += int'(v[r]) * wv(w[l][r][k]);
          nv[k] = adc(acc);
        end
        v = nv;
      end
      for (int k = 0; k < int'(C / 4); k++) begin
        host_rd(L2_PP_OUT + n * C + 4 * k, d);
        chk(d == {v[4*k+3], v[4*k+2], v[4*k+1], v[4*k]}, $sformatf("pipelined pix %0d word %0d", n, k));
      end
    end
    // ---- mechanisms ----
    $display("data parallel: %0d cycles for %0d clusters x %0d pixels (ideal %0d, efficiency %0d%%)",
             t1 - t0, NCL, DP_PIX, DP_PIX * 54, (DP_PIX * 54 * 100) / (t1 - t0));
    $display("pipelining   : %0d cycles for %0d tiles of %0d pixels through %0d layers", t2 - t1, PP_TILES, PP_PIX, NCL);
    $display("mechanisms: broadcast=%0d channel_wait=%0d l1_conflict=%0d dma_overlap=%0d remote_beats=%0d sw_events=%0d sleep=%0d barrier=%0d",
             n_bcast, n_wl_wait, n_l1_conf, n_dma_overlap, n_rx, n_sw, n_sleep, n_barrier);
    chk(n_bcast > 0, "broadcast happened");
    chk(n_wl_wait > 0, "channel contention happened");
    chk(n_l1_conf > 0, "L1 bank conflict happened");
    chk(n_dma_overlap > 0, "DMA channels overlapped");
    chk(n_rx == (NCL - 1) * PP_TILES * PP_PIX * C / 32, "cluster-to-cluster beats");
    chk(n_sw == (NCL - 1) * PP_TILES, "inter-cluster software events");
    chk(n_sleep > 0, "cores slept");
    chk(n_barrier == NCL, "one barrier per cluster");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
