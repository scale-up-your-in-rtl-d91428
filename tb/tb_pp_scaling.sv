// tb_pp_scaling: inter-layer pipelining on the full-size system. A sequence
// of D identical-shape 1x1 convolution layers (256 in, 256 out channels) is
// mapped one layer per cluster, for pipeline depths D = 1, 2, 4, 8 and 16.
// NT tiles of TP pixels flow through the pipeline: cluster 0 reads each tile
// from L2, every cluster computes its layer on the IMA, sends the output tile
// straight into the next cluster's L1 over the wireless channel and then
// wakes that cluster with an inter-cluster software event (id = tile); the
// last cluster writes the tile to L2. Each tile has its own L1 buffers, so a
// stage can take the next tile while the following stage still works.
// Checked: every output pixel against a reference chain of D convolutions;
// the number of cluster-to-cluster beats; the steady-state tile interval of
// the deepest pipeline stays within twice that of a single stage (the
// throughput of a pipeline does not depend on its depth). Printed per depth:
// total cycles, steady-state cycles per tile and the computation efficiency
// of the steady state against 4 + 46 + 4 cycles per pixel per cluster.
module tb_pp_scaling;
  import aimc_pkg::*;
  localparam int unsigned NCL = 16, NC = 4, C = 256, SH = 8;
  localparam int unsigned TP = 2, NT = 6, NPIX = NT * TP;
  localparam int unsigned L2_IN = 32'h0000, L2_OUT = 32'h4000;

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
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  int unsigned n_rx = 0;
  always_ff @(posedge clk) if (rst_n)
    for (int c = 0; c < int'(NCL); c++) if (dut.wl_rx[c].valid) n_rx <= n_rx + 1;

  logic [3:0] w [NCL][C][C];
  logic [7:0] l2_in [NPIX * C];

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

  int unsigned fin [NT];

  // stage c of a pipeline of depth dep
  task automatic pp_cluster(input int c, input int dep);
    for (int t = 0; t < int'(NT); t++) begin
      int inb, outb;
      inb = 32'h4000 + t * 32'h400; outb = 32'h6000 + t * 32'h400;
      if (c == 0) begin
        dma_rd(c, inb, L2_IN + t * TP * C, TP * C);
        wait_evt(c, 0, EVT_DMA_RD);
      end else
        wait_evt(c, 3, EVT_SW_BASE + t);
      ima_job(c, inb, outb, TP);
      wait_evt(c, 1, EVT_IMA);
      if (c == dep - 1) begin
        dma_wr(c, outb, L2_OUT + t * TP * C, TP * C, 0, 0);
        wait_evt(c, 2, EVT_DMA_WR);
        fin[t] = $time / 10;
      end else begin
        dma_wr(c, outb, inb, TP * C, 1, c + 1);
        wait_evt(c, 2, EVT_DMA_WR);
        cw(c, 12'h240, ((32'(1) << (c + 1)) << 16) | t);
      end
    end
  endtask

  int unsigned intv [5];
  initial begin
    logic [31:0] d;
    int t0, rx0, total;
    cfg = '0; creq = '0; sleep = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < int'(NCL); c++) fork automatic int cc = c; program_weights(cc); join_none
    wait fork;
    for (int i = 0; i < int'(NPIX * C / 4); i++) begin
      d = $urandom;
      for (int b = 0; b < 4; b++) l2_in[4*i+b] = d[8*b +: 8];
      host_wr(L2_IN + 4 * i, d);
    end
    for (int s = 0; s < 5; s++) begin
      int dep;
      dep = 1 << s;
      rx0 = n_rx;
      @(negedge clk); t0 = $time / 10;
      for (int c = 0; c < dep; c++) fork automatic int cc = c; pp_cluster(cc, dep); join_none
      wait fork;
      total = $time / 10 - t0;
      intv[s] = (fin[NT-1] - fin[0]) / (NT - 1);
      chk(n_rx - rx0 == (dep - 1) * NPIX * C / 32, $sformatf("depth %0d: cluster-to-cluster beats", dep));
      for (int p = 0; p < int'(NPIX); p++) begin
        logic [7:0] v [C];
        logic [7:0] nv [C];
        for (int r = 0; r < int'(C); r++) v[r] = l2_in[p * C + r];
        for (int l = 0; l < dep; l++) begin
          for (int k = 0; k < int'(C); k++) begin
            int acc; acc = 0;
            for (int r = 0; r < int'(C); r++) acc += int'(v[r]) * wv(w[l][r][k]);
            nv[k] = adc(acc);
          end
          v = nv;
        end
        for (int k = 0; k < int'(C / 4); k++) begin
          host_rd(L2_OUT + p * C + 4 * k, d);
          chk(d == {v[4*k+3], v[4*k+2], v[4*k+1], v[4*k]}, $sformatf("depth %0d pix %0d word %0d", dep, p, k));
        end
      end
      $display("depth %2d: %5d cycles, %4d cycles per tile in steady state, efficiency %0d%%",
               dep, total, intv[s], (TP * 54 * 100) / intv[s]);
    end
    chk(intv[4] <= 2 * intv[0], "pipeline throughput independent of depth");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
