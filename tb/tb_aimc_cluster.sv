// tb_aimc_cluster: end-to-end test of one cluster at full size (256 x 256
// crossbar, 16 IMA ports, 10 L1 banks, 64 KiB L1, 4 core ports). The
// testbench plays the cores and a wireless channel with L2 behind it. It runs
// the in-cluster pipeline on a 1x1 convolution of 4 pixels in two tiles,
// double-buffered: DMA reads tile 1 while the IMA computes tile 0, and the
// DMA writes tile 0 back while the IMA computes tile 1. Cores sleep on the
// event unit between steps (core 0: DMA reads, core 1: IMA, core 2: DMA
// writes). It also delivers one beat through the wireless receive port and
// reads L1 back through a core port. Results in L2 are compared with a
// reference convolution.
module tb_aimc_cluster;
  import aimc_pkg::*;
  localparam int unsigned NC = 4, C = 256, NPIX = 4, SH = 8;
  logic clk = 0, rst_n = 0;
  cfg_req_t cfg;
  tcdm_req_t [NC-1:0] creq;
  tcdm_rsp_t [NC-1:0] crsp;
  logic [NC-1:0] sleep, cevt, cclk;
  logic [NC-1:0][EVT_W-1:0] cbuf;
  wl_req_t wl_req;
  wl_rsp_t wl_rsp;
  logic [BEAT_BITS-1:0] wl_rdata;
  wl_rx_t wl_rx;
  logic rx_done;
  sw_evt_t sw_out;
  logic [1:0] phase;
  logic [7:0] l2 [32768];
  logic [3:0] w [C][C];
  int checks = 0, failures = 0;

  aimc_cluster dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .core_l1_req_i(creq), .core_l1_rsp_o(crsp),
    .core_sleep_i(sleep), .core_evt_o(cevt), .core_clk_en_o(cclk), .core_buf_o(cbuf),
    .wl_req_o(wl_req), .wl_rsp_i(wl_rsp), .wl_rdata_i(wl_rdata), .wl_rx_i(wl_rx), .wl_rx_done_o(rx_done),
    .sw_evt_o(sw_out), .sw_evt_i('0), .ima_phase_o(phase));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // channel + L2 model
  logic wl_ok;
  assign wl_rsp.gnt = wl_req.req && wl_ok;
  always_ff @(posedge clk) begin
    wl_ok <= $urandom_range(0, 1) == 1;
    wl_rsp.rvalid <= wl_rsp.gnt && !wl_req.we;
    wl_rsp.wack   <= wl_rsp.gnt && wl_req.we;
    if (wl_rsp.gnt) begin
      if (wl_req.we) for (int b = 0; b < 32; b++) l2[15'(wl_req.addr + b)] <= wl_req.wdata[8*b +: 8];
      else           for (int b = 0; b < 32; b++) wl_rdata[8*b +: 8] <= l2[15'(wl_req.addr + b)];
    end
  end

  task automatic cw(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); cfg = '{valid: 1, addr: a, wdata: d};
    @(negedge clk); cfg = '0;
  endtask
  task automatic wait_evt(input int core, input int e);
    cw(12'h200 + 12'(4 * core), 32'(1) << e);
    sleep[core] = 1;
    @(negedge clk);
    while (!cclk[core]) @(negedge clk);
    sleep[core] = 0;
    cw(12'h220 + 12'(4 * core), 32'(1) << e);
  endtask
  task automatic dma_rd(input int l1a, input int l2a, input int len);
    cw(12'h000, l1a); cw(12'h004, l2a); cw(12'h008, len); cw(12'h00C, 0);
  endtask
  task automatic dma_wr(input int l1a, input int l2a, input int len);
    cw(12'h010, l1a); cw(12'h014, l2a); cw(12'h018, len); cw(12'h01C, 0);
  endtask
  task automatic ima_job(input int src, input int dst, input int npix);
    cw(12'h100, src); cw(12'h104, dst); cw(12'h108, C); cw(12'h10C, C); cw(12'h110, npix);
    cw(12'h114, C); cw(12'h118, C); cw(12'h11C, SH); cw(12'h120, 0);
  endtask
  function automatic int wv(input logic [3:0] q);
    return q[3] ? -int'(~q[2:0] & 3'h7) : int'(q[2:0]);
  endfunction
  task automatic core_read(input int a, output logic [31:0] d);
    @(negedge clk); creq[3] = '{req: 1, we: 0, be: 4'hF, addr: a, wdata: 0};
    #1; while (!crsp[3].gnt) begin @(negedge clk); #1; end
    @(negedge clk); creq[3] = '0; d = crsp[3].rdata;
  endtask

  int unsigned sleep_cycles = 0;
  always_ff @(posedge clk) if (rst_n && !cclk[1]) sleep_cycles <= sleep_cycles + 1;

  initial begin
    logic [BEAT_BITS-1:0] beat;
    logic [31:0] d;
    cfg = '0; creq = '0; sleep = '0; wl_rx = '0;
    for (int i = 0; i < 32768; i++) l2[i] = 8'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // weights
    cw(12'h124, 0);
    for (int r = 0; r < int'(C); r++)
      for (int g = 0; g < int'(C / 8); g++) begin
        logic [31:0] x;
        x = $urandom;
        for (int k = 0; k < 8; k++) w[r][8*g+k] = x[4*k +: 4];
        @(negedge clk); cfg = '{valid: 1, addr: 12'h128, wdata: x};
      end
    @(negedge clk); cfg = '0;
    // in-cluster pipeline: L2 input at 0x0000, output at 0x4000
    // L1: inA 0x0000, inB 0x0200, outA 0x0400, outB 0x0600
    dma_rd(32'h0000, 32'h0000, 2 * C);
    wait_evt(0, EVT_DMA_RD);
    dma_rd(32'h0200, 32'h0200, 2 * C);
    ima_job(32'h0000, 32'h0400, 2);
    wait_evt(1, EVT_IMA);
    wait_evt(0, EVT_DMA_RD);
    dma_wr(32'h0400, 32'h4000, 2 * C);
    ima_job(32'h0200, 32'h0600, 2);
    wait_evt(1, EVT_IMA);
    wait_evt(2, EVT_DMA_WR);
    dma_wr(32'h0600, 32'h4200, 2 * C);
    wait_evt(2, EVT_DMA_WR);
    for (int n = 0; n < int'(NPIX); n++)
      for (int c = 0; c < int'(C); c++) begin
        int acc, v; logic [7:0] e;
        acc = 0;
        for (int r = 0; r < int'(C); r++) acc += int'(l2[n * C + r]) * wv(w[r][c]);
        v = acc >>> SH;
        e = (v > 127) ? 8'h7F : (v < -128) ? 8'h80 : 8'(v);
        checks++;
        if (l2[32'h4000 + n * C + c] !== e) begin
          failures++;
          if (failures < 6) $display("FAIL pix %0d col %0d: %h vs %h", n, c, l2[32'h4000 + n*C + c], e);
        end
      end
    checks++; if (sleep_cycles == 0) begin failures++; $display("FAIL core never slept"); end
    // wireless receive port -> L1, read back through a core port
    beat = {8{$urandom}};
    @(negedge clk); wl_rx = '{valid: 1, addr: 32'h8000, data: beat};
    @(negedge clk); wl_rx = '0;
    while (!rx_done) @(negedge clk);
    for (int k = 0; k < 8; k++) begin
      core_read(32'h8000 + 4 * k, d);
      checks++; if (d !== beat[32*k +: 32]) begin failures++; $display("FAIL rx word %0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
