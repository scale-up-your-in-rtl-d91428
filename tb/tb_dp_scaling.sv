// tb_dp_scaling: data-parallel scaling of the full-size system. One 1x1
// convolution with 256 input channels and 256 * N output channels is spread
// over N clusters (N = 1, 2, 4, 8, 16), each cluster holding a different
// 256 x 256 slice of the weights. Every active cluster runs the in-cluster
// pipeline on NPIX input pixels in double-buffered tiles of TP pixels: the
// DMA reads tile t+1 from L2 and writes the outputs of tile t-1 back to L2
// while the IMA computes tile t. All clusters ask for the same input beats,
// which the wireless channel serves by broadcast.
// Checked: every output of every active cluster against a reference
// convolution computed here; broadcast slots occur whenever more than one
// cluster runs; adding clusters never lowers the total throughput. Printed
// per N: cycles, computation efficiency against the ideal of 4 + 46 + 4
// cycles per pixel per cluster, speed-up over one cluster, and the
// number of broadcast slots. The system runs with every parameter at its
// default.
module tb_dp_scaling;
  import aimc_pkg::*;
  localparam int unsigned NCL = 16, NC = 4, C = 256, SH = 8;
  localparam int unsigned NPIX = 8, TP = 2, NT = NPIX / TP;
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

  int unsigned n_bcast = 0;
  always_ff @(posedge clk) if (rst_n && bcast) n_bcast <= n_bcast + 1;

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

  // data-parallel program of cluster c: double-buffered tiles of TP pixels
  task automatic dp_cluster(input int c);
    dma_rd(c, 32'h0000, L2_IN, TP * C);
    wait_evt(c, 0, EVT_DMA_RD);
    for (int t = 0; t < int'(NT); t++) begin
      int b; b = t % 2;
      if (t + 1 < int'(NT)) dma_rd(c, (1 - b) * TP * C, L2_IN + (t + 1) * TP * C, TP * C);
      ima_job(c, b * TP * C, 32'h2000 + b * TP * C, TP);
      wait_evt(c, 1, EVT_IMA);
      if (t > 0) wait_evt(c, 2, EVT_DMA_WR);
      dma_wr(c, 32'h2000 + b * TP * C, L2_OUT + c * NPIX * C + t * TP * C, TP * C, 0, 0);
      if (t + 1 < int'(NT)) wait_evt(c, 0, EVT_DMA_RD);
    end
    wait_evt(c, 2, EVT_DMA_WR);
  endtask

  int unsigned cyc [5];
  int unsigned bc [5];
  initial begin
    logic [31:0] d;
    int t0;
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
      int n, b0;
      n = 1 << s;
      b0 = n_bcast;
      @(negedge clk); t0 = $time / 10;
      for (int c = 0; c < n; c++) fork automatic int cc = c; dp_cluster(cc); join_none
      wait fork;
      cyc[s] = $time / 10 - t0;
      bc[s] = n_bcast - b0;
      for (int c = 0; c < n; c++)
        for (int p = 0; p < int'(NPIX); p++)
          for (int k = 0; k < int'(C / 4); k++) begin
            logic [31:0] e;
            for (int b = 0; b < 4; b++) begin
              int acc; acc = 0;
              for (int r = 0; r < int'(C); r++) acc += int'(l2_in[p * C + r]) * wv(w[c][r][4*k+b]);
              e[8*b +: 8] = adc(acc);
            end
            host_rd(L2_OUT + c * NPIX * C + p * C + 4 * k, d);
            chk(d == e, $sformatf("N=%0d cl %0d pix %0d word %0d: %h vs %h", n, c, p, k, d, e));
          end
      $display("N_cl=%2d: %5d cycles, efficiency %0d%%, speed-up %0d.%02d, broadcast slots %0d",
               n, cyc[s], (NPIX * 54 * 100) / cyc[s], (n * cyc[0]) / cyc[s], ((n * cyc[0] * 100) / cyc[s]) % 100, bc[s]);
      if (s > 0) begin
        chk(bc[s] > 0, $sformatf("broadcast used with %0d clusters", n));
        chk(n * cyc[0] >= cyc[s], $sformatf("%0d clusters at least as fast in total as one", n));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
