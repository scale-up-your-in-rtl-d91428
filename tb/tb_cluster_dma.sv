// tb_cluster_dma: self-checking test of the cluster DMA. The testbench models
// L1 (two word ports, random grant refusals) and the wireless channel with L2
// behind it (grant after a random wait, read data one cycle after the grant,
// write acknowledge one cycle after the grant). Three read commands and two
// write commands are queued back to back, so both channels run at the same
// time and the queues hold several commands. Checked: the copied bytes in L1
// and L2, one done event per command, and the channel target fields.
module tb_cluster_dma;
  import aimc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [7:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0;
  tcdm_req_t [1:0] l1_req;
  tcdm_rsp_t [1:0] l1_rsp;
  wl_req_t wl_req;
  wl_rsp_t wl_rsp;
  logic [BEAT_BITS-1:0] wl_rdata;
  logic rd_done, wr_done, rd_busy, wr_busy;
  logic [7:0] l1 [16384];
  logic [7:0] l2 [16384];
  logic [7:0] l1_init [16384];
  logic [7:0] l2_init [16384];
  int checks = 0, failures = 0, n_rd_done = 0, n_wr_done = 0, n_remote = 0, overlap = 0;

  cluster_dma dut (.clk_i(clk), .rst_ni(rst_n), .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .l1_req_o(l1_req), .l1_rsp_i(l1_rsp), .wl_req_o(wl_req), .wl_rsp_i(wl_rsp), .wl_rdata_i(wl_rdata),
    .rd_done_o(rd_done), .wr_done_o(wr_done), .rd_busy_o(rd_busy), .wr_busy_o(wr_busy));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // L1 model
  logic [1:0] l1_ok;
  logic wl_ok;
  always_comb begin
    for (int p = 0; p < 2; p++) l1_rsp[p].gnt = l1_req[p].req && l1_ok[p];
    wl_rsp.gnt = wl_req.req && wl_ok;
  end
  always_ff @(posedge clk) begin
    l1_ok <= 2'($urandom);
    wl_ok <= ($urandom_range(0, 3) == 0);
    for (int p = 0; p < 2; p++) begin
      l1_rsp[p].rvalid <= l1_rsp[p].gnt;
      if (l1_rsp[p].gnt) begin
        if (l1_req[p].we) for (int b = 0; b < 4; b++) l1[14'(l1_req[p].addr + b)] <= l1_req[p].wdata[8*b +: 8];
        else l1_rsp[p].rdata <= {l1[14'(l1_req[p].addr+3)], l1[14'(l1_req[p].addr+2)], l1[14'(l1_req[p].addr+1)], l1[14'(l1_req[p].addr)]};
      end
    end
    wl_rsp.rvalid <= wl_rsp.gnt && !wl_req.we;
    wl_rsp.wack   <= wl_rsp.gnt && wl_req.we;
    if (wl_rsp.gnt) begin
      if (wl_req.we) begin
        if (wl_req.to_l1) n_remote <= n_remote + 1;
        for (int b = 0; b < 32; b++) l2[14'(wl_req.addr + b)] <= wl_req.wdata[8*b +: 8];
      end else
        for (int b = 0; b < 32; b++) wl_rdata[8*b +: 8] <= l2[14'(wl_req.addr + b)];
    end
    if (rd_done && rst_n) n_rd_done <= n_rd_done + 1;
    if (wr_done && rst_n) n_wr_done <= n_wr_done + 1;
    if (l1_rsp[0].gnt && l1_rsp[1].gnt) overlap <= overlap + 1;
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    for (int i = 0; i < 16384; i++) begin
      l1[i] = 8'($urandom); l2[i] = 8'($urandom); l1_init[i] = l1[i]; l2_init[i] = l2[i];
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // reads: L2 0x0000 (256 B) -> L1 0x1000; L2 0x0400 (64 B) -> L1 0x2000; L2 0x0800 (32 B) -> L1 0x2400
    wr(8'h00, 32'h1000); wr(8'h04, 32'h0000); wr(8'h08, 256); wr(8'h0C, 0);
    wr(8'h00, 32'h2000); wr(8'h04, 32'h0400); wr(8'h08, 64);  wr(8'h0C, 0);
    wr(8'h00, 32'h2400); wr(8'h04, 32'h0800); wr(8'h08, 32);  wr(8'h0C, 0);
    // writes: L1 0x3000 (128 B) -> L2 0x2000; L1 0x3400 (64 B) -> cluster 5 L1 0x3800 (modelled in same array)
    wr(8'h10, 32'h3000); wr(8'h14, 32'h2000); wr(8'h18, 128); wr(8'h1C, 0);
    wr(8'h10, 32'h3400); wr(8'h14, 32'h3800); wr(8'h18, 64);  wr(8'h1C, 32'h51);
    while (rd_busy || wr_busy) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++; if (n_rd_done != 3) begin failures++; $display("FAIL rd events %0d", n_rd_done); end
    checks++; if (n_wr_done != 2) begin failures++; $display("FAIL wr events %0d", n_wr_done); end
    checks++; if (n_remote != 2) begin failures++; $display("FAIL remote beats %0d", n_remote); end
    checks++; if (overlap == 0) begin failures++; $display("FAIL channels never overlapped"); end
    for (int i = 0; i < 256; i++) begin checks++; if (l1[32'h1000+i] !== l2_init[i]) failures++; end
    for (int i = 0; i < 64; i++)  begin checks++; if (l1[32'h2000+i] !== l2_init[32'h400+i]) failures++; end
    for (int i = 0; i < 32; i++)  begin checks++; if (l1[32'h2400+i] !== l2_init[32'h800+i]) failures++; end
    for (int i = 0; i < 128; i++) begin checks++; if (l2[32'h2000+i] !== l1_init[32'h3000+i]) failures++; end
    for (int i = 0; i < 64; i++)  begin checks++; if (l2[32'h3800+i] !== l1_init[32'h3400+i]) failures++; end
    // untouched neighbours
    checks++; if (l1[32'h1100] !== l1_init[32'h1100]) failures++;
    checks++; if (l2[32'h2080] !== l2_init[32'h2080]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
