// tb_wireless_channel: self-checking test of the wireless channel model with
// four clusters and a real L2 behind it. Checked: (1) three clusters reading
// the same L2 beat are all served in one slot (broadcast), with the data one
// cycle after the grant; (2) reads of different beats are served one per
// cycle, round-robin; (3) an L2 write is acknowledged one cycle after its
// grant and can be read back; (4) a cluster-to-cluster write appears at the
// target's receive port one cycle after the grant, a second write to the same
// target waits until the first is reported done, and the sender is
// acknowledged only after rx_done.
module tb_wireless_channel;
  import aimc_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  wl_req_t [N-1:0] req;
  wl_rsp_t [N-1:0] rsp;
  logic [BEAT_BITS-1:0] rdata;
  wl_rx_t [N-1:0] rx;
  logic [N-1:0] rx_done = '0;
  logic l2_req, l2_we, bcast;
  logic [31:0] l2_addr;
  logic [BEAT_BITS-1:0] l2_wdata, l2_rdata;
  logic h_gnt, h_rv;
  logic [31:0] h_rd;
  int checks = 0, failures = 0;

  wireless_channel #(.N_CL(N)) dut (.clk_i(clk), .rst_ni(rst_n), .cl_req_i(req), .cl_rsp_o(rsp), .rdata_o(rdata),
    .rx_o(rx), .rx_done_i(rx_done), .l2_req_o(l2_req), .l2_we_o(l2_we), .l2_addr_o(l2_addr),
    .l2_wdata_o(l2_wdata), .l2_rdata_i(l2_rdata), .bcast_o(bcast));
  l2_mem #(.SIZE_BYTES(16384)) u_l2 (.clk_i(clk), .rst_ni(rst_n), .ch_req_i(l2_req), .ch_we_i(l2_we),
    .ch_addr_i(l2_addr), .ch_wdata_i(l2_wdata), .ch_rdata_o(l2_rdata), .host_req_i(1'b0), .host_we_i(1'b0),
    .host_addr_i('0), .host_wdata_i('0), .host_gnt_o(h_gnt), .host_rvalid_o(h_rv), .host_rdata_o(h_rd));

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic wl_req_t rd(input logic [31:0] a);
    rd = '0; rd.req = 1; rd.addr = a;
  endfunction
  function automatic wl_req_t wrq(input logic [31:0] a, input logic [BEAT_BITS-1:0] d,
                                  input logic l1, input logic [3:0] t);
    wrq = '0; wrq.req = 1; wrq.we = 1; wrq.addr = a; wrq.wdata = d; wrq.to_l1 = l1; wrq.tgt_cl = t;
  endfunction

  logic [BEAT_BITS-1:0] d0, d1;
  logic [N-1:0] seen;

  initial begin
    d0 = {8{$urandom}}; d1 = {8{$urandom}};
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // write two beats into L2
    @(negedge clk); req[0] = wrq(32'h40, d0, 0, 0);
    #1 chk(rsp[0].gnt, "L2 write granted");
    @(negedge clk); req[0] = '0;
    chk(rsp[0].wack, "L2 write acknowledged next cycle");
    req[1] = wrq(32'h60, d1, 0, 0);
    @(negedge clk); req[1] = '0;
    @(negedge clk);
    // (1) broadcast
    req[0] = rd(32'h40); req[2] = rd(32'h40); req[3] = rd(32'h40); req[1] = rd(32'h60);
    #1;
    chk(($countones({rsp[3].gnt, rsp[2].gnt, rsp[0].gnt}) == 3 && !rsp[1].gnt) ||
        (rsp[1].gnt && !rsp[0].gnt && !rsp[2].gnt && !rsp[3].gnt), "broadcast grants or single grant");
    seen = '0;
    for (int n = 0; n < 3; n++) begin
      logic [N-1:0] g;
      #1;
      for (int c = 0; c < int'(N); c++) g[c] = rsp[c].gnt;
      @(negedge clk);
      for (int c = 0; c < int'(N); c++) if (g[c]) begin
        req[c] = '0;
        chk(rsp[c].rvalid, "rvalid one cycle after grant");
        chk(rdata == (c == 1 ? d1 : d0), "broadcast read data");
        seen[c] = 1;
      end
      if (g == 4'b1101) chk(bcast, "bcast pulse");
      if (seen == '1) break;
    end
    chk(seen == '1, "all reads served in two slots");
    // (2) round robin over distinct reads
    @(negedge clk);
    for (int c = 0; c < int'(N); c++) req[c] = rd(32'(c * 32));
    seen = '0;
    for (int n = 0; n < 4; n++) begin
      #1;
      chk($countones({rsp[3].gnt, rsp[2].gnt, rsp[1].gnt, rsp[0].gnt}) == 1, "one read per slot");
      for (int c = 0; c < int'(N); c++) if (rsp[c].gnt) begin seen[c] = 1; end
      @(negedge clk);
      for (int c = 0; c < int'(N); c++) if (seen[c]) req[c] = '0;
    end
    chk(seen == '1, "every cluster served within four slots");
    @(negedge clk);
    // (4) cluster 1 writes twice into cluster 2, cluster 3 once into cluster 2
    req[1] = wrq(32'h100, d0, 1, 2);
    #1 chk(rsp[1].gnt, "remote write granted");
    @(negedge clk);
    req[1] = '0;
    chk(rx[2].valid && rx[2].addr == 32'h100 && rx[2].data == d0, "beat at receiver one cycle later");
    req[3] = wrq(32'h120, d1, 1, 2);
    #1 chk(!rsp[3].gnt, "second write to a busy receiver waits");
    repeat (3) @(negedge clk);
    chk(!rsp[1].wack && !rsp[3].gnt, "no ack before rx_done");
    rx_done[2] = 1; @(negedge clk); rx_done[2] = 0;
    chk(rsp[1].wack, "sender acknowledged after rx_done");
    #1 chk(rsp[3].gnt, "waiting write now granted");
    @(negedge clk); req[3] = '0;
    chk(rx[2].valid && rx[2].data == d1, "second beat delivered");
    rx_done[2] = 1; @(negedge clk); rx_done[2] = 0;
    chk(rsp[3].wack, "second sender acknowledged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
