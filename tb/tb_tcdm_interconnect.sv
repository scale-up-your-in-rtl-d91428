// tb_tcdm_interconnect: self-checking test of the L1 interconnect with real
// banks behind it. Phase 1: two masters keep hitting the same bank; exactly
// one is granted per cycle and the round-robin arbiter alternates. Phase 2:
// masters that hit different banks are all granted in one cycle. Phase 3:
// random traffic of every master to its own address range (spread over all
// banks), checked against a reference memory; read data must arrive one
// cycle after the grant.
module tb_tcdm_interconnect;
  import aimc_pkg::*;
  localparam int unsigned NM = 4, NB = 10, DEPTH = 128;
  localparam int unsigned RW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0;
  tcdm_req_t [NM-1:0] mreq;
  tcdm_rsp_t [NM-1:0] mrsp;
  logic [NB-1:0] b_req, b_we;
  logic [NB-1:0][3:0] b_be;
  logic [NB-1:0][RW-1:0] b_addr;
  logic [NB-1:0][31:0] b_wdata, b_rdata;
  int checks = 0, failures = 0;
  logic [31:0] ref_mem [NM][64];
  int unsigned first_winner, prev_w;

  tcdm_interconnect #(.N_MASTERS(NM), .N_BANKS(NB), .BANK_DEPTH(DEPTH)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(mreq), .mst_rsp_o(mrsp),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_be_o(b_be), .bank_addr_o(b_addr),
    .bank_wdata_o(b_wdata), .bank_rdata_i(b_rdata));
  for (genvar b = 0; b < int'(NB); b++) begin : g_b
    tcdm_bank #(.DEPTH(DEPTH)) u_b (.clk_i(clk), .req_i(b_req[b]), .we_i(b_we[b]), .be_i(b_be[b]),
      .addr_i(b_addr[b]), .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b]));
  end

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic master(input int mm);
    bit written [64];
    for (int i = 0; i < 64; i++) written[i] = 0;
    for (int n = 0; n < 300; n++) begin
      int w; bit we;
      w  = $urandom_range(0, 63);
      we = !written[w] || ($urandom_range(0, 1) == 1);
      @(negedge clk);
      mreq[mm].req = 1; mreq[mm].we = we; mreq[mm].be = 4'hF;
      mreq[mm].addr = 32'(4 * (mm * 64 + w)); mreq[mm].wdata = $urandom;
      #1;
      while (!mrsp[mm].gnt) begin @(negedge clk); #1; end
      @(negedge clk);
      mreq[mm].req = 0;
      if (we) begin
        ref_mem[mm][w] = mreq[mm].wdata; written[w] = 1;
      end else begin
        chk(mrsp[mm].rvalid, "rvalid one cycle after grant");
        chk(mrsp[mm].rdata == ref_mem[mm][w], $sformatf("read data m%0d w%0d", mm, w));
      end
    end
  endtask

  initial begin
    mreq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Phase 1
    @(negedge clk);
    mreq[0] = '{req: 1, we: 1, be: 4'hF, addr: 32'h0,  wdata: 32'h1111_0000};
    mreq[1] = '{req: 1, we: 1, be: 4'hF, addr: 32'd40, wdata: 32'h2222_0000};
    for (int n = 0; n < 6; n++) begin
      #1;
      chk($countones({mrsp[1].gnt, mrsp[0].gnt}) == 1, "one grant on a shared bank");
      first_winner = mrsp[0].gnt ? 0 : 1;
      if (n > 0) chk(first_winner != prev_w, "round-robin alternates");
      prev_w = first_winner;
      @(negedge clk);
    end
    mreq = '0;
    // Phase 2
    @(negedge clk);
    for (int m = 0; m < int'(NM); m++) mreq[m] = '{req: 1, we: 0, be: 4'hF, addr: 32'(4 * (m + 1)), wdata: 0};
    #1;
    chk(mrsp[0].gnt && mrsp[1].gnt && mrsp[2].gnt && mrsp[3].gnt, "parallel grants on distinct banks");
    @(negedge clk);
    mreq = '0;
    // Phase 3
    fork
      master(0);
      master(1);
      master(2);
      master(3);
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
