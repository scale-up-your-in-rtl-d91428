// tb_wireless_rx: self-checking test of a cluster's wireless receive port.
// Beats are delivered one after the other; the L1 model refuses grants at
// random. Checked: the eight words of each beat land at the right L1
// addresses, done pulses once per beat, and the port takes 8 granted cycles.
module tb_wireless_rx;
  import aimc_pkg::*;
  logic clk = 0, rst_n = 0;
  wl_rx_t rx;
  tcdm_req_t req;
  tcdm_rsp_t rsp;
  logic done;
  logic [31:0] l1 [1024];
  logic ok;
  int checks = 0, failures = 0, ndone = 0, ngnt = 0;

  wireless_rx dut (.clk_i(clk), .rst_ni(rst_n), .rx_i(rx), .l1_req_o(req), .l1_rsp_i(rsp), .done_o(done));

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  assign rsp.gnt = req.req && ok;
  assign rsp.rdata = '0;
  always_ff @(posedge clk) begin
    ok <= $urandom_range(0, 2) != 0;
    rsp.rvalid <= rsp.gnt;
    if (rsp.gnt && req.we) l1[req.addr[11:2]] <= req.wdata;
    if (rsp.gnt) ngnt <= ngnt + 1;
    if (done && rst_n) ndone <= ndone + 1;
  end

  logic [BEAT_BITS-1:0] beats [4];
  initial begin
    rx = '0;
    for (int i = 0; i < 1024; i++) l1[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 4; b++) begin
      beats[b] = {8{$urandom}} ^ {256{1'b1}} >> b;
      @(negedge clk);
      rx = '{valid: 1, addr: 32'(32 * b + 64), data: beats[b]};
      @(negedge clk);
      rx = '0;
      while (!done) @(negedge clk);
    end
    @(negedge clk);
    checks++; if (ndone != 4) begin failures++; $display("FAIL done count %0d", ndone); end
    checks++; if (ngnt != 32) begin failures++; $display("FAIL grants %0d", ngnt); end
    for (int b = 0; b < 4; b++)
      for (int w = 0; w < 8; w++) begin
        checks++;
        if (l1[8 * b + 16 + w] !== beats[b][32*w +: 32]) failures++;
      end
    checks++; if (l1[15] !== 0 || l1[48] !== 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
