// tb_l2_mem: self-checking test of the L2 scratchpad at full size.
// Beats written through the channel port are read back through the channel
// port (one cycle latency) and word by word through the host port; host
// writes are read back through the channel port; the host port is refused in
// every cycle the channel port uses.
module tb_l2_mem;
  import aimc_pkg::*;
  localparam int unsigned SZ = 512 * 1024;
  logic clk = 0, rst_n = 0;
  logic ch_req = 0, ch_we = 0;
  logic [31:0] ch_addr = '0;
  logic [BEAT_BITS-1:0] ch_wdata = '0, ch_rdata;
  logic h_req = 0, h_we = 0, h_gnt, h_rv;
  logic [31:0] h_addr = '0, h_wdata = '0, h_rdata;
  logic [BEAT_BITS-1:0] ref_m [SZ/32];
  int checks = 0, failures = 0;

  l2_mem dut (.clk_i(clk), .rst_ni(rst_n), .ch_req_i(ch_req), .ch_we_i(ch_we),
    .ch_addr_i(ch_addr), .ch_wdata_i(ch_wdata), .ch_rdata_o(ch_rdata), .host_req_i(h_req), .host_we_i(h_we),
    .host_addr_i(h_addr), .host_wdata_i(h_wdata), .host_gnt_o(h_gnt), .host_rvalid_o(h_rv), .host_rdata_o(h_rdata));

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < int'(SZ / 32); i++) begin
      @(negedge clk);
      ch_req = 1; ch_we = 1; ch_addr = 32'(32 * i);
      for (int k = 0; k < 8; k++) ch_wdata[32*k +: 32] = $urandom;
      ref_m[i] = ch_wdata;
    end
    @(negedge clk); ch_req = 0; ch_we = 0;
    for (int n = 0; n < 100; n++) begin
      int i; i = $urandom_range(0, SZ / 32 - 1);
      @(negedge clk); ch_req = 1; ch_addr = 32'(32 * i);
      // host request in the same cycle must be refused
      h_req = 1; h_we = 0; h_addr = 32'(4 * $urandom_range(0, SZ / 4 - 1));
      #1; checks++; if (h_gnt) failures++;
      @(negedge clk); ch_req = 0; h_req = 0;
      checks++; if (ch_rdata !== ref_m[i]) failures++;
    end
    for (int n = 0; n < 200; n++) begin
      int w; w = $urandom_range(0, SZ / 4 - 1);
      @(negedge clk); h_req = 1; h_addr = 32'(4 * w);
      h_we = $urandom_range(0, 1) == 1; h_wdata = $urandom;
      #1; checks++; if (!h_gnt) failures++;
      if (h_we) begin
        ref_m[w / 8][32*(w % 8) +: 32] = h_wdata;
        @(negedge clk); h_req = 0;
      end else begin
        @(negedge clk); h_req = 0;
        checks++; if (!h_rv || h_rdata !== ref_m[w / 8][32*(w % 8) +: 32]) failures++;
      end
    end
    for (int i = 0; i < int'(SZ / 32); i++) begin
      @(negedge clk); ch_req = 1; ch_we = 0; ch_addr = 32'(32 * i);
      @(negedge clk); ch_req = 0;
      checks++; if (ch_rdata !== ref_m[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
