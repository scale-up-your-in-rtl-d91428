// tb_tcdm_bank: self-checking test of one L1 bank. Random byte-masked writes
// and reads are compared with a reference array kept by the testbench; read
// data must appear exactly one cycle after the request.
module tb_tcdm_bank;
  localparam int unsigned DEPTH = 1639;
  logic clk = 0, req = 0, we = 0;
  logic [3:0] be = '0;
  logic [$clog2(DEPTH)-1:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  tcdm_bank dut (.clk_i(clk), .req_i(req), .we_i(we), .be_i(be),
    .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < int'(DEPTH); i++) ref_mem[i] = '0;
    // full writes of every word
    for (int i = 0; i < int'(DEPTH); i++) begin
      @(negedge clk); req = 1; we = 1; be = 4'hF; addr = 11'(i); wdata = $urandom;
      ref_mem[i] = wdata;
    end
    // random mixed traffic
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      req = 1; we = $urandom_range(0, 1) == 1; be = 4'($urandom); addr = 11'($urandom_range(0, DEPTH - 1)); wdata = $urandom;
      if (we) begin
        for (int b = 0; b < 4; b++) if (be[b]) ref_mem[addr][8*b +: 8] = wdata[8*b +: 8];
      end else begin
        logic [31:0] exp;
        exp = ref_mem[addr];
        @(negedge clk); req = 0;
        checks++;
        if (rdata !== exp) begin
          failures++;
          if (failures < 5) $display("mismatch addr %0d: %h vs %h", addr, rdata, exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
