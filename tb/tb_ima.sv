// tb_ima: self-checking test of the IMA digital subsystem at full size
// (256 x 256 crossbar, 16 ports). The testbench models L1 as an ideal memory
// (grant at once, data one cycle later) for the first job, so that the phase
// lengths can be checked against the paper's rates: stream-in of 256 bytes in
// 256 / (16 * 4) = 4 cycles (+1 for the last data), eval in 46 cycles (+1 for
// the start pulse), stream-out in 4 cycles. A second job of 3 vectors with
// C_IN = 200, C_OUT = 100 runs with random grant refusals (L1 conflicts).
// All output bytes are compared with a reference computed here.
module tb_ima;
  import aimc_pkg::*;
  localparam int unsigned R = 256, C = 256, NP = 16, EV = 46;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [7:0] cfg_addr = '0;
  logic [31:0] cfg_wdata = '0;
  tcdm_req_t [NP-1:0] req;
  tcdm_rsp_t [NP-1:0] rsp;
  logic busy, done;
  logic [1:0] phase;
  logic [7:0] mem [65536];
  logic [3:0] w [R][C];
  bit random_gnt = 0;
  int checks = 0, failures = 0;
  int ph_cnt [4];

  ima dut (.clk_i(clk), .rst_ni(rst_n), .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .l1_req_o(req), .l1_rsp_i(rsp), .busy_o(busy), .done_o(done), .phase_o(phase));

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // L1 model
  logic [NP-1:0] gnt_mask;
  always_comb
    for (int p = 0; p < int'(NP); p++) begin
      rsp[p].gnt = req[p].req && gnt_mask[p];
    end
  always_ff @(posedge clk) begin
    gnt_mask <= random_gnt ? NP'($urandom) : '1;
    for (int p = 0; p < int'(NP); p++) begin
      rsp[p].rvalid <= rsp[p].gnt;
      if (rsp[p].gnt) begin
        if (req[p].we) begin
          for (int b = 0; b < 4; b++) if (req[p].be[b]) mem[16'(req[p].addr + b)] <= req[p].wdata[8*b +: 8];
        end else
          rsp[p].rdata <= {mem[16'(req[p].addr+3)], mem[16'(req[p].addr+2)], mem[16'(req[p].addr+1)], mem[16'(req[p].addr)]};
      end
    end
    ph_cnt[phase] <= ph_cnt[phase] + 1;
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic int wv(input logic [3:0] q);
    return q[3] ? -int'(~q[2:0] & 3'h7) : int'(q[2:0]);
  endfunction

  task automatic run_job(input int src, input int dst, input int cin, input int cout, input int npix,
                         input int sstr, input int dstr, input int sh);
    wr(8'h00, src); wr(8'h04, dst); wr(8'h08, cin); wr(8'h0C, cout); wr(8'h10, npix);
    wr(8'h14, sstr); wr(8'h18, dstr); wr(8'h1C, sh);
    for (int i = 0; i < 4; i++) ph_cnt[i] = 0;
    wr(8'h20, 0);
    while (!done) @(negedge clk);
    @(negedge clk);
    for (int n = 0; n < npix; n++)
      for (int c = 0; c < cout; c++) begin
        int acc, v; logic [7:0] e;
        acc = 0;
        for (int r = 0; r < cin; r++) acc += int'(mem[src + n*sstr + r]) * wv(w[r][c]);
        v = acc >>> sh;
        e = (v > 127) ? 8'h7F : (v < -128) ? 8'h80 : 8'(v);
        checks++;
        if (mem[dst + n*dstr + c] !== e) begin
          failures++;
          if (failures < 6) $display("FAIL pix %0d col %0d: %h vs %h", n, c, mem[dst + n*dstr + c], e);
        end
      end
  endtask

  initial begin
    for (int i = 0; i < 65536; i++) mem[i] = 8'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // program all weights
    wr(8'h24, 0);
    for (int r = 0; r < int'(R); r++)
      for (int g = 0; g < int'(C / 8); g++) begin
        logic [31:0] d;
        d = $urandom;
        for (int k = 0; k < 8; k++) w[r][8*g+k] = d[4*k +: 4];
        @(negedge clk); cfg_we = 1; cfg_addr = 8'h28; cfg_wdata = d;
      end
    @(negedge clk); cfg_we = 0;
    // job 1: one full-size vector, ideal memory
    run_job(32'h100, 32'h4000, 256, 256, 1, 0, 0, 8);
    checks++;
    if (ph_cnt[1] != 5 || ph_cnt[2] != EV + 1 || ph_cnt[3] != 4) begin
      failures++;
      $display("FAIL phase cycles: stream-in %0d eval %0d stream-out %0d", ph_cnt[1], ph_cnt[2], ph_cnt[3]);
    end
    // job 2: partial sizes, 3 vectors, random L1 conflicts
    random_gnt = 1;
    run_job(32'h800, 32'h6000, 200, 100, 3, 300, 128, 7);
    checks++;
    if (ph_cnt[1] <= 3 * 4) begin failures++; $display("FAIL: conflicts did not stretch stream-in"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
