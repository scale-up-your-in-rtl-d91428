// tb_ima_crossbar: self-checking test of the crossbar model at a reduced size
// (32 x 16). Random one's-complement weights and 8-bit inputs are applied,
// including a partial row count; the outputs are compared with a reference
// matrix-vector product computed here, and done must come exactly
// EVAL_CYCLES cycles after start.
module tb_ima_crossbar;
  localparam int unsigned ROWS = 32, COLS = 16, EV = 12, RPC = 4;
  logic clk = 0, rst_n = 0;
  logic wprog = 0, start = 0;
  logic [$clog2(ROWS)-1:0] wrow = '0;
  logic [$clog2(COLS/8)-1:0] wcolw = '0;
  logic [31:0] wdata = '0;
  logic [ROWS-1:0][7:0] x = '0;
  logic [$clog2(ROWS):0] nrows = '0;
  logic [4:0] shift = '0;
  logic busy, done;
  logic [COLS-1:0][7:0] out;
  logic [3:0] w [ROWS][COLS];
  int checks = 0, failures = 0;

  ima_crossbar #(.ROWS(ROWS), .COLS(COLS), .EVAL_CYCLES(EV), .ROWS_PER_CYC(RPC)) dut (
    .clk_i(clk), .rst_ni(rst_n), .wprog_i(wprog), .wrow_i(wrow), .wcolw_i(wcolw), .wdata_i(wdata),
    .start_i(start), .x_i(x), .n_rows_i(nrows), .adc_shift_i(shift), .busy_o(busy), .done_o(done), .out_o(out));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wv(input logic [3:0] q);
    return q[3] ? -int'(~q[2:0] & 3'h7) : int'(q[2:0]);
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < int'(ROWS); r++)
      for (int g = 0; g < int'(COLS / 8); g++) begin
        @(negedge clk);
        wprog = 1; wrow = r[4:0]; wcolw = g[0:0]; wdata = $urandom;
        for (int k = 0; k < 8; k++) w[r][8*g+k] = wdata[4*k +: 4];
      end
    @(negedge clk); wprog = 0;
    for (int t = 0; t < 6; t++) begin
      int cyc;
      for (int r = 0; r < int'(ROWS); r++) x[r] = 8'($urandom);
      nrows = (t == 2) ? 6'd20 : 6'(ROWS);
      shift = 5'(t);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != int'(EV)) begin failures++; $display("FAIL latency %0d, want %0d", cyc, EV); end
      for (int c = 0; c < int'(COLS); c++) begin
        int acc, v;
        logic [7:0] e;
        acc = 0;
        for (int r = 0; r < int'(nrows); r++) acc += int'(x[r]) * wv(w[r][c]);
        v = acc >>> shift;
        e = (v > 127) ? 8'h7F : (v < -128) ? 8'h80 : 8'(v);
        checks++;
        if (out[c] !== e) begin
          failures++;
          if (failures < 6) $display("FAIL t%0d col %0d: %h vs %h (acc %0d)", t, c, out[c], e, acc);
        end
      end
    end
    // weight 1111 is -0 and 1000 is -7
    checks++;
    if (wv(4'b1111) != 0 || wv(4'b1000) != -7) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
