// ima_crossbar: behavioural model of the analog part of the In-Memory
// Accelerator - a ROWS x COLS phase-change-memory crossbar with a DAC on every
// wordline and an ADC on every bitline. It is not synthesizable intent: the
// real part is an analog array; this model gives its digital behaviour and
// its timing so that the digital IMA around it can be built and tested.
//
// Function: out[c] = ADC( sum_{r < n_rows} x[r] * w[r][c] ) for every column.
//   x[r]    8-bit unsigned input activation (DAC input)
//   w[r][c] 4-bit one's-complement weight: bit 3 is the sign, a negative value
//           is the bit-inverse of its magnitude (1000 = -7, 1111 = -0)
//   ADC     arithmetic shift right by adc_shift, then saturate to signed 8 bit
// Weights are programmed one 32-bit word (8 weights of a row) at a time.
//
// Timing: start_i (one cycle, inputs valid) begins an evaluation; done_o
// pulses EVAL_CYCLES cycles later (start in cycle t, done in cycle
// t + EVAL_CYCLES) with out_o valid and held until the next start. The paper gives 130 ns of analog evaluation; at 350 MHz this is
// 46 cycles. Internally the model accumulates ROWS_PER_CYC rows per cycle,
// which must finish in time (ROWS / ROWS_PER_CYC <= EVAL_CYCLES - 2).
// Unsigned inputs, the ADC scaling rule and the programming port are this
// design's choices; the paper says only "8-bit input and output data" and
// "one's complement 4-bit matrix parameters".
module ima_crossbar #(
  parameter int unsigned ROWS         = 256,
  parameter int unsigned COLS         = 256,
  parameter int unsigned EVAL_CYCLES  = 46,
  parameter int unsigned ROWS_PER_CYC = 8
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  // weight programming
  input  logic                         wprog_i,
  input  logic [$clog2(ROWS)-1:0]      wrow_i,
  input  logic [$clog2(COLS/8)-1:0]    wcolw_i,  // group of 8 columns
  input  logic [31:0]                  wdata_i,  // weight of column 8*wcolw+k in bits 4k+3..4k
  // evaluation
  input  logic                         start_i,
  input  logic [ROWS-1:0][7:0]         x_i,
  input  logic [$clog2(ROWS):0]        n_rows_i,
  input  logic [4:0]                   adc_shift_i,
  output logic                         busy_o,
  output logic                         done_o,
  output logic [COLS-1:0][7:0]         out_o
);
  localparam int unsigned CW = $clog2(EVAL_CYCLES + 1);
  localparam int unsigned NG = ROWS / ROWS_PER_CYC;

  logic [COLS*4-1:0] w [ROWS];
  logic [ROWS-1:0][7:0] x_q;
  logic [$clog2(ROWS):0] n_q;
  logic [4:0] sh_q;
  logic signed [31:0] acc_q [COLS];
  logic [CW-1:0] cnt_q;
  logic [$clog2(NG+1)-1:0] grp_q;

  initial begin
    for (int r = 0; r < int'(ROWS); r++) w[r] = '0;
  end

  // the ROWS_PER_CYC wordlines accumulated in this cycle
  logic [ROWS_PER_CYC-1:0][COLS*4-1:0] wl_w;
  logic [ROWS_PER_CYC-1:0][7:0]        wl_x;
  always_comb begin
    for (int k = 0; k < int'(ROWS_PER_CYC); k++) begin
      int r;
      r = int'(grp_q) * int'(ROWS_PER_CYC) + k;
      wl_w[k] = (r < int'(ROWS)) ? w[r[$clog2(ROWS)-1:0]] : '0;
      wl_x[k] = (r < int'(n_q) && r < int'(ROWS)) ? x_q[r[$clog2(ROWS)-1:0]] : 8'd0;
    end
  end

  always_ff @(posedge clk_i) begin
    if (wprog_i) w[wrow_i][32*wcolw_i +: 32] <= wdata_i;
  end

  function automatic logic signed [4:0] w_val(input logic [3:0] q);
    return q[3] ? -$signed({2'b00, ~q[2:0]}) : $signed({2'b00, q[2:0]});
  endfunction

  function automatic logic [7:0] adc(input logic signed [31:0] a, input logic [4:0] s);
    logic signed [31:0] v;
    v = a >>> s;
    if (v > 127)       return 8'sd127;
    else if (v < -128) return 8'h80;
    else               return v[7:0];
  endfunction

  // next accumulator values for this cycle's wordlines
  logic signed [31:0] acc_nxt [COLS];
  always_comb begin
    for (int c = 0; c < int'(COLS); c++) begin
      acc_nxt[c] = acc_q[c];
      for (int k = 0; k < int'(ROWS_PER_CYC); k++)
        acc_nxt[c] = acc_nxt[c] + $signed({1'b0, wl_x[k]}) * w_val(wl_w[k][4*c +: 4]);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_o <= 1'b0;
      done_o <= 1'b0;
      cnt_q  <= '0;
      grp_q  <= '0;
      x_q    <= '0;
      n_q    <= '0;
      sh_q   <= '0;
      out_o  <= '0;
      for (int c = 0; c < int'(COLS); c++) acc_q[c] <= '0;
    end else begin
      done_o <= 1'b0;
      if (start_i && !busy_o) begin
        busy_o <= 1'b1;
        cnt_q  <= CW'(EVAL_CYCLES - 2);
        grp_q  <= '0;
        x_q    <= x_i;
        n_q    <= n_rows_i;
        sh_q   <= adc_shift_i;
        for (int c = 0; c < int'(COLS); c++) acc_q[c] <= '0;
      end else if (busy_o) begin
        // accumulate ROWS_PER_CYC wordlines per cycle
        if (int'(grp_q) < int'(NG)) begin
          for (int c = 0; c < int'(COLS); c++) acc_q[c] <= acc_nxt[c];
          grp_q <= grp_q + 1'b1;
        end
        if (cnt_q == '0) begin
          busy_o <= 1'b0;
          done_o <= 1'b1;
          for (int c = 0; c < int'(COLS); c++) out_o[c] <= adc(acc_q[c], sh_q);
        end else begin
          cnt_q <= cnt_q - 1'b1;
        end
      end
    end
  end

  initial begin
    assert (EVAL_CYCLES >= 2 && ROWS / ROWS_PER_CYC <= EVAL_CYCLES - 2)
      else $error("crossbar model cannot accumulate all rows within EVAL_CYCLES");
  end
endmodule
