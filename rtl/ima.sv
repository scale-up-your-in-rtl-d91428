// ima: digital part of the In-Memory Accelerator (IMA) of one cluster. The
// cores program a job through the configuration bus and start it; the IMA then
// works alone and raises a one-cycle done event for the event unit.
//
// A job is N_PIX input vectors (one pixel of a 1x1 convolution each, C_IN
// bytes long, SRC_STRIDE bytes apart in L1). For every vector the IMA runs
// three phases, one after the other:
//   stream-in  : C_IN bytes are read from L1 through the IMA_PORTS 32-bit
//                ports into the input buffer; word k goes through port
//                k mod IMA_PORTS, so without bank conflicts 64 bytes move per
//                cycle.
//   eval       : the crossbar model multiplies the input buffer by the stored
//                weights (EVAL_CYCLES cycles, 130 ns in the paper).
//   stream-out : C_OUT result bytes go from the output buffer back to L1
//                (DST_STRIDE bytes apart per vector) through the same ports.
// Register map (byte offsets on the IMA's configuration window):
//   0x00 SRC  0x04 DST  0x08 C_IN  0x0C C_OUT  0x10 N_PIX  0x14 SRC_STRIDE
//   0x18 DST_STRIDE  0x1C ADC_SHIFT  0x20 TRIGGER (any write starts a job)
//   0x24 WADDR = row*(COLS/8) + column group  0x28 WDATA (programs 8 weights
//   at WADDR, then WADDR increments)
// The three phases, the port count and width, the buffers and the done event
// follow the paper; the register map, the per-vector job loop and the strides
// are this design's choices. Addresses must be 4-byte aligned.
// Lint note: rst_ni is used both as the asynchronous reset of the flops and
// in the 'disable iff' of this design's assertions, so the lint tool reports
// it as a net used synchronously and asynchronously; the logic only uses it
// as an asynchronous reset.
module ima
  import aimc_pkg::*;
#(
  parameter int unsigned ROWS        = XBAR_ROWS,
  parameter int unsigned COLS        = XBAR_COLS,
  parameter int unsigned N_PORTS     = IMA_PORTS,
  parameter int unsigned EVAL_CYC    = aimc_pkg::EVAL_CYCLES
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  // configuration (already decoded to this peripheral)
  input  logic                      cfg_we_i,
  input  logic [7:0]                cfg_addr_i,
  input  logic [31:0]               cfg_wdata_i,
  // L1 ports
  output tcdm_req_t [N_PORTS-1:0]   l1_req_o,
  input  tcdm_rsp_t [N_PORTS-1:0]   l1_rsp_i,
  // status
  output logic                      busy_o,
  output logic                      done_o,      // one-cycle event at job end
  output logic [1:0]                phase_o      // 0 idle, 1 stream-in, 2 eval, 3 stream-out
);
  localparam int unsigned IW   = $clog2(ROWS / 4 + 1);   // input word count width
  localparam int unsigned OW   = $clog2(COLS / 4 + 1);
  localparam int unsigned WAW  = $clog2(ROWS) + $clog2(COLS / 8);

  typedef enum logic [1:0] {S_IDLE, S_SIN, S_EVAL, S_SOUT} state_e;
  state_e state_q;

  // job registers
  logic [31:0] src_q, dst_q, cin_q, cout_q, npix_q, sstr_q, dstr_q;
  logic [4:0]  shift_q;
  logic [WAW-1:0] waddr_q;
  // running state
  logic [31:0] cur_src_q, cur_dst_q, pix_left_q;
  logic [ROWS-1:0][7:0] ibuf_q;
  logic [N_PORTS-1:0][IW-1:0] issued_q;          // words issued per port
  logic [N_PORTS-1:0]         pend_q;            // read in flight per port
  logic [N_PORTS-1:0][IW-1:0] pend_w_q;          // word index in flight
  logic [IW:0]   got_q;                          // words received
  logic [OW:0]   put_q;                          // words written
  logic          xb_start_q;

  logic [IW:0] n_in_w;
  logic [OW:0] n_out_w;
  assign n_in_w  = (IW+1)'((cin_q + 3) >> 2);
  assign n_out_w = (OW+1)'((cout_q + 3) >> 2);

  // crossbar model
  logic xb_done;
  logic [COLS-1:0][7:0] xb_out;
  logic wprog;
  assign wprog = cfg_we_i && cfg_addr_i == 8'h28;

  ima_crossbar #(
    .ROWS(ROWS), .COLS(COLS), .EVAL_CYCLES(EVAL_CYC)
  ) u_xbar (
    .clk_i, .rst_ni,
    .wprog_i   (wprog),
    .wrow_i    (waddr_q[WAW-1 -: $clog2(ROWS)]),
    .wcolw_i   (waddr_q[$clog2(COLS/8)-1:0]),
    .wdata_i   (cfg_wdata_i),
    .start_i   (xb_start_q),
    .x_i       (ibuf_q),
    .n_rows_i  (($clog2(ROWS)+1)'(cin_q > ROWS ? ROWS : cin_q)),
    .adc_shift_i(shift_q),
    .busy_o    (),
    .done_o    (xb_done),
    .out_o     (xb_out)
  );

  // word index handled by port p at its issue count
  function automatic int unsigned word_of(input int unsigned p, input int unsigned j);
    return p + N_PORTS * j;
  endfunction

  // L1 requests
  always_comb begin
    for (int p = 0; p < int'(N_PORTS); p++) begin
      int unsigned k;
      k = word_of(p, 32'(issued_q[p]));
      l1_req_o[p] = '0;
      l1_req_o[p].be = 4'hF;
      if (state_q == S_SIN) begin
        l1_req_o[p].req  = k < n_in_w;
        l1_req_o[p].addr = cur_src_q + 32'(4 * k);
      end else if (state_q == S_SOUT) begin
        l1_req_o[p].req   = k < n_out_w;
        l1_req_o[p].we    = 1'b1;
        l1_req_o[p].addr  = cur_dst_q + 32'(4 * k);
        l1_req_o[p].wdata = (k < COLS / 4) ? xb_out[4*(k % (COLS/4)) +: 4] : '0;
        for (int b = 0; b < 4; b++)
          l1_req_o[p].be[b] = 32'(4 * k + b) < cout_q;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      src_q <= '0; dst_q <= '0; cin_q <= 32'(ROWS); cout_q <= 32'(COLS);
      npix_q <= 32'd1; sstr_q <= '0; dstr_q <= '0; shift_q <= '0; waddr_q <= '0;
      cur_src_q <= '0; cur_dst_q <= '0; pix_left_q <= '0;
      ibuf_q <= '0; issued_q <= '0; pend_q <= '0; pend_w_q <= '0;
      got_q <= '0; put_q <= '0; xb_start_q <= 1'b0; done_o <= 1'b0;
    end else begin
      done_o     <= 1'b0;
      xb_start_q <= 1'b0;
      // configuration writes
      if (cfg_we_i) begin
        unique case (cfg_addr_i)
          8'h00: src_q   <= cfg_wdata_i;
          8'h04: dst_q   <= cfg_wdata_i;
          8'h08: cin_q   <= (cfg_wdata_i > ROWS) ? 32'(ROWS) : cfg_wdata_i;
          8'h0C: cout_q  <= (cfg_wdata_i > COLS) ? 32'(COLS) : cfg_wdata_i;
          8'h10: npix_q  <= cfg_wdata_i;
          8'h14: sstr_q  <= cfg_wdata_i;
          8'h18: dstr_q  <= cfg_wdata_i;
          8'h1C: shift_q <= cfg_wdata_i[4:0];
          8'h24: waddr_q <= cfg_wdata_i[WAW-1:0];
          8'h28: waddr_q <= waddr_q + 1'b1;
          default: ;
        endcase
      end
      unique case (state_q)
        S_IDLE: begin
          if (cfg_we_i && cfg_addr_i == 8'h20 && npix_q != 0) begin
            state_q    <= S_SIN;
            cur_src_q  <= src_q;
            cur_dst_q  <= dst_q;
            pix_left_q <= npix_q;
            issued_q   <= '0;
            pend_q     <= '0;
            got_q      <= '0;
          end
        end
        S_SIN: begin
          for (int p = 0; p < int'(N_PORTS); p++) begin
            pend_q[p] <= l1_req_o[p].req && l1_rsp_i[p].gnt;
            if (l1_req_o[p].req && l1_rsp_i[p].gnt) begin
              issued_q[p] <= issued_q[p] + 1'b1;
              pend_w_q[p] <= IW'(word_of(p, 32'(issued_q[p])));
            end
            if (pend_q[p] && l1_rsp_i[p].rvalid)
              ibuf_q[4*pend_w_q[p] +: 4] <= l1_rsp_i[p].rdata;
          end
          got_q <= got_q + (IW+1)'($countones(pend_q));
          if (got_q + (IW+1)'($countones(pend_q)) == n_in_w) begin
            state_q    <= S_EVAL;
            xb_start_q <= 1'b1;
          end
        end
        S_EVAL: begin
          if (xb_done) begin
            state_q  <= S_SOUT;
            issued_q <= '0;
            put_q    <= '0;
          end
        end
        S_SOUT: begin
          logic [OW:0] n;
          n = '0;
          for (int p = 0; p < int'(N_PORTS); p++)
            if (l1_req_o[p].req && l1_rsp_i[p].gnt) begin
              issued_q[p] <= issued_q[p] + 1'b1;
              n = n + 1'b1;
            end
          put_q <= put_q + n;
          if (put_q + n == n_out_w) begin
            issued_q <= '0;
            got_q    <= '0;
            pend_q   <= '0;
            if (pix_left_q == 32'd1) begin
              state_q <= S_IDLE;
              done_o  <= 1'b1;
            end else begin
              state_q    <= S_SIN;
              pix_left_q <= pix_left_q - 1'b1;
              cur_src_q  <= cur_src_q + sstr_q;
              cur_dst_q  <= cur_dst_q + dstr_q;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o  = state_q != S_IDLE;
  assign phase_o = state_q;

  // The L1 interconnect answers a granted read in the next cycle.
  for (genvar p = 0; p < int'(N_PORTS); p++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      (state_q == S_SIN && pend_q[p]) |-> l1_rsp_i[p].rvalid);
  end
endmodule
