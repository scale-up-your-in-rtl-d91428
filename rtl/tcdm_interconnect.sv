// tcdm_interconnect: the cluster's single-cycle "logarithmic" interconnect
// between N_MASTERS word-wide masters (IMA ports, DMA ports, cores, wireless
// receive port) and N_BANKS L1 banks. 32-bit words are interleaved across the
// banks: word w = addr[31:2] lives in bank (w mod N_BANKS), row
// (w div N_BANKS). Every bank has its own round-robin arbiter; a master that
// loses waits with req held (no gnt). The grant is combinational in the cycle
// of the request and the read data returns, with rvalid, one cycle later.
// Several masters that hit different banks are all served in the same cycle;
// two masters on the same bank collide and one of them waits - the L1
// contention the cluster's performance depends on.
// The paper gives the function (multi-banked L1 behind a low-latency
// logarithmic interconnect) and the bank count (B0..B9); modulo-N
// interleaving and round-robin arbitration are this design's choices.
// Lint note: rst_ni is used both as the asynchronous reset of the flops and
// in the 'disable iff' of this design's assertions, so the lint tool reports
// it as a net used synchronously and asynchronously; the logic only uses it
// as an asynchronous reset.
module tcdm_interconnect
  import aimc_pkg::*;
#(
  parameter int unsigned N_MASTERS  = 23,
  parameter int unsigned N_BANKS    = 10,
  parameter int unsigned BANK_DEPTH = 1639
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  tcdm_req_t [N_MASTERS-1:0]   mst_req_i,
  output tcdm_rsp_t [N_MASTERS-1:0]   mst_rsp_o,
  // bank side
  output logic [N_BANKS-1:0]                         bank_req_o,
  output logic [N_BANKS-1:0]                         bank_we_o,
  output logic [N_BANKS-1:0][3:0]                    bank_be_o,
  output logic [N_BANKS-1:0][$clog2(BANK_DEPTH)-1:0] bank_addr_o,
  output logic [N_BANKS-1:0][31:0]                   bank_wdata_o,
  input  logic [N_BANKS-1:0][31:0]                   bank_rdata_i
);
  localparam int unsigned BW = $clog2(N_BANKS > 1 ? N_BANKS : 2);
  localparam int unsigned MW = $clog2(N_MASTERS > 1 ? N_MASTERS : 2);
  localparam int unsigned RW = $clog2(BANK_DEPTH);

  logic [N_MASTERS-1:0][BW-1:0] m_bank;
  logic [N_MASTERS-1:0][RW-1:0] m_row;
  logic [N_BANKS-1:0][N_MASTERS-1:0] bank_reqs, bank_gnts;
  logic [N_BANKS-1:0][MW-1:0] bank_idx;

  // address decode
  always_comb begin
    for (int m = 0; m < int'(N_MASTERS); m++) begin
      m_bank[m] = BW'(mst_req_i[m].addr[31:2] % N_BANKS);
      m_row[m]  = RW'(mst_req_i[m].addr[31:2] / N_BANKS);
    end
  end

  always_comb begin
    for (int b = 0; b < int'(N_BANKS); b++)
      for (int m = 0; m < int'(N_MASTERS); m++)
        bank_reqs[b][m] = mst_req_i[m].req && (int'(m_bank[m]) == b);
  end

  for (genvar b = 0; b < int'(N_BANKS); b++) begin : g_arb
    rr_arbiter #(.N(N_MASTERS)) u_arb (
      .clk_i, .rst_ni,
      .req_i (bank_reqs[b]),
      .en_i  (1'b1),
      .gnt_o (bank_gnts[b]),
      .idx_o (bank_idx[b])
    );
  end

  // bank requests
  always_comb begin
    for (int b = 0; b < int'(N_BANKS); b++) begin
      bank_req_o[b]   = |bank_reqs[b];
      bank_we_o[b]    = mst_req_i[bank_idx[b]].we;
      bank_be_o[b]    = mst_req_i[bank_idx[b]].be;
      bank_addr_o[b]  = m_row[bank_idx[b]];
      bank_wdata_o[b] = mst_req_i[bank_idx[b]].wdata;
    end
  end

  // grants and responses
  logic [N_MASTERS-1:0] gnt;
  logic [N_MASTERS-1:0] rvalid_q;
  logic [N_MASTERS-1:0][BW-1:0] rbank_q;

  always_comb begin
    gnt = '0;
    for (int b = 0; b < int'(N_BANKS); b++) gnt |= bank_gnts[b];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= '0;
      rbank_q  <= '0;
    end else begin
      rvalid_q <= gnt;
      for (int m = 0; m < int'(N_MASTERS); m++)
        if (gnt[m]) rbank_q[m] <= m_bank[m];
    end
  end

  always_comb begin
    for (int m = 0; m < int'(N_MASTERS); m++) begin
      mst_rsp_o[m].gnt    = gnt[m];
      mst_rsp_o[m].rvalid = rvalid_q[m];
      mst_rsp_o[m].rdata  = bank_rdata_i[rbank_q[m]];
    end
  end

  // A bank never grants two masters in one cycle.
  for (genvar b = 0; b < int'(N_BANKS); b++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(bank_gnts[b]));
  end
endmodule
