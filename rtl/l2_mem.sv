// l2_mem: the shared L2 scratchpad. It is multi-banked: BANKS banks of 32-bit
// words, word-interleaved, so that one 256-bit beat (BANKS = 8 consecutive
// words) touches every bank once and the channel port moves a whole beat per
// cycle. A second, 32-bit host port (for loading data and reading results
// from outside the cluster array) uses the one bank it addresses and is
// granted only when the channel port does not use that cycle - the only
// conflict is two ports on the same bank, as the paper assumes for L2.
// Both ports: request and grant in the same cycle, read data one cycle later.
// Size 512 KiB (the paper prints "512 kb"; read as kilobytes, see README).
// Lint note: the address bits above the L2 size and below the beat (channel)
// or word (host) are reported unused; the ports take full 32-bit byte
// addresses and ignore the bits outside the memory.
module l2_mem
  import aimc_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 512 * 1024,
  parameter int unsigned BANKS      = BEAT_BITS / 32
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // channel port (beat wide)
  input  logic                  ch_req_i,
  input  logic                  ch_we_i,
  input  logic [31:0]           ch_addr_i,     // byte address, beat aligned
  input  logic [BEAT_BITS-1:0]  ch_wdata_i,
  output logic [BEAT_BITS-1:0]  ch_rdata_o,
  // host port (word wide)
  input  logic                  host_req_i,
  input  logic                  host_we_i,
  input  logic [31:0]           host_addr_i,   // byte address, word aligned
  input  logic [31:0]           host_wdata_i,
  output logic                  host_gnt_o,
  output logic                  host_rvalid_o,
  output logic [31:0]           host_rdata_o
);
  localparam int unsigned DEPTH = SIZE_BYTES / 4 / BANKS;   // rows per bank
  localparam int unsigned RW    = $clog2(DEPTH);
  localparam int unsigned BW    = $clog2(BANKS);

  logic [RW-1:0] ch_row, h_row;
  logic [BW-1:0] h_bank, h_bank_q;
  assign ch_row = ch_addr_i[BW+2 +: RW];
  assign h_row  = host_addr_i[BW+2 +: RW];
  assign h_bank = host_addr_i[2 +: BW];
  assign host_gnt_o = host_req_i && !ch_req_i;

  logic [BANKS-1:0][31:0] rdata;

  for (genvar b = 0; b < int'(BANKS); b++) begin : g_bank
    logic [31:0] mem [DEPTH];
    initial for (int i = 0; i < int'(DEPTH); i++) mem[i] = '0;
    always_ff @(posedge clk_i) begin
      if (ch_req_i) begin
        if (ch_we_i) mem[ch_row] <= ch_wdata_i[32*b +: 32];
        else         rdata[b]    <= mem[ch_row];
      end else if (host_gnt_o && int'(h_bank) == b) begin
        if (host_we_i) mem[h_row] <= host_wdata_i;
        else           rdata[b]   <= mem[h_row];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      host_rvalid_o <= 1'b0;
      h_bank_q      <= '0;
    end else begin
      host_rvalid_o <= host_gnt_o && !host_we_i;
      if (host_gnt_o) h_bank_q <= h_bank;
    end
  end

  assign ch_rdata_o   = rdata;
  assign host_rdata_o = rdata[h_bank_q];
endmodule
