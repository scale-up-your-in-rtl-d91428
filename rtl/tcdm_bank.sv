// tcdm_bank: one bank of the cluster's L1 tightly-coupled data memory. The
// L1 is built of several such single-port SRAM banks (B0..B9 in the cluster
// diagram); the logarithmic interconnect in front of them interleaves 32-bit
// words across the banks. Each bank takes one read or byte-masked write per
// cycle; read data appears on rdata_o in the cycle after req_i. Written as an
// array so that synthesis can map it to an SRAM macro. The contents are
// cleared at reset in simulation terms only through the array initialiser;
// there is no functional reset of memory contents.
module tcdm_bank #(
  parameter int unsigned DEPTH = 1639   // words; 10 banks * 1639 >= 64 KiB
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [3:0]               be_i,
  input  logic [$clog2(DEPTH)-1:0] addr_i,
  input  logic [31:0]              wdata_i,
  output logic [31:0]              rdata_o
);
  logic [31:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < int'(DEPTH); i++) mem[i] = '0;
  end

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
