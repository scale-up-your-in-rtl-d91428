// rr_arbiter: round-robin arbiter for N requesters. gnt_o is one-hot (or zero
// when nothing is requested) and depends combinationally on req_i. When en_i
// is high and a grant is given, the priority pointer moves to the requester
// after the granted one, so every requester is served within N grants.
// Helper shared by the L1 interconnect and the wireless channel.
// Lint note: the loop index is a full int; only its low bits select a
// requester, so its upper bits are reported unused.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [N-1:0]         req_i,
  input  logic                 en_i,
  output logic [N-1:0]         gnt_o,
  output logic [$clog2(N>1?N:2)-1:0] idx_o
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);
  logic [IW-1:0] ptr_q;

  always_comb begin
    logic found;
    int unsigned k;
    gnt_o = '0;
    idx_o = '0;
    found = 1'b0;
    for (int unsigned i = 0; i < N; i++) begin
      k = (int'(ptr_q) + i) % N;
      if (!found && req_i[k]) begin
        found    = 1'b1;
        gnt_o[k] = 1'b1;
        idx_o    = IW'(k);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ptr_q <= '0;
    else if (en_i && |req_i) ptr_q <= IW'((int'(idx_o) + 1) % N);
  end
endmodule
