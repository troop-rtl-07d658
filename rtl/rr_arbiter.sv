// rr_arbiter: round-robin arbiter used by each TCDM bank of the crossbar.
//
// Grants at most one of N requests in the same cycle (combinational).  The
// search starts one past the last granted index, so every requester is served
// within N grants.  The pointer advances only when a grant is given.
module rr_arbiter #(
  parameter int unsigned N  = 4,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [N-1:0]  req_i,
  output logic [N-1:0]  gnt_o,
  output logic [IW-1:0] idx_o,
  output logic          valid_o
);
  logic [IW-1:0] ptr_q;

  always_comb begin
    gnt_o   = '0;
    idx_o   = '0;
    valid_o = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned i;
      i = (int'(ptr_q) + k) % N;
      if (!valid_o && req_i[i]) begin
        valid_o  = 1'b1;
        idx_o    = IW'(i);
        gnt_o[i] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      ptr_q <= '0;
    else if (valid_o) ptr_q <= (int'(idx_o) == N-1) ? '0 : idx_o + IW'(1);
  end
endmodule
