// tcdm_xbar: single-cycle crossbar between the core-side TCDM ports and the
// L1 banks, with TROOP's address scrambling.
//
// Each of the NR_PORTS 64-bit ports presents a request (tcdm_req_t).  The
// target bank is taken from the 8-byte word address (word-interleaved over
// NR_BANKS banks); with SCRAMBLE set, rows 1 and 2 of every group of four
// TCDM rows are moved by NR_BANKS/2 banks (bank XOR 8), so that the two
// halves of a long vector that the two load/store interfaces access at the
// same time land on different banks.  Every bank has a round-robin arbiter;
// the winner's request goes to the bank in the same cycle (gnt_o is
// combinational) and its response (rsp_o.valid with read data) comes back in
// the next cycle.  Writes are answered too, with don't-care data.
//
// From the paper: port and bank counts, single-cycle latency, the scrambling
// rule.  This design's choices: round-robin arbitration, word interleaving,
// responses for writes, addresses wrapping at the memory size.
module tcdm_xbar
  import troop_pkg::*;
#(
  parameter int unsigned NR_PORTS = 18,
  parameter int unsigned NR_BANKS = TCDM_BANKS,
  parameter bit          SCRAMBLE = 1'b1
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  input  tcdm_req_t [NR_PORTS-1:0]       req_i,
  output logic      [NR_PORTS-1:0]       gnt_o,
  output tcdm_rsp_t [NR_PORTS-1:0]       rsp_o,
  // bank side
  output logic      [NR_BANKS-1:0]       bank_req_o,
  output logic      [NR_BANKS-1:0]       bank_we_o,
  output logic      [NR_BANKS-1:0][TCDM_ROW_W-1:0] bank_addr_o,
  output logic      [NR_BANKS-1:0][7:0]  bank_be_o,
  output logic      [NR_BANKS-1:0][63:0] bank_wdata_o,
  input  logic      [NR_BANKS-1:0][63:0] bank_rdata_i
);
  localparam int unsigned PW = $clog2(NR_PORTS);
  localparam int unsigned BW = $clog2(NR_BANKS);

  logic [NR_PORTS-1:0][BW-1:0] tgt;
  logic [NR_BANKS-1:0][NR_PORTS-1:0] bank_reqs, bank_gnts;
  logic [NR_BANKS-1:0][PW-1:0] bank_idx;
  logic [NR_BANKS-1:0]         bank_vld;

  always_comb begin
    for (int p = 0; p < NR_PORTS; p++) tgt[p] = BW'(tcdm_bank_of(req_i[p].addr, SCRAMBLE));
    for (int b = 0; b < NR_BANKS; b++)
      for (int p = 0; p < NR_PORTS; p++)
        bank_reqs[b][p] = req_i[p].valid && (tgt[p] == BW'(b));
  end

  for (genvar b = 0; b < NR_BANKS; b++) begin : g_bank
    rr_arbiter #(.N(NR_PORTS)) i_arb (
      .clk_i, .rst_ni, .req_i(bank_reqs[b]), .gnt_o(bank_gnts[b]),
      .idx_o(bank_idx[b]), .valid_o(bank_vld[b])
    );
    always_comb begin
      bank_req_o[b]   = bank_vld[b];
      bank_we_o[b]    = req_i[bank_idx[b]].we;
      bank_addr_o[b]  = tcdm_row_of(req_i[bank_idx[b]].addr);
      bank_be_o[b]    = req_i[bank_idx[b]].be;
      bank_wdata_o[b] = req_i[bank_idx[b]].wdata;
    end
  end

  always_comb begin
    gnt_o = '0;
    for (int b = 0; b < NR_BANKS; b++) gnt_o |= bank_gnts[b];
  end

  // response path: remember which bank served each port
  logic [NR_PORTS-1:0]         rvld_q;
  logic [NR_PORTS-1:0][BW-1:0] rbank_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvld_q  <= '0;
      rbank_q <= '0;
    end else begin
      rvld_q  <= gnt_o;
      rbank_q <= tgt;
    end
  end

  always_comb
    for (int p = 0; p < NR_PORTS; p++) begin
      rsp_o[p].valid = rvld_q[p];
      rsp_o[p].rdata = bank_rdata_i[rbank_q[p]];
    end

  // a grant only ever answers a request
  for (genvar p = 0; p < NR_PORTS; p++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni) gnt_o[p] |-> req_i[p].valid);
  end
endmodule
