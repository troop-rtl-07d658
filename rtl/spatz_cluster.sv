// spatz_cluster: the TROOP Spatz cluster, top level.
//
// Two core complexes share a 128 KiB L1 TCDM of 16 banks x 8 KiB x 64 bit
// through one single-cycle crossbar with address scrambling.  Each core
// complex is a scalar core (not part of this RTL) and a Spatz vector unit;
// it owns 9 crossbar ports: 8 of its vector unit (4 for VLSU0, 4 for VLSU1)
// and one scalar port.  Crossbar port map: CC0 vector 0..7, CC0 scalar 8,
// CC1 vector 9..16, CC1 scalar 17.
//
// The scalar cores' two connections appear as ports: the offload port
// (instr_*) of each vector unit and the scalar TCDM port (scalar_*), with the
// same request/grant/next-cycle-response protocol as every crossbar port.
// fpu_active_o and idle_o of each vector unit are brought out for
// measurement.  Sizes are the paper's; the port map is this design's.
module spatz_cluster
  import troop_pkg::*;
(
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic      [NR_CC-1:0]      instr_valid_i,
  output logic      [NR_CC-1:0]      instr_ready_o,
  input  vinstr_t   [NR_CC-1:0]      instr_i,
  input  tcdm_req_t [NR_CC-1:0]      scalar_req_i,
  output logic      [NR_CC-1:0]      scalar_gnt_o,
  output tcdm_rsp_t [NR_CC-1:0]      scalar_rsp_o,
  output logic      [NR_CC-1:0]      fpu_active_o,
  output logic      [NR_CC-1:0]      idle_o
);
  localparam int unsigned NP = NR_CC * CC_PORTS;

  tcdm_req_t [NP-1:0] req;
  logic      [NP-1:0] gnt;
  tcdm_rsp_t [NP-1:0] rsp;

  for (genvar c = 0; c < NR_CC; c++) begin : g_cc
    spatz_vpe i_vpe (
      .clk_i, .rst_ni,
      .instr_valid_i(instr_valid_i[c]), .instr_ready_o(instr_ready_o[c]), .instr_i(instr_i[c]),
      .tcdm_req_o(req[c*CC_PORTS +: VLSU_PORTS]),
      .tcdm_gnt_i(gnt[c*CC_PORTS +: VLSU_PORTS]),
      .tcdm_rsp_i(rsp[c*CC_PORTS +: VLSU_PORTS]),
      .fpu_active_o(fpu_active_o[c]), .idle_o(idle_o[c])
    );
    assign req[c*CC_PORTS + VLSU_PORTS] = scalar_req_i[c];
    assign scalar_gnt_o[c] = gnt[c*CC_PORTS + VLSU_PORTS];
    assign scalar_rsp_o[c] = rsp[c*CC_PORTS + VLSU_PORTS];
  end

  logic [TCDM_BANKS-1:0]                 b_req, b_we;
  logic [TCDM_BANKS-1:0][TCDM_ROW_W-1:0] b_addr;
  logic [TCDM_BANKS-1:0][7:0]            b_be;
  logic [TCDM_BANKS-1:0][63:0]           b_wdata, b_rdata;

  tcdm_xbar #(.NR_PORTS(NP), .NR_BANKS(TCDM_BANKS), .SCRAMBLE(1'b1)) i_xbar (
    .clk_i, .rst_ni, .req_i(req), .gnt_o(gnt), .rsp_o(rsp),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_addr_o(b_addr), .bank_be_o(b_be),
    .bank_wdata_o(b_wdata), .bank_rdata_i(b_rdata)
  );

  for (genvar b = 0; b < TCDM_BANKS; b++) begin : g_bank
    tcdm_bank #(.WORDS(TCDM_BANK_WORDS), .DW(64)) i_bank (
      .clk_i, .req_i(b_req[b]), .we_i(b_we[b]), .addr_i(b_addr[b]), .be_i(b_be[b]),
      .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b])
    );
  end
endmodule
