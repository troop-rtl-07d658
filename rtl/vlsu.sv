// vlsu: vector load/store unit with two decoupled interfaces (TROOP).
//
// A unit-stride load (OP_VLE) or store (OP_VSE) of vl 64-bit elements covers
// n = ceil(vl/F) VRF words.  Both interfaces execute the same instruction,
// each on a contiguous half of the vector: VLSU0 (channel 0) takes words
// 0 .. ceil(n/2)-1 and VLSU1 (channel 1) the rest.  Each channel has F
// 64-bit TCDM ports and its own VRF read and write port, so the unit moves
// up to two 64F-bit words per cycle while each channel walks the VRF banks
// at one bank per cycle, in step with the VFU.
//
// Interface: start_i with instr_i (op, vd, scalar = byte base address, vl,
// nwords); busy_o until both channels are done.  Per channel: word_o / ok_i
// chaining handshake with the controller, TCDM request/grant/response, VRF
// read (stores) and write (loads) ports.
//
// The half/half split follows the paper; rounding the first half up is this
// design's choice.  Strided and indexed accesses are not implemented.
module vlsu
  import troop_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              start_i,
  input  ex_instr_t         instr_i,
  output logic              busy_o,
  output logic [VLSU_IFS-1:0][WIDX_W-1:0] word_o,
  input  logic [VLSU_IFS-1:0]             ok_i,
  output tcdm_req_t [VLSU_PORTS-1:0] tcdm_req_o,
  input  logic      [VLSU_PORTS-1:0] tcdm_gnt_i,
  input  tcdm_rsp_t [VLSU_PORTS-1:0] tcdm_rsp_i,
  output vrf_rd_req_t [VLSU_IFS-1:0] rd_req_o,
  input  logic        [VLSU_IFS-1:0] rd_gnt_i,
  input  logic        [VLSU_IFS-1:0][VRF_DW-1:0] rd_data_i,
  output vrf_wr_req_t [VLSU_IFS-1:0] wr_req_o,
  input  logic        [VLSU_IFS-1:0] wr_ready_i
);
  logic [WCNT_W-1:0] half;
  assign half = (instr_i.nwords + WCNT_W'(1)) >> 1;

  logic [VLSU_IFS-1:0] busy;
  for (genvar c = 0; c < VLSU_IFS; c++) begin : g_ch
    vlsu_channel i_ch (
      .clk_i, .rst_ni,
      .start_i   (start_i),
      .store_i   (instr_i.op == OP_VSE),
      .base_i    (instr_i.scalar[ADDR_W-1:0]),
      .vd_i      (instr_i.vd),
      .vl_i      (instr_i.vl),
      .first_i   (c == 0 ? '0 : half),
      .count_i   (c == 0 ? half : instr_i.nwords - half),
      .busy_o    (busy[c]),
      .word_o    (word_o[c]),
      .ok_i      (ok_i[c]),
      .tcdm_req_o(tcdm_req_o[c*PORTS_PER_IF +: PORTS_PER_IF]),
      .tcdm_gnt_i(tcdm_gnt_i[c*PORTS_PER_IF +: PORTS_PER_IF]),
      .tcdm_rsp_i(tcdm_rsp_i[c*PORTS_PER_IF +: PORTS_PER_IF]),
      .rd_req_o  (rd_req_o[c]),
      .rd_gnt_i  (rd_gnt_i[c]),
      .rd_data_i (rd_data_i[c]),
      .wr_req_o  (wr_req_o[c]),
      .wr_ready_i(wr_ready_i[c])
    );
  end
  assign busy_o = |busy;
endmodule
