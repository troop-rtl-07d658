// spatz_vpe: one Spatz vector processing element with the TROOP changes.
//
// The controller takes instructions from the scalar core's offload port and
// dispatches them to the VFU (F = 4 lanes), the VLSU (two decoupled
// interfaces of F TCDM ports each) and the SLDU.  All units reach the 4-bank
// VRF; the controller sits in the write paths (shadow buffers for the VFU and
// VLSU1) and tells the VRF when the VLSU goes first.  Read port map of the
// VRF: VFU a/b/c, VLSU0, VLSU1, SLDU; write port map: VFU, VLSU0, VLSU1,
// SLDU.
//
// Interface: instr_valid_i/instr_ready_o/instr_i offload handshake;
// 2F TCDM ports (ports 0..F-1 belong to VLSU0, F..2F-1 to VLSU1);
// fpu_active_o (a word enters the VFU datapath) and idle_o (no instruction
// running) for measurement.
module spatz_vpe
  import troop_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        instr_valid_i,
  output logic        instr_ready_o,
  input  vinstr_t     instr_i,
  output tcdm_req_t [VLSU_PORTS-1:0] tcdm_req_o,
  input  logic      [VLSU_PORTS-1:0] tcdm_gnt_i,
  input  tcdm_rsp_t [VLSU_PORTS-1:0] tcdm_rsp_i,
  output logic        fpu_active_o,
  output logic        idle_o
);
  ex_instr_t ex;
  logic vfu_start, vlsu_start, sldu_start;
  logic vfu_busy, vlsu_busy, sldu_busy;
  logic [WIDX_W-1:0] vfu_word;
  logic vfu_ok, vfu_rd_fire, sldu_ok;
  logic [VLSU_IFS-1:0][WIDX_W-1:0] ls_word;
  logic [VLSU_IFS-1:0] ls_ok;

  vrf_rd_req_t [NR_RD-1:0] rd_req;
  logic        [NR_RD-1:0] rd_gnt;
  logic        [NR_RD-1:0][VRF_DW-1:0] rd_data;
  vrf_wr_req_t [NR_WR-1:0] wr_req;
  logic        [NR_WR-1:0] wr_gnt;
  logic vlsu_first;

  vrf_wr_req_t vfu_wr, sldu_wr;
  logic vfu_wr_ready, sldu_wr_ready;
  vrf_wr_req_t [VLSU_IFS-1:0] ls_wr;
  logic        [VLSU_IFS-1:0] ls_wr_ready;

  controller i_ctrl (
    .clk_i, .rst_ni,
    .instr_valid_i, .instr_ready_o, .instr_i,
    .ex_o(ex), .vfu_start_o(vfu_start), .vlsu_start_o(vlsu_start), .sldu_start_o(sldu_start),
    .vfu_busy_i(vfu_busy), .vlsu_busy_i(vlsu_busy), .sldu_busy_i(sldu_busy),
    .vfu_word_i(vfu_word), .vfu_ok_o(vfu_ok), .vfu_rd_fire_i(vfu_rd_fire),
    .vlsu_word_i(ls_word), .vlsu_ok_o(ls_ok), .sldu_ok_o(sldu_ok),
    .vfu_wr_i(vfu_wr), .vfu_wr_ready_o(vfu_wr_ready),
    .vlsu_wr_i(ls_wr), .vlsu_wr_ready_o(ls_wr_ready),
    .sldu_wr_i(sldu_wr), .sldu_wr_ready_o(sldu_wr_ready),
    .vrf_wr_o(wr_req), .vrf_wr_gnt_i(wr_gnt), .vrf_rd_gnt_i(rd_gnt),
    .vlsu_first_o(vlsu_first), .idle_o
  );

  vfu i_vfu (
    .clk_i, .rst_ni, .start_i(vfu_start), .instr_i(ex), .busy_o(vfu_busy),
    .rd_word_o(vfu_word), .rd_ok_i(vfu_ok), .rd_fire_o(vfu_rd_fire),
    .rd_req_o(rd_req[RD_VFU_C:RD_VFU_A]), .rd_gnt_i(rd_gnt[RD_VFU_C:RD_VFU_A]),
    .rd_data_i(rd_data[RD_VFU_C:RD_VFU_A]),
    .wr_req_o(vfu_wr), .wr_ready_i(vfu_wr_ready), .fpu_active_o
  );

  vlsu i_vlsu (
    .clk_i, .rst_ni, .start_i(vlsu_start), .instr_i(ex), .busy_o(vlsu_busy),
    .word_o(ls_word), .ok_i(ls_ok),
    .tcdm_req_o, .tcdm_gnt_i, .tcdm_rsp_i,
    .rd_req_o(rd_req[RD_VLSU1:RD_VLSU0]), .rd_gnt_i(rd_gnt[RD_VLSU1:RD_VLSU0]),
    .rd_data_i(rd_data[RD_VLSU1:RD_VLSU0]),
    .wr_req_o(ls_wr), .wr_ready_i(ls_wr_ready)
  );

  sldu i_sldu (
    .clk_i, .rst_ni, .start_i(sldu_start), .instr_i(ex), .busy_o(sldu_busy), .ok_i(sldu_ok),
    .rd_req_o(rd_req[RD_SLDU]), .rd_gnt_i(rd_gnt[RD_SLDU]), .rd_data_i(rd_data[RD_SLDU]),
    .wr_req_o(sldu_wr), .wr_ready_i(sldu_wr_ready)
  );

  vrf i_vrf (
    .clk_i, .rd_req_i(rd_req), .rd_gnt_o(rd_gnt), .rd_data_o(rd_data),
    .wr_req_i(wr_req), .wr_gnt_o(wr_gnt), .vlsu_first_i(vlsu_first)
  );
endmodule
