// vlsu_channel: one of the two decoupled load/store interfaces of the VLSU.
//
// A channel handles a contiguous range of VRF words of one unit-stride
// vector load or store: words first_i .. first_i+count_i-1 of register group
// vd.  Element e of word w lives at byte address base + 8*(F*w + e) and uses
// TCDM port e of the channel.  Elements at or beyond vl are skipped.
//
// Load: a word is started when a slot is free and the controller allows it
// (ok_i for word word_o, which covers write-after-read and write-after-write
// hazards).  Its element requests are repeated until each is granted;
// responses arrive one cycle after the grant and fill the slot.  Complete
// slots are written to the VRF in order through the channel's write port
// (wr_ready_i is the grant, or the acceptance of a shadow buffer); the
// elements that complete the head slot are forwarded from the TCDM response
// to the write port in the cycle they arrive.  With
// SLOTS = 3 a channel sustains one 64F-bit word per cycle.
//
// Store: word word_o is read from the VRF when allowed (ok_i is the
// read-after-write check) and the store buffer is free or empties in that
// cycle; the buffered elements are then written to the TCDM, each until
// granted.  A store element is complete when its write is granted.
//
// The split into two channels is the paper's; slot count, the retry of
// refused element requests and the store completion rule are this design's.
module vlsu_channel
  import troop_pkg::*;
#(
  parameter int unsigned SLOTS = 3
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              start_i,
  input  logic              store_i,
  input  logic [ADDR_W-1:0] base_i,
  input  logic [4:0]        vd_i,
  input  logic [VL_W-1:0]   vl_i,
  input  logic [WCNT_W-1:0] first_i,
  input  logic [WCNT_W-1:0] count_i,
  output logic              busy_o,
  // chaining
  output logic [WIDX_W-1:0] word_o,
  input  logic              ok_i,
  // TCDM
  output tcdm_req_t [PORTS_PER_IF-1:0] tcdm_req_o,
  input  logic      [PORTS_PER_IF-1:0] tcdm_gnt_i,
  input  tcdm_rsp_t [PORTS_PER_IF-1:0] tcdm_rsp_i,
  // VRF
  output vrf_rd_req_t       rd_req_o,
  input  logic              rd_gnt_i,
  input  logic [VRF_DW-1:0] rd_data_i,
  output vrf_wr_req_t       wr_req_o,
  input  logic              wr_ready_i
);
  localparam int unsigned E  = PORTS_PER_IF;
  localparam int unsigned SW = (SLOTS > 1) ? $clog2(SLOTS) : 1;

  logic              store_q;
  logic [ADDR_W-1:0] base_q;
  logic [4:0]        vd_q;
  logic [VL_W-1:0]   vl_q;
  logic [WCNT_W-1:0] first_q, count_q;
  logic [WCNT_W-1:0] iw_q;          // words started (load) / read (store)

  logic [WIDX_W-1:0] cur_word;
  assign cur_word = WIDX_W'(first_q + iw_q);
  assign word_o   = cur_word;

  function automatic logic [E-1:0] act_mask(logic [WIDX_W-1:0] w, logic [VL_W-1:0] vl);
    for (int e = 0; e < E; e++) act_mask[e] = (int'(w) * E + e) < int'(vl);
  endfunction

  function automatic logic [ADDR_W-1:0] el_addr(logic [ADDR_W-1:0] b, logic [WIDX_W-1:0] w, int e);
    return b + ADDR_W'((int'(w) * E + e) * 8);
  endfunction

  // ---------------- load slots ----------------
  logic [SLOTS-1:0]                 sv_q;       // slot allocated
  logic [SLOTS-1:0][E-1:0]          need_q, got_q;
  logic [SLOTS-1:0][E-1:0][63:0]    sdata_q;
  logic [SLOTS-1:0][WIDX_W-1:0]     sword_q;
  logic [SW-1:0]                    head_q, alloc_q;
  logic                             cur_v_q;    // a word is being requested
  logic [SW-1:0]                    cur_s_q;
  logic [WIDX_W-1:0]                cur_w_q;
  logic [E-1:0]                     pend_q;     // elements not yet granted
  logic [E-1:0]                     rv_q;       // response expected this cycle
  logic [E-1:0][SW-1:0]             rs_q;       // ... for this slot

  function automatic logic [SW-1:0] nxt(logic [SW-1:0] p);
    return (int'(p) == SLOTS-1) ? '0 : p + SW'(1);
  endfunction

  logic              ld_alloc;
  logic [E-1:0]      ld_req;
  logic [WIDX_W-1:0] ld_word;
  logic [SW-1:0]     ld_slot;
  always_comb begin
    ld_alloc = !store_q && !cur_v_q && (iw_q < count_q) && !sv_q[alloc_q] && ok_i;
    ld_req   = cur_v_q ? pend_q : (ld_alloc ? act_mask(cur_word, vl_q) : '0);
    ld_word  = cur_v_q ? cur_w_q : cur_word;
    ld_slot  = cur_v_q ? cur_s_q : alloc_q;
  end

  // ---------------- store buffer ----------------
  logic              sb_v_q;
  logic [E-1:0]      sb_pend_q;
  logic [E-1:0][63:0] sb_data_q;
  logic [WIDX_W-1:0] sb_word_q;
  logic              sb_free, st_rd;
  assign sb_free = !sb_v_q || ((sb_pend_q & ~tcdm_gnt_i) == '0);
  assign rd_req_o.valid = store_q && (iw_q < count_q) && ok_i && sb_free;
  assign rd_req_o.addr  = vrf_addr(vd_q, cur_word);
  assign st_rd          = rd_req_o.valid && rd_gnt_i;

  // ---------------- TCDM requests ----------------
  always_comb
    for (int e = 0; e < E; e++) begin
      tcdm_req_o[e].we    = store_q;
      tcdm_req_o[e].be    = 8'hff;
      if (store_q) begin
        tcdm_req_o[e].valid = sb_v_q && sb_pend_q[e];
        tcdm_req_o[e].addr  = el_addr(base_q, sb_word_q, e);
        tcdm_req_o[e].wdata = sb_data_q[e];
      end else begin
        tcdm_req_o[e].valid = ld_req[e];
        tcdm_req_o[e].addr  = el_addr(base_q, ld_word, e);
        tcdm_req_o[e].wdata = '0;
      end
    end

  // ---------------- VRF write of the head slot ----------------
  // Responses arriving in this cycle for the head slot are forwarded, so a
  // word is written in the cycle its last element arrives.
  logic [E-1:0] head_arr;
  logic         head_done;
  always_comb begin
    for (int e = 0; e < E; e++)
      head_arr[e] = rv_q[e] && tcdm_rsp_i[e].valid && (rs_q[e] == head_q);
    head_done      = sv_q[head_q] && ((got_q[head_q] | head_arr) == need_q[head_q]);
    wr_req_o.valid = !store_q && head_done;
    wr_req_o.addr  = vrf_addr(vd_q, sword_q[head_q]);
    for (int e = 0; e < E; e++) begin
      wr_req_o.be[e*8 +: 8]   = {8{need_q[head_q][e]}};
      wr_req_o.data[e*64 +: 64] = head_arr[e] ? tcdm_rsp_i[e].rdata : sdata_q[head_q][e];
    end
  end

  // load data: a datapath register without reset
  always_ff @(posedge clk_i) begin
    for (int e = 0; e < E; e++)
      if (rv_q[e] && tcdm_rsp_i[e].valid) sdata_q[rs_q[e]][e] <= tcdm_rsp_i[e].rdata;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      store_q <= 1'b0; base_q <= '0; vd_q <= '0; vl_q <= '0; first_q <= '0; count_q <= '0;
      iw_q <= '0; sv_q <= '0; need_q <= '0; got_q <= '0; sword_q <= '0;
      head_q <= '0; alloc_q <= '0; cur_v_q <= 1'b0; cur_s_q <= '0; cur_w_q <= '0;
      pend_q <= '0; rv_q <= '0; rs_q <= '0;
      sb_v_q <= 1'b0; sb_pend_q <= '0; sb_data_q <= '0; sb_word_q <= '0;
    end else begin
      // responses fill slots
      rv_q <= '0;
      for (int e = 0; e < E; e++)
        if (rv_q[e] && tcdm_rsp_i[e].valid) begin
          got_q[rs_q[e]][e]   <= 1'b1;
        end
      if (start_i) begin
        store_q <= store_i; base_q <= base_i; vd_q <= vd_i; vl_q <= vl_i;
        first_q <= first_i; count_q <= count_i; iw_q <= '0;
      end else if (!store_q) begin
        // load: element grants
        for (int e = 0; e < E; e++)
          if (ld_req[e] && tcdm_gnt_i[e]) begin
            rv_q[e] <= 1'b1;
            rs_q[e] <= ld_slot;
          end
        if (ld_alloc) begin
          sv_q[alloc_q]    <= 1'b1;
          need_q[alloc_q]  <= act_mask(cur_word, vl_q);
          got_q[alloc_q]   <= '0;
          sword_q[alloc_q] <= cur_word;
          alloc_q          <= nxt(alloc_q);
          iw_q             <= iw_q + WCNT_W'(1);
        end
        if ((ld_req & ~tcdm_gnt_i) != '0) begin
          cur_v_q <= 1'b1;
          pend_q  <= ld_req & ~tcdm_gnt_i;
          cur_s_q <= ld_slot;
          cur_w_q <= ld_word;
        end else begin
          cur_v_q <= 1'b0;
        end
        if (wr_req_o.valid && wr_ready_i) begin
          sv_q[head_q] <= 1'b0;
          head_q       <= nxt(head_q);
        end
      end else begin
        // store
        if (sb_v_q) sb_pend_q <= sb_pend_q & ~tcdm_gnt_i;
        if (sb_v_q && sb_free) sb_v_q <= 1'b0;
        if (st_rd) begin
          sb_v_q    <= 1'b1;
          sb_pend_q <= act_mask(cur_word, vl_q);
          sb_data_q <= rd_data_i;
          sb_word_q <= cur_word;
          iw_q      <= iw_q + WCNT_W'(1);
        end
      end
    end
  end

  assign busy_o = (iw_q < count_q) || cur_v_q || (sv_q != '0) || sb_v_q || (rv_q != '0);

  // a response is always expected: the TCDM answers one cycle after a grant
  for (genvar e = 0; e < E; e++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni) rv_q[e] |-> tcdm_rsp_i[e].valid);
  end
endmodule
