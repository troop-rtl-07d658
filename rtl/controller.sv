// controller: instruction dispatch, CSRs, scoreboard with TROOP chaining,
// shadow buffers and dynamic VRF write priority of one Spatz vector unit.
//
// Instructions arrive in order on a valid/ready port.  OP_VSETVL is executed
// here: vl = min(AVL, VLMAX) with VLMAX = LMUL * VLEN / 64 and LMUL in
// {1,2,4,8}.  Every other instruction is dispatched, with the current vl and
// LMUL, to its unit (VFU, VLSU or SLDU) as soon as that unit has no
// instruction, or in the very cycle its instruction completes; different
// units run at the same time.  An instruction with
// vl = 0 is accepted and dropped.
//
// Scoreboard.  At dispatch the new instruction is compared with the one
// running in each other unit (all of them are older): read-after-write,
// write-after-read and write-after-write overlaps of register groups are
// recorded.  When both instructions walk the vector word by word (VFU
// element-wise ops, VLSU) with the same vl and every overlap is between
// groups with the same base register, the dependency is chained per VRF
// word: the younger unit may touch word w once the older one has committed
// (RAW, WAW) or read (WAR) word w.  Otherwise it waits until the older
// instruction has finished.  Progress is kept as completion counters of
// committed VRF words: one for the VFU and one per VLSU interface, because
// VLSU0 covers the first and VLSU1 the second half of the vector.  This is
// what lets a VFU instruction chain to VLSU0 for the first half and find the
// second half already written by VLSU1 (and the reverse for stores).  A
// write is counted when the VRF actually commits it, after any shadow
// buffer, and the dependent access is allowed from the next cycle on.
//
// Shadow buffers and priority.  The VFU write path has a buffer of
// VFU_BUF_DEPTH (2) and the VLSU1 write path one of VLSU1_BUF_DEPTH (1).
// The VRF lets VLSU writes go before VFU writes (vlsu_first_o) while the
// VFU buffer has room and the VFU has not lost PRIO_PERIOD write
// arbitrations in a row; then the VFU is first again.
//
// From the paper: the CSRs, the scoreboard as the place of chaining, the
// completion counters and half-vector chaining, buffer depth 2 for the VFU,
// the placement of both buffers here, VLSU-first priority while the VFU
// writes can be buffered, and a limit restoring VFU priority.  This design's
// choices: the instruction format, word-level counters, the alignment rule
// for chaining, PRIO_PERIOD = 4 and a VLSU1 buffer of one entry.
module controller
  import troop_pkg::*;
#(
  parameter int unsigned VFU_BUF_DEPTH   = 2,
  parameter int unsigned VLSU1_BUF_DEPTH = 1,
  parameter int unsigned PRIO_PERIOD     = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // offload port
  input  logic        instr_valid_i,
  output logic        instr_ready_o,
  input  vinstr_t     instr_i,
  // dispatch
  output ex_instr_t   ex_o,
  output logic        vfu_start_o,
  output logic        vlsu_start_o,
  output logic        sldu_start_o,
  input  logic        vfu_busy_i,
  input  logic        vlsu_busy_i,
  input  logic        sldu_busy_i,
  // chaining
  input  logic [WIDX_W-1:0] vfu_word_i,
  output logic              vfu_ok_o,
  input  logic              vfu_rd_fire_i,
  input  logic [VLSU_IFS-1:0][WIDX_W-1:0] vlsu_word_i,
  output logic [VLSU_IFS-1:0]             vlsu_ok_o,
  output logic              sldu_ok_o,
  // unit write paths
  input  vrf_wr_req_t                 vfu_wr_i,
  output logic                        vfu_wr_ready_o,
  input  vrf_wr_req_t [VLSU_IFS-1:0]  vlsu_wr_i,
  output logic        [VLSU_IFS-1:0]  vlsu_wr_ready_o,
  input  vrf_wr_req_t                 sldu_wr_i,
  output logic                        sldu_wr_ready_o,
  // VRF side
  output vrf_wr_req_t [NR_WR-1:0]     vrf_wr_o,
  input  logic        [NR_WR-1:0]     vrf_wr_gnt_i,
  input  logic        [NR_RD-1:0]     vrf_rd_gnt_i,
  output logic                        vlsu_first_o,
  output logic                        idle_o
);
  localparam int unsigned NU = 3;   // VFU, VLSU, SLDU
  localparam int unsigned VBW = $clog2(VFU_BUF_DEPTH + 1);
  localparam int unsigned LBW = $clog2(VLSU1_BUF_DEPTH + 1);

  // ---------------- CSRs ----------------
  logic [VL_W-1:0] vl_q;
  logic [1:0]      lmul_q;

  // ---------------- running instructions ----------------
  logic      [NU-1:0] active_q;
  ex_instr_t [NU-1:0] ins_q;

  typedef struct packed { logic raw, war, waw, chain; } dep_t;
  dep_t [NU-1:0][NU-1:0] dep_q;   // dep_q[younger][older]

  // ---------------- register groups ----------------
  typedef struct packed { logic v; logic [4:0] base; logic [3:0] n; } grp_t;

  function automatic logic [3:0] lmul_regs(ex_instr_t x);
    return 4'(x.grp_words >> 1);
  endfunction

  function automatic grp_t mkgrp(logic v, logic [4:0] b, logic [3:0] n);
    grp_t g; g.v = v; g.base = b; g.n = n; return g;
  endfunction

  // sources: [0] vs1, [1] vs2, [2] vd read
  function automatic grp_t [2:0] srcs(ex_instr_t x);
    grp_t [2:0] s;
    logic [3:0] n;
    n = lmul_regs(x);
    s = '0;
    case (x.op)
      OP_VADD_VV, OP_VMUL_VV: begin s[0] = mkgrp(1, x.vs1, n); s[1] = mkgrp(1, x.vs2, n); end
      OP_VADD_VX, OP_VMUL_VX: s[1] = mkgrp(1, x.vs2, n);
      OP_VMACC_VV: begin s[0] = mkgrp(1, x.vs1, n); s[1] = mkgrp(1, x.vs2, n); s[2] = mkgrp(1, x.vd, n); end
      OP_VMACC_VX: begin s[1] = mkgrp(1, x.vs2, n); s[2] = mkgrp(1, x.vd, n); end
      OP_VREDSUM:  begin s[0] = mkgrp(1, x.vs1, 1); s[1] = mkgrp(1, x.vs2, n); end
      OP_VSE:      s[2] = mkgrp(1, x.vd, n);
      OP_VSLIDEUP, OP_VSLIDEDOWN: s[1] = mkgrp(1, x.vs2, n);
      default: ;
    endcase
    return s;
  endfunction

  function automatic grp_t dst(ex_instr_t x);
    if (x.op == OP_VSE)     return '0;
    if (x.op == OP_VREDSUM) return mkgrp(1, x.vd, 1);
    return mkgrp(1, x.vd, lmul_regs(x));
  endfunction

  function automatic logic overlap(grp_t a, grp_t b);
    return a.v && b.v && (int'(a.base) < int'(b.base) + int'(b.n)) &&
           (int'(b.base) < int'(a.base) + int'(a.n));
  endfunction

  function automatic logic wordwise(op_e op);
    return !(op inside {OP_VREDSUM, OP_VSLIDEUP, OP_VSLIDEDOWN, OP_VSETVL});
  endfunction

  function automatic dep_t hazard(ex_instr_t y, ex_instr_t o);
    dep_t d;
    logic aligned;
    grp_t [2:0] ys, os;
    grp_t yd, od;
    ys = srcs(y); os = srcs(o); yd = dst(y); od = dst(o);
    d = '0;
    aligned = 1'b1;
    for (int i = 0; i < 3; i++) begin
      if (overlap(ys[i], od)) begin d.raw = 1'b1; if (ys[i].base != od.base) aligned = 1'b0; end
      if (overlap(yd, os[i])) begin d.war = 1'b1; if (yd.base != os[i].base) aligned = 1'b0; end
    end
    if (overlap(yd, od)) begin d.waw = 1'b1; if (yd.base != od.base) aligned = 1'b0; end
    d.chain = aligned && wordwise(y.op) && wordwise(o.op) && (y.nwords == o.nwords);
    return d;
  endfunction

  // ---------------- completion counters ----------------
  logic [WCNT_W-1:0] vfu_rd_cnt_q, vfu_wr_cnt_q;
  logic [VLSU_IFS-1:0][WCNT_W-1:0] ls_rd_cnt_q, ls_wr_cnt_q;

  logic [WCNT_W-1:0] ls_half;
  assign ls_half = (ins_q[U_VLSU].nwords + WCNT_W'(1)) >> 1;

  function automatic logic vlsu_done(logic [WIDX_W-1:0] w, logic [WCNT_W-1:0] h,
                                     logic [VLSU_IFS-1:0][WCNT_W-1:0] c);
    if (WCNT_W'(w) < h) return WCNT_W'(w) < c[0];
    return (WCNT_W'(w) - h) < c[1];
  endfunction

  function automatic logic dep_ok(dep_t d, int unsigned older, logic [WIDX_W-1:0] w,
                                  logic [WCNT_W-1:0] frd, logic [WCNT_W-1:0] fwr,
                                  logic [WCNT_W-1:0] h,
                                  logic [VLSU_IFS-1:0][WCNT_W-1:0] lrd,
                                  logic [VLSU_IFS-1:0][WCNT_W-1:0] lwr);
    logic rd_done, wr_done;
    if (!(d.raw || d.war || d.waw)) return 1'b1;
    if (!d.chain) return 1'b0;
    if (older == int'(U_VFU)) begin
      rd_done = WCNT_W'(w) < frd;
      wr_done = WCNT_W'(w) < fwr;
    end else begin
      rd_done = vlsu_done(w, h, lrd);
      wr_done = vlsu_done(w, h, lwr);
    end
    return (!d.raw || wr_done) && (!d.war || rd_done) && (!d.waw || wr_done);
  endfunction

  always_comb begin
    vfu_ok_o = 1'b1;
    for (int v = 0; v < NU; v++)
      if (v != int'(U_VFU))
        vfu_ok_o &= dep_ok(dep_q[U_VFU][v], v, vfu_word_i, vfu_rd_cnt_q, vfu_wr_cnt_q,
                           ls_half, ls_rd_cnt_q, ls_wr_cnt_q);
    for (int c = 0; c < VLSU_IFS; c++) begin
      vlsu_ok_o[c] = 1'b1;
      for (int v = 0; v < NU; v++)
        if (v != int'(U_VLSU))
          vlsu_ok_o[c] &= dep_ok(dep_q[U_VLSU][v], v, vlsu_word_i[c], vfu_rd_cnt_q, vfu_wr_cnt_q,
                                 ls_half, ls_rd_cnt_q, ls_wr_cnt_q);
    end
    sldu_ok_o = 1'b1;
    for (int v = 0; v < NU; v++)
      if (v != int'(U_SLDU))
        sldu_ok_o &= !(dep_q[U_SLDU][v].raw || dep_q[U_SLDU][v].war || dep_q[U_SLDU][v].waw);
  end

  // ---------------- shadow buffers ----------------
  logic [VBW-1:0] vfu_buf_cnt;
  logic [LBW-1:0] ls1_buf_cnt;
  logic           vfu_out_v, ls1_out_v;
  vrf_wr_req_t    vfu_out, ls1_out;

  shadow_buffer #(.DEPTH(VFU_BUF_DEPTH), .T(vrf_wr_req_t)) i_vfu_buf (
    .clk_i, .rst_ni,
    .in_valid_i (vfu_wr_i.valid), .in_ready_o(vfu_wr_ready_o), .in_data_i(vfu_wr_i),
    .out_valid_o(vfu_out_v), .out_ready_i(vrf_wr_gnt_i[WR_VFU]), .out_data_o(vfu_out),
    .count_o    (vfu_buf_cnt)
  );

  shadow_buffer #(.DEPTH(VLSU1_BUF_DEPTH), .T(vrf_wr_req_t)) i_vlsu1_buf (
    .clk_i, .rst_ni,
    .in_valid_i (vlsu_wr_i[1].valid), .in_ready_o(vlsu_wr_ready_o[1]), .in_data_i(vlsu_wr_i[1]),
    .out_valid_o(ls1_out_v), .out_ready_i(vrf_wr_gnt_i[WR_VLSU1]), .out_data_o(ls1_out),
    .count_o    (ls1_buf_cnt)
  );

  always_comb begin
    vrf_wr_o[WR_VFU]         = vfu_out;
    vrf_wr_o[WR_VFU].valid   = vfu_out_v;
    vrf_wr_o[WR_VLSU0]       = vlsu_wr_i[0];
    vrf_wr_o[WR_VLSU1]       = ls1_out;
    vrf_wr_o[WR_VLSU1].valid = ls1_out_v;
    vrf_wr_o[WR_SLDU]        = sldu_wr_i;
  end
  assign vlsu_wr_ready_o[0] = vrf_wr_gnt_i[WR_VLSU0];
  assign sldu_wr_ready_o    = vrf_wr_gnt_i[WR_SLDU];

  // ---------------- dynamic priority ----------------
  logic [$clog2(PRIO_PERIOD+1)-1:0] starve_q;
  assign vlsu_first_o = (vfu_buf_cnt < VBW'(VFU_BUF_DEPTH)) && (int'(starve_q) < PRIO_PERIOD);

  // ---------------- completion and dispatch ----------------
  logic [NU-1:0] done_now;
  always_comb begin
    done_now[U_VFU]  = active_q[U_VFU]  && !vfu_busy_i  && (vfu_buf_cnt == '0);
    done_now[U_VLSU] = active_q[U_VLSU] && !vlsu_busy_i && (ls1_buf_cnt == '0);
    done_now[U_SLDU] = active_q[U_SLDU] && !sldu_busy_i;
  end

  unit_e     tgt;
  ex_instr_t ex;
  logic      fire, tgt_done;
  always_comb begin
    tgt          = unit_of(instr_i.op);
    ex           = '0;
    ex.op        = instr_i.op;
    ex.vd        = instr_i.vd;
    ex.vs1       = instr_i.vs1;
    ex.vs2       = instr_i.vs2;
    ex.scalar    = instr_i.scalar;
    ex.vl        = vl_q;
    ex.nwords    = WCNT_W'((int'(vl_q) + NR_FPU - 1) / NR_FPU);
    ex.grp_words = WCNT_W'(WORDS_PER_REG << lmul_q);
    // a unit finishing in this cycle can take the next instruction at once
    case (tgt)
      U_VFU:   tgt_done = done_now[U_VFU];
      U_VLSU:  tgt_done = done_now[U_VLSU];
      U_SLDU:  tgt_done = done_now[U_SLDU];
      default: tgt_done = 1'b0;
    endcase
    instr_ready_o = (tgt == U_CTRL) || (vl_q == '0) || !active_q[tgt] || tgt_done;
    fire          = instr_valid_i && instr_ready_o;
  end
  assign ex_o         = ex;
  assign vfu_start_o  = fire && (tgt == U_VFU)  && (vl_q != '0);
  assign vlsu_start_o = fire && (tgt == U_VLSU) && (vl_q != '0);
  assign sldu_start_o = fire && (tgt == U_SLDU) && (vl_q != '0);

  logic [NU-1:0] start;
  assign start = {sldu_start_o, vlsu_start_o, vfu_start_o};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      vl_q <= '0; lmul_q <= '0; active_q <= '0; ins_q <= '0; dep_q <= '0;
      vfu_rd_cnt_q <= '0; vfu_wr_cnt_q <= '0; ls_rd_cnt_q <= '0; ls_wr_cnt_q <= '0;
      starve_q <= '0;
    end else begin
      if (fire && tgt == U_CTRL) begin
        automatic int unsigned vlmax = (VLEN / ELEN) << instr_i.lmul_log2;
        lmul_q <= instr_i.lmul_log2;
        vl_q   <= (instr_i.scalar > 64'(vlmax)) ? VL_W'(vlmax) : VL_W'(instr_i.scalar);
      end
      // completion clears the unit and every dependency on it
      for (int u = 0; u < NU; u++)
        if (done_now[u]) begin
          active_q[u] <= 1'b0;
          for (int y = 0; y < NU; y++) dep_q[y][u] <= '0;
        end
      // dispatch records the hazards against the other running units
      for (int u = 0; u < NU; u++)
        if (start[u]) begin
          active_q[u] <= 1'b1;
          ins_q[u]    <= ex;
          for (int o = 0; o < NU; o++)
            dep_q[u][o] <= (o != u && active_q[o] && !done_now[o]) ? hazard(ex, ins_q[o]) : '0;
        end
      // counters
      if (vfu_start_o) begin
        vfu_rd_cnt_q <= '0; vfu_wr_cnt_q <= '0;
      end else begin
        if (vfu_rd_fire_i)          vfu_rd_cnt_q <= vfu_rd_cnt_q + WCNT_W'(1);
        if (vrf_wr_gnt_i[WR_VFU])   vfu_wr_cnt_q <= vfu_wr_cnt_q + WCNT_W'(1);
      end
      if (vlsu_start_o) begin
        ls_rd_cnt_q <= '0; ls_wr_cnt_q <= '0;
      end else begin
        if (vrf_rd_gnt_i[RD_VLSU0]) ls_rd_cnt_q[0] <= ls_rd_cnt_q[0] + WCNT_W'(1);
        if (vrf_rd_gnt_i[RD_VLSU1]) ls_rd_cnt_q[1] <= ls_rd_cnt_q[1] + WCNT_W'(1);
        if (vrf_wr_gnt_i[WR_VLSU0]) ls_wr_cnt_q[0] <= ls_wr_cnt_q[0] + WCNT_W'(1);
        if (vrf_wr_gnt_i[WR_VLSU1]) ls_wr_cnt_q[1] <= ls_wr_cnt_q[1] + WCNT_W'(1);
      end
      // starvation limit of the VLSU-first priority
      if (vrf_wr_o[WR_VFU].valid && !vrf_wr_gnt_i[WR_VFU]) begin
        if (int'(starve_q) < PRIO_PERIOD) starve_q <= starve_q + 1'b1;
      end else begin
        starve_q <= '0;
      end
    end
  end

  assign idle_o = (active_q == '0);

  // offload handshake: the instruction is held until taken
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   instr_valid_i && !instr_ready_o |=> instr_valid_i && $stable(instr_i));
endmodule
