// vfu: vector functional unit with NR_FPU 64-bit lanes.
//
// One instruction at a time.  Every cycle the unit may read one VRF word
// (NR_FPU elements) of each operand - vs1, vs2 and, for multiply-accumulate,
// vd - through its three VRF read ports, if the controller allows that word
// (rd_ok_i, the chaining check for word rd_word_o).  The word then goes
// through a datapath of LATENCY = 2 cycles (multiply, then add) and a
// one-cycle write-back register, so a word read in cycle t is offered for
// writing in cycle t+3 (the read-to-write latency of 3 the paper describes).
// The write goes to the controller's shadow buffer; when the buffer refuses
// it (wr_ready_i low) the whole pipeline stalls.
//
// Sum reduction: vs2 words are added lane by lane into an accumulator (vs1[0]
// enters lane 0 with the first word); then log2(NR_FPU) = 2 tree steps add
// the lanes, and the sum is written to element 0 of vd.
//
// fpu_active_o is high in every cycle in which the lanes compute on a valid
// word; its duty cycle is the FPU utilisation.  rd_fire_o marks a word read.
//
// From the paper: F lanes of 64 bit, 2-cycle latency plus write-back stage,
// log2-step reduction.  This design's choices: lanes do 64-bit integer
// arithmetic (no IEEE-754 floating point), only 64-bit elements, and the
// stall policy.
module vfu
  import troop_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              start_i,
  input  ex_instr_t         instr_i,
  output logic              busy_o,
  // chaining
  output logic [WIDX_W-1:0] rd_word_o,
  input  logic              rd_ok_i,
  output logic              rd_fire_o,
  // VRF reads: a = vs1, b = vs2, c = vd
  output vrf_rd_req_t [2:0] rd_req_o,
  input  logic        [2:0] rd_gnt_i,
  input  logic        [2:0][VRF_DW-1:0] rd_data_i,
  // VRF write, through the shadow buffer
  output vrf_wr_req_t       wr_req_o,
  input  logic              wr_ready_i,
  output logic              fpu_active_o
);
  typedef logic [NR_FPU-1:0][ELEN-1:0] word_t;

  typedef struct packed {
    logic              valid;
    logic              red;       // reduction partial sum, not written
    logic [VRF_AW-1:0] addr;
    logic [NR_FPU-1:0] emask;
    word_t             x;         // first factor / addend
    word_t             y;         // second factor
    word_t             z;         // accumulate input
  } s1_t;

  typedef struct packed {
    logic              valid;
    logic              red;
    logic [VRF_AW-1:0] addr;
    logic [NR_FPU-1:0] emask;
    word_t             p;
    word_t             z;
  } s2_t;

  typedef struct packed {
    logic              valid;
    logic              red;
    logic [VRF_AW-1:0] addr;
    logic [NR_FPU-1:0] emask;
    word_t             r;
  } wb_t;

  typedef enum logic [1:0] { R_IDLE, R_ACC, R_TREE1, R_TREE2 } red_e;

  ex_instr_t          ins_q;
  logic               active_q;
  logic [WCNT_W-1:0]  rw_q;         // next word to read
  s1_t                s1_q;
  s2_t                s2_q;
  wb_t                wb_q;
  word_t              acc_q;
  red_e               red_q;
  logic [1:0][ELEN-1:0] tree_q;
  logic               red_wr_q;     // reduction result waiting for write
  logic [ELEN-1:0]    red_res_q;

  logic is_red, is_mac, is_vx, is_add;
  always_comb begin
    is_red = ins_q.op == OP_VREDSUM;
    is_mac = ins_q.op inside {OP_VMACC_VV, OP_VMACC_VX};
    is_vx  = ins_q.op inside {OP_VADD_VX, OP_VMUL_VX, OP_VMACC_VX};
    is_add = ins_q.op inside {OP_VADD_VV, OP_VADD_VX, OP_VREDSUM};
  end

  // ---------------- stall and read issue ----------------
  logic stall, want_rd, need_a, need_c, rd_fire;
  logic [WIDX_W-1:0] rw;
  assign rw        = rw_q[WIDX_W-1:0];
  assign stall     = (wb_q.valid && !wb_q.red && !wr_ready_i) || (red_wr_q && !wr_ready_i);
  assign want_rd   = active_q && (rw_q < ins_q.nwords) && !stall;
  assign need_a    = !is_vx && (!is_red || rw_q == 0);
  assign need_c    = is_mac;
  assign rd_word_o = rw;

  always_comb begin
    rd_req_o[0].valid = want_rd && rd_ok_i && need_a;
    rd_req_o[0].addr  = vrf_addr(ins_q.vs1, is_red ? '0 : rw);
    rd_req_o[1].valid = want_rd && rd_ok_i;
    rd_req_o[1].addr  = vrf_addr(ins_q.vs2, rw);
    rd_req_o[2].valid = want_rd && rd_ok_i && need_c;
    rd_req_o[2].addr  = vrf_addr(ins_q.vd, rw);
  end

  assign rd_fire   = want_rd && rd_ok_i && rd_gnt_i[1] &&
                     (!need_a || rd_gnt_i[0]) && (!need_c || rd_gnt_i[2]);
  assign rd_fire_o = rd_fire;

  // element mask of the word being read
  logic [NR_FPU-1:0] emask;
  always_comb
    for (int e = 0; e < NR_FPU; e++)
      emask[e] = (int'(rw) * NR_FPU + e) < int'(ins_q.vl);

  // operand selection into stage 1
  s1_t s1_d;
  always_comb begin
    word_t va, vb, vc, sc;
    va = rd_data_i[0]; vb = rd_data_i[1]; vc = rd_data_i[2];
    for (int e = 0; e < NR_FPU; e++) sc[e] = ins_q.scalar;
    s1_d       = '0;
    s1_d.valid = rd_fire;
    s1_d.red   = is_red;
    s1_d.addr  = vrf_addr(ins_q.vd, rw);
    s1_d.emask = emask;
    if (is_red) begin
      // vs2 word (tail lanes zero) plus vs1[0] on lane 0 of the first word
      for (int e = 0; e < NR_FPU; e++) begin
        s1_d.x[e] = emask[e] ? vb[e] : '0;
        s1_d.y[e] = ELEN'(1);
      end
      s1_d.z = '0;
      if (rw_q == 0) s1_d.z[0] = va[0];
    end else if (is_add) begin
      s1_d.x = vb; s1_d.z = is_vx ? sc : va;
      for (int e = 0; e < NR_FPU; e++) s1_d.y[e] = ELEN'(1);
    end else begin
      s1_d.x = vb; s1_d.y = is_vx ? sc : va; s1_d.z = is_mac ? vc : '0;
    end
  end

  // stage 1 -> 2: multiply (additions multiply by one)
  s2_t s2_d;
  always_comb begin
    s2_d.valid = s1_q.valid;
    s2_d.red   = s1_q.red;
    s2_d.addr  = s1_q.addr;
    s2_d.emask = s1_q.emask;
    s2_d.z     = s1_q.z;
    for (int e = 0; e < NR_FPU; e++)
      s2_d.p[e] = s1_q.x[e] * s1_q.y[e];
  end

  // stage 2 -> write-back: add
  wb_t wb_d;
  always_comb begin
    wb_d.valid = s2_q.valid;
    wb_d.red   = s2_q.red;
    wb_d.addr  = s2_q.addr;
    wb_d.emask = s2_q.emask;
    for (int e = 0; e < NR_FPU; e++) wb_d.r[e] = s2_q.p[e] + s2_q.z[e];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      s1_q <= '0; s2_q <= '0; wb_q <= '0;
    end else if (!stall) begin
      s1_q <= s1_d;
      s2_q <= s2_d;
      wb_q <= wb_d;
    end
  end

  // ---------------- instruction control and reduction ----------------
  logic last_red_word_in_wb;
  assign last_red_word_in_wb = wb_q.valid && wb_q.red && !stall &&
                               (rw_q == ins_q.nwords) && !s1_q.valid && !s2_q.valid;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q  <= 1'b0;
      ins_q     <= '0;
      rw_q      <= '0;
      acc_q     <= '0;
      red_q     <= R_IDLE;
      tree_q    <= '0;
      red_wr_q  <= 1'b0;
      red_res_q <= '0;
    end else begin
      if (start_i) begin
        active_q <= 1'b1;
        ins_q    <= instr_i;
        rw_q     <= '0;
        acc_q    <= '0;
        red_q    <= (instr_i.op == OP_VREDSUM) ? R_ACC : R_IDLE;
      end else begin
        if (rd_fire) rw_q <= rw_q + WCNT_W'(1);
        // lane-wise accumulation of reduction words
        if (wb_q.valid && wb_q.red && !stall)
          for (int e = 0; e < NR_FPU; e++) acc_q[e] <= acc_q[e] + wb_q.r[e];
        case (red_q)
          R_ACC:   if (last_red_word_in_wb) red_q <= R_TREE1;
          R_TREE1: begin   // tree step 1: 4 -> 2
            tree_q[0] <= acc_q[0] + acc_q[1];
            tree_q[1] <= acc_q[2] + acc_q[3];
            red_q     <= R_TREE2;
          end
          R_TREE2: begin   // tree step 2: 2 -> 1
            red_res_q <= tree_q[0] + tree_q[1];
            red_wr_q  <= 1'b1;
            red_q     <= R_IDLE;
          end
          default: ;
        endcase
        if (red_wr_q && wr_ready_i) red_wr_q <= 1'b0;
        // instruction finished when all words are read and the pipeline is empty
        if (active_q && rw_q == ins_q.nwords && !s1_q.valid && !s2_q.valid && !wb_q.valid &&
            red_q == R_IDLE && !red_wr_q)
          active_q <= 1'b0;
      end
    end
  end

  // ---------------- write ----------------
  always_comb begin
    wr_req_o = '0;
    if (red_wr_q) begin
      wr_req_o.valid = 1'b1;
      wr_req_o.addr  = vrf_addr(ins_q.vd, '0);
      wr_req_o.be    = VRF_BE'({8{1'b1}});
      wr_req_o.data  = VRF_DW'(red_res_q);
    end else if (wb_q.valid && !wb_q.red) begin
      wr_req_o.valid = 1'b1;
      wr_req_o.addr  = wb_q.addr;
      for (int e = 0; e < NR_FPU; e++) wr_req_o.be[e*8 +: 8] = {8{wb_q.emask[e]}};
      wr_req_o.data  = wb_q.r;
    end
  end

  assign busy_o       = active_q;
  assign fpu_active_o = s1_q.valid && !stall;

  // the tree and the reduction write never overlap a vector word in write-back
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(red_wr_q && wb_q.valid && !wb_q.red));
endmodule
