// tb_spatz_cluster: end-to-end test of the TROOP Spatz cluster at its
// default sizes.
//
// The testbench plays both scalar cores.  Through the scalar TCDM ports it
// fills the L1 memory with pseudo-random vectors, then sends each vector
// unit a kernel through its offload port, in parallel:
//   CC0: dot product of two N-element vectors (LMUL = 8, chunks of 64
//        elements: vle, vle, vmul/vmacc, then vredsum and a one-element vse);
//   CC1: AXPY y = a*x + y over N elements (vle, vle, vmacc.vx, vse), then
//        a slide-down and a slide-up of the result, stored back.
// Results are read back through the scalar ports and compared with values
// computed here in plain integer arithmetic.  The testbench also counts how
// often each mechanism of the design occurs (shadow buffers holding data,
// the VLSU winning a VRF write conflict, the VFU being first again, chained
// accesses on both halves of a load, both VLSU interfaces writing in one
// cycle, TCDM conflicts, scrambled rows, the reduction tree, slides) and
// counts a failure for any that never occurs.  It prints the FPU
// utilisation of the dot product.
module tb_spatz_cluster;
  import troop_pkg::*;

  localparam int N = 1024;          // elements per vector
  localparam int CHUNK = 64;        // VLMAX at LMUL = 8
  localparam logic [31:0] X0 = 32'h0000_0000, Y0 = 32'h0000_2000, R0 = 32'h0000_7000;
  localparam logic [31:0] X1 = 32'h0000_8000, Y1 = 32'h0000_A000, Z1 = 32'h0000_E000;
  localparam longint A = 64'd7;
  localparam int SLIDE = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      [NR_CC-1:0] instr_valid = '0, instr_ready;
  vinstr_t   [NR_CC-1:0] instr = '0;
  tcdm_req_t [NR_CC-1:0] sreq = '0;
  logic      [NR_CC-1:0] sgnt;
  tcdm_rsp_t [NR_CC-1:0] srsp;
  logic      [NR_CC-1:0] fpu_active, idle;

  spatz_cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .instr_valid_i(instr_valid), .instr_ready_o(instr_ready), .instr_i(instr),
    .scalar_req_i(sreq), .scalar_gnt_o(sgnt), .scalar_rsp_o(srsp),
    .fpu_active_o(fpu_active), .idle_o(idle)
  );

  int checks = 0, failures = 0;
  longint x0 [N], y0 [N], x1 [N], y1 [N];

  // ---------------- scalar-core helpers ----------------
  task automatic mem_write(int c, logic [31:0] a, longint d);
    @(negedge clk);
    sreq[c].valid = 1; sreq[c].we = 1; sreq[c].be = 8'hff; sreq[c].addr = a; sreq[c].wdata = d;
    #1; while (!sgnt[c]) begin @(negedge clk); #1; end
    @(posedge clk); #1 sreq[c].valid = 0;
  endtask

  task automatic mem_read(int c, logic [31:0] a, output longint d);
    @(negedge clk);
    sreq[c].valid = 1; sreq[c].we = 0; sreq[c].be = 8'hff; sreq[c].addr = a;
    #1; while (!sgnt[c]) begin @(negedge clk); #1; end
    @(posedge clk); #1 sreq[c].valid = 0;
    @(negedge clk); d = srsp[c].rdata;
    if (!srsp[c].valid) begin failures++; $display("no response on scalar port %0d", c); end
  endtask

  task automatic issue(int c, op_e op, int vd, int vs1, int vs2, longint sc, int lmul_log2 = 0);
    @(negedge clk);
    instr_valid[c] = 1;
    instr[c].op = op; instr[c].vd = 5'(vd); instr[c].vs1 = 5'(vs1); instr[c].vs2 = 5'(vs2);
    instr[c].scalar = sc; instr[c].lmul_log2 = 2'(lmul_log2);
    #1; while (!instr_ready[c]) begin @(negedge clk); #1; end
    @(posedge clk); #1 instr_valid[c] = 0;
  endtask

  task automatic wait_idle(int c);
    do @(negedge clk); while (!(idle[c] && !instr_valid[c]));
  endtask

  // ---------------- kernels ----------------
  longint cyc = 0, dot_start = 0, dot_end = 0, fpu_cnt0 = 0;
  bit dot_running = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dot_running && fpu_active[0]) fpu_cnt0 <= fpu_cnt0 + 1;
  end

  task automatic run_dotp();
    dot_start = cyc; dot_running = 1;
    issue(0, OP_VSETVL, 0, 0, 0, CHUNK, 3);
    issue(0, OP_VMUL_VX, 24, 0, 24, 0);            // v24 = 0 (reduction seed)
    for (int i = 0; i < N; i += CHUNK) begin
      issue(0, OP_VLE, 0, 0, 0, X0 + i*8);
      issue(0, OP_VLE, 8, 0, 0, Y0 + i*8);
      if (i == 0) issue(0, OP_VMUL_VV, 16, 0, 8, 0);
      else        issue(0, OP_VMACC_VV, 16, 0, 8, 0);
    end
    issue(0, OP_VREDSUM, 24, 24, 16, 0);
    issue(0, OP_VSETVL, 0, 0, 0, 1, 0);
    issue(0, OP_VSE, 24, 0, 0, R0);
    wait_idle(0);
    dot_end = cyc; dot_running = 0;
  endtask

  task automatic run_axpy();
    issue(1, OP_VSETVL, 0, 0, 0, CHUNK, 3);
    for (int i = 0; i < N; i += CHUNK) begin
      issue(1, OP_VLE, 0, 0, 0, X1 + i*8);
      issue(1, OP_VLE, 8, 0, 0, Y1 + i*8);
      issue(1, OP_VMACC_VX, 8, 0, 0, A);
      issue(1, OP_VSE, 8, 0, 0, Y1 + i*8);
    end
    // slides of the last result chunk (still in v8)
    issue(1, OP_VSLIDEDOWN, 16, 0, 8, SLIDE);
    issue(1, OP_VSE, 16, 0, 0, Z1);
    issue(1, OP_VMUL_VX, 24, 0, 24, 0);
    issue(1, OP_VSLIDEUP, 24, 0, 8, SLIDE);
    issue(1, OP_VSE, 24, 0, 0, Z1 + CHUNK*8);
    wait_idle(1);
  endtask

  // ---------------- mechanism counters ----------------
  int ev_vfu_buf, ev_ls1_buf, ev_vlsu_wins, ev_vfu_first, ev_starve, ev_chain_lo, ev_chain_hi,
      ev_chain_st, ev_dual_wr, ev_tcdm_conf, ev_scramble, ev_tree, ev_slide, ev_pipe_stall;

  for (genvar c = 0; c < NR_CC; c++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_cc[c].i_vpe.i_ctrl.vfu_buf_cnt != 0) ev_vfu_buf++;
      if (dut.g_cc[c].i_vpe.i_ctrl.ls1_buf_cnt != 0) ev_ls1_buf++;
      if (dut.g_cc[c].i_vpe.vlsu_first && dut.g_cc[c].i_vpe.wr_req[WR_VFU].valid &&
          !dut.g_cc[c].i_vpe.wr_gnt[WR_VFU]) ev_vlsu_wins++;
      if (!dut.g_cc[c].i_vpe.vlsu_first && dut.g_cc[c].i_vpe.wr_req[WR_VFU].valid &&
          (dut.g_cc[c].i_vpe.wr_req[WR_VLSU0].valid || dut.g_cc[c].i_vpe.wr_req[WR_VLSU1].valid))
        ev_vfu_first++;
      if (int'(dut.g_cc[c].i_vpe.i_ctrl.starve_q) >= 4) ev_starve++;
      if (dut.g_cc[c].i_vpe.vfu_rd_fire && dut.g_cc[c].i_vpe.i_ctrl.dep_q[U_VFU][U_VLSU].raw &&
          dut.g_cc[c].i_vpe.i_ctrl.dep_q[U_VFU][U_VLSU].chain) begin
        if (dut.g_cc[c].i_vpe.vfu_word < dut.g_cc[c].i_vpe.i_ctrl.ls_half) ev_chain_lo++;
        else ev_chain_hi++;
      end
      if ((dut.g_cc[c].i_vpe.rd_gnt[RD_VLSU0] || dut.g_cc[c].i_vpe.rd_gnt[RD_VLSU1]) &&
          dut.g_cc[c].i_vpe.i_ctrl.dep_q[U_VLSU][U_VFU].raw) ev_chain_st++;
      if (dut.g_cc[c].i_vpe.wr_gnt[WR_VLSU0] && dut.g_cc[c].i_vpe.wr_gnt[WR_VLSU1]) ev_dual_wr++;
      if (dut.g_cc[c].i_vpe.i_vfu.red_q == 2'd3) ev_tree++;
      if (dut.g_cc[c].i_vpe.sldu_busy) ev_slide++;
      if (dut.g_cc[c].i_vpe.i_vfu.stall) ev_pipe_stall++;
    end
  end
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < 2*CC_PORTS; p++) begin
      if (dut.req[p].valid && !dut.gnt[p]) ev_tcdm_conf++;
      if (dut.gnt[p] && (dut.req[p].addr[7] ^ dut.req[p].addr[8])) ev_scramble++;
    end

  task automatic need(string name, int cnt);
    checks++;
    $display("  %-34s %0d", name, cnt);
    if (cnt == 0) begin failures++; $display("FAIL: mechanism '%s' never occurred", name); end
  endtask

  // ---------------- main ----------------
  initial begin
    longint d, exp_dot;
    for (int i = 0; i < N; i++) begin
      x0[i] = longint'($urandom_range(0, 2000)) - 1000; y0[i] = longint'($urandom_range(0, 2000)) - 1000;
      x1[i] = longint'($urandom); y1[i] = longint'($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      for (int i = 0; i < N; i++) begin mem_write(0, X0 + i*8, x0[i]); mem_write(0, Y0 + i*8, y0[i]); end
      for (int i = 0; i < N; i++) begin mem_write(1, X1 + i*8, x1[i]); mem_write(1, Y1 + i*8, y1[i]); end
    join
    fork
      run_dotp();
      run_axpy();
    join
    // dot product
    exp_dot = 0;
    for (int i = 0; i < N; i++) exp_dot += x0[i] * y0[i];
    mem_read(0, R0, d);
    checks++;
    if (d !== exp_dot) begin failures++; $display("FAIL dotp: got %0d expected %0d", d, exp_dot); end
    // axpy
    for (int i = 0; i < N; i++) begin
      mem_read(1, Y1 + i*8, d);
      checks++;
      if (d !== A * x1[i] + y1[i]) begin
        failures++;
        if (failures < 10) $display("FAIL axpy[%0d]: got %h expected %h", i, d, A * x1[i] + y1[i]);
      end
    end
    // slides of the first result chunk
    for (int i = 0; i < CHUNK; i++) begin
      longint e;
      int b;
      b = N - CHUNK;   // v8 holds the last chunk
      e = (i + SLIDE < CHUNK) ? A * x1[b+i+SLIDE] + y1[b+i+SLIDE] : 0;
      mem_read(1, Z1 + i*8, d); checks++;
      if (d !== e) begin failures++; $display("FAIL slidedown[%0d]: %h vs %h", i, d, e); end
      e = (i >= SLIDE) ? A * x1[b+i-SLIDE] + y1[b+i-SLIDE] : 0;
      mem_read(1, Z1 + CHUNK*8 + i*8, d); checks++;
      if (d !== e) begin failures++; $display("FAIL slideup[%0d]: %h vs %h", i, d, e); end
    end
    $display("dotp N=%0d: %0d cycles, FPU busy %0d cycles, utilisation %0d%%",
             N, dot_end - dot_start, fpu_cnt0, (fpu_cnt0 * 100) / (dot_end - dot_start));
    // each VRF word is F elements: N/F words of products, plus one group
    // (16 words) for zeroing the seed and one for the reduction
    checks++;
    if (fpu_cnt0 != N / NR_FPU + 2 * 16) begin failures++; $display("FAIL: VFU processed %0d words", fpu_cnt0); end
    $display("mechanisms:");
    need("VFU shadow buffer holds data", ev_vfu_buf);
    need("VLSU1 shadow buffer holds data", ev_ls1_buf);
    need("VLSU wins VRF write conflict", ev_vlsu_wins);
    need("VFU first again (buffer full)", ev_vfu_first);
    need("chained read, VLSU0 half", ev_chain_lo);
    need("chained read, VLSU1 half", ev_chain_hi);
    need("store chained to VFU", ev_chain_st);
    need("both VLSU interfaces write", ev_dual_wr);
    need("TCDM bank conflict", ev_tcdm_conf);
    need("scrambled TCDM row", ev_scramble);
    need("reduction tree step", ev_tree);
    need("slide unit busy", ev_slide);
    $display("  (info) starvation limit reached    %0d", ev_starve);
    $display("  (info) VFU pipeline stalled        %0d", ev_pipe_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
