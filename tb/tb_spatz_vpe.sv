// tb_spatz_vpe: one vector processing element against a reference model.
// The eight TCDM ports of the VPE are served by a behavioural memory of
// 4096 x 64 bit that grants each request with probability 3/4 and answers
// one cycle after the grant, like a TCDM bank.  After loading all 32
// registers, a random program of 400 instructions is issued back to back:
// vsetvl with random AVL and LMUL, unit-stride loads and stores, vadd, vmul
// and vmacc in .vv and .vx form, vredsum, vslideup and vslidedown.  Register
// groups are LMUL-aligned and slides do not overlap source and destination,
// as RVV requires.  The model executes each instruction in program order on
// its own register file and memory, so every hazard the scoreboard chains
// or serialises is exercised.  At the end all registers are stored and the
// whole memory is compared with the model.  Elements at or beyond vl are
// left unchanged (tail undisturbed), as the design does.
// Before the random program, one rate check runs with every memory request
// granted: vle, vle, a vmacc.vv chained to both, vse (LMUL 8).  The vmacc
// must read its 16 words in 16 consecutive cycles.  With the VFU always
// first at the VRF write ports this takes 17 (one bubble where a load write
// loses to a result write in the same bank).
module tb_spatz_vpe;
  import troop_pkg::*;
  localparam int MW = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic iv = 0, ir;
  vinstr_t instr;
  tcdm_req_t [VLSU_PORTS-1:0] req;
  logic      [VLSU_PORTS-1:0] gnt;
  tcdm_rsp_t [VLSU_PORTS-1:0] rsp;
  logic fpu_active, idle;
  int checks = 0, failures = 0;

  spatz_vpe dut (.clk_i(clk), .rst_ni(rst_n), .instr_valid_i(iv), .instr_ready_o(ir),
                 .instr_i(instr), .tcdm_req_o(req), .tcdm_gnt_i(gnt), .tcdm_rsp_i(rsp),
                 .fpu_active_o(fpu_active), .idle_o(idle));

  // ---------------- memory ----------------
  logic [63:0] mem [MW];
  logic [VLSU_PORTS-1:0] gnt_r;
  bit free_mem = 0;    // grant every request (chaining-rate phase)
  always_ff @(negedge clk)
    for (int p = 0; p < VLSU_PORTS; p++) gnt_r[p] <= free_mem || (($urandom % 4) != 0);
  // no request is served before the reset has taken effect
  always_comb for (int p = 0; p < VLSU_PORTS; p++) gnt[p] = rst_n && req[p].valid && gnt_r[p];
  always_ff @(posedge clk) begin
    for (int p = 0; p < VLSU_PORTS; p++) begin
      rsp[p].valid <= gnt[p];
      if (gnt[p]) begin
        if (req[p].we) begin
          for (int b = 0; b < 8; b++)
            if (req[p].be[b]) mem[req[p].addr[14:3]][b*8 +: 8] <= req[p].wdata[b*8 +: 8];
        end else rsp[p].rdata <= mem[req[p].addr[14:3]];
      end
    end
  end

  // ---------------- reference model ----------------
  longint m_mem [MW];
  longint m_vrf [32][8];
  int m_vl = 0, m_lmul = 0;

  function automatic longint rget(int r, int i);   // element i of group based at r
    return m_vrf[r + i / 8][i % 8];
  endfunction
  task automatic rset(int r, int i, longint d);
    m_vrf[r + i / 8][i % 8] = d;
  endtask

  task automatic model(op_e op, int vd, int vs1, int vs2, longint sc, int lm);
    int vlmax;
    longint tmp [64];
    longint acc;
    vlmax = 8 << m_lmul;
    case (op)
      OP_VSETVL: begin m_lmul = lm; m_vl = (sc > (8 << lm)) ? (8 << lm) : int'(sc); end
      OP_VLE: for (int i = 0; i < m_vl; i++) rset(vd, i, m_mem[sc / 8 + i]);
      OP_VSE: for (int i = 0; i < m_vl; i++) m_mem[sc / 8 + i] = rget(vd, i);
      OP_VADD_VV:  for (int i = 0; i < m_vl; i++) rset(vd, i, rget(vs2, i) + rget(vs1, i));
      OP_VADD_VX:  for (int i = 0; i < m_vl; i++) rset(vd, i, rget(vs2, i) + sc);
      OP_VMUL_VV:  for (int i = 0; i < m_vl; i++) rset(vd, i, rget(vs2, i) * rget(vs1, i));
      OP_VMUL_VX:  for (int i = 0; i < m_vl; i++) rset(vd, i, rget(vs2, i) * sc);
      OP_VMACC_VV: for (int i = 0; i < m_vl; i++) rset(vd, i, rget(vs2, i) * rget(vs1, i) + rget(vd, i));
      OP_VMACC_VX: for (int i = 0; i < m_vl; i++) rset(vd, i, rget(vs2, i) * sc + rget(vd, i));
      OP_VREDSUM: if (m_vl > 0) begin
        acc = m_vrf[vs1][0];
        for (int i = 0; i < m_vl; i++) acc += rget(vs2, i);
        m_vrf[vd][0] = acc;
      end
      OP_VSLIDEUP: begin
        for (int i = 0; i < m_vl; i++) tmp[i] = rget(vs2, i);
        for (int i = int'(sc); i < m_vl; i++) rset(vd, i, tmp[i - int'(sc)]);
      end
      OP_VSLIDEDOWN: begin
        for (int i = 0; i < vlmax; i++) tmp[i] = rget(vs2, i);
        for (int i = 0; i < m_vl; i++) rset(vd, i, (i + int'(sc) < vlmax) ? tmp[i + int'(sc)] : 64'd0);
      end
      default: ;
    endcase
  endtask

  task automatic issue(op_e op, int vd, int vs1, int vs2, longint sc, int lm = 0);
    @(negedge clk);
    iv = 1; instr = '0; instr.op = op; instr.vd = 5'(vd); instr.vs1 = 5'(vs1); instr.vs2 = 5'(vs2);
    instr.scalar = sc; instr.lmul_log2 = 2'(lm);
    #1; while (!ir) begin @(negedge clk); #1; end
    @(posedge clk); #1 iv = 0;
    model(op, vd, vs1, vs2, sc, lm);
  endtask

  function automatic int greg(int lm);      // random LMUL-aligned register group base
    return ($urandom % (32 >> lm)) << lm;
  endfunction

  int n_ops [op_e];
  int act_first, act_last, act_cnt, ld2_start, cyc = 0;
  bit watch = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (watch && fpu_active) begin
      if (act_first < 0) act_first = cyc;
      act_last = cyc;
      act_cnt++;
    end
    if (watch && dut.vlsu_start && dut.ex.vd == 5'd8) ld2_start = cyc;
  end
  initial begin
    instr = '0;
    for (int a = 0; a < MW; a++) begin
      mem[a] = {$urandom, $urandom}; m_mem[a] = mem[a];
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    issue(OP_VSETVL, 0, 0, 0, 8, 0);
    for (int r = 0; r < 32; r++) issue(OP_VLE, r, 0, 0, 64'(8 * 8 * r));
    // chaining rate: with free memory a vmacc.vv chained to the second of two
    // loads (LMUL 8, 16 words) reads its 16 words in 16 consecutive cycles:
    // VLSU0 delivers the first half at the VFU's pace, VLSU1 has the second
    // half ready, and VLSU writes win the VRF banks over the VFU writes.
    do @(negedge clk); while (!idle);
    free_mem = 1;
    issue(OP_VSETVL, 0, 0, 0, 64, 3);
    act_first = -1; act_last = -1; act_cnt = 0; watch = 1;
    issue(OP_VLE, 0, 0, 0, 64'(8 * 100));
    issue(OP_VLE, 8, 0, 0, 64'(8 * 300));
    issue(OP_VMACC_VV, 16, 0, 8, 0);
    issue(OP_VSE, 16, 0, 0, 64'(8 * 600));
    do @(negedge clk); while (!idle);
    watch = 0; free_mem = 0;
    checks++;
    if (act_cnt != 16 || act_last - act_first != 15) begin
      failures++;
      $display("FAIL: chained vmacc active %0d cycles over a span of %0d", act_cnt, act_last - act_first + 1);
    end
    $display("chained vmacc: %0d words in %0d cycles, %0d cycles after the second load started",
             act_cnt, act_last - act_first + 1, act_first - ld2_start);
    for (int n = 0; n < 400; n++) begin
      int lm, sel, vd, vs1, vs2, k;
      longint sc;
      lm = m_lmul;
      sel = $urandom % 13;
      vd = greg(lm); vs1 = greg(lm); vs2 = greg(lm);
      sc = longint'($urandom % 1000) - 500;
      case (sel)
        0: begin
          lm = $urandom % 4;
          issue(OP_VSETVL, 0, 0, 0, ($urandom % 5 == 0) ? 64'($urandom % 8) : 64'($urandom % 80), lm);
        end
        1, 2: issue(OP_VLE, vd, 0, 0, 64'(8 * ($urandom % 1900)));
        3:    issue(OP_VSE, vd, 0, 0, 64'(8 * ($urandom % 1900)));
        4:    issue(OP_VADD_VV, vd, vs1, vs2, 0);
        5:    issue(OP_VADD_VX, vd, 0, vs2, sc);
        6:    issue(OP_VMUL_VV, vd, vs1, vs2, 0);
        7:    issue(OP_VMUL_VX, vd, 0, vs2, sc);
        8:    issue(OP_VMACC_VV, vd, vs1, vs2, 0);
        9:    issue(OP_VMACC_VX, vd, 0, vs2, sc);
        10:   issue(OP_VREDSUM, $urandom % 32, $urandom % 32, vs2, 0);
        default: begin
          k = $urandom % 12;
          while (vd == vs2) vd = greg(lm);
          issue((sel == 11) ? OP_VSLIDEUP : OP_VSLIDEDOWN, vd, 0, vs2, 64'(k));
        end
      endcase
      n_ops[instr.op]++;
    end
    // dump every register and compare the whole memory
    issue(OP_VSETVL, 0, 0, 0, 8, 0);
    for (int r = 0; r < 32; r++) issue(OP_VSE, r, 0, 0, 64'(8 * (2048 + 8 * r)));
    do @(negedge clk); while (!idle);
    repeat (4) @(negedge clk);
    for (int a = 0; a < MW; a++) begin
      checks++;
      if (mem[a] !== m_mem[a]) begin
        failures++;
        if (failures < 10) $display("FAIL: word %0d = %h, expected %h", a, mem[a], m_mem[a]);
      end
    end
    foreach (n_ops[o]) begin
      checks++;
      if (n_ops[o] == 0) failures++;
    end
    $display("ops issued: %0d kinds, cycles %0t", n_ops.num(), $time / 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
