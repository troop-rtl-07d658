// tb_controller: the controller with a real VRF behind it and the three
// execution units played by the testbench.
// Checks: vsetvl (vl = min(AVL, VLMAX) for LMUL 1..8), in-order dispatch
// to the right unit and back-pressure while that unit is busy; chaining of
// a VFU instruction to a load, word by word, on the VLSU0 half and then on
// the VLSU1 half, counted only once the write is committed; write-after-read
// chaining of a load behind a VFU read; a reduction that must wait for the
// whole load; the dynamic priority (VLSU first, VFU write parked in its
// shadow buffer without back-pressure, VFU first again when the buffer is
// full, and after PRIO_PERIOD lost arbitrations); the VLSU1 buffer.
module tb_controller;
  import troop_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic iv = 0, ir;
  vinstr_t instr;
  ex_instr_t ex;
  logic vfu_start, vlsu_start, sldu_start;
  logic vfu_busy = 0, vlsu_busy = 0, sldu_busy = 0;
  logic [WIDX_W-1:0] vfu_word = '0;
  logic vfu_ok, vfu_fire = 0, sldu_ok;
  logic [1:0][WIDX_W-1:0] ls_word = '0;
  logic [1:0] ls_ok;
  vrf_wr_req_t vfu_wr = '0, sldu_wr = '0;
  vrf_wr_req_t [1:0] ls_wr = '0;
  logic vfu_wr_rdy, sldu_wr_rdy, vlsu_first, idle;
  logic [1:0] ls_wr_rdy;
  vrf_wr_req_t [NR_WR-1:0] vwr;
  logic [NR_WR-1:0] vgnt;
  vrf_rd_req_t [NR_RD-1:0] vrd = '0;
  logic [NR_RD-1:0] rgnt;
  logic [NR_RD-1:0][VRF_DW-1:0] rdat;
  int checks = 0, failures = 0;

  controller #(.VFU_BUF_DEPTH(2), .VLSU1_BUF_DEPTH(1), .PRIO_PERIOD(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .instr_valid_i(iv), .instr_ready_o(ir), .instr_i(instr),
    .ex_o(ex), .vfu_start_o(vfu_start), .vlsu_start_o(vlsu_start), .sldu_start_o(sldu_start),
    .vfu_busy_i(vfu_busy), .vlsu_busy_i(vlsu_busy), .sldu_busy_i(sldu_busy),
    .vfu_word_i(vfu_word), .vfu_ok_o(vfu_ok), .vfu_rd_fire_i(vfu_fire),
    .vlsu_word_i(ls_word), .vlsu_ok_o(ls_ok), .sldu_ok_o(sldu_ok),
    .vfu_wr_i(vfu_wr), .vfu_wr_ready_o(vfu_wr_rdy), .vlsu_wr_i(ls_wr), .vlsu_wr_ready_o(ls_wr_rdy),
    .sldu_wr_i(sldu_wr), .sldu_wr_ready_o(sldu_wr_rdy),
    .vrf_wr_o(vwr), .vrf_wr_gnt_i(vgnt), .vrf_rd_gnt_i(rgnt), .vlsu_first_o(vlsu_first), .idle_o(idle));

  vrf i_vrf (.clk_i(clk), .rd_req_i(vrd), .rd_gnt_o(rgnt), .rd_data_o(rdat), .wr_req_i(vwr),
             .wr_gnt_o(vgnt), .vlsu_first_i(vlsu_first));

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  // issue one instruction; returns after it was accepted, with the dispatch
  // strobes sampled in the accepting cycle
  logic [2:0] started;
  ex_instr_t  ex_seen;
  task automatic issue(op_e op, int vd, int vs1, int vs2, longint sc, int lm = 0);
    @(negedge clk);
    iv = 1; instr = '0; instr.op = op; instr.vd = 5'(vd); instr.vs1 = 5'(vs1); instr.vs2 = 5'(vs2);
    instr.scalar = sc; instr.lmul_log2 = 2'(lm);
    #1; while (!ir) begin @(negedge clk); #1; end
    started = {sldu_start, vlsu_start, vfu_start}; ex_seen = ex;
    @(posedge clk); #1 iv = 0;
    if (started[0]) vfu_busy = 1;
  endtask

  task automatic wr_word(int ch, int vreg, int w);   // one load write, held until taken
    @(negedge clk);
    ls_wr[ch].valid = 1; ls_wr[ch].addr = vrf_addr(5'(vreg), WIDX_W'(w)); ls_wr[ch].be = '1;
    ls_wr[ch].data = '0;
    #1; while (!ls_wr_rdy[ch]) begin @(negedge clk); #1; end
    @(posedge clk); #1 ls_wr[ch].valid = 0;
  endtask

  initial begin
    instr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- vsetvl ----
    for (int lm = 0; lm < 4; lm++) begin
      issue(OP_VSETVL, 0, 0, 0, 100, lm);
      issue(OP_VLE, 0, 0, 0, 0);
      chk(started == 3'b010, "vle dispatched to VLSU");
      chk(int'(ex_seen.vl) == (8 << lm), "vl = VLMAX");
      chk(int'(ex_seen.nwords) == (2 << lm), "nwords");
      @(negedge clk); vlsu_busy = 0;     // finished at once
      @(negedge clk);
    end
    issue(OP_VSETVL, 0, 0, 0, 5, 0);
    issue(OP_VLE, 0, 0, 0, 0);
    chk(int'(ex_seen.vl) == 5 && int'(ex_seen.nwords) == 2, "vl = AVL");
    @(negedge clk); @(negedge clk);
    // ---- chaining VFU <- load, LMUL 8 ----
    issue(OP_VSETVL, 0, 0, 0, 64, 3);
    issue(OP_VLE, 0, 0, 0, 0);  vlsu_busy = 1;
    issue(OP_VMACC_VV, 16, 0, 8, 0);
    chk(started == 3'b001, "vmacc dispatched to VFU while the load runs");
    @(negedge clk);
    vfu_word = 0; #1 chk(!vfu_ok, "word 0 not yet loaded");
    wr_word(0, 0, 0);                     // VLSU0 commits word 0 at this edge
    #1 chk(vfu_ok, "word 0 readable the cycle after its commit");
    vfu_word = 1; #1 chk(!vfu_ok, "word 1 not yet loaded");
    vfu_word = 8; #1 chk(!vfu_ok, "word 8 (VLSU1 half) not yet loaded");
    wr_word(1, 0, 8);                     // VLSU1 word 8, through its buffer
    #1 chk(vfu_ok, "word 8 readable after VLSU1 commit");
    vfu_word = 9; #1 chk(!vfu_ok, "word 9 not yet loaded");
    // ---- back-pressure on the busy unit ----
    @(negedge clk);
    iv = 1; instr = '0; instr.op = OP_VLE; instr.vd = 5'd24;
    #1 chk(!ir, "second load waits for the busy VLSU");
    @(negedge clk);
    #1 chk(!ir, "still waiting");
    // finish the load; the waiting (independent) load of v24 is then taken
    vlsu_busy = 0;
    #1 chk(ir, "taken in the cycle the VLSU completes");
    @(posedge clk); #1 iv = 0;
    @(negedge clk); @(negedge clk);
    vfu_word = 15; #1 chk(vfu_ok, "all words allowed once the load is done");
    // ---- WAR: load of v0 behind the VFU still reading v0 ----
    issue(OP_VLE, 0, 0, 0, 0); vlsu_busy = 1;
    @(negedge clk);
    ls_word[0] = 0; ls_word[1] = 8;
    #1 chk(!ls_ok[0] && !ls_ok[1], "load waits for the VFU to read the old v0");
    @(negedge clk); vfu_fire = 1; @(negedge clk); vfu_fire = 0;   // VFU read word 0
    #1 chk(ls_ok[0], "load word 0 allowed after the VFU read it");
    chk(!ls_ok[1], "load word 8 still waits");
    // VFU finishes
    vfu_busy = 0; @(negedge clk); @(negedge clk);
    chk(ls_ok[1], "all allowed after the VFU finished");
    // ---- non-chainable: reduction waits for the whole load ----
    issue(OP_VREDSUM, 24, 24, 0, 0);
    chk(started == 3'b001, "reduction dispatched");
    @(negedge clk);
    vfu_word = 0; #1 chk(!vfu_ok, "reduction waits for the load");
    wr_word(0, 0, 0);
    #1 chk(!vfu_ok, "reduction still waits after one word");
    vlsu_busy = 0; @(negedge clk); @(negedge clk);
    chk(vfu_ok, "reduction free after the load");
    vfu_busy = 0; @(negedge clk); @(negedge clk);
    // ---- dynamic priority and the VFU shadow buffer ----
    chk(vlsu_first, "VLSU first when the VFU buffer is empty");
    // VFU and VLSU0 write bank 0 in the same cycles
    @(negedge clk);
    vfu_wr.valid = 1; vfu_wr.addr = 6'd0; vfu_wr.be = '1; vfu_wr.data = 256'h1;
    ls_wr[0].valid = 1; ls_wr[0].addr = 6'd4; ls_wr[0].be = '1;
    #1 chk(vfu_wr_rdy && !vgnt[WR_VFU] && vgnt[WR_VLSU0], "VLSU wins, VFU write buffered");
    @(negedge clk); vfu_wr.data = 256'h2; ls_wr[0].addr = 6'd8;
    #1 chk(vfu_wr_rdy && !vgnt[WR_VFU] && int'(dut.vfu_buf_cnt) == 1, "second VFU write buffered");
    @(negedge clk); vfu_wr.data = 256'h3; ls_wr[0].addr = 6'd12;
    #1 chk(int'(dut.vfu_buf_cnt) == 2 && !vlsu_first, "buffer full: VFU first again");
    chk(vgnt[WR_VFU] && !vgnt[WR_VLSU0], "VFU wins with a full buffer");
    @(negedge clk); vfu_wr.valid = 0; ls_wr[0].valid = 0;
    repeat (4) @(negedge clk);
    chk(int'(dut.vfu_buf_cnt) == 0, "buffer drained in order");
    // ---- starvation limit ----
    @(negedge clk);
    vfu_wr.valid = 1; vfu_wr.addr = 6'd1; vfu_wr.data = 256'h5;
    ls_wr[0].valid = 1; ls_wr[0].addr = 6'd5;
    @(negedge clk); vfu_wr.valid = 0;        // one VFU write parked
    begin
      int lost;
      lost = 1;
      for (int k = 0; k < 10; k++) begin
        ls_wr[0].addr = 6'(5 + 4 * (k % 8));
        #1;
        if (vgnt[WR_VFU]) break;
        lost++;
        @(negedge clk);
      end
      chk(lost == 4, $sformatf("VFU first again after 4 lost arbitrations (lost %0d)", lost));
    end
    @(negedge clk); ls_wr[0].valid = 0;
    // ---- VLSU1 buffer: VLSU0 and VLSU1 on the same bank ----
    @(negedge clk);
    ls_wr[0].valid = 1; ls_wr[0].addr = 6'd16; ls_wr[1].valid = 1; ls_wr[1].addr = 6'd32;
    #1 chk(vgnt[WR_VLSU0] && !vgnt[WR_VLSU1] && ls_wr_rdy[1], "VLSU1 write parked in its buffer");
    @(negedge clk); ls_wr[0].valid = 0; ls_wr[1].valid = 0;
    #1 chk(int'(dut.ls1_buf_cnt) == 1 && vgnt[WR_VLSU1], "VLSU1 buffer drains");
    @(negedge clk); @(negedge clk);
    chk(idle, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
