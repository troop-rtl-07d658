// tb_vlsu: the two-interface VLSU against a TCDM model (grants at random
// or always, response one cycle after the grant) and a VRF model.
// Checks: loaded VRF words and stored memory words at several vl and
// base addresses, tail elements untouched, VLSU0 writing/reading only the
// first ceil(n/2) words and VLSU1 only the rest, both interfaces active in
// the same cycles, and with free ports a 16-word load finishing in
// exactly 10 cycles (start, 8 request cycles, last response written as
// it arrives).
module tb_vlsu;
  import troop_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy;
  ex_instr_t ins;
  logic [1:0][WIDX_W-1:0] word;
  logic [1:0] ok;
  tcdm_req_t [7:0] treq;
  logic [7:0] tgnt;
  tcdm_rsp_t [7:0] trsp;
  vrf_rd_req_t [1:0] rreq;
  logic [1:0] rgnt;
  logic [1:0][VRF_DW-1:0] rdata;
  vrf_wr_req_t [1:0] wreq;
  logic [1:0] wrdy;
  int checks = 0, failures = 0;

  vlsu dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .instr_i(ins), .busy_o(busy),
    .word_o(word), .ok_i(ok), .tcdm_req_o(treq), .tcdm_gnt_i(tgnt), .tcdm_rsp_i(trsp),
    .rd_req_o(rreq), .rd_gnt_i(rgnt), .rd_data_i(rdata), .wr_req_o(wreq), .wr_ready_i(wrdy));

  longint mem [4096];   // 32 KiB model
  logic [VRF_DW-1:0] vrfm [VRF_WORDS];
  bit rnd = 0;

  // random grants, chosen prev_el the clock edge
  always @(negedge clk) begin
    for (int p = 0; p < 8; p++) tgnt[p] = rnd ? $urandom_range(0, 2) != 0 : 1'b1;
    for (int c = 0; c < 2; c++) begin
      wrdy[c] = rnd ? $urandom_range(0, 2) != 0 : 1'b1;
      rgnt[c] = rnd ? $urandom_range(0, 2) != 0 : 1'b1;
      ok[c]   = rnd ? $urandom_range(0, 3) != 0 : 1'b1;
    end
  end
  logic [7:0] gq;
  logic [7:0][63:0] rq;
  always_ff @(posedge clk) begin
    for (int p = 0; p < 8; p++) begin
      gq[p] <= treq[p].valid && tgnt[p];
      rq[p] <= mem[treq[p].addr[14:3]];
      if (treq[p].valid && tgnt[p] && treq[p].we) mem[treq[p].addr[14:3]] <= treq[p].wdata;
    end
    for (int c = 0; c < 2; c++)
      if (wreq[c].valid && wrdy[c])
        for (int i = 0; i < VRF_BE; i++) if (wreq[c].be[i]) vrfm[wreq[c].addr][i*8 +: 8] <= wreq[c].data[i*8 +: 8];
  end
  always_comb
    for (int p = 0; p < 8; p++) begin trsp[p].valid = gq[p]; trsp[p].rdata = rq[p]; end
  always_comb for (int c = 0; c < 2; c++) rdata[c] = vrfm[rreq[c].addr];

  // split monitor
  int half_q, vd_q, both_active;
  always @(posedge clk) if (busy) begin
    for (int c = 0; c < 2; c++) begin
      int w;
      if (wreq[c].valid && wrdy[c]) begin
        w = (int'(wreq[c].addr) - 2 * vd_q + 64) % 64;
        checks++;
        if ((c == 0) != (w < half_q)) begin failures++; $display("FAIL split write ch%0d word %0d", c, w); end
      end
      if (rreq[c].valid && rgnt[c]) begin
        w = (int'(rreq[c].addr) - 2 * vd_q + 64) % 64;
        checks++;
        if ((c == 0) != (w < half_q)) begin failures++; $display("FAIL split read ch%0d word %0d", c, w); end
      end
    end
    if ((treq[3:0] != 0) && (treq[7:4] != 0)) both_active++;
  end

  function automatic longint vel(int vd, int i);
    return vrfm[(vd * 2 + i / 4) % 64][(i % 4) * 64 +: 64];
  endfunction

  task automatic go(op_e op, int vd, logic [31:0] base, int vl, output int cycles);
    int nw;
    nw = (vl + 3) / 4;
    half_q = (nw + 1) / 2; vd_q = vd;
    @(negedge clk);
    ins = '0; ins.op = op; ins.vd = 5'(vd); ins.scalar = 64'(base); ins.vl = VL_W'(vl);
    ins.nwords = WCNT_W'(nw); ins.grp_words = 5'd16;
    start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc;
    for (int i = 0; i < 4096; i++) mem[i] = {$urandom, $urandom};
    for (int w = 0; w < VRF_WORDS; w++) for (int i = 0; i < 4; i++) vrfm[w][i*64 +: 64] = {$urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      rnd = pass == 1;
      for (int t = 0; t < 12; t++) begin
        int vd, vl;
        logic [31:0] base;
        longint prev_el [64];
        vd   = (t * 8) % 32;
        vl   = (t == 0) ? 64 : (t == 1) ? 1 : $urandom_range(1, 64);
        base = 32'($urandom_range(0, 3000)) * 8;
        for (int i = 0; i < 64; i++) prev_el[i] = vel(vd, i);
        go(OP_VLE, vd, base, vl, cyc);
        if (!rnd && vl == 64) begin
          checks++;
          // 1 start cycle, 8 request cycles, the last response written as it arrives
          if (cyc != 8 + 2) begin failures++; $display("FAIL load of 16 words took %0d cycles", cyc); end
          $display("vle of 64 elements: %0d cycles", cyc);
        end
        for (int i = 0; i < 64; i++) begin
          checks++;
          if (vel(vd, i) !== (i < vl ? mem[base/8 + i] : prev_el[i])) begin
            failures++; $display("FAIL load vd=%0d vl=%0d el %0d", vd, vl, i);
          end
        end
        // store it elsewhere and compare
        begin
          logic [31:0] sb;
          longint after [4];
          sb = 32'h6000 + 32'(t) * 32'h200;
          for (int i = 0; i < 4; i++) after[i] = mem[sb/8 + vl + i];
          go(OP_VSE, vd, sb, vl, cyc);
          for (int i = 0; i < vl; i++) begin
            checks++;
            if (mem[sb/8 + i] !== vel(vd, i)) begin failures++; $display("FAIL store el %0d", i); end
          end
          for (int i = 0; i < 4; i++) begin
            checks++;
            if (mem[sb/8 + vl + i] !== after[i]) begin failures++; $display("FAIL store beyond vl"); end
          end
        end
      end
    end
    checks++;
    if (both_active == 0) begin failures++; $display("FAIL: interfaces never active together"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
