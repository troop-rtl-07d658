// tb_vfu: the VFU against a VRF model held here.
// Runs every arithmetic op (add, mul, mac, vector-vector and vector-scalar)
// and the sum reduction at several vl, with the chaining permission rd_ok
// and the write acceptance toggled at random in a second pass.  Checks the
// register contents element by element (tail elements untouched), the
// read-to-write latency of 3 cycles, one word per cycle throughput when
// nothing blocks, and the number of cycles a reduction takes.
module tb_vfu;
  import troop_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, rd_ok, rd_fire, wr_ready, fpu_act;
  ex_instr_t ins;
  logic [WIDX_W-1:0] rd_word;
  vrf_rd_req_t [2:0] rreq;
  logic [2:0] rgnt;
  logic [2:0][VRF_DW-1:0] rdata;
  vrf_wr_req_t wreq;
  int checks = 0, failures = 0;

  vfu dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .instr_i(ins), .busy_o(busy),
    .rd_word_o(rd_word), .rd_ok_i(rd_ok), .rd_fire_o(rd_fire), .rd_req_o(rreq), .rd_gnt_i(rgnt),
    .rd_data_i(rdata), .wr_req_o(wreq), .wr_ready_i(wr_ready), .fpu_active_o(fpu_act));

  logic [VRF_DW-1:0] vrfm [VRF_WORDS];
  longint el [32][8];   // model by register / element (LMUL 1 view)

  always_comb begin
    rgnt = 3'b111;
    for (int i = 0; i < 3; i++) rdata[i] = vrfm[rreq[i].addr];
  end
  always_ff @(posedge clk)
    if (wreq.valid && wr_ready)
      for (int i = 0; i < VRF_BE; i++) if (wreq.be[i]) vrfm[wreq.addr][i*8 +: 8] <= wreq.data[i*8 +: 8];

  function automatic longint get(int reg_base, int i);  // element i of group at reg_base
    int w;
    w = (reg_base * 2 + i / 4) % 64;
    return vrfm[w][(i % 4) * 64 +: 64];
  endfunction

  bit random_mode = 0;
  always @(negedge clk) begin
    rd_ok    = random_mode ? ($urandom_range(0, 3) != 0) : 1'b1;
    wr_ready = random_mode ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  // latency and throughput monitors
  int first_rd, first_wr, n_rd_cycles, last_rd;
  longint cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rd_fire) begin if (first_rd < 0) first_rd = int'(cyc); last_rd = int'(cyc); n_rd_cycles++; end
    if (wreq.valid && wr_ready && first_wr < 0) first_wr = int'(cyc);
  end

  task automatic run(op_e op, int vd, int vs1, int vs2, longint sc, int vl, int lmul);
    longint a [64], b [64], c [64], e [64], sum;
    int nw;
    for (int i = 0; i < vl; i++) begin a[i] = get(vs1, i); b[i] = get(vs2, i); c[i] = get(vd, i); end
    for (int i = vl; i < 64; i++) c[i] = get(vd, i);
    nw = (vl + 3) / 4;
    @(negedge clk);
    ins = '0; ins.op = op; ins.vd = 5'(vd); ins.vs1 = 5'(vs1); ins.vs2 = 5'(vs2); ins.scalar = sc;
    ins.vl = VL_W'(vl); ins.nwords = WCNT_W'(nw); ins.grp_words = WCNT_W'(2 * lmul);
    start = 1;
    first_rd = -1; first_wr = -1; n_rd_cycles = 0;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    for (int i = 0; i < 64; i++) e[i] = c[i];
    sum = a[0];
    for (int i = 0; i < vl; i++) begin
      case (op)
        OP_VADD_VV:  e[i] = b[i] + a[i];
        OP_VADD_VX:  e[i] = b[i] + sc;
        OP_VMUL_VV:  e[i] = b[i] * a[i];
        OP_VMUL_VX:  e[i] = b[i] * sc;
        OP_VMACC_VV: e[i] = a[i] * b[i] + c[i];
        OP_VMACC_VX: e[i] = sc * b[i] + c[i];
        default: sum += b[i];
      endcase
    end
    if (op == OP_VREDSUM) begin
      checks++;
      if (get(vd, 0) !== sum) begin failures++; $display("FAIL redsum vl=%0d: %0d vs %0d", vl, get(vd, 0), sum); end
      for (int i = 1; i < 8; i++) begin
        checks++;
        if (get(vd, i) !== c[i]) begin failures++; $display("FAIL redsum clobbered element %0d", i); end
      end
    end else begin
      for (int i = 0; i < 8 * lmul; i++) begin
        checks++;
        if (get(vd, i) !== e[i]) begin failures++; $display("FAIL %s vl=%0d el %0d: %h vs %h", op.name(), vl, i, get(vd, i), e[i]); end
      end
    end
    if (!random_mode) begin
      if (op != OP_VREDSUM) begin
        checks++;
        if (first_wr - first_rd != 3) begin failures++; $display("FAIL latency %0d", first_wr - first_rd); end
      end
      checks++;
      if (last_rd - first_rd + 1 != nw || n_rd_cycles != nw) begin failures++; $display("FAIL throughput"); end
    end
  endtask

  initial begin
    for (int w = 0; w < VRF_WORDS; w++)
      for (int i = 0; i < 4; i++) vrfm[w][i*64 +: 64] = {$urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      random_mode = pass == 1;
      run(OP_VADD_VV, 16, 0, 8, 0, 64, 8);
      run(OP_VADD_VX, 4, 8, 12, 64'd99, 13, 2);
      run(OP_VMUL_VV, 2, 4, 6, 0, 16, 2);
      run(OP_VMUL_VX, 20, 0, 24, -64'sd3, 30, 4);
      run(OP_VMACC_VV, 24, 8, 16, 0, 64, 8);
      run(OP_VMACC_VX, 3, 5, 7, 64'd12345, 7, 1);
      run(OP_VREDSUM, 30, 31, 8, 0, 64, 8);
      run(OP_VREDSUM, 29, 28, 0, 0, 5, 1);
      run(OP_VREDSUM, 27, 26, 16, 0, 1, 1);
    end
    // reduction: 1 cycle to start, nwords reads, 3 pipeline cycles, 2 tree steps
    begin
      longint t0;
      random_mode = 0;
      @(negedge clk);
      ins = '0; ins.op = OP_VREDSUM; ins.vd = 5'd30; ins.vs1 = 5'd31; ins.vs2 = 5'd0;
      ins.vl = 7'd64; ins.nwords = 5'd16; ins.grp_words = 5'd16;
      start = 1; t0 = cyc;
      @(negedge clk); start = 0;
      while (!(wreq.valid && wr_ready)) @(negedge clk);
      checks++;
      if (cyc - t0 != 1 + 16 + 3 + 2) begin failures++; $display("FAIL reduction time %0d", cyc - t0); end
      $display("reduction of 64 elements: write %0d cycles after start", cyc - t0);
      while (busy) @(negedge clk);
    end
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
