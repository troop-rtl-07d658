// tb_sldu: slide-up and slide-down at random offsets, vl and LMUL against a
// VRF model with randomly refused ports.  Checks every element of the
// destination group: moved elements, zeros past VLMAX for slide-down,
// untouched elements below the offset (slide-up) and at or above vl; with
// free ports, three cycles per destination word.
module tb_sldu;
  import troop_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, ok, rgnt, wrdy;
  ex_instr_t ins;
  vrf_rd_req_t rreq;
  logic [VRF_DW-1:0] rdata;
  vrf_wr_req_t wreq;
  int checks = 0, failures = 0;

  sldu dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .instr_i(ins), .busy_o(busy), .ok_i(ok),
    .rd_req_o(rreq), .rd_gnt_i(rgnt), .rd_data_i(rdata), .wr_req_o(wreq), .wr_ready_i(wrdy));

  logic [VRF_DW-1:0] vrfm [VRF_WORDS];
  bit rnd = 0;
  always @(negedge clk) begin
    ok   = rnd ? $urandom_range(0, 3) != 0 : 1'b1;
    rgnt = rnd ? $urandom_range(0, 2) != 0 : 1'b1;
    wrdy = rnd ? $urandom_range(0, 2) != 0 : 1'b1;
  end
  assign rdata = vrfm[rreq.addr];
  always_ff @(posedge clk)
    if (wreq.valid && wrdy)
      for (int i = 0; i < VRF_BE; i++) if (wreq.be[i]) vrfm[wreq.addr][i*8 +: 8] <= wreq.data[i*8 +: 8];

  function automatic longint vel(int vr, int i);
    return vrfm[(vr * 2 + i / 4) % 64][(i % 4) * 64 +: 64];
  endfunction

  initial begin
    for (int w = 0; w < VRF_WORDS; w++) for (int i = 0; i < 4; i++) vrfm[w][i*64 +: 64] = {$urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int lmul, vlmax, vl, k, vd, vs2, cycles;
      bit down;
      longint src [64], old [64], e;
      rnd  = t >= 10;
      lmul = 1 << $urandom_range(0, 3);
      vlmax = 8 * lmul;
      vl   = $urandom_range(1, vlmax);
      k    = (t % 7 == 0) ? 0 : $urandom_range(0, vlmax + 3);
      down = t % 2;
      vs2  = 0; vd = 16;
      for (int i = 0; i < vlmax; i++) begin src[i] = vel(vs2, i); old[i] = vel(vd, i); end
      @(negedge clk);
      ins = '0; ins.op = down ? OP_VSLIDEDOWN : OP_VSLIDEUP; ins.vd = 5'(vd); ins.vs2 = 5'(vs2);
      ins.scalar = 64'(k); ins.vl = VL_W'(vl); ins.nwords = WCNT_W'((vl + 3) / 4);
      ins.grp_words = WCNT_W'(2 * lmul);
      start = 1;
      @(negedge clk); start = 0; cycles = 1;
      while (busy) begin @(negedge clk); cycles++; end
      for (int i = 0; i < vlmax; i++) begin
        if (i >= vl)        e = old[i];
        else if (down)      e = (i + k < vlmax) ? src[i + k] : 0;
        else                e = (i >= k) ? src[i - k] : old[i];
        checks++;
        if (vel(vd, i) !== e) begin
          failures++; $display("FAIL %s k=%0d vl=%0d lmul=%0d el %0d", down ? "down" : "up", k, vl, lmul, i);
        end
      end
      if (!rnd && !(!down && k >= vl)) begin
        checks++;
        if (cycles != 1 + 3 * ((vl + 3) / 4)) begin failures++; $display("FAIL slide time %0d", cycles); end
      end
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
