// tb_vrf: random traffic on all VRF read and write ports.
// Checks against a model: read data, at most 3 read grants per bank with
// the VFU ports always served and the order VFU a/b/c, VLSU0, VLSU1, SLDU;
// one write grant per bank, the first requester of the active order
// (VFU first, or VLSU0/VLSU1 first while vlsu_first is set); byte enables.
module tb_vrf;
  import troop_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  vrf_rd_req_t [NR_RD-1:0] rd;
  logic [NR_RD-1:0] rg;
  logic [NR_RD-1:0][VRF_DW-1:0] rdat;
  vrf_wr_req_t [NR_WR-1:0] wr;
  logic [NR_WR-1:0] wg;
  logic vf;
  logic [VRF_DW-1:0] model [VRF_WORDS];
  int checks = 0, failures = 0;

  vrf dut (.clk_i(clk), .rd_req_i(rd), .rd_gnt_o(rg), .rd_data_o(rdat), .wr_req_i(wr), .wr_gnt_o(wg),
           .vlsu_first_i(vf));

  function automatic logic [VRF_DW-1:0] rnd();
    logic [VRF_DW-1:0] v;
    for (int i = 0; i < VRF_DW/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    rd = '0; wr = '0; vf = 0;
    // fill
    for (int a = 0; a < VRF_WORDS; a += 4)
      for (int b = 0; b < 4; b++) begin
        @(negedge clk);
        wr = '0; wr[b].valid = 1; wr[b].addr = VRF_AW'(a + b); wr[b].be = '1; wr[b].data = rnd();
        model[a + b] = wr[b].data;
      end
    for (int n = 0; n < 5000; n++) begin
      int used [4];
      int wordr [4];
      @(negedge clk);
      vf = $urandom_range(0, 1);
      for (int r = 0; r < NR_RD; r++) begin
        rd[r].valid = $urandom_range(0, 1);
        rd[r].addr  = VRF_AW'($urandom_range(0, VRF_WORDS-1));
      end
      for (int w = 0; w < NR_WR; w++) begin
        wr[w].valid = $urandom_range(0, 1);
        wr[w].addr  = VRF_AW'($urandom_range(0, VRF_WORDS-1));
        wr[w].be    = {$urandom, $urandom};
        wr[w].data  = rnd();
      end
      #1;
      // reads
      for (int b = 0; b < 4; b++) used[b] = 0;
      for (int r = 0; r < NR_RD; r++) begin
        bit exp_g;
        int b;
        b = int'(rd[r].addr[1:0]);
        exp_g = rd[r].valid && used[b] < 3;
        if (exp_g) used[b]++;
        checks++;
        if (rg[r] !== exp_g) begin failures++; $display("FAIL read grant %0d", r); end
        if (rg[r]) begin
          checks++;
          if (rdat[r] !== model[rd[r].addr]) begin failures++; $display("FAIL read data %0d", r); end
        end
      end
      // writes
      for (int b = 0; b < 4; b++) wordr[b] = -1;
      begin
        int ord [4];
        if (vf) ord = '{1, 2, 0, 3}; else ord = '{0, 1, 2, 3};
        for (int k = 0; k < 4; k++)
          if (wr[ord[k]].valid && wordr[wr[ord[k]].addr[1:0]] < 0) wordr[wr[ord[k]].addr[1:0]] = ord[k];
      end
      for (int w = 0; w < NR_WR; w++) begin
        checks++;
        if (wg[w] !== (wr[w].valid && wordr[wr[w].addr[1:0]] == w)) begin
          failures++; $display("FAIL write grant %0d vf=%0d", w, vf);
        end
        if (wr[w].valid && wordr[wr[w].addr[1:0]] == w)
          for (int i = 0; i < VRF_BE; i++)
            if (wr[w].be[i]) model[wr[w].addr][i*8 +: 8] = wr[w].data[i*8 +: 8];
      end
    end
    @(negedge clk);
    rd = '0; wr = '0;
    // final full readback
    for (int a = 0; a < VRF_WORDS; a++) begin
      rd[0].valid = 1; rd[0].addr = VRF_AW'(a); #1;
      checks++;
      if (rdat[0] !== model[a]) begin failures++; $display("FAIL final %0d", a); end
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
