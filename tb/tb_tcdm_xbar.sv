// tb_tcdm_xbar: 18 random masters on the scrambling crossbar, with bank
// memories modelled here.  Every master keeps its request until granted.
// Checks: a granted request reaches the bank and row given by the
// interleaving and the scrambling rule (computed independently here),
// each bank serves at most one port, read data returns one cycle after the
// grant from the right bank, and no master waits more than NR_PORTS-1
// cycles (round-robin).  A phase where all masters hit one bank checks the
// worst-case wait.
module tb_tcdm_xbar;
  import troop_pkg::*;
  localparam int NP = 18, NB = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tcdm_req_t [NP-1:0] req;
  logic [NP-1:0] gnt;
  tcdm_rsp_t [NP-1:0] rsp;
  logic [NB-1:0] breq, bwe;
  logic [NB-1:0][9:0] baddr;
  logic [NB-1:0][7:0] bbe;
  logic [NB-1:0][63:0] bwd, brd;
  logic [63:0] mem [NB][1024];
  int checks = 0, failures = 0;

  tcdm_xbar #(.NR_PORTS(NP), .NR_BANKS(NB), .SCRAMBLE(1'b1)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .gnt_o(gnt), .rsp_o(rsp),
    .bank_req_o(breq), .bank_we_o(bwe), .bank_addr_o(baddr), .bank_be_o(bbe),
    .bank_wdata_o(bwd), .bank_rdata_i(brd));

  // bank models
  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (breq[b]) begin
        if (bwe[b]) mem[b][baddr[b]] <= bwd[b];
        else        brd[b] <= mem[b][baddr[b]];
      end

  function automatic int exp_bank(logic [31:0] a);
    int w, row, b;
    w = int'(a >> 3);
    b = w % 16;
    row = (w / 16) % 1024;
    if ((row % 4) == 1 || (row % 4) == 2) b = (b + 8) % 16;
    return b;
  endfunction

  logic [63:0] exp_rd [NP];
  bit          exp_v  [NP];
  int          wait_c [NP];
  int          max_wait = 0;
  bit          hot = 0;

  initial begin
    for (int b = 0; b < NB; b++) for (int r = 0; r < 1024; r++) mem[b][r] = {$urandom, $urandom};
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      hot = (n >= 5000);
      // responses of last cycle's grants
      for (int p = 0; p < NP; p++) if (exp_v[p]) begin
        checks++;
        if (!rsp[p].valid || (!req[p].we && rsp[p].rdata !== exp_rd[p])) begin
          failures++; $display("FAIL rsp port %0d", p);
        end
      end
      for (int p = 0; p < NP; p++)
        if (!req[p].valid || exp_v[p]) begin   // new request after a grant
          req[p].valid = $urandom_range(0, 3) != 0 || hot;
          req[p].addr  = hot ? 32'h40 + 32'(p) * 32'h800 : {15'd0, 14'($urandom), 3'b000};
          req[p].we    = $urandom_range(0, 1);
          req[p].be    = 8'hff;
          req[p].wdata = {$urandom, $urandom};
          wait_c[p]    = 0;
        end
      #1;
      for (int b = 0; b < NB; b++) begin
        int c;
        c = 0;
        for (int p = 0; p < NP; p++) if (gnt[p] && exp_bank(req[p].addr) == b) c++;
        checks++;
        if (c > 1 || (c == 1) != breq[b]) begin failures++; $display("FAIL bank %0d count %0d", b, c); end
      end
      for (int p = 0; p < NP; p++) begin
        exp_v[p] = 1'b0;
        if (gnt[p]) begin
          int b;
          b = exp_bank(req[p].addr);
          checks++;
          if (!breq[b] || baddr[b] !== 10'(req[p].addr >> 7) || bwe[b] !== req[p].we ||
              (req[p].we && bwd[b] !== req[p].wdata)) begin
            failures++; $display("FAIL routing port %0d bank %0d", p, b);
          end
          exp_v[p]  = 1'b1;
          exp_rd[p] = mem[b][10'(req[p].addr >> 7)];
          if (req[p].we) mem[b][10'(req[p].addr >> 7)] = req[p].wdata;  // model write ahead
        end else if (req[p].valid) begin
          wait_c[p]++;
          if (wait_c[p] > max_wait) max_wait = wait_c[p];
        end
      end
    end
    checks++;
    if (max_wait > NP - 1 || max_wait < NP - 2) begin
      failures++; $display("FAIL max wait %0d", max_wait);
    end
    $display("max wait %0d cycles", max_wait);
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
