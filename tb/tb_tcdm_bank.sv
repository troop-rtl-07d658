// tb_tcdm_bank: random reads and byte-enabled writes on one TCDM bank,
// checked against a model array; read data must appear exactly one cycle
// after the request and stay until the next read.
module tb_tcdm_bank;
  localparam int WORDS = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  logic req = 0, we = 0;
  logic [9:0] addr = '0;
  logic [7:0] be = '0;
  logic [63:0] wdata = '0, rdata;
  logic [63:0] model [WORDS];
  int checks = 0, failures = 0;

  tcdm_bank #(.WORDS(WORDS), .DW(64)) dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr),
    .be_i(be), .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    // initialise every row
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk); req = 1; we = 1; be = 8'hff; addr = 10'(i);
      wdata = {$urandom, $urandom}; model[i] = wdata;
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      req = 1; addr = 10'($urandom_range(0, WORDS-1)); we = $urandom_range(0, 1) == 1;
      be = 8'($urandom); wdata = {$urandom, $urandom};
      if (we) begin
        for (int b = 0; b < 8; b++) if (be[b]) model[addr][b*8 +: 8] = wdata[b*8 +: 8];
      end else begin
        logic [63:0] exp;
        exp = model[addr];
        @(negedge clk);
        req = 0;
        checks++;
        if (rdata !== exp) begin failures++; $display("FAIL read %0d: %h vs %h", addr, rdata, exp); end
        @(negedge clk);   // held while idle
        checks++;
        if (rdata !== exp) begin failures++; $display("FAIL hold"); end
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
