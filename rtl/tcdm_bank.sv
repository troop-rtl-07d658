// tcdm_bank: one bank of the shared L1 TCDM (tightly coupled data memory).
//
// A single-port memory of WORDS x 64 bit (8 KiB by default).  A request in
// cycle t reads or writes row addr_i at the clock edge; read data is
// presented on rdata_o in cycle t+1 and held until the next read.  Writes
// honour the eight byte enables.  The paper specifies bank count, size,
// width and the single-cycle access; the array form (instead of an SRAM
// macro) and the byte enables are choices of this design.  The array is not
// reset, as an SRAM is not.
module tcdm_bank #(
  parameter int unsigned WORDS = 1024,
  parameter int unsigned DW    = 64,
  localparam int unsigned AW   = $clog2(WORDS)
) (
  input  logic            clk_i,
  input  logic            req_i,
  input  logic            we_i,
  input  logic [AW-1:0]   addr_i,
  input  logic [DW/8-1:0] be_i,
  input  logic [DW-1:0]   wdata_i,
  output logic [DW-1:0]   rdata_o
);
  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int i = 0; i < DW/8; i++)
          if (be_i[i]) mem[addr_i][i*8 +: 8] <= wdata_i[i*8 +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
