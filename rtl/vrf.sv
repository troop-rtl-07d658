// vrf: vector register file of one Spatz vector unit.
//
// 32 registers of VLEN bits are stored as 64 words of 64F = 256 bit, spread
// over 4 banks (standard layout: linear word 2*vreg + w, bank = word[1:0],
// so every register starts in bank 0 or bank 2).  Each bank has 3 read ports
// and 1 write port.
//
// Read side: six requesters (VFU operands a/b/c, VLSU0, VLSU1, SLDU).  For
// each bank the first three requesters in that order get one of its three
// read ports; a granted read returns its data in the same cycle (the array
// reads combinationally, as a latch array does).  rd_data_o is defined only
// for granted reads.  Because the VFU comes first and needs at most
// three operands, its reads are never refused.
//
// Write side: four requesters (VFU, VLSU0, VLSU1, SLDU), one write per bank
// per cycle, committed at the clock edge after the grant.  The order is
// VFU > VLSU0 > VLSU1 > SLDU, or VLSU0 > VLSU1 > VFU > SLDU while
// vlsu_first_i is set; the controller drives vlsu_first_i (dynamic
// priority, see controller).
//
// From the paper: bank count, width, port counts, layout, VFU-first
// static priority and the dynamic VLSU-first mode.  This design's choices:
// flip-flop storage instead of latches, the order among the non-VFU
// requesters, no reset of the contents.
module vrf
  import troop_pkg::*;
(
  input  logic                         clk_i,
  input  vrf_rd_req_t [NR_RD-1:0]      rd_req_i,
  output logic        [NR_RD-1:0]      rd_gnt_o,
  output logic        [NR_RD-1:0][VRF_DW-1:0] rd_data_o,
  input  vrf_wr_req_t [NR_WR-1:0]      wr_req_i,
  output logic        [NR_WR-1:0]      wr_gnt_o,
  input  logic                         vlsu_first_i
);
  localparam int unsigned BANK_RD_PORTS = 3;

  localparam int unsigned SW = $clog2(BANK_RD_PORTS);

  // per bank: the row each of its read ports reads, and what it returns
  logic [VRF_BANKS-1:0][BANK_RD_PORTS-1:0][VRF_AW-3:0] port_row;
  logic [VRF_BANKS-1:0][BANK_RD_PORTS-1:0][VRF_DW-1:0] port_data;
  logic [NR_RD-1:0][SW-1:0] slot;

  // ---------------- reads ----------------
  always_comb begin
    int unsigned used [VRF_BANKS];
    for (int b = 0; b < VRF_BANKS; b++) used[b] = 0;
    rd_gnt_o = '0;
    port_row = '0;
    slot     = '0;
    for (int r = 0; r < NR_RD; r++) begin
      logic [1:0] b;
      b = vrf_bank(rd_req_i[r].addr);
      if (rd_req_i[r].valid && used[b] < BANK_RD_PORTS) begin
        rd_gnt_o[r]             = 1'b1;
        slot[r]                 = SW'(used[b]);
        port_row[b][used[b]]    = rd_req_i[r].addr[VRF_AW-1:2];
        used[b]                 = used[b] + 1;
      end
    end
  end

  // read data, valid for granted reads only
  always_comb
    for (int r = 0; r < NR_RD; r++)
      rd_data_o[r] = port_data[vrf_bank(rd_req_i[r].addr)][slot[r]];

  // ---------------- writes ----------------
  logic [VRF_BANKS-1:0][NR_WR-1:0] wgnt;
  always_comb begin
    int unsigned order [NR_WR];
    if (vlsu_first_i) order = '{WR_VLSU0, WR_VLSU1, WR_VFU, WR_SLDU};
    else              order = '{WR_VFU, WR_VLSU0, WR_VLSU1, WR_SLDU};
    wgnt = '0;
    for (int b = 0; b < VRF_BANKS; b++) begin
      logic taken;
      taken = 1'b0;
      for (int k = 0; k < NR_WR; k++)
        if (!taken && wr_req_i[order[k]].valid && vrf_bank(wr_req_i[order[k]].addr) == 2'(b)) begin
          wgnt[b][order[k]] = 1'b1;
          taken = 1'b1;
        end
    end
    wr_gnt_o = '0;
    for (int b = 0; b < VRF_BANKS; b++) wr_gnt_o |= wgnt[b];
  end

  for (genvar b = 0; b < VRF_BANKS; b++) begin : g_bank
    logic [VRF_AW-1:0] waddr;
    logic [VRF_BE-1:0] wbe;
    logic [VRF_DW-1:0] wdata;
    logic              wen;
    always_comb begin
      wen = 1'b0; waddr = '0; wbe = '0; wdata = '0;
      for (int w = 0; w < NR_WR; w++)
        if (wgnt[b][w]) begin
          wen = 1'b1; waddr = wr_req_i[w].addr; wbe = wr_req_i[w].be; wdata = wr_req_i[w].data;
        end
    end
    // the bank: ROWS x 256 bit, three read ports, one byte-enabled write port
    logic [VRF_DW-1:0] mem [VRF_ROWS];
    always_ff @(posedge clk_i)
      if (wen)
        for (int i = 0; i < VRF_BE; i++)
          if (wbe[i]) mem[waddr[VRF_AW-1:2]][i*8 +: 8] <= wdata[i*8 +: 8];
    for (genvar k = 0; k < BANK_RD_PORTS; k++) begin : g_port
      assign port_data[b][k] = mem[port_row[b][k]];
    end

    // one write per bank and cycle
    assert property (@(posedge clk_i) $onehot0(wgnt[b]));
  end
endmodule
