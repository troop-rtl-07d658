// sldu: slide unit, moves elements between vector registers.
//
// OP_VSLIDEDOWN: vd[i] = vs2[i + k] for i < vl, 0 where i + k >= VLMAX.
// OP_VSLIDEUP:   vd[i] = vs2[i - k] for k <= i < vl; vd[i], i < k, is kept.
// k is the instruction's scalar operand (saturated to 127).
//
// Destination word w needs at most two source words: the one holding source
// element F*w -/+ k and the next.  The unit reads them one after the other
// through its VRF read port and then writes word w with element byte enables
// (read, read, write: three cycles per word when no port is refused).  It
// starts only when the controller reports no hazard with a running
// instruction (ok_i), and is then not chained.
//
// The paper names the unit and says it performs slide and move operations;
// everything about how it does so is this design's.
module sldu
  import troop_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              start_i,
  input  ex_instr_t         instr_i,
  output logic              busy_o,
  input  logic              ok_i,
  output vrf_rd_req_t       rd_req_o,
  input  logic              rd_gnt_i,
  input  logic [VRF_DW-1:0] rd_data_i,
  output vrf_wr_req_t       wr_req_o,
  input  logic              wr_ready_i
);
  typedef logic [NR_FPU-1:0][ELEN-1:0] word_t;
  typedef enum logic [1:0] { S_IDLE, S_RD0, S_RD1, S_WR } state_e;

  state_e            st_q;
  ex_instr_t         ins_q;
  logic [7:0]        k_q;
  logic [WCNT_W-1:0] w_q;
  word_t             lo_q, hi_q;

  // signed element index of the source of element 0 of word w
  logic signed [9:0] src0;
  logic signed [9:0] sw_lo;      // first source word
  logic              down;
  assign down  = ins_q.op == OP_VSLIDEDOWN;
  assign src0  = down ? 10'(int'(w_q) * NR_FPU + int'(k_q)) : 10'(int'(w_q) * NR_FPU - int'(k_q));
  assign sw_lo = src0 >>> $clog2(NR_FPU);

  function automatic logic in_grp(logic signed [9:0] sw, logic [WCNT_W-1:0] gw);
    return (sw >= 0) && (sw < 10'(gw));
  endfunction

  logic signed [9:0] rd_sw;
  assign rd_sw = (st_q == S_RD1) ? sw_lo + 10'sd1 : sw_lo;
  always_comb begin
    rd_req_o.valid = (st_q inside {S_RD0, S_RD1}) && in_grp(rd_sw, ins_q.grp_words);
    rd_req_o.addr  = vrf_addr(ins_q.vs2, WIDX_W'(rd_sw));
  end

  // assemble destination word
  always_comb begin
    logic [2*NR_FPU-1:0][ELEN-1:0] two;
    int off;
    two = {hi_q, lo_q};
    off = int'(src0) - int'(sw_lo) * NR_FPU;   // 0 .. F-1
    wr_req_o       = '0;
    wr_req_o.valid = (st_q == S_WR);
    wr_req_o.addr  = vrf_addr(ins_q.vd, WIDX_W'(w_q));
    for (int e = 0; e < NR_FPU; e++) begin
      int i, s;
      i = int'(w_q) * NR_FPU + e;
      s = int'(src0) + e;
      wr_req_o.data[e*ELEN +: ELEN] = (s >= 0 && s < int'(ins_q.grp_words) * NR_FPU) ? two[off + e] : '0;
      wr_req_o.be[e*8 +: 8] = {8{(i < int'(ins_q.vl)) && (down || i >= int'(k_q))}};
    end
    if (wr_req_o.be == '0) wr_req_o.valid = 1'b0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      st_q <= S_IDLE; ins_q <= '0; k_q <= '0; w_q <= '0; lo_q <= '0; hi_q <= '0;
    end else begin
      case (st_q)
        S_IDLE: if (start_i) begin
          ins_q <= instr_i;
          k_q   <= (instr_i.scalar > 64'd127) ? 8'd127 : instr_i.scalar[7:0];
          w_q   <= '0;
          st_q  <= S_RD0;
        end
        S_RD0: if (ok_i && (!rd_req_o.valid || rd_gnt_i)) begin
          lo_q <= rd_req_o.valid ? rd_data_i : '0;
          st_q <= S_RD1;
        end
        S_RD1: if (!rd_req_o.valid || rd_gnt_i) begin
          hi_q <= rd_req_o.valid ? rd_data_i : '0;
          st_q <= S_WR;
        end
        S_WR: if (wr_ready_i || wr_req_o.be == '0) begin
          if (w_q + 1 == ins_q.nwords) st_q <= S_IDLE;
          else begin
            w_q  <= w_q + WCNT_W'(1);
            st_q <= S_RD0;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o = (st_q != S_IDLE);
endmodule
