// shadow_buffer: fall-through FIFO in a unit-to-VRF write path.
//
// TROOP lets the load/store interfaces win VRF write conflicts; the write
// that loses is parked here instead of stalling its producer.  The controller
// places one of DEPTH 2 in the VFU write path and one in the VLSU1 write
// path.  An empty buffer passes the input straight to the output in the same
// cycle, so it costs no latency; a write that is not taken by the VRF is
// stored, and stored writes leave in order.  in_ready_o is low only when the
// buffer is full and the head is not leaving.  count_o is the occupancy
// (drives the dynamic priority).  Valid/ready handshake on both sides: data
// must stay stable while valid is high and ready low.
module shadow_buffer #(
  parameter int unsigned DEPTH = 2,
  parameter type         T     = logic [7:0],
  localparam int unsigned CW   = $clog2(DEPTH + 1),
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          in_valid_i,
  output logic          in_ready_o,
  input  T              in_data_i,
  output logic          out_valid_o,
  input  logic          out_ready_i,
  output T              out_data_o,
  output logic [CW-1:0] count_o
);
  T              mem [DEPTH];
  logic [PW-1:0] rd_q, wr_q;
  logic [CW-1:0] cnt_q;
  logic          push, pop;

  assign count_o     = cnt_q;
  assign out_valid_o = (cnt_q != 0) || in_valid_i;
  assign out_data_o  = (cnt_q != 0) ? mem[rd_q] : in_data_i;
  assign in_ready_o  = (cnt_q < CW'(DEPTH)) || out_ready_i;
  assign pop         = (cnt_q != 0) && out_ready_i;
  // an input that bypasses an empty buffer is not stored
  assign push        = in_valid_i && in_ready_o && !((cnt_q == 0) && out_ready_i);

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (int'(p) == DEPTH-1) ? '0 : p + PW'(1);
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q <= '0; wr_q <= '0; cnt_q <= '0;
    end else begin
      if (push) wr_q <= inc(wr_q);
      if (pop)  rd_q <= inc(rd_q);
      cnt_q <= cnt_q + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk_i) if (push) mem[wr_q] <= in_data_i;

  assert property (@(posedge clk_i) disable iff (!rst_ni) cnt_q <= CW'(DEPTH));
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_data_o));
endmodule
