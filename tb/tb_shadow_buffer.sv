// tb_shadow_buffer: random producer and consumer around a depth-2 buffer.
// Checks in-order, loss-free delivery, same-cycle bypass when empty,
// refusal only when full, and the occupancy count against a model queue.
module tb_shadow_buffer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_v = 0, in_r, out_v, out_r = 0;
  logic [15:0] in_d = '0, out_d;
  logic [1:0] cnt;
  int checks = 0, failures = 0;
  logic [15:0] q [$];
  logic [15:0] next = 0;

  shadow_buffer #(.DEPTH(2), .T(logic [15:0])) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_v), .in_ready_o(in_r), .in_data_i(in_d),
    .out_valid_o(out_v), .out_ready_i(out_r), .out_data_o(out_d), .count_o(cnt));

  int bypass = 0;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (!(in_v && !in_r)) begin       // keep a refused input stable
        in_v = $urandom_range(0, 2) != 0;
        if (in_v) begin in_d = next; end
      end
      out_r = $urandom_range(0, 2) != 0;
      #1;
      checks++;
      if (int'(cnt) != q.size()) begin failures++; $display("FAIL count %0d vs %0d", cnt, q.size()); end
      checks++;
      if (in_r !== (q.size() < 2 || out_r)) begin failures++; $display("FAIL ready"); end
      if (out_v && out_r) begin
        logic [15:0] e;
        if (q.size() > 0) e = q[0];
        else begin e = in_d; bypass++; end
        checks++;
        if (out_d !== e) begin failures++; $display("FAIL data %h vs %h", out_d, e); end
      end
      begin
        bit acc_in, acc_out;
        acc_in = in_v && in_r; acc_out = out_v && out_r;
        @(posedge clk);
        if (acc_in) begin q.push_back(in_d); next++; end
        if (acc_out) void'(q.pop_front());
      end
    end
    checks++;
    if (bypass == 0) begin failures++; $display("FAIL: bypass never seen"); end
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
