// tb_kernels: the two memory-bound kernels of the evaluation at their
// evaluated sizes (4096 64-bit elements; gemv 64 x 128), on the full cluster at its default
// parameters.  Both core complexes share each kernel, one half of the vector
// each, as a two-core cluster would run it:
//   dotp: per core 2048 elements in chunks of 64 (LMUL = 8): vle x, vle y,
//         vmacc.vv into an accumulator group, then vredsum and a one-element
//         store of the partial sum; the two partial sums are added here, as
//         the scalar core would.
//   axpy: y = a*x + y, per core 2048 elements: vle x, vle y, vmacc.vx, vse,
//         unrolled by two chunks so that stores and loads interleave.
//   gemv: y = A x with A of 64 x 128 (64 KiB, column by column), each core
//         32 rows: per column a 32-element vle and a vmacc.vx with x[j].
// The four 32 KiB vectors of dotp and axpy fill the whole 128 KiB TCDM;
// gemv reuses it afterwards.  Data is written and
// read through the scalar ports and checked against plain integer
// arithmetic.  For each kernel the testbench reports the cycle count and
// the lane utilisation (cycles in which the lanes of a core compute,
// averaged over both cores, divided by elapsed cycles) and checks them
// against a lower bound of this implementation: these are the integer
// analogues of the floating-point kernels, with the same pipeline depth.
module tb_kernels;
  import troop_pkg::*;

  localparam int N = 4096, H = N / 2, CHUNK = 64;
  localparam logic [31:0] DX = 32'h0_0000, DY = 32'h0_8000;   // dotp x, y
  localparam logic [31:0] AX = 32'h1_0000, AY = 32'h1_8000;   // axpy x, y
  localparam longint A = 64'd3;
  localparam int GR = 64, GC = 128;                           // gemv rows, columns
  localparam logic [31:0] GA = 32'h0_0000, GY = 32'h1_0000;   // gemv A, y
  localparam int MIN_DOT_UTIL = 65, MIN_AXPY_UTIL = 35, MIN_GEMV_UTIL = 55; // percent

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      [NR_CC-1:0] instr_valid = '0, instr_ready;
  vinstr_t   [NR_CC-1:0] instr = '0;
  tcdm_req_t [NR_CC-1:0] sreq = '0;
  logic      [NR_CC-1:0] sgnt;
  tcdm_rsp_t [NR_CC-1:0] srsp;
  logic      [NR_CC-1:0] fpu_active, idle;

  spatz_cluster dut (
    .clk_i(clk), .rst_ni(rst_n),
    .instr_valid_i(instr_valid), .instr_ready_o(instr_ready), .instr_i(instr),
    .scalar_req_i(sreq), .scalar_gnt_o(sgnt), .scalar_rsp_o(srsp),
    .fpu_active_o(fpu_active), .idle_o(idle)
  );

  int checks = 0, failures = 0;
  longint dx [N], dy [N], ax [N], ay [N];
  longint ga [GR*GC], gx [GC];

  task automatic mem_write(int c, logic [31:0] a, longint d);
    @(negedge clk);
    sreq[c].valid = 1; sreq[c].we = 1; sreq[c].be = 8'hff; sreq[c].addr = a; sreq[c].wdata = d;
    #1; while (!sgnt[c]) begin @(negedge clk); #1; end
    @(posedge clk); #1 sreq[c].valid = 0;
  endtask

  task automatic mem_read(int c, logic [31:0] a, output longint d);
    @(negedge clk);
    sreq[c].valid = 1; sreq[c].we = 0; sreq[c].be = 8'hff; sreq[c].addr = a;
    #1; while (!sgnt[c]) begin @(negedge clk); #1; end
    @(posedge clk); #1 sreq[c].valid = 0;
    @(negedge clk); d = srsp[c].rdata;
  endtask

  task automatic issue(int c, op_e op, int vd, int vs1, int vs2, longint sc, int lmul_log2 = 0);
    @(negedge clk);
    instr_valid[c] = 1;
    instr[c].op = op; instr[c].vd = 5'(vd); instr[c].vs1 = 5'(vs1); instr[c].vs2 = 5'(vs2);
    instr[c].scalar = sc; instr[c].lmul_log2 = 2'(lmul_log2);
    #1; while (!instr_ready[c]) begin @(negedge clk); #1; end
    @(posedge clk); #1 instr_valid[c] = 0;
  endtask

  task automatic wait_idle(int c);
    do @(negedge clk); while (!(idle[c] && !instr_valid[c]));
  endtask

  longint cyc = 0, busy = 0;
  bit measuring = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (measuring) busy <= busy + fpu_active[0] + fpu_active[1];
  end

  task automatic dotp(int c);
    logic [31:0] o;
    o = c * H * 8;
    issue(c, OP_VSETVL, 0, 0, 0, CHUNK, 3);
    for (int i = 0; i < H; i += CHUNK) begin
      issue(c, OP_VLE, 0, 0, 0, DX + o + i*8);
      issue(c, OP_VLE, 8, 0, 0, DY + o + i*8);
      if (i == 0) issue(c, OP_VMUL_VV, 16, 0, 8, 0);
      else        issue(c, OP_VMACC_VV, 16, 0, 8, 0);
    end
    issue(c, OP_VMUL_VX, 24, 0, 24, 0);          // v24[0] = 0: reduction seed
    issue(c, OP_VREDSUM, 24, 24, 16, 0);
    issue(c, OP_VSETVL, 0, 0, 0, 1, 0);
    issue(c, OP_VSE, 24, 0, 0, DX + 32'(c * 8)); // x words already consumed
    wait_idle(c);
  endtask

  task automatic axpy(int c);
    logic [31:0] o;
    o = c * H * 8;
    issue(c, OP_VSETVL, 0, 0, 0, CHUNK, 3);
    // unrolled by two: the store of one chunk no longer waits right behind
    // its vmacc, the loads of the next chunk go in between
    for (int i = 0; i < H; i += 2 * CHUNK) begin
      issue(c, OP_VLE, 0, 0, 0, AX + o + i*8);
      issue(c, OP_VLE, 8, 0, 0, AY + o + i*8);
      issue(c, OP_VMACC_VX, 8, 0, 0, A);
      issue(c, OP_VLE, 16, 0, 0, AX + o + (i + CHUNK)*8);
      issue(c, OP_VLE, 24, 0, 0, AY + o + (i + CHUNK)*8);
      issue(c, OP_VSE, 8, 0, 0, AY + o + i*8);
      issue(c, OP_VMACC_VX, 24, 0, 16, A);
      issue(c, OP_VSE, 24, 0, 0, AY + o + (i + CHUNK)*8);
    end
    wait_idle(c);
  endtask

  // gemv y = A x, A of GR x GC stored column by column; core c computes
  // rows 32c .. 32c+31: per column j, vle of its 32-row segment (alternating
  // v0 / v8) and vmacc.vx v16 += segment * x[j] (x[j] is supplied by the
  // scalar core with the instruction)
  task automatic gemv(int c);
    issue(c, OP_VSETVL, 0, 0, 0, GR / 2, 2);
    issue(c, OP_VMUL_VX, 16, 0, 16, 0);          // y = 0
    for (int j = 0; j < GC; j++) begin
      issue(c, OP_VLE, (j % 2) * 8, 0, 0, GA + 32'((j * GR + c * GR / 2) * 8));
      issue(c, OP_VMACC_VX, 16, 0, (j % 2) * 8, gx[j]);
    end
    issue(c, OP_VSE, 16, 0, 0, GY + 32'(c * GR / 2 * 8));
    wait_idle(c);
  endtask

  task automatic report(string name, int n, longint t0, int floor_pct);
    longint cycles;
    int util;
    cycles = cyc - t0;
    util = int'((busy * 100) / (2 * cycles));
    $display("%s N=%0d: %0d cycles, lane utilisation %0d%% (work-bound: %0d cycles)",
             name, n, cycles, util, n / (2 * NR_FPU));
    checks++;
    if (util < floor_pct) begin
      failures++; $display("FAIL: %s utilisation %0d%% below %0d%%", name, util, floor_pct);
    end
  endtask

  initial begin
    longint d, exp_dot, t0;
    for (int i = 0; i < N; i++) begin
      dx[i] = longint'($urandom_range(0, 2000)) - 1000; dy[i] = longint'($urandom_range(0, 2000)) - 1000;
      ax[i] = longint'($urandom); ay[i] = longint'($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      for (int i = 0; i < N; i++) begin mem_write(0, DX + i*8, dx[i]); mem_write(0, AX + i*8, ax[i]); end
      for (int i = 0; i < N; i++) begin mem_write(1, DY + i*8, dy[i]); mem_write(1, AY + i*8, ay[i]); end
    join
    // ---- dotp ----
    t0 = cyc; busy = 0; measuring = 1;
    fork dotp(0); dotp(1); join
    measuring = 0;
    report("dotp", N, t0, MIN_DOT_UTIL);
    exp_dot = 0;
    for (int i = 0; i < N; i++) exp_dot += dx[i] * dy[i];
    begin
      longint p0, p1;
      mem_read(0, DX, p0); mem_read(0, DX + 8, p1);
      checks++;
      if (p0 + p1 !== exp_dot) begin
        failures++; $display("FAIL dotp: got %0d expected %0d", p0 + p1, exp_dot);
      end
    end
    // ---- axpy ----
    t0 = cyc; busy = 0; measuring = 1;
    fork axpy(0); axpy(1); join
    measuring = 0;
    report("axpy", N, t0, MIN_AXPY_UTIL);
    for (int i = 0; i < N; i++) begin
      mem_read(i % 2, AY + i*8, d);
      checks++;
      if (d !== A * ax[i] + ay[i]) begin
        failures++;
        if (failures < 10) $display("FAIL axpy[%0d]: got %0d expected %0d", i, d, A * ax[i] + ay[i]);
      end
    end
    // ---- gemv ----
    for (int i = 0; i < GR*GC; i++) ga[i] = longint'($urandom_range(0, 2000)) - 1000;
    for (int j = 0; j < GC; j++) gx[j] = longint'($urandom_range(0, 2000)) - 1000;
    fork
      for (int i = 0; i < GR*GC; i += 2) mem_write(0, GA + i*8, ga[i]);
      for (int i = 1; i < GR*GC; i += 2) mem_write(1, GA + i*8, ga[i]);
    join
    t0 = cyc; busy = 0; measuring = 1;
    fork gemv(0); gemv(1); join
    measuring = 0;
    report("gemv 64x128", GR * GC, t0, MIN_GEMV_UTIL);
    for (int r = 0; r < GR; r++) begin
      longint e;
      e = 0;
      for (int j = 0; j < GC; j++) e += ga[j * GR + r] * gx[j];
      mem_read(r / (GR / 2), GY + r*8, d);
      checks++;
      if (d !== e) begin
        failures++;
        if (failures < 10) $display("FAIL gemv y[%0d]: got %0d expected %0d", r, d, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
