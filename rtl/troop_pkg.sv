// troop_pkg: types and constants shared by the TROOP Spatz cluster.
//
// The default configuration follows the paper's main design point: F = 4
// 64-bit lanes per vector unit, VLEN = 512 bit, 32 vector registers kept in
// 4 VRF banks of 64F = 256 bit, and a 128 KiB L1 TCDM made of 16 banks of
// 8 KiB, 64 bit wide.  Each vector unit has two load/store interfaces of F
// ports each, so the cluster crossbar sees 2 x (2F + 1) = 18 ports.
//
// The instruction format (vinstr_t) is this design's own decoded format: an
// opcode, three register fields and one 64-bit scalar operand (base address,
// AVL, scalar multiplicand or slide amount).  It is not an RVV encoding.
// Element width is fixed at 64 bit and arithmetic is two's-complement integer.
package troop_pkg;

  // ---------------- vector unit geometry ----------------
  localparam int unsigned NR_FPU      = 4;                    // F
  localparam int unsigned ELEN        = 64;                   // bits per lane
  localparam int unsigned VLEN        = 512;                  // bits per vector register
  localparam int unsigned NR_VREGS    = 32;
  localparam int unsigned VRF_BANKS   = 4;
  localparam int unsigned VRF_DW      = NR_FPU * ELEN;        // 256-bit VRF word
  localparam int unsigned VRF_BE      = VRF_DW / 8;
  localparam int unsigned WORDS_PER_REG = VLEN / VRF_DW;      // 2
  localparam int unsigned VRF_WORDS   = NR_VREGS * WORDS_PER_REG; // 64
  localparam int unsigned VRF_AW      = $clog2(VRF_WORDS);    // 6
  localparam int unsigned VRF_ROWS    = VRF_WORDS / VRF_BANKS; // 16
  localparam int unsigned MAX_LMUL    = 8;
  localparam int unsigned MAX_WORDS   = MAX_LMUL * WORDS_PER_REG; // 16 VRF words per instruction
  localparam int unsigned WIDX_W      = $clog2(MAX_WORDS);    // 4
  localparam int unsigned WCNT_W      = WIDX_W + 1;           // 5
  localparam int unsigned VLMAX_MAX   = MAX_LMUL * VLEN / ELEN; // 64 elements
  localparam int unsigned VL_W        = $clog2(VLMAX_MAX) + 1;  // 7

  // ---------------- L1 TCDM ----------------
  localparam int unsigned TCDM_BANKS      = 16;
  localparam int unsigned TCDM_BANK_WORDS = 1024;             // 8 KiB / 8 B
  localparam int unsigned TCDM_ROW_W      = $clog2(TCDM_BANK_WORDS); // 10
  localparam int unsigned TCDM_BANK_W     = $clog2(TCDM_BANKS);      // 4
  localparam int unsigned ADDR_W          = 32;
  localparam int unsigned VLSU_IFS        = 2;                // VLSU0, VLSU1
  localparam int unsigned PORTS_PER_IF    = NR_FPU;
  localparam int unsigned VLSU_PORTS      = VLSU_IFS * PORTS_PER_IF; // 8
  localparam int unsigned CC_PORTS        = VLSU_PORTS + 1;   // + scalar port = 9
  localparam int unsigned NR_CC           = 2;

  // ---------------- TCDM port bundle ----------------
  typedef struct packed {
    logic              valid;
    logic [ADDR_W-1:0] addr;   // byte address, 8-byte aligned
    logic              we;
    logic [7:0]        be;
    logic [63:0]       wdata;
  } tcdm_req_t;

  typedef struct packed {
    logic        valid;        // one cycle after the grant
    logic [63:0] rdata;
  } tcdm_rsp_t;

  // ---------------- VRF port bundles ----------------
  typedef struct packed {
    logic              valid;
    logic [VRF_AW-1:0] addr;   // linear VRF word address
  } vrf_rd_req_t;

  typedef struct packed {
    logic              valid;
    logic [VRF_AW-1:0] addr;
    logic [VRF_BE-1:0] be;
    logic [VRF_DW-1:0] data;
  } vrf_wr_req_t;

  // VRF requester indices
  localparam int unsigned RD_VFU_A = 0, RD_VFU_B = 1, RD_VFU_C = 2,
                          RD_VLSU0 = 3, RD_VLSU1 = 4, RD_SLDU = 5, NR_RD = 6;
  localparam int unsigned WR_VFU = 0, WR_VLSU0 = 1, WR_VLSU1 = 2, WR_SLDU = 3, NR_WR = 4;

  // ---------------- instructions ----------------
  typedef enum logic [3:0] {
    OP_VSETVL,     // vl = min(scalar, VLMAX(lmul))
    OP_VLE,        // vd <- mem[scalar ...], unit stride
    OP_VSE,        // mem[scalar ...] <- vd, unit stride
    OP_VADD_VV,    // vd = vs2 + vs1
    OP_VADD_VX,    // vd = vs2 + scalar
    OP_VMUL_VV,    // vd = vs2 * vs1
    OP_VMUL_VX,    // vd = vs2 * scalar
    OP_VMACC_VV,   // vd = vs1 * vs2 + vd
    OP_VMACC_VX,   // vd = scalar * vs2 + vd
    OP_VREDSUM,    // vd[0] = vs1[0] + sum(vs2[0..vl-1])
    OP_VSLIDEUP,   // vd[i] = vs2[i-scalar], i >= scalar
    OP_VSLIDEDOWN  // vd[i] = vs2[i+scalar] (0 beyond VLMAX)
  } op_e;

  typedef struct packed {
    op_e         op;
    logic [4:0]  vd;
    logic [4:0]  vs1;
    logic [4:0]  vs2;
    logic [1:0]  lmul_log2;  // for OP_VSETVL: LMUL = 1,2,4,8
    logic [63:0] scalar;
  } vinstr_t;

  // instruction as handed to an execution unit, with the CSR state applied
  typedef struct packed {
    op_e               op;
    logic [4:0]        vd;
    logic [4:0]        vs1;
    logic [4:0]        vs2;
    logic [63:0]       scalar;
    logic [VL_W-1:0]   vl;
    logic [WCNT_W-1:0] nwords;     // ceil(vl / F)
    logic [WCNT_W-1:0] grp_words;  // VRF words of one register group (LMUL * 2)
  } ex_instr_t;

  typedef enum logic [1:0] { U_VFU = 2'd0, U_VLSU = 2'd1, U_SLDU = 2'd2, U_CTRL = 2'd3 } unit_e;

  function automatic unit_e unit_of(op_e op);
    case (op)
      OP_VSETVL:                 return U_CTRL;
      OP_VLE, OP_VSE:            return U_VLSU;
      OP_VSLIDEUP, OP_VSLIDEDOWN: return U_SLDU;
      default:                   return U_VFU;
    endcase
  endfunction

  // Standard VRF layout: word w of register group starting at vreg sits at
  // linear word 2*vreg + w; bank = low two bits, so every register starts in
  // bank 0 or bank 2.
  function automatic logic [VRF_AW-1:0] vrf_addr(logic [4:0] vreg, logic [WIDX_W-1:0] w);
    return VRF_AW'({vreg, 1'b0}) + VRF_AW'(w);
  endfunction

  function automatic logic [1:0] vrf_bank(logic [VRF_AW-1:0] a);
    return a[1:0];
  endfunction

  // TCDM address map: 8-byte words interleaved over the 16 banks.  With
  // scrambling, rows 1 and 2 of every group of four rows are rotated by
  // 8 banks (bank XOR 8).
  function automatic logic [TCDM_BANK_W-1:0] tcdm_bank_of(logic [ADDR_W-1:0] a, logic scramble);
    logic [TCDM_BANK_W-1:0] b;
    logic [TCDM_ROW_W-1:0]  r;
    b = a[3 +: TCDM_BANK_W];
    r = a[3+TCDM_BANK_W +: TCDM_ROW_W];
    if (scramble && (r[0] ^ r[1])) b = b ^ TCDM_BANK_W'(TCDM_BANKS/2);
    return b;
  endfunction

  function automatic logic [TCDM_ROW_W-1:0] tcdm_row_of(logic [ADDR_W-1:0] a);
    return a[3+TCDM_BANK_W +: TCDM_ROW_W];
  endfunction

endpackage
