// slap_pkg: types and constants shared by the split-latency VLIW (SLAP) blocks.
//
// The SLAP machine splits one VLIW program between a scalar Global Program
// Control Unit (GPCU) and vector Compute Units (CUs) that run behind it, joined
// only by FIFOs. Each CU is a SIMD4 unit; a GPCU drives a variable number of CUs,
// so its vector length is 4 x (CUs it owns). The number of GPCUs (2), CUs (8)
// and SIMD lanes per CU (4) follow the paper's example. Everything in the
// instruction encoding below is this design's own choice: the paper runs the
// unchanged object code of an in-house DSP whose ISA it does not publish, so a
// small two-slot VLIW bundle (one scalar slot, one vector slot) stands in for it.
//
// Bundle, 64 bits:  [63:32] scalar slot   [31:0] vector slot
//   slot fields:    [31:28] op  [27:24] d  [23:20] a  [19:16] b  [15:0] imm (signed)
// Scalar ops: rd=d, rs1=a, rs2=b.  Vector ops: vd=d, va=a, vb=b; for VLD/VST the
// field a names the scalar base register and the byte address is s[a]+imm.
package slap_pkg;

  localparam int unsigned XLEN      = 32;            // scalar word and address width
  localparam int unsigned LANES     = 4;             // SIMD lanes per CU (paper: SIMD4)
  localparam int unsigned VLEN      = XLEN * LANES;  // bits per CU vector register
  localparam int unsigned NSREG     = 16;            // scalar registers
  localparam int unsigned NVREG     = 16;            // vector registers per CU

  typedef logic [XLEN-1:0] word_t;
  typedef logic [VLEN-1:0] vec_t;

  typedef enum logic [3:0] {
    S_NOP  = 4'd0,
    S_ADDI = 4'd1,   // rd = rs1 + imm
    S_ADD  = 4'd2,   // rd = rs1 + rs2
    S_SUB  = 4'd3,   // rd = rs1 - rs2
    S_LW   = 4'd4,   // rd = M[rs1 + imm]         (through the GPCU data cache)
    S_SW   = 4'd5,   // M[rs1 + imm] = rs2        (write-through)
    S_BNEZ = 4'd6,   // if (rs1 != 0) pc = pc + imm   (pc counts bundles)
    S_HALT = 4'd7    // stop fetching; GPCU reports done once its CUs drain
  } sop_e;

  typedef enum logic [3:0] {
    V_NOP = 4'd0,
    V_ADD = 4'd1,    // vd = va + vb   lane-wise
    V_SUB = 4'd2,    // vd = va - vb   lane-wise
    V_MUL = 4'd3,    // vd = va * vb   lane-wise, low 32 bits
    V_LD  = 4'd4,    // vd = M[s[a] + imm + 16*rank]   (triangular load)
    V_ST  = 4'd5,    // M[s[a] + imm + 16*rank] = v[d]
    V_FADD = 4'd6,   // vd = va + vb   lane-wise binary32
    V_FSUB = 4'd7,   // vd = va - vb   lane-wise binary32
    V_FMUL = 4'd8    // vd = va * vb   lane-wise binary32
  } vop_e;

  typedef struct packed {
    logic [3:0]  op;
    logic [3:0]  d;
    logic [3:0]  a;
    logic [3:0]  b;
    logic [15:0] imm;
  } slot_t;

  typedef struct packed {
    slot_t s;    // scalar slot
    slot_t v;    // vector slot
  } bundle_t;

  // One request on a memory port. Reads fetch a whole 16-byte beat; writes
  // update the 32-bit words selected by wstrb.
  typedef struct packed {
    logic        we;
    word_t       addr;    // byte address, 16-byte aligned for reads
    vec_t        wdata;
    logic [LANES-1:0] wstrb;
  } mem_req_t;

  // Read response. It carries its address back, so a content-addressed
  // receiver (the CU data memory) can match it against pending entries.
  typedef struct packed {
    word_t addr;
    vec_t  rdata;
  } mem_resp_t;

  // Pushes that a GPCU broadcasts toward the CUs it owns.
  typedef struct packed {
    logic  ins_push;     // vector slot into the instruction queues
    slot_t ins;
    logic  ld_push;      // vector load address (and triangular read request)
    logic  st_push;      // vector store address
    word_t addr;         // base byte address; CU k adds 16*k
  } disp_t;

  function automatic logic [XLEN-1:0] sext16(input logic [15:0] v);
    return {{(XLEN-16){v[15]}}, v};
  endfunction

endpackage
