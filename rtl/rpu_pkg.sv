// rpu_pkg: constants, instruction encoding and shared types of the Ring
// Processing Unit (RPU) tile.
//
// The RPU is a vector processor for the polynomial (ring) arithmetic of
// lattice-based homomorphic encryption. Its architectural numbers follow the
// published design: 128-bit words, 64 vector registers of 512 elements, a
// 4 MiB vector data memory and a 32 KB scalar data memory, and an instruction
// set of 17 instructions. The binary encoding below, the register-file sizes
// of the scalar side and the number of lanes are this design's own choices.
//
// Instruction word (64 bits), fields from MSB to LSB:
//   op[63:59] rd[58:53] rd2[52:47] ra[46:41] rb[40:35] rc[34:29]
//   rm[28:25] rar[24:21] imm[20:0]
// Vector instructions use rd/rd2/ra/rb/rc as vector register numbers, rm as
// modulus register and rar as address register. Strided transfers take their
// stride from rc. Scalar instructions use rd as the SRF/MRF index.
package rpu_pkg;

  localparam int unsigned W          = 128;  // machine word (bits)
  localparam int unsigned VLEN       = 512;  // elements per vector register
  localparam int unsigned NUM_VREG   = 64;   // vector registers
  localparam int unsigned VREG_BITS  = 6;
  localparam int unsigned REGS_PER_BANK = 4; // registers stacked in one VRF memory
  localparam int unsigned NUM_VBANKS = NUM_VREG / REGS_PER_BANK; // 16 per slice
  localparam int unsigned NUM_SREG   = 64;
  localparam int unsigned NUM_MREG   = 16;
  localparam int unsigned NUM_AREG   = 16;
  localparam int unsigned ADDR_BITS  = 32;   // VDM/SDM word address width
  localparam int unsigned KBITS      = 8;    // width of a modulus bit length
  localparam int unsigned LAWS_LAT   = 5;    // laws_engine latency, all operations

  typedef enum logic [4:0] {
    OP_HALT      = 5'd0,   // end of kernel: wait for the backend to drain
    OP_ASET      = 5'd1,   // ARF[rar] = imm
    OP_SLOAD     = 5'd2,   // rc==0: SRF[rd] = SDM[a]; rc!=0: MRF[rd] = {SDM[a], SDM[a+1]}
    OP_VLOAD     = 5'd3,   // V[rd][e] = VDM[ARF[rar]+imm+e]
    OP_VLOADS    = 5'd4,   // V[rd][e] = VDM[ARF[rar]+imm+rc*e]
    OP_VSTORE    = 5'd5,   // VDM[ARF[rar]+imm+e] = V[ra][e]
    OP_VSTORES   = 5'd6,   // VDM[ARF[rar]+imm+rc*e] = V[ra][e]
    OP_VBCAST    = 5'd7,   // V[rd][e] = SRF[ra]
    OP_VADDMOD   = 5'd8,   // V[rd] = V[ra] + V[rb] mod M[rm]
    OP_VSUBMOD   = 5'd9,   // V[rd] = V[ra] - V[rb] mod M[rm]
    OP_VMULMOD   = 5'd10,  // V[rd] = V[ra] * V[rb] mod M[rm]
    OP_VBFLY     = 5'd11,  // V[rd] = V[ra]+V[rc]*V[rb], V[rd2] = V[ra]-V[rc]*V[rb] mod M[rm]
    OP_VCMP      = 5'd12,  // V[rd][e] = (V[ra][e] < V[rb][e])
    OP_VUNPACKLO = 5'd13,  // V[rd][2i] = V[ra][i], V[rd][2i+1] = V[rb][i], i < VLEN/2
    OP_VUNPACKHI = 5'd14,  // same with i + VLEN/2 as source index
    OP_VPACKLO   = 5'd15,  // V[rd][i] = V[ra][2i], V[rd][VLEN/2+i] = V[rb][2i]
    OP_VPACKHI   = 5'd16   // same with odd source elements 2i+1
  } opcode_t;

  typedef struct packed {
    opcode_t     op;
    logic [5:0]  rd;
    logic [5:0]  rd2;
    logic [5:0]  ra;
    logic [5:0]  rb;
    logic [5:0]  rc;
    logic [3:0]  rm;
    logic [3:0]  rar;
    logic [20:0] imm;
  } instr_t;

  // Operations of the LAWS engine.
  typedef enum logic [2:0] {
    ALU_ADD = 3'd0, ALU_SUB = 3'd1, ALU_MUL = 3'd2, ALU_BFLY = 3'd3,
    ALU_CMP = 3'd4, ALU_PASS = 3'd5
  } alu_op_t;

  // Shuffle modes of the SBAR.
  typedef enum logic [1:0] {
    SH_UNPACKLO = 2'd0, SH_UNPACKHI = 2'd1, SH_PACKLO = 2'd2, SH_PACKHI = 2'd3
  } sh_mode_t;

  // Modulus register: modulus, Barrett constant floor(2^(2k)/q), bit length k.
  typedef struct packed {
    logic [W-1:0]     q;
    logic [W-1:0]     mu;
    logic [KBITS-1:0] k;
  } modulus_t;

  // Compute-queue entry: operands already resolved at dispatch.
  typedef struct packed {
    alu_op_t               op;
    logic [5:0]            rd, rd2, ra, rb, rc;
    modulus_t              m;
    logic [W-1:0]          scalar;   // broadcast value for VBCAST
    logic [NUM_VREG-1:0]   regs;     // busy-board mask to release
  } alu_entry_t;

  // Shuffle-queue entry.
  typedef struct packed {
    sh_mode_t              mode;
    logic [5:0]            rd, ra, rb;
    logic [NUM_VREG-1:0]   regs;
  } sh_entry_t;

  // Load/store-queue entry.
  typedef struct packed {
    logic                  store;
    logic [5:0]            vreg;
    logic [ADDR_BITS-1:0]  base;
    logic [ADDR_BITS-1:0]  stride;
    logic [NUM_VREG-1:0]   regs;
  } ls_entry_t;

  // One VRF access request: register and beat, issued to the bank arbiter.
  typedef struct packed {
    logic       valid;
    logic [5:0] vreg;
    logic [7:0] beat;
  } vrf_req_t;

  // Read/write port numbering at the bank arbiter and the slices.
  localparam int unsigned WP_C0 = 0, WP_C1 = 1, WP_SH = 2, WP_LD = 3, NUM_WP = 4;
  localparam int unsigned RP_CA = 0, RP_CB = 1, RP_CW = 2, RP_S0 = 3, RP_S1 = 4, RP_ST = 5,
                          NUM_RP = 6;

  // Event counters of a tile, for performance monitoring and testing.
  typedef struct packed {
    logic [31:0] hazard_stalls;   // frontend cycles stalled on the busy board
    logic [31:0] queue_stalls;    // frontend cycles stalled on a full queue
    logic [31:0] vrf_conflicts;   // pipeline cycles with a VRF read refused
    logic [31:0] vdm_conflicts;   // load/store cycles with a lane refused by a VDM bank
    logic [31:0] alu_beats;       // beats issued to the LAWS engines
    logic [31:0] overlap_cycles;  // cycles where two or more pipelines were working
  } perf_t;

  function automatic logic [NUM_VREG-1:0] reg_bit(input logic [5:0] r);
    logic [NUM_VREG-1:0] m;
    m = '0;
    m[r] = 1'b1;
    return m;
  endfunction

endpackage
