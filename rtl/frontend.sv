// frontend: instruction memory, in-order fetch/decode, hazard check with the
// busy board, and dispatch into the three decoupled instruction queues.
//
// A kernel is started by the controlling core with a one-cycle `start` and
// the instruction-memory address of its first instruction (start_pc). The
// frontend then fetches and decodes one instruction per cycle, in order:
//  - vector instructions: their register mask is compared with the busy
//    board; on any overlap, or if the target queue is full, the whole
//    frontend stalls. Otherwise the instruction is pushed into the
//    load/store, compute or shuffle queue and its registers marked busy.
//    Scalar operands (address base from the ARF, modulus from the MRF,
//    broadcast value from the SRF) are read now and travel in the queue
//    entry, so later scalar writes cannot disturb queued instructions.
//  - ASET and SLOAD go to the scalar backend in order; the frontend waits
//    while it is busy.
//  - HALT waits until the busy board is empty (every dispatched instruction
//    has finished), then pulses `done` and returns to idle.
// The instruction memory is written by the host (imem_we) and read
// synchronously: ir is the word at fpc, valid one cycle after a jump.
// The queues, the busy board and the queue pop handshake follow the
// published frontend; the entry formats and queue depth are this design's.
// A stride comes from the 6-bit rc field, so the upper bits of the stride
// in a load/store entry are always zero.
module frontend
  import rpu_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 4096,
  parameter int unsigned QDEPTH     = 4,
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // control from the RISC-V core
  input  logic                 start,
  input  logic [IAW-1:0]       start_pc,
  output logic                 done,
  output logic                 running,
  // program load
  input  logic                 imem_we,
  input  logic [IAW-1:0]       imem_waddr,
  input  logic [63:0]          imem_wdata,
  // scalar backend
  output logic                 sc_cmd_valid,
  output logic [1:0]           sc_cmd_op,
  output logic [5:0]           sc_cmd_reg,
  output logic [ADDR_BITS-1:0] sc_cmd_addr,
  input  logic                 sc_busy,
  output logic [5:0]           srf_idx,
  input  logic [W-1:0]         srf_val,
  output logic [3:0]           mrf_idx,
  input  modulus_t             mrf_val,
  output logic [3:0]           arf_idx,
  input  logic [ADDR_BITS-1:0] arf_val,
  // queue heads to the backend pipelines
  output ls_entry_t            ls_head,
  output logic                 ls_empty,
  input  logic                 ls_pop,
  output alu_entry_t           alu_head,
  output logic                 alu_empty,
  input  logic                 alu_pop,
  output sh_entry_t            sh_head,
  output logic                 sh_empty,
  input  logic                 sh_pop,
  // register releases from the pipelines
  input  logic [NUM_VREG-1:0]  rel_ls,
  input  logic [NUM_VREG-1:0]  rel_alu,
  input  logic [NUM_VREG-1:0]  rel_sh,
  // events, for performance counting
  output logic                 ev_hazard_stall,
  output logic                 ev_queue_stall
);
  typedef enum logic [2:0] { C_HALT, C_SCALAR, C_LS, C_ALU, C_SH, C_BAD } iclass_t;

  logic [63:0]         imem [IMEM_DEPTH];
  logic [63:0]         imem_rdata;
  logic [IAW-1:0]      fpc, raddr;
  logic                run_q, ir_valid;
  instr_t              ir;
  iclass_t             cls;
  logic [NUM_VREG-1:0] regs, busy, set_mask;
  logic                hazard, qfull, fire, halt_done;
  logic                ls_push, alu_push, sh_push, ls_full, alu_full, sh_full;
  ls_entry_t           ls_din;
  alu_entry_t          alu_din;
  sh_entry_t           sh_din;

  assign ir = instr_t'(imem_rdata);

  // decode
  always_comb begin
    regs = '0;
    cls  = C_BAD;
    unique case (ir.op)
      OP_HALT:                  cls = C_HALT;
      OP_ASET, OP_SLOAD:        cls = C_SCALAR;
      OP_VLOAD, OP_VLOADS:      begin cls = C_LS; regs = reg_bit(ir.rd); end
      OP_VSTORE, OP_VSTORES:    begin cls = C_LS; regs = reg_bit(ir.ra); end
      OP_VBCAST:                begin cls = C_ALU; regs = reg_bit(ir.rd); end
      OP_VADDMOD, OP_VSUBMOD, OP_VMULMOD, OP_VCMP:
        begin cls = C_ALU; regs = reg_bit(ir.rd) | reg_bit(ir.ra) | reg_bit(ir.rb); end
      OP_VBFLY:
        begin
          cls  = C_ALU;
          regs = reg_bit(ir.rd) | reg_bit(ir.rd2) | reg_bit(ir.ra) | reg_bit(ir.rb) | reg_bit(ir.rc);
        end
      OP_VUNPACKLO, OP_VUNPACKHI, OP_VPACKLO, OP_VPACKHI:
        begin cls = C_SH; regs = reg_bit(ir.rd) | reg_bit(ir.ra) | reg_bit(ir.rb); end
      default: cls = C_BAD;
    endcase
  end

  assign srf_idx = ir.ra;
  assign mrf_idx = ir.rm;
  assign arf_idx = ir.rar;

  always_comb begin
    ls_din = '{store:  (ir.op == OP_VSTORE || ir.op == OP_VSTORES),
               vreg:   (ir.op == OP_VSTORE || ir.op == OP_VSTORES) ? ir.ra : ir.rd,
               base:   arf_val + ADDR_BITS'(ir.imm),
               stride: (ir.op == OP_VLOADS || ir.op == OP_VSTORES) ? ADDR_BITS'(ir.rc)
                                                                  : ADDR_BITS'(1),
               regs:   regs};
    alu_din.rd = ir.rd; alu_din.rd2 = ir.rd2; alu_din.ra = ir.ra;
    alu_din.rb = ir.rb; alu_din.rc = ir.rc;
    alu_din.m = mrf_val; alu_din.scalar = srf_val; alu_din.regs = regs;
    unique case (ir.op)
      OP_VADDMOD: alu_din.op = ALU_ADD;
      OP_VSUBMOD: alu_din.op = ALU_SUB;
      OP_VMULMOD: alu_din.op = ALU_MUL;
      OP_VBFLY:   alu_din.op = ALU_BFLY;
      OP_VCMP:    alu_din.op = ALU_CMP;
      default:    alu_din.op = ALU_PASS;   // VBCAST
    endcase
    unique case (ir.op)
      OP_VUNPACKLO: sh_din.mode = SH_UNPACKLO;
      OP_VUNPACKHI: sh_din.mode = SH_UNPACKHI;
      OP_VPACKLO:   sh_din.mode = SH_PACKLO;
      default:      sh_din.mode = SH_PACKHI;
    endcase
    sh_din.rd = ir.rd; sh_din.ra = ir.ra; sh_din.rb = ir.rb; sh_din.regs = regs;
  end

  // issue
  assign hazard = |(regs & busy);
  always_comb begin
    unique case (cls)
      C_LS:    qfull = ls_full;
      C_ALU:   qfull = alu_full;
      C_SH:    qfull = sh_full;
      default: qfull = 1'b0;
    endcase
  end

  wire active = run_q && ir_valid && !sc_busy;
  assign halt_done = active && cls == C_HALT && busy == '0;
  always_comb begin
    fire = 1'b0;
    if (active) begin
      unique case (cls)
        C_HALT:            fire = 1'b0;
        C_SCALAR, C_BAD:   fire = 1'b1;    // an undefined opcode is skipped
        default:           fire = !hazard && !qfull;
      endcase
    end
  end

  assign ls_push  = fire && cls == C_LS;
  assign alu_push = fire && cls == C_ALU;
  assign sh_push  = fire && cls == C_SH;
  assign set_mask = (ls_push || alu_push || sh_push) ? regs : '0;

  assign sc_cmd_valid = fire && cls == C_SCALAR;
  assign sc_cmd_op    = (ir.op == OP_ASET) ? 2'd0 : (ir.rc != '0) ? 2'd2 : 2'd1;
  assign sc_cmd_reg   = (ir.op == OP_ASET) ? 6'(ir.rar) : ir.rd;
  assign sc_cmd_addr  = (ir.op == OP_ASET) ? ADDR_BITS'(ir.imm) : arf_val + ADDR_BITS'(ir.imm);

  assign ev_hazard_stall = active && (cls == C_LS || cls == C_ALU || cls == C_SH) && hazard;
  assign ev_queue_stall  = active && (cls == C_LS || cls == C_ALU || cls == C_SH) && !hazard && qfull;

  // fetch
  assign raddr = fire ? fpc + 1'b1 : fpc;
  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_waddr] <= imem_wdata;
    imem_rdata <= imem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q    <= 1'b0;
      ir_valid <= 1'b0;
      fpc      <= '0;
      done     <= 1'b0;
    end else begin
      done <= halt_done;
      if (start && !run_q) begin
        run_q    <= 1'b1;
        ir_valid <= 1'b0;
        fpc      <= start_pc;
      end else if (halt_done) begin
        run_q    <= 1'b0;
        ir_valid <= 1'b0;
      end else if (run_q) begin
        ir_valid <= 1'b1;
        if (fire) fpc <= fpc + 1'b1;
      end
    end
  end
  assign running = run_q;

  busy_board #(.NUM_VREG(NUM_VREG)) u_busy (
    .clk, .rst_n, .set_mask, .clr_ls(rel_ls), .clr_alu(rel_alu), .clr_sh(rel_sh), .busy
  );

  sync_fifo #(.T(ls_entry_t), .DEPTH(QDEPTH)) u_lsq (
    .clk, .rst_n, .push(ls_push), .din(ls_din), .pop(ls_pop), .head(ls_head),
    .full(ls_full), .empty(ls_empty));
  sync_fifo #(.T(alu_entry_t), .DEPTH(QDEPTH)) u_aluq (
    .clk, .rst_n, .push(alu_push), .din(alu_din), .pop(alu_pop), .head(alu_head),
    .full(alu_full), .empty(alu_empty));
  sync_fifo #(.T(sh_entry_t), .DEPTH(QDEPTH)) u_shq (
    .clk, .rst_n, .push(sh_push), .din(sh_din), .pop(sh_pop), .head(sh_head),
    .full(sh_full), .empty(sh_empty));
endmodule
