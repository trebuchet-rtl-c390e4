// tb_frontend: the frontend with the scalar backend behind it. The three
// backend pipelines are modelled by the testbench: each pops its queue at
// random moments, keeps one instruction "in flight" for a random time and
// then releases its registers. Checks:
//  - every queue entry comes out in program order with the expected fields
//    (operation, registers, base address/stride, modulus, broadcast value);
//  - no instruction is dispatched while one of its registers is busy in a
//    reference busy board kept by the testbench;
//  - the hazard stall and the full-queue stall both happen;
//  - done pulses once, only after everything has been released.
module tb_frontend;
  import rpu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 0, done, running;
  logic [11:0] start_pc = '0;
  logic imem_we = 0;
  logic [11:0] imem_waddr = '0;
  logic [63:0] imem_wdata = '0;
  logic sc_cmd_valid, sc_busy;
  logic [1:0] sc_cmd_op;
  logic [5:0] sc_cmd_reg;
  logic [ADDR_BITS-1:0] sc_cmd_addr;
  logic [5:0] srf_idx;
  logic [W-1:0] srf_val;
  logic [3:0] mrf_idx, arf_idx;
  modulus_t mrf_val;
  logic [ADDR_BITS-1:0] arf_val;
  ls_entry_t ls_head;
  alu_entry_t alu_head;
  sh_entry_t sh_head;
  logic ls_empty, alu_empty, sh_empty, ls_pop, alu_pop, sh_pop;
  logic [NUM_VREG-1:0] rel_ls, rel_alu, rel_sh;
  logic ev_hazard_stall, ev_queue_stall;
  logic host_we = 0;
  logic [10:0] host_addr = '0;
  logic [W-1:0] host_wdata = '0;

  frontend dut (.*);
  scalar_backend u_sc (
    .clk, .rst_n, .cmd_valid(sc_cmd_valid), .cmd_op(sc_cmd_op), .cmd_reg(sc_cmd_reg),
    .cmd_addr(sc_cmd_addr), .busy(sc_busy), .host_we, .host_addr, .host_wdata,
    .srf_idx, .srf_val, .mrf_idx, .mrf_val, .arf_idx, .arf_val);

  int checks = 0, failures = 0;
  task automatic chk(string what, logic [255:0] got, logic [255:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    $display("pipes %p %p %p empty %b%b%b", pl, pa, ps, ls_empty, alu_empty, sh_empty);
    $display("timeout: pc %0d run %0b ir_valid %0b busy %h ls %0d alu %0d sh %0d", dut.fpc, dut.run_q, dut.ir_valid, dut.busy, exp_ls.size(), exp_alu.size(), exp_sh.size());
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] enc(opcode_t op, int rd = 0, int rd2 = 0, int ra = 0,
                                      int rb = 0, int rc = 0, int rm = 0, int rar = 0,
                                      int imm = 0);
    instr_t i;
    i = '{op: op, rd: 6'(rd), rd2: 6'(rd2), ra: 6'(ra), rb: 6'(rb), rc: 6'(rc),
          rm: 4'(rm), rar: 4'(rar), imm: 21'(imm)};
    return 64'(i);
  endfunction

  // expected queue contents, filled while the program is built
  ls_entry_t  exp_ls[$];
  alu_entry_t exp_alu[$];
  sh_entry_t  exp_sh[$];
  logic [63:0] prog[$];

  localparam logic [W-1:0] Q  = 128'h0000_0000_0000_0000_0fff_ffff_fff0_0001;
  localparam logic [W-1:0] MU = 128'h0000_0000_0000_0000_1000_0000_000f_ffff;
  localparam logic [W-1:0] SV = 128'hdead_beef_0123_4567_89ab_cdef_5555_aaaa;
  modulus_t M;

  function automatic logic [NUM_VREG-1:0] rb_(int r);
    return reg_bit(6'(r));
  endfunction

  task automatic build();
    alu_entry_t a;
    M = '{q: Q, mu: MU, k: 8'd60};
    prog.push_back(enc(OP_ASET, .rar(1), .imm(32'h100)));
    prog.push_back(enc(OP_ASET, .rar(2), .imm(32'h40)));
    prog.push_back(enc(OP_SLOAD, .rd(3), .rar(2), .imm(2)));          // SRF3 = SDM[0x42]
    prog.push_back(enc(OP_SLOAD, .rd(2), .rc(1), .rar(2), .imm(4)));  // MRF2 = SDM[0x44..45]
    for (int rep = 0; rep < 3; rep++) begin
      prog.push_back(enc(OP_VLOAD, .rd(1), .rar(1), .imm(5 + rep)));
      exp_ls.push_back('{store: 0, vreg: 1, base: 32'h105 + rep, stride: 1, regs: rb_(1)});
      prog.push_back(enc(OP_VADDMOD, .rd(2), .ra(1), .rb(3), .rm(2)));   // hazard on v1
      exp_alu.push_back('{op: ALU_ADD, rd: 2, rd2: 0, ra: 1, rb: 3, rc: 0, m: M,
                          scalar: 'x, regs: rb_(1) | rb_(2) | rb_(3)});
      prog.push_back(enc(opcode_t'(5'(OP_VUNPACKLO) + 5'(rep)), .rd(4), .ra(5), .rb(6)));
      exp_sh.push_back('{mode: sh_mode_t'(rep), rd: 4, ra: 5, rb: 6,
                         regs: rb_(4) | rb_(5) | rb_(6)});
      prog.push_back(enc(OP_VBCAST, .rd(7 + rep), .ra(3)));
      exp_alu.push_back('{op: ALU_PASS, rd: 6'(7 + rep), rd2: 0, ra: 3, rb: 0, rc: 0, m: '0,
                          scalar: SV, regs: rb_(7 + rep)});
      prog.push_back(enc(OP_VSTORES, .ra(20 + rep), .rc(3), .rar(2), .imm(rep)));
      exp_ls.push_back('{store: 1, vreg: 6'(20 + rep), base: 32'h40 + rep, stride: 3,
                         regs: rb_(20 + rep)});
    end
    // independent multiplies and butterflies: fill the compute queue
    for (int i = 0; i < 8; i++) begin
      if (i % 2 == 0) begin
        prog.push_back(enc(OP_VMULMOD, .rd(24 + i), .ra(40 + i), .rb(48 + i), .rm(2)));
        exp_alu.push_back('{op: ALU_MUL, rd: 6'(24 + i), rd2: 0, ra: 6'(40 + i), rb: 6'(48 + i),
                            rc: 0, m: M, scalar: 'x, regs: rb_(24 + i) | rb_(40 + i) | rb_(48 + i)});
      end else begin
        prog.push_back(enc(OP_VBFLY, .rd(24 + i), .rd2(32 + i), .ra(40 + i), .rb(48 + i),
                           .rc(56 + i), .rm(2)));
        exp_alu.push_back('{op: ALU_BFLY, rd: 6'(24 + i), rd2: 6'(32 + i), ra: 6'(40 + i),
                            rb: 6'(48 + i), rc: 6'(56 + i), m: M, scalar: 'x,
                            regs: rb_(24 + i) | rb_(32 + i) | rb_(40 + i) | rb_(48 + i) | rb_(56 + i)});
      end
    end
    prog.push_back(enc(OP_VCMP, .rd(63), .ra(24), .rb(25), .rm(2)));   // waits for both
    exp_alu.push_back('{op: ALU_CMP, rd: 63, rd2: 0, ra: 24, rb: 25, rc: 0, m: M, scalar: 'x,
                        regs: rb_(63) | rb_(24) | rb_(25)});
    prog.push_back(enc(OP_HALT));
  endtask

  // reference busy board and pipeline models
  logic [NUM_VREG-1:0] ref_busy = '0;
  int n_hazard = 0, n_queue = 0, n_done = 0;

  typedef struct { logic active; int timer; logic [NUM_VREG-1:0] regs; } pipe_t;
  pipe_t pl = '{0, 0, '0}, pa = '{0, 0, '0}, ps = '{0, 0, '0};

  initial begin
    build();
    $display("program %0d instrs, ls %0d alu %0d sh %0d", prog.size(), exp_ls.size(), exp_alu.size(), exp_sh.size());
    @(negedge clk);
    rst_n = 1;
    // program and constants
    for (int i = 0; i < prog.size(); i++) begin
      @(negedge clk);
      imem_we = 1; imem_waddr = 12'(16 + i); imem_wdata = prog[i];
    end
    @(negedge clk);
    imem_we = 0;
    host_we = 1; host_addr = 11'h42; host_wdata = SV;
    @(negedge clk); host_addr = 11'h44; host_wdata = Q;
    @(negedge clk); host_addr = 11'h45; host_wdata = MU;
    @(negedge clk); host_we = 0;
    start = 1; start_pc = 12'd16;
    @(negedge clk);
    start = 0;
    wait (done);
    @(negedge clk);
    @(negedge clk);
    chk("done pulses once", 256'(n_done), 1);
    chk("all queue entries consumed",
        256'(exp_ls.size() + exp_alu.size() + exp_sh.size()), 0);
    chk("busy board empty at done", 256'(dut.busy), 0);
    chk("hazard stalls occurred", 256'(n_hazard > 0), 1);
    chk("full-queue stalls occurred", 256'(n_queue > 0), 1);
    chk("frontend idle after done", 256'(running), 0);
    $display("hazard stall cycles %0d, queue stall cycles %0d", n_hazard, n_queue);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      // dispatch check against the reference busy board
      if (dut.set_mask != '0) begin
        chk("dispatch with no busy register", 256'(dut.set_mask & ref_busy), 0);
        ref_busy = ref_busy | dut.set_mask;
      end
      ref_busy = ref_busy & ~(rel_ls | rel_alu | rel_sh);
      if (ev_hazard_stall) n_hazard++;
      if (ev_queue_stall) n_queue++;
      if (done) begin
        n_done++;
        chk("done only when all released", 256'(ref_busy), 0);
      end
      if (ls_pop) begin
        ls_entry_t e;
        e = exp_ls.pop_front();
        chk("load/store entry", 256'(ls_head), 256'(e));
        pl = '{1, $urandom_range(21, 2), ls_head.regs};
      end
      if (alu_pop) begin
        alu_entry_t e;
        e = exp_alu.pop_front();
        if (e.op != ALU_PASS) e.scalar = alu_head.scalar;   // don't care
        if (e.op == ALU_PASS) e.m = alu_head.m;
        chk("compute entry", 256'(alu_head), 256'(e));
        pa = '{1, $urandom_range(21, 2), alu_head.regs};
      end
      if (sh_pop) begin
        sh_entry_t e;
        e = exp_sh.pop_front();
        chk("shuffle entry", 256'(sh_head), 256'(e));
        ps = '{1, $urandom_range(21, 2), sh_head.regs};
      end
    end
  end
  always @(negedge clk) begin
    rel_ls = '0; rel_alu = '0; rel_sh = '0;
    if (pl.active) begin if (pl.timer == 0) begin rel_ls = pl.regs; pl.active = 0; end else pl.timer--; end
    if (pa.active) begin if (pa.timer == 0) begin rel_alu = pa.regs; pa.active = 0; end else pa.timer--; end
    if (ps.active) begin if (ps.timer == 0) begin rel_sh = ps.regs; ps.active = 0; end else ps.timer--; end
    // pop decisions are made here so that they are stable over the edge
    ls_pop  = rst_n && !ls_empty  && !pl.active && ($urandom % 3 == 0);
    alu_pop = rst_n && !alu_empty && !pa.active && ($urandom % 3 == 0);
    sh_pop  = rst_n && !sh_empty  && !ps.active && ($urandom % 3 == 0);
  end
endmodule
