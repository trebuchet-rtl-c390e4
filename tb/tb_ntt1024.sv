// tb_ntt1024: a 1,024-point radix-2 number-theoretic transform run on the
// full-size tile, the kernel size of the published example kernel.
//
// The 1,024 points are two 512-element registers, lower half and upper
// half. Each of the 10 stages is a constant-geometry DIT step of three
// instructions:
//   VPACKLO  A = even elements of (lo, hi)
//   VPACKHI  B = odd elements of (lo, hi)
//   VLOAD    T = this stage's twiddle vector from the VDM
//   VBFLY    lo' = A + T*B, hi' = A - T*B (mod q)
// With the input placed in the VDM in bit-reversed order, the result comes
// out in natural order. For pair j of stage s the twiddle is
// w^(j with its low 9-s bits cleared), w a primitive 1,024th root of unity.
// The modulus is q = 2^64 - 2^32 + 1, whose group has 7 as a generator, so
// w = 7^((q-1)/1024) mod q is computed here.
//
// The result is read back through the VDM port and compared with a direct
// O(N^2) evaluation X[k] = sum_n x[n] w^(nk) mod q. The kernel's cycle
// count is printed and checked against an upper bound worked out from the
// pipeline rates (about 3 cycles per beat, stages serialised by their
// data dependences).
module tb_ntt1024;
  import rpu_pkg::*;

  localparam int unsigned NP = 1024, L = 10, HALF = NP / 2;
  localparam int XA = 0, TW = 4096, OUT = 16384;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                 start = 1'b0, done, running;
  logic [11:0]          start_pc = '0;
  logic                 imem_we = 1'b0;
  logic [11:0]          imem_waddr = '0;
  logic [63:0]          imem_wdata = '0;
  logic                 sdm_we = 1'b0;
  logic [10:0]          sdm_addr = '0;
  logic [W-1:0]         sdm_wdata = '0;
  logic                 vdm_req = 1'b0, vdm_we = 1'b0, vdm_rvalid;
  logic [ADDR_BITS-1:0] vdm_addr = '0;
  logic [W-1:0]         vdm_wdata = '0, vdm_rdata;
  perf_t                perf;

  rpu_tile dut (.*);

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef logic [W-1:0] word_t;
  localparam word_t Q = 128'hffff_ffff_0000_0001;

  function automatic word_t mulq(word_t a, word_t b);
    return (a * b) % Q;   // operands are below 2^64, so the product fits
  endfunction
  function automatic word_t addq(word_t a, word_t b);
    return (a + b) % Q;
  endfunction
  function automatic word_t powq(word_t b, word_t e);
    word_t r = 1;
    while (e != 0) begin
      if (e[0]) r = mulq(r, b);
      b = mulq(b, b);
      e = e >> 1;
    end
    return r;
  endfunction
  function automatic int bitrev(int v);
    int r = 0;
    for (int i = 0; i < L; i++) if (v & (1 << i)) r |= 1 << (L - 1 - i);
    return r;
  endfunction
  function automatic logic [63:0] mk(opcode_t op, int rd = 0, int rd2 = 0, int ra = 0,
                                     int rb = 0, int rc = 0, int rm = 0, int rar = 0,
                                     int imm = 0);
    instr_t i;
    i.op = op; i.rd = 6'(rd); i.rd2 = 6'(rd2); i.ra = 6'(ra); i.rb = 6'(rb);
    i.rc = 6'(rc); i.rm = 4'(rm); i.rar = 4'(rar); i.imm = 21'(imm);
    return 64'(i);
  endfunction

  task automatic vdm_write(int addr, word_t d);
    @(negedge clk);
    vdm_req = 1'b1; vdm_we = 1'b1; vdm_addr = ADDR_BITS'(addr); vdm_wdata = d;
    @(negedge clk);
    vdm_req = 1'b0; vdm_we = 1'b0;
  endtask
  task automatic vdm_read(int addr, output word_t d);
    @(negedge clk);
    vdm_req = 1'b1; vdm_we = 1'b0; vdm_addr = ADDR_BITS'(addr);
    @(negedge clk);
    vdm_req = 1'b0;
    d = vdm_rdata;
  endtask
  task automatic check(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %s: got %h expected %h", what, got, exp);
    end
  endtask

  word_t x [NP];
  word_t w, mu;
  logic [63:0] prog [$];
  longint unsigned t_start, t_done;

  initial begin
    word_t d, acc, wk, pw;
    logic [2*W+1:0] one;
    int lo, hi, nlo, nhi, ra, rb, rt;

    w = powq(128'd7, (Q - 1) / NP);
    check("w^512 = -1", powq(w, HALF), Q - 1);
    check("w^1024 = 1", powq(w, NP), 1);
    one = '0; one[2 * 64] = 1'b1;          // k = bit length of Q = 64
    mu = W'(one / {{(W+2){1'b0}}, Q});
    for (int n = 0; n < NP; n++) x[n] = {$urandom, $urandom} % Q;
    x[3] = Q - 1;

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // constants: modulus q and mu in SDM words 0 and 1
    @(negedge clk) begin sdm_we = 1'b1; sdm_addr = 11'd0; sdm_wdata = Q; end
    @(negedge clk) begin sdm_addr = 11'd1; sdm_wdata = mu; end
    @(negedge clk) sdm_we = 1'b0;
    // input in bit-reversed order, twiddles per stage
    for (int p = 0; p < NP; p++) vdm_write(XA + p, x[bitrev(p)]);
    for (int s = 0; s < L; s++)
      for (int j = 0; j < HALF; j++)
        vdm_write(TW + s * HALF + j, powq(w, (j >> (L - 1 - s)) << (L - 1 - s)));

    // kernel
    prog.push_back(mk(OP_ASET, .rar(0), .imm(0)));
    prog.push_back(mk(OP_SLOAD, .rd(1), .rc(1), .rar(0), .imm(0)));   // MRF1 = {Q, mu}
    prog.push_back(mk(OP_VLOAD, .rd(0), .rar(0), .imm(XA)));
    prog.push_back(mk(OP_VLOAD, .rd(4), .rar(0), .imm(XA + HALF)));
    lo = 0; hi = 4;
    for (int s = 0; s < L; s++) begin
      // alternate register sets so that consecutive stages can overlap
      ra  = (s % 2 == 0) ? 8 : 28;
      rb  = (s % 2 == 0) ? 12 : 32;
      rt  = (s % 2 == 0) ? 16 : 36;
      nlo = (s % 2 == 0) ? 20 : 0;
      nhi = (s % 2 == 0) ? 24 : 4;
      prog.push_back(mk(OP_VLOAD, .rd(rt), .rar(0), .imm(TW + s * HALF)));
      prog.push_back(mk(OP_VPACKLO, .rd(ra), .ra(lo), .rb(hi)));
      prog.push_back(mk(OP_VPACKHI, .rd(rb), .ra(lo), .rb(hi)));
      prog.push_back(mk(OP_VBFLY, .rd(nlo), .rd2(nhi), .ra(ra), .rb(rb), .rc(rt), .rm(1)));
      lo = nlo; hi = nhi;
    end
    prog.push_back(mk(OP_VSTORE, .ra(lo), .rar(0), .imm(OUT)));
    prog.push_back(mk(OP_VSTORE, .ra(hi), .rar(0), .imm(OUT + HALF)));
    prog.push_back(mk(OP_HALT));
    for (int i = 0; i < prog.size(); i++) begin
      @(negedge clk);
      imem_we = 1'b1; imem_waddr = 12'(i); imem_wdata = prog[i];
    end
    @(negedge clk) imem_we = 1'b0;

    start = 1'b1; start_pc = 12'd0;
    t_start = cyc;
    @(negedge clk) start = 1'b0;
    wait (done);
    t_done = cyc;
    $display("1024-point NTT: %0d cycles (%0d instructions), hazard stalls %0d, vrf conflicts %0d",
             t_done - t_start, prog.size(), perf.hazard_stalls, perf.vrf_conflicts);
    checks++;
    // per stage: two shuffles (8 beats each) and one butterfly, serialised by
    // data dependences, at most about 3 cycles per beat plus pipeline fill
    if (t_done - t_start > L * (3 * 8 * 4 + 40) + 200) begin
      failures++;
      $display("kernel slower than the pipeline rates allow");
    end
    check("butterfly beats issued", perf.alu_beats, L * 8);

    for (int k = 0; k < NP; k++) begin
      acc = 0;
      wk = powq(w, k);
      pw = 1;
      for (int n = 0; n < NP; n++) begin
        acc = addq(acc, mulq(x[n], pw));
        pw = mulq(pw, wk);
      end
      vdm_read(OUT + k, d);
      check($sformatf("X[%0d]", k), d, acc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
