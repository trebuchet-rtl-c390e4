// tb_rpu_tile: end-to-end test of one RPU tile at its default size
// (64 lanes, 4 MiB VDM, 32 KB SDM).
//
// The host side of the test loads three 512-element vectors X, Y, T (values
// below the moduli) and two moduli with their Barrett constants, writes a
// kernel into the instruction memory and starts it. The kernel uses every
// instruction: address sets, modulus and scalar loads, contiguous and
// strided loads, add/sub/mul/butterfly/compare/broadcast under two
// different moduli, the four shuffles, contiguous and strided stores. The
// results are read back through the VDM port and compared element by
// element with a reference computed here with plain wide arithmetic.
//
// It also checks that each mechanism of the tile occurred: busy-board
// stalls, full-queue stalls, VRF bank conflicts, VDM bank conflicts,
// overlap of the load/store pipeline with compute or shuffle work, the
// modulus switch between instructions, and the beat count of the LAWS
// engines; and it checks the kernel's cycle count against bounds worked
// out from the pipeline timing.
module tb_rpu_tile;
  import rpu_pkg::*;

  localparam int unsigned N  = VLEN;
  localparam int unsigned NH = 64;
  localparam int unsigned BEATS = N / NH;

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
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference arithmetic ----------------
  typedef logic [W-1:0] word_t;
  function automatic word_t rmul(word_t a, word_t b, word_t q);
    logic [2*W-1:0] p;
    p = a * b;
    return W'(p % {{W{1'b0}}, q});
  endfunction
  function automatic word_t radd(word_t a, word_t b, word_t q);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, b};
    return W'(s % {1'b0, q});
  endfunction
  function automatic word_t rsub(word_t a, word_t b, word_t q);
    return (a >= b) ? a - b : q - (b - a);
  endfunction
  function automatic int bitlen(word_t v);
    int n = 0;
    for (int i = 0; i < W; i++) if (v[i]) n = i + 1;
    return n;
  endfunction
  function automatic word_t barrett_mu(word_t q);
    logic [2*W+1:0] one;
    int k;
    k = bitlen(q);
    one = '0;
    one[2*k] = 1'b1;
    return W'(one / {{(W+2){1'b0}}, q});
  endfunction
  function automatic word_t rnd(word_t q);
    word_t v;
    v = {$urandom, $urandom, $urandom, $urandom};
    return v % q;
  endfunction

  function automatic logic [63:0] mk(opcode_t op, int rd = 0, int rd2 = 0, int ra = 0,
                                     int rb = 0, int rc = 0, int rm = 0, int rar = 0,
                                     int imm = 0);
    instr_t i;
    i.op = op; i.rd = 6'(rd); i.rd2 = 6'(rd2); i.ra = 6'(ra); i.rb = 6'(rb);
    i.rc = 6'(rc); i.rm = 4'(rm); i.rar = 4'(rar); i.imm = 21'(imm);
    return 64'(i);
  endfunction

  // ---------------- data ----------------
  word_t q1, q2, mu1, mu2, sval;
  word_t X [N], Y [N], T [N];
  logic [63:0] prog [$];

  localparam int XA = 0, YA = 512, TA = 1024, OUT = 8192, SOUT = 32768;
  localparam int NRES = 14;
  // result register of each output slot, stored at OUT + slot*512
  int res_reg [NRES] = '{12, 13, 16, 20, 24, 17, 18, 28, 32, 33, 36, 37, 48, 1};

  function automatic word_t expect_of(int slot, int e);
    unique case (slot)
      0:  return radd(X[e], Y[e], q1);
      1:  return rsub(X[e], Y[e], q1);
      2:  return rmul(X[e], Y[e], q1);
      3:  return radd(X[e], rmul(T[e], Y[e], q1), q1);
      4:  return rsub(X[e], rmul(T[e], Y[e], q1), q1);
      5:  return rmul(X[e], Y[e], q2);
      6:  return word_t'(X[e] < Y[e]);
      7:  return sval;
      8:  return (e % 2 == 0) ? X[e/2] : Y[e/2];
      9:  return (e % 2 == 0) ? X[N/2 + e/2] : Y[N/2 + e/2];
      10: return (e < N/2) ? X[2*e] : Y[2*(e - N/2)];
      11: return (e < N/2) ? X[2*e+1] : Y[2*(e - N/2)+1];
      12: return (e < N/2) ? X[2*e] : Y[2*e - N];
      default: return Y[e];
    endcase
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
    if (!vdm_rvalid) begin
      failures++;
      $display("vdm read of %0d: no rvalid", addr);
    end
  endtask
  task automatic check(string what, word_t got, word_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %s: got %h expected %h", what, got, exp);
    end
  endtask
  task automatic check_true(string what, logic c);
    checks++;
    if (!c) begin
      failures++;
      $display("FAILED: %s", what);
    end
  endtask

  longint unsigned t_start, t_done;

  initial begin
    word_t d;
    // two moduli, q2 > q1 so that values below q1 are valid under both
    q1 = {32'h0000_0000, 32'h0fff_ffff, 32'hffff_ffff, 32'hffc0_0001} | 128'h1;   // ~92 bits
    q2 = 128'h3fff_ffff_ffff_ffff_ffff_ffff_fff0_0001;                           // 126 bits
    mu1 = barrett_mu(q1);
    mu2 = barrett_mu(q2);
    sval = rnd(q1);
    for (int e = 0; e < N; e++) begin
      X[e] = rnd(q1); Y[e] = rnd(q1); T[e] = rnd(q1);
    end
    X[5] = q1 - 1; Y[5] = q1 - 1; T[5] = q1 - 1;   // corner values
    X[6] = 0;      Y[6] = q1 - 1;
    Y[7] = X[7];

    // kernel
    prog.push_back(mk(OP_ASET, .rar(1), .imm(XA)));
    prog.push_back(mk(OP_ASET, .rar(2), .imm(OUT)));
    prog.push_back(mk(OP_ASET, .rar(3), .imm(SOUT)));
    prog.push_back(mk(OP_SLOAD, .rd(1), .rc(1), .rar(0), .imm(0)));   // M1 = {q1, mu1}
    prog.push_back(mk(OP_SLOAD, .rd(2), .rc(1), .rar(0), .imm(2)));   // M2 = {q2, mu2}
    prog.push_back(mk(OP_SLOAD, .rd(5), .rar(0), .imm(4)));           // S5 = sval
    prog.push_back(mk(OP_VLOAD, .rd(0),  .rar(1), .imm(XA)));
    prog.push_back(mk(OP_VLOAD, .rd(4),  .rar(1), .imm(YA)));
    prog.push_back(mk(OP_VLOAD, .rd(8),  .rar(1), .imm(TA)));
    prog.push_back(mk(OP_VLOAD, .rd(1),  .rar(1), .imm(YA)));
    prog.push_back(mk(OP_VLOAD, .rd(40), .rar(1), .imm(XA)));
    prog.push_back(mk(OP_VLOAD, .rd(44), .rar(1), .imm(YA)));
    prog.push_back(mk(OP_VLOADS, .rd(48), .rc(2), .rar(1), .imm(XA)));
    prog.push_back(mk(OP_VUNPACKLO, .rd(32), .ra(40), .rb(44)));
    prog.push_back(mk(OP_VUNPACKHI, .rd(33), .ra(40), .rb(44)));
    prog.push_back(mk(OP_VADDMOD, .rd(12), .ra(0), .rb(4), .rm(1)));
    prog.push_back(mk(OP_VPACKLO, .rd(36), .ra(40), .rb(44)));
    prog.push_back(mk(OP_VPACKHI, .rd(37), .ra(40), .rb(44)));
    prog.push_back(mk(OP_VSUBMOD, .rd(13), .ra(0), .rb(4), .rm(1)));
    prog.push_back(mk(OP_VMULMOD, .rd(16), .ra(0), .rb(4), .rm(1)));
    prog.push_back(mk(OP_VBFLY, .rd(20), .rd2(24), .ra(0), .rb(4), .rc(8), .rm(1)));
    prog.push_back(mk(OP_VMULMOD, .rd(17), .ra(0), .rb(4), .rm(2)));
    prog.push_back(mk(OP_VCMP, .rd(18), .ra(0), .rb(1), .rm(1)));     // v0, v1 share a memory
    prog.push_back(mk(OP_VBCAST, .rd(28), .ra(5)));
    for (int s = 0; s < NRES; s++)
      prog.push_back(mk(OP_VSTORE, .ra(res_reg[s]), .rar(2), .imm(s * 512)));
    prog.push_back(mk(OP_VSTORES, .ra(12), .rc(2), .rar(3), .imm(0)));
    prog.push_back(mk(OP_HALT));

    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // host loads: program, constants, vectors
    foreach (prog[i]) begin
      @(negedge clk);
      imem_we = 1'b1; imem_waddr = 12'(100 + i); imem_wdata = prog[i];
    end
    @(negedge clk) imem_we = 1'b0;
    begin
      word_t sd [5];
      sd = '{q1, mu1, q2, mu2, sval};
      for (int i = 0; i < 5; i++) begin
        @(negedge clk);
        sdm_we = 1'b1; sdm_addr = 11'(i); sdm_wdata = sd[i];
      end
      @(negedge clk) sdm_we = 1'b0;
    end
    for (int e = 0; e < N; e++) begin
      vdm_write(XA + e, X[e]);
      vdm_write(YA + e, Y[e]);
      vdm_write(TA + e, T[e]);
    end

    // run
    @(negedge clk);
    start = 1'b1; start_pc = 12'd100;
    t_start = cyc;
    @(negedge clk) start = 1'b0;
    @(posedge done);
    t_done = cyc;
    @(negedge clk);
    check_true("running drops after done", !running);

    // results
    for (int s = 0; s < NRES; s++)
      for (int e = 0; e < N; e++) begin
        vdm_read(OUT + s * 512 + e, d);
        check($sformatf("slot %0d (v%0d) element %0d", s, res_reg[s], e), d, expect_of(s, e));
      end
    for (int e = 0; e < N; e++) begin
      vdm_read(SOUT + 2 * e, d);
      check($sformatf("strided store element %0d", e), d, radd(X[e], Y[e], q1));
    end
    // inputs untouched
    vdm_read(XA + 3, d);
    check("input X[3] untouched", d, X[3]);

    // mechanisms
    $display("kernel cycles=%0d hazard_stalls=%0d queue_stalls=%0d vrf_conflicts=%0d vdm_conflicts=%0d alu_beats=%0d overlap=%0d",
             t_done - t_start, perf.hazard_stalls, perf.queue_stalls, perf.vrf_conflicts,
             perf.vdm_conflicts, perf.alu_beats, perf.overlap_cycles);
    check_true("busy-board stall happened", perf.hazard_stalls > 0);
    check_true("full-queue stall happened", perf.queue_stalls > 0);
    check_true("VRF bank conflict happened", perf.vrf_conflicts > 0);
    check_true("VDM bank conflict happened", perf.vdm_conflicts > 0);
    check_true("load/store overlapped other work", perf.overlap_cycles > 0);
    check_true("LAWS beats = 7 compute instructions x BEATS", perf.alu_beats == 32'(7 * BEATS));
    // timing bounds: 37 vector instructions of BEATS beats each, at least
    // 3 cycles per beat in one pipeline, so at least (37/3 pipelines) and
    // at most fully serial with conflicts
    check_true("kernel not faster than the pipelines allow", (t_done - t_start) >= 20 * BEATS * 3 / 2);
    check_true("kernel finishes within the serial bound", (t_done - t_start) <= 37 * BEATS * 3 * 4);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
