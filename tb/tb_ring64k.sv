// tb_ring64k: 64K-point ring multiply and ring add of one tower on the
// full-size tile, the largest kernel size of the published emulation runs.
//
// The host writes two 65,536-point towers A and B (128-bit residues below
// a 126-bit modulus) through the VDM port. The kernel then, for each of the
// 128 vectors of a tower, loads A and B, computes C = A*B and D = A+B
// (mod q) and stores both. A, B, C and D fill the whole 4 MiB VDM, which
// holds exactly four 64K-point towers. Eight register sets are used in
// rotation, and the kernel is software-pipelined (loads of the next vector
// issued before the add of this one), so that loads, arithmetic and stores
// of neighbouring vectors overlap in the three pipelines.
// Every output word is read back and compared with wide arithmetic. The
// cycle count is printed and checked against the load/store bound: four
// vector transfers per vector of the tower, 8 beats each, at about 3 cycles
// per beat.
module tb_ring64k;
  import rpu_pkg::*;

  localparam int unsigned NP = 65536, NV = NP / VLEN;
  localparam int AA = 0, BA = NP, CA = 2 * NP, DA = 3 * NP;

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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef logic [W-1:0] word_t;
  localparam word_t Q = 128'h3fff_ffff_ffff_ffff_ffff_ffff_fff0_0001;

  function automatic logic [63:0] mk(opcode_t op, int rd = 0, int rd2 = 0, int ra = 0,
                                     int rb = 0, int rc = 0, int rm = 0, int rar = 0,
                                     int imm = 0);
    instr_t i;
    i.op = op; i.rd = 6'(rd); i.rd2 = 6'(rd2); i.ra = 6'(ra); i.rb = 6'(rb);
    i.rc = 6'(rc); i.rm = 4'(rm); i.rar = 4'(rar); i.imm = 21'(imm);
    return 64'(i);
  endfunction

  word_t A [NP], B [NP];
  logic [63:0] prog [$];
  longint unsigned t_start, t_done;

  initial begin
    word_t d, mu;
    logic [2*W+1:0] one;
    logic [2*W-1:0] p;
    int ra, rb, rc, rd;

    one = '0; one[2 * 126] = 1'b1;
    mu = W'(one / {{(W+2){1'b0}}, Q});
    for (int n = 0; n < NP; n++) begin
      A[n] = {$urandom, $urandom, $urandom, $urandom} % Q;
      B[n] = {$urandom, $urandom, $urandom, $urandom} % Q;
    end
    A[7] = Q - 1; B[7] = Q - 1;

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk) begin sdm_we = 1'b1; sdm_addr = 11'd0; sdm_wdata = Q; end
    @(negedge clk) begin sdm_addr = 11'd1; sdm_wdata = mu; end
    @(negedge clk) sdm_we = 1'b0;
    // one VDM write per cycle through the external port
    for (int n = 0; n < 2 * NP; n++) begin
      @(negedge clk);
      vdm_req = 1'b1; vdm_we = 1'b1;
      vdm_addr = ADDR_BITS'(n);
      vdm_wdata = (n < NP) ? A[n] : B[n - NP];
    end
    @(negedge clk) begin vdm_req = 1'b0; vdm_we = 1'b0; end

    prog.push_back(mk(OP_ASET, .rar(0), .imm(0)));
    prog.push_back(mk(OP_SLOAD, .rd(1), .rc(1), .rar(0), .imm(0)));   // MRF1 = {Q, mu}
    // software-pipelined: the loads of vector v+1 and the store of D[v-1]
    // are placed where the in-order frontend would otherwise wait for
    // the multiply of vector v to release its sources.
    prog.push_back(mk(OP_VLOAD, .rd(0), .rar(0), .imm(AA)));
    prog.push_back(mk(OP_VLOAD, .rd(4), .rar(0), .imm(BA)));
    for (int v = 0; v < NV; v++) begin
      // register set v mod 8: a, b, c, d in four different VRF memories
      ra = 8 * (v % 8); rb = ra + 4; rc = ra + 1; rd = ra + 5;
      prog.push_back(mk(OP_VMULMOD, .rd(rc), .ra(ra), .rb(rb), .rm(1)));
      if (v > 0)
        prog.push_back(mk(OP_VSTORE, .ra(8 * ((v - 1) % 8) + 5), .rar(0), .imm(DA + (v - 1) * VLEN)));
      if (v + 1 < NV) begin
        prog.push_back(mk(OP_VLOAD, .rd(8 * ((v + 1) % 8)), .rar(0), .imm(AA + (v + 1) * VLEN)));
        prog.push_back(mk(OP_VLOAD, .rd(8 * ((v + 1) % 8) + 4), .rar(0), .imm(BA + (v + 1) * VLEN)));
      end
      prog.push_back(mk(OP_VADDMOD, .rd(rd), .ra(ra), .rb(rb), .rm(1)));
      prog.push_back(mk(OP_VSTORE, .ra(rc), .rar(0), .imm(CA + v * VLEN)));
    end
    prog.push_back(mk(OP_VSTORE, .ra(8 * ((NV - 1) % 8) + 5), .rar(0), .imm(DA + (NV - 1) * VLEN)));
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
    $display("64K RingMul + RingAdd: %0d cycles, %0d instructions; overlap cycles %0d, hazard stalls %0d, queue stalls %0d",
             t_done - t_start, prog.size(), perf.overlap_cycles, perf.hazard_stalls, perf.queue_stalls);
    checks++;
    if (t_done - t_start > longint'(NV) * 4 * 8 * 3 * 5 / 4 + 500) begin
      failures++;
      $display("kernel slower than the load/store bound allows");
    end
    checks++;
    if (perf.alu_beats != NV * 2 * 8) begin
      failures++;
      $display("ALU beats %0d, expected %0d", perf.alu_beats, NV * 2 * 8);
    end

    // read back C and D, one request per cycle, data one cycle later
    for (int n = 0; n <= 2 * NP; n++) begin
      @(negedge clk);
      if (n > 0) begin
        int m;
        word_t exp;
        m = n - 1;
        if (m < NP) begin
          p = A[m] * B[m];
          exp = W'(p % {{W{1'b0}}, Q});
        end else begin
          exp = W'(({1'b0, A[m - NP]} + {1'b0, B[m - NP]}) % {1'b0, Q});
        end
        checks++;
        if (!vdm_rvalid || vdm_rdata !== exp) begin
          failures++;
          if (failures < 20) $display("MISMATCH word %0d: got %h expected %h", m, vdm_rdata, exp);
        end
      end
      vdm_req = (n < 2 * NP); vdm_we = 1'b0;
      vdm_addr = ADDR_BITS'(CA + n);
    end
    vdm_req = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
