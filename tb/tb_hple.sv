// tb_hple: one lane (LAWS engine + VRF slice + operand latches), with the
// VRF bank arbiter producing its bank commands. Loads operand registers
// through the load write port, then for every beat reads three operands
// into the latches, issues a butterfly, writes both results back through
// the engine's two write ports, and reads them out through the store port.
// Then does the same for a scalar broadcast (ld_scalar) and checks the
// shuffle read/write ports. Results are compared with wide arithmetic.
module tb_hple;
  import rpu_pkg::*;
  localparam int NH = 64, BEATS = VLEN / NH, AW = $clog2(REGS_PER_BANK * BEATS);
  localparam int BW = $clog2(NUM_VBANKS);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  vrf_req_t wreq [NUM_WP];
  vrf_req_t rreq [NUM_RP];
  logic [NUM_WP-1:0] wgnt;
  logic [NUM_RP-1:0] rgnt;
  logic [NUM_VBANKS-1:0] bank_en, bank_we;
  logic [AW-1:0] bank_addr [NUM_VBANKS];
  logic [1:0]    bank_wsel [NUM_VBANKS];
  logic [BW-1:0] rsel [NUM_RP];
  logic ld_a, ld_b, ld_w, ld_scalar, en, issue, out_valid;
  logic [W-1:0] scalar, sh_wdata, ld_wdata, sh_rdata0, sh_rdata1, st_rdata;
  alu_op_t op;
  modulus_t m;
  int checks = 0, failures = 0;

  vrf_arbiter #(.NUM_HPLE(NH)) arb (.*);
  hple #(.NUM_HPLE(NH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [W-1:0] got, logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic idle();
    for (int p = 0; p < NUM_WP; p++) wreq[p] = '0;
    for (int p = 0; p < NUM_RP; p++) rreq[p] = '0;
    ld_a = 0; ld_b = 0; ld_w = 0; ld_scalar = 0; issue = 0;
  endtask

  task automatic wr(int port, int r, int beat, logic [W-1:0] d);
    @(negedge clk);
    idle();
    wreq[port] = '{valid: 1'b1, vreg: 6'(r), beat: 8'(beat)};
    if (port == WP_LD) ld_wdata = d; else sh_wdata = d;
    #1;
    chk("write granted", W'(wgnt[port]), 1);
  endtask

  task automatic rd(int port, int r, int beat);
    @(negedge clk);
    idle();
    rreq[port] = '{valid: 1'b1, vreg: 6'(r), beat: 8'(beat)};
  endtask

  function automatic logic [W-1:0] mm(logic [W-1:0] x, logic [W-1:0] y);
    return W'(({{W{1'b0}}, x} * {{W{1'b0}}, y}) % {{W{1'b0}}, m.q});
  endfunction

  logic [W-1:0] A [BEATS], B [BEATS], T [BEATS];
  initial begin
    logic [2*W+1:0] one;
    idle();
    en = 1; op = ALU_BFLY; scalar = '0; sh_wdata = '0; ld_wdata = '0;
    m.q = 128'h0fff_ffff_ffff_ffff_ffff_ffff_ffc0_0001;
    m.k = 8'd124;
    one = '0; one[2 * 124] = 1'b1;
    m.mu = W'(one / {{(W+2){1'b0}}, m.q});
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < BEATS; b++) begin
      A[b] = {$urandom, $urandom, $urandom, $urandom} % m.q;
      B[b] = {$urandom, $urandom, $urandom, $urandom} % m.q;
      T[b] = {$urandom, $urandom, $urandom, $urandom} % m.q;
      wr(WP_LD, 0, b, A[b]);
      wr(WP_SH, 4, b, B[b]);
      wr(WP_LD, 8, b, T[b]);
    end
    for (int b = 0; b < BEATS; b++) begin
      // read the three operands in one cycle (different memories)
      @(negedge clk);
      idle();
      rreq[RP_CA] = '{valid: 1'b1, vreg: 6'd0, beat: 8'(b)};
      rreq[RP_CB] = '{valid: 1'b1, vreg: 6'd4, beat: 8'(b)};
      rreq[RP_CW] = '{valid: 1'b1, vreg: 6'd8, beat: 8'(b)};
      #1;
      chk("three operand reads granted together", W'(rgnt[2:0]), 7);
      @(negedge clk);
      idle();
      ld_a = 1; ld_b = 1; ld_w = 1;
      @(negedge clk);
      idle();
      issue = 1; op = ALU_BFLY;
      for (int i = 0; i < LAWS_LAT; i++) begin
        @(negedge clk);
        idle();
      end
      chk("engine result valid after LAWS_LAT", W'(out_valid), 1);
      wreq[WP_C0] = '{valid: 1'b1, vreg: 6'd12, beat: 8'(b)};
      wreq[WP_C1] = '{valid: 1'b1, vreg: 6'd16, beat: 8'(b)};
      #1;
      chk("both results written in one cycle", W'(wgnt[1:0]), 3);
      rd(RP_ST, 12, b);
      @(negedge clk);
      idle();
      chk("butterfly sum", st_rdata, W'(({1'b0, A[b]} + {1'b0, mm(T[b], B[b])}) % {1'b0, m.q}));
      rd(RP_S0, 16, b);
      rreq[RP_S1] = '{valid: 1'b1, vreg: 6'd4, beat: 8'(b)};
      @(negedge clk);
      idle();
      chk("butterfly difference", sh_rdata0,
          (A[b] >= mm(T[b], B[b])) ? A[b] - mm(T[b], B[b]) : m.q - (mm(T[b], B[b]) - A[b]));
      chk("shuffle read port 1", sh_rdata1, B[b]);
    end
    // scalar broadcast
    @(negedge clk);
    idle();
    scalar = 128'h1234_5678_9abc_def0_0fed_cba9_8765_4321;
    ld_scalar = 1;
    @(negedge clk);
    idle();
    issue = 1; op = ALU_PASS;
    for (int i = 0; i < LAWS_LAT; i++) begin
      @(negedge clk);
      idle();
    end
    wreq[WP_C0] = '{valid: 1'b1, vreg: 6'd20, beat: 8'd3};
    rd(RP_ST, 20, 3);
    @(negedge clk);
    idle();
    chk("broadcast", st_rdata, 128'h1234_5678_9abc_def0_0fed_cba9_8765_4321);
    // operands in the same memory are not granted together
    @(negedge clk);
    idle();
    rreq[RP_CA] = '{valid: 1'b1, vreg: 6'd0, beat: 8'd1};
    rreq[RP_CB] = '{valid: 1'b1, vreg: 6'd1, beat: 8'd1};
    #1;
    chk("bank conflict serialised", W'(rgnt[1:0]), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
