// tb_laws_engine: drives random operations (add, sub, mul, butterfly,
// compare, pass) under several moduli into the LAWS engine, with a randomly
// held enable, and checks every result against a reference computed with
// wide arithmetic. It also checks the latency: a result must come out
// exactly LAWS_LAT enabled cycles after it went in.
module tb_laws_engine;
  import rpu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic en, in_valid, out_valid;
  alu_op_t op;
  logic [W-1:0] a, b, w, out0, out1;
  modulus_t m;
  int checks = 0, failures = 0;

  laws_engine dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { logic [W-1:0] e0, e1; int due; } exp_t;
  exp_t pend [$];
  int en_cycles = 0;

  function automatic logic [W-1:0] mm(logic [W-1:0] x, logic [W-1:0] y, logic [W-1:0] q);
    return W'(({{W{1'b0}}, x} * {{W{1'b0}}, y}) % {{W{1'b0}}, q});
  endfunction
  function automatic logic [W-1:0] ma(logic [W-1:0] x, logic [W-1:0] y, logic [W-1:0] q);
    return W'(({1'b0, x} + {1'b0, y}) % {1'b0, q});
  endfunction
  function automatic logic [W-1:0] ms(logic [W-1:0] x, logic [W-1:0] y, logic [W-1:0] q);
    return (x >= y) ? x - y : q - (y - x);
  endfunction

  modulus_t mods [3];
  initial begin
    logic [2*W+1:0] one;
    logic [W-1:0] qv [3];
    int kk [3];
    qv = '{128'h3fff_ffff_ffff_ffff_ffff_ffff_fff0_0001, 128'hffff_ffff_0000_0001, 128'd97};
    kk = '{126, 64, 7};
    for (int i = 0; i < 3; i++) begin
      one = '0; one[2*kk[i]] = 1'b1;
      mods[i] = '{q: qv[i], mu: W'(one / {{(W+2){1'b0}}, qv[i]}), k: 8'(kk[i])};
    end
    en = 0; in_valid = 0; op = ALU_ADD; a = 0; b = 0; w = 0; m = mods[0];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      en = ($urandom_range(0, 3) != 0);
      in_valid = ($urandom_range(0, 1) == 1) && t < 2900;
      m = mods[$urandom_range(0, 2)];
      op = alu_op_t'($urandom_range(0, 5));
      a = {$urandom, $urandom, $urandom, $urandom} % m.q;
      b = {$urandom, $urandom, $urandom, $urandom} % m.q;
      w = {$urandom, $urandom, $urandom, $urandom} % m.q;
      if (t % 11 == 0) begin a = m.q - 1; b = m.q - 1; w = m.q - 1; end
      if (t % 13 == 0) begin a = 0; end
      @(posedge clk);
      if (en) begin
        en_cycles++;
        if (in_valid) begin
          exp_t x;
          x.due = en_cycles + LAWS_LAT - 1;
          x.e1 = '0;
          unique case (op)
            ALU_ADD:  x.e0 = ma(a, b, m.q);
            ALU_SUB:  x.e0 = ms(a, b, m.q);
            ALU_MUL:  x.e0 = mm(a, b, m.q);
            ALU_BFLY: begin x.e0 = ma(a, mm(w, b, m.q), m.q); x.e1 = ms(a, mm(w, b, m.q), m.q); end
            ALU_CMP:  x.e0 = W'(a < b);
            default:  x.e0 = a;
          endcase
          pend.push_back(x);
        end
      end
      #1;
      // a result appears only on an enabled edge, LAWS_LAT enabled edges
      // after its operands
      if (en && out_valid) begin
        checks++;
        if (pend.size() == 0 || pend[0].due != en_cycles) begin
          failures++;
          $display("unexpected output at enabled cycle %0d", en_cycles);
        end else if (out0 !== pend[0].e0 || out1 !== pend[0].e1) begin
          failures++;
          if (failures < 10) $display("got %h/%h exp %h/%h", out0, out1, pend[0].e0, pend[0].e1);
        end
        if (pend.size() > 0) void'(pend.pop_front());
      end
    end
    checks++;
    if (pend.size() != 0) begin
      failures++;
      $display("%0d results never came out", pend.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
