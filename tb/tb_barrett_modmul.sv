// tb_barrett_modmul: checks the pipelined Barrett multiplier against a
// reference computed with the % operator, for moduli of 2 to 126 bits,
// random operands including q-1, and a randomly toggled enable. Each
// result must appear exactly three enabled cycles after its operands.
module tb_barrett_modmul;
  localparam int W = 128;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic en;
  logic [W-1:0] a, b, q, mu, r;
  logic [7:0] k;
  int checks = 0, failures = 0;

  barrett_modmul dut (.clk, .en, .a, .b, .q, .mu, .k, .r);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] mk_q(int bits);
    logic [W-1:0] v;
    v = {$urandom, $urandom, $urandom, $urandom};
    v = v & ((W'(1) << bits) - 1);
    v[bits-1] = 1'b1;
    v[0] = 1'b1;            // odd, so never a power of two (bits >= 2)
    return v;
  endfunction

  initial begin
    int bits;
    logic [2*W+1:0] one;
    logic [W-1:0] e;
    logic [W-1:0] prev;
    en = 1'b0; a = '0; b = '0; q = 3; mu = 5; k = 2; prev = '1;
    for (int t = 0; t < 400; t++) begin
      bits = 2 + (t % 125);
      q = mk_q(bits);
      if (t == 5) begin q = (W'(1) << 126) - 1; bits = 126; end
      k = 8'(bits);
      one = '0; one[2*bits] = 1'b1;
      mu = W'(one / {{(W+2){1'b0}}, q});
      a = {$urandom, $urandom, $urandom, $urandom} % q;
      b = {$urandom, $urandom, $urandom, $urandom} % q;
      if (t % 7 == 0) begin a = q - 1; b = q - 1; end
      e = W'(({{W{1'b0}}, a} * {{W{1'b0}}, b}) % {{W{1'b0}}, q});
      // enabled edge 1 takes the operands; then zero operands, with random
      // disabled cycles, for enabled edges 2 and 3
      @(negedge clk);
      en = 1'b1;
      @(negedge clk);
      a = '0; b = '0;
      for (int s = 2; s <= 3; s++) begin
        en = 1'b0;
        repeat ($urandom_range(0, 2)) @(negedge clk);
        if (s == 3 && e != prev && e != 0) begin
          checks++;                       // not earlier than 3 enabled cycles
          if (r === e) begin
            failures++;
            $display("result too early t=%0d e=%h", t, e);
          end
        end
        en = 1'b1;
        @(negedge clk);
      end
      en = 1'b0;
      checks++;
      if (r !== e) begin
        failures++;
        if (failures < 10) $display("bits=%0d q=%h got %h exp %h", bits, q, r, e);
      end
      prev = r;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
