// barrett_modmul: pipelined Barrett modular multiplier, r = a*b mod q.
//
// Three pipeline stages, all advanced together by `en` (a stalled pipeline
// holds every stage):
//   1. x  = a*b (full 2W-bit product)
//   2. q2 = (x >> (k-1)) * mu           quotient estimate
//   3. r  = x - (q2 >> (k+1))*q, then at most two subtractions of q
// mu = floor(2^(2k)/q) and k = bit length of q come from the modulus
// register. The remainder step is computed on its low W+2 bits only: the
// true remainder is below 3q < 2^(W+1), so the upper bits of x and of the
// quotient-times-modulus product cancel and need no hardware. That truncated
// product follows the published multiplier; the quotient product is kept
// full size here. Operands must be < q, q < 2^(W-1) and q not a power of
// two, so that mu fits in W bits.
//
// Timing: result appears 3 enabled cycles after the operands (r is the
// registered output of stage 3).
module barrett_modmul #(
  parameter int unsigned W     = 128,
  parameter int unsigned KBITS = 8
) (
  input  logic             clk,
  input  logic             en,
  input  logic [W-1:0]     a,
  input  logic [W-1:0]     b,
  input  logic [W-1:0]     q,
  input  logic [W-1:0]     mu,
  input  logic [KBITS-1:0] k,
  output logic [W-1:0]     r
);
  localparam int unsigned RB = W + 2;   // remainder width: enough for k+2 <= W+1 bits

  // stage 1
  logic [2*W-1:0]   x1;
  logic [W-1:0]     q_1, mu_1;
  logic [KBITS-1:0] k_1;
  // stage 2
  logic [2*W+1:0]   q2_2;
  logic [RB-1:0]    x_2;
  logic [W-1:0]     q_2;
  logic [KBITS-1:0] k_2;

  logic [W:0]       q1_c;      // x >> (k-1): at most k+1 bits
  logic [2*W+1:0]   q2_c;
  logic [W:0]       q3_c;
  logic [RB-1:0]    qq_c, t_c, t1_c;

  always_comb begin
    q1_c = (W+1)'(x1 >> (k_1 - 1'b1));
    q2_c = q1_c * {1'b0, mu_1};
    q3_c = (W+1)'(q2_2 >> (k_2 + 1'b1));
    qq_c = RB'(q3_c * {{(RB-W){1'b0}}, q_2});   // low RB bits only
    t_c  = x_2 - qq_c;                        // wraps mod 2^RB; true value < 3q
    t1_c = (t_c >= RB'(q_2)) ? t_c - RB'(q_2) : t_c;
  end

  always_ff @(posedge clk) begin
    if (en) begin
      x1   <= a * b;
      q_1  <= q;
      mu_1 <= mu;
      k_1  <= k;

      q2_2 <= q2_c;
      x_2  <= RB'(x1);
      q_2  <= q_1;
      k_2  <= k_1;

      r    <= W'((t1_c >= RB'(q_2)) ? t1_c - RB'(q_2) : t1_c);
    end
  end
endmodule
