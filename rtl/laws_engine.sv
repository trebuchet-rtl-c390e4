// laws_engine: the large-arithmetic-word-size (LAWS) ALU of one vector lane.
//
// It holds, as the published lane does, one modular multiplier, one modular
// adder, one modular subtractor and two comparators, and executes:
//   ALU_ADD  out0 = a + b mod q          ALU_MUL  out0 = a * b mod q
//   ALU_SUB  out0 = a - b mod q          ALU_CMP  out0 = (a < b)
//   ALU_BFLY out0 = a + w*b mod q, out1 = a - w*b mod q (NTT butterfly)
//   ALU_PASS out0 = a                    (scalar broadcast)
// The two comparators are the reduction compares of the adder (a+b >= q)
// and of the subtractor (a >= b); ALU_CMP reads the subtractor's. The
// butterfly form (Cooley-Tukey, twiddle on b) is this design's choice.
//
// Every operation takes the same LAT = 5 enabled cycles: an operand register,
// the three-stage Barrett multiplier, and a final add/subtract stage. The
// modulus (q, mu, k) travels with the operation, so each instruction may use
// its own modulus. `en` low freezes the whole pipeline (back-pressure from
// register write-back). Operands must be < q.
module laws_engine
  import rpu_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             in_valid,
  input  alu_op_t          op,
  input  logic [W-1:0]     a,
  input  logic [W-1:0]     b,
  input  logic [W-1:0]     w,
  input  modulus_t         m,
  output logic             out_valid,
  output logic [W-1:0]     out0,
  output logic [W-1:0]     out1
);
  localparam int unsigned MSTAGES = 3;   // barrett_modmul depth

  // stage 0: operand register
  logic         v0;
  alu_op_t      op0;
  logic [W-1:0] a0, b0, w0;
  modulus_t     m0;

  // side pipeline alongside the multiplier
  logic         vp [MSTAGES];
  alu_op_t      opp[MSTAGES];
  logic [W-1:0] ap [MSTAGES];
  logic [W-1:0] bp [MSTAGES];
  logic [W-1:0] qp [MSTAGES];

  logic [W-1:0] mul_x, mul_y, prod;

  assign mul_x = (op0 == ALU_BFLY) ? w0 : a0;
  assign mul_y = b0;

  barrett_modmul #(.W(W), .KBITS(KBITS)) u_mul (
    .clk(clk), .en(en), .a(mul_x), .b(mul_y), .q(m0.q), .mu(m0.mu), .k(m0.k), .r(prod)
  );

  // final stage: modular adder and subtractor with their comparators
  logic [W-1:0] fa, fb, fq;
  alu_op_t      fop;
  logic [W:0]   sum;
  logic         add_ge, sub_ge;     // the two comparators
  logic [W-1:0] add_r, sub_r, rhs;

  always_comb begin
    fa  = ap[MSTAGES-1];
    fop = opp[MSTAGES-1];
    fq  = qp[MSTAGES-1];
    rhs = (fop == ALU_BFLY) ? prod : bp[MSTAGES-1];
    fb  = rhs;
    sum    = {1'b0, fa} + {1'b0, fb};
    add_ge = (sum >= {1'b0, fq});
    add_r  = add_ge ? W'(sum - {1'b0, fq}) : W'(sum);
    sub_ge = (fa >= fb);
    sub_r  = sub_ge ? fa - fb : fa - fb + fq;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0;
      for (int i = 0; i < MSTAGES; i++) vp[i] <= 1'b0;
      out_valid <= 1'b0;
    end else if (en) begin
      v0 <= in_valid;
      vp[0] <= v0;
      for (int i = 1; i < MSTAGES; i++) vp[i] <= vp[i-1];
      out_valid <= vp[MSTAGES-1];
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      op0 <= op; a0 <= a; b0 <= b; w0 <= w; m0 <= m;
      opp[0] <= op0; ap[0] <= a0; bp[0] <= b0; qp[0] <= m0.q;
      for (int i = 1; i < MSTAGES; i++) begin
        opp[i] <= opp[i-1]; ap[i] <= ap[i-1]; bp[i] <= bp[i-1]; qp[i] <= qp[i-1];
      end
      unique case (fop)
        ALU_ADD:  begin out0 <= add_r; out1 <= '0;    end
        ALU_SUB:  begin out0 <= sub_r; out1 <= '0;    end
        ALU_MUL:  begin out0 <= prod;  out1 <= '0;    end
        ALU_BFLY: begin out0 <= add_r; out1 <= sub_r; end
        ALU_CMP:  begin out0 <= W'(!sub_ge); out1 <= '0; end
        default:  begin out0 <= fa;    out1 <= '0;    end
      endcase
    end
  end
endmodule
