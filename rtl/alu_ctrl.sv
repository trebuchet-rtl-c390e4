// alu_ctrl: control of the compute pipeline (the HPLE lanes).
//
// Takes instructions from the compute queue and runs each over the
// BEATS = VLEN/NUM_HPLE beats of a vector; all lanes work on the same beat.
// Per beat it
//   1. requests the needed source registers from the VRF bank arbiter
//      (ports RP_CA = ra, RP_CB = rb, RP_CW = rc); operands in the same
//      memory are granted in different cycles. A granted read is latched
//      in the lanes' operand registers the next cycle (ld_a/ld_b/ld_w).
//      VBCAST needs no read: operand a is loaded with the broadcast scalar.
//   2. issues the beat to the LAWS engines once all its operands are
//      latched; a tag (destinations, beat, last-beat flag) follows the data
//      through a LAWS_LAT-deep pipeline here.
//   3. writes the engine results back through ports WP_C0 (rd) and WP_C1
//      (rd2, butterfly only). Until both writes are granted the engines and
//      the tag pipeline are frozen (en low).
// After the last beat is written, the instruction's busy-board mask goes out
// on rel for one cycle. A new instruction is popped when the previous one
// has issued its last beat, so consecutive instructions overlap.
// Timing: without bank conflicts a beat takes 3 cycles to collect and issue,
// and results are written LAWS_LAT cycles after issue.
module alu_ctrl
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLE = 64,
  localparam int unsigned BEATS   = VLEN / NUM_HPLE
) (
  input  logic                clk,
  input  logic                rst_n,
  // compute queue
  input  alu_entry_t          head,
  input  logic                empty,
  output logic                pop,
  output logic [NUM_VREG-1:0] rel,
  // VRF arbiter
  output vrf_req_t            rreq [3],    // RP_CA, RP_CB, RP_CW
  input  logic [2:0]          rgnt,
  output vrf_req_t            wreq [2],    // WP_C0, WP_C1
  input  logic [1:0]          wgnt,
  // lane control
  output logic                ld_a, ld_b, ld_w, ld_scalar,
  output logic [W-1:0]        scalar,
  output logic                en,
  output logic                issue,
  output alu_op_t             op,
  output modulus_t            m,
  // events
  output logic                ev_conflict   // a needed read was refused this cycle
);
  typedef struct packed {
    logic       valid;
    logic [5:0] rd, rd2;
    logic       two;
    logic [7:0] beat;
    logic       last;
    logic [NUM_VREG-1:0] regs;
  } tag_t;

  alu_entry_t cur;
  logic       cur_valid;
  logic [7:0] rbeat;
  logic [2:0] need, have, gnt_q, req, gnt_eff;
  logic       pass_q;
  tag_t       tag [LAWS_LAT];
  tag_t       wb;
  logic       done0, done1, complete, issue_last, load;

  always_comb begin
    unique case (cur.op)
      ALU_BFLY: need = 3'b111;
      ALU_PASS: need = 3'b001;
      default:  need = 3'b011;
    endcase
  end

  assign req = {3{cur_valid}} & need & ~have & ~gnt_q;
  always_comb begin
    rreq[0] = '{valid: req[0] && cur.op != ALU_PASS, vreg: cur.ra, beat: rbeat};
    rreq[1] = '{valid: req[1], vreg: cur.rb, beat: rbeat};
    rreq[2] = '{valid: req[2], vreg: cur.rc, beat: rbeat};
    gnt_eff = rgnt & req;
    if (cur.op == ALU_PASS) gnt_eff[0] = req[0];
  end
  assign ev_conflict = |(req & ~gnt_eff);

  assign ld_a      = gnt_q[0] && !pass_q;
  assign ld_scalar = gnt_q[0] && pass_q;
  assign ld_b      = gnt_q[1];
  assign ld_w      = gnt_q[2];
  assign scalar    = cur.scalar;

  assign wb       = tag[LAWS_LAT-1];
  assign wreq[0]  = '{valid: wb.valid && !done0, vreg: wb.rd, beat: wb.beat};
  assign wreq[1]  = '{valid: wb.valid && wb.two && !done1, vreg: wb.rd2, beat: wb.beat};
  assign complete = wb.valid && (done0 || wgnt[0]) && (!wb.two || done1 || wgnt[1]);
  assign en       = !wb.valid || complete;
  assign rel      = (complete && wb.last) ? wb.regs : '0;

  assign issue      = cur_valid && ((have | ~need) == 3'b111) && en;
  assign issue_last = issue && rbeat == 8'(BEATS - 1);
  assign load       = !empty && (!cur_valid || issue_last);
  assign pop        = load;
  assign op         = cur.op;
  assign m          = cur.m;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_valid <= 1'b0;
      cur       <= '0;
      rbeat     <= '0;
      have      <= '0;
      gnt_q     <= '0;
      pass_q    <= 1'b0;
      done0     <= 1'b0;
      done1     <= 1'b0;
      for (int i = 0; i < LAWS_LAT; i++) tag[i] <= '0;
    end else begin
      gnt_q  <= gnt_eff;
      pass_q <= (cur.op == ALU_PASS);
      if (issue) begin
        have  <= '0;
        rbeat <= issue_last ? '0 : rbeat + 1'b1;
      end else begin
        have <= have | gnt_q;
      end
      if (load) begin
        cur       <= head;
        cur_valid <= 1'b1;
      end else if (issue_last) begin
        cur_valid <= 1'b0;
      end
      if (en) begin
        tag[0] <= '{valid: issue, rd: cur.rd, rd2: cur.rd2, two: cur.op == ALU_BFLY,
                    beat: rbeat, last: issue_last, regs: cur.regs};
        for (int i = 1; i < LAWS_LAT; i++) tag[i] <= tag[i-1];
      end
      done0 <= complete ? 1'b0 : (done0 || (wb.valid && wgnt[0]));
      done1 <= complete ? 1'b0 : (done1 || (wb.valid && wgnt[1]));
    end
  end
endmodule
