// shuf_ctrl: control of the shuffle pipeline (the SBAR).
//
// Runs shuffle instructions from the shuffle queue one output beat at a
// time. Output beat k of the destination needs two source beats:
//   UNPACKLO  ra beat k/2,           rb beat k/2
//   UNPACKHI  ra beat BEATS/2 + k/2, rb beat BEATS/2 + k/2
//   PACKLO/HI k <  BEATS/2: ra beats 2k, 2k+1; else rb beats 2(k-BEATS/2), +1
// They are read through the slices' two SBAR read ports (RP_S0, RP_S1) and
// captured in the SBAR one cycle after the grant. Once both are there the
// SBAR routes them into its output register (ld_out), which is written to
// the destination through port WP_SH while the next beat is being read.
// After the last beat is written the instruction's busy-board mask goes out
// on rel. The destination must not be one of the sources.
// Timing: without bank conflicts one beat per 3 cycles.
module shuf_ctrl
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLE = 64,
  localparam int unsigned BEATS   = VLEN / NUM_HPLE
) (
  input  logic                clk,
  input  logic                rst_n,
  input  sh_entry_t           head,
  input  logic                empty,
  output logic                pop,
  output logic [NUM_VREG-1:0] rel,
  output vrf_req_t            rreq [2],   // RP_S0, RP_S1
  input  logic [1:0]          rgnt,
  output vrf_req_t            wreq,       // WP_SH
  input  logic                wgnt,
  // SBAR control
  output logic                ld0, ld1, ld_out,
  output sh_mode_t            mode,
  output logic                beat_odd,
  output logic                ev_conflict
);
  localparam int unsigned HB = BEATS / 2;

  sh_entry_t  cur;
  logic       cur_valid;
  logic [7:0] k;
  logic [1:0] have, gnt_q, req;
  logic [5:0] sreg0, sreg1;
  logic [7:0] sbeat0, sbeat1;
  logic       outv, out_last, adv, adv_last, load, wdone;
  logic [5:0] out_rd;
  logic [7:0] out_beat;
  logic [NUM_VREG-1:0] out_regs;

  always_comb begin
    unique case (cur.mode)
      SH_UNPACKLO: begin
        sreg0 = cur.ra; sbeat0 = k >> 1;
        sreg1 = cur.rb; sbeat1 = k >> 1;
      end
      SH_UNPACKHI: begin
        sreg0 = cur.ra; sbeat0 = 8'(HB) + (k >> 1);
        sreg1 = cur.rb; sbeat1 = 8'(HB) + (k >> 1);
      end
      default: begin
        if (k < 8'(HB)) begin
          sreg0 = cur.ra; sbeat0 = 8'(2 * k);
        end else begin
          sreg0 = cur.rb; sbeat0 = 8'(2 * (int'(k) - HB));
        end
        sreg1 = sreg0; sbeat1 = sbeat0 + 1'b1;
      end
    endcase
  end

  assign req     = {2{cur_valid}} & ~have & ~gnt_q;
  assign rreq[0] = '{valid: req[0], vreg: sreg0, beat: sbeat0};
  assign rreq[1] = '{valid: req[1], vreg: sreg1, beat: sbeat1};
  assign ev_conflict = |(req & ~rgnt);
  assign ld0 = gnt_q[0];
  assign ld1 = gnt_q[1];

  assign wreq     = '{valid: outv, vreg: out_rd, beat: out_beat};
  assign wdone    = outv && wgnt;
  assign adv      = cur_valid && have == 2'b11 && (!outv || wdone);
  assign adv_last = adv && k == 8'(BEATS - 1);
  assign ld_out   = adv;
  assign mode     = cur.mode;
  assign beat_odd = k[0];
  assign load     = !empty && (!cur_valid || adv_last);
  assign pop      = load;
  assign rel      = (wdone && out_last) ? out_regs : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0; cur_valid <= 1'b0; k <= '0; have <= '0; gnt_q <= '0;
      outv <= 1'b0; out_last <= 1'b0; out_rd <= '0; out_beat <= '0; out_regs <= '0;
    end else begin
      gnt_q <= rgnt & req;
      if (adv) begin
        have <= '0;
        k    <= adv_last ? '0 : k + 1'b1;
      end else begin
        have <= have | gnt_q;
      end
      if (load) begin
        cur <= head; cur_valid <= 1'b1;
      end else if (adv_last) begin
        cur_valid <= 1'b0;
      end
      if (adv) begin
        outv <= 1'b1; out_rd <= cur.rd; out_beat <= k; out_last <= adv_last;
        out_regs <= cur.regs;
      end else if (wdone) begin
        outv <= 1'b0;
      end
    end
  end
endmodule
