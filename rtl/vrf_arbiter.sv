// vrf_arbiter: bank arbiter shared by all VRF slices.
//
// Each VRF memory is single ported and holds four registers, so two
// accesses to registers of the same memory cannot happen in one cycle. The
// published design leaves avoiding this to the compiler's scheduling; this
// arbiter makes the hardware safe when the schedule does not: per cycle it
// grants each memory to one request and the losing pipelines stall.
//
// Requests come from the three backend pipelines as (register, beat) pairs:
// write ports WP_C0, WP_C1 (LAWS engine), WP_SH (shuffle), WP_LD (load) and
// read ports RP_CA, RP_CB, RP_CW (LAWS engine), RP_S0, RP_S1 (shuffle),
// RP_ST (store). Fixed priority: all writes before all reads, each group in
// port order; writes first so that pipelines holding finished results drain.
// A read of the row another read already holds this cycle shares that
// access. Purely combinational: grants are valid in the request cycle and
// the bank command goes to every slice in the same cycle.
// rsel is each read port's memory number (register / 4) passed through, so
// that the slices can pick the right memory's output without decoding it.
module vrf_arbiter
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLE = 64,
  localparam int unsigned BEATS   = VLEN / NUM_HPLE,
  localparam int unsigned DEPTH   = REGS_PER_BANK * BEATS,
  localparam int unsigned AW      = $clog2(DEPTH),
  localparam int unsigned BW      = $clog2(NUM_VBANKS)
) (
  input  vrf_req_t              wreq [NUM_WP],
  input  vrf_req_t              rreq [NUM_RP],
  output logic [NUM_WP-1:0]     wgnt,
  output logic [NUM_RP-1:0]     rgnt,
  output logic [NUM_VBANKS-1:0] bank_en,
  output logic [NUM_VBANKS-1:0] bank_we,
  output logic [AW-1:0]         bank_addr [NUM_VBANKS],
  output logic [1:0]            bank_wsel [NUM_VBANKS],
  output logic [BW-1:0]         rsel      [NUM_RP]
);
  function automatic logic [BW-1:0] bank_of(input logic [5:0] r);
    return BW'(int'(r) / REGS_PER_BANK);
  endfunction
  function automatic logic [AW-1:0] row_of(input logic [5:0] r, input logic [7:0] beat);
    return AW'((int'(r) % REGS_PER_BANK) * BEATS + int'(beat));
  endfunction

  always_comb begin
    logic [BW-1:0] b;
    bank_en = '0;
    bank_we = '0;
    wgnt    = '0;
    rgnt    = '0;
    for (int i = 0; i < NUM_VBANKS; i++) begin
      bank_addr[i] = '0;
      bank_wsel[i] = '0;
    end
    for (int p = 0; p < NUM_RP; p++) rsel[p] = bank_of(rreq[p].vreg);

    for (int p = 0; p < NUM_WP; p++) begin
      b = bank_of(wreq[p].vreg);
      if (wreq[p].valid && !bank_en[b]) begin
        wgnt[p]      = 1'b1;
        bank_en[b]   = 1'b1;
        bank_we[b]   = 1'b1;
        bank_addr[b] = row_of(wreq[p].vreg, wreq[p].beat);
        bank_wsel[b] = 2'(p);
      end
    end
    for (int p = 0; p < NUM_RP; p++) begin
      b = bank_of(rreq[p].vreg);
      if (rreq[p].valid) begin
        if (!bank_en[b]) begin
          rgnt[p]      = 1'b1;
          bank_en[b]   = 1'b1;
          bank_addr[b] = row_of(rreq[p].vreg, rreq[p].beat);
        end else if (!bank_we[b] && bank_addr[b] == row_of(rreq[p].vreg, rreq[p].beat)) begin
          rgnt[p] = 1'b1;   // same row already being read: share it
        end
      end
    end
  end
endmodule
