// hple: one High-Performance LAWS Engine lane: a LAWS engine (laws_engine),
// this lane's VRF slice (vrf_slice) and the operand latches between them.
//
// The compute controller (alu_ctrl) reads operands out of the slice through
// the three engine read ports; ld_a/ld_b/ld_w capture them one cycle after
// the read grant (the slice's read latency). Operands whose registers share a
// memory are read in different cycles and wait in these latches, which is
// this design's addition. ld_scalar loads operand a with the broadcast
// scalar instead. `issue` hands the latched operands to the engine; its
// results feed the two engine write ports of the slice directly, and stay
// there while `en` is low. The shuffle and load write data come in from the
// crossbars, and the shuffle and store read data go out to them. All control
// is common to every lane; only data is per lane.
module hple
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLE = 64,
  localparam int unsigned BEATS   = VLEN / NUM_HPLE,
  localparam int unsigned AW      = $clog2(REGS_PER_BANK * BEATS),
  localparam int unsigned BW      = $clog2(NUM_VBANKS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // VRF bank command (from vrf_arbiter)
  input  logic [NUM_VBANKS-1:0] bank_en,
  input  logic [NUM_VBANKS-1:0] bank_we,
  input  logic [AW-1:0]         bank_addr [NUM_VBANKS],
  input  logic [1:0]            bank_wsel [NUM_VBANKS],
  input  logic [BW-1:0]         rsel      [NUM_RP],
  // operand latches
  input  logic                  ld_a, ld_b, ld_w, ld_scalar,
  input  logic [W-1:0]          scalar,
  // engine control
  input  logic                  en,
  input  logic                  issue,
  input  alu_op_t               op,
  input  modulus_t              m,
  output logic                  out_valid,
  // crossbar side
  input  logic [W-1:0]          sh_wdata,
  input  logic [W-1:0]          ld_wdata,
  output logic [W-1:0]          sh_rdata0,
  output logic [W-1:0]          sh_rdata1,
  output logic [W-1:0]          st_rdata
);
  logic [W-1:0] rdata [NUM_RP];
  logic [W-1:0] wdata [NUM_WP];
  logic [W-1:0] a_q, b_q, w_q, out0, out1;

  vrf_slice #(.NUM_HPLE(NUM_HPLE)) u_slice (
    .clk, .bank_en, .bank_we, .bank_addr, .bank_wsel, .rsel, .wdata, .rdata
  );

  always_ff @(posedge clk) begin
    if (ld_scalar) a_q <= scalar;
    else if (ld_a) a_q <= rdata[RP_CA];
    if (ld_b) b_q <= rdata[RP_CB];
    if (ld_w) w_q <= rdata[RP_CW];
  end

  laws_engine u_laws (
    .clk, .rst_n, .en, .in_valid(issue), .op, .a(a_q), .b(b_q), .w(w_q), .m,
    .out_valid, .out0, .out1
  );

  always_comb begin
    wdata[WP_C0] = out0;
    wdata[WP_C1] = out1;
    wdata[WP_SH] = sh_wdata;
    wdata[WP_LD] = ld_wdata;
  end

  assign sh_rdata0 = rdata[RP_S0];
  assign sh_rdata1 = rdata[RP_S1];
  assign st_rdata  = rdata[RP_ST];
endmodule
