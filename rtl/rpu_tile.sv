// rpu_tile: one Ring Processing Unit (RPU) tile, the top of this design.
//
// An explicitly managed vector processor for 128-bit modular (ring)
// arithmetic. The compiler places all data; there are no caches and no
// dynamic scheduling beyond a busy-board stall.
//
//   frontend        instruction memory, in-order fetch/decode, busy board,
//                   three decoupled queues (load/store, compute, shuffle)
//   scalar_backend  SDM (32 KB) and the scalar, modulus and address
//                   register files
//   alu_ctrl        compute pipeline over NUM_HPLE lanes (hple: LAWS engine
//                   plus VRF slice)
//   shuf_ctrl+sbar  register-to-register shuffles across lanes
//   lsu_ctrl+vbar   loads and stores between the VDM (4 MiB, banked) and
//                   the VRF
//   vrf_arbiter     grants the single-port VRF memories to the pipelines
//
// Interface: the host (controlling RISC-V core, over the tile control bus)
// loads programs (imem_*) and constants (sdm_*), starts a kernel with a
// one-cycle `start` and the address of its first instruction, and sees a
// one-cycle `done` when it has halted and all its work is finished. The
// VDM port (vdm_*) is where the tile mesh network/host moves data in and
// out; it has priority over the lanes, and read data returns one cycle
// later with vdm_rvalid. Lane count and VDM bank count are parameters; the
// defaults (64 lanes, 64 banks) are this design's choice, the memory and
// register sizes follow the published tile.
module rpu_tile
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLE   = 64,
  parameter int unsigned VDM_WORDS  = 262144,
  parameter int unsigned VDM_BANKS  = 64,
  parameter int unsigned SDM_WORDS  = 2048,
  parameter int unsigned IMEM_DEPTH = 4096,
  parameter int unsigned QDEPTH     = 4,
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH),
  localparam int unsigned SAW       = $clog2(SDM_WORDS),
  localparam int unsigned BEATS     = VLEN / NUM_HPLE,
  localparam int unsigned VAW       = $clog2(REGS_PER_BANK * BEATS),
  localparam int unsigned BW        = $clog2(NUM_VBANKS),
  localparam int unsigned RW        = $clog2(VDM_WORDS / VDM_BANKS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // tile control
  input  logic                 start,
  input  logic [IAW-1:0]       start_pc,
  output logic                 done,
  output logic                 running,
  input  logic                 imem_we,
  input  logic [IAW-1:0]       imem_waddr,
  input  logic [63:0]          imem_wdata,
  input  logic                 sdm_we,
  input  logic [SAW-1:0]       sdm_addr,
  input  logic [W-1:0]         sdm_wdata,
  // VDM access from the network/host side
  input  logic                 vdm_req,
  input  logic                 vdm_we,
  input  logic [ADDR_BITS-1:0] vdm_addr,
  input  logic [W-1:0]         vdm_wdata,
  output logic                 vdm_rvalid,
  output logic [W-1:0]         vdm_rdata,
  // event counters, cleared by reset
  output perf_t                perf
);
  // ---------------- frontend and scalar backend ----------------
  logic                 sc_cmd_valid, sc_busy;
  logic [1:0]           sc_cmd_op;
  logic [5:0]           sc_cmd_reg, srf_idx;
  logic [ADDR_BITS-1:0] sc_cmd_addr, arf_val;
  logic [W-1:0]         srf_val;
  logic [3:0]           mrf_idx, arf_idx;
  modulus_t             mrf_val;
  ls_entry_t            ls_head;
  alu_entry_t           alu_head;
  sh_entry_t            sh_head;
  logic                 ls_empty, alu_empty, sh_empty, ls_pop, alu_pop, sh_pop;
  logic [NUM_VREG-1:0]  rel_ls, rel_alu, rel_sh;
  logic                 ev_hazard_stall, ev_queue_stall;

  frontend #(.IMEM_DEPTH(IMEM_DEPTH), .QDEPTH(QDEPTH)) u_frontend (
    .clk, .rst_n, .start, .start_pc, .done, .running,
    .imem_we, .imem_waddr, .imem_wdata,
    .sc_cmd_valid, .sc_cmd_op, .sc_cmd_reg, .sc_cmd_addr, .sc_busy,
    .srf_idx, .srf_val, .mrf_idx, .mrf_val, .arf_idx, .arf_val,
    .ls_head, .ls_empty, .ls_pop, .alu_head, .alu_empty, .alu_pop,
    .sh_head, .sh_empty, .sh_pop, .rel_ls, .rel_alu, .rel_sh,
    .ev_hazard_stall, .ev_queue_stall
  );

  scalar_backend #(.SDM_WORDS(SDM_WORDS)) u_scalar (
    .clk, .rst_n, .cmd_valid(sc_cmd_valid), .cmd_op(sc_cmd_op), .cmd_reg(sc_cmd_reg),
    .cmd_addr(sc_cmd_addr), .busy(sc_busy),
    .host_we(sdm_we), .host_addr(sdm_addr), .host_wdata(sdm_wdata),
    .srf_idx, .srf_val, .mrf_idx, .mrf_val, .arf_idx, .arf_val
  );

  // ---------------- VRF arbitration ----------------
  vrf_req_t              wreq [NUM_WP];
  vrf_req_t              rreq [NUM_RP];
  logic [NUM_WP-1:0]     wgnt;
  logic [NUM_RP-1:0]     rgnt;
  logic [NUM_VBANKS-1:0] bank_en, bank_we;
  logic [VAW-1:0]        bank_addr [NUM_VBANKS];
  logic [1:0]            bank_wsel [NUM_VBANKS];
  logic [BW-1:0]         rsel      [NUM_RP];

  vrf_arbiter #(.NUM_HPLE(NUM_HPLE)) u_arb (
    .wreq, .rreq, .wgnt, .rgnt, .bank_en, .bank_we, .bank_addr, .bank_wsel, .rsel
  );

  // ---------------- compute pipeline ----------------
  vrf_req_t   alu_rreq [3];
  vrf_req_t   alu_wreq [2];
  logic       ld_a, ld_b, ld_w, ld_scalar, alu_en, alu_issue, ev_alu_conflict;
  logic [W-1:0] bscalar;
  alu_op_t    alu_op;
  modulus_t   alu_m;

  alu_ctrl #(.NUM_HPLE(NUM_HPLE)) u_alu (
    .clk, .rst_n, .head(alu_head), .empty(alu_empty), .pop(alu_pop), .rel(rel_alu),
    .rreq(alu_rreq), .rgnt(rgnt[RP_CW:RP_CA]), .wreq(alu_wreq), .wgnt(wgnt[WP_C1:WP_C0]),
    .ld_a, .ld_b, .ld_w, .ld_scalar, .scalar(bscalar), .en(alu_en), .issue(alu_issue),
    .op(alu_op), .m(alu_m), .ev_conflict(ev_alu_conflict)
  );

  // ---------------- shuffle pipeline ----------------
  vrf_req_t   sh_rreq [2];
  vrf_req_t   sh_wreq;
  logic       sh_ld0, sh_ld1, sh_ldout, sh_beat_odd, ev_sh_conflict;
  sh_mode_t   sh_mode;
  logic [W-1:0] sh_rd0 [NUM_HPLE];
  logic [W-1:0] sh_rd1 [NUM_HPLE];
  logic [W-1:0] sh_out [NUM_HPLE];

  shuf_ctrl #(.NUM_HPLE(NUM_HPLE)) u_shuf (
    .clk, .rst_n, .head(sh_head), .empty(sh_empty), .pop(sh_pop), .rel(rel_sh),
    .rreq(sh_rreq), .rgnt(rgnt[RP_S1:RP_S0]), .wreq(sh_wreq), .wgnt(wgnt[WP_SH]),
    .ld0(sh_ld0), .ld1(sh_ld1), .ld_out(sh_ldout), .mode(sh_mode), .beat_odd(sh_beat_odd),
    .ev_conflict(ev_sh_conflict)
  );

  sbar #(.NUM_HPLE(NUM_HPLE)) u_sbar (
    .clk, .ld0(sh_ld0), .ld1(sh_ld1), .rd0(sh_rd0), .rd1(sh_rd1), .ld_out(sh_ldout),
    .mode(sh_mode), .beat_odd(sh_beat_odd), .out_q(sh_out)
  );

  // ---------------- load/store pipeline ----------------
  vrf_req_t             ls_wreq, ls_rreq;
  logic [W-1:0]         st_rdata   [NUM_HPLE];
  logic [W-1:0]         ld_wdata   [NUM_HPLE];
  logic [NUM_HPLE-1:0]  lane_req, lane_gnt, lane_rvalid;
  logic                 lane_we, ls_busy, ev_vdm_conflict;
  logic [ADDR_BITS-1:0] lane_addr  [NUM_HPLE];
  logic [W-1:0]         lane_wdata [NUM_HPLE];
  logic [W-1:0]         lane_rdata [NUM_HPLE];

  lsu_ctrl #(.NUM_HPLE(NUM_HPLE)) u_lsu (
    .clk, .rst_n, .head(ls_head), .empty(ls_empty), .pop(ls_pop), .rel(rel_ls),
    .wreq(ls_wreq), .wgnt(wgnt[WP_LD]), .rreq(ls_rreq), .rgnt(rgnt[RP_ST]),
    .st_rdata, .ld_wdata, .lane_req, .lane_we, .lane_addr, .lane_wdata,
    .lane_gnt, .lane_rvalid, .lane_rdata, .busy(ls_busy), .ev_conflict(ev_vdm_conflict)
  );

  logic [VDM_BANKS-1:0] vb_en, vb_we;
  logic [RW-1:0]        vb_row   [VDM_BANKS];
  logic [W-1:0]         vb_wdata [VDM_BANKS];
  logic [W-1:0]         vb_rdata [VDM_BANKS];

  vbar #(.NUM_HPLE(NUM_HPLE), .NUM_BANKS(VDM_BANKS), .WORDS(VDM_WORDS)) u_vbar (
    .clk, .rst_n, .lane_req, .lane_we, .lane_addr, .lane_wdata, .lane_gnt, .lane_rvalid,
    .lane_rdata, .ext_req(vdm_req), .ext_we(vdm_we), .ext_addr(vdm_addr),
    .ext_wdata(vdm_wdata), .ext_rvalid(vdm_rvalid), .ext_rdata(vdm_rdata),
    .bank_en(vb_en), .bank_we(vb_we), .bank_row(vb_row), .bank_wdata(vb_wdata),
    .bank_rdata(vb_rdata)
  );

  vdm #(.WORDS(VDM_WORDS), .NUM_BANKS(VDM_BANKS)) u_vdm (
    .clk, .bank_en(vb_en), .bank_we(vb_we), .bank_row(vb_row), .bank_wdata(vb_wdata),
    .bank_rdata(vb_rdata)
  );

  // ---------------- request collection ----------------
  always_comb begin
    wreq[WP_C0] = alu_wreq[0];
    wreq[WP_C1] = alu_wreq[1];
    wreq[WP_SH] = sh_wreq;
    wreq[WP_LD] = ls_wreq;
    rreq[RP_CA] = alu_rreq[0];
    rreq[RP_CB] = alu_rreq[1];
    rreq[RP_CW] = alu_rreq[2];
    rreq[RP_S0] = sh_rreq[0];
    rreq[RP_S1] = sh_rreq[1];
    rreq[RP_ST] = ls_rreq;
  end

  // ---------------- event counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) perf <= '0;
    else begin
      perf.hazard_stalls  <= perf.hazard_stalls  + 32'(ev_hazard_stall);
      perf.queue_stalls   <= perf.queue_stalls   + 32'(ev_queue_stall);
      perf.vrf_conflicts  <= perf.vrf_conflicts  + 32'(ev_alu_conflict || ev_sh_conflict);
      perf.vdm_conflicts  <= perf.vdm_conflicts  + 32'(ev_vdm_conflict);
      perf.alu_beats      <= perf.alu_beats      + 32'(alu_issue);
      perf.overlap_cycles <= perf.overlap_cycles + 32'(ls_busy && (alu_issue || sh_ldout));
    end
  end

  // ---------------- lanes ----------------
  for (genvar j = 0; j < NUM_HPLE; j++) begin : g_lane
    logic lane_out_valid;
    hple #(.NUM_HPLE(NUM_HPLE)) u_hple (
      .clk, .rst_n, .bank_en, .bank_we, .bank_addr, .bank_wsel, .rsel,
      .ld_a, .ld_b, .ld_w, .ld_scalar, .scalar(bscalar),
      .en(alu_en), .issue(alu_issue), .op(alu_op), .m(alu_m), .out_valid(lane_out_valid),
      .sh_wdata(sh_out[j]), .ld_wdata(ld_wdata[j]),
      .sh_rdata0(sh_rd0[j]), .sh_rdata1(sh_rd1[j]), .st_rdata(st_rdata[j])
    );
  end
endmodule
