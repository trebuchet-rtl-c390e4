// lsu_ctrl: load and store control, moving vectors between the VDM and the
// VRF through the VDM crossbar (vbar).
//
// Instructions come in order from the load/store queue. Element e of the
// vector lives at VDM word base + stride*e (stride 1 for VLOAD/VSTORE, the
// instruction's stride for the strided forms). Work is done one beat
// (NUM_HPLE elements, one per lane) at a time:
//   load : every lane requests its word from the VBAR; lanes refused because
//          of a bank collision retry until served; the returned words are
//          collected in a beat buffer, which is then written to the
//          destination register through VRF port WP_LD.
//   store: the beat is read from the source register through VRF port RP_ST
//          into a beat buffer, then every lane writes its word through the
//          VBAR, again retrying on bank collisions.
// When the last beat is done the instruction's busy-board mask goes out on
// rel for one cycle and the next instruction is taken.
// Timing per beat without collisions: load 3 cycles (request, return,
// VRF write), store 3 cycles (VRF read, data, VDM write).
module lsu_ctrl
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLE = 64,
  localparam int unsigned BEATS   = VLEN / NUM_HPLE
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  ls_entry_t            head,
  input  logic                 empty,
  output logic                 pop,
  output logic [NUM_VREG-1:0]  rel,
  // VRF
  output vrf_req_t             wreq,          // WP_LD
  input  logic                 wgnt,
  output vrf_req_t             rreq,          // RP_ST
  input  logic                 rgnt,
  input  logic [W-1:0]         st_rdata [NUM_HPLE],
  output logic [W-1:0]         ld_wdata [NUM_HPLE],
  // VBAR lanes
  output logic [NUM_HPLE-1:0]  lane_req,
  output logic                 lane_we,
  output logic [ADDR_BITS-1:0] lane_addr  [NUM_HPLE],
  output logic [W-1:0]         lane_wdata [NUM_HPLE],
  input  logic [NUM_HPLE-1:0]  lane_gnt,
  input  logic [NUM_HPLE-1:0]  lane_rvalid,
  input  logic [W-1:0]         lane_rdata [NUM_HPLE],
  output logic                 busy,
  output logic                 ev_conflict
);
  typedef enum logic [2:0] { S_IDLE, S_MEM, S_WAIT, S_VRF, S_SRD } state_t;

  state_t              state;
  ls_entry_t           cur;
  logic [7:0]          k;
  logic [NUM_HPLE-1:0] pend;
  logic [W-1:0]        buf_q [NUM_HPLE];
  logic                last;

  assign last = (k == 8'(BEATS - 1));

  always_comb begin
    for (int j = 0; j < NUM_HPLE; j++) begin
      lane_addr[j]  = cur.base + cur.stride * ADDR_BITS'(int'(k) * NUM_HPLE + j);
      lane_wdata[j] = buf_q[j];
    end
  end
  assign ld_wdata    = buf_q;
  assign lane_req    = (state == S_MEM) ? pend : '0;
  assign lane_we     = cur.store;
  assign ev_conflict = (state == S_MEM) && ((pend & ~lane_gnt) != '0);
  assign wreq        = '{valid: state == S_VRF && !cur.store, vreg: cur.vreg, beat: k};
  assign rreq        = '{valid: state == S_VRF &&  cur.store, vreg: cur.vreg, beat: k};
  assign pop         = (state == S_IDLE) && !empty;
  assign busy        = (state != S_IDLE);

  logic beat_done;
  always_comb begin
    beat_done = 1'b0;
    if (state == S_MEM  &&  cur.store && (pend & ~lane_gnt) == '0) beat_done = 1'b1;
    if (state == S_VRF  && !cur.store && wgnt)                      beat_done = 1'b1;
  end
  assign rel = (beat_done && last) ? cur.regs : '0;

  always_ff @(posedge clk) begin
    for (int j = 0; j < NUM_HPLE; j++) begin
      if (state == S_SRD)      buf_q[j] <= st_rdata[j];
      else if (lane_rvalid[j]) buf_q[j] <= lane_rdata[j];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cur   <= '0;
      k     <= '0;
      pend  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (!empty) begin
          cur   <= head;
          k     <= '0;
          pend  <= '1;
          state <= head.store ? S_VRF : S_MEM;
        end
        S_MEM: begin
          pend <= pend & ~lane_gnt;
          if ((pend & ~lane_gnt) == '0) begin
            if (!cur.store) state <= S_WAIT;
            else if (last)  state <= S_IDLE;
            else begin
              k     <= k + 1'b1;
              state <= S_VRF;
            end
          end
        end
        S_WAIT: state <= S_VRF;
        S_VRF: begin
          if (cur.store) begin
            if (rgnt) state <= S_SRD;
          end else if (wgnt) begin
            if (last) state <= S_IDLE;
            else begin
              k     <= k + 1'b1;
              pend  <= '1;
              state <= S_MEM;
            end
          end
        end
        default: begin   // S_SRD: store data arrives from the VRF
          pend  <= '1;
          state <= S_MEM;
        end
      endcase
    end
  end
endmodule
