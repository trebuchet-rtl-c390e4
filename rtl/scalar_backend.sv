// scalar_backend: Scalar Data Memory (SDM) and the scalar register files.
//
//   SDM  SDM_WORDS x 128-bit constants (32 KB by default, as published),
//        written by the host through host_we/host_addr/host_wdata.
//   SRF  NUM_SREG scalar registers, loaded from the SDM; broadcast into
//        vector registers by VBCAST.
//   MRF  NUM_MREG modulus registers: {q, mu, k}. A modulus load reads q and
//        then mu from two consecutive SDM words and computes k, the bit
//        length of q, so the Barrett multiplier can use it directly.
//   ARF  NUM_AREG address registers, set from an immediate, used as base
//        addresses of VDM and SDM accesses.
// Register-file sizes and the modulus format are this design's choices.
//
// Commands (one at a time, cmd_valid while !busy):
//   SC_ASET   ARF[cmd_reg] = cmd_addr                       1 cycle
//   SC_SLOAD  SRF[cmd_reg] = SDM[cmd_addr]                  done after 2 cycles
//   SC_MLOAD  MRF[cmd_reg] = {SDM[cmd_addr], SDM[cmd_addr+1], k}  after 3 cycles
// busy is high from the cycle after an SLOAD/MLOAD is taken until its
// register is written. The register files are read combinationally by the
// frontend when it dispatches vector instructions.
module scalar_backend
  import rpu_pkg::*;
#(
  parameter int unsigned SDM_WORDS = 2048,
  localparam int unsigned SAW      = $clog2(SDM_WORDS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // command from the frontend
  input  logic                 cmd_valid,
  input  logic [1:0]           cmd_op,
  input  logic [5:0]           cmd_reg,
  input  logic [ADDR_BITS-1:0] cmd_addr,
  output logic                 busy,
  // host write port into the SDM
  input  logic                 host_we,
  input  logic [SAW-1:0]       host_addr,
  input  logic [W-1:0]         host_wdata,
  // read ports
  input  logic [5:0]           srf_idx,
  output logic [W-1:0]         srf_val,
  input  logic [3:0]           mrf_idx,
  output modulus_t             mrf_val,
  input  logic [3:0]           arf_idx,
  output logic [ADDR_BITS-1:0] arf_val
);
  localparam logic [1:0] SC_ASET = 2'd0, SC_SLOAD = 2'd1;   // 2'd2: modulus load

  typedef enum logic [1:0] { S_IDLE, S_SRD, S_MQ, S_MMU } state_t;

  logic [W-1:0]         sdm [SDM_WORDS];
  logic [W-1:0]         srf [NUM_SREG];
  modulus_t             mrf [NUM_MREG];
  logic [ADDR_BITS-1:0] arf [NUM_AREG];

  state_t         state;
  logic [5:0]     reg_q;
  logic [SAW-1:0] rd_addr, addr_q;
  logic [W-1:0]   rd_data, q_hold;
  logic           rd_en;

  function automatic logic [KBITS-1:0] bitlen(input logic [W-1:0] v);
    logic [KBITS-1:0] n;
    n = '0;
    for (int i = 0; i < W; i++) if (v[i]) n = KBITS'(i + 1);
    return n;
  endfunction

  always_comb begin
    rd_en   = 1'b0;
    rd_addr = SAW'(cmd_addr);
    if (state == S_IDLE && cmd_valid && cmd_op != SC_ASET) rd_en = 1'b1;
    if (state == S_MQ) begin
      rd_en   = 1'b1;
      rd_addr = addr_q + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (host_we) sdm[host_addr] <= host_wdata;
    if (rd_en)   rd_data <= sdm[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      reg_q <= '0;
      addr_q <= '0;
      q_hold <= '0;
      for (int i = 0; i < NUM_SREG; i++) srf[i] <= '0;
      for (int i = 0; i < NUM_MREG; i++) mrf[i] <= '0;
      for (int i = 0; i < NUM_AREG; i++) arf[i] <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          reg_q <= cmd_reg;
          addr_q <= SAW'(cmd_addr);
          unique case (cmd_op)
            SC_ASET:  arf[cmd_reg[3:0]] <= cmd_addr;
            SC_SLOAD: state <= S_SRD;
            default:  state <= S_MQ;
          endcase
        end
        S_SRD: begin
          srf[reg_q] <= rd_data;
          state <= S_IDLE;
        end
        S_MQ: begin
          q_hold <= rd_data;
          state <= S_MMU;
        end
        default: begin   // S_MMU
          mrf[reg_q[3:0]] <= '{q: q_hold, mu: rd_data, k: bitlen(q_hold)};
          state <= S_IDLE;
        end
      endcase
    end
  end

  assign busy    = (state != S_IDLE);
  assign srf_val = srf[srf_idx];
  assign mrf_val = mrf[mrf_idx];
  assign arf_val = arf[arf_idx];
endmodule
