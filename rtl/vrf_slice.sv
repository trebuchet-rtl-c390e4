// vrf_slice: one lane's share of the vector register file.
//
// The register file holds NUM_VREG registers of VLEN elements; element e of
// every register lives in lane e mod NUM_HPLE, at beat e / NUM_HPLE, so a
// slice holds BEATS = VLEN/NUM_HPLE elements of each register. As in the
// published design, four registers are stacked in one single-port memory,
// giving NUM_VREG/4 = 16 memories of 4*BEATS words per slice. Register r is
// in memory r/4, at row (r mod 4)*BEATS + beat (which four registers share a
// memory is this design's choice).
//
// The slice has ten logical ports, as published: three reads and two writes
// for the LAWS engine, two reads and one write for the shuffle crossbar, one
// read and one write for the VDM crossbar. Because each memory is single
// ported, the ports are multiplexed onto the memories by a per-bank command
// (enable, write, row, write-port select) computed by the central bank
// arbiter (vrf_arbiter); every slice receives the same command, since all
// lanes execute the same beat. Each read port also receives the bank it
// reads from. Timing: a read granted in cycle t shows on rd[] in cycle t+1;
// a write is done at the end of the granted cycle.
module vrf_slice
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLE = 64,
  localparam int unsigned BEATS   = VLEN / NUM_HPLE,
  localparam int unsigned DEPTH   = REGS_PER_BANK * BEATS,
  localparam int unsigned AW      = $clog2(DEPTH),
  localparam int unsigned BW      = $clog2(NUM_VBANKS)
) (
  input  logic                clk,
  input  logic [NUM_VBANKS-1:0] bank_en,
  input  logic [NUM_VBANKS-1:0] bank_we,
  input  logic [AW-1:0]       bank_addr [NUM_VBANKS],
  input  logic [1:0]          bank_wsel [NUM_VBANKS],   // write port: WP_C0..WP_LD
  input  logic [BW-1:0]       rsel      [NUM_RP],       // bank of each read port
  input  logic [W-1:0]        wdata     [NUM_WP],
  output logic [W-1:0]        rdata     [NUM_RP]
);
  logic [W-1:0]  mem [NUM_VBANKS][DEPTH];
  logic [W-1:0]  bank_q [NUM_VBANKS];
  logic [BW-1:0] rsel_q [NUM_RP];

  for (genvar b = 0; b < NUM_VBANKS; b++) begin : g_bank
    always_ff @(posedge clk) begin
      if (bank_en[b]) begin
        if (bank_we[b]) mem[b][bank_addr[b]] <= wdata[bank_wsel[b]];
        else            bank_q[b] <= mem[b][bank_addr[b]];
      end
    end
  end

  always_ff @(posedge clk) rsel_q <= rsel;

  always_comb
    for (int p = 0; p < NUM_RP; p++) rdata[p] = bank_q[rsel_q[p]];
endmodule
