// vdm: Vector Data Memory, the tile's banked scratchpad (4 MiB by default).
//
// WORDS words of W bits, split into NUM_BANKS single-port banks with
// low-order interleaving: word address A is in bank A mod NUM_BANKS, row
// A / NUM_BANKS. Each bank takes one access per cycle from the VDM crossbar
// (vbar), which does all address decoding and arbitration; this module is
// only the storage. The banks stand in for the large SRAM macros a chip
// would use; they are written as synchronous arrays.
// Timing: a read issued in cycle t is on bank_rdata in cycle t+1; a write
// completes at the end of cycle t.
module vdm
  import rpu_pkg::*;
#(
  parameter int unsigned WORDS     = 262144,   // 4 MiB of 128-bit words
  parameter int unsigned NUM_BANKS = 64,
  localparam int unsigned DEPTH    = WORDS / NUM_BANKS,
  localparam int unsigned RW       = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic [NUM_BANKS-1:0] bank_en,
  input  logic [NUM_BANKS-1:0] bank_we,
  input  logic [RW-1:0]        bank_row   [NUM_BANKS],
  input  logic [W-1:0]         bank_wdata [NUM_BANKS],
  output logic [W-1:0]         bank_rdata [NUM_BANKS]
);
  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    logic [W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (bank_en[b]) begin
        if (bank_we[b]) mem[bank_row[b]] <= bank_wdata[b];
        else            bank_rdata[b]    <= mem[bank_row[b]];
      end
    end
  end
endmodule
