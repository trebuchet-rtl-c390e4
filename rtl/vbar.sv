// vbar: vector crossbar between the VDM banks and the lanes.
//
// Every lane may present one VDM request per cycle (read or write, word
// address, write data). The crossbar sends each to bank addr mod NUM_BANKS.
// Requests to different banks proceed in parallel; when several lanes hit
// the same bank, the lowest-numbered lane wins and the others retry in a
// later cycle (lane_gnt tells each lane whether it was served). Lanes
// reading the very same word share one access. The external port (the
// tile's network/host side) has priority over all lanes.
// Read data returns one cycle after the grant, on lane_rdata with
// lane_rvalid, routed back from the bank that served the lane; ext_rdata
// likewise. The transfer modes (contiguous and strided loads and stores)
// are produced by the addresses the load/store controller generates.
module vbar
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLE  = 64,
  parameter int unsigned NUM_BANKS = 64,
  parameter int unsigned WORDS     = 262144,
  localparam int unsigned RW       = $clog2(WORDS / NUM_BANKS),
  localparam int unsigned BB       = $clog2(NUM_BANKS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // lanes
  input  logic [NUM_HPLE-1:0]  lane_req,
  input  logic                 lane_we,
  input  logic [ADDR_BITS-1:0] lane_addr  [NUM_HPLE],
  input  logic [W-1:0]         lane_wdata [NUM_HPLE],
  output logic [NUM_HPLE-1:0]  lane_gnt,
  output logic [NUM_HPLE-1:0]  lane_rvalid,
  output logic [W-1:0]         lane_rdata [NUM_HPLE],
  // external port
  input  logic                 ext_req,
  input  logic                 ext_we,
  input  logic [ADDR_BITS-1:0] ext_addr,
  input  logic [W-1:0]         ext_wdata,
  output logic                 ext_rvalid,
  output logic [W-1:0]         ext_rdata,
  // VDM banks
  output logic [NUM_BANKS-1:0] bank_en,
  output logic [NUM_BANKS-1:0] bank_we,
  output logic [RW-1:0]        bank_row   [NUM_BANKS],
  output logic [W-1:0]         bank_wdata [NUM_BANKS],
  input  logic [W-1:0]         bank_rdata [NUM_BANKS]
);
  logic [BB-1:0] lane_bank_q [NUM_HPLE];
  logic [BB-1:0] ext_bank_q;

  function automatic logic [BB-1:0] bank_of(input logic [ADDR_BITS-1:0] a);
    return BB'(a % NUM_BANKS);
  endfunction
  function automatic logic [RW-1:0] row_of(input logic [ADDR_BITS-1:0] a);
    return RW'(a / NUM_BANKS);
  endfunction

  always_comb begin
    logic [BB-1:0] b;
    bank_en  = '0;
    bank_we  = '0;
    lane_gnt = '0;
    for (int i = 0; i < NUM_BANKS; i++) begin
      bank_row[i]   = '0;
      bank_wdata[i] = '0;
    end
    if (ext_req) begin
      b = bank_of(ext_addr);
      bank_en[b]    = 1'b1;
      bank_we[b]    = ext_we;
      bank_row[b]   = row_of(ext_addr);
      bank_wdata[b] = ext_wdata;
    end
    for (int j = 0; j < NUM_HPLE; j++) begin
      b = bank_of(lane_addr[j]);
      if (lane_req[j]) begin
        if (!bank_en[b]) begin
          lane_gnt[j]   = 1'b1;
          bank_en[b]    = 1'b1;
          bank_we[b]    = lane_we;
          bank_row[b]   = row_of(lane_addr[j]);
          bank_wdata[b] = lane_wdata[j];
        end else if (!lane_we && !bank_we[b] && bank_row[b] == row_of(lane_addr[j])) begin
          lane_gnt[j] = 1'b1;   // same word already being read
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lane_rvalid <= '0;
      ext_rvalid  <= 1'b0;
    end else begin
      lane_rvalid <= lane_gnt & {NUM_HPLE{!lane_we}};
      ext_rvalid  <= ext_req & !ext_we;
    end
  end

  always_ff @(posedge clk) begin
    for (int j = 0; j < NUM_HPLE; j++) lane_bank_q[j] <= bank_of(lane_addr[j]);
    ext_bank_q <= bank_of(ext_addr);
  end

  always_comb begin
    for (int j = 0; j < NUM_HPLE; j++) lane_rdata[j] = bank_rdata[lane_bank_q[j]];
    ext_rdata = bank_rdata[ext_bank_q];
  end
endmodule
