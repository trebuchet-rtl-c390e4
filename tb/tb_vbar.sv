// tb_vbar: the VDM crossbar with the VDM behind it. Fills memory through
// the external port, then runs lane transfers with different strides and
// checks data, the number of cycles each needs (1 cycle when all lanes hit
// different banks, 2 for stride 2, 64 when all lanes hit one bank with
// different words, 1 when they all read the same word), that a collision
// is won by the lowest lane, and that the external port has priority.
module tb_vbar;
  import rpu_pkg::*;
  localparam int NH = 64, NB = 64, WORDS = 262144, RW = $clog2(WORDS / NB);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [NH-1:0] lane_req, lane_gnt, lane_rvalid;
  logic lane_we;
  logic [ADDR_BITS-1:0] lane_addr [NH];
  logic [W-1:0] lane_wdata [NH];
  logic [W-1:0] lane_rdata [NH];
  logic ext_req, ext_we, ext_rvalid;
  logic [ADDR_BITS-1:0] ext_addr;
  logic [W-1:0] ext_wdata, ext_rdata;
  logic [NB-1:0] bank_en, bank_we;
  logic [RW-1:0] bank_row [NB];
  logic [W-1:0] bank_wdata [NB];
  logic [W-1:0] bank_rdata [NB];
  int checks = 0, failures = 0;

  vbar #(.NUM_HPLE(NH), .NUM_BANKS(NB), .WORDS(WORDS)) dut (.*);
  vdm  #(.WORDS(WORDS), .NUM_BANKS(NB)) mem (.clk, .bank_en, .bank_we, .bank_row,
                                              .bank_wdata, .bank_rdata);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] model [int];
  function automatic logic [W-1:0] pat(int a);
    return {32'(a), 32'(a * 3 + 7), 32'hdead_0000 | 32'(a), 32'(a ^ 32'h1357)};
  endfunction

  task automatic chk(string what, logic c);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 15) $display("FAILED: %s", what);
    end
  endtask

  // one lane transfer; returns the number of cycles until all lanes served
  task automatic xfer(input logic we, input int base, input int stride, output int cycles,
                      input logic [NH-1:0] first_expected = '0);
    logic [NH-1:0] pend;
    @(negedge clk);
    lane_we = we;
    for (int j = 0; j < NH; j++) begin
      lane_addr[j]  = ADDR_BITS'(base + stride * j);
      lane_wdata[j] = {$urandom, $urandom, $urandom, $urandom};
    end
    pend = '1;
    cycles = 0;
    while (pend != '0) begin
      lane_req = pend;
      #1;
      if (cycles == 0 && first_expected != '0) chk("grant pattern of first cycle", lane_gnt == first_expected);
      for (int j = 0; j < NH; j++)
        if (lane_gnt[j] && we) model[base + stride * j] = lane_wdata[j];
      pend = pend & ~lane_gnt;
      cycles++;
      @(negedge clk);
      if (!we)
        for (int j = 0; j < NH; j++)
          if (lane_rvalid[j]) chk($sformatf("lane %0d read data", j), lane_rdata[j] === model[base + stride * j]);
    end
    lane_req = '0;
  endtask

  initial begin
    int c;
    logic [NH-1:0] lowhalf;
    lane_req = '0; lane_we = 0; ext_req = 0; ext_we = 0; ext_addr = 0; ext_wdata = 0;
    for (int j = 0; j < NH; j++) begin lane_addr[j] = '0; lane_wdata[j] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 8192; a++) begin
      @(negedge clk);
      ext_req = 1; ext_we = 1; ext_addr = ADDR_BITS'(a); ext_wdata = pat(a);
      model[a] = pat(a);
    end
    @(negedge clk) ext_req = 0;

    xfer(0, 5, 1, c, '1);
    chk("contiguous read in 1 cycle", c == 1);
    lowhalf = {{(NH/2){1'b0}}, {(NH/2){1'b1}}};
    xfer(0, 100, 2, c, lowhalf);
    chk("stride-2 read in 2 cycles, low lanes first", c == 2);
    xfer(0, 0, NB, c, 64'h1);
    chk("all lanes on one bank: 64 cycles", c == NH);
    xfer(0, 77, 0, c, '1);
    chk("all lanes reading one word share it: 1 cycle", c == 1);
    xfer(1, 300, 3, c, '1);
    chk("stride-3 write in 1 cycle", c == 1);
    xfer(1, 4000, 4, c);
    chk("stride-4 write in 4 cycles", c == 4);
    xfer(0, 4000, 4, c);
    xfer(0, 300, 3, c);

    // external port priority: ext on bank 10 while the lanes read contiguously
    @(negedge clk);
    ext_req = 1; ext_we = 0; ext_addr = 10;
    lane_we = 0; lane_req = '1;
    for (int j = 0; j < NH; j++) lane_addr[j] = ADDR_BITS'(2048 + j);
    #1;
    chk("lane on the external port's bank waits", lane_gnt[10] == 0 && lane_gnt[11] == 1);
    @(negedge clk);
    ext_req = 0; lane_req = '0;
    chk("external read data", ext_rvalid && ext_rdata === model[10]);

    // read back the writes through the external port
    for (int j = 0; j < NH; j += 7) begin
      @(negedge clk);
      ext_req = 1; ext_we = 0; ext_addr = ADDR_BITS'(4000 + 4 * j);
      @(negedge clk);
      ext_req = 0;
      chk("lane write seen by external read", ext_rdata === model[4000 + 4 * j]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
