// tb_scalar_backend: writes constants into the SDM through the host port,
// then issues address sets, scalar loads and modulus loads and checks the
// ARF, SRF and MRF read ports, the computed modulus bit length, and the
// command timing (ASET takes effect next cycle; SLOAD busy for 1 cycle,
// MLOAD for 2).
module tb_scalar_backend;
  import rpu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic cmd_valid, busy, host_we;
  logic [1:0] cmd_op;
  logic [5:0] cmd_reg, srf_idx;
  logic [ADDR_BITS-1:0] cmd_addr, arf_val;
  logic [10:0] host_addr;
  logic [W-1:0] host_wdata, srf_val;
  logic [3:0] mrf_idx, arf_idx;
  modulus_t mrf_val;
  int checks = 0, failures = 0;

  scalar_backend dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] sdm_m [2048];

  task automatic chk(string what, logic [W-1:0] got, logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic cmd(logic [1:0] op, int r, int addr, int busy_cycles);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_reg = 6'(r); cmd_addr = ADDR_BITS'(addr);
    @(negedge clk);
    cmd_valid = 0; cmd_addr = '1;
    for (int i = 0; i < busy_cycles; i++) begin
      chk("busy while loading", W'(busy), 1);
      @(negedge clk);
    end
    chk("idle after command", W'(busy), 0);
  endtask

  initial begin
    cmd_valid = 0; cmd_op = 0; cmd_reg = 0; cmd_addr = 0; host_we = 0; host_addr = 0;
    host_wdata = 0; srf_idx = 0; mrf_idx = 0; arf_idx = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2048; i++) begin
      @(negedge clk);
      sdm_m[i] = {$urandom, $urandom, $urandom, $urandom} >> (i % 100);
      host_we = 1; host_addr = 11'(i); host_wdata = sdm_m[i];
    end
    @(negedge clk) host_we = 0;
    for (int r = 0; r < NUM_AREG; r++) cmd(2'd0, r, 1000 + 7 * r, 0);
    for (int r = 0; r < NUM_AREG; r++) begin
      arf_idx = 4'(r); #1;
      chk("ARF", W'(arf_val), W'(1000 + 7 * r));
    end
    for (int r = 0; r < NUM_SREG; r++) cmd(2'd1, r, (r * 31) % 2048, 1);
    for (int r = 0; r < NUM_SREG; r++) begin
      srf_idx = 6'(r); #1;
      chk("SRF", srf_val, sdm_m[(r * 31) % 2048]);
    end
    for (int r = 0; r < NUM_MREG; r++) cmd(2'd2, r, 2 * r + 5, 2);
    for (int r = 0; r < NUM_MREG; r++) begin
      int kk;
      mrf_idx = 4'(r); #1;
      chk("MRF q", mrf_val.q, sdm_m[2 * r + 5]);
      chk("MRF mu", mrf_val.mu, sdm_m[2 * r + 6]);
      kk = 0;
      for (int i = 0; i < W; i++) if (sdm_m[2 * r + 5][i]) kk = i + 1;
      chk("MRF k", W'(mrf_val.k), W'(kk));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
