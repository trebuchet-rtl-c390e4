// tb_busy_board: random set and release traffic against a reference bit
// array. Each cycle sets a random group of free registers and releases
// random subsets of the busy ones through the three pipeline ports; the
// board must equal the reference one cycle later.
module tb_busy_board;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic [63:0] set_mask, clr_ls, clr_alu, clr_sh, busy, model;
  int checks = 0, failures = 0;

  busy_board dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    set_mask = '0; clr_ls = '0; clr_alu = '0; clr_sh = '0; model = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (busy !== '0) failures++;
    for (int t = 0; t < 2000; t++) begin
      logic [63:0] r1, r2, r3, rs;
      r1 = {$urandom, $urandom}; r2 = {$urandom, $urandom}; r3 = {$urandom, $urandom};
      rs = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      clr_ls  = model & r1 & r2;
      clr_alu = model & ~r1 & r3;
      clr_sh  = model & ~r1 & ~r3 & r2;
      set_mask = rs & ~model;
      model = (model & ~(clr_ls | clr_alu | clr_sh)) | set_mask;
      @(negedge clk);
      checks++;
      if (busy !== model) begin
        failures++;
        if (failures < 10) $display("t=%0d busy %h expected %h", t, busy, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
