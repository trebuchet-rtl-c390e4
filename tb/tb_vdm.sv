// tb_vdm: fills every bank of the default 4 MiB VDM in parallel with a
// pattern derived from the word address, then reads everything back a
// whole row of banks at a time and checks the one-cycle read latency and
// that a read does not disturb the stored data.
module tb_vdm;
  import rpu_pkg::*;
  localparam int WORDS = 262144, NB = 64, DEPTH = WORDS / NB, RW = $clog2(DEPTH);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [NB-1:0] bank_en, bank_we;
  logic [RW-1:0] bank_row [NB];
  logic [W-1:0]  bank_wdata [NB];
  logic [W-1:0]  bank_rdata [NB];
  int checks = 0, failures = 0;

  vdm #(.WORDS(WORDS), .NUM_BANKS(NB)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] pat(int a);
    return {32'(a) ^ 32'h5a5a_1234, 32'(a * 7), ~32'(a), 32'(a * 13 + 1)};
  endfunction

  initial begin
    bank_en = '0; bank_we = '0;
    for (int b = 0; b < NB; b++) begin bank_row[b] = '0; bank_wdata[b] = '0; end
    for (int r = 0; r < DEPTH; r++) begin
      @(negedge clk);
      bank_en = '1; bank_we = '1;
      for (int b = 0; b < NB; b++) begin
        bank_row[b] = RW'(r); bank_wdata[b] = pat(r * NB + b);
      end
    end
    // read rows in a scrambled order, only even banks enabled on odd rows
    for (int i = 0; i < DEPTH; i++) begin
      int r;
      logic [W-1:0] prev [NB];
      r = (i * 37) % DEPTH;
      prev = bank_rdata;
      @(negedge clk);
      bank_we = '0;
      for (int b = 0; b < NB; b++) begin
        bank_row[b] = RW'(r);
        bank_en[b]  = !(r % 2 == 1 && b % 2 == 1);
      end
      @(negedge clk);
      bank_en = '0;
      for (int b = 0; b < NB; b += 5) begin
        checks++;
        if (r % 2 == 1 && b % 2 == 1) begin
          if (bank_rdata[b] !== prev[b]) failures++;   // a disabled bank holds its output
        end else if (bank_rdata[b] !== pat(r * NB + b)) begin
          failures++;
          if (failures < 10) $display("row %0d bank %0d wrong", r, b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
