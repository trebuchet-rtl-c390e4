// tb_vrf_slice: one lane's VRF slice. Writes every element of every
// register, four banks per cycle through the four write ports, then reads
// everything back six banks per cycle through the six read ports, and
// checks the data one cycle after each read command. Register r is
// expected in bank r/4 at row (r mod 4)*BEATS + beat.
module tb_vrf_slice;
  import rpu_pkg::*;
  localparam int NH = 64, BEATS = VLEN / NH, DEPTH = REGS_PER_BANK * BEATS;
  localparam int AW = $clog2(DEPTH), BW = $clog2(NUM_VBANKS);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [NUM_VBANKS-1:0] bank_en, bank_we;
  logic [AW-1:0] bank_addr [NUM_VBANKS];
  logic [1:0]    bank_wsel [NUM_VBANKS];
  logic [BW-1:0] rsel [NUM_RP];
  logic [W-1:0]  wdata [NUM_WP];
  logic [W-1:0]  rdata [NUM_RP];
  int checks = 0, failures = 0;

  vrf_slice #(.NUM_HPLE(NH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] val(int r, int beat);
    return {32'(r), 32'(beat), 32'(r * 1000 + beat), 32'hc0de_0000 ^ 32'(r * 77 + beat)};
  endfunction
  function automatic int row(int r, int beat);
    return (r % REGS_PER_BANK) * BEATS + beat;
  endfunction

  initial begin
    bank_en = '0; bank_we = '0;
    for (int b = 0; b < NUM_VBANKS; b++) begin bank_addr[b] = '0; bank_wsel[b] = '0; end
    for (int p = 0; p < NUM_RP; p++) rsel[p] = '0;
    for (int p = 0; p < NUM_WP; p++) wdata[p] = '0;
    // writes: step s writes (register group g = s/BEATS) banks 4*(s%4).. with ports 0..3
    for (int rr = 0; rr < REGS_PER_BANK; rr++)
      for (int beat = 0; beat < BEATS; beat++)
        for (int bg = 0; bg < NUM_VBANKS; bg += NUM_WP) begin
          @(negedge clk);
          bank_en = '0; bank_we = '0;
          for (int p = 0; p < NUM_WP; p++) begin
            int b, r;
            b = bg + p;
            r = b * REGS_PER_BANK + rr;
            bank_en[b] = 1; bank_we[b] = 1;
            bank_addr[b] = AW'(row(r, beat));
            bank_wsel[b] = 2'((p + beat) % NUM_WP);
            wdata[(p + beat) % NUM_WP] = val(r, beat);
          end
        end
    @(negedge clk);
    bank_en = '0; bank_we = '0;
    // reads: six ports, six different banks per cycle
    for (int it = 0; it < 200; it++) begin
      int rs [NUM_RP];
      int bs [NUM_RP];
      int base;
      @(negedge clk);
      bank_en = '0; bank_we = '0;
      base = $urandom_range(0, NUM_VBANKS - 1);
      for (int p = 0; p < NUM_RP; p++) begin
        int b;
        b = (base + p) % NUM_VBANKS;
        rs[p] = b * REGS_PER_BANK + $urandom_range(0, REGS_PER_BANK - 1);
        bs[p] = $urandom_range(0, BEATS - 1);
        bank_en[b] = 1;
        bank_addr[b] = AW'(row(rs[p], bs[p]));
        rsel[NUM_RP - 1 - p] = BW'(b);
      end
      @(negedge clk);
      bank_en = '0;
      for (int p = 0; p < NUM_RP; p++) begin
        checks++;
        if (rdata[NUM_RP - 1 - p] !== val(rs[p], bs[p])) begin
          failures++;
          if (failures < 10) $display("port %0d reg %0d beat %0d wrong", NUM_RP - 1 - p, rs[p], bs[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
