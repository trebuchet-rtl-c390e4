// tb_sbar: for each of the four shuffle modes and each output beat, loads
// the two source beats a shuffle would read into the crossbar, routes them,
// and compares the output beat with the shuffle's definition on whole
// 512-element vectors A and B (unpack: interleave halves; pack: even or odd
// elements). Also checks that out_q holds while ld_out is low.
module tb_sbar;
  import rpu_pkg::*;
  localparam int NH = 64, BEATS = VLEN / NH, HB = BEATS / 2;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic ld0, ld1, ld_out, beat_odd;
  sh_mode_t mode;
  logic [W-1:0] rd0 [NH];
  logic [W-1:0] rd1 [NH];
  logic [W-1:0] out_q [NH];
  int checks = 0, failures = 0;

  sbar #(.NUM_HPLE(NH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] A [VLEN];
  logic [W-1:0] B [VLEN];

  function automatic logic [W-1:0] ref_elem(sh_mode_t md, int e);
    unique case (md)
      SH_UNPACKLO: return (e % 2 == 0) ? A[e/2] : B[e/2];
      SH_UNPACKHI: return (e % 2 == 0) ? A[VLEN/2 + e/2] : B[VLEN/2 + e/2];
      SH_PACKLO:   return (e < VLEN/2) ? A[2*e] : B[2*(e - VLEN/2)];
      default:     return (e < VLEN/2) ? A[2*e+1] : B[2*(e - VLEN/2)+1];
    endcase
  endfunction

  initial begin
    logic [W-1:0] snap [NH];
    for (int e = 0; e < VLEN; e++) begin
      A[e] = {$urandom, $urandom, $urandom, $urandom};
      B[e] = {$urandom, $urandom, $urandom, $urandom};
    end
    ld0 = 0; ld1 = 0; ld_out = 0; beat_odd = 0; mode = SH_UNPACKLO;
    for (int md = 0; md < 4; md++) begin
      for (int k = 0; k < BEATS; k++) begin
        int b0, b1;
        logic s0_is_a, s1_is_a;
        mode = sh_mode_t'(md);
        beat_odd = k[0];
        unique case (mode)
          SH_UNPACKLO: begin b0 = k / 2; b1 = k / 2; s0_is_a = 1; s1_is_a = 0; end
          SH_UNPACKHI: begin b0 = HB + k / 2; b1 = HB + k / 2; s0_is_a = 1; s1_is_a = 0; end
          default: begin
            s0_is_a = (k < HB); s1_is_a = (k < HB);
            b0 = 2 * (k % HB); b1 = b0 + 1;
          end
        endcase
        @(negedge clk);
        for (int j = 0; j < NH; j++) begin
          rd0[j] = s0_is_a ? A[b0 * NH + j] : B[b0 * NH + j];
          rd1[j] = s1_is_a ? A[b1 * NH + j] : B[b1 * NH + j];
        end
        ld0 = 1; ld1 = 1;
        @(negedge clk);
        ld0 = 0; ld1 = 0;
        for (int j = 0; j < NH; j++) begin rd0[j] = '0; rd1[j] = '0; end
        ld_out = 1;
        @(negedge clk);
        ld_out = 0;
        for (int j = 0; j < NH; j++) begin
          checks++;
          if (out_q[j] !== ref_elem(mode, k * NH + j)) begin
            failures++;
            if (failures < 10) $display("mode %0d beat %0d lane %0d wrong", md, k, j);
          end
        end
        snap = out_q;
        mode = sh_mode_t'((md + 1) % 4);
        @(negedge clk);
        checks++;
        if (out_q != snap) begin
          failures++;
          $display("out_q changed without ld_out");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
