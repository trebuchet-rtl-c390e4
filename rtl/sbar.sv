// sbar: shuffle crossbar, the datapath of register-to-register shuffles.
//
// A shuffle builds its destination register one beat (NUM_HPLE elements) at
// a time. For every output beat the shuffle controller reads two source
// beats through the slices' two SBAR read ports; they are captured here by
// ld0/ld1 (in0 = first source beat, in1 = second). The crossbar then routes
// them across lanes into the output beat, which is held in out_q (ld_out)
// until the VRF accepts it through the slices' SBAR write port.
//
// Four modes (the published crossbar has four; which four is this design's
// choice, the stride permutations used by radix-2 NTTs):
//   UNPACKLO/HI  out lane j <- (j even ? in0 : in1)[(beat odd)*NH/2 + j/2]
//                (interleave the low/high halves of two registers)
//   PACKLO/HI    out lane j <- (j < NH/2 ? in0 : in1)[(2j + hi) mod NH]
//                (gather even/odd elements)
// Only these sources are wired to each output lane: the crossbar is
// depopulated to the four modes, as in the published design.
// Timing: in0/in1 captured the cycle after the VRF read grant; out_q one
// cycle after ld_out.
module sbar
  import rpu_pkg::*;
#(
  parameter int unsigned NUM_HPLE = 64
) (
  input  logic          clk,
  input  logic          ld0,
  input  logic          ld1,
  input  logic [W-1:0]  rd0 [NUM_HPLE],   // lane read data, SBAR read port 0
  input  logic [W-1:0]  rd1 [NUM_HPLE],   // lane read data, SBAR read port 1
  input  logic          ld_out,
  input  sh_mode_t      mode,
  input  logic          beat_odd,          // output beat number is odd
  output logic [W-1:0]  out_q [NUM_HPLE]
);
  localparam int unsigned NH = NUM_HPLE;
  logic [W-1:0] in0 [NH];
  logic [W-1:0] in1 [NH];
  logic [W-1:0] routed [NH];

  always_ff @(posedge clk) begin
    if (ld0) in0 <= rd0;
    if (ld1) in1 <= rd1;
    if (ld_out) out_q <= routed;
  end

  for (genvar j = 0; j < NH; j++) begin : g_lane
    localparam int unsigned UL_E = j / 2;            // unpack, even output beat
    localparam int unsigned UL_O = NH / 2 + j / 2;   // unpack, odd output beat
    localparam int unsigned PK_L = (2 * j) % NH;     // pack low
    localparam int unsigned PK_H = (2 * j + 1) % NH; // pack high
    always_comb begin
      unique case (mode)
        SH_UNPACKLO, SH_UNPACKHI: begin
          if (j % 2 == 0) routed[j] = beat_odd ? in0[UL_O] : in0[UL_E];
          else            routed[j] = beat_odd ? in1[UL_O] : in1[UL_E];
        end
        SH_PACKLO: routed[j] = (j < NH / 2) ? in0[PK_L] : in1[PK_L];
        default:   routed[j] = (j < NH / 2) ? in0[PK_H] : in1[PK_H];
      endcase
    end
  end
endmodule
