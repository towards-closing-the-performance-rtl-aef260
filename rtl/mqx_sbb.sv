// mqx_sbb: lane-parallel subtract with borrow, the datapath of the MQX
// instruction _mm512_sbb_epi64 (vpsbbq).
//
// For every lane i it forms the (W+1)-bit difference a[i] - b[i] - bi[i]
// (two's complement); the low W bits are c[i] and bit W, set when the
// difference is negative, is the borrow-out bo[i]. For unsigned W-bit
// operands this is the same bit as the sign of the 2W-bit difference that the
// instruction is defined with. The per-lane subtractor is this design's own
// implementation of that definition.
//
// Interface: as mqx_adc, with bi/bo as borrow masks. Timing: combinational.
module mqx_sbb #(
  parameter int unsigned LANES = mqx_pkg::MQX_LANES,
  parameter int unsigned W     = mqx_pkg::MQX_W
) (
  input  logic [LANES-1:0][W-1:0] a,
  input  logic [LANES-1:0][W-1:0] b,
  input  logic [LANES-1:0]        bi,
  output logic [LANES-1:0][W-1:0] c,
  output logic [LANES-1:0]        bo
);

  always_comb begin
    for (int unsigned i = 0; i < LANES; i++) begin
      logic [W:0] diff;
      diff  = {1'b0, a[i]} - {1'b0, b[i]} - {{W{1'b0}}, bi[i]};
      c[i]  = diff[W-1:0];
      bo[i] = diff[W];
    end
  end

endmodule
