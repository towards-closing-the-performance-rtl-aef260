// mqx_adc: lane-parallel add with carry, the datapath of the MQX instruction
// _mm512_adc_epi64 (vpadcq).
//
// For every lane i it forms the (W+1)-bit sum a[i] + b[i] + ci[i]; the low W
// bits are c[i] and bit W is the carry-out co[i]. Lanes are independent:
// carries travel between lanes only through the mask register, under software
// control, exactly as with x86 ADC and the carry flag. The function is the
// instruction's definition; the plain per-lane adder is this design's own
// (simplest) implementation.
//
// Interface: a, b are LANES x W packed vectors, ci/co are LANES-bit masks
// (bit i belongs to lane i). Timing: purely combinational; mqx_port registers
// the result, giving the one-cycle latency of an ordinary vector add.
module mqx_adc #(
  parameter int unsigned LANES = mqx_pkg::MQX_LANES,
  parameter int unsigned W     = mqx_pkg::MQX_W
) (
  input  logic [LANES-1:0][W-1:0] a,
  input  logic [LANES-1:0][W-1:0] b,
  input  logic [LANES-1:0]        ci,
  output logic [LANES-1:0][W-1:0] c,
  output logic [LANES-1:0]        co
);

  always_comb begin
    for (int unsigned i = 0; i < LANES; i++) begin
      logic [W:0] sum;
      sum   = {1'b0, a[i]} + {1'b0, b[i]} + {{W{1'b0}}, ci[i]};
      c[i]  = sum[W-1:0];
      co[i] = sum[W];
    end
  end

endmodule
