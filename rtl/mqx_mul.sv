// mqx_mul: lane-parallel widening multiplier, the datapath of the MQX
// instruction _mm512_mul_epi64 (vpmulq).
//
// Every lane multiplies two unsigned W-bit words into a 2W-bit product and
// returns its high half in ch and its low half in cl, like the x86 scalar MUL
// that writes a register pair. The instruction's function is as defined for
// MQX; the latency and the structure are this design's choices: the products
// are formed in the first stage and carried through LAT registers in total,
// so a result appears exactly LAT cycles after its instruction and a new
// instruction may enter every cycle (a synthesis tool is expected to retime
// the multiplier into the register chain).
//
// Interface: in_valid/in_tag/a/b enter together; out_valid/out_tag/ch/cl leave
// together LAT cycles later. rst_n (synchronous, active low) clears the valid
// bits only; data registers are not reset.
module mqx_mul #(
  parameter int unsigned LANES = mqx_pkg::MQX_LANES,
  parameter int unsigned W     = mqx_pkg::MQX_W,
  parameter int unsigned TAG_W = mqx_pkg::MQX_TAG_W,
  parameter int unsigned LAT   = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [TAG_W-1:0]        in_tag,
  input  logic [LANES-1:0][W-1:0] a,
  input  logic [LANES-1:0][W-1:0] b,
  output logic                    out_valid,
  output logic [TAG_W-1:0]        out_tag,
  output logic [LANES-1:0][W-1:0] ch,
  output logic [LANES-1:0][W-1:0] cl
);

  initial assert (LAT >= 1) else $error("mqx_mul: LAT must be at least 1");

  logic [LANES-1:0][2*W-1:0] prod;

  always_comb begin
    for (int unsigned i = 0; i < LANES; i++) begin
      prod[i] = {{W{1'b0}}, a[i]} * {{W{1'b0}}, b[i]};
    end
  end

  logic [LAT-1:0]                            v_q;
  logic [LAT-1:0][TAG_W-1:0]                 tag_q;
  logic [LAT-1:0][LANES-1:0][2*W-1:0]        p_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v_q <= '0;
    end else begin
      v_q[0] <= in_valid;
      for (int unsigned s = 1; s < LAT; s++) v_q[s] <= v_q[s-1];
    end
  end

  always_ff @(posedge clk) begin
    tag_q[0] <= in_tag;
    p_q[0]   <= prod;
    for (int unsigned s = 1; s < LAT; s++) begin
      tag_q[s] <= tag_q[s-1];
      p_q[s]   <= p_q[s-1];
    end
  end

  assign out_valid = v_q[LAT-1];
  assign out_tag   = tag_q[LAT-1];

  always_comb begin
    for (int unsigned i = 0; i < LANES; i++) begin
      ch[i] = p_q[LAT-1][i][2*W-1:W];
      cl[i] = p_q[LAT-1][i][W-1:0];
    end
  end

endmodule
