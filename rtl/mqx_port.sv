// mqx_port: the MQX part of one AVX-512 vector execution port.
//
// In the host core the scheduler issues at most one vector instruction per
// cycle to each port. The MQX carry instructions vpadcq and vpsbbq can issue
// to ports 0, 1 and 5, and the widening multiply vpmulq to port 0 only, the
// ports of their AVX-512 counterparts (vpaddq/vpsubq, vpmullq). This module
// is what such a port adds for MQX: an add-with-carry and a
// subtract-with-borrow lane array and, when HAS_MUL is set, a pipelined
// widening multiplier.
//
// Timing: vpadcq/vpsbbq results are registered and appear on alu_res one
// cycle after issue, the latency of an ordinary vector add. vpmulq results
// appear on mul_res MUL_LAT cycles after issue. Both units accept a new
// instruction every cycle and never stall, so the two result buses are
// separate and may both be valid in the same cycle; every result carries the
// tag it was issued with. The port structure, the one-cycle ALU latency, the
// MUL_LAT default and the tag are this design's choices; which instruction
// goes to which port follows the port map of the host core.
//
// Interface: issue (mqx_uop_t) in; alu_res (mqx_alu_res_t) and mul_res
// (mqx_mul_res_t) out. A vpmulq issued to a port without a multiplier is a
// scheduler error: an assertion reports it and the instruction is dropped.
// rst_n is synchronous and active low and clears the valid bits.
module mqx_port
  import mqx_pkg::*;
#(
  parameter bit          HAS_MUL = 1'b1,
  parameter int unsigned MUL_LAT = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  mqx_uop_t     issue,
  output mqx_alu_res_t alu_res,
  output mqx_mul_res_t mul_res
);

  // ---- add with carry / subtract with borrow -------------------------------
  vec_t  adc_c, sbb_c;
  mask_t adc_co, sbb_bo;

  mqx_adc #(.LANES(MQX_LANES), .W(MQX_W)) u_adc (
    .a(issue.a), .b(issue.b), .ci(issue.cin), .c(adc_c), .co(adc_co)
  );

  mqx_sbb #(.LANES(MQX_LANES), .W(MQX_W)) u_sbb (
    .a(issue.a), .b(issue.b), .bi(issue.cin), .c(sbb_c), .bo(sbb_bo)
  );

  wire alu_go = issue.valid && (issue.op == OP_ADC || issue.op == OP_SBB);

  always_ff @(posedge clk) begin
    if (!rst_n) alu_res.valid <= 1'b0;
    else        alu_res.valid <= alu_go;
  end

  always_ff @(posedge clk) begin
    if (alu_go) begin
      alu_res.op   <= issue.op;
      alu_res.tag  <= issue.tag;
      alu_res.c    <= (issue.op == OP_SBB) ? sbb_c  : adc_c;
      alu_res.cout <= (issue.op == OP_SBB) ? sbb_bo : adc_co;
    end
  end

  // ---- widening multiply ---------------------------------------------------
  if (HAS_MUL) begin : g_mul
    logic mul_go;
    assign mul_go = issue.valid && issue.op == OP_MUL;

    mqx_mul #(.LANES(MQX_LANES), .W(MQX_W), .TAG_W(MQX_TAG_W), .LAT(MUL_LAT)) u_mul (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (mul_go),
      .in_tag   (issue.tag),
      .a        (issue.a),
      .b        (issue.b),
      .out_valid(mul_res.valid),
      .out_tag  (mul_res.tag),
      .ch       (mul_res.ch),
      .cl       (mul_res.cl)
    );
  end else begin : g_no_mul
    // This port has no multiplier: its multiply result bus is never valid.
    assign mul_res = '0;

    always_ff @(posedge clk) begin
      if (rst_n) begin
        assert (!(issue.valid && issue.op == OP_MUL))
          else $error("mqx_port: vpmulq issued to a port without a multiplier");
      end
    end
  end

  // Only the three MQX opcodes exist.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (!issue.valid || issue.op inside {OP_ADC, OP_SBB, OP_MUL})
        else $error("mqx_port: undefined MQX opcode");
    end
  end

endmodule
