// mqx_exec: the MQX execution resources of one CPU core.
//
// MQX (multi-word extension) adds three SIMD instructions to AVX-512 so that
// 128-bit (double-word) modular arithmetic for FHE kernels such as NTTs and
// BLAS-style vector operations can be built from 64-bit lanes without long
// compare-and-blend sequences: vpadcq (add with carry), vpsbbq (subtract with
// borrow), both with per-lane carry/borrow bits in a k mask register, and
// vpmulq (64x64->128 widening multiply). The extension maps each instruction
// onto the execution port of its closest AVX-512 counterpart. In the host core
// used here the vector ports are 0, 1 and 5: all three run vpadcq and vpsbbq,
// and only port 0 runs vpmulq. Port 6 (scalar ALU/branch) has no MQX
// function.
//
// This module holds three mqx_port instances: issue[0] and alu_res[0] belong
// to port 0 (with multiplier), issue[1]/alu_res[1] to port 1 and
// issue[2]/alu_res[2] to port 5. The scheduler that fills the issue slots,
// the zmm/k register files that receive the results and the existing AVX-512
// units are part of the host core and sit outside this module.
//
// Timing: each port accepts one instruction per cycle, without stalls.
// vpadcq/vpsbbq results leave one cycle after issue on alu_res[p]; vpmulq
// results leave MUL_LAT cycles after issue on mul_res. Peak rate: three
// carry instructions per cycle, or two plus one multiply. MUL_LAT and the
// one-cycle ALU latency are this design's choices. rst_n is synchronous and
// active low.
module mqx_exec
  import mqx_pkg::*;
#(
  parameter int unsigned MUL_LAT = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  mqx_uop_t     issue   [3],  // [0] port 0, [1] port 1, [2] port 5
  output mqx_alu_res_t alu_res [3],
  output mqx_mul_res_t mul_res       // port 0 only
);

  mqx_mul_res_t unused_mul_p1, unused_mul_p5;

  mqx_port #(.HAS_MUL(1'b1), .MUL_LAT(MUL_LAT)) u_port0 (
    .clk(clk), .rst_n(rst_n), .issue(issue[0]), .alu_res(alu_res[0]), .mul_res(mul_res)
  );

  mqx_port #(.HAS_MUL(1'b0), .MUL_LAT(MUL_LAT)) u_port1 (
    .clk(clk), .rst_n(rst_n), .issue(issue[1]), .alu_res(alu_res[1]), .mul_res(unused_mul_p1)
  );

  mqx_port #(.HAS_MUL(1'b0), .MUL_LAT(MUL_LAT)) u_port5 (
    .clk(clk), .rst_n(rst_n), .issue(issue[2]), .alu_res(alu_res[2]), .mul_res(unused_mul_p5)
  );

endmodule
