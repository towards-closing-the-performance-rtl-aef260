// tb_mqx_adc: self-checking test of the lane-parallel add with carry.
//
// Drives directed corner cases (all-ones operands with and without carry-in,
// zero operands, a carry rippling into bit 64) and 2000 random vectors with
// random carry-in masks, and compares every lane with the instruction's
// definition evaluated in 128-bit arithmetic: c = (a + b + ci) mod 2^64,
// co = (a + b + ci) >> 64. Carry-in bits are applied per lane, so a lane
// mix-up in the mask shows as a failure. A watchdog ends the run after a
// fixed number of cycles.
module tb_mqx_adc;
  import mqx_pkg::*;

  localparam int unsigned L = MQX_LANES;
  localparam int unsigned W = MQX_W;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  vec_t  a, b, c;
  mask_t ci, co;
  int    checks = 0, failures = 0;

  mqx_adc #(.LANES(L), .W(W)) dut (.a(a), .b(b), .ci(ci), .c(c), .co(co));

  function automatic logic [63:0] rnd64();
    return {$urandom(), $urandom()};
  endfunction

  task automatic check_now(string what);
    #1;
    for (int i = 0; i < L; i++) begin
      logic [127:0] s;
      s = 128'(a[i]) + 128'(b[i]) + 128'(ci[i]);
      checks++;
      if (c[i] !== s[63:0] || co[i] !== s[64]) begin
        failures++;
        if (failures < 10)
          $display("FAIL %s lane %0d: a=%h b=%h ci=%b -> c=%h co=%b, want %h %b",
                   what, i, a[i], b[i], ci[i], c[i], co[i], s[63:0], s[64]);
      end
    end
  endtask

  initial begin
    // corner cases
    a = '1; b = '1; ci = '1;            check_now("max+max+1");
    a = '1; b = '1; ci = '0;            check_now("max+max");
    a = '1; b = '0; ci = '1;            check_now("max+0+1");
    a = '0; b = '0; ci = '0;            check_now("zero");
    a = '1; b = '0; ci = 8'b1010_0101;  check_now("mask pattern");
    for (int i = 0; i < L; i++) begin a[i] = 64'(i) << 60; b[i] = 64'hF000_0000_0000_0000; end
    ci = 8'h0F;                         check_now("top bits");
    // random
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < L; i++) begin a[i] = rnd64(); b[i] = rnd64(); end
      ci = 8'($urandom());
      if (n % 4 == 0) for (int i = 0; i < L; i++) b[i] = ~a[i];  // carry exactly on the edge
      check_now("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
