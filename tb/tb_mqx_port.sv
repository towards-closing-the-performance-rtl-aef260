// tb_mqx_port: self-checking test of one MQX execution port.
//
// Two ports are tested side by side: one with a multiplier (as port 0) and
// one without (as ports 1 and 5). Each cycle a random instruction (or a
// bubble) is issued to each port: vpadcq and vpsbbq with random carry/borrow
// masks, and vpmulq to the port with a multiplier only. Expected results are
// computed from the instruction definitions in 128-bit arithmetic and queued
// with their issue cycle; every result must match in value, mask, opcode and
// tag, and arrive exactly 1 cycle (adc/sbb) or MUL_LAT cycles (mul) after
// issue. The test also counts the cycles in which port 0 returns an adc/sbb
// result and a mul result at once, and fails if that never happened.
module tb_mqx_port;
  import mqx_pkg::*;

  localparam int unsigned L       = MQX_LANES;
  localparam int unsigned MUL_LAT = 5;
  localparam int          N       = 4000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic         rst_n;
  mqx_uop_t     iss   [2];
  mqx_alu_res_t ares  [2];
  mqx_mul_res_t mres  [2];
  int checks = 0, failures = 0, cycle = 0, both_valid = 0;

  mqx_port #(.HAS_MUL(1'b1), .MUL_LAT(MUL_LAT)) dut_m (
    .clk(clk), .rst_n(rst_n), .issue(iss[0]), .alu_res(ares[0]), .mul_res(mres[0]));
  mqx_port #(.HAS_MUL(1'b0), .MUL_LAT(MUL_LAT)) dut_a (
    .clk(clk), .rst_n(rst_n), .issue(iss[1]), .alu_res(ares[1]), .mul_res(mres[1]));

  typedef struct {
    int      t;
    mqx_op_e op;
    tag_t    tag;
    vec_t    v0;   // c (alu) or ch (mul)
    vec_t    v1;   // cl (mul)
    mask_t   m;    // cout (alu)
  } exp_t;
  exp_t qa [2][$];
  exp_t qm [$];
  int   n_issued = 0, n_retired = 0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic exp_t model(mqx_uop_t u, int t);
    exp_t e;
    e.t = t; e.op = u.op; e.tag = u.tag; e.m = '0; e.v0 = '0; e.v1 = '0;
    for (int i = 0; i < L; i++) begin
      logic [127:0] r;
      case (u.op)
        OP_ADC: begin r = 128'(u.a[i]) + 128'(u.b[i]) + 128'(u.cin[i]); e.v0[i] = r[63:0]; e.m[i] = r[64]; end
        OP_SBB: begin r = 128'(u.a[i]) - 128'(u.b[i]) - 128'(u.cin[i]); e.v0[i] = r[63:0]; e.m[i] = r[127]; end
        default: begin r = 128'(u.a[i]) * 128'(u.b[i]); e.v0[i] = r[127:64]; e.v1[i] = r[63:0]; end
      endcase
    end
    return e;
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      if (ares[0].valid && mres[0].valid) both_valid++;
      for (int p = 0; p < 2; p++) begin
        if (ares[p].valid) begin
          exp_t e;
          checks++;
          if (qa[p].size() == 0) begin failures++; $display("FAIL port %0d: unexpected alu result", p); end
          else begin
            e = qa[p].pop_front(); n_retired++;
            if (cycle - e.t != 1 || ares[p].tag !== e.tag || ares[p].op !== e.op ||
                ares[p].c !== e.v0 || ares[p].cout !== e.m) begin
              failures++;
              if (failures < 10) $display("FAIL port %0d alu: lat %0d tag %0d/%0d op %s c %h/%h m %b/%b", p,
                cycle - e.t, ares[p].tag, e.tag, ares[p].op.name(), ares[p].c, e.v0, ares[p].cout, e.m);
            end
          end
        end
        if (mres[p].valid) begin
          exp_t e;
          checks++;
          if (p != 0 || qm.size() == 0) begin failures++; $display("FAIL port %0d: unexpected mul result", p); end
          else begin
            e = qm.pop_front(); n_retired++;
            if (cycle - e.t != MUL_LAT || mres[0].tag !== e.tag || mres[0].ch !== e.v0 || mres[0].cl !== e.v1) begin
              failures++;
              if (failures < 10) $display("FAIL mul: lat %0d tag %0d/%0d", cycle - e.t, mres[0].tag, e.tag);
            end
          end
        end
      end
    end
  end

  function automatic logic [63:0] rnd64();
    int k;
    k = int'($urandom() % 6);
    case (k)
      0: return '1;
      1: return '0;
      default: return {$urandom(), $urandom()};
    endcase
  endfunction

  initial begin
    rst_n = 1'b0;
    iss[0] = '0; iss[1] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        mqx_uop_t u;
        int       k;
        k = int'($urandom() % (p == 0 ? 3 : 2));
        u.valid = ($urandom() % 5) != 0;
        case (k)
          0: u.op = OP_ADC;
          1: u.op = OP_SBB;
          default: u.op = OP_MUL;
        endcase
        u.tag = tag_t'($urandom());
        for (int i = 0; i < L; i++) begin u.a[i] = rnd64(); u.b[i] = rnd64(); end
        u.cin = mask_t'($urandom());
        iss[p] = u;
        if (u.valid) begin
          n_issued++;
          if (u.op == OP_MUL) qm.push_back(model(u, cycle));
          else                qa[p].push_back(model(u, cycle));
        end
      end
    end
    @(negedge clk) begin iss[0].valid = 1'b0; iss[1].valid = 1'b0; end
    repeat (MUL_LAT + 2) @(posedge clk);
    checks++;
    if (n_issued != n_retired || qm.size() != 0 || qa[0].size() != 0 || qa[1].size() != 0) begin
      failures++; $display("FAIL issued %0d retired %0d", n_issued, n_retired);
    end
    checks++;
    if (both_valid == 0) begin failures++; $display("FAIL never had alu and mul results together"); end
    $display("alu+mul results in the same cycle: %0d times", both_valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N + 200) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
