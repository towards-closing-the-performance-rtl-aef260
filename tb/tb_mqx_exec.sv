// tb_mqx_exec: end-to-end test of the MQX execution resources (three vector
// ports, port 0 with the widening multiplier), at the default parameters.
//
// Phase 1, random traffic: for 3000 cycles each port receives a random
// instruction or a bubble every cycle (vpmulq only on port 0). A scoreboard
// computes every result from the instruction definitions in 128-bit
// arithmetic and checks value, mask, tag, order and latency (1 cycle for
// vpadcq/vpsbbq, MUL_LAT for vpmulq).
// Phase 2, one complete double-word operation: 128-bit modular addition
// c = a + b mod q of 8 x 16 random lane pairs, written with MQX instructions
// only (adc, adc with the carry mask, sbb, sbb with the borrow mask, blend)
// and issued through the host driver onto ports 1 and 5 in parallel, and
// 128 x 128 -> 256-bit products built from four overlapping vpmulq and adc
// carry chains. Results are compared with 256-bit reference arithmetic.
// Phase 3: a reset with multiplies in flight must discard them.
//
// Every mechanism of the design must occur at least once, or the test fails:
// all three ports issuing in the same cycle, an adc/sbb result and a mul
// result leaving port 0 in the same cycle, MUL_LAT multiplies in flight at
// once, a carry mask and a borrow mask passed from one instruction into the
// next, and a reset flushing the multiplier.
module tb_mqx_exec;
  import mqx_pkg::*;

  localparam int unsigned L       = MQX_LANES;
  localparam int unsigned MUL_LAT = 5;   // must match the top's default
  localparam int          N       = 3000;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic         rst_n;
  mqx_uop_t     issue   [3];
  mqx_alu_res_t alu_res [3];
  mqx_mul_res_t mul_res;

  mqx_exec dut (.clk(clk), .rst_n(rst_n), .issue(issue), .alu_res(alu_res), .mul_res(mul_res));

  `include "mqx_host_tasks.svh"

  int checks = 0, failures = 0, cycle = 0;
  // mechanism counters
  int cnt_triple = 0, cnt_alu_mul = 0, cnt_mul_full = 0, cnt_carry_chain = 0,
      cnt_borrow_chain = 0, cnt_flush = 0;

  bit scoreboard_on = 1'b0;

  typedef struct {
    int      t;
    mqx_op_e op;
    tag_t    tag;
    vec_t    v0;
    vec_t    v1;
    mask_t   m;
  } exp_t;
  exp_t qa [3][$];
  exp_t qm [$];
  int   mul_in_flight = 0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic exp_t model(mqx_uop_t u, int t);
    exp_t e;
    e.t = t; e.op = u.op; e.tag = u.tag; e.m = '0; e.v0 = '0; e.v1 = '0;
    for (int i = 0; i < L; i++) begin
      logic [127:0] r;
      case (u.op)
        OP_ADC:  begin r = 128'(u.a[i]) + 128'(u.b[i]) + 128'(u.cin[i]); e.v0[i] = r[63:0]; e.m[i] = r[64]; end
        OP_SBB:  begin r = 128'(u.a[i]) - 128'(u.b[i]) - 128'(u.cin[i]); e.v0[i] = r[63:0]; e.m[i] = r[127]; end
        default: begin r = 128'(u.a[i]) * 128'(u.b[i]); e.v0[i] = r[127:64]; e.v1[i] = r[63:0]; end
      endcase
    end
    return e;
  endfunction

  // mechanism monitors (always on)
  always @(posedge clk) begin
    if (rst_n) begin
      if (issue[0].valid && issue[1].valid && issue[2].valid) cnt_triple++;
      if (alu_res[0].valid && mul_res.valid) cnt_alu_mul++;
      mul_in_flight = mul_in_flight + ((issue[0].valid && issue[0].op == OP_MUL) ? 1 : 0)
                                    - (mul_res.valid ? 1 : 0);
      if (mul_in_flight == MUL_LAT) cnt_mul_full++;
    end else begin
      mul_in_flight = 0;
    end
  end

  // scoreboard (phase 1)
  always @(posedge clk) begin
    if (rst_n && scoreboard_on) begin
      for (int p = 0; p < 3; p++) begin
        if (alu_res[p].valid) begin
          exp_t e;
          checks++;
          if (qa[p].size() == 0) begin failures++; $display("FAIL port %0d: unexpected result", p); end
          else begin
            e = qa[p].pop_front();
            if (cycle - e.t != 1 || alu_res[p].tag !== e.tag || alu_res[p].op !== e.op ||
                alu_res[p].c !== e.v0 || alu_res[p].cout !== e.m) begin
              failures++;
              if (failures < 10) $display("FAIL port %0d alu lat %0d tag %0d/%0d", p, cycle - e.t, alu_res[p].tag, e.tag);
            end
          end
        end
      end
      if (mul_res.valid) begin
        exp_t e;
        checks++;
        if (qm.size() == 0) begin failures++; $display("FAIL unexpected mul result"); end
        else begin
          e = qm.pop_front();
          if (cycle - e.t != MUL_LAT || mul_res.tag !== e.tag || mul_res.ch !== e.v0 || mul_res.cl !== e.v1) begin
            failures++;
            if (failures < 10) $display("FAIL mul lat %0d tag %0d/%0d", cycle - e.t, mul_res.tag, e.tag);
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

  // ---------------------------------------------------------------- phase 1
  task automatic random_traffic();
    scoreboard_on = 1'b1;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      for (int p = 0; p < 3; p++) begin
        mqx_uop_t u;
        int       k;
        k = int'($urandom() % (p == 0 ? 4 : 2));
        u.valid = ($urandom() % 6) != 0;
        u.op    = (k == 0) ? OP_ADC : (k == 1) ? OP_SBB : OP_MUL;
        u.tag   = tag_t'($urandom());
        for (int i = 0; i < L; i++) begin u.a[i] = rnd64(); u.b[i] = rnd64(); end
        u.cin   = mask_t'($urandom());
        issue[p] = u;
        if (u.valid) begin
          if (u.op == OP_MUL) qm.push_back(model(u, cycle));
          else                qa[p].push_back(model(u, cycle));
        end
      end
    end
    @(negedge clk) for (int p = 0; p < 3; p++) issue[p].valid = 1'b0;
    repeat (MUL_LAT + 2) @(posedge clk);
    checks++;
    if (qm.size() != 0 || qa[0].size() != 0 || qa[1].size() != 0 || qa[2].size() != 0) begin
      failures++; $display("FAIL results missing after random traffic");
    end
    scoreboard_on = 1'b0;
  endtask

  // ---------------------------------------------------------------- phase 2
  // 128-bit values as two vectors: high words and low words (one lane each).
  logic [127:0] q;

  // c = a + b mod q for 8 lanes, MQX form: e = a + b (adc, adc with carry);
  // d = e - q (sbb, sbb with borrow); take d unless the subtraction borrowed
  // out of the high word (e < q) and e did not overflow 128 bits.
  task automatic addmod_dw(input int p, input vec_t ah, input vec_t al, input vec_t bh, input vec_t bl,
                           input vec_t mh, input vec_t ml, output vec_t ch, output vec_t cl);
    vec_t  el, eh, dl, dh;
    mask_t elc, ehc, dlb, dhb, ctrl;
    vadc(p, al, bl, '0, el, elc);
    if (elc != '0) cnt_carry_chain++;
    vadc(p, ah, bh, elc, eh, ehc);
    vsbb(p, el, ml, '0, dl, dlb);
    if (dlb != '0) cnt_borrow_chain++;
    vsbb(p, eh, mh, dlb, dh, dhb);
    ctrl = ehc | ~dhb;
    cl = vblend(ctrl, el, dl);
    ch = vblend(ctrl, eh, dh);
  endtask

  // 128 x 128 -> 256-bit product, word 3 most significant: four overlapping
  // vpmulq, then adc chains to add the cross terms.
  task automatic mul_dw(input vec_t ah, input vec_t al, input vec_t bh, input vec_t bl,
                        output vec_t w3, output vec_t w2, output vec_t w1, output vec_t w0);
    vec_t hh_h, hh_l, hl_h, hl_l, lh_h, lh_l, ll_h, ll_l, s1, s2, t2, t3;
    mask_t c1, c2, c3, c4, c5, c6;
    fork
      vmul(ah, bh, hh_h, hh_l);
      vmul(ah, bl, hl_h, hl_l);
      vmul(al, bh, lh_h, lh_l);
      vmul(al, bl, ll_h, ll_l);
    join
    w0 = ll_l;
    // word 1 = ll_h + hl_l + lh_l, carries into word 2
    vadc(1, ll_h, hl_l, '0, s1, c1);
    vadc(1, s1, lh_l, '0, w1, c2);
    // word 2 = hh_l + hl_h + lh_h + c1 + c2, carries into word 3
    vadc(2, hh_l, hl_h, c1, s2, c3);
    vadc(2, s2, lh_h, c2, t2, c4);
    w2 = t2;
    vadc(1, hh_h, '0, c3, t3, c5);
    vadc(1, t3, '0, c4, w3, c6);
    checks++;
    if ((c5 | c6) != '0) begin failures++; $display("FAIL carry out of a 256-bit product"); end
  endtask

  task automatic dw_operation();
    vec_t ah, al, bh, bl, mh, ml, ch0, cl0, ch1, cl1, w3, w2, w1, w0;
    logic [127:0] av [L], bv [L], av2 [L], bv2 [L];
    // 124-bit modulus with its top bit set, odd
    q = {4'h0, 1'b1, 91'($urandom()) << 32 | 91'($urandom()), 32'($urandom()) | 32'h1};
    q[127:124] = 4'h0;
    for (int i = 0; i < L; i++) begin mh[i] = q[127:64]; ml[i] = q[63:0]; end
    for (int n = 0; n < 16; n++) begin
      for (int i = 0; i < L; i++) begin
        int k;
        k = int'($urandom() % 4);
        av[i]  = {$urandom(), $urandom(), $urandom(), $urandom()} % q;
        bv[i]  = (k == 0) ? (q - 1) : (k == 1) ? (q - av[i]) % q : {$urandom(), $urandom(), $urandom(), $urandom()} % q;
        av2[i] = {$urandom(), $urandom(), $urandom(), $urandom()} % q;
        bv2[i] = {$urandom(), $urandom(), $urandom(), $urandom()} % q;
        ah[i] = av[i][127:64]; al[i] = av[i][63:0]; bh[i] = bv[i][127:64]; bl[i] = bv[i][63:0];
      end
      // two independent modular additions on ports 1 and 5 at once
      fork
        addmod_dw(1, ah, al, bh, bl, mh, ml, ch0, cl0);
        begin
          vec_t ah2, al2, bh2, bl2;
          for (int i = 0; i < L; i++) begin
            ah2[i] = av2[i][127:64]; al2[i] = av2[i][63:0]; bh2[i] = bv2[i][127:64]; bl2[i] = bv2[i][63:0];
          end
          addmod_dw(2, ah2, al2, bh2, bl2, mh, ml, ch1, cl1);
        end
      join
      for (int i = 0; i < L; i++) begin
        logic [127:0] r0, r1;
        r0 = (av[i] + bv[i]) % q;
        r1 = (av2[i] + bv2[i]) % q;
        checks += 2;
        if ({ch0[i], cl0[i]} !== r0) begin failures++; $display("FAIL addmod lane %0d: %h want %h", i, {ch0[i], cl0[i]}, r0); end
        if ({ch1[i], cl1[i]} !== r1) begin failures++; $display("FAIL addmod(2) lane %0d: %h want %h", i, {ch1[i], cl1[i]}, r1); end
      end
      // full 128 x 128 product of a and b
      mul_dw(ah, al, bh, bl, w3, w2, w1, w0);
      for (int i = 0; i < L; i++) begin
        logic [255:0] pr;
        pr = 256'(av[i]) * 256'(bv[i]);
        checks++;
        if ({w3[i], w2[i], w1[i], w0[i]} !== pr) begin failures++; $display("FAIL mul_dw lane %0d", i); end
      end
    end
  endtask

  // ---------------------------------------------------------------- phase 3
  task automatic reset_flush();
    vec_t a, b;
    for (int i = 0; i < L; i++) begin a[i] = rnd64(); b[i] = rnd64(); end
    for (int k = 0; k < 3; k++) begin
      @(negedge clk);
      issue[0] = '{valid: 1'b1, op: OP_MUL, tag: tag_t'(k), a: a, b: b, cin: '0};
    end
    @(negedge clk) begin issue[0].valid = 1'b0; rst_n = 1'b0; end
    @(negedge clk) rst_n = 1'b1;
    begin
      bit seen = 1'b0;
      repeat (MUL_LAT + 3) begin
        @(posedge clk);
        #1 if (mul_res.valid || alu_res[0].valid) seen = 1'b1;
      end
      checks++;
      if (seen) begin failures++; $display("FAIL result after reset"); end
      else cnt_flush++;
    end
  endtask

  initial begin
    rst_n = 1'b0;
    host_init();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    random_traffic();
    dw_operation();
    reset_flush();

    $display("mechanisms: triple issue %0d, alu+mul same cycle %0d, mul pipeline full %0d, carry chains %0d, borrow chains %0d, reset flushes %0d",
             cnt_triple, cnt_alu_mul, cnt_mul_full, cnt_carry_chain, cnt_borrow_chain, cnt_flush);
    checks += 6;
    if (cnt_triple == 0)       begin failures++; $display("FAIL no triple issue"); end
    if (cnt_alu_mul == 0)      begin failures++; $display("FAIL no simultaneous alu and mul result"); end
    if (cnt_mul_full == 0)     begin failures++; $display("FAIL multiplier pipeline never full"); end
    if (cnt_carry_chain == 0)  begin failures++; $display("FAIL no carry chain"); end
    if (cnt_borrow_chain == 0) begin failures++; $display("FAIL no borrow chain"); end
    if (cnt_flush == 0)        begin failures++; $display("FAIL no reset flush"); end
    $display("instructions issued: port0 %0d (mul %0d), port1 %0d, port5 %0d (driver only)",
             n_issue[0], n_mul_issue, n_issue[1], n_issue[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
