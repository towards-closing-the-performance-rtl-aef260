// tb_mqx_kernels: the FHE kernels MQX is meant for, run through mqx_exec.
//
// All arithmetic is on 128-bit residues modulo a 124-bit prime q (Barrett
// reduction needs q below 2^124). A 128-bit value sits in two vectors, high
// words and low words, eight values per pair. Every multi-word step is done
// with MQX instructions issued to the execution ports: vpmulq for 64x64
// products, vpadcq carry chains for multi-word sums, vpsbbq borrow chains for
// differences and comparisons. Only what the host core does anyway (mask
// tests, blends, shifts, and gathering operands into lanes) is computed
// directly here.
//
//   addmod  c = a + b mod q : adc, adc(carry), sbb, sbb(borrow), blend
//   submod  c = a - b mod q : sbb, sbb(borrow), adc, adc(carry), blend
//   mulmod  c = a * b mod q : 4 vpmulq schoolbook 128x128 product, then
//           Barrett reduction with k = 248, mu = floor(2^248 / q):
//           t = floor(ab * mu / 2^248), r = ab - t*q, at most two
//           conditional subtractions of q.
//
// Workloads (vector length 1024, as in the BLAS measurements): vector
// addition, vector subtraction, point-wise vector multiplication and axpy
// y = alpha*x + y. NTT: 256- and 1024-point cyclic NTTs (the smallest
// sizes of the NTT measurements), radix-2 in-place, eight butterflies per instruction
// group. Even and odd groups run on ports 1 and 5 at the same time; both
// share the multiplier of port 0. Every result is compared with 256-bit
// reference arithmetic (the NTT with the direct O(n^2) sum). The cycles
// used per element and per butterfly are printed.
module tb_mqx_kernels;
  import mqx_pkg::*;

  localparam int unsigned L    = MQX_LANES;
  localparam int          VLEN = 1024;
  localparam int          NTT_MAX_LOG = 10;              // sizes run: 2^8 and 2^10
  localparam int          NTT_MAX     = 1 << NTT_MAX_LOG;

  // q = 2^123 + 0x700001 is prime, q - 1 is divisible by 2^20.
  localparam logic [127:0] Q   = 128'h0800_0000_0000_0000_0000_0000_0070_0001;
  // A primitive 1024th root of unity modulo Q (13 is a non-residue modulo Q;
  // W1024 = 13^((Q-1)/1024) mod Q). The root for n points is
  // W1024^(1024/n).
  localparam logic [127:0] W1024 = 128'h01c4_efcc_159e_04d0_c99c_d2ad_9979_fcc8;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic         rst_n;
  mqx_uop_t     issue   [3];
  mqx_alu_res_t alu_res [3];
  mqx_mul_res_t mul_res;

  mqx_exec dut (.clk(clk), .rst_n(rst_n), .issue(issue), .alu_res(alu_res), .mul_res(mul_res));

  `include "mqx_host_tasks.svh"

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [255:0] MU;       // floor(2^248 / Q)
  vec_t qh, ql;           // Q broadcast
  vec_t muh, mul_;        // MU broadcast (two words)

  // ---------------------------------------------------------------- reference
  function automatic logic [127:0] ref_mulmod(logic [127:0] a, logic [127:0] b);
    logic [255:0] p;
    p = 256'(a) * 256'(b);
    return 128'(p % 256'(Q));
  endfunction

  function automatic logic [127:0] ref_powmod(logic [127:0] b, int unsigned e);
    logic [127:0] r;
    r = 128'd1;
    for (int i = 31; i >= 0; i--) begin
      r = ref_mulmod(r, r);
      if (e[i]) r = ref_mulmod(r, b);
    end
    return r;
  endfunction

  function automatic logic [127:0] rnd_res();
    return {$urandom(), $urandom(), $urandom(), $urandom()} % Q;
  endfunction

  // ---------------------------------------------------------------- kernels
  task automatic addmod(input int p, input vec_t ah, input vec_t al, input vec_t bh, input vec_t bl,
                        output vec_t ch, output vec_t cl);
    vec_t  el, eh, dl, dh;
    mask_t elc, ehc, dlb, dhb, use_d;
    vadc(p, al, bl, '0, el, elc);
    vadc(p, ah, bh, elc, eh, ehc);
    vsbb(p, el, ql, '0, dl, dlb);
    vsbb(p, eh, qh, dlb, dh, dhb);
    use_d = ehc | ~dhb;               // a + b >= q
    cl = vblend(use_d, el, dl);
    ch = vblend(use_d, eh, dh);
  endtask

  task automatic submod(input int p, input vec_t ah, input vec_t al, input vec_t bh, input vec_t bl,
                        output vec_t ch, output vec_t cl);
    vec_t  dl, dh, el, eh;
    mask_t dlb, dhb, elc, ehc;
    vsbb(p, al, bl, '0, dl, dlb);
    vsbb(p, ah, bh, dlb, dh, dhb);
    vadc(p, dl, ql, '0, el, elc);
    vadc(p, dh, qh, elc, eh, ehc);
    cl = vblend(dhb, dl, el);         // a < b: add q back
    ch = vblend(dhb, dh, eh);
  endtask

  // Add word vector v into the multi-word accumulator acc at word position
  // pos, propagating the carry upwards while any lane still carries.
  task automatic acc_add(input int p, inout vec_t acc [8], input int pos, input int top, input vec_t v);
    mask_t c;
    vadc(p, acc[pos], v, '0, acc[pos], c);
    for (int k = pos + 1; k <= top && c != '0; k++) vadc(p, acc[k], '0, c, acc[k], c);
  endtask

  // Schoolbook multi-word product, word 0 least significant.
  task automatic mw_mul(input int p, input vec_t a [8], input int na, input vec_t b [8], input int nb,
                        output vec_t r [8]);
    vec_t acc [8];
    for (int k = 0; k < 8; k++) acc[k] = '0;
    for (int i = 0; i < na; i++) begin
      for (int j = 0; j < nb; j++) begin
        vec_t h, l;
        vmul(a[i], b[j], h, l);
        acc_add(p, acc, i + j, na + nb - 1, l);
        acc_add(p, acc, i + j + 1, na + nb - 1, h);
      end
    end
    r = acc;
  endtask

  task automatic mulmod(input int p, input vec_t ah, input vec_t al, input vec_t bh, input vec_t bl,
                        output vec_t ch, output vec_t cl);
    vec_t x [8], m [8], xm [8], t [8], qq [8], tq [8], opa [8], opb [8];
    vec_t rl, rh, dl, dh;
    mask_t bl_, bh_;
    for (int k = 0; k < 8; k++) begin opa[k] = '0; opb[k] = '0; m[k] = '0; qq[k] = '0; t[k] = '0; end
    opa[0] = al; opa[1] = ah; opb[0] = bl; opb[1] = bh;
    mw_mul(p, opa, 2, opb, 2, x);                 // x = a*b, 4 words (< 2^248)
    m[0] = mul_; m[1] = muh;
    mw_mul(p, x, 4, m, 2, xm);                    // x*mu, 6 words
    // t = xm >> 248 (a shift on the host: vpsrlq/vpsllq/vpor)
    for (int i = 0; i < L; i++) begin
      logic [383:0] w;
      logic [127:0] tt;
      w  = {xm[5][i], xm[4][i], xm[3][i], xm[2][i], xm[1][i], xm[0][i]};
      tt = 128'(w >> 248);
      t[0][i] = tt[63:0]; t[1][i] = tt[127:64];
    end
    qq[0] = ql; qq[1] = qh;
    mw_mul(p, t, 2, qq, 2, tq);                   // t*q (low two words used)
    vsbb(p, x[0], tq[0], '0, rl, bl_);            // r = x - t*q mod 2^128
    vsbb(p, x[1], tq[1], bl_, rh, bh_);
    for (int k = 0; k < 2; k++) begin              // r < 3q: up to two corrections
      vsbb(p, rl, ql, '0, dl, bl_);
      vsbb(p, rh, qh, bl_, dh, bh_);
      rl = vblend(~bh_, rl, dl);
      rh = vblend(~bh_, rh, dh);
    end
    ch = rh; cl = rl;
  endtask

  // ---------------------------------------------------------------- data
  logic [127:0] xa [VLEN], xb [VLEN], xr [VLEN];
  logic [127:0] alpha;

  function automatic vec_t hi_of(logic [127:0] v [VLEN], int base);
    vec_t r;
    for (int i = 0; i < L; i++) r[i] = v[base + i][127:64];
    return r;
  endfunction
  function automatic vec_t lo_of(logic [127:0] v [VLEN], int base);
    vec_t r;
    for (int i = 0; i < L; i++) r[i] = v[base + i][63:0];
    return r;
  endfunction

  // op: 0 add, 1 sub, 2 mul, 3 axpy (xr = alpha*xa + xb)
  task automatic blas_group(input int op, input int p, input int base);
    vec_t ch, cl, th, tl, sh, sl;
    for (int i = 0; i < L; i++) begin sh[i] = alpha[127:64]; sl[i] = alpha[63:0]; end
    case (op)
      0: addmod(p, hi_of(xa, base), lo_of(xa, base), hi_of(xb, base), lo_of(xb, base), ch, cl);
      1: submod(p, hi_of(xa, base), lo_of(xa, base), hi_of(xb, base), lo_of(xb, base), ch, cl);
      2: mulmod(p, hi_of(xa, base), lo_of(xa, base), hi_of(xb, base), lo_of(xb, base), ch, cl);
      default: begin
        mulmod(p, sh, sl, hi_of(xa, base), lo_of(xa, base), th, tl);
        addmod(p, th, tl, hi_of(xb, base), lo_of(xb, base), ch, cl);
      end
    endcase
    for (int i = 0; i < L; i++) xr[base + i] = {ch[i], cl[i]};
  endtask

  task automatic run_blas(input int op, input string name);
    int t0;
    for (int i = 0; i < VLEN; i++) begin xa[i] = rnd_res(); xb[i] = rnd_res(); end
    xa[0] = Q - 1; xb[0] = Q - 1; xa[1] = 0; xb[1] = Q - 1; xa[2] = 5; xb[2] = Q - 5;
    alpha = rnd_res();
    t0 = cycle;
    for (int g = 0; g < VLEN / L; g += 2) begin
      fork
        blas_group(op, 1, g * L);
        blas_group(op, 2, (g + 1) * L);
      join
    end
    for (int i = 0; i < VLEN; i++) begin
      logic [127:0] e;
      case (op)
        0: e = 128'((257'(xa[i]) + 257'(xb[i])) % 257'(Q));
        1: e = 128'((257'(xa[i]) + 257'(Q) - 257'(xb[i])) % 257'(Q));
        2: e = ref_mulmod(xa[i], xb[i]);
        default: e = 128'((257'(ref_mulmod(alpha, xa[i])) + 257'(xb[i])) % 257'(Q));
      endcase
      checks++;
      if (xr[i] !== e) begin
        failures++;
        if (failures < 10) $display("FAIL %s element %0d: %h want %h", name, i, xr[i], e);
      end
    end
    $display("%-8s %0d elements: %0d cycles (%0.2f cycles per element)", name, VLEN,
             cycle - t0, real'(cycle - t0) / VLEN);
  endtask

  // ---------------------------------------------------------------- NTT
  logic [127:0] nx [NTT_MAX], nin [NTT_MAX], tw [NTT_MAX];
  int           n_bfly = 0;

  // Eight butterflies: (u, v) -> (u + w v, u - w v), lanes gathered from the
  // index lists.
  task automatic bfly_group(input int p, input int iu [L], input int iv [L], input int iw [L]);
    vec_t uh, ul, vh, vl, wh, wl, th, tl, sh, sl, dh, dl;
    for (int i = 0; i < L; i++) begin
      uh[i] = nx[iu[i]][127:64]; ul[i] = nx[iu[i]][63:0];
      vh[i] = nx[iv[i]][127:64]; vl[i] = nx[iv[i]][63:0];
      wh[i] = tw[iw[i]][127:64]; wl[i] = tw[iw[i]][63:0];
    end
    mulmod(p, wh, wl, vh, vl, th, tl);
    fork
      addmod(p, uh, ul, th, tl, sh, sl);
      submod(p == 1 ? 2 : 1, uh, ul, th, tl, dh, dl);
    join
    for (int i = 0; i < L; i++) begin
      nx[iu[i]] = {sh[i], sl[i]};
      nx[iv[i]] = {dh[i], dl[i]};
    end
    n_bfly += L;
  endtask

  task automatic run_ntt(input int NTT_LOG);
    int t0, NTT_N;
    logic [127:0] wn;
    NTT_N  = 1 << NTT_LOG;
    n_bfly = 0;
    wn = ref_powmod(W1024, NTT_MAX / NTT_N);
    for (int i = 0; i < NTT_N; i++) begin
      nin[i] = rnd_res();
      tw[i]  = ref_powmod(wn, i);
    end
    checks++;
    if (ref_powmod(wn, NTT_N / 2) != Q - 1) begin failures++; $display("FAIL root of unity"); end
    // bit-reversed load
    for (int i = 0; i < NTT_N; i++) begin
      int r;
      r = 0;
      for (int b = 0; b < NTT_LOG; b++) if ((i & (1 << b)) != 0) r |= 1 << (NTT_LOG - 1 - b);
      nx[r] = nin[i];
    end
    t0 = cycle;
    for (int s = 1; s <= NTT_LOG; s++) begin
      int half, step, k;
      int iu [NTT_MAX/2], iv [NTT_MAX/2], iw [NTT_MAX/2];
      half = 1 << (s - 1);
      step = NTT_N >> s;
      k = 0;
      for (int blk = 0; blk < NTT_N; blk += 2 * half)
        for (int j = 0; j < half; j++) begin
          iu[k] = blk + j; iv[k] = blk + j + half; iw[k] = j * step; k++;
        end
      for (int g = 0; g < NTT_N / 2; g += 2 * L) begin
        int u0 [L], v0 [L], w0 [L], u1 [L], v1 [L], w1 [L];
        for (int i = 0; i < L; i++) begin
          u0[i] = iu[g + i];     v0[i] = iv[g + i];     w0[i] = iw[g + i];
          u1[i] = iu[g + L + i]; v1[i] = iv[g + L + i]; w1[i] = iw[g + L + i];
        end
        fork
          bfly_group(1, u0, v0, w0);
          bfly_group(2, u1, v1, w1);
        join
      end
    end
    $display("NTT %0d points: %0d butterflies, %0d cycles (%0.2f cycles per butterfly)",
             NTT_N, n_bfly, cycle - t0, real'(cycle - t0) / n_bfly);
    for (int k = 0; k < NTT_N; k++) begin
      logic [255:0] acc;
      acc = '0;
      for (int j = 0; j < NTT_N; j++) acc = (acc + 256'(ref_mulmod(nin[j], tw[(j * k) % NTT_N]))) % 256'(Q);
      checks++;
      if (nx[k] !== 128'(acc)) begin
        failures++;
        if (failures < 10) $display("FAIL NTT output %0d: %h want %h", k, nx[k], 128'(acc));
      end
    end
  endtask

  initial begin
    MU = (256'd1 << 248) / 256'(Q);
    for (int i = 0; i < L; i++) begin
      qh[i] = Q[127:64]; ql[i] = Q[63:0];
      muh[i] = MU[127:64]; mul_[i] = MU[63:0];
    end
    rst_n = 1'b0;
    host_init();
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    run_blas(0, "vadd");
    run_blas(1, "vsub");
    run_blas(2, "vmul");
    run_blas(3, "axpy");
    run_ntt(8);
    run_ntt(10);
    $display("instructions issued: port0 %0d (vpmulq %0d), port1 %0d, port5 %0d",
             n_issue[0], n_mul_issue, n_issue[1], n_issue[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
