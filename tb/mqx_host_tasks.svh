// mqx_host_tasks.svh: host-side driver for mqx_exec, included inside a
// testbench module that declares clk, issue[3], alu_res[3] and mul_res.
//
// It stands in for the scheduler of the host core. Each call issues one MQX
// instruction to one port and returns its result: the task takes the port's
// issue slot (one instruction per port per cycle, arbitrated with a
// semaphore), drives it between two falling edges, then waits for the result
// carrying its tag. Calls on different ports, or several calls on the same
// port started in parallel with fork, overlap in the pipeline exactly as
// independent instructions would. The AVX-512 operations the kernels also
// need (compare, blend, shifts, moves) are not MQX instructions and are
// evaluated directly in the testbench as the host core would.

semaphore port_sem [3];
tag_t     next_tag = '0;
int       n_issue [3] = '{0, 0, 0};   // instructions issued per port
int       n_mul_issue = 0;

task automatic host_init();
  for (int p = 0; p < 3; p++) begin
    port_sem[p] = new(1);
    issue[p] = '0;
  end
endtask

// Issue one instruction and wait for its result.
task automatic mqx_do(input int p, input mqx_op_e op, input vec_t a, input vec_t b,
                      input mask_t cin, output vec_t r0, output vec_t r1, output mask_t m);
  tag_t t;
  port_sem[p].get(1);
  @(negedge clk);
  t = next_tag;
  next_tag = next_tag + 1'b1;
  issue[p].valid = 1'b1;
  issue[p].op    = op;
  issue[p].tag   = t;
  issue[p].a     = a;
  issue[p].b     = b;
  issue[p].cin   = cin;
  n_issue[p]++;
  if (op == OP_MUL) n_mul_issue++;
  @(posedge clk);
  #1;
  issue[p].valid = 1'b0;
  port_sem[p].put(1);
  r0 = '0; r1 = '0; m = '0;
  forever begin
    if (op == OP_MUL) begin
      if (mul_res.valid && mul_res.tag == t) begin
        r0 = mul_res.ch; r1 = mul_res.cl; break;
      end
    end else if (alu_res[p].valid && alu_res[p].tag == t) begin
      r0 = alu_res[p].c; m = alu_res[p].cout; break;
    end
    @(posedge clk);
    #1;
  end
endtask

// Convenience wrappers: vpadcq, vpsbbq, vpmulq.
task automatic vadc(input int p, input vec_t a, input vec_t b, input mask_t ci,
                    output vec_t c, output mask_t co);
  vec_t unused;
  mqx_do(p, OP_ADC, a, b, ci, c, unused, co);
endtask

task automatic vsbb(input int p, input vec_t a, input vec_t b, input mask_t bi,
                    output vec_t c, output mask_t bo);
  vec_t unused;
  mqx_do(p, OP_SBB, a, b, bi, c, unused, bo);
endtask

task automatic vmul(input vec_t a, input vec_t b, output vec_t ch, output vec_t cl);
  mask_t unused;
  mqx_do(0, OP_MUL, a, b, '0, ch, cl, unused);
endtask

// _mm512_mask_blend_epi64: lane i takes y when m[i] is set, else x.
function automatic vec_t vblend(mask_t m, vec_t x, vec_t y);
  vec_t r;
  for (int i = 0; i < MQX_LANES; i++) r[i] = m[i] ? y[i] : x[i];
  return r;
endfunction
