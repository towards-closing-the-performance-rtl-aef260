// tb_mqx_mul: self-checking test of the pipelined widening multiplier.
//
// Issues one instruction per cycle (with random idle cycles in between) for
// 3000 instructions, each with its own tag and random or corner-case operands
// (all ones, zero, powers of two). A scoreboard queue holds the expected
// products, computed in 128-bit arithmetic from the multiply definition
// ch:cl = a * b, together with the issue cycle. Every result is checked for
// value, tag, order and its latency of exactly LAT cycles; the number of
// results must equal the number of instructions. A reset in the middle of
// the run must cancel the instructions in flight.
module tb_mqx_mul;
  import mqx_pkg::*;

  localparam int unsigned L   = MQX_LANES;
  localparam int unsigned W   = MQX_W;
  localparam int unsigned LAT = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic  rst_n;
  logic  in_valid, out_valid;
  tag_t  in_tag, out_tag;
  vec_t  a, b, ch, cl;
  int    checks = 0, failures = 0;
  int    cycle = 0;

  mqx_mul #(.LANES(L), .W(W), .TAG_W(MQX_TAG_W), .LAT(LAT)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_tag(in_tag), .a(a), .b(b),
    .out_valid(out_valid), .out_tag(out_tag), .ch(ch), .cl(cl)
  );

  typedef struct {
    int           t_issue;
    tag_t         tag;
    logic [127:0] p [L];
  } exp_t;
  exp_t sb[$];
  int   issued = 0, retired = 0;

  always @(posedge clk) cycle <= cycle + 1;

  // result checker
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (sb.size() == 0) begin
        failures++; $display("FAIL result with nothing outstanding");
      end else begin
        exp_t e;
        e = sb.pop_front();
        retired++;
        if (cycle - e.t_issue != LAT || out_tag !== e.tag) begin
          failures++;
          $display("FAIL latency %0d (want %0d) tag %0d (want %0d)", cycle - e.t_issue, LAT, out_tag, e.tag);
        end
        for (int i = 0; i < L; i++) begin
          checks++;
          if ({ch[i], cl[i]} !== e.p[i]) begin
            failures++;
            if (failures < 10) $display("FAIL lane %0d: %h:%h want %h", i, ch[i], cl[i], e.p[i]);
          end
        end
      end
    end
  end

  function automatic logic [63:0] operand(int kind);
    case (kind)
      0: return '1;
      1: return '0;
      2: return 64'h1 << ($urandom() % 64);
      default: return {$urandom(), $urandom()};
    endcase
  endfunction

  task automatic issue_one();
    exp_t e;
    for (int i = 0; i < L; i++) begin
      a[i] = operand(int'($urandom() % 8));
      b[i] = operand(int'($urandom() % 8));
      e.p[i] = 128'(a[i]) * 128'(b[i]);
    end
    in_tag   = tag_t'(issued);
    in_valid = 1'b1;
    e.tag    = in_tag;
    e.t_issue = cycle;       // value the checker reads at the issuing edge
    sb.push_back(e);
    issued++;
  endtask

  initial begin
    rst_n = 1'b0; in_valid = 1'b0; in_tag = '0; a = '0; b = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if ($urandom() % 4 == 0) begin in_valid = 1'b0; @(negedge clk); end
      issue_one();
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (retired != issued || sb.size() != 0) begin
      failures++; $display("FAIL issued %0d retired %0d", issued, retired);
    end
    // reset cancels instructions in flight
    @(negedge clk) issue_one();
    @(negedge clk) in_valid = 1'b0; rst_n = 1'b0;
    @(negedge clk) rst_n = 1'b1;
    sb.delete();
    repeat (LAT + 2) begin
      @(posedge clk);
      #1 checks++;
      if (out_valid) begin failures++; $display("FAIL result after reset"); end
    end
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
