// tb_pipelined_divider: one operand per cycle, positive, negative, tiny and
// zero divisors; checks each reciprocal against floor(2^(2F)/|d|) with sign
// and saturation, the tag, the latency of 2F+3 cycles and full throughput.
module tb_pipelined_divider;
  import draco_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  fx_t d, q;
  logic [7:0] in_tag, out_tag;
  pipelined_divider #(.TAG_W(8)) dut (.*);

  localparam int LAT = 2 * F + 3;
  int checks = 0, failures = 0;
  fx_t exp_q [$];
  logic [7:0] exp_t [$];
  int t_in [$];
  int cyc = 0, nout = 0;

  function automatic fx_t ref_recip(fx_t x);
    longint m, r;
    if (x == 0) return FX_MAX;
    m = (x < 0) ? -longint'(x) : longint'(x);
    r = (longint'(1) << (2 * F)) / m;
    if (r > longint'(FX_MAX)) return (x < 0) ? FX_MIN : FX_MAX;
    return (x < 0) ? fx_t'(-r) : fx_t'(r);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_valid) begin
      exp_q.push_back(ref_recip(d));
      exp_t.push_back(in_tag);
      t_in.push_back(cyc);
    end
    if (rst_n && out_valid) begin
      fx_t e;
      e = exp_q.pop_front();
      checks += 3;
      if (q != e) begin failures++; $display("q %0d expected %0d", q, e); end
      if (out_tag != exp_t.pop_front()) begin failures++; $display("tag mismatch"); end
      if (cyc - t_in.pop_front() != LAT) begin failures++; $display("latency wrong"); end
      nout++;
    end
  end

  initial begin
    in_valid = 0; d = '0; in_tag = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      in_valid = (n < 300) || ($urandom % 2 == 1);
      case ($urandom % 5)
        0: d = fx_t'($urandom % (1 << (F + 4)));
        1: d = -fx_t'($urandom % (1 << (F + 4)));
        2: d = fx_t'($urandom % 8);
        3: d = fx_t'($urandom);
        default: d = (n % 50 == 0) ? '0 : fx_t'(FX_ONE + ($urandom % 256) - 128);
      endcase
      in_tag = 8'(n);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
