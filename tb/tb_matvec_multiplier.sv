// tb_matvec_multiplier: random M^-1, vectors and subtrahends; checks
// y = M^-1 (vec - sub) against real arithmetic, the returned tag and the
// one-cycle latency, with a new operand set every cycle.
module tb_matvec_multiplier;
  import draco_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  fx_t [N-1:0][N-1:0] minv;
  fx_t [N-1:0] vec, sub, y;
  logic [4:0] in_tag, out_tag;
  matvec_multiplier #(.N(N), .TAG_W(5)) dut (.*);
  int checks = 0, failures = 0;
  real ey [N];
  logic [4:0] etag;
  logic pending = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 201; n++) begin
      @(negedge clk);
      if (pending) begin
        checks += 2;
        if (!out_valid) begin failures++; $display("out_valid missing"); end
        if (out_tag != etag) begin failures++; $display("tag mismatch"); end
        for (int i = 0; i < N; i++) begin
          checks++;
          if (rabs(to_r(y[i]) - ey[i]) > 0.01) begin failures++; $display("y[%0d] %f vs %f", i, to_r(y[i]), ey[i]); end
        end
      end
      pending = (n < 200);
      in_valid = pending;
      in_tag = 5'(n);
      etag = in_tag;
      for (int i = 0; i < N; i++) begin
        vec[i] = to_fx(urand(-5.0, 5.0));
        sub[i] = (n % 2 == 0) ? to_fx(urand(-5.0, 5.0)) : '0;
        for (int j = 0; j < N; j++) minv[i][j] = to_fx(urand(-2.0, 2.0));
      end
      for (int i = 0; i < N; i++) begin
        ey[i] = 0.0;
        for (int j = 0; j < N; j++) ey[i] += to_r(minv[i][j]) * (to_r(vec[j]) - to_r(sub[j]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
