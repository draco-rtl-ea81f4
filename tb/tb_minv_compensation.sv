// tb_minv_compensation: random matrices and offsets; checks the element-wise
// sum one cycle later and that out_valid follows in_valid.
module tb_minv_compensation;
  import draco_pkg::*;
  localparam int N = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  fx_t [N-1:0][N-1:0] minv_in, offset, minv_out;
  minv_compensation #(.N(N)) dut (.*);
  int checks = 0, failures = 0;

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
    for (int n = 0; n < 100; n++) begin
      fx_t [N-1:0][N-1:0] e;
      @(negedge clk);
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          minv_in[i][j] = fx_t'($urandom % 40000) - fx_t'(20000);
          offset[i][j] = (i == j || $urandom % 4 == 0) ? fx_t'($urandom % 800) - fx_t'(400) : '0;
          e[i][j] = minv_in[i][j] + offset[i][j];
        end
      in_valid = 1;
      @(posedge clk);
      #1;
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          checks++;
          if (minv_out[i][j] != e[i][j]) begin failures++; $display("[%0d][%0d] mismatch", i, j); end
        end
      @(posedge clk);
      #1;
      checks++;
      if (out_valid) begin failures++; $display("out_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
