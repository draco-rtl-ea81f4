// tb_rnea_bwd_unit: random forces and transforms; checks the joint torque
// S^T (f_own + f_child), the untouched torques of the other joints and the
// force X^T (f_own + f_child) handed to the parent, one cycle later.
module tb_rnea_bwd_unit;
  import draco_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 7;
  localparam int J = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  v6_t f_own, f_child, f_par;
  xform_t x_own;
  fx_t [N-1:0] tau_in, tau_out;
  rnea_bwd_unit #(.N(N), .J(J)) dut (.*);

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
    for (int n = 0; n < 200; n++) begin
      link_t lk;
      joint_in_t j;
      rv6 ft, ep;
      rm6 xr;
      lk = rand_link(0);
      j = rand_joint(1.0, 1.0, 0.0);
      xr = link_x(lk, j);
      @(negedge clk);
      x_own = joint_xform(lk, j.s, j.c);
      for (int k = 0; k < 6; k++) begin
        f_own[k] = to_fx(urand(-10.0, 10.0));
        f_child[k] = to_fx(urand(-10.0, 10.0));
        ft[k] = to_r(f_own[k]) + to_r(f_child[k]);
      end
      for (int i = 0; i < N; i++) tau_in[i] = fx_t'($urandom);
      ep = rmtv(xr, ft);
      in_valid = 1;
      @(posedge clk);
      #1;
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (i == J) begin
          if (rabs(to_r(tau_out[i]) - ft[2]) > 0.001) begin failures++; $display("tau %f vs %f", to_r(tau_out[i]), ft[2]); end
        end else if (tau_out[i] != tau_in[i]) begin
          failures++; $display("tau[%0d] changed", i);
        end
      end
      for (int k = 0; k < 6; k++) begin
        checks++;
        if (rabs(to_r(f_par[k]) - ep[k]) > 0.02) begin failures++; $display("f_par[%0d] %f vs %f", k, to_r(f_par[k]), ep[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
