// tb_minv_fwd_unit: random FIFO entries, reciprocals and forward transfers
// into a middle joint (J = 2 of 4) and the base joint (J = 0); checks the
// resolved row of M^-1, the P matrix passed on and that the other rows pass
// through unchanged.
module tb_minv_fwd_unit;
  import draco_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, ov2, ov0;
  link_t lk;
  fx_t s, c, ddef;
  v6_t u_a;
  fx_t [N-1:0] row_da;
  v6_t [N-1:0] p_par, po2, po0;
  fx_t [N-1:0][N-1:0] minv_in, mo2, mo0;

  minv_fwd_unit #(.N(N), .J(2)) dut2 (.clk, .rst_n, .in_valid, .lk, .s, .c, .u_a, .row_da, .ddef,
    .p_par, .minv_in, .out_valid(ov2), .p_out(po2), .minv_out(mo2));
  minv_fwd_unit #(.N(N), .J(0)) dut0 (.clk, .rst_n, .in_valid, .lk, .s, .c, .u_a, .row_da, .ddef,
    .p_par, .minv_in, .out_valid(ov0), .p_out(po0), .minv_out(mo0));

  int checks = 0, failures = 0;

  task automatic chk(string what, real g, real e);
    checks++;
    if (rabs(g - e) > 0.02 + 0.02 * rabs(e)) begin
      failures++;
      $display("%s: got %f expected %f", what, g, e);
    end
  endtask

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
      joint_in_t j;
      rm6 xr;
      rv6 xp;
      real dd, row;
      lk = rand_link(0);
      j = rand_joint(1.0, 1.0, 0.0);
      xr = link_x(lk, j);
      @(negedge clk);
      s = j.s; c = j.c;
      ddef = to_fx(urand(0.5, 2.0));
      dd = to_r(ddef);
      for (int k = 0; k < 6; k++) u_a[k] = to_fx(urand(-1.0, 1.0));
      for (int jj = 0; jj < N; jj++) begin
        row_da[jj] = to_fx(urand(-1.0, 1.0));
        for (int k = 0; k < 6; k++) p_par[jj][k] = to_fx(urand(-1.0, 1.0));
        for (int k = 0; k < N; k++) minv_in[jj][k] = fx_t'($urandom);
      end
      in_valid = 1;
      @(posedge clk);
      #1;
      in_valid = 0;
      checks++;
      if (!ov2 || !ov0) begin failures++; $display("out_valid missing"); end
      for (int jj = 0; jj < N; jj++) begin
        // J = 2
        if (jj >= 2) begin
          real t;
          xp = rmv(xr, v6_r(p_par[jj]));
          t = 0.0;
          for (int k = 0; k < 6; k++) t += to_r(u_a[k]) * xp[k];
          row = dd * (to_r(row_da[jj]) - t);
          xp[2] += row;
        end else begin
          row = 0.0;
          xp = '{0.0, 0.0, 0.0, 0.0, 0.0, 0.0};
        end
        chk("row J=2", to_r(mo2[2][jj]), row);
        for (int k = 0; k < 6; k++) chk("p J=2", to_r(po2[jj][k]), xp[k]);
        // J = 0
        row = dd * to_r(row_da[jj]);
        chk("row J=0", to_r(mo0[0][jj]), row);
        chk("p J=0", to_r(po0[jj][2]), row);
      end
      for (int r = 0; r < N; r++) begin
        checks++;
        if (r != 2 && mo2[r] != minv_in[r]) begin failures++; $display("row %0d changed", r); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
