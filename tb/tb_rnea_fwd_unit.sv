// tb_rnea_fwd_unit: random links, joint states and parent motion; checks
// v, a, f and the joint transform against the real-valued forward RNEA step,
// and the one-cycle latency.
module tb_rnea_fwd_unit;
  import draco_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  link_t lk;
  fx_t s, c, qd, qdd;
  v6_t fext, v_par, a_par, v, a, f;
  xform_t x;
  rnea_fwd_unit dut (.*);

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
      joint_in_t j;
      rv6 vp, ap, ev, ea, ef, t, iv;
      rm6 xr, im;
      lk = rand_link(0);
      j = rand_joint(2.0, 3.0, 1.0);
      for (int k = 0; k < 6; k++) begin
        vp[k] = urand(-1.0, 1.0);
        ap[k] = urand(-3.0, 3.0);
      end
      @(negedge clk);
      s = j.s; c = j.c; qd = j.qd; qdd = j.qdd; fext = j.fext;
      v_par = r_v6(vp); a_par = r_v6(ap);
      in_valid = 1;
      xr = link_x(lk, j);
      im = m6_r(lk.I);
      ev = rmv(xr, v6_r(v_par)); ev[2] += to_r(qd);
      ea = rmv(xr, v6_r(a_par)); ea[2] += to_r(qdd);
      t = rcrm(ev, '{0.0, 0.0, to_r(qd), 0.0, 0.0, 0.0});
      for (int k = 0; k < 6; k++) ea[k] += t[k];
      iv = rmv(im, ev);
      t = rcrf(ev, iv);
      ef = rmv(im, ea);
      for (int k = 0; k < 6; k++) ef[k] += t[k] - to_r(fext[k]);
      @(posedge clk);
      #1;
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int k = 0; k < 6; k++) begin
        checks += 3;
        if (rabs(to_r(v[k]) - ev[k]) > 0.01) begin failures++; $display("v[%0d] %f vs %f", k, to_r(v[k]), ev[k]); end
        if (rabs(to_r(a[k]) - ea[k]) > 0.02) begin failures++; $display("a[%0d] %f vs %f", k, to_r(a[k]), ea[k]); end
        if (rabs(to_r(f[k]) - ef[k]) > 0.03) begin failures++; $display("f[%0d] %f vs %f", k, to_r(f[k]), ef[k]); end
      end
      for (int r = 0; r < 3; r++)
        for (int k = 0; k < 3; k++) begin
          checks++;
          if (rabs(to_r(x.E[r][k]) - xr[r][k]) > 0.002) begin failures++; $display("E mismatch"); end
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
