// tb_minv_bwd_unit: random alpha-scaled backward transfers into a middle
// joint (J = 2 of 4) and the base joint (J = 0); checks every output against
// a real-valued transcription of the holding-division backward step:
// U a, D a, alpha_i, the scaled row of M^-1, the F matrix and the articulated
// inertia passed to the parent.
module tb_minv_bwd_unit;
  import draco_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid;
  link_t lk;
  fx_t s, c, alpha_in;
  m6_t i_in;
  v6_t [N-1:0] f_in;
  logic ov2, ov0;
  m6_t io2, io0;
  v6_t [N-1:0] fo2, fo0;
  fx_t al2, al0, da2, da0;
  v6_t u2, u0;
  fx_t [N-1:0] row2, row0;

  minv_bwd_unit #(.N(N), .J(2)) dut2 (.clk, .rst_n, .in_valid, .lk, .s, .c, .i_in, .f_in, .alpha_in,
    .out_valid(ov2), .i_out(io2), .f_out(fo2), .alpha_out(al2), .u_a(u2), .row_da(row2), .d_a(da2));
  minv_bwd_unit #(.N(N), .J(0)) dut0 (.clk, .rst_n, .in_valid, .lk, .s, .c, .i_in, .f_in, .alpha_in,
    .out_valid(ov0), .i_out(io0), .f_out(fo0), .alpha_out(al0), .u_a(u0), .row_da(row0), .d_a(da0));

  int checks = 0, failures = 0;

  task automatic chk(string what, real g, real e);
    checks++;
    if (rabs(g - e) > 0.03 + 0.02 * rabs(e)) begin
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
      rm6 xr, ia, iad, eio, ii;
      rv6 u, fs, efo;
      real a, da, al, row[N];
      lk = rand_link(0);
      j = rand_joint(1.0, 1.0, 0.0);
      xr = link_x(lk, j);
      @(negedge clk);
      s = j.s; c = j.c;
      a = urand(0.6, 1.5);
      alpha_in = to_fx(a);
      a = to_r(alpha_in);
      for (int r = 0; r < 6; r++)
        for (int k = r; k < 6; k++) begin
          i_in[r][k] = to_fx(urand(-0.3, 0.3) + ((r == k) ? 0.5 : 0.0));
          i_in[k][r] = i_in[r][k];
        end
      f_in = '0;
      for (int jj = 3; jj < N; jj++)
        for (int k = 0; k < 6; k++) f_in[jj][k] = to_fx(urand(-1.0, 1.0));
      in_valid = 1;
      ii = m6_r(lk.I);
      for (int r = 0; r < 6; r++)
        for (int k = 0; k < 6; k++) ia[r][k] = ii[r][k] * a + to_r(i_in[r][k]);
      for (int r = 0; r < 6; r++) u[r] = ia[r][2];
      da = u[2];
      al = da * a;
      @(posedge clk);
      #1;
      in_valid = 0;
      checks += 2;
      if (!ov2 || !ov0) begin failures++; $display("out_valid missing"); end
      chk("d_a", to_r(da2), da);
      chk("alpha", to_r(al2), al);
      chk("d_a base", to_r(da0), da);
      for (int r = 0; r < 6; r++) chk("u_a", to_r(u2[r]), u[r]);
      for (int jj = 0; jj < N; jj++) begin
        row[jj] = (jj > 2) ? -to_r(f_in[jj][2]) : (jj == 2) ? a : 0.0;
        chk("row", to_r(row2[jj]), row[jj]);
      end
      chk("row base diag", to_r(row0[0]), a);
      for (int jj = 0; jj < N; jj++) begin
        for (int k = 0; k < 6; k++) fs[k] = (jj >= 2) ? to_r(f_in[jj][k]) * da + u[k] * row[jj] : 0.0;
        efo = rmtv(xr, fs);
        for (int k = 0; k < 6; k++) chk("f_out", to_r(fo2[jj][k]), efo[k]);
      end
      for (int r = 0; r < 6; r++)
        for (int k = 0; k < 6; k++) iad[r][k] = ia[r][k] * da - u[r] * u[k];
      eio = rmm(rmt(xr), rmm(iad, xr));
      for (int r = 0; r < 6; r++)
        for (int k = 0; k < 6; k++) chk("i_out", to_r(io2[r][k]), eio[r][k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
