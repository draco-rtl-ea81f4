// tb_rnea_module: self-checking test of the RNEA round trip pipeline.
// A random 7-joint arm, gravity, random joint states and external forces.
// Tasks are streamed back to back every II cycles; every torque vector is
// compared with a floating-point RNEA, and the latency (2N cycles) and the
// output spacing are checked.
module tb_rnea_module;
  import draco_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 7;
  localparam int NT = 24;
  localparam int II = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_t [N-1:0]     lk;
  logic              in_valid;
  joint_in_t [N-1:0] jin;
  v6_t               a_base;
  logic              out_valid;
  fx_t [N-1:0]       tau;

  rnea_module #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  real exp_tau [NT][N];
  int  t_in [NT];
  int  cyc = 0, nout = 0, nin = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && in_valid) begin
      t_in[nin] = cyc;
      nin++;
    end
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      for (int i = 0; i < N; i++) begin
        real e, g;
        e = exp_tau[nout][i];
        g = to_r(tau[i]);
        checks++;
        if (rabs(g - e) > 0.05 + 0.01 * rabs(e)) begin
          failures++;
          $display("task %0d joint %0d: got %f expected %f", nout, i, g, e);
        end
      end
      checks++;
      if (cyc - t_in[nout] != 2 * N) begin
        failures++;
        $display("task %0d latency %0d, expected %0d", nout, cyc - t_in[nout], 2 * N);
      end
      nout++;
    end
  end

  initial begin
    link_t lks[];
    joint_in_t js[];
    rv6 ab;
    real t[];
    lks = new[N]; js = new[N];
    for (int i = 0; i < N; i++) begin
      lks[i] = rand_link(0);
      lk[i] = lks[i];
    end
    ab = '{0.0, 0.0, 0.0, 0.0, 0.0, 9.81};
    a_base = r_v6(ab);
    in_valid = 0;
    jin = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NT; k++) begin
      for (int i = 0; i < N; i++) begin
        js[i] = rand_joint(2.0, 4.0, (k % 2 == 1) ? 1.0 : 0.0);
        jin[i] = js[i];
      end
      ref_rnea(N, lks, js, ab, t);
      for (int i = 0; i < N; i++) exp_tau[k][i] = t[i];
      in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      repeat (II - 1) @(posedge clk);
    end
    repeat (4 * N) @(posedge clk);
    checks++;
    if (nout != NT) begin
      failures++;
      $display("got %0d results, expected %0d", nout, NT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
