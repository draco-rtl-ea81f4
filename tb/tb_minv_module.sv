// tb_minv_module: self-checking test of the division-deferring Minv pipeline.
// Two instances: the 7-joint default configuration driven with a coaxial
// chain (whose holding factors stay near 1), and a 3-joint instance driven
// with a general arm with rotated joint axes. Every M^-1 is compared with the
// original, dividing algorithm in floating point. Tasks are streamed every
// 3 cycles (no divider collision may occur, one result every 3 cycles) and
// then with irregular spacing (collisions are absorbed by the request queues).
// A final back-to-back pair of tasks must collide at the dividers and still
// give correct results. The compensation offset of the 3-joint instance is non-zero on the diagonal.
module tb_minv_module;
  import draco_pkg::*;
  import tb_ref_pkg::*;

  localparam int NA = 7;
  localparam int NB = 3;
  localparam int NT = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_t [NA-1:0]       lka;
  link_t [NB-1:0]       lkb;
  fx_t [NA-1:0][NA-1:0] offa;
  fx_t [NB-1:0][NB-1:0] offb;
  logic                 va, vb;
  joint_in_t [NA-1:0]   ja;
  joint_in_t [NB-1:0]   jb;
  logic                 oa, ob, arba, arbb, fwa, fwb;
  fx_t [NA-1:0][NA-1:0] ma;
  fx_t [NB-1:0][NB-1:0] mb;

  minv_module dut_a (
    .clk, .rst_n, .lk(lka), .comp_offset(offa), .in_valid(va), .jin(ja),
    .out_valid(oa), .minv(ma), .arb_wait(arba), .fwd_wait(fwa));
  minv_module #(.N(NB)) dut_b (
    .clk, .rst_n, .lk(lkb), .comp_offset(offb), .in_valid(vb), .jin(jb),
    .out_valid(ob), .minv(mb), .arb_wait(arbb), .fwd_wait(fwb));

  int checks = 0, failures = 0;
  real ea [2*NT+2][NA][NA];
  real eb [2*NT+2][NB][NB];
  int na = 0, nb = 0, phase = 0, arb_reg = 0, arb_irr = 0, arb_burst = 0;
  int last_a = -1, gap_bad = 0, cyc = 0;
  real offd = 0.125;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && (arba || arbb)) begin
      if (phase == 0) arb_reg++;
      else            arb_irr++;
      if (phase == 2) arb_burst++;
    end
    if (rst_n && oa) begin
      for (int i = 0; i < NA; i++)
        for (int j = 0; j < NA; j++) begin
          real g, e;
          g = to_r(ma[i][j]);
          e = ea[na][i][j];
          checks++;
          if (rabs(g - e) > 0.02 + 0.03 * rabs(e)) begin
            failures++;
            $display("A task %0d M^-1[%0d][%0d]: got %f expected %f", na, i, j, g, e);
          end
        end
      if (phase == 0 && last_a >= 0 && cyc - last_a != 3) gap_bad++;
      last_a = cyc;
      na++;
    end
    if (rst_n && ob) begin
      for (int i = 0; i < NB; i++)
        for (int j = 0; j < NB; j++) begin
          real g, e;
          g = to_r(mb[i][j]);
          e = eb[nb][i][j] + ((i == j) ? offd : 0.0);
          checks++;
          if (rabs(g - e) > 0.02 + 0.03 * rabs(e)) begin
            failures++;
            $display("B task %0d M^-1[%0d][%0d]: got %f expected %f", nb, i, j, g, e);
          end
        end
      nb++;
    end
  end

  initial begin
    link_t la[], lb[];
    joint_in_t sa[], sb[];
    real r[][];
    la = new[NA]; lb = new[NB]; sa = new[NA]; sb = new[NB];
    for (int i = 0; i < NA; i++) begin la[i] = rand_link(1); lka[i] = la[i]; end
    for (int i = 0; i < NB; i++) begin lb[i] = rand_link(0); lkb[i] = lb[i]; end
    offa = '0;
    offb = '0;
    for (int i = 0; i < NB; i++) offb[i][i] = to_fx(offd);
    va = 0; vb = 0; ja = '0; jb = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 2 * NT + 2; k++) begin
      for (int i = 0; i < NA; i++) begin sa[i] = rand_joint(1.0, 1.0, 0.0); ja[i] <= sa[i]; end
      for (int i = 0; i < NB; i++) begin sb[i] = rand_joint(1.0, 1.0, 0.0); jb[i] <= sb[i]; end
      ref_minv(NA, la, sa, r);
      for (int i = 0; i < NA; i++) for (int j = 0; j < NA; j++) ea[k][i][j] = r[i][j];
      ref_minv(NB, lb, sb, r);
      for (int i = 0; i < NB; i++) for (int j = 0; j < NB; j++) eb[k][i][j] = r[i][j];
      if (k == NT) begin
        repeat (80) @(posedge clk);
        phase = 1;
      end
      va <= 1; vb <= 1;
      @(posedge clk);
      // regular: every 3 cycles; irregular: 3..6 cycles; last three back to back
      if (k >= 2 * NT - 1) phase = 2;
      if (k < 2 * NT - 1) begin
        va <= 0; vb <= 0;
        repeat ((k < NT) ? 2 : 2 + ($urandom % 4)) @(posedge clk);
      end
    end
    va <= 0; vb <= 0;
    repeat (120) @(posedge clk);
    checks++;
    if (na != 2 * NT + 2 || nb != 2 * NT + 2) begin
      failures++;
      $display("results: %0d and %0d of %0d", na, nb, 2 * NT + 2);
    end
    checks++;
    if (arb_reg != 0) begin
      failures++;
      $display("%0d divider collisions with tasks every 3 cycles", arb_reg);
    end
    checks++;
    if (gap_bad != 0) begin
      failures++;
      $display("%0d results not 3 cycles apart", gap_bad);
    end
    $display("divider collisions after the regular phase: %0d", arb_irr);
    checks++;
    if (arb_burst == 0) begin
      failures++;
      $display("back-to-back tasks caused no divider collision");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
