// tb_div_share: 7 requesters sharing ceil(7/3) = 3 dividers. Phase 1 issues
// the staggered pattern of a pipeline fed every 3 cycles (unit j requests at
// task time + 6 - j) and checks that no request waits; phase 2 issues random
// bursts and checks that collisions are resolved; phase 3 fills the three
// queues of the first group at once and checks that the arbiter rotates
// (no unit is served twice in a row while the others wait). Every unit's
// results must come back in its own order with the right reciprocal value.
module tb_div_share;
  import draco_pkg::*;
  localparam int N = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] req_valid, res_pop, res_empty;
  fx_t [N-1:0] req_d, res_q;
  logic arb_wait;
  div_share #(.N(N), .G(3)) dut (.*);

  int checks = 0, failures = 0;
  fx_t expq [N][$];
  int waits1 = 0, waits2 = 0, phase = 0, got = 0, sent = 0;
  int g0_last = -1, g0_n = 0, g0_repeat = 0;

  function automatic fx_t ref_recip(fx_t x);
    longint r;
    r = (longint'(1) << (2 * F)) / longint'(x);
    return (r > longint'(FX_MAX)) ? FX_MAX : fx_t'(r);
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer: pop results at random, check order and value
  always @(negedge clk) begin
    for (int u = 0; u < N; u++) res_pop[u] = !res_empty[u] && ($urandom % 3 != 0);
  end
  always @(posedge clk) begin
    if (rst_n) begin
      if (arb_wait) begin
        if (phase == 1) waits1++;
        else            waits2++;
      end
      // grants of divider 0 during phase 3
      if (phase == 3 && dut.g_div[0].issue && g0_n < 8) begin
        if (int'(dut.g_div[0].sel) == g0_last) g0_repeat++;
        g0_last = int'(dut.g_div[0].sel);
        g0_n++;
      end
      for (int u = 0; u < N; u++)
        if (res_pop[u]) begin
          fx_t e;
          e = expq[u].pop_front();
          checks++;
          got++;
          if (res_q[u] != e) begin failures++; $display("unit %0d got %0d expected %0d", u, res_q[u], e); end
        end
    end
  end

  initial begin
    req_valid = '0; req_d = '0; res_pop = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    phase = 1;
    // staggered: tasks every 3 cycles, unit j at offset 6-j
    for (int t = 0; t < 120; t++) begin
      @(negedge clk);
      req_valid = '0;
      for (int u = 0; u < N; u++)
        if (t >= 6 - u && (t - (6 - u)) % 3 == 0 && t - (6 - u) < 90) begin
          req_valid[u] = 1'b1;
          req_d[u] = fx_t'(64 + ($urandom % 20000));
          expq[u].push_back(ref_recip(req_d[u]));
          sent++;
        end
    end
    phase = 2;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      req_valid = '0;
      for (int u = 0; u < N; u++)
        if (t % 6 < 2 && $urandom % 2 == 1) begin
          req_valid[u] = 1'b1;
          req_d[u] = fx_t'(64 + ($urandom % 20000));
          expq[u].push_back(ref_recip(req_d[u]));
          sent++;
        end
    end
    @(negedge clk);
    req_valid = '0;
    repeat (80) @(posedge clk);
    phase = 3;
    for (int t = 0; t < 3; t++) begin
      @(negedge clk);
      req_valid = '0;
      for (int u = 0; u < 3; u++) begin
        req_valid[u] = 1'b1;
        req_d[u] = fx_t'(64 + ($urandom % 20000));
        expq[u].push_back(ref_recip(req_d[u]));
        sent++;
      end
    end
    @(negedge clk);
    req_valid = '0;
    repeat (80) @(posedge clk);
    checks += 5;
    if (g0_n < 8) begin failures++; $display("only %0d grants in phase 3", g0_n); end
    if (g0_repeat != 0) begin failures++; $display("%0d repeated grants while others waited", g0_repeat); end
    if (got != sent) begin failures++; $display("%0d of %0d results", got, sent); end
    if (waits1 != 0) begin failures++; $display("%0d waits with staggered requests", waits1); end
    if (waits2 == 0) begin failures++; $display("no collision in the burst phase"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
