// tb_dsp_alloc_ctrl: requests of every RBD function with tasks in flight.
// Checks the DSP-group owners and module enables of each function, the issue
// interval (3 cycles for ID, 4 for the others), that a request of another
// function waits until nothing is in flight, and the event pulses.
module tb_dsp_alloc_ctrl;
  import draco_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, issue, shared_to_rnea, dr_to_drnea, mr_to_minv, en_rnea, en_minv, en_drnea, en_mul;
  logic ii_stall, mode_switch;
  fn_e req_fn, cur_fn;
  logic [7:0] inflight;
  logic [3:0] cur_ii;
  dsp_alloc_ctrl dut (.*);
  int checks = 0, failures = 0;
  int cyc = 0, last = -100, nsw = 0, nstall = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // each issued task stays in flight for 10 cycles
  int life [$];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (mode_switch) nsw++;
      if (ii_stall) nstall++;
      if (issue) begin
        checks++;
        if (inflight != 0 && req_fn != cur_fn) begin failures++; $display("issued across functions"); end
        if (last >= 0 && cyc - last < int'(cur_ii)) begin
          failures++; $display("II violated: %0d < %0d", cyc - last, cur_ii);
        end
        if (last >= 0 && cyc - last == int'(cur_ii)) checks++;
        last = cyc;
        life.push_back(cyc + 10);
      end
      if (mode_switch) begin
        checks++;
        if (inflight != 0) begin failures++; $display("switch with %0d in flight", inflight); end
        last = -100;
      end
      while (life.size() > 0 && life[0] <= cyc) void'(life.pop_front());
    end
  end
  assign inflight = 8'(life.size());

  task automatic expect_alloc(fn_e f, bit dr, bit mr, bit er, bit em, bit ed, bit emu, int ii);
    checks++;
    if (cur_fn != f || shared_to_rnea != (f == FN_ID) || dr_to_drnea != dr || mr_to_minv != mr || en_rnea != er ||
        en_minv != em || en_drnea != ed || en_mul != emu || int'(cur_ii) != ii) begin
      failures++;
      $display("allocation of %s wrong: rnea %b dr %b mr %b en %b%b%b%b ii %0d", f.name(),
               shared_to_rnea, dr_to_drnea, mr_to_minv, en_rnea, en_minv, en_drnea, en_mul, cur_ii);
    end
  endtask

  initial begin
    fn_e seq [5] = '{FN_ID, FN_MINV, FN_FD, FN_DID, FN_DFD};
    req_valid = 0;
    req_fn = FN_ID;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 5; m++) begin
      int n;
      n = 0;
      @(negedge clk);
      req_fn = seq[m];
      req_valid = 1;
      while (n < 6) begin
        @(posedge clk);
        if (issue) n++;
        @(negedge clk);
      end
      // measure spacing of consecutive issues
      case (seq[m])
        FN_ID:   expect_alloc(FN_ID,   0, 0, 1, 0, 0, 0, 3);
        FN_MINV: expect_alloc(FN_MINV, 0, 1, 0, 1, 0, 0, 4);
        FN_FD:   expect_alloc(FN_FD,   0, 1, 1, 1, 0, 1, 4);
        FN_DID:  expect_alloc(FN_DID,  1, 0, 1, 0, 1, 0, 4);
        default: expect_alloc(FN_DFD,  1, 1, 1, 1, 1, 1, 4);
      endcase
    end
    req_valid = 0;
    repeat (20) @(posedge clk);
    checks += 2;
    if (nsw != 4) begin failures++; $display("%0d mode switches, expected 4", nsw); end
    if (nstall == 0) begin failures++; $display("no II stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
