// tb_sync_fifo: random push/pop traffic against a queue model; checks data
// order, empty/full/count and that a full FIFO is never pushed.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, empty, full;
  logic [15:0] din, dout;
  logic [3:0] count;
  sync_fifo #(.T(logic [15:0]), .DEPTH(8)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] q [$];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == 8) || count != 4'(q.size())) begin
        failures++;
        $display("status mismatch: size %0d empty %b full %b count %0d", q.size(), empty, full, count);
      end
      if (q.size() > 0) begin
        checks++;
        if (dout != q[0]) begin
          failures++;
          $display("dout %h expected %h", dout, q[0]);
        end
      end
      push = !full && ($urandom % 100 < ((n / 400) % 2 == 0 ? 70 : 30));
      pop  = !empty && ($urandom % 100 < 50);
      din  = 16'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
