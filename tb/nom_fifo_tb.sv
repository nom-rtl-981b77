// nom_fifo_tb: random pushes and pops against a queue reference; checks data
// order, count, full and empty.
module nom_fifo_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic push, pop, full, empty;
  logic [7:0] din, dout;
  logic [3:0] count;
  logic [7:0] q [$];
  int checks = 0, failures = 0;

  nom_fifo #(.T(logic [7:0]), .DEPTH(8)) dut (.*);

  initial begin
    push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      checks++;
      if (count != 4'(q.size()) || empty != (q.size() == 0) || full != (q.size() == 8) ||
          (q.size() != 0 && dout != q[0])) begin
        failures++;
        $display("FAIL: cycle %0d count %0d ref %0d", i, count, q.size());
      end
      push = ($urandom % 2) && q.size() < 8;
      pop  = ($urandom % 2) && q.size() > 0;
      din  = 8'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      #1 push = 0; pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
