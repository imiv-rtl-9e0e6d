// tb_sync_fifo: random push/pop traffic against a queue model.
// Checks dout (first-word fall-through), full, empty and count every cycle,
// including pushes refused when full and pops of an empty queue.
module tb_sync_fifo;
  localparam int W = 16, D = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push = 0, pop = 0, full, empty;
  logic [W-1:0] din = '0, dout;
  logic [$clog2(D+1)-1:0] count;
  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      chk(count == q.size() && empty == (q.size() == 0) && full == (q.size() == D), "flags");
      if (q.size() > 0) chk(dout == q[0], "dout");
      push = ($urandom % 100) < (i < 1500 ? 70 : 30);
      pop  = ($urandom % 100) < (i < 1500 ? 30 : 70);
      din  = W'($urandom);
      @(posedge clk); #1;
      begin
        automatic bit dp = push && q.size() < D;   // a full queue refuses a push
        if (pop && q.size() > 0) void'(q.pop_front());
        if (dp) q.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
