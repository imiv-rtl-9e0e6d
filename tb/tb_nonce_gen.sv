// tb_nonce_gen: checks the nonce sequence against an independent xorshift64
// model, that it advances only on next, and that no value repeats in a run.
module tb_nonce_gen;
  logic clk = 0, rst_n = 0, next = 0;
  logic [63:0] seed = 64'h0123456789abcdef, nonce, model;
  logic [63:0] seen [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  nonce_gen dut (.clk, .rst_n, .seed, .next, .nonce);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    model = seed;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      checks++;
      if (nonce !== model) begin failures++; $display("FAIL %0d %h %h", i, nonce, model); end
      if (i == 0 || (i - 1) % 3 != 2) begin  // previous step advanced: value must be new
        foreach (seen[j]) if (seen[j] == nonce) begin failures++; $display("FAIL repeat"); end
        seen.push_back(nonce);
      end
      next = (i % 3 != 2);
      if (next) begin
        model ^= model << 13; model ^= model >> 7; model ^= model << 17;
      end
      @(negedge clk); next = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
