// tb_aes128_enc: checks the AES unit against the FIPS-197 known-answer
// vectors (Appendix B and Appendix C.1) and its 11-cycle latency.
module tb_aes128_enc;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [127:0] key, pt, ct;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  aes128_enc dut (.clk, .rst_n, .start, .key, .pt, .busy, .done, .ct);

  task automatic run(input logic [127:0] k, input logic [127:0] p, input logic [127:0] exp);
    int cyc = 0;
    @(negedge clk); key = k; pt = p; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (ct !== exp) begin failures++; $display("FAIL ct %h exp %h", ct, exp); end
    if (cyc != 11) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff,
        128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    run(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h3243f6a8885a308d313198a2e0370734,
        128'h3925841d02dc09fbdc118597196a0b32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
