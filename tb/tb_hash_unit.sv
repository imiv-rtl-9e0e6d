// tb_hash_unit: checks hash_unit digests against values from an independent
// software model of the same function, and the LATENCY-cycle timing.
module tb_hash_unit;
  import imiv_pkg::*;
  localparam int LAT = 4;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  dig_t key, chain, digest;
  line_t msg;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  hash_unit #(.LATENCY(LAT)) dut (.clk, .rst_n, .start, .key, .chain, .msg, .busy, .done, .digest);

  task automatic run(input dig_t k, input dig_t c, input line_t m, input dig_t exp);
    int cyc = 0;
    @(negedge clk); key = k; chain = c; msg = m; start = 1;
    @(negedge clk); start = 0; cyc = 1; msg = '1;  // inputs must have been captured
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (digest !== exp) begin failures++; $display("FAIL digest %h exp %h", digest, exp); end
    if (cyc != LAT) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run('0, '0, '0, 64'h46c44dc58ded8f55);
    run(64'h0123456789abcdef, '0, {4{128'h00112233445566778899aabbccddeeff}}, 64'h3669a705769100c4);
    run(64'hdeadbeefcafef00d, 64'h1111222233334444, (512'd1 << 511) | 512'd12345, 64'he1d31b8d59c5b3bb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
