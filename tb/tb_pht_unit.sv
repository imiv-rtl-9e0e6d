// tb_pht_unit: fills a 64-entry table with random pending writes (some
// slots empty), runs the PWRQ hash tree and compares its root with the tree
// computed here: leaf = H(k, H(k, 0, ct), {valid, smac, addr}), eight leaves
// per level-1 node, root = H(k, 0, the eight level-1 digests). Repeats with
// a different occupancy and after changing one entry (the root must change),
// and checks that the computation finishes within
// ENTRIES * 2 * (HASH_LAT + 2) + 40 cycles.
module tb_pht_unit;
  import imiv_pkg::*;
  localparam int E = 64, HL = 4;
  localparam dig_t K = 64'h5a5a_1234_0f0f_9876;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [5:0] rd_ptr;
  logic rd_valid;
  laddr_t rd_addr;
  line_t rd_ct;
  dig_t rd_smac, root;
  pht_unit #(.ENTRIES(E), .HASH_LAT(HL)) dut (.clk, .rst_n, .key(K), .start, .rd_ptr, .rd_valid,
    .rd_addr, .rd_ct, .rd_smac, .busy, .done, .root);
  logic v [E];
  laddr_t a [E];
  line_t ct [E];
  dig_t sm [E];
  assign rd_valid = v[rd_ptr];
  assign rd_addr = a[rd_ptr];
  assign rd_ct = ct[rd_ptr];
  assign rd_smac = sm[rd_ptr];
  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  function automatic dig_t ref_root();
    line_t l1 [E / 8];
    line_t top = '0;
    for (int i = 0; i < E; i++) begin
      line_t t = '0;
      t[LINE_AW-1:0] = v[i] ? a[i] : '0;
      t[127:64] = v[i] ? sm[i] : '0;
      t[128] = v[i];
      if (i % 8 == 0) l1[i / 8] = '0;
      l1[i / 8][64 * (i % 8) +: 64] = hash64(K, hash64(K, '0, v[i] ? ct[i] : '0), t);
    end
    for (int j = 0; j < E / 8; j++) top[64 * j +: 64] = hash64(K, '0, l1[j]);
    return hash64(K, '0, top);
  endfunction
  task automatic run(output dig_t r);
    int t = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done && t < 2000) begin @(negedge clk); t++; end
    chk(done, "done");
    chk(t <= E * 2 * (HL + 2) + 40, $sformatf("PHT took %0d cycles", t));
    r = root;
  endtask
  initial begin
    dig_t r1, r2;
    for (int i = 0; i < E; i++) begin
      v[i] = ($urandom % 4) != 0; a[i] = laddr_t'({$urandom, $urandom}); ct[i] = {16{$urandom}};
      sm[i] = {$urandom, $urandom};
    end
    repeat (2) @(negedge clk); rst_n = 1;
    run(r1); chk(r1 == ref_root(), "root 1");
    for (int i = 0; i < E; i++) v[i] = (i % 3) == 0;
    run(r2); chk(r2 == ref_root(), "root 2"); chk(r2 != r1, "occupancy changes root");
    ct[9][100] = ~ct[9][100];
    run(r1); chk(r1 == ref_root(), "root 3"); chk(r1 != r2, "one ciphertext bit changes root");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
