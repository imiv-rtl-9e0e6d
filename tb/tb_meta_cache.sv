// tb_meta_cache: random writes, lookups and invalidations to a small
// set-associative cache (4 sets x 2 ways, a few keys per set) against a
// model that knows only what a cache must guarantee: a hit returns the
// latest data written for that key; a key just written hits; an
// invalidated key misses; no set holds more than WAYS keys; and a key that
// was written and not invalidated stays resident until WAYS other keys of
// its set have been written after it.
module tb_meta_cache;
  import imiv_pkg::*;
  localparam int SETS = 4, WAYS = 2, KW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [KW-1:0] lk_key = '0, wr_key = '0, inv_key = '0;
  logic lk_hit, wr_en = 0, inv_en = 0;
  line_t lk_data, wr_data = '0;
  meta_cache #(.SETS(SETS), .WAYS(WAYS), .KEYW(KW)) dut (.*);
  int checks = 0, failures = 0;
  line_t last [logic [KW-1:0]];
  int since [logic [KW-1:0]];      // writes of other keys in its set since its own
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      automatic logic [KW-1:0] k = KW'($urandom % 16);
      automatic int op = $urandom % 10;
      @(negedge clk);
      lk_key = k; #1;
      if (lk_hit) chk(last.exists(k) && lk_data == last[k], $sformatf("hit data key %0d", k));
      if (last.exists(k) && since[k] < WAYS) chk(lk_hit, $sformatf("resident key %0d missed", k));
      if (!last.exists(k)) chk(!lk_hit, $sformatf("invalid key %0d hit", k));
      if (op < 5) begin
        wr_en = 1; wr_key = k; wr_data = {16{$urandom}};
        @(posedge clk); #1; wr_en = 0;
        foreach (since[j]) if (j != k && j % SETS == k % SETS) since[j]++;
        // keys pushed out by this write are no longer guaranteed
        last[k] = wr_data; since[k] = 0;
        lk_key = k; #1; chk(lk_hit && lk_data == wr_data, "write then hit");
        // which keys of the set are still present must be at most WAYS
        begin
          automatic int n = 0;
          for (int j = 0; j < 16; j++) if (j % SETS == k % SETS) begin
            lk_key = KW'(j); #1;
            if (lk_hit) n++;
            else if (last.exists(KW'(j))) begin last.delete(KW'(j)); since.delete(KW'(j)); end
          end
          chk(n <= WAYS, "set over capacity");
        end
      end else if (op < 6) begin
        inv_en = 1; inv_key = k;
        @(posedge clk); #1; inv_en = 0;
        last.delete(k); since.delete(k);
        lk_key = k; #1; chk(!lk_hit, "invalidated key misses");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
