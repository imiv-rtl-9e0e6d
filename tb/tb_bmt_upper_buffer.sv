// tb_bmt_upper_buffer: fills random level-7 and level-8 nodes, rewrites
// some, reads everything back (written slots valid with the latest data,
// others invalid, other levels always invalid), then flushes with random
// back-pressure and checks that exactly the written nodes come out, each
// once with its latest data, followed by flush_done.
module tb_bmt_upper_buffer;
  import imiv_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] rd_level = 0, wr_level = 0, flush_level;
  logic [LINE_AW-1:0] rd_idx = 0, wr_idx = 0, flush_idx;
  logic rd_valid, wr_en = 0, flush_start = 0, flush_ready = 0, flush_valid, flush_done;
  line_t rd_data, wr_data = '0, flush_data;
  bmt_upper_buffer dut (.*);
  int checks = 0, failures = 0;
  line_t ref_n [int];   // key = level*100 + idx
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 120; i++) begin
      automatic bit l8 = ($urandom % 4) == 0;
      @(negedge clk);
      wr_en = 1; wr_level = l8 ? 4'd8 : 4'd7;
      wr_idx = LINE_AW'(l8 ? $urandom % 8 : $urandom % 64);
      wr_data = {16{$urandom}};
      ref_n[int'(wr_level) * 100 + int'(wr_idx)] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int l = 6; l <= 9; l++) for (int i = 0; i < 66; i++) begin
      rd_level = 4'(l); rd_idx = LINE_AW'(i); #1;
      if (ref_n.exists(l * 100 + i)) chk(rd_valid && rd_data == ref_n[l * 100 + i], "read back");
      else chk(!rd_valid, $sformatf("unwritten %0d/%0d valid", l, i));
    end
    @(negedge clk); flush_start = 1; @(negedge clk); flush_start = 0;
    for (int c = 0; c < 1000 && !flush_done; c++) begin
      flush_ready = $urandom % 2; #1;
      if (flush_valid && flush_ready) begin
        automatic int k = int'(flush_level) * 100 + int'(flush_idx);
        chk(ref_n.exists(k) && flush_data == ref_n[k], $sformatf("flushed %0d", k));
        ref_n.delete(k);
      end
      @(negedge clk);
    end
    chk(flush_done, "flush_done");
    chk(ref_n.size() == 0, $sformatf("%0d nodes not flushed", ref_n.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
