// tb_bmt_tracking_table: allocates entries at random, completes them in a
// random order, and checks that they retire strictly in allocation order
// with the PWRQ pointer and counter address they were given, that full is
// raised at exactly ENTRIES (9) entries in flight, and empty when none.
module tb_bmt_tracking_table;
  import imiv_pkg::*;
  localparam int E = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc = 0, complete = 0, full, empty, retire_valid;
  logic [5:0] alloc_ptr = 0, retire_ptr;
  caddr_t alloc_caddr = '0, retire_caddr;
  logic [3:0] alloc_tag, complete_tag = 0;
  bmt_tracking_table dut (.*);
  int checks = 0, failures = 0, n_full = 0;
  typedef struct { logic [5:0] p; caddr_t c; logic [3:0] t; } ent_t;
  ent_t inflight [$];
  logic [3:0] pend [$];   // allocated, not yet completed
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      chk(full == (inflight.size() == E) && empty == (inflight.size() == 0), "full/empty");
      if (full) n_full++;
      if (retire_valid) begin
        chk(inflight.size() > 0 && retire_ptr == inflight[0].p && retire_caddr == inflight[0].c,
            "retire order");
      end
      alloc = !full && ($urandom % 3 != 0);
      alloc_ptr = 6'($urandom); alloc_caddr = caddr_t'($urandom);
      complete = pend.size() > 0 && ($urandom % 3 == 0);
      if (complete) begin
        automatic int j = $urandom % pend.size();
        complete_tag = pend[j]; pend.delete(j);
      end
      #1;
      if (retire_valid) void'(inflight.pop_front());
      if (alloc) begin
        inflight.push_back('{alloc_ptr, alloc_caddr, alloc_tag});
        pend.push_back(alloc_tag);
      end
    end
    chk(n_full > 0, "table never filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
