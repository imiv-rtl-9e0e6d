// tb_pwrq: random traffic on a small PWRQ (8 entries) against a queue
// model. Each cycle may allocate a write (to one of four pages), process
// the oldest new entry (keeping or dropping it, with a new counter block),
// write tree nodes for processed entries, mark processed entries done in
// any order, and pop the head once it is done or dropped. Checks every
// cycle: full/empty, the number of new entries, the processing port (oldest
// NEW entry and whether it is the oldest entry), the head port with its
// counter and nodes, counter forwarding (youngest processed entry of a
// page) and the random read port.
module tb_pwrq;
  import imiv_pkg::*;
  localparam int D = 8, LW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc = 0, full, empty, proc_valid, proc_is_head, proc_done = 0, proc_drop = 0;
  laddr_t alloc_addr = '0, proc_addr, head_addr, rd_addr;
  line_t alloc_ct = '0, proc_ct, proc_ctr = '0, node_data = '0, head_ct, head_ctr, fwd_ctr, rd_ct;
  dig_t alloc_smac = '0, proc_smac, head_smac, rd_smac;
  logic [2:0] proc_ptr, node_ptr = 0, mark_ptr = 0, rd_ptr = 0;
  logic node_we = 0, mark_done = 0, head_valid, head_drop, head_pop = 0, fwd_hit, rd_new;
  logic [3:0] node_level = 0;
  line_t head_nodes [LW];
  caddr_t fwd_caddr = '0;
  logic [3:0] n_new;
  pwrq #(.DEPTH(D), .LOWER(LW)) dut (.*);

  typedef enum {M_NEW, M_PROC, M_DONE, M_DROP} mst_e;
  typedef struct { int slot; laddr_t a; line_t ct; dig_t s; mst_e st; line_t ctr; int id; } ent_t;
  line_t ndm [int];   // node written: key id * 8 + level index
  int next_id = 0;
  ent_t q [$];
  bit was_full;
  int tail = 0, checks = 0, failures = 0, n_pop = 0, n_drop = 0, n_fwd = 0;
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  function automatic int find_slot(int s);
    foreach (q[i]) if (q[i].slot == s) return i;
    return -1;
  endfunction

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      automatic int pi = -1, nnew = 0, yf = -1;
      @(negedge clk);
      foreach (q[i]) begin
        if (q[i].st == M_NEW) begin nnew++; if (pi < 0) pi = i; end
      end
      chk(full == (q.size() == D) && empty == (q.size() == 0), "full/empty");
      chk(n_new == 4'(nnew), "n_new");
      chk(proc_valid == (pi >= 0), "proc_valid");
      if (pi >= 0) chk(proc_ptr == 3'(q[pi].slot) && proc_addr == q[pi].a && proc_ct == q[pi].ct &&
                       proc_smac == q[pi].s && proc_is_head == (pi == 0), "proc port");
      chk(head_valid == (q.size() > 0 && (q[0].st == M_DONE || q[0].st == M_DROP)), "head_valid");
      if (head_valid && q.size() > 0) begin
        chk(head_drop == (q[0].st == M_DROP) && head_addr == q[0].a && head_ct == q[0].ct &&
            head_smac == q[0].s, "head port");
        if (!head_drop) begin
          chk(head_ctr == q[0].ctr, "head counter");
          for (int l = 0; l < LW; l++) if (ndm.exists(q[0].id * 8 + l)) chk(head_nodes[l] == ndm[q[0].id * 8 + l], "head node");
        end
      end
      fwd_caddr = caddr_t'($urandom % 4); rd_ptr = 3'($urandom);
      #1;
      foreach (q[i]) if ((q[i].st == M_PROC || q[i].st == M_DONE) && q[i].a[LINE_AW-1:6] == fwd_caddr) yf = i;
      chk(fwd_hit == (yf >= 0), "fwd_hit");
      if (yf >= 0) begin chk(fwd_ctr == q[yf].ctr, "fwd_ctr"); n_fwd++; end
      begin
        automatic int j = find_slot(int'(rd_ptr));
        chk(rd_new == (j >= 0 && q[j].st == M_NEW), "rd_new");
        if (j >= 0) chk(rd_addr == q[j].a && rd_ct == q[j].ct && rd_smac == q[j].s, "rd port");
      end
      // drive this cycle's operations
      alloc = ($urandom % 2) == 1;
      alloc_addr = laddr_t'({($urandom % 4), 6'($urandom)});
      alloc_ct = {16{$urandom}}; alloc_smac = {$urandom, $urandom};
      proc_done = pi >= 0 && ($urandom % 2) == 1;
      proc_drop = ($urandom % 5) == 0; proc_ctr = {16{$urandom}};
      node_we = 0; mark_done = 0;
      begin
        automatic int k = $urandom % (q.size() + 1);
        if (k < q.size() && q[k].st == M_PROC) begin
          automatic int lv = $urandom % LW;
          automatic line_t nd = {16{$urandom}};
          node_we = 1; node_ptr = 3'(q[k].slot); node_level = 4'(1 + lv);
          node_data = nd;
          ndm[q[k].id * 8 + lv] = nd;
        end
        k = $urandom % (q.size() + 1);
        if (k < q.size() && q[k].st == M_PROC && ($urandom % 3) == 0) begin
          mark_done = 1; mark_ptr = 3'(q[k].slot);
        end
      end
      head_pop = head_valid && ($urandom % 2) == 1;
      was_full = full;
      @(posedge clk); #1;
      if (mark_done) q[find_slot(int'(mark_ptr))].st = M_DONE;
      if (proc_done) begin
        q[pi].st = proc_drop ? M_DROP : M_PROC;
        if (!proc_drop) q[pi].ctr = proc_ctr; else n_drop++;
      end
      if (head_pop) begin void'(q.pop_front()); n_pop++; end
      if (alloc && !was_full) begin
        automatic ent_t e;
        e.slot = tail; e.a = alloc_addr; e.ct = alloc_ct; e.s = alloc_smac; e.st = M_NEW; e.id = next_id++;
        q.push_back(e); tail = (tail + 1) % D;
      end
    end
    chk(n_pop > 100 && n_drop > 10 && n_fwd > 100, "traffic reached every path");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
