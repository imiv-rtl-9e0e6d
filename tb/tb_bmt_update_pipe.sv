// tb_bmt_update_pipe: launches a stream of counter-block updates, many of
// them sharing ancestors, into the full nine-level pipeline, back to back.
// Each launch carries a path snapshot taken from a reference tree that
// holds only the updates already completed, so the pipeline must forward
// in-flight commits to get the right siblings. Every committed node is
// compared with a reference tree updated sequentially, one whole update at a
// time, in launch order. Also checks the launch rate (one update per beat
// of 2 + HASH_LAT + LEVELS cycles), that at most LEVELS updates are in
// flight, and that each update completes within LEVELS + 1 beats.
module tb_bmt_update_pipe;
  import imiv_pkg::*;
  localparam int L = 9, HL = 4, BEAT = 2 + HL + L;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic launch_valid = 0, launch_ready, out_we, done, idle;
  logic [3:0] launch_tag = 0, out_level, done_tag;
  logic [5:0] launch_ptr = 0, out_ptr;
  caddr_t launch_caddr = '0;
  line_t launch_leaf = '0, out_data;
  line_t launch_path [L];
  logic [LINE_AW-1:0] out_idx;
  logic [3:0] occupancy;
  bmt_update_pipe #(.LEVELS(L), .HASH_LAT(HL)) dut (.clk, .rst_n, .key(64'h0), .launch_valid,
    .launch_ready, .launch_tag, .launch_ptr, .launch_caddr, .launch_leaf, .launch_path, .out_we,
    .out_level, .out_idx, .out_data, .out_ptr, .done, .done_tag, .idle, .occupancy);

  int checks = 0, failures = 0;
  line_t seqt [longint];     // sequential reference
  line_t comt [longint];     // completed updates only
  typedef struct { int lvl; logic [LINE_AW-1:0] idx; line_t d; } exp_t;
  exp_t expq [int][$];       // per pointer
  int launch_cyc [int];
  exp_t donel [$];           // nodes of launched updates, in launch order
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  function automatic longint key(int l, logic [LINE_AW-1:0] i);
    return (longint'(l) << 40) | longint'(i);
  endfunction
  function automatic line_t get(ref line_t t [longint], input int l, input logic [LINE_AW-1:0] i);
    if (t.exists(key(l, i))) return t[key(l, i)];
    return {ARITY{zero_digest('0, l - 1)}};
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc++;

  // committed nodes
  always @(posedge clk) if (rst_n && out_we) begin
    if (expq.exists(int'(out_ptr)) && expq[int'(out_ptr)].size() > 0) begin
      automatic exp_t e = expq[int'(out_ptr)].pop_front();
      chk(int'(out_level) == e.lvl && out_idx == e.idx && out_data == e.d,
          $sformatf("commit ptr %0d level %0d", out_ptr, out_level));
    end else chk(0, "unexpected commit");
  end

  int n_done = 0, max_occ = 0;
  always @(posedge clk) if (rst_n) begin
    if (int'(occupancy) > max_occ) max_occ = int'(occupancy);
    if (done) begin
      n_done++;
      // completed-only view: apply the nodes of the oldest update
      for (int l = 0; l < L; l++) begin
        automatic exp_t e = donel.pop_front();
        comt[key(e.lvl, e.idx)] = e.d;
      end
      chk(cyc - launch_cyc[int'(done_tag)] <= (L + 1) * BEAT, "update latency");
    end
  end

  initial begin
    int last_acc = -1, n = 0;
    caddr_t c;
    line_t leaf, nd;
    logic [LINE_AW-1:0] x;
    line_t tmp [longint];
    repeat (2) @(negedge clk); rst_n = 1;
    while (n < 60) begin
      c = caddr_t'(($urandom % 3 == 0) ? $urandom % 16 : $urandom);
      leaf = {16{$urandom}};
      for (int l = 1; l <= L; l++) launch_path[l - 1] = get(comt, l, node_idx(c, l));
      launch_caddr = c; launch_leaf = leaf; launch_ptr = 6'(n); launch_tag = 4'(n % 10);
      launch_valid = 1;
      @(posedge clk);
      while (!launch_ready) @(posedge clk);
      if (last_acc >= 0) chk(cyc - last_acc == BEAT, $sformatf("launch interval %0d", cyc - last_acc));
      last_acc = cyc; launch_cyc[n % 10] = cyc;
      // sequential reference
      nd = leaf;
      for (int l = 1; l <= L; l++) begin
        x = node_idx(c, l);
        tmp[key(l, x)] = get(seqt, l, x);
        tmp[key(l, x)][64 * node_slot(c, l) +: 64] = hash64('0, '0, nd);
        seqt[key(l, x)] = tmp[key(l, x)];
        nd = tmp[key(l, x)];
        expq[n].push_back('{l, x, nd});
        donel.push_back('{l, x, nd});
      end
      n++;
      @(negedge clk); launch_valid = 0;
    end
    while (n_done < n) @(posedge clk);
    chk(max_occ == L, $sformatf("pipeline filled to %0d", max_occ));
    chk(idle, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (60 * 15 * 3) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
