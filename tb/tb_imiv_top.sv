// tb_imiv_top: end-to-end test of the secure-NVM system at its default
// sizes (512 GB geometry, 64-entry PWRQ, 9-level tree, 32 KB caches).
//
// A CPU model issues writes and reads; every read must return the last
// plaintext written (reference map in the testbench). Along the way the
// test makes each mechanism happen and counts it: EE cases A/B/C for reads
// and writes, nonce-encrypted counter fetches, counter forwarding inside
// the PWRQ, tree nodes fetched from the media, overlapping tree updates in
// the pipeline, PWRQ drains, a replayed counter response on the bus, a
// tampered ciphertext on the bus, a tampered counter block on the media, a
// power down raised while a write is still being encrypted (the write is
// flushed to the DIMM and saved there under the PWRQ hash tree), and the
// recovery after it. After the normal phase, the BMT root and the lower
// tree nodes on the media are compared with a tree recomputed here from the
// counter blocks alone.
module tb_imiv_top;
  import imiv_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts at once
  always #5 clk = ~clk;

  localparam logic [127:0] K_AES   = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  localparam dig_t         K_MAC   = 64'h0f1e2d3c4b5a6978;
  localparam logic [127:0] K_NONCE = 128'h000102030405060708090a0b0c0d0e0f;

  logic cpu_req_valid = 0, cpu_req_ready, cpu_req_write = 0;
  laddr_t cpu_req_addr = '0;
  line_t cpu_req_data = '0;
  logic cpu_rsp_valid, cpu_rsp_write, cpu_rsp_err;
  laddr_t cpu_rsp_addr;
  line_t cpu_rsp_data;
  logic atk_req_en = 0, atk_rsp_en = 0;
  line_t atk_req_data = '0, atk_rsp_data = '0;
  logic bus_rsp_snoop_valid;
  bus_rsp_t bus_rsp_snoop;
  logic m_req_valid, m_req_ready, m_rsp_valid;
  media_req_t m_req;
  line_t m_rsp_data;
  logic power_down = 0, pd_done, recover = 0, rec_done, rec_fail;
  dig_t pht_root, rec_pht_root = '0;
  logic [6:0] n_saved, rec_n = '0;
  line_t bmt_root, rec_bmt_root = '0;
  logic ee_ev_valid, ee_ev_write, reenc_req;
  logic [1:0] ee_ev_case;
  logic [6:0] ive_ev;

  imiv_top dut (
    .clk, .rst_n, .k_aes(K_AES), .k_mac(K_MAC), .k_nonce(K_NONCE), .nonce_seed(64'h1234567),
    .cpu_req_valid, .cpu_req_ready, .cpu_req_write, .cpu_req_addr, .cpu_req_data,
    .cpu_rsp_valid, .cpu_rsp_write, .cpu_rsp_addr, .cpu_rsp_data, .cpu_rsp_err,
    .atk_req_en, .atk_req_data, .atk_rsp_en, .atk_rsp_data, .bus_rsp_snoop_valid, .bus_rsp_snoop,
    .m_req_valid, .m_req_ready, .m_req, .m_rsp_valid, .m_rsp_data,
    .power_down, .pd_done, .pht_root, .n_saved, .bmt_root, .recover, .rec_bmt_root,
    .rec_pht_root, .rec_n, .rec_done, .rec_fail,
    .ee_ev_valid, .ee_ev_write, .ee_ev_case, .reenc_req, .ive_ev);

  nvm_media #(.LAT(3)) media (.clk, .rst_n(1'b1), .k_mac(K_MAC), .req_valid(m_req_valid),
    .req_ready(m_req_ready), .req(m_req), .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data));

  int checks = 0, failures = 0;
  string mech [] = '{"wr_case_A", "wr_case_B", "wr_case_C", "rd_case_A", "rd_case_B", "rd_case_C",
                     "ctr_forward", "node_from_media", "verify_fail", "bus_smac_fail",
                     "nonce_encrypted_ctr", "bmt_launch", "pwrq_drain", "pipeline_overlap",
                     "replay_detected", "adr_flush", "pd_saved", "recovered"};
  line_t ref_pt [laddr_t];
  int ev_cnt [string];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // event counters
  always @(posedge clk) if (rst_n) begin
    if (ee_ev_valid) ev_cnt[$sformatf("%s_case_%s", ee_ev_write ? "wr" : "rd",
                                      ee_ev_case == 0 ? "A" : ee_ev_case == 1 ? "B" : "C")]++;
    if (ive_ev[0]) ev_cnt["ctr_forward"]++;
    if (ive_ev[1]) ev_cnt["node_from_media"]++;
    if (ive_ev[2]) ev_cnt["verify_fail"]++;
    if (ive_ev[3]) ev_cnt["bus_smac_fail"]++;
    if (ive_ev[4]) ev_cnt["nonce_encrypted_ctr"]++;
    if (ive_ev[5]) ev_cnt["bmt_launch"]++;
    if (ive_ev[6]) ev_cnt["pwrq_drain"]++;
    if (dut.u_ive.pipe_occ >= 2) ev_cnt["pipeline_overlap"]++;
    if (dut.u_ive.btt_full) ev_cnt["btt_full"]++;
    if (power_down && dut.ee_req_valid && dut.ee_req_ready && dut.ee_req.write) ev_cnt["adr_flush"]++;
  end

  function automatic line_t rnd_line();
    line_t r;
    for (int i = 0; i < 16; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction

  task automatic access(input bit wr, input laddr_t a, input line_t d, output line_t q, output bit err);
    @(negedge clk);
    cpu_req_valid = 1; cpu_req_write = wr; cpu_req_addr = a; cpu_req_data = d;
    while (!cpu_req_ready) @(negedge clk);
    @(negedge clk); cpu_req_valid = 0;
    while (!cpu_rsp_valid) @(negedge clk);
    q = cpu_rsp_data; err = cpu_rsp_err;
  endtask

  task automatic wr(input laddr_t a);
    line_t d = rnd_line(), q; bit e;
    access(1, a, d, q, e);
    chk(!e, $sformatf("write %h error", a));
    if (!e) ref_pt[a] = d;
  endtask

  task automatic rd(input laddr_t a);
    line_t q; bit e;
    access(0, a, '0, q, e);
    chk(!e && ref_pt.exists(a) && q == ref_pt[a], $sformatf("read %h mismatch err=%0d", a, e));
  endtask

  task automatic wait_idle();
    // all writes processed and drained
    int n = 0;
    while (!(dut.u_ive.pw_empty && dut.u_ive.pipe_idle && dut.u_ee.wpq_empty) && n < 200000) begin
      @(negedge clk); n++;
    end
  endtask

  // independent tree: recompute from media counter blocks of touched pages
  task automatic check_tree();
    line_t lvl [logic [LINE_AW-1:0]];
    line_t nxt [logic [LINE_AW-1:0]];
    foreach (ref_pt[a]) lvl[LINE_AW'(a[LINE_AW-1:6])] = media.peek(K_CTR, 0, LINE_AW'(a[LINE_AW-1:6]));
    for (int l = 1; l <= BMT_LEVELS; l++) begin
      nxt.delete();
      foreach (lvl[i]) begin
        logic [LINE_AW-1:0] p = i >> 3;
        if (!nxt.exists(p)) nxt[p] = {ARITY{zero_digest('0, l - 1)}};
        nxt[p][64 * i[2:0] +: 64] = hash64('0, '0, lvl[i]);
      end
      lvl = nxt;
      if (l <= LOWER_LVLS)
        foreach (lvl[i]) chk(media.peek(K_NODE, 4'(l), i) == lvl[i],
                             $sformatf("media node level %0d idx %h", l, i));
    end
    chk(lvl.size() == 1 && lvl[0] == bmt_root, "BMT root equals recomputed root");
  endtask

  initial begin
    line_t q, old_rsp; bit e;
    static laddr_t base = 33'h0_0001_0000;
    int t0;
    repeat (3) @(negedge clk); rst_n = 1;

    // 1. first write: both caches miss (case C), nonce-protected counter
    wr(base);
    rd(base);                               // case A
    // 2. stream of writes to one page: counter forwarding, overlapping updates
    for (int i = 1; i < 24; i++) wr(base + laddr_t'(i));
    // 3. case B: counter cached, SMAC block not
    wr(base + 33'd40);
    access(0, base + 33'd48, '0, q, e);       // never written: must still verify
    chk(!e, "read of unwritten line verifies");
    // 4. several pages
    for (int p = 1; p <= 6; p++) wr(base + laddr_t'(p * 64 + p));
    foreach (ref_pt[a]) rd(a);
    wait_idle();
    check_tree();
    chk(media.n_upper_writes == 0, "no upper-level node written to media during operation");

    // 5. replayed counter response: evict base's blocks from the EE caches by
    //    touching 8 more pages in the same sets, then replay an old response
    wr(base + 33'd4096 * 1);
    old_rsp = '0;
    fork
      begin
        // capture the next encrypted counter response on the bus
        do @(posedge clk); while (!(bus_rsp_snoop_valid && bus_rsp_snoop.kind == K_CTR && bus_rsp_snoop.enc));
        old_rsp = bus_rsp_snoop.data;
      end
      wr(base + 33'd4096 * 2);
    join
    for (int k = 3; k <= 10; k++) wr(base + 33'd4096 * k);
    chk(old_rsp != '0, "captured an encrypted counter response");
    fork
      begin
        do @(negedge clk); while (!(dut.ive_rsp_valid && dut.ive_rsp.kind == K_CTR));
        atk_rsp_en = 1; atk_rsp_data = old_rsp;
        @(negedge clk); atk_rsp_en = 0;
      end
      begin
        access(0, base + 33'd4096 * 2, '0, q, e);
        chk(e, "replayed counter response detected");
        if (e) ev_cnt["replay_detected"]++;
      end
    join
    rd(base + 33'd4096 * 2);                 // clean retry succeeds

    // 6. ciphertext tampered on the bus during a write
    fork
      begin
        do @(negedge clk); while (!(dut.ee_req_valid && dut.ee_req.write));
        atk_req_en = 1; atk_req_data = rnd_line();
        @(negedge clk); atk_req_en = 0;
      end
      begin
        t0 = ev_cnt.exists("bus_smac_fail") ? ev_cnt["bus_smac_fail"] : 0;
        access(1, base + 33'd5, rnd_line(), q, e);   // EE sees success; IVE drops it
        repeat (400) @(negedge clk);
        chk(ev_cnt.exists("bus_smac_fail") && ev_cnt["bus_smac_fail"] == t0 + 1, "bus tamper dropped by IVE");
      end
    join
    // the EE cached the new counter and SMAC, the media kept the old line:
    // the next read of that line must fail its SMAC check
    access(0, base + 33'd5, '0, q, e);
    chk(e, "read after dropped write reports an integrity error");

    // 7. tampered counter block on the media of an untouched page
    media.tamper(K_CTR, 0, 33'h5555, {8{64'h1}});
    access(0, laddr_t'({27'h5555, 6'd3}), '0, q, e);
    chk(e, "media counter tamper detected by BMT verification");

    // 8. power down while the controller is still encrypting a write: the
    //    write must still be flushed to the DIMM (ADR) and saved there
    wait_idle();
    fork
      begin
        do @(posedge clk); while (!(cpu_req_valid && cpu_req_ready));
        @(negedge clk); power_down = 1;
      end
      wr(base + 33'd200);
    join
    while (!pd_done) @(negedge clk);
    chk(n_saved >= 1, "pending write saved at power down");
    chk(media.n_upper_writes > 0, "upper buffer flushed at power down");
    rec_pht_root = pht_root; rec_n = n_saved; rec_bmt_root = bmt_root;
    if (n_saved >= 1) ev_cnt["pd_saved"]++;
    // power cycle: all volatile state lost, media kept
    @(negedge clk); rst_n = 0; power_down = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); recover = 1; @(negedge clk); recover = 0;
    while (!rec_done && !rec_fail) @(negedge clk);
    chk(rec_done && !rec_fail, "recovery: PHT root matches");
    if (rec_done) ev_cnt["recovered"]++;
    wait_idle();
    ref_pt.delete(base + 33'd5);            // tampered write: value undefined for the EE
    foreach (ref_pt[a]) rd(a);              // including the write saved at power down
    wait_idle();
    check_tree();

    // every mechanism must have happened
    foreach (mech[i]) begin
      automatic string n = mech[i];
      automatic int c = ev_cnt.exists(n) ? ev_cnt[n] : 0;
      $display("mechanism %-20s %0d", n, c);
      chk(c > 0, {"mechanism never happened: ", n});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog ive=%0d ee=%0d pd=%0d flushed=%0d pw_empty=%0d n_new=%0d", dut.u_ive.st_q, dut.u_ee.st_q, power_down, dut.ee_wr_flushed, dut.u_ive.pw_empty, dut.u_ive.pw_n_new);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
