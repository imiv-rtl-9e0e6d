// tb_imiv_ive: the integrity verification engine driven directly from the
// memory bus, with the media model behind it. The testbench plays the
// memory controller: it keeps its own copy of every counter block and signs
// each write with SMAC = H(k, H(k, 0, ct), {addr, major, minor}) computed
// from that copy.
//
// Checks: bursts of back-to-back writes (PWRQ back-pressure, counter
// forwarding, overlapping tree updates) land on the media with the
// counter the controller expects; a write with a wrong SMAC is dropped;
// data, SMAC and counter reads return what was written; a nonce read comes
// back marked encrypted and differs from the plain block; a counter block
// altered on the media is refused; the lower tree nodes on the media and
// the root equal a tree rebuilt from the controller's counters; power down
// with unprocessed writes saves them, a corrupted save area makes recovery
// fail, and an intact one recovers and completes the saved writes.
module tb_imiv_ive;
  import imiv_pkg::*;
  localparam dig_t K = 64'h0f1e2d3c4b5a6978;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts at once
  always #5 clk = ~clk;
  logic bus_req_valid = 0, bus_req_ready, bus_rsp_valid, m_req_valid, m_req_ready, m_rsp_valid;
  bus_req_t bus_req = '0;
  bus_rsp_t bus_rsp;
  media_req_t m_req;
  line_t m_rsp_data, bmt_root, rec_bmt_root = '0;
  logic power_down = 0, pd_done, recover = 0, rec_done, rec_fail;
  dig_t pht_root, rec_pht_root = '0;
  logic [6:0] n_saved, rec_n = '0;
  logic ev_ctr_fwd, ev_node_media, ev_verify_fail, ev_smac_fail, ev_nonce_enc, ev_launch, ev_drain;
  imiv_ive dut (.clk, .rst_n, .k_mac(K), .k_nonce(128'h1), .bus_req_valid, .bus_req_ready, .bus_req,
    .bus_rsp_valid, .bus_rsp_ready(1'b1), .bus_rsp, .m_req_valid, .m_req_ready, .m_req, .m_rsp_valid,
    .m_rsp_data, .power_down, .pd_wpq_empty(1'b1), .pd_done, .pht_root, .n_saved, .bmt_root, .recover, .rec_bmt_root,
    .rec_pht_root, .rec_n, .rec_done, .rec_fail, .ev_ctr_fwd, .ev_node_media, .ev_verify_fail,
    .ev_smac_fail, .ev_nonce_enc, .ev_launch, .ev_drain);
  nvm_media #(.LAT(3)) media (.clk, .rst_n(1'b1), .k_mac(K), .req_valid(m_req_valid),
    .req_ready(m_req_ready), .req(m_req), .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data));

  int checks = 0, failures = 0;
  int n_fwd = 0, n_smac_fail = 0, n_verify_fail = 0, n_full = 0;
  line_t ctr_m [caddr_t];     // controller's counters
  line_t ct_m [laddr_t];
  always @(posedge clk) if (rst_n) begin
    n_fwd += int'(ev_ctr_fwd); n_smac_fail += int'(ev_smac_fail);
    n_verify_fail += int'(ev_verify_fail); n_full += int'(bus_req_valid && !bus_req_ready);
  end
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  function automatic line_t ctr_of(caddr_t c);
    return ctr_m.exists(c) ? ctr_m[c] : '0;
  endfunction
  task automatic send(input bus_req_t r);
    @(negedge clk); bus_req_valid = 1; bus_req = r;
    @(posedge clk); while (!bus_req_ready) @(posedge clk);
    @(negedge clk); bus_req_valid = 0;
  endtask
  task automatic write(input laddr_t a, input bit bad);
    bus_req_t r = '0;
    line_t c = ctr_inc(ctr_of(a[LINE_AW-1:6]), a[5:0]);
    r.write = 1; r.addr = a; r.data = {16{$urandom}};
    r.smac = smac_ref(K, r.data, a, c) ^ (bad ? 64'h1 : 64'h0);
    if (!bad) begin ctr_m[a[LINE_AW-1:6]] = c; ct_m[a] = r.data; end
    send(r);
  endtask
  task automatic read(input kind_e k, input laddr_t a, input bit nonce, output bus_rsp_t q);
    bus_req_t r = '0;
    r.kind = k; r.addr = a; r.use_nonce = nonce; r.nonce = 64'h77;
    send(r);
    while (!bus_rsp_valid) @(negedge clk);
    q = bus_rsp;
  endtask
  task automatic wait_idle();
    int n = 0;
    while (!(dut.pw_empty && dut.pipe_idle) && n < 100000) begin @(negedge clk); n++; end
  endtask
  task automatic check_all();
    bus_rsp_t q;
    line_t lvl [logic [LINE_AW-1:0]];
    line_t nxt [logic [LINE_AW-1:0]];
    foreach (ct_m[a]) begin
      read(K_DATA, a, 0, q); chk(!q.err && q.data == ct_m[a], "data read");
      read(K_SMAC, a, 0, q);
      chk(!q.err && q.data[64 * a[2:0] +: 64] == smac_ref(K, ct_m[a], a, ctr_of(a[LINE_AW-1:6])), "SMAC read");
    end
    foreach (ctr_m[c]) begin
      read(K_CTR, laddr_t'({c, 6'd0}), 0, q); chk(!q.err && !q.enc && q.data == ctr_m[c], "counter read");
      lvl[LINE_AW'(c)] = ctr_m[c];
    end
    for (int l = 1; l <= BMT_LEVELS; l++) begin
      nxt.delete();
      foreach (lvl[i]) begin
        logic [LINE_AW-1:0] p = i >> 3;
        if (!nxt.exists(p)) nxt[p] = {ARITY{zero_digest('0, l - 1)}};
        nxt[p][64 * i[2:0] +: 64] = hash64('0, '0, lvl[i]);
      end
      lvl = nxt;
      if (l <= LOWER_LVLS) foreach (lvl[i]) chk(media.peek(K_NODE, 4'(l), i) == lvl[i], "media node");
    end
    chk(lvl[0] == bmt_root, "root");
  endtask

  initial begin
    bus_rsp_t q;
    line_t saved0;
    repeat (3) @(negedge clk); rst_n = 1;
    // bursts: one page, then scattered pages
    for (int i = 0; i < 40; i++) write(laddr_t'(64 * 5 + (i % 13)), 0);
    for (int i = 0; i < 30; i++) write(laddr_t'({$urandom % 200, 6'($urandom)}), 0);
    write(laddr_t'(64 * 5 + 1), 1);          // wrong SMAC
    wait_idle();
    chk(n_fwd > 0, "counter forwarding happened");
    chk(n_smac_fail == 1, "bad SMAC dropped");
    chk(n_full > 0, "PWRQ back-pressure seen");
    check_all();
    read(K_CTR, laddr_t'(64 * 5), 1, q);
    chk(!q.err && q.enc && q.data != ctr_m[27'd5], "nonce-encrypted counter");
    media.tamper(K_CTR, 0, 33'd999, {8{64'h3}});
    read(K_CTR, laddr_t'({27'd999, 6'd0}), 0, q);
    repeat (2) @(negedge clk);
    chk(q.err && n_verify_fail == 1, $sformatf("tampered counter refused err=%0d fails=%0d", q.err, n_verify_fail));
    // power down right after a burst: some writes still unprocessed
    for (int i = 0; i < 12; i++) write(laddr_t'({$urandom % 200, 6'($urandom)}), 0);
    power_down = 1;
    while (!pd_done) @(negedge clk);
    chk(n_saved > 0, $sformatf("writes saved at power down: %0d", n_saved));
    rec_pht_root = pht_root; rec_n = n_saved; rec_bmt_root = bmt_root;
    // corrupted save area
    saved0 = media.peek(K_NODE, 4'hf, 0);
    media.tamper(K_NODE, 4'hf, 0, ~saved0);
    rst_n = 0; power_down = 0; repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); recover = 1; @(negedge clk); recover = 0;
    while (!rec_done && !rec_fail) @(negedge clk);
    chk(rec_fail, "corrupted save area rejected");
    media.tamper(K_NODE, 4'hf, 0, saved0);
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); recover = 1; @(negedge clk); recover = 0;
    while (!rec_done && !rec_fail) @(negedge clk);
    chk(rec_done && !rec_fail, "intact save area recovered");
    wait_idle();
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (300000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
