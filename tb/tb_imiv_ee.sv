// tb_imiv_ee: the memory controller's encryption engine on a bus whose far
// end is the integrity engine and the media model (the NVDIMM).
//
// The testbench keeps its own count of writes per line, so it knows every
// line's counter. Checks: each write's SMAC on the bus equals
// H(k, H(k, 0, ct), {addr, major, minor}) over the counter the testbench
// expects; the ciphertext differs from the plaintext and changes when the
// same plaintext is written again; reads return the plaintext; the first
// access to a page is case C (both caches miss) and sends a nonce with its
// counter read, an immediate repeat is case A with no nonce, and a line in
// a new SMAC block of a cached page is case B; nonces never repeat.
module tb_imiv_ee;
  import imiv_pkg::*;
  localparam dig_t K = 64'h0f1e2d3c4b5a6978;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // a falling edge, so the asynchronous reset acts at once
  always #5 clk = ~clk;
  logic cpu_req_valid = 0, cpu_req_ready, cpu_req_write = 0, cpu_rsp_valid, cpu_rsp_write, cpu_rsp_err;
  laddr_t cpu_req_addr = '0, cpu_rsp_addr;
  line_t cpu_req_data = '0, cpu_rsp_data;
  logic bq_valid, bq_ready, bs_valid, bs_ready, ev_valid, ev_write, reenc_req;
  bus_req_t bq;
  bus_rsp_t bs;
  logic [1:0] ev_case;
  logic m_req_valid, m_req_ready, m_rsp_valid;
  media_req_t m_req;
  line_t m_rsp_data;
  imiv_ee dut (.clk, .rst_n, .k_aes(128'h2b7e151628aed2a6abf7158809cf4f3c), .k_mac(K), .k_nonce(128'h5),
    .nonce_seed(64'h99), .power_down(1'b0), .wr_flushed(), .cpu_req_valid, .cpu_req_ready, .cpu_req_write, .cpu_req_addr, .cpu_req_data,
    .cpu_rsp_valid, .cpu_rsp_write, .cpu_rsp_addr, .cpu_rsp_data, .cpu_rsp_err,
    .bus_req_valid(bq_valid), .bus_req_ready(bq_ready), .bus_req(bq), .bus_rsp_valid(bs_valid),
    .bus_rsp_ready(bs_ready), .bus_rsp(bs), .ev_valid, .ev_write, .ev_case, .reenc_req);
  imiv_ive dimm (.clk, .rst_n, .k_mac(K), .k_nonce(128'h5), .bus_req_valid(bq_valid),
    .bus_req_ready(bq_ready), .bus_req(bq), .bus_rsp_valid(bs_valid), .bus_rsp_ready(bs_ready),
    .bus_rsp(bs), .m_req_valid, .m_req_ready, .m_req, .m_rsp_valid, .m_rsp_data,
    .power_down(1'b0), .pd_done(), .pht_root(), .n_saved(), .bmt_root(), .recover(1'b0),
    .rec_bmt_root('0), .rec_pht_root('0), .rec_n('0), .rec_done(), .rec_fail(), .ev_ctr_fwd(),
    .ev_node_media(), .ev_verify_fail(), .ev_smac_fail(), .ev_nonce_enc(), .ev_launch(), .ev_drain());
  nvm_media #(.LAT(3)) media (.clk, .rst_n(1'b1), .k_mac(K), .req_valid(m_req_valid),
    .req_ready(m_req_ready), .req(m_req), .rsp_valid(m_rsp_valid), .rsp_data(m_rsp_data));

  int checks = 0, failures = 0;
  line_t ctr_m [caddr_t];
  line_t pt_m [laddr_t];
  line_t last_ct [laddr_t];
  dig_t nonces [dig_t];
  int last_case = -1, nonce_reads = 0, plain_ctr_reads = 0;
  task automatic chk(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask
  // bus monitor
  always @(posedge clk) if (rst_n) begin
    if (ev_valid) last_case = int'(ev_case);
    if (bq_valid && bq_ready) begin
      if (bq.write) begin
        automatic caddr_t c = bq.addr[LINE_AW-1:6];
        automatic line_t nc = ctr_inc(ctr_m.exists(c) ? ctr_m[c] : '0, bq.addr[5:0]);
        ctr_m[c] = nc;
        chk(bq.smac == smac_ref(K, bq.data, bq.addr, nc), "write SMAC over expected counter");
        chk(bq.data != cpu_req_data, "ciphertext differs from plaintext");
        if (last_ct.exists(bq.addr)) chk(bq.data != last_ct[bq.addr], "ciphertext changes on rewrite");
        last_ct[bq.addr] = bq.data;
      end else if (bq.kind == K_CTR) begin
        if (bq.use_nonce) begin
          nonce_reads++;
          chk(!nonces.exists(bq.nonce), "nonce reused");
          nonces[bq.nonce] = bq.nonce;
        end else plain_ctr_reads++;
      end
    end
  end
  task automatic access(input bit wr, input laddr_t a, input line_t d, output line_t q, output bit e);
    @(negedge clk);
    cpu_req_valid = 1; cpu_req_write = wr; cpu_req_addr = a; cpu_req_data = d;
    while (!cpu_req_ready) @(negedge clk);
    @(negedge clk); cpu_req_valid = 0;
    while (!cpu_rsp_valid) @(negedge clk);
    q = cpu_rsp_data; e = cpu_rsp_err;
    @(negedge clk);
  endtask
  task automatic wr(input laddr_t a, input line_t d, input int exp_case);
    line_t q; bit e;
    access(1, a, d, q, e);
    chk(!e, "write ok");
    if (exp_case >= 0) chk(last_case == exp_case, $sformatf("write %h case %0d, expected %0d", a, last_case, exp_case));
    pt_m[a] = d;
  endtask
  task automatic rd(input laddr_t a, input int exp_case);
    line_t q; bit e;
    access(0, a, '0, q, e);
    chk(!e && q == pt_m[a], $sformatf("read %h", a));
    if (exp_case >= 0) chk(last_case == exp_case, $sformatf("read %h case %0d, expected %0d", a, last_case, exp_case));
  endtask
  initial begin
    line_t same = {16{32'hcafe_f00d}};
    repeat (3) @(negedge clk); rst_n = 1;
    for (int p = 0; p < 8; p++) begin
      automatic laddr_t b = laddr_t'({27'(100 + 7 * p), 6'd0});
      wr(b, same, 2);                 // case C
      rd(b, 0);                       // case A
      wr(b, same, 0);                 // same plaintext again, case A
      wr(b + 8, {16{$urandom}}, 1);   // case B: counter cached, SMAC block new
      rd(b + 8, 0);
      for (int i = 0; i < 5; i++) wr(b + laddr_t'($urandom % 64), {16{$urandom}}, -1);
    end
    foreach (pt_m[a]) rd(a, -1);
    chk(nonce_reads >= 8, "case C counter reads carry nonces");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
