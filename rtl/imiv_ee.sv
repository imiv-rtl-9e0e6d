// imiv_ee: encryption engine (EE) of the memory controller.
//
// Keeps the compute-heavy, confidentiality side of secure NVM on the CPU:
// counter-mode encryption and SMAC generation/verification, with a counter
// cache and a SMAC cache. It no longer holds the BMT: counters fetched from
// the NVDIMM were verified there, and the engine only checks them through
// the SMAC. Each CPU request falls in one of three cases:
//   A  counter and SMAC both cached: a read fetches only the ciphertext; a
//      write needs no fetch at all.
//   B  one of them missing: the ciphertext and the missing block are
//      fetched and the SMAC over (ciphertext, address, counter) is checked.
//   C  both missing: as B, but the counter request carries a fresh nonce
//      from nonce_gen, kept in the single MSHR, and the counter block comes
//      back encrypted under it (AES of {nonce, chunk}). A replayed old
//      response cannot pass the SMAC check after decryption.
// A write then increments the line's minor counter, makes the one-time pad
// AES_k({addr, chunk, minor, major}) for the four 16-byte chunks, XORs it
// with the plaintext, computes the new SMAC, updates both caches (write-
// through: the NVDIMM increments its own copy of the counter) and queues
// {address, ciphertext, SMAC} in the WPQ. Reads go out through the RPQ,
// which is served only when the WPQ is empty, so a fetch never overtakes an
// earlier write.
//
// Interface: cpu_req_* (valid/ready; one request at a time), cpu_rsp_*
// (one-cycle pulse; reads return plaintext, writes an acknowledgement; err
// flags a failed SMAC check), bus_req_* (valid/ready) and bus_rsp_*.
// ev_* reports which case each request took. reenc_req flags a minor
// counter wrap, which needs a page re-encryption this engine does not do.
// power_down (the ADR signal) stops new CPU requests while the WPQ keeps
// draining; wr_flushed tells the NVDIMM when no write is left on this side.
// One AES unit and one hash unit, as in the evaluated configuration; the
// nonce pad format, the seed layout and the single MSHR are this design's.
module imiv_ee #(
  parameter int unsigned SETS   = 64,
  parameter int unsigned WAYS   = 8,
  parameter int unsigned QDEPTH = 12,
  parameter int unsigned HASH_LAT = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [127:0]         k_aes,
  input  imiv_pkg::dig_t       k_mac,
  input  logic [127:0]         k_nonce,
  input  logic [63:0]          nonce_seed,
  // CPU side
  input  logic                 power_down,   // stop taking CPU requests
  output logic                 wr_flushed,   // no write left in the engine or the WPQ
  input  logic                 cpu_req_valid,
  output logic                 cpu_req_ready,
  input  logic                 cpu_req_write,
  input  imiv_pkg::laddr_t     cpu_req_addr,
  input  imiv_pkg::line_t      cpu_req_data,
  output logic                 cpu_rsp_valid,
  output logic                 cpu_rsp_write,
  output imiv_pkg::laddr_t     cpu_rsp_addr,
  output imiv_pkg::line_t      cpu_rsp_data,
  output logic                 cpu_rsp_err,
  // memory bus
  output logic                 bus_req_valid,
  input  logic                 bus_req_ready,
  output imiv_pkg::bus_req_t   bus_req,
  input  logic                 bus_rsp_valid,
  output logic                 bus_rsp_ready,
  input  imiv_pkg::bus_rsp_t   bus_rsp,
  // events
  output logic                 ev_valid,
  output logic                 ev_write,
  output logic [1:0]           ev_case,      // 0: A, 1: B, 2: C
  output logic                 reenc_req
);
  import imiv_pkg::*;

  typedef enum logic [3:0] {
    E_IDLE, E_LOOKUP, E_ISSUE, E_WAIT, E_DEC, E_V1, E_V2, E_CHECK,
    E_NEWCTR, E_OTP, E_S1, E_S2, E_PUSH, E_RSP
  } est_e;
  est_e st_q;

  logic   wr_q, err_q;
  laddr_t a_q;
  line_t  pt_q, ct_q, ctr_q, sblk_q, otp_q;
  logic   ctr_hit_q, smac_hit_q;
  logic   need_d_q, need_c_q, need_s_q, got_d_q, got_c_q, got_s_q, enc_q;
  logic   [63:0] mshr_nonce_q;
  logic   [1:0]  chunk_q;
  logic   go_q;
  dig_t   h1_q, smac_new_q;

  caddr_t caddr;
  logic [SMAC_AW-1:0] saddr;
  assign caddr = a_q[LINE_AW-1:6];
  assign saddr = a_q[LINE_AW-1:3];

  // ---------------- metadata caches ----------------
  logic  c_hit, s_hit, c_we, s_we;
  line_t c_data, s_data, c_wdata, s_wdata;
  meta_cache #(.SETS(SETS), .WAYS(WAYS), .KEYW(CTR_AW)) u_ctr_cache (
    .clk, .rst_n, .lk_key(caddr), .lk_hit(c_hit), .lk_data(c_data),
    .wr_en(c_we), .wr_key(caddr), .wr_data(c_wdata), .inv_en(1'b0), .inv_key('0));
  meta_cache #(.SETS(SETS), .WAYS(WAYS), .KEYW(SMAC_AW)) u_smac_cache (
    .clk, .rst_n, .lk_key(saddr), .lk_hit(s_hit), .lk_data(s_data),
    .wr_en(s_we), .wr_key(saddr), .wr_data(s_wdata), .inv_en(1'b0), .inv_key('0));

  // ---------------- RPQ / WPQ and bus arbitration ----------------
  localparam int unsigned BQW = $bits(bus_req_t);
  logic rpq_push, rpq_pop, rpq_full, rpq_empty, wpq_push, wpq_pop, wpq_full, wpq_empty;
  logic [BQW-1:0] rpq_din, rpq_dout, wpq_din, wpq_dout;
  logic [$clog2(QDEPTH+1)-1:0] rpq_cnt, wpq_cnt;
  sync_fifo #(.WIDTH(BQW), .DEPTH(QDEPTH)) u_rpq (.clk, .rst_n, .push(rpq_push), .din(rpq_din),
    .pop(rpq_pop), .dout(rpq_dout), .full(rpq_full), .empty(rpq_empty), .count(rpq_cnt));
  sync_fifo #(.WIDTH(BQW), .DEPTH(QDEPTH)) u_wpq (.clk, .rst_n, .push(wpq_push), .din(wpq_din),
    .pop(wpq_pop), .dout(wpq_dout), .full(wpq_full), .empty(wpq_empty), .count(wpq_cnt));

  always_comb begin
    bus_req_valid = !wpq_empty || !rpq_empty;
    bus_req       = !wpq_empty ? bus_req_t'(wpq_dout) : bus_req_t'(rpq_dout);
    wpq_pop       = bus_req_ready && !wpq_empty;
    rpq_pop       = bus_req_ready && wpq_empty && !rpq_empty;
  end
  assign bus_rsp_ready = 1'b1;

  // ---------------- nonce, AES, hash ----------------
  logic nonce_next;
  logic [63:0] nonce;
  nonce_gen u_nonce (.clk, .rst_n, .seed(nonce_seed), .next(nonce_next), .nonce);

  logic aes_start, aes_busy, aes_done;
  logic [127:0] aes_key, aes_pt, aes_ct;
  aes128_enc u_aes (.clk, .rst_n, .start(aes_start), .key(aes_key), .pt(aes_pt),
                    .busy(aes_busy), .done(aes_done), .ct(aes_ct));

  logic h_start, h_busy, h_done;
  dig_t h_chain, h_dig;
  line_t h_msg;
  hash_unit #(.LATENCY(HASH_LAT)) u_hash (.clk, .rst_n, .start(h_start), .key(k_mac),
    .chain(h_chain), .msg(h_msg), .busy(h_busy), .done(h_done), .digest(h_dig));

  function automatic logic [127:0] otp_seed(laddr_t a, line_t c, logic [1:0] i);
    return {22'd0, a, i, ctr_minor(c, a[5:0]), ctr_major(c)};
  endfunction

  always_comb begin
    aes_start = (st_q == E_DEC || st_q == E_OTP) && !go_q;
    aes_key   = (st_q == E_DEC) ? k_nonce : k_aes;
    aes_pt    = (st_q == E_DEC) ? {mshr_nonce_q, 62'd0, chunk_q} : otp_seed(a_q, ctr_q, chunk_q);
    h_start   = (st_q == E_V1 || st_q == E_V2 || st_q == E_S1 || st_q == E_S2) && !go_q;
    h_chain   = (st_q == E_V2 || st_q == E_S2) ? h1_q : '0;
    unique case (st_q)
      E_V1:    h_msg = ct_q;
      E_S1:    h_msg = pt_q ^ otp_q;               // new ciphertext
      default: h_msg = smac_tail(a_q, ctr_q);
    endcase
  end

  // ---------------- control ----------------
  bus_req_t fetch;
  always_comb begin
    fetch = '0;
    fetch.addr = a_q;
    if (need_d_q)      fetch.kind = K_DATA;
    else if (need_c_q) begin
      fetch.kind = K_CTR;
      fetch.use_nonce = !ctr_hit_q && !smac_hit_q;
      fetch.nonce = mshr_nonce_q;
    end else           fetch.kind = K_SMAC;
  end

  always_comb begin
    rpq_push = (st_q == E_ISSUE) && !rpq_full && (need_d_q || need_c_q || need_s_q);
    rpq_din  = BQW'(fetch);
    wpq_push = (st_q == E_PUSH) && !wpq_full;
    wpq_din  = BQW'(bus_req_t'{write: 1'b1, kind: K_DATA, addr: a_q, use_nonce: 1'b0,
                                 nonce: '0, data: ct_q, smac: smac_new_q});
  end

  logic [2:0] slot;
  assign slot = a_q[2:0];
  logic smac_ok;
  assign smac_ok = (h_dig == sblk_q[DIG_BITS * slot +: DIG_BITS]);

  assign cpu_req_ready = (st_q == E_IDLE) && !power_down;
  assign wr_flushed    = wpq_empty && !(st_q != E_IDLE && wr_q);
  assign nonce_next    = (st_q == E_LOOKUP) && !c_hit && !s_hit;

  always_comb begin
    c_we = 1'b0; c_wdata = ctr_q;
    s_we = 1'b0; s_wdata = sblk_q;
    // fill after a verified fetch
    if (st_q == E_V2 && go_q && h_done && smac_ok) begin
      c_we = !ctr_hit_q; s_we = !smac_hit_q;
    end
    // write-through update with the new counter and SMAC
    if (st_q == E_PUSH && !wpq_full) begin
      c_we = 1'b1;
      s_we = 1'b1;
      s_wdata[DIG_BITS * slot +: DIG_BITS] = smac_new_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= E_IDLE; go_q <= 1'b0; wr_q <= 1'b0; err_q <= 1'b0; a_q <= '0; pt_q <= '0;
      ct_q <= '0; ctr_q <= '0; sblk_q <= '0; otp_q <= '0; ctr_hit_q <= 1'b0; smac_hit_q <= 1'b0;
      {need_d_q, need_c_q, need_s_q, got_d_q, got_c_q, got_s_q, enc_q} <= '0;
      mshr_nonce_q <= '0; chunk_q <= '0; h1_q <= '0; smac_new_q <= '0;
      cpu_rsp_valid <= 1'b0; cpu_rsp_write <= 1'b0; cpu_rsp_addr <= '0; cpu_rsp_data <= '0;
      cpu_rsp_err <= 1'b0; ev_valid <= 1'b0; ev_write <= 1'b0; ev_case <= '0; reenc_req <= 1'b0;
    end else begin
      cpu_rsp_valid <= 1'b0;
      ev_valid <= 1'b0;
      reenc_req <= 1'b0;
      // responses from the NVDIMM
      if (bus_rsp_valid && st_q == E_WAIT && bus_rsp.addr[LINE_AW-1:3] == a_q[LINE_AW-1:3]) begin
        unique case (bus_rsp.kind)
          K_DATA:  begin ct_q <= bus_rsp.data; got_d_q <= 1'b1; end
          K_CTR:   begin ctr_q <= bus_rsp.data; enc_q <= bus_rsp.enc; got_c_q <= 1'b1; end
          K_SMAC:  begin sblk_q <= bus_rsp.data; got_s_q <= 1'b1; end
          default: ;
        endcase
        if (bus_rsp.err) err_q <= 1'b1;
      end
      unique case (st_q)
        E_IDLE: if (cpu_req_valid) begin
          wr_q <= cpu_req_write; a_q <= cpu_req_addr; pt_q <= cpu_req_data;
          err_q <= 1'b0; go_q <= 1'b0;
          {got_d_q, got_c_q, got_s_q, enc_q} <= '0;
          st_q <= E_LOOKUP;
        end
        E_LOOKUP: begin
          ctr_hit_q  <= c_hit;
          smac_hit_q <= s_hit;
          ctr_q      <= c_data;
          sblk_q     <= s_data;
          if (!c_hit && !s_hit) mshr_nonce_q <= nonce;
          need_d_q <= !(wr_q && c_hit && s_hit);
          need_c_q <= !c_hit;
          need_s_q <= !s_hit;
          got_d_q  <= wr_q && c_hit && s_hit;
          got_c_q  <= c_hit;
          got_s_q  <= s_hit;
          ev_valid <= 1'b1;
          ev_write <= wr_q;
          ev_case  <= (c_hit && s_hit) ? 2'd0 : (c_hit || s_hit) ? 2'd1 : 2'd2;
          st_q     <= (wr_q && c_hit && s_hit) ? E_NEWCTR : E_ISSUE;
        end
        E_ISSUE: begin
          if (rpq_push) begin
            if (need_d_q)      need_d_q <= 1'b0;
            else if (need_c_q) need_c_q <= 1'b0;
            else               need_s_q <= 1'b0;
          end
          if (!need_d_q && !need_c_q && !need_s_q) st_q <= E_WAIT;
        end
        E_WAIT: if (got_d_q && got_c_q && got_s_q) begin
          chunk_q <= '0;
          go_q    <= 1'b0;
          st_q    <= err_q ? E_RSP : (enc_q ? E_DEC : E_V1);
        end
        E_DEC: if (!go_q) go_q <= 1'b1;
          else if (aes_done) begin
            ctr_q[128 * chunk_q +: 128] <= ctr_q[128 * chunk_q +: 128] ^ aes_ct;
            go_q    <= 1'b0;
            chunk_q <= chunk_q + 1'b1;
            if (chunk_q == 2'd3) st_q <= E_V1;
          end
        E_V1: if (!go_q) go_q <= 1'b1;
          else if (h_done) begin h1_q <= h_dig; go_q <= 1'b0; st_q <= E_V2; end
        E_V2: if (!go_q) go_q <= 1'b1;
          else if (h_done) begin
            go_q <= 1'b0;
            if (!smac_ok) begin err_q <= 1'b1; st_q <= E_RSP; end
            else st_q <= wr_q ? E_NEWCTR : E_OTP;
            chunk_q <= '0;
          end
        E_NEWCTR: begin
          ctr_q     <= ctr_inc(ctr_q, a_q[5:0]);
          reenc_req <= ctr_wraps(ctr_q, a_q[5:0]);
          chunk_q   <= '0;
          st_q      <= E_OTP;
        end
        E_OTP: if (!go_q) go_q <= 1'b1;
          else if (aes_done) begin
            otp_q[128 * chunk_q +: 128] <= aes_ct;
            go_q    <= 1'b0;
            chunk_q <= chunk_q + 1'b1;
            if (chunk_q == 2'd3) st_q <= wr_q ? E_S1 : E_RSP;
          end
        E_S1: if (!go_q) begin go_q <= 1'b1; ct_q <= pt_q ^ otp_q; end
          else if (h_done) begin h1_q <= h_dig; go_q <= 1'b0; st_q <= E_S2; end
        E_S2: if (!go_q) go_q <= 1'b1;
          else if (h_done) begin smac_new_q <= h_dig; go_q <= 1'b0; st_q <= E_PUSH; end
        E_PUSH: if (!wpq_full) st_q <= E_RSP;
        E_RSP: begin
          cpu_rsp_valid <= 1'b1;
          cpu_rsp_write <= wr_q;
          cpu_rsp_addr  <= a_q;
          cpu_rsp_data  <= (wr_q || err_q) ? '0 : (ct_q ^ otp_q);
          cpu_rsp_err   <= err_q;
          st_q          <= E_IDLE;
        end
        default: st_q <= E_IDLE;
      endcase
    end
  end

  a_one_request: assert property (@(posedge clk) disable iff (!rst_n)
    (cpu_req_valid && cpu_req_ready) |=> !cpu_req_ready);
endmodule
