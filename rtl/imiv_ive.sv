// imiv_ive: integrity verification engine (IVE) on the NVDIMM controller.
//
// The IVE owns the per-DIMM Bonsai Merkle tree, so tree nodes never cross
// the memory bus. It sits between the bus and the untrusted media:
//
//  * Writes (ciphertext + SMAC) enter the PWRQ. Oldest first, the engine
//    gets the line's counter block (from a younger-than-media PWRQ entry if
//    one holds it, else from the media), reads the tree path from the split
//    cache (BMT lower cache for levels 1..6, upper buffer for levels 7..8,
//    root register), and checks every link that came from the media by
//    hashing the child and comparing with its slot in the parent. It then
//    increments the line's minor counter, recomputes the SMAC over
//    (ciphertext, address, new counter) and compares it with the one that
//    came over the bus. A write that passes is launched into the BMT update
//    pipeline (tracked by the BTT) with a snapshot of its path; a failing
//    one is dropped and counted.
//  * The pipeline commits new nodes: levels 1..6 go to the lower cache and
//    into the PWRQ entry, levels 7..8 to the upper buffer, level 9 to the
//    root. When the BTT retires the update, the entry is complete and the
//    drain writes ciphertext, SMAC, counter block and the six lower nodes
//    to the media, in arrival order. Levels 7..8 reach the media only at
//    power down.
//  * Reads wait in the PRRQ and are served when no write is pending.
//    Ciphertext and SMAC blocks are returned as stored; a counter block is
//    verified against the tree first and, when the request carries a
//    nonce, encrypted with AES_knonce({nonce, chunk}) before it is sent.
//  * A tree node may only be fetched from the media when no processed write
//    is still waiting to be drained (the media copy is then current); hits
//    in the caches proceed while updates are in flight.
//  * power_down: the memory controller's write queue is flushed into the
//    PWRQ as usual (ADR); once pd_wpq_empty reports it empty, intake and
//    processing of new writes stop, in-flight ones finish and drain, the PWRQ hash tree root is computed over the unprocessed writes,
//    those are saved to a media save area (level 15, two blocks each), and
//    the upper buffer is flushed. pht_root/n_saved must be kept by the
//    system's trusted storage together with bmt_root. recover reloads them:
//    the saved writes are read back into the PWRQ, the PHT root is
//    recomputed and compared, and processing resumes (rec_fail on
//    mismatch, after which the engine halts).
//
// The counter-forwarding rule, the quiet condition for media node fetches,
// the save-area layout and the one-at-a-time verification are this
// design's choices; the published design gives the queues, caches, tables,
// the hash-unit counts and the order of operations.
module imiv_ive #(
  parameter int unsigned PWRQ_DEPTH = 64,
  parameter int unsigned PRRQ_DEPTH = 16,
  parameter int unsigned BTT_ENTRIES = 9,
  parameter int unsigned SETS       = 64,
  parameter int unsigned WAYS       = 8,
  parameter int unsigned HASH_LAT   = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  imiv_pkg::dig_t       k_mac,
  input  logic [127:0]         k_nonce,
  // memory bus
  input  logic                 bus_req_valid,
  output logic                 bus_req_ready,
  input  imiv_pkg::bus_req_t   bus_req,
  output logic                 bus_rsp_valid,
  input  logic                 bus_rsp_ready,
  output imiv_pkg::bus_rsp_t   bus_rsp,
  // media (through the DIMM's internal buffers), reads answered in order
  output logic                 m_req_valid,
  input  logic                 m_req_ready,
  output imiv_pkg::media_req_t m_req,
  input  logic                 m_rsp_valid,
  input  imiv_pkg::line_t      m_rsp_data,
  // power down / recovery
  input  logic                 power_down,
  input  logic                 pd_wpq_empty,    // controller's write path drained (ADR done)
  output logic                 pd_done,
  output imiv_pkg::dig_t       pht_root,
  output logic [$clog2(PWRQ_DEPTH):0] n_saved,
  output imiv_pkg::line_t      bmt_root,
  input  logic                 recover,
  input  imiv_pkg::line_t      rec_bmt_root,
  input  imiv_pkg::dig_t       rec_pht_root,
  input  logic [$clog2(PWRQ_DEPTH):0] rec_n,
  output logic                 rec_done,
  output logic                 rec_fail,
  // events (one-cycle pulses)
  output logic                 ev_ctr_fwd,      // counter taken from the PWRQ
  output logic                 ev_node_media,   // tree node fetched from the media
  output logic                 ev_verify_fail,  // tree check failed
  output logic                 ev_smac_fail,    // bus SMAC mismatch, write dropped
  output logic                 ev_nonce_enc,    // counter sent nonce-encrypted
  output logic                 ev_launch,       // tree update launched
  output logic                 ev_drain         // PWRQ entry written to the media
);
  import imiv_pkg::*;
  localparam int unsigned PW   = $clog2(PWRQ_DEPTH);
  localparam int unsigned TW   = $clog2(BTT_ENTRIES);
  localparam int unsigned NL   = BMT_LEVELS;          // 9 hashed levels
  localparam int unsigned LOW  = LOWER_LVLS;          // levels 1..6 cached
  localparam int unsigned KEYW = 4 + LINE_AW;
  localparam int unsigned BQW  = $bits(bus_req_t);
  localparam dig_t        K_BMT = '0;                 // tree hashes are unkeyed

  // reset value of the root: tree over all-zero counter blocks
  localparam line_t ROOT0 = {ARITY{zero_digest(K_BMT, NL - 1)}};

  typedef enum logic [4:0] {
    I_IDLE, I_LEAF, I_LEAF_M, I_WALK, I_NODE_M, I_VER, I_FILL, I_SMAC1, I_SMAC2,
    I_LAUNCH, I_NENC, I_MREAD, I_RSP, I_PD_WAIT, I_PD_PHT, I_PD_SAVE, I_PD_FLUSH,
    I_PD_DONE, I_REC_READ, I_REC_PHT, I_HALT
  } ist_e;
  ist_e st_q;

  // ---------------- PRRQ ----------------
  logic prrq_push, prrq_pop, prrq_full, prrq_empty;
  logic [BQW-1:0] prrq_dout;
  logic [$clog2(PRRQ_DEPTH+1)-1:0] prrq_cnt;
  bus_req_t rreq;
  sync_fifo #(.WIDTH(BQW), .DEPTH(PRRQ_DEPTH)) u_prrq (.clk, .rst_n, .push(prrq_push),
    .din(BQW'(bus_req)), .pop(prrq_pop), .dout(prrq_dout), .full(prrq_full),
    .empty(prrq_empty), .count(prrq_cnt));
  assign rreq = bus_req_t'(prrq_dout);

  // ---------------- PWRQ ----------------
  logic   pw_alloc, pw_full, pw_empty, pw_proc_valid, pw_proc_is_head, pw_proc_done, pw_proc_drop;
  logic [PW-1:0] pw_proc_ptr, pw_rd_ptr;
  laddr_t pw_proc_addr, pw_alloc_addr, pw_head_addr, pw_rd_addr;
  line_t  pw_proc_ct, pw_alloc_ct, pw_head_ct, pw_head_ctr, pw_rd_ct, pw_proc_ctr;
  dig_t   pw_proc_smac, pw_alloc_smac, pw_head_smac, pw_rd_smac;
  line_t  pw_head_nodes [LOW];
  logic   pw_head_valid, pw_head_drop, pw_head_pop, pw_fwd_hit, pw_rd_new, pw_mark;
  line_t  pw_fwd_ctr;
  logic [PW:0] pw_n_new;
  logic   pipe_we;
  logic [3:0] pipe_level;
  logic [LINE_AW-1:0] pipe_idx;
  line_t  pipe_data;
  logic [PW-1:0] pipe_ptr, retire_ptr;
  caddr_t c_q;

  pwrq #(.DEPTH(PWRQ_DEPTH), .LOWER(LOW)) u_pwrq (
    .clk, .rst_n, .alloc(pw_alloc), .alloc_addr(pw_alloc_addr), .alloc_ct(pw_alloc_ct),
    .alloc_smac(pw_alloc_smac), .full(pw_full), .empty(pw_empty),
    .proc_valid(pw_proc_valid), .proc_ptr(pw_proc_ptr), .proc_addr(pw_proc_addr),
    .proc_ct(pw_proc_ct), .proc_smac(pw_proc_smac), .proc_is_head(pw_proc_is_head),
    .proc_done(pw_proc_done), .proc_drop(pw_proc_drop), .proc_ctr(pw_proc_ctr),
    .node_we(pipe_we && pipe_level >= 4'd1 && pipe_level <= 4'(LOW)), .node_ptr(pipe_ptr),
    .node_level(pipe_level), .node_data(pipe_data),
    .mark_done(pw_mark), .mark_ptr(retire_ptr),
    .head_valid(pw_head_valid), .head_drop(pw_head_drop), .head_addr(pw_head_addr),
    .head_ct(pw_head_ct), .head_smac(pw_head_smac), .head_ctr(pw_head_ctr),
    .head_nodes(pw_head_nodes), .head_pop(pw_head_pop),
    .fwd_caddr(c_q), .fwd_hit(pw_fwd_hit), .fwd_ctr(pw_fwd_ctr),
    .rd_ptr(pw_rd_ptr), .rd_new(pw_rd_new), .rd_addr(pw_rd_addr), .rd_ct(pw_rd_ct),
    .rd_smac(pw_rd_smac), .n_new(pw_n_new));

  // ---------------- split BMT cache and root ----------------
  logic [KEYW-1:0] lc_lk_key, lc_wr_key;
  logic  lc_hit, lc_we;
  line_t lc_data, lc_wdata;
  meta_cache #(.SETS(SETS), .WAYS(WAYS), .KEYW(KEYW)) u_lower_cache (
    .clk, .rst_n, .lk_key(lc_lk_key), .lk_hit(lc_hit), .lk_data(lc_data),
    .wr_en(lc_we), .wr_key(lc_wr_key), .wr_data(lc_wdata), .inv_en(1'b0), .inv_key('0));

  logic  ub_rd_valid, ub_we, ub_fl_start, ub_fl_ready, ub_fl_valid, ub_fl_done;
  logic [3:0] ub_rd_level, ub_wr_level, ub_fl_level;
  logic [LINE_AW-1:0] ub_rd_idx, ub_wr_idx, ub_fl_idx;
  line_t ub_rd_data, ub_wr_data, ub_fl_data;
  bmt_upper_buffer u_upper (
    .clk, .rst_n, .rd_level(ub_rd_level), .rd_idx(ub_rd_idx), .rd_valid(ub_rd_valid),
    .rd_data(ub_rd_data), .wr_en(ub_we), .wr_level(ub_wr_level), .wr_idx(ub_wr_idx),
    .wr_data(ub_wr_data), .flush_start(ub_fl_start), .flush_ready(ub_fl_ready),
    .flush_valid(ub_fl_valid), .flush_level(ub_fl_level), .flush_idx(ub_fl_idx),
    .flush_data(ub_fl_data), .flush_done(ub_fl_done));

  line_t root_q;
  assign bmt_root = root_q;

  // ---------------- BTT and update pipeline ----------------
  logic btt_alloc, btt_full, btt_empty, btt_retire;
  logic [TW-1:0] btt_tag, done_tag;
  caddr_t retire_caddr;
  logic pipe_launch, pipe_ready, pipe_done, pipe_idle;
  logic [$clog2(NL+1)-1:0] pipe_occ;
  line_t path_q [NL];          // [i] = level i+1 node (i = NL-1: root)
  logic  tr_q   [NL];          // node came from a trusted store
  line_t leaf_q, newctr_q;
  logic  leaf_tr_q;

  bmt_tracking_table #(.ENTRIES(BTT_ENTRIES), .PTR_W(PW)) u_btt (
    .clk, .rst_n, .alloc(btt_alloc), .alloc_ptr(pw_proc_ptr), .alloc_caddr(c_q),
    .alloc_tag(btt_tag), .full(btt_full), .empty(btt_empty), .complete(pipe_done),
    .complete_tag(done_tag), .retire_valid(btt_retire), .retire_ptr(retire_ptr),
    .retire_caddr(retire_caddr));
  assign pw_mark = btt_retire;

  bmt_update_pipe #(.LEVELS(NL), .HASH_LAT(HASH_LAT), .TAG_W(TW), .PTR_W(PW)) u_pipe (
    .clk, .rst_n, .key(K_BMT), .launch_valid(pipe_launch), .launch_ready(pipe_ready),
    .launch_tag(btt_tag), .launch_ptr(pw_proc_ptr), .launch_caddr(c_q),
    .launch_leaf(newctr_q), .launch_path(path_q), .out_we(pipe_we), .out_level(pipe_level),
    .out_idx(pipe_idx), .out_data(pipe_data), .out_ptr(pipe_ptr), .done(pipe_done),
    .done_tag(done_tag), .idle(pipe_idle), .occupancy(pipe_occ));

  // ---------------- hash unit (verification, SMAC check), AES, PHT ----------------
  logic  h_start, h_busy, h_done;
  dig_t  h_key, h_chain, h_dig, h1_q;
  line_t h_msg;
  hash_unit #(.LATENCY(HASH_LAT)) u_vhash (.clk, .rst_n, .start(h_start), .key(h_key),
    .chain(h_chain), .msg(h_msg), .busy(h_busy), .done(h_done), .digest(h_dig));

  logic aes_start, aes_busy, aes_done;
  logic [127:0] aes_ct;
  logic [1:0] chunk_q;
  aes128_enc u_aes (.clk, .rst_n, .start(aes_start), .key(k_nonce),
    .pt({rreq.nonce, 62'd0, chunk_q}), .busy(aes_busy), .done(aes_done), .ct(aes_ct));

  logic pht_start, pht_busy, pht_done;
  logic [PW-1:0] pht_rd_ptr;
  dig_t pht_out;
  pht_unit #(.ENTRIES(PWRQ_DEPTH), .HASH_LAT(HASH_LAT)) u_pht (.clk, .rst_n, .key(k_mac),
    .start(pht_start), .rd_ptr(pht_rd_ptr), .rd_valid(pw_rd_new && (PW+1)'(pht_rd_ptr) < pw_n_new),
    .rd_addr(pw_rd_addr), .rd_ct(pw_rd_ct), .rd_smac(pw_rd_smac), .busy(pht_busy),
    .done(pht_done), .root(pht_out));

  // ---------------- state ----------------
  logic       rmode_q, go_q, fail_q, pd_q, mwait_q;
  logic [3:0] l_q;
  line_t      rdata_q;
  logic [PW:0] sv_q;            // save / restore index
  logic       sv_half_q;        // second block of an entry
  line_t      sv_ct_q;


  // node being examined in I_WALK / I_VER
  logic [LINE_AW-1:0] walk_idx;
  assign walk_idx = node_idx(c_q, int'(l_q));

  // verification: child (level l_q) and its slot in the parent
  line_t ver_child;
  logic  ver_child_tr;
  dig_t  ver_expect;
  always_comb begin
    ver_child    = (l_q == 4'd0) ? leaf_q : path_q[(l_q == 4'd0) ? 0 : int'(l_q) - 1];
    ver_child_tr = (l_q == 4'd0) ? leaf_tr_q : tr_q[(l_q == 4'd0) ? 0 : int'(l_q) - 1];
    ver_expect   = path_q[int'(l_q) < NL ? int'(l_q) : NL - 1]
                         [DIG_BITS * node_slot(c_q, int'(l_q) + 1) +: DIG_BITS];
  end

  // quiet: every older write has been drained, so the media copy is current
  logic quiet;
  assign quiet = pw_proc_is_head && pipe_idle && btt_empty;

  // ---------------- drain ----------------
  logic [3:0] dk_q;            // drain step
  media_req_t drain_req;
  logic       drain_active;
  always_comb begin
    drain_req = '0;
    drain_req.write = 1'b1;
    drain_req.bmask = '1;
    unique case (dk_q)
      4'd0: begin drain_req.kind = K_DATA; drain_req.idx = pw_head_addr; drain_req.data = pw_head_ct; end
      4'd1: begin
        drain_req.kind  = K_SMAC;
        drain_req.idx   = LINE_AW'(pw_head_addr[LINE_AW-1:3]);
        drain_req.bmask = 64'hff << (8 * pw_head_addr[2:0]);
        drain_req.data  = LINE_BITS'(pw_head_smac) << (DIG_BITS * pw_head_addr[2:0]);
      end
      4'd2: begin drain_req.kind = K_CTR; drain_req.idx = LINE_AW'(pw_head_addr[LINE_AW-1:6]);
                  drain_req.data = pw_head_ctr; end
      default: begin
        drain_req.kind  = K_NODE;
        drain_req.level = dk_q - 4'd2;
        drain_req.idx   = node_idx(pw_head_addr[LINE_AW-1:6], int'(dk_q) - 2);
        drain_req.data  = pw_head_nodes[(int'(dk_q) >= 3 && int'(dk_q) < 3 + LOW) ? int'(dk_q) - 3 : 0];
      end
    endcase
  end
  assign drain_active = pw_head_valid && !pw_head_drop;

  // ---------------- media port ----------------
  media_req_t main_req;
  logic       main_req_valid, fl_req_valid;
  media_req_t fl_req;
  always_comb begin
    fl_req = '0;
    fl_req.write = 1'b1; fl_req.bmask = '1; fl_req.kind = K_NODE;
    fl_req.level = ub_fl_level; fl_req.idx = ub_fl_idx; fl_req.data = ub_fl_data;
    fl_req_valid = ub_fl_valid;
  end
  always_comb begin
    m_req_valid = 1'b0; m_req = main_req;
    if (drain_active)      begin m_req_valid = 1'b1; m_req = drain_req; end
    else if (fl_req_valid) begin m_req_valid = 1'b1; m_req = fl_req; end
    else if (main_req_valid) begin m_req_valid = 1'b1; m_req = main_req; end
  end
  assign pw_head_pop = (pw_head_valid && pw_head_drop) ||
                       (drain_active && m_req_ready && dk_q == 4'(2 + LOW));
  assign ub_fl_ready = m_req_ready && !drain_active;
  logic main_go;
  assign main_go = main_req_valid && m_req_ready && !drain_active && !fl_req_valid;

  always_comb begin
    main_req = '0;
    main_req_valid = 1'b0;
    unique case (st_q)
      I_LEAF_M: begin main_req.kind = K_CTR; main_req.idx = LINE_AW'(c_q); main_req_valid = !mwait_q; end
      I_NODE_M: begin main_req.kind = K_NODE; main_req.level = l_q; main_req.idx = walk_idx;
                      main_req_valid = !mwait_q; end
      I_MREAD:  begin
        main_req.kind = rreq.kind;
        main_req.idx  = (rreq.kind == K_SMAC) ? LINE_AW'(rreq.addr[LINE_AW-1:3]) : rreq.addr;
        main_req_valid = !mwait_q;
      end
      I_PD_SAVE: begin
        main_req.write = 1'b1; main_req.bmask = '1; main_req.kind = K_NODE; main_req.level = 4'hf;
        main_req.idx   = LINE_AW'({sv_q, sv_half_q});
        main_req.data  = sv_half_q ? line_t'({pw_rd_smac, 64'(pw_rd_addr)}) : pw_rd_ct;
        main_req_valid = 1'b1;
      end
      I_REC_READ: begin main_req.kind = K_NODE; main_req.level = 4'hf;
                        main_req.idx = LINE_AW'({sv_q, sv_half_q});
                        main_req_valid = !mwait_q && (sv_q != rec_n); end
      default: ;
    endcase
  end

  // ---------------- store ports (pipeline commits, fills) ----------------
  always_comb begin
    lc_lk_key   = {l_q, walk_idx};
    ub_rd_level = l_q;
    ub_rd_idx   = walk_idx;
    lc_we = 1'b0; lc_wr_key = {pipe_level, pipe_idx}; lc_wdata = pipe_data;
    ub_we = 1'b0; ub_wr_level = pipe_level; ub_wr_idx = pipe_idx; ub_wr_data = pipe_data;
    if (pipe_we) begin
      lc_we = (pipe_level >= 4'd1 && pipe_level <= 4'(LOW));
      ub_we = (pipe_level > 4'(LOW) && pipe_level < 4'(NL));
    end else if (st_q == I_FILL && l_q >= 4'd1 && l_q < 4'(NL) && !tr_q[int'(l_q) - 1]) begin
      lc_we = (l_q <= 4'(LOW));
      ub_we = (l_q > 4'(LOW));
      lc_wr_key = {l_q, walk_idx}; lc_wdata = path_q[int'(l_q) - 1];
      ub_wr_level = l_q; ub_wr_idx = walk_idx; ub_wr_data = path_q[int'(l_q) - 1];
    end
  end

  // ---------------- intake ----------------
  always_comb begin
    bus_req_ready = !(pd_q && pd_wpq_empty) && (st_q != I_HALT) &&
                    (bus_req.write ? !pw_full : !prrq_full) &&
                    !(st_q == I_REC_READ || st_q == I_REC_PHT);
    prrq_push     = bus_req_valid && bus_req_ready && !bus_req.write;
    pw_alloc      = (bus_req_valid && bus_req_ready && bus_req.write) ||
                    (st_q == I_REC_READ && m_rsp_valid && mwait_q && sv_half_q);
    pw_alloc_addr = (st_q == I_REC_READ) ? m_rsp_data[LINE_AW-1:0] : bus_req.addr;
    pw_alloc_ct   = (st_q == I_REC_READ) ? sv_ct_q : bus_req.data;
    pw_alloc_smac = (st_q == I_REC_READ) ? m_rsp_data[127:64] : bus_req.smac;
  end

  // ---------------- hash / AES / PHT control ----------------
  always_comb begin
    h_start = 1'b0; h_key = K_BMT; h_chain = '0; h_msg = ver_child;
    unique case (st_q)
      I_VER:   h_start = !go_q && !ver_child_tr;
      I_SMAC1: begin h_start = !go_q; h_key = k_mac; h_msg = pw_proc_ct; end
      I_SMAC2: begin h_start = !go_q; h_key = k_mac; h_chain = h1_q;
                     h_msg = smac_tail(pw_proc_addr, newctr_q); end
      default: ;
    endcase
  end
  assign aes_start = (st_q == I_NENC) && !go_q;
  assign pht_start = (st_q == I_PD_PHT || st_q == I_REC_PHT) && !go_q;
  assign pw_rd_ptr = (st_q == I_PD_SAVE) ? PW'(int'(pw_proc_ptr) + int'(sv_q))
                                         : PW'(int'(pw_proc_ptr) + int'(pht_rd_ptr));

  assign pw_proc_ctr = newctr_q;
  assign pipe_launch = (st_q == I_LAUNCH) && pipe_ready && !btt_full;
  assign btt_alloc   = pipe_launch;
  always_comb begin
    pw_proc_done = 1'b0; pw_proc_drop = 1'b0;
    if (pipe_launch) pw_proc_done = 1'b1;
    if (!rmode_q && st_q == I_VER && fail_q) begin pw_proc_done = 1'b1; pw_proc_drop = 1'b1; end
    if (st_q == I_SMAC2 && go_q && h_done && h_dig != pw_proc_smac) begin
      pw_proc_done = 1'b1; pw_proc_drop = 1'b1;
    end
  end
  assign prrq_pop = (st_q == I_RSP) && bus_rsp_ready;
  assign ub_fl_start = (st_q == I_PD_FLUSH) && !go_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= I_IDLE; rmode_q <= 1'b0; go_q <= 1'b0; fail_q <= 1'b0; pd_q <= 1'b0; mwait_q <= 1'b0;
      l_q <= '0; c_q <= '0; leaf_q <= '0; leaf_tr_q <= 1'b0; newctr_q <= '0; h1_q <= '0;
      rdata_q <= '0; chunk_q <= '0; root_q <= ROOT0; dk_q <= '0; sv_q <= '0; sv_half_q <= 1'b0;
      sv_ct_q <= '0;
      for (int i = 0; i < NL; i++) begin path_q[i] <= '0; tr_q[i] <= 1'b0; end
      bus_rsp_valid <= 1'b0; bus_rsp <= '0; pd_done <= 1'b0; pht_root <= '0; n_saved <= '0;
      rec_done <= 1'b0; rec_fail <= 1'b0;
      {ev_ctr_fwd, ev_node_media, ev_verify_fail, ev_smac_fail, ev_nonce_enc, ev_launch, ev_drain} <= '0;
    end else begin
      {ev_ctr_fwd, ev_node_media, ev_verify_fail, ev_smac_fail, ev_nonce_enc, ev_launch, ev_drain} <= '0;
      rec_done <= 1'b0;
      if (power_down) pd_q <= 1'b1;
      // pipeline commits of the root; drain progress
      if (pipe_we && pipe_level == 4'(NL)) root_q <= pipe_data;
      if (drain_active && m_req_ready) begin
        dk_q <= (dk_q == 4'(2 + LOW)) ? 4'd0 : dk_q + 4'd1;
        if (dk_q == 4'(2 + LOW)) ev_drain <= 1'b1;
      end
      if (main_go && !m_req.write) mwait_q <= 1'b1;
      if (pipe_launch) ev_launch <= 1'b1;

      unique case (st_q)
        I_IDLE: begin
          fail_q <= 1'b0; go_q <= 1'b0; mwait_q <= 1'b0;
          if (pd_q && pd_wpq_empty) st_q <= I_PD_WAIT;
          else if (pw_proc_valid) begin
            rmode_q <= 1'b0; c_q <= pw_proc_addr[LINE_AW-1:6]; st_q <= I_LEAF;
          end else if (!prrq_empty && pw_empty && quiet) begin
            rmode_q <= 1'b1; c_q <= rreq.addr[LINE_AW-1:6];
            st_q <= (rreq.kind == K_CTR) ? I_LEAF : I_MREAD;
          end else if (recover) begin
            root_q <= rec_bmt_root; sv_q <= '0; sv_half_q <= 1'b0; st_q <= I_REC_READ;
          end
        end
        I_LEAF: begin
          if (!rmode_q && pw_fwd_hit) begin
            leaf_q <= pw_fwd_ctr; leaf_tr_q <= 1'b1; ev_ctr_fwd <= 1'b1;
            l_q <= 4'd1; st_q <= I_WALK;
          end else st_q <= I_LEAF_M;
        end
        I_LEAF_M: if (m_rsp_valid && mwait_q) begin
          leaf_q <= m_rsp_data; leaf_tr_q <= 1'b0; mwait_q <= 1'b0; l_q <= 4'd1; st_q <= I_WALK;
        end
        I_WALK: begin
          if (l_q == 4'(NL)) begin
            path_q[NL-1] <= root_q; tr_q[NL-1] <= 1'b1; l_q <= 4'd0; go_q <= 1'b0; st_q <= I_VER;
          end else if (l_q > 4'(LOW) && ub_rd_valid) begin
            path_q[int'(l_q) - 1] <= ub_rd_data; tr_q[int'(l_q) - 1] <= 1'b1; l_q <= l_q + 4'd1;
          end else if (l_q <= 4'(LOW) && lc_hit) begin
            path_q[int'(l_q) - 1] <= lc_data; tr_q[int'(l_q) - 1] <= 1'b1; l_q <= l_q + 4'd1;
          end else if (quiet) begin
            st_q <= I_NODE_M;
          end
        end
        I_NODE_M: if (m_rsp_valid && mwait_q) begin
          path_q[int'(l_q) - 1] <= m_rsp_data; tr_q[int'(l_q) - 1] <= 1'b0; mwait_q <= 1'b0;
          ev_node_media <= 1'b1; l_q <= l_q + 4'd1; st_q <= I_WALK;
        end
        I_VER: begin
          if (fail_q) begin
            // write: dropped through pw_proc_drop this cycle; read: error response
            ev_verify_fail <= 1'b1;
            if (rmode_q) begin
              bus_rsp_valid <= 1'b1;
              bus_rsp <= '{kind: K_CTR, addr: rreq.addr, enc: 1'b0, err: 1'b1, data: '0};
              st_q <= I_RSP;
            end else st_q <= I_IDLE;
          end else if (ver_child_tr || (go_q && h_done)) begin
            go_q <= 1'b0;
            if (!ver_child_tr && h_dig != ver_expect) fail_q <= 1'b1;
            else if (l_q == 4'(NL - 1)) begin l_q <= 4'd1; st_q <= I_FILL; end
            else l_q <= l_q + 4'd1;
          end else if (!go_q) go_q <= 1'b1;
        end
        I_FILL: begin
          if (l_q == 4'(NL)) begin
            go_q <= 1'b0;
            if (rmode_q) begin
              chunk_q <= '0; rdata_q <= leaf_q;
              st_q <= rreq.use_nonce ? I_NENC : I_RSP;
              if (!rreq.use_nonce) begin
                bus_rsp_valid <= 1'b1;
                bus_rsp <= '{kind: K_CTR, addr: rreq.addr, enc: 1'b0, err: 1'b0, data: leaf_q};
              end
            end else begin
              newctr_q <= ctr_inc(leaf_q, pw_proc_addr[5:0]);
              st_q <= I_SMAC1;
            end
          end else if (!pipe_we) l_q <= l_q + 4'd1;
        end
        I_SMAC1: if (!go_q) go_q <= 1'b1;
          else if (h_done) begin h1_q <= h_dig; go_q <= 1'b0; st_q <= I_SMAC2; end
        I_SMAC2: if (!go_q) go_q <= 1'b1;
          else if (h_done) begin
            go_q <= 1'b0;
            if (h_dig != pw_proc_smac) begin ev_smac_fail <= 1'b1; st_q <= I_IDLE; end
            else st_q <= I_LAUNCH;
          end
        I_LAUNCH: if (pipe_launch) st_q <= I_IDLE;
        I_NENC: if (!go_q) go_q <= 1'b1;
          else if (aes_done) begin
            rdata_q[128 * chunk_q +: 128] <= rdata_q[128 * chunk_q +: 128] ^ aes_ct;
            go_q <= 1'b0;
            chunk_q <= chunk_q + 1'b1;
            if (chunk_q == 2'd3) begin
              bus_rsp_valid <= 1'b1;
              bus_rsp <= '{kind: K_CTR, addr: rreq.addr, enc: 1'b1, err: 1'b0,
                           data: rdata_q ^ (LINE_BITS'(aes_ct) << 384)};
              ev_nonce_enc <= 1'b1;
              st_q <= I_RSP;
            end
          end
        I_MREAD: if (m_rsp_valid && mwait_q) begin
          mwait_q <= 1'b0;
          bus_rsp_valid <= 1'b1;
          bus_rsp <= '{kind: rreq.kind, addr: rreq.addr, enc: 1'b0, err: 1'b0, data: m_rsp_data};
          st_q <= I_RSP;
        end
        I_RSP: if (bus_rsp_ready) begin bus_rsp_valid <= 1'b0; st_q <= I_IDLE; end
        // ---- power down ----
        I_PD_WAIT: if (quiet && !pw_head_valid) begin go_q <= 1'b0; st_q <= I_PD_PHT; end
        I_PD_PHT: if (!go_q) go_q <= 1'b1;
          else if (pht_done) begin
            pht_root <= pht_out; n_saved <= pw_n_new; go_q <= 1'b0;
            sv_q <= '0; sv_half_q <= 1'b0; st_q <= I_PD_SAVE;
          end
        I_PD_SAVE: begin
          if (sv_q == pw_n_new) st_q <= I_PD_FLUSH;
          else if (main_go) begin
            sv_half_q <= !sv_half_q;
            if (sv_half_q) sv_q <= sv_q + 1'b1;
          end
        end
        I_PD_FLUSH: if (!go_q) go_q <= 1'b1;
          else if (ub_fl_done) begin go_q <= 1'b0; pd_done <= 1'b1; st_q <= I_PD_DONE; end
        I_PD_DONE: ;
        // ---- recovery ----
        I_REC_READ: begin
          if (sv_q == rec_n) begin go_q <= 1'b0; st_q <= I_REC_PHT; end
          else if (m_rsp_valid && mwait_q) begin
            mwait_q <= 1'b0;
            if (!sv_half_q) sv_ct_q <= m_rsp_data;
            else sv_q <= sv_q + 1'b1;
            sv_half_q <= !sv_half_q;
          end
        end
        I_REC_PHT: if (!go_q) go_q <= 1'b1;
          else if (pht_done) begin
            go_q <= 1'b0;
            if (pht_out == rec_pht_root) begin rec_done <= 1'b1; st_q <= I_IDLE; end
            else begin rec_fail <= 1'b1; st_q <= I_HALT; end
          end
        I_HALT: ;
        default: st_q <= I_IDLE;
      endcase
    end
  end

  a_rsp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (bus_rsp_valid && !bus_rsp_ready) |=> (bus_rsp_valid && $stable(bus_rsp)));
  a_fill_no_commit: assert property (@(posedge clk) disable iff (!rst_n)
    (st_q == I_FILL && l_q >= 4'd1 && !tr_q[int'(l_q) - 1]) |-> !pipe_we);
endmodule
