// pwrq: Pending Write Request Queue of the integrity verification engine.
//
// Every ciphertext write that reaches the NVDIMM takes an entry here, in
// arrival order, together with its SMAC. The entry then collects the rest
// of its security tuple: the incremented counter block when the engine
// processes it, and the updated lower-level BMT nodes (levels 1..LOWER) as
// the update pipeline produces them. Only when the whole tuple is present
// is the entry drained to the media, oldest first, so data, counters and
// tree nodes reach the media in the order the writes arrived.
//
// Entry life: FREE -> NEW (received) -> PROC (counter computed, tree update
// in flight) -> DONE (tree update retired) -> drained. An entry whose SMAC
// or counter check fails goes NEW -> DROP and is discarded at the head.
//
// Three pointers walk the circular buffer: tail (allocate), proc (oldest
// NEW entry, processed in order) and head (oldest entry, drained).
// fwd_* searches the processed entries for the youngest one holding a given
// counter block, so back-to-back writes to one page see each other's
// counters before they reach the media. rd_* gives random read access for
// the PWRQ hash tree. Entry layout is this design's; the published entry
// (5675 bits) is not itemised.
module pwrq #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned LOWER = 6
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // allocate
  input  logic                      alloc,
  input  imiv_pkg::laddr_t          alloc_addr,
  input  imiv_pkg::line_t           alloc_ct,
  input  imiv_pkg::dig_t            alloc_smac,
  output logic                      full,
  output logic                      empty,
  // oldest unprocessed entry
  output logic                      proc_valid,
  output logic [$clog2(DEPTH)-1:0]  proc_ptr,
  output imiv_pkg::laddr_t          proc_addr,
  output imiv_pkg::line_t           proc_ct,
  output imiv_pkg::dig_t            proc_smac,
  output logic                      proc_is_head,   // nothing older is pending
  input  logic                      proc_done,      // advance: entry processed
  input  logic                      proc_drop,      // with proc_done: discard it
  input  imiv_pkg::line_t           proc_ctr,
  // tree nodes from the update pipeline
  input  logic                      node_we,
  input  logic [$clog2(DEPTH)-1:0]  node_ptr,
  input  logic [3:0]                node_level,     // 1..LOWER
  input  imiv_pkg::line_t           node_data,
  // tree update of an entry retired
  input  logic                      mark_done,
  input  logic [$clog2(DEPTH)-1:0]  mark_ptr,
  // head (drain side)
  output logic                      head_valid,     // DONE or DROP at the head
  output logic                      head_drop,
  output imiv_pkg::laddr_t          head_addr,
  output imiv_pkg::line_t           head_ct,
  output imiv_pkg::dig_t            head_smac,
  output imiv_pkg::line_t           head_ctr,
  output imiv_pkg::line_t           head_nodes [LOWER],
  input  logic                      head_pop,
  // counter forwarding
  input  imiv_pkg::caddr_t          fwd_caddr,
  output logic                      fwd_hit,
  output imiv_pkg::line_t           fwd_ctr,
  // random read (PWRQ hash tree)
  input  logic [$clog2(DEPTH)-1:0]  rd_ptr,
  output logic                      rd_new,         // entry is NEW
  output imiv_pkg::laddr_t          rd_addr,
  output imiv_pkg::line_t           rd_ct,
  output imiv_pkg::dig_t            rd_smac,
  output logic [$clog2(DEPTH):0]    n_new           // number of NEW entries
);
  import imiv_pkg::*;
  localparam int unsigned PW = $clog2(DEPTH);

  typedef enum logic [2:0] {E_FREE, E_NEW, E_PROC, E_DONE, E_DROP} est_e;

  est_e    st_q   [DEPTH];
  laddr_t  addr_q [DEPTH];
  line_t   ct_q   [DEPTH];
  dig_t    smac_q [DEPTH];
  line_t   ctr_q  [DEPTH];
  line_t   node_q [LOWER][DEPTH];

  logic [PW-1:0] head_q, proc_q, tail_q;
  logic [PW:0]   cnt_q, nproc_q;   // entries; processed-not-drained entries

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign full  = (cnt_q == (PW+1)'(DEPTH));
  assign empty = (cnt_q == '0);
  assign n_new = cnt_q - nproc_q;

  assign proc_valid   = (st_q[proc_q] == E_NEW);
  assign proc_ptr     = proc_q;
  assign proc_addr    = addr_q[proc_q];
  assign proc_ct      = ct_q[proc_q];
  assign proc_smac    = smac_q[proc_q];
  assign proc_is_head = (nproc_q == '0);

  assign head_valid = (st_q[head_q] == E_DONE) || (st_q[head_q] == E_DROP);
  assign head_drop  = (st_q[head_q] == E_DROP);
  assign head_addr  = addr_q[head_q];
  assign head_ct    = ct_q[head_q];
  assign head_smac  = smac_q[head_q];
  assign head_ctr   = ctr_q[head_q];
  always_comb for (int l = 0; l < LOWER; l++) head_nodes[l] = node_q[l][head_q];

  assign rd_new  = (st_q[rd_ptr] == E_NEW);
  assign rd_addr = addr_q[rd_ptr];
  assign rd_ct   = ct_q[rd_ptr];
  assign rd_smac = smac_q[rd_ptr];

  // youngest processed (PROC/DONE) entry with the counter block: walk from
  // the oldest, later matches win
  always_comb begin
    fwd_hit = 1'b0;
    fwd_ctr = '0;
    for (int i = 0; i < DEPTH; i++) begin
      automatic logic [PW-1:0] p = PW'((int'(head_q) + i) % DEPTH);
      if ((PW+1)'(i) < nproc_q && (st_q[p] == E_PROC || st_q[p] == E_DONE) &&
          addr_q[p][LINE_AW-1:6] == fwd_caddr) begin
        fwd_hit = 1'b1;
        fwd_ctr = ctr_q[p];
      end
    end
  end

  logic do_alloc, do_pop, do_proc;
  assign do_alloc = alloc && !full;
  assign do_pop   = head_pop && head_valid;
  assign do_proc  = proc_done && proc_valid;

  always_ff @(posedge clk) begin
    if (do_alloc) begin
      addr_q[tail_q] <= alloc_addr;
      ct_q[tail_q]   <= alloc_ct;
      smac_q[tail_q] <= alloc_smac;
    end
    if (do_proc && !proc_drop) ctr_q[proc_q] <= proc_ctr;
    for (int l = 0; l < LOWER; l++)
      if (node_we && node_level == 4'(l + 1)) node_q[l][node_ptr] <= node_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) st_q[i] <= E_FREE;
      head_q <= '0; proc_q <= '0; tail_q <= '0;
      cnt_q <= '0; nproc_q <= '0;
    end else begin
      if (mark_done && st_q[mark_ptr] == E_PROC) st_q[mark_ptr] <= E_DONE;
      if (do_proc) begin
        st_q[proc_q] <= proc_drop ? E_DROP : E_PROC;
        proc_q <= inc(proc_q);
      end
      if (do_pop) begin
        st_q[head_q] <= E_FREE;
        head_q <= inc(head_q);
      end
      if (do_alloc) begin
        st_q[tail_q] <= E_NEW;
        tail_q <= inc(tail_q);
      end
      cnt_q   <= cnt_q + (PW+1)'(do_alloc) - (PW+1)'(do_pop);
      nproc_q <= nproc_q + (PW+1)'(do_proc) - (PW+1)'(do_pop);
    end
  end

  a_pop_only_processed: assert property (@(posedge clk) disable iff (!rst_n)
    head_pop |-> head_valid);
endmodule
