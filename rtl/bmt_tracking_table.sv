// bmt_tracking_table: BMT tracking table (BTT) for in-order pipelined
// tree updates.
//
// Each update launched into the BMT update pipeline takes one entry, which
// records the PWRQ entry it belongs to and its counter block. At most
// ENTRIES (9, one per tree level) updates are in flight; a further launch
// must wait (full). Updates may report completion in any order, but
// entries retire strictly in launch order, so PWRQ entries become drainable
// in the order their writes arrived, which keeps the media's tree and data
// consistent after a crash.
//
// Interface and timing: alloc (when !full) stores (alloc_ptr, alloc_caddr)
// and returns the entry number on alloc_tag in the same cycle. complete
// marks entry complete_tag done. When the oldest entry is done, retire_valid
// is high with retire_ptr for one cycle and the entry is freed at that edge.
module bmt_tracking_table #(
  parameter int unsigned ENTRIES = 9,
  parameter int unsigned PTR_W   = 6
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         alloc,
  input  logic [PTR_W-1:0]             alloc_ptr,
  input  imiv_pkg::caddr_t             alloc_caddr,
  output logic [$clog2(ENTRIES)-1:0]   alloc_tag,
  output logic                         full,
  output logic                         empty,
  input  logic                         complete,
  input  logic [$clog2(ENTRIES)-1:0]   complete_tag,
  output logic                         retire_valid,
  output logic [PTR_W-1:0]             retire_ptr,
  output imiv_pkg::caddr_t             retire_caddr
);
  import imiv_pkg::*;
  localparam int unsigned TW = $clog2(ENTRIES);

  typedef struct packed {
    logic             valid;
    logic             done;
    logic [PTR_W-1:0] ptr;
    caddr_t           caddr;
  } btt_entry_t;

  btt_entry_t    tab_q [ENTRIES];
  logic [TW-1:0] head_q, tail_q;
  logic [TW:0]   cnt_q;

  function automatic logic [TW-1:0] inc(logic [TW-1:0] p);
    return (p == TW'(ENTRIES - 1)) ? '0 : p + 1'b1;
  endfunction

  assign full         = (cnt_q == (TW+1)'(ENTRIES));
  assign empty        = (cnt_q == '0);
  assign alloc_tag    = tail_q;
  assign retire_valid = tab_q[head_q].valid && tab_q[head_q].done;
  assign retire_ptr   = tab_q[head_q].ptr;
  assign retire_caddr = tab_q[head_q].caddr;

  logic do_alloc;
  assign do_alloc = alloc && !full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tab_q[i] <= '0;
      head_q <= '0; tail_q <= '0; cnt_q <= '0;
    end else begin
      if (complete && tab_q[complete_tag].valid) tab_q[complete_tag].done <= 1'b1;
      if (retire_valid) begin
        tab_q[head_q].valid <= 1'b0;
        head_q <= inc(head_q);
      end
      if (do_alloc) begin
        tab_q[tail_q] <= '{valid: 1'b1, done: 1'b0, ptr: alloc_ptr, caddr: alloc_caddr};
        tail_q <= inc(tail_q);
      end
      cnt_q <= cnt_q + (do_alloc ? 1'b1 : 1'b0) - (retire_valid ? 1'b1 : 1'b0);
    end
  end

  a_no_alloc_when_full: assert property (@(posedge clk) disable iff (!rst_n) !(alloc && full));
endmodule
