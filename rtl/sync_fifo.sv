// sync_fifo: synchronous first-in first-out queue with first-word
// fall-through.
//
// Used for the memory controller's read pending queue (RPQ) and write
// pending queue (WPQ, 12 entries each) and for the NVDIMM's pending read
// request queue (PRRQ, 16 entries). Entries are opaque WIDTH-bit words;
// each user packs its own struct into them.
//
// Timing: dout shows the head whenever empty is low. push (ignored when
// full) and pop (ignored when empty) take effect on the clock edge; both in
// the same cycle are allowed. count is the number of stored entries.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 12
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           din,
  input  logic                       pop,
  output logic [WIDTH-1:0]           dout,
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_q, wr_q;

  assign empty = (count == '0);
  assign full  = (count == ($bits(count))'(DEPTH));
  assign dout  = mem[rd_q];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk) if (do_push) mem[wr_q] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= '0; wr_q <= '0; count <= '0;
    end else begin
      if (do_push) wr_q <= inc(wr_q);
      if (do_pop)  rd_q <= inc(rd_q);
      count <= count + ($bits(count))'(do_push) - ($bits(count))'(do_pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);
endmodule
