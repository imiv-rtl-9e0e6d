// bmt_upper_buffer: the upper part of the split BMT cache.
//
// Holds the two tree levels just below the root (level 8: 8 nodes, level 7:
// 64 nodes; 72 x 64 B = 4.5 KB) with no replacement, so the most frequently
// updated nodes never compete with lower-level nodes and are not written to
// the media on every update. A slot is filled on first use (after the node
// has been verified against its parent) and then updated in place.
//
// On power down, flush_start walks all valid slots and emits them, one per
// cycle on flush_valid (stalled by flush_ready low), as media writes of
// (level, index, node); flush_done pulses after the last one.
//
// Interface: combinational read (rd_level/rd_idx -> rd_valid/rd_data); one
// write port taking effect at the clock edge. Levels other than 7 and 8 read
// as invalid and are not written.
module bmt_upper_buffer #(
  parameter int unsigned N_L8 = 8,
  parameter int unsigned N_L7 = 64
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [3:0]                rd_level,
  input  logic [imiv_pkg::LINE_AW-1:0] rd_idx,
  output logic                      rd_valid,
  output imiv_pkg::line_t           rd_data,
  input  logic                      wr_en,
  input  logic [3:0]                wr_level,
  input  logic [imiv_pkg::LINE_AW-1:0] wr_idx,
  input  imiv_pkg::line_t           wr_data,
  input  logic                      flush_start,
  input  logic                      flush_ready,
  output logic                      flush_valid,
  output logic [3:0]                flush_level,
  output logic [imiv_pkg::LINE_AW-1:0] flush_idx,
  output imiv_pkg::line_t           flush_data,
  output logic                      flush_done
);
  import imiv_pkg::*;
  localparam int unsigned N  = N_L8 + N_L7;
  localparam int unsigned EW = $clog2(N);

  line_t mem_q [N];
  logic  val_q [N];

  // slot of (level, index); returns N for anything not held here
  function automatic int unsigned slot(logic [3:0] l, logic [LINE_AW-1:0] i);
    if (l == 4'd8 && i < LINE_AW'(N_L8)) return int'(i);
    if (l == 4'd7 && i < LINE_AW'(N_L7)) return N_L8 + int'(i);
    return N;
  endfunction

  always_comb begin
    automatic int unsigned s = slot(rd_level, rd_idx);
    rd_valid = (s < N) ? val_q[EW'(s)] : 1'b0;
    rd_data  = (s < N) ? mem_q[EW'(s)] : '0;
  end

  logic          fl_busy_q;
  logic [EW:0]   fl_ptr_q;

  always_comb begin
    flush_valid = fl_busy_q && (fl_ptr_q < (EW+1)'(N)) && val_q[EW'(fl_ptr_q)];
    flush_level = (fl_ptr_q < (EW+1)'(N_L8)) ? 4'd8 : 4'd7;
    flush_idx   = (fl_ptr_q < (EW+1)'(N_L8)) ? LINE_AW'(fl_ptr_q) : LINE_AW'(fl_ptr_q - (EW+1)'(N_L8));
    flush_data  = mem_q[EW'(fl_ptr_q)];
  end

  always_ff @(posedge clk) begin
    if (wr_en && slot(wr_level, wr_idx) < N) mem_q[EW'(slot(wr_level, wr_idx))] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < N; s++) val_q[s] <= 1'b0;
      fl_busy_q  <= 1'b0;
      fl_ptr_q   <= '0;
      flush_done <= 1'b0;
    end else begin
      flush_done <= 1'b0;
      if (wr_en && slot(wr_level, wr_idx) < N) val_q[EW'(slot(wr_level, wr_idx))] <= 1'b1;
      if (!fl_busy_q) begin
        if (flush_start) begin fl_busy_q <= 1'b1; fl_ptr_q <= '0; end
      end else if (fl_ptr_q == (EW+1)'(N)) begin
        fl_busy_q  <= 1'b0;
        flush_done <= 1'b1;
      end else if (!flush_valid || flush_ready) begin
        fl_ptr_q <= fl_ptr_q + 1'b1;
      end
    end
  end
endmodule
