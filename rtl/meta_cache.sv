// meta_cache: set-associative, write-through cache of 64-byte metadata
// blocks.
//
// One module serves as the counter cache and the SMAC cache of the memory
// controller and as the BMT lower-level cache of the NVDIMM (32 KB, 8-way,
// 64-byte blocks: 64 sets of 8 ways). Blocks are named by a KEYW-bit key
// (block index, plus tree level for BMT nodes); the low set-index bits of
// the key select the set. Because the caches are write-through, lines are
// never dirty and an eviction simply drops the victim.
//
// Interface and timing: lookup is combinational (lk_key -> lk_hit,
// lk_data). A write updates the line if the key is present, otherwise it
// allocates the set's round-robin victim; inv_en drops a key. Write and
// invalidate take effect at the clock edge. Round-robin replacement is this
// design's choice.
module meta_cache #(
  parameter int unsigned SETS = 64,
  parameter int unsigned WAYS = 8,
  parameter int unsigned KEYW = 37
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [KEYW-1:0]       lk_key,
  output logic                  lk_hit,
  output imiv_pkg::line_t       lk_data,
  input  logic                  wr_en,
  input  logic [KEYW-1:0]       wr_key,
  input  imiv_pkg::line_t       wr_data,
  input  logic                  inv_en,
  input  logic [KEYW-1:0]       inv_key
);
  import imiv_pkg::*;
  localparam int unsigned SW = $clog2(SETS);
  localparam int unsigned WW = (WAYS > 1) ? $clog2(WAYS) : 1;

  logic [KEYW-1:0] tag_q  [SETS][WAYS];
  logic            val_q  [SETS][WAYS];
  line_t           data_q [SETS][WAYS];
  logic [WW-1:0]   rr_q   [SETS];

  function automatic logic [SW-1:0] set_of(logic [KEYW-1:0] k);
    return k[SW-1:0];
  endfunction

  // lookup port
  always_comb begin
    lk_hit  = 1'b0;
    lk_data = '0;
    for (int w = 0; w < WAYS; w++)
      if (val_q[set_of(lk_key)][w] && tag_q[set_of(lk_key)][w] == lk_key) begin
        lk_hit  = 1'b1;
        lk_data = data_q[set_of(lk_key)][w];
      end
  end

  // write port: hit way or round-robin victim
  logic          wr_hit;
  logic [WW-1:0] wr_way;
  always_comb begin
    wr_hit = 1'b0;
    wr_way = rr_q[set_of(wr_key)];
    for (int w = 0; w < WAYS; w++)
      if (val_q[set_of(wr_key)][w] && tag_q[set_of(wr_key)][w] == wr_key) begin
        wr_hit = 1'b1;
        wr_way = WW'(w);
      end
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      data_q[set_of(wr_key)][wr_way] <= wr_data;
      tag_q[set_of(wr_key)][wr_way]  <= wr_key;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        rr_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) val_q[s][w] <= 1'b0;
      end
    end else begin
      if (inv_en)
        for (int w = 0; w < WAYS; w++)
          if (tag_q[set_of(inv_key)][w] == inv_key) val_q[set_of(inv_key)][w] <= 1'b0;
      if (wr_en) begin
        val_q[set_of(wr_key)][wr_way] <= 1'b1;
        if (!wr_hit)
          rr_q[set_of(wr_key)] <= (wr_way == WW'(WAYS - 1)) ? '0 : wr_way + 1'b1;
      end
    end
  end
endmodule
