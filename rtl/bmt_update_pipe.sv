// bmt_update_pipe: pipelined leaf-to-root Bonsai Merkle tree update.
//
// One stage per hashed tree level (LEVELS = 9 for a 512 GB DIMM), each with
// its own hash unit, so up to LEVELS updates (one per stage) are in flight.
// Stage s holds the new level-s node of its update (s = 0: the counter
// block). In a beat, every occupied stage hashes its node; then, one stage
// per cycle from the leaf upward, stage s writes the digest into its slot of
// the level-(s+1) parent and emits that parent on the out_* port (the
// engine stores it in the PWRQ entry, the lower cache, the upper buffer or
// the root register). Finally all updates move up one stage and a new one
// may enter stage 0. Because updates pass every stage in launch order, the
// tree and the media see them in the order the writes arrived.
//
// Each update carries a snapshot of its path (levels 1..LEVELS), read when
// its counter was verified. A later update's snapshot can predate commits of
// earlier updates to a shared ancestor, so each stage remembers its last
// LEVELS commits and takes the newest matching one in place of the
// snapshot ("forwarding"). The snapshot's value of the update's own slot is
// irrelevant; only the seven sibling digests are kept.
//
// Interface: launch_* is accepted on a cycle with launch_ready. out_we
// pulses once per committed node; done pulses with the update's tag when the
// root has been committed. Beat length: 2 + HASH_LAT + LEVELS cycles
// (shift, start, hash, one commit per level). The
// beat organisation and the forwarding are this design's; the published
// design fixes the per-level hash units and the in-order requirement.
module bmt_update_pipe #(
  parameter int unsigned LEVELS   = 9,
  parameter int unsigned HASH_LAT = 4,
  parameter int unsigned TAG_W    = 4,
  parameter int unsigned PTR_W    = 6
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  imiv_pkg::dig_t         key,
  // launch
  input  logic                   launch_valid,
  output logic                   launch_ready,
  input  logic [TAG_W-1:0]       launch_tag,
  input  logic [PTR_W-1:0]       launch_ptr,
  input  imiv_pkg::caddr_t       launch_caddr,
  input  imiv_pkg::line_t        launch_leaf,
  input  imiv_pkg::line_t        launch_path [LEVELS],  // [i] = level i+1 node
  // committed nodes
  output logic                   out_we,
  output logic [3:0]             out_level,             // 1..LEVELS
  output logic [imiv_pkg::LINE_AW-1:0] out_idx,
  output imiv_pkg::line_t        out_data,
  output logic [PTR_W-1:0]       out_ptr,
  // completion
  output logic                   done,
  output logic [TAG_W-1:0]       done_tag,
  output logic                   idle,
  output logic [$clog2(LEVELS+1)-1:0] occupancy
);
  import imiv_pkg::*;
  localparam int unsigned SW = $clog2(LEVELS + 1);

  typedef enum logic [1:0] {P_SHIFT, P_START, P_HASH, P_COMMIT} ph_e;
  ph_e ph_q;

  logic              v_q    [LEVELS];
  logic [TAG_W-1:0]  tag_q  [LEVELS];
  logic [PTR_W-1:0]  ptr_q  [LEVELS];
  caddr_t            ca_q   [LEVELS];
  line_t             cur_q  [LEVELS];
  line_t             path_q [LEVELS][LEVELS];
  dig_t              dig_q  [LEVELS];
  line_t             res_q  [LEVELS];

  // forwarding history per stage
  logic                   hv_q   [LEVELS][LEVELS];
  logic [LINE_AW-1:0]     hidx_q [LEVELS][LEVELS];
  line_t                  hdat_q [LEVELS][LEVELS];

  logic [SW-1:0] cs_q;      // stage being committed

  // hash units, one per level
  logic hstart;
  logic hbusy [LEVELS];
  logic hdone [LEVELS];
  dig_t hdig  [LEVELS];
  for (genvar s = 0; s < LEVELS; s++) begin : g_hash
    hash_unit #(.LATENCY(HASH_LAT)) u_hash (
      .clk, .rst_n, .start(hstart && v_q[s]), .key, .chain('0), .msg(cur_q[s]),
      .busy(hbusy[s]), .done(hdone[s]), .digest(hdig[s]));
  end

  logic any_v;
  always_comb begin
    any_v = 1'b0;
    occupancy = '0;
    for (int s = 0; s < LEVELS; s++) begin
      any_v = any_v | v_q[s];
      occupancy = occupancy + SW'(v_q[s]);
    end
  end
  assign idle = !any_v && (ph_q == P_SHIFT);

  // the hash units all have the same latency: wait on the first busy one
  logic hash_fin;
  always_comb begin
    hash_fin = 1'b0;
    for (int s = 0; s < LEVELS; s++) hash_fin = hash_fin | hdone[s];
  end

  // commit of stage cs_q: parent = newest history match, else snapshot
  logic [LINE_AW-1:0] c_idx;
  line_t              c_parent;
  always_comb begin
    automatic int unsigned cs = int'(cs_q);
    c_idx    = node_idx(ca_q[cs], cs + 1);
    c_parent = path_q[cs][cs];
    for (int h = LEVELS - 1; h >= 0; h--)      // entry 0 is newest
      if (hv_q[cs][h] && hidx_q[cs][h] == c_idx) c_parent = hdat_q[cs][h];
    c_parent[DIG_BITS * node_slot(ca_q[cs], cs + 1) +: DIG_BITS] = dig_q[cs];
  end

  assign launch_ready = (ph_q == P_SHIFT);
  assign hstart       = (ph_q == P_START);

  // occupied stages after the next shift (the top stage has finished)
  logic below_top;
  always_comb begin
    below_top = 1'b0;
    for (int s = 0; s < LEVELS - 1; s++) below_top = below_top | v_q[s];
  end

  always_comb begin
    out_we    = (ph_q == P_COMMIT) && v_q[cs_q];
    out_level = 4'(cs_q) + 4'd1;
    out_idx   = c_idx;
    out_data  = c_parent;
    out_ptr   = ptr_q[cs_q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_q <= P_SHIFT;
      cs_q <= '0;
      done <= 1'b0;
      done_tag <= '0;
      for (int s = 0; s < LEVELS; s++) begin
        v_q[s] <= 1'b0;
        for (int h = 0; h < LEVELS; h++) hv_q[s][h] <= 1'b0;
      end
    end else begin
      done <= 1'b0;
      unique case (ph_q)
        P_SHIFT: ;  // handled below with the data move
        P_START: ph_q <= P_HASH;
        P_HASH: if (hash_fin) begin
          for (int s = 0; s < LEVELS; s++) dig_q[s] <= hdig[s];
          cs_q <= '0;
          ph_q <= P_COMMIT;
        end
        P_COMMIT: begin
          if (v_q[cs_q]) begin
            res_q[cs_q] <= c_parent;
            for (int h = LEVELS - 1; h > 0; h--) begin
              hv_q[cs_q][h]   <= hv_q[cs_q][h-1];
              hidx_q[cs_q][h] <= hidx_q[cs_q][h-1];
              hdat_q[cs_q][h] <= hdat_q[cs_q][h-1];
            end
            hv_q[cs_q][0]   <= 1'b1;
            hidx_q[cs_q][0] <= c_idx;
            hdat_q[cs_q][0] <= c_parent;
          end
          if (cs_q == SW'(LEVELS - 1)) begin
            ph_q <= P_SHIFT;
            if (v_q[LEVELS-1]) begin
              done     <= 1'b1;
              done_tag <= tag_q[LEVELS-1];
            end
          end
          cs_q <= cs_q + 1'b1;
        end
        default: ph_q <= P_SHIFT;
      endcase
      if (ph_q == P_SHIFT) begin
        // move every update up one level; the top one has finished
        for (int s = LEVELS - 1; s > 0; s--) begin
          v_q[s]   <= v_q[s-1];
          tag_q[s] <= tag_q[s-1];
          ptr_q[s] <= ptr_q[s-1];
          ca_q[s]  <= ca_q[s-1];
          cur_q[s] <= res_q[s-1];
          for (int l = 0; l < LEVELS; l++) path_q[s][l] <= path_q[s-1][l];
        end
        v_q[0] <= launch_valid;
        if (launch_valid) begin
          tag_q[0] <= launch_tag;
          ptr_q[0] <= launch_ptr;
          ca_q[0]  <= launch_caddr;
          cur_q[0] <= launch_leaf;
          for (int l = 0; l < LEVELS; l++) path_q[0][l] <= launch_path[l];
        end
        if (launch_valid || below_top) ph_q <= P_START;
      end
    end
  end
endmodule
