// pht_unit: PWRQ hash tree (PHT).
//
// A shallow eight-ary tree over the ENTRIES (64) PWRQ slots protects the
// pending writes that are saved to the untrusted media at power down: 64
// leaf digests form 8 level-1 nodes, whose 8 digests form the top node, and
// the digest of the top node is the PHT root kept by the engine. On power-up
// the same computation over the entries read back must give the same root.
//
// Three hash units, one per tree level: unit 0 makes each leaf digest in two
// passes, H(k, H(k, 0, ciphertext), {address, SMAC, valid}); unit 1 hashes a
// level-1 node as soon as its eight leaves are in; unit 2 hashes the top
// node. Slots that hold no pending write contribute a leaf of an all-zero
// entry with the valid bit clear, so the root also fixes which slots were
// occupied.
//
// Interface and timing: pulse start; the unit reads entry rd_ptr through the
// combinational rd_* port (it holds rd_ptr steady while it uses it), and
// pulses done with root valid about ENTRIES * 2 * HASH_LAT cycles later.
module pht_unit #(
  parameter int unsigned ENTRIES  = 64,
  parameter int unsigned HASH_LAT = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  imiv_pkg::dig_t               key,
  input  logic                         start,
  output logic [$clog2(ENTRIES)-1:0]   rd_ptr,
  input  logic                         rd_valid,
  input  imiv_pkg::laddr_t             rd_addr,
  input  imiv_pkg::line_t              rd_ct,
  input  imiv_pkg::dig_t               rd_smac,
  output logic                         busy,
  output logic                         done,
  output imiv_pkg::dig_t               root
);
  import imiv_pkg::*;
  localparam int unsigned PW = $clog2(ENTRIES);
  localparam int unsigned N1 = ENTRIES / ARITY;   // level-1 nodes

  typedef enum logic [2:0] {T_IDLE, T_LEAF_A, T_LEAF_B, T_L1, T_TOP, T_FIN} tst_e;
  tst_e st_q;

  logic [PW:0]  i_q;         // entry being hashed
  line_t        l1_q;        // level-1 node being filled
  line_t        top_q;       // top node
  logic         l1_pend_q;   // a full level-1 node waits for unit 1
  line_t        l1_hold_q;
  logic [$clog2(N1+1)-1:0] n1_q, n1_done_q;

  logic h0s, h1s, h2s, h0d, h1d, h2d, h0b, h1b, h2b;
  dig_t h0c, h0o, h1o, h2o;
  line_t h0m;

  hash_unit #(.LATENCY(HASH_LAT)) u_h0 (.clk, .rst_n, .start(h0s), .key, .chain(h0c), .msg(h0m),
                                        .busy(h0b), .done(h0d), .digest(h0o));
  hash_unit #(.LATENCY(HASH_LAT)) u_h1 (.clk, .rst_n, .start(h1s), .key, .chain('0), .msg(l1_hold_q),
                                        .busy(h1b), .done(h1d), .digest(h1o));
  hash_unit #(.LATENCY(HASH_LAT)) u_h2 (.clk, .rst_n, .start(h2s), .key, .chain('0), .msg(top_q),
                                        .busy(h2b), .done(h2d), .digest(h2o));

  line_t tail_msg;
  always_comb begin
    tail_msg = '0;
    tail_msg[LINE_AW-1:0] = rd_valid ? rd_addr : '0;
    tail_msg[127:64]      = rd_valid ? rd_smac : '0;
    tail_msg[128]         = rd_valid;
  end

  dig_t first_q;
  assign rd_ptr = PW'(i_q);
  assign busy   = (st_q != T_IDLE);

  always_comb begin
    h0s = 1'b0; h0c = '0; h0m = '0;
    if (st_q == T_LEAF_A && !h0b && !h0d) begin h0s = 1'b1; h0m = rd_valid ? rd_ct : '0; end
    if (st_q == T_LEAF_B && !h0b && !h0d) begin h0s = 1'b1; h0c = first_q; h0m = tail_msg; end
  end
  assign h1s = l1_pend_q && !h1b && !h1d;
  assign h2s = (st_q == T_TOP) && !h2b && !h2d;

  // a leaf stage waits on unit 0: track that it has been launched
  logic h0_go_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= T_IDLE; i_q <= '0; l1_q <= '0; top_q <= '0; l1_pend_q <= 1'b0; l1_hold_q <= '0;
      n1_q <= '0; n1_done_q <= '0; first_q <= '0; done <= 1'b0; root <= '0; h0_go_q <= 1'b0;
    end else begin
      done <= 1'b0;
      if (h0s) h0_go_q <= 1'b1;
      if (h1s) l1_pend_q <= 1'b0;
      if (h1d) begin
        top_q[DIG_BITS * n1_done_q +: DIG_BITS] <= h1o;
        n1_done_q <= n1_done_q + 1'b1;
      end
      unique case (st_q)
        T_IDLE: if (start) begin
          st_q <= T_LEAF_A; i_q <= '0; n1_q <= '0; n1_done_q <= '0; h0_go_q <= 1'b0;
        end
        T_LEAF_A: if (h0d && h0_go_q) begin
          first_q <= h0o; h0_go_q <= 1'b0; st_q <= T_LEAF_B;
        end
        T_LEAF_B: if (h0d && h0_go_q) begin
          h0_go_q <= 1'b0;
          l1_q[DIG_BITS * i_q[2:0] +: DIG_BITS] <= h0o;
          if (i_q[2:0] == 3'd7) begin
            l1_hold_q <= l1_q;
            l1_hold_q[DIG_BITS * 7 +: DIG_BITS] <= h0o;
            l1_pend_q <= 1'b1;
            n1_q <= n1_q + 1'b1;
          end
          i_q  <= i_q + 1'b1;
          st_q <= (i_q == (PW+1)'(ENTRIES - 1)) ? T_L1 : T_LEAF_A;
        end
        T_L1: if (!l1_pend_q && !h1b && !h1d && n1_done_q == ($bits(n1_done_q))'(N1)) st_q <= T_TOP;
        T_TOP: if (h2d) begin root <= h2o; st_q <= T_FIN; end
        T_FIN: begin done <= 1'b1; st_q <= T_IDLE; end
        default: st_q <= T_IDLE;
      endcase
    end
  end
  // unit 1 needs HASH_LAT cycles per node while eight leaves take 16
  // HASH_LAT cycles, so a finished level-1 node never waits on the last one
  a_l1_free: assert property (@(posedge clk) disable iff (!rst_n)
    (st_q == T_LEAF_B && h0d && h0_go_q && i_q[2:0] == 3'd7) |-> !l1_pend_q);
endmodule
