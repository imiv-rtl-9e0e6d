// nvm_media: behavioural model of the NVDIMM's storage media behind its
// internal buffers (testbench only).
//
// Sparse storage of 64-byte blocks per kind (ciphertext, counter block,
// SMAC block, tree node by level; level 15 is the power-down save area).
// Never-written blocks read as the contents of a freshly initialised
// secure DIMM: zero ciphertext and counters, SMACs of those, and tree nodes
// of an all-zero counter tree. Writes honour the byte mask. One request is
// accepted per cycle; a read answers LAT cycles later, in order.
// tamper() lets a test corrupt a stored block.
module nvm_media #(
  parameter int unsigned LAT = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  imiv_pkg::dig_t       k_mac,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  imiv_pkg::media_req_t req,
  output logic                 rsp_valid,
  output imiv_pkg::line_t      rsp_data
);
  import imiv_pkg::*;

  line_t mem [logic [40:0]];
  int    n_writes = 0, n_reads = 0;
  int    n_node_writes = 0, n_upper_writes = 0;

  function automatic logic [40:0] key_of(kind_e k, logic [3:0] l, logic [LINE_AW-1:0] i);
    return {k, l, 2'b00, i};
  endfunction

  function automatic line_t dflt(kind_e k, logic [3:0] l, logic [LINE_AW-1:0] i);
    line_t r = '0;
    unique case (k)
      K_SMAC: for (int s = 0; s < 8; s++)
                r[64*s +: 64] = smac_ref(k_mac, '0, laddr_t'({i[LINE_AW-4:0], 3'(s)}), '0);
      K_NODE: if (l != 4'hf && l != 0) r = {ARITY{zero_digest('0, int'(l) - 1)}};
      default: r = '0;
    endcase
    return r;
  endfunction

  function automatic line_t peek(kind_e k, logic [3:0] l, logic [LINE_AW-1:0] i);
    logic [40:0] key = key_of(k, l, i);
    return mem.exists(key) ? mem[key] : dflt(k, l, i);
  endfunction

  function automatic void tamper(kind_e k, logic [3:0] l, logic [LINE_AW-1:0] i, line_t v);
    mem[key_of(k, l, i)] = v;
  endfunction

  line_t pipe_d [LAT];
  logic  pipe_v [LAT];

  assign req_ready = 1'b1;
  assign rsp_valid = pipe_v[LAT-1];
  assign rsp_data  = pipe_d[LAT-1];

  // the testbenches keep rst_n high so that the media survives a reset of
  // the design, so the response pipe also starts empty at time 0
  initial for (int i = 0; i < LAT; i++) pipe_v[i] = 1'b0;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pipe_v[i] <= 1'b0;
    end else begin
      for (int i = LAT - 1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
      pipe_v[0] <= 1'b0;
      if (req_valid) begin
        if (req.write) begin
          automatic line_t old = peek(req.kind, req.level, req.idx);
          for (int b = 0; b < 64; b++) if (req.bmask[b]) old[8*b +: 8] = req.data[8*b +: 8];
          mem[key_of(req.kind, req.level, req.idx)] = old;
          n_writes++;
          if (req.kind == K_NODE && req.level != 4'hf) begin
            n_node_writes++;
            if (req.level > 4'(LOWER_LVLS)) n_upper_writes++;
          end
        end else begin
          pipe_v[0] <= 1'b1;
          pipe_d[0] <= peek(req.kind, req.level, req.idx);
          n_reads++;
        end
      end
    end
  end
endmodule
