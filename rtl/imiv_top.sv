// imiv_top: secure-NVM system with in-memory integrity verification.
//
// Joins the memory controller's encryption engine (imiv_ee) and the
// NVDIMM's integrity verification engine (imiv_ive) over the memory bus.
// Confidentiality (counter-mode encryption) and SMACs stay on the CPU side;
// counters and the whole Bonsai Merkle tree are maintained and verified on
// the DIMM, so tree nodes never use bus bandwidth. The bus is untrusted:
// counters fetched without any cached anchor travel encrypted under a nonce,
// and every write's SMAC is checked again on the DIMM.
//
// The bus is a request channel (valid/ready) and a response channel
// (valid/ready) of imiv_pkg::bus_req_t / bus_rsp_t. Two tap ports model an
// attacker on it: while atk_req_en is high the ciphertext of requests is
// replaced by atk_req_data, and while atk_rsp_en is high the data of
// responses is replaced by atk_rsp_data; bus_rsp_snoop shows the responses
// as they travel, so an old one can be replayed. Tie the enables low in a
// real system. The media port leads to the DIMM's internal buffers and
// storage media, which are outside this design; power_down comes from the
// platform's power-fail detection, and the recovery values (BMT root, PHT
// root, number of saved writes) come from the DIMM's trusted retention.
module imiv_top #(
  parameter int unsigned SETS       = 64,
  parameter int unsigned WAYS       = 8,
  parameter int unsigned QDEPTH     = 12,
  parameter int unsigned PWRQ_DEPTH = 64,
  parameter int unsigned PRRQ_DEPTH = 16,
  parameter int unsigned BTT_ENTRIES = 9,
  parameter int unsigned HASH_LAT   = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [127:0]         k_aes,
  input  imiv_pkg::dig_t       k_mac,
  input  logic [127:0]         k_nonce,
  input  logic [63:0]          nonce_seed,
  // CPU (last-level cache misses and flushes)
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
  // bus taps (attack model)
  input  logic                 atk_req_en,
  input  imiv_pkg::line_t      atk_req_data,
  input  logic                 atk_rsp_en,
  input  imiv_pkg::line_t      atk_rsp_data,
  output logic                 bus_rsp_snoop_valid,
  output imiv_pkg::bus_rsp_t   bus_rsp_snoop,
  // storage media
  output logic                 m_req_valid,
  input  logic                 m_req_ready,
  output imiv_pkg::media_req_t m_req,
  input  logic                 m_rsp_valid,
  input  imiv_pkg::line_t      m_rsp_data,
  // power down / recovery
  input  logic                 power_down,
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
  // events
  output logic                 ee_ev_valid,
  output logic                 ee_ev_write,
  output logic [1:0]           ee_ev_case,
  output logic                 reenc_req,
  output logic [6:0]           ive_ev         // {drain, launch, nonce_enc, smac_fail, verify_fail, node_media, ctr_fwd}
);
  import imiv_pkg::*;

  logic     ee_req_valid, ee_req_ready, ee_rsp_ready, ive_rsp_valid;
  bus_req_t ee_req, ive_req;
  bus_rsp_t ive_rsp, ee_rsp;

  logic ee_wr_flushed;   // EE write path empty: ADR flush complete
  imiv_ee #(.SETS(SETS), .WAYS(WAYS), .QDEPTH(QDEPTH), .HASH_LAT(HASH_LAT)) u_ee (
    .clk, .rst_n, .k_aes, .k_mac, .k_nonce, .nonce_seed, .power_down, .wr_flushed(ee_wr_flushed),
    .cpu_req_valid, .cpu_req_ready, .cpu_req_write, .cpu_req_addr, .cpu_req_data,
    .cpu_rsp_valid, .cpu_rsp_write, .cpu_rsp_addr, .cpu_rsp_data, .cpu_rsp_err,
    .bus_req_valid(ee_req_valid), .bus_req_ready(ee_req_ready), .bus_req(ee_req),
    .bus_rsp_valid(ive_rsp_valid), .bus_rsp_ready(ee_rsp_ready), .bus_rsp(ee_rsp),
    .ev_valid(ee_ev_valid), .ev_write(ee_ev_write), .ev_case(ee_ev_case), .reenc_req);

  // memory bus with attacker taps
  always_comb begin
    ive_req = ee_req;
    if (atk_req_en) ive_req.data = atk_req_data;
    ee_rsp = ive_rsp;
    if (atk_rsp_en) ee_rsp.data = atk_rsp_data;
  end
  assign bus_rsp_snoop_valid = ive_rsp_valid && ee_rsp_ready;
  assign bus_rsp_snoop       = ive_rsp;

  imiv_ive #(.PWRQ_DEPTH(PWRQ_DEPTH), .PRRQ_DEPTH(PRRQ_DEPTH), .BTT_ENTRIES(BTT_ENTRIES),
             .SETS(SETS), .WAYS(WAYS), .HASH_LAT(HASH_LAT)) u_ive (
    .clk, .rst_n, .k_mac, .k_nonce,
    .bus_req_valid(ee_req_valid), .bus_req_ready(ee_req_ready), .bus_req(ive_req),
    .bus_rsp_valid(ive_rsp_valid), .bus_rsp_ready(ee_rsp_ready), .bus_rsp(ive_rsp),
    .m_req_valid, .m_req_ready, .m_req, .m_rsp_valid, .m_rsp_data,
    .power_down, .pd_wpq_empty(ee_wr_flushed), .pd_done, .pht_root, .n_saved, .bmt_root, .recover, .rec_bmt_root,
    .rec_pht_root, .rec_n, .rec_done, .rec_fail,
    .ev_ctr_fwd(ive_ev[0]), .ev_node_media(ive_ev[1]), .ev_verify_fail(ive_ev[2]),
    .ev_smac_fail(ive_ev[3]), .ev_nonce_enc(ive_ev[4]), .ev_launch(ive_ev[5]),
    .ev_drain(ive_ev[6]));
endmodule
