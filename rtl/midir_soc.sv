// midir_soc -- a Midir distributed system-on-chip: NTILES tiles, each behind
// its own T2H2, joined by the NoC, with a shared on-chip memory.
//
// Faults inside a tile (its core, its software, even a compromised
// hypervisor replica) can reach the rest of the chip only through the
// operations its T2H2 lets through: accesses allowed by one of its
// capabilities, and votes. Critical operations -- in particular any change
// of a capability register or a tile reset -- take effect only when f+1
// replicas on different tiles agree in a voter. With n = 2f+1 replicas a
// minority of f faulty tiles is outvoted.
//
// This top follows the prototype the paper evaluates: three tiles, each with
// one T2H2, on one interconnect. The tiles' cores (soft processor cores in
// the prototype) and their local memories are not part of this RTL: each
// tile's side of its T2H2 is a port of this module (tile_*), as is the
// boot-time installation of the first capabilities (boot_*) and the boot-time
// fault threshold f (f_cfg, clamped to F_MAX).
//
// Slaves on the NoC: T2H2 t (its voters) at 0x1t00_0000, the shared memory
// at 0x0000_0000 (see midir_pkg).
//
// Lint note: rst_n also serves the voters as synchronous load enable for
// the boot-time f (see voter_nbuf); lint reports this mixed use.
module midir_soc
  import midir_pkg::*;
#(
  parameter int unsigned NTILES     = 3,
  parameter int unsigned NUM_CAPS   = 20,
  parameter int unsigned NUM_VOTERS = 3,
  parameter logic [15:0] SBUF_MASK  = 16'h0004,
  parameter int unsigned F_MAX      = 1,
  parameter int unsigned MSG_WORDS  = 16,
  parameter int unsigned MEM_WORDS  = 4096
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic [3:0] f_cfg,
  input  logic      boot_en,
  input  logic      boot_we    [NTILES],
  input  logic [CIDX_W-1:0] boot_idx [NTILES],
  input  cap_t      boot_cap   [NTILES],
  input  logic      tile_req_valid [NTILES],
  input  tile_req_t tile_req       [NTILES],
  output logic      tile_req_ready [NTILES],
  output logic      tile_rsp_valid [NTILES],
  output tile_rsp_t tile_rsp       [NTILES],
  output logic      tile_reset     [NTILES],
  output logic      tile_denied    [NTILES],
  output seq_t      voter_seq  [NTILES][NUM_VOTERS],
  output logic      voter_susp [NTILES][NUM_VOTERS]
);

  localparam int unsigned NS = NTILES + 1;

  logic     m_req_valid [NTILES];
  noc_req_t m_req       [NTILES];
  logic     m_req_ready [NTILES];
  logic     m_rsp_valid [NTILES];
  noc_rsp_t m_rsp       [NTILES];
  logic     s_req_valid [NS];
  noc_req_t s_req       [NS];
  logic     s_rsp_valid [NS];
  noc_rsp_t s_rsp       [NS];

  for (genvar t = 0; t < NTILES; t++) begin : g_tile
    t2h2 #(
      .TILE_ID(t), .NUM_CAPS(NUM_CAPS), .NUM_VOTERS(NUM_VOTERS), .SBUF_MASK(SBUF_MASK),
      .CFG_VOTER(0), .F_MAX(F_MAX), .MSG_WORDS(MSG_WORDS)
    ) u_t2h2 (
      .clk, .rst_n, .f_cfg,
      .boot_en, .boot_we(boot_we[t]), .boot_idx(boot_idx[t]), .boot_cap(boot_cap[t]),
      .t_req_valid(tile_req_valid[t]), .t_req(tile_req[t]), .t_req_ready(tile_req_ready[t]),
      .t_rsp_valid(tile_rsp_valid[t]), .t_rsp(tile_rsp[t]),
      .tile_reset(tile_reset[t]), .denied(tile_denied[t]),
      .m_req_valid(m_req_valid[t]), .m_req(m_req[t]), .m_req_ready(m_req_ready[t]),
      .m_rsp_valid(m_rsp_valid[t]), .m_rsp(m_rsp[t]),
      .s_req_valid(s_req_valid[t]), .s_req(s_req[t]),
      .s_rsp_valid(s_rsp_valid[t]), .s_rsp(s_rsp[t]),
      .voter_seq(voter_seq[t]), .voter_susp(voter_susp[t]));
  end

  noc_bus #(.NTILES(NTILES), .NM(NTILES), .NS(NS)) u_noc (
    .clk, .rst_n,
    .m_req_valid, .m_req, .m_req_ready, .m_rsp_valid, .m_rsp,
    .s_req_valid, .s_req, .s_rsp_valid, .s_rsp);

  shared_mem #(.MEM_WORDS(MEM_WORDS)) u_mem (
    .clk, .rst_n,
    .s_req_valid(s_req_valid[NTILES]), .s_req(s_req[NTILES]),
    .s_rsp_valid(s_rsp_valid[NTILES]), .s_rsp(s_rsp[NTILES]));

endmodule
