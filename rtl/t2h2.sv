// t2h2 -- trusted-trustworthy hardware hybrid between one tile and the NoC.
//
// The T2H2 ("blue dot") is the only path from a tile to the rest of the
// chip. It combines the paper's two baseline functions:
//   * a capability_unit that checks every tile-external operation and
//     forwards permitted ones with the capability's replica label, and
//   * NUM_VOTERS voters, reachable from any tile through the NoC slave port
//     by holders of a vote capability for them.
// Voter CFG_VOTER is the configuration voter: what it agrees on is written
// straight into this unit's capability registers (and tile-reset control)
// over an internal path that has no NoC address, so the registers can only
// be changed by a vote. All other voters apply their operations as NoC
// writes, e.g. to the syscall log in shared memory.
// Bit v of SBUF_MASK selects the single-buffer voter for voter v, the
// n-buffer voter otherwise. The paper built and measured both variants; the
// default mix (configuration and voter 1 n-buffer, voter 2 single-buffer) is
// this design's choice so that one chip carries both.
//
// NoC master port: requests of the tile (through the capability unit) and
// the apply writes of the NoC voters share it under round-robin arbitration;
// one request is outstanding at a time. NoC slave port: request decoded by
// address bits [15:12] to a voter, answered by it in the next cycle; an
// address beyond the voters is answered with err = 1.
//
// Lint note: the voters load the boot-time threshold f synchronously while
// rst_n is low (see voter_nbuf), so lint reports rst_n as used both
// synchronously and asynchronously; this is intended.
module t2h2
  import midir_pkg::*;
#(
  parameter int unsigned TILE_ID    = 0,
  parameter int unsigned NUM_CAPS   = 20,
  parameter int unsigned NUM_VOTERS = 3,
  parameter logic [15:0] SBUF_MASK  = 16'h0004,
  parameter int unsigned CFG_VOTER  = 0,
  parameter int unsigned F_MAX      = 1,
  parameter int unsigned MSG_WORDS  = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic [3:0] f_cfg,
  // boot-time capability installation
  input  logic      boot_en,
  input  logic      boot_we,
  input  logic [CIDX_W-1:0] boot_idx,
  input  cap_t      boot_cap,
  // tile side
  input  logic      t_req_valid,
  input  tile_req_t t_req,
  output logic      t_req_ready,
  output logic      t_rsp_valid,
  output tile_rsp_t t_rsp,
  output logic      tile_reset,
  output logic      denied,
  // NoC master port
  output logic      m_req_valid,
  output noc_req_t  m_req,
  input  logic      m_req_ready,
  input  logic      m_rsp_valid,
  input  noc_rsp_t  m_rsp,
  // NoC slave port
  input  logic      s_req_valid,
  input  noc_req_t  s_req,
  output logic      s_rsp_valid,
  output noc_rsp_t  s_rsp,
  // voter status (observation)
  output seq_t      voter_seq  [NUM_VOTERS],
  output logic      voter_susp [NUM_VOTERS]
);

  localparam int unsigned NSRC = NUM_VOTERS + 1;   // source 0: tile path
  localparam int unsigned SRCW = $clog2(NSRC);

  // ------------------------------------------------------------ voters
  logic     v_req_valid [NUM_VOTERS];
  logic     v_rsp_valid [NUM_VOTERS];
  noc_rsp_t v_rsp       [NUM_VOTERS];
  logic     a_valid     [NUM_VOTERS];
  addr_t    a_addr      [NUM_VOTERS];
  data_t    a_data      [NUM_VOTERS];
  logic     a_done      [NUM_VOTERS];

  logic slave_hit;
  assign slave_hit = (32'(s_req.addr[15:12]) < NUM_VOTERS) && (s_req.addr[23:16] == 8'd0);

  for (genvar v = 0; v < NUM_VOTERS; v++) begin : g_voter
    assign v_req_valid[v] = s_req_valid && slave_hit && (32'(s_req.addr[15:12]) == v);
    if (SBUF_MASK[v]) begin : g_sbuf
      voter_sbuf #(.F_MAX(F_MAX), .MSG_WORDS(MSG_WORDS)) u_voter (
        .clk, .rst_n, .f_cfg, .s_req_valid(v_req_valid[v]), .s_req,
        .s_rsp_valid(v_rsp_valid[v]), .s_rsp(v_rsp[v]),
        .a_valid(a_valid[v]), .a_addr(a_addr[v]), .a_data(a_data[v]), .a_done(a_done[v]),
        .seq(voter_seq[v]), .suspended(voter_susp[v]));
    end else begin : g_nbuf
      voter_nbuf #(.F_MAX(F_MAX), .MSG_WORDS(MSG_WORDS)) u_voter (
        .clk, .rst_n, .f_cfg, .s_req_valid(v_req_valid[v]), .s_req,
        .s_rsp_valid(v_rsp_valid[v]), .s_rsp(v_rsp[v]),
        .a_valid(a_valid[v]), .a_addr(a_addr[v]), .a_data(a_data[v]), .a_done(a_done[v]),
        .seq(voter_seq[v]), .suspended(voter_susp[v]));
    end
  end

  // slave response: the addressed voter answers; a miss is answered here
  logic miss_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) miss_q <= 1'b0;
    else        miss_q <= s_req_valid && !slave_hit;
  end
  always_comb begin
    s_rsp_valid = miss_q;
    s_rsp       = '{rdata: '0, err: 1'b1};
    for (int v = 0; v < NUM_VOTERS; v++)
      if (v_rsp_valid[v]) begin
        s_rsp_valid = 1'b1;
        s_rsp       = v_rsp[v];
      end
  end

  // ------------------------------------------------- capability unit
  logic     cu_req_valid, cu_req_ready, cu_rsp_valid;
  noc_req_t cu_req;

  capability_unit #(.NUM_CAPS(NUM_CAPS), .NODE_ID(TILE_ID)) u_caps (
    .clk, .rst_n, .boot_en, .boot_we, .boot_idx, .boot_cap,
    .cfg_valid(a_valid[CFG_VOTER]), .cfg_addr(a_addr[CFG_VOTER]), .cfg_data(a_data[CFG_VOTER]),
    .t_req_valid, .t_req, .t_req_ready, .t_rsp_valid, .t_rsp,
    .m_req_valid(cu_req_valid), .m_req(cu_req), .m_req_ready(cu_req_ready),
    .m_rsp_valid(cu_rsp_valid), .m_rsp(m_rsp),
    .tile_reset, .denied);

  // ------------------------------------------- master port arbitration
  logic src_valid [NSRC];
  always_comb begin
    src_valid[0] = cu_req_valid;
    for (int v = 0; v < NUM_VOTERS; v++)
      src_valid[v + 1] = (v != CFG_VOTER) && a_valid[v];
  end

  typedef enum logic [1:0] {M_IDLE, M_ISSUE, M_WAIT} mstate_e;
  mstate_e       mst_q;
  logic [SRCW-1:0] cur_q;

  logic          any;
  logic [SRCW-1:0] pick;
  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = NSRC; k >= 1; k--) begin
      int unsigned c;
      c = (32'(cur_q) + k) % NSRC;
      if (src_valid[c]) begin
        any  = 1'b1;
        pick = SRCW'(c);
      end
    end
  end

  always_comb begin
    m_req_valid = (mst_q == M_ISSUE);
    if (cur_q == '0) m_req = cu_req;
    else begin
      m_req       = '0;
      m_req.we    = 1'b1;
      m_req.addr  = a_addr[cur_q - 1'b1];
      m_req.wdata = a_data[cur_q - 1'b1];
      m_req.src   = NODE_W'(TILE_ID);
    end
    cu_req_ready = (mst_q == M_ISSUE) && (cur_q == '0) && m_req_ready;
    cu_rsp_valid = (mst_q == M_WAIT) && (cur_q == '0) && m_rsp_valid;
    for (int v = 0; v < NUM_VOTERS; v++)
      a_done[v] = (v == CFG_VOTER) ? a_valid[v]
                                   : ((mst_q == M_WAIT) && (32'(cur_q) == v + 1) && m_rsp_valid);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mst_q <= M_IDLE;
      cur_q <= '0;
    end else begin
      unique case (mst_q)
        M_IDLE:  if (any) begin cur_q <= pick; mst_q <= M_ISSUE; end
        M_ISSUE: if (m_req_ready) mst_q <= M_WAIT;
        M_WAIT:  if (m_rsp_valid) mst_q <= M_IDLE;
        default: mst_q <= M_IDLE;
      endcase
    end
  end

endmodule
