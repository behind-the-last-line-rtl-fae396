// noc_bus -- network-on-chip connecting the T2H2 units and the memory.
//
// The paper assumes only a correct network ("messages sent are eventually
// delivered, unchanged") and used a vendor AXI interconnect for it. This is
// the simplest block with that function: a shared bus with one transaction
// in flight. A round-robin arbiter picks one of NM masters, the address is
// decoded (midir_pkg map) to one of NS slaves -- slave t < NTILES is the T2H2
// of tile t, slave NTILES the shared memory -- the request is passed on for
// one cycle and the slave's response returned to the master. An address that
// maps to no slave is answered with err = 1 by the bus itself; in particular
// the capability configuration space is never routed.
//
// Timing: request taken (m_req_ready) one cycle after the arbiter sees it,
// slave sees s_req_valid the cycle after, response back at the master one
// cycle after the slave answered. A master holds m_req_valid and m_req until
// m_req_ready and has one request outstanding. A slave answers each request
// exactly once.
//
// Lint note: rst_n is also read synchronously by the handshake assertion's
// disable condition, reported by lint as mixed use; the logic resets
// asynchronously only.
module noc_bus
  import midir_pkg::*;
#(
  parameter int unsigned NTILES = 3,
  parameter int unsigned NM     = NTILES,
  parameter int unsigned NS     = NTILES + 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     m_req_valid [NM],
  input  noc_req_t m_req       [NM],
  output logic     m_req_ready [NM],
  output logic     m_rsp_valid [NM],
  output noc_rsp_t m_rsp       [NM],
  output logic     s_req_valid [NS],
  output noc_req_t s_req       [NS],
  input  logic     s_rsp_valid [NS],
  input  noc_rsp_t s_rsp       [NS]
);

  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned SW = $clog2(NS + 1);   // slave index, value NS = no slave
  localparam int unsigned SI = (NS > 1) ? $clog2(NS) : 1;

  typedef enum logic [1:0] {B_IDLE, B_SEND, B_WAIT, B_DERR} bstate_e;
  bstate_e state_q;
  logic [MW-1:0] cur_q, rr_q;
  logic [SW-1:0] tgt_q;
  noc_req_t req_q;

  function automatic logic [SW-1:0] decode(input addr_t a);
    if (a[31:28] == REGION_MEM) return SW'(NTILES);
    if (a[31:28] == REGION_T2H2 && 32'(a[27:24]) < NTILES) return SW'(a[27:24]);
    return SW'(NS);  // no slave
  endfunction

  // round-robin choice starting after the last granted master
  logic          any;
  logic [MW-1:0] pick;
  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int k = NM; k >= 1; k--) begin
      int unsigned c;
      c = (32'(rr_q) + k) % NM;
      if (m_req_valid[c]) begin
        any  = 1'b1;
        pick = MW'(c);
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NM; i++) m_req_ready[i] = (state_q == B_IDLE) && any && (32'(pick) == i);
    for (int s = 0; s < NS; s++) begin
      s_req_valid[s] = (state_q == B_SEND) && (32'(tgt_q) == s);
      s_req[s]       = req_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= B_IDLE;
      cur_q   <= '0;
      rr_q    <= '0;
      tgt_q   <= '0;
      req_q   <= '0;
      for (int i = 0; i < NM; i++) begin
        m_rsp_valid[i] <= 1'b0;
        m_rsp[i]       <= '0;
      end
    end else begin
      for (int i = 0; i < NM; i++) m_rsp_valid[i] <= 1'b0;
      unique case (state_q)
        B_IDLE: if (any) begin
          cur_q   <= pick;
          rr_q    <= pick;
          req_q   <= m_req[pick];
          tgt_q   <= decode(m_req[pick].addr);
          state_q <= (32'(decode(m_req[pick].addr)) < NS) ? B_SEND : B_DERR;
        end
        B_SEND: state_q <= B_WAIT;
        B_WAIT: if (s_rsp_valid[tgt_q[SI-1:0]]) begin
          m_rsp_valid[cur_q] <= 1'b1;
          m_rsp[cur_q]       <= s_rsp[tgt_q[SI-1:0]];
          state_q            <= B_IDLE;
        end
        B_DERR: begin
          m_rsp_valid[cur_q] <= 1'b1;
          m_rsp[cur_q]       <= '{rdata: '0, err: 1'b1};
          state_q            <= B_IDLE;
        end
        default: state_q <= B_IDLE;
      endcase
    end
  end

  for (genvar i = 0; i < NM; i++) begin : g_chk
    a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      (m_req_valid[i] && !m_req_ready[i]) |=> m_req_valid[i]);
  end

endmodule
