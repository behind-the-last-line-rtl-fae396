// capability_unit -- capability register file and privilege check of one T2H2.
//
// Every tile-external operation of the tile names one of NUM_CAPS capability
// registers. A capability grants read and/or write rights on the address
// region [base, base+size) and carries a replica label. An operation passes
// when the register is valid, the address lies in the region and the right
// for the access is held; it is then forwarded to the NoC with the label and
// the capability's vote flag inserted. Otherwise it is dropped: nothing goes
// onto the NoC and the tile only sees a response with err = 1.
// Following the paper, the registers cannot be changed by the tile: the only
// run-time write path is cfg_*, which the T2H2 wires to the output of its
// configuration voter. The same path holds the voted tile-reset control.
//
// Own choices: the boot port (boot_*) that installs the initial capabilities
// while boot_en is high, locked for good once boot_en falls; the region is
// half open; a denied operation is answered to the tile with err = 1 so a
// blocked read does not hang the core; tile reset is a level set by a voted
// write of 1 and cleared by a voted write of 0.
//
// Timing: a permitted request is accepted (t_req_ready) in the cycle it is
// seen and presented on m_req one cycle later; the tile response follows the
// NoC response by one cycle. A denied request is answered one cycle after it
// is accepted. One operation is outstanding at a time.
//
// Lint notes: rst_n is also read synchronously by the handshake assertion's
// disable condition, which lint reports as mixed synchronous/asynchronous use;
// the logic itself resets asynchronously only. The four source-id bits of
// m_req are a constant (NODE_ID) by design.
module capability_unit
  import midir_pkg::*;
#(
  parameter int unsigned NUM_CAPS = 20,
  parameter int unsigned NODE_ID  = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  // boot-time installation of capabilities
  input  logic      boot_en,
  input  logic      boot_we,
  input  logic [CIDX_W-1:0] boot_idx,
  input  cap_t      boot_cap,
  // voted configuration interface (from the configuration voter)
  input  logic      cfg_valid,
  input  addr_t     cfg_addr,
  input  data_t     cfg_data,
  // tile side
  input  logic      t_req_valid,
  input  tile_req_t t_req,
  output logic      t_req_ready,
  output logic      t_rsp_valid,
  output tile_rsp_t t_rsp,
  // NoC master side
  output logic      m_req_valid,
  output noc_req_t  m_req,
  input  logic      m_req_ready,
  input  logic      m_rsp_valid,
  input  noc_rsp_t  m_rsp,
  // tile control
  output logic      tile_reset,
  output logic      denied       // one-cycle pulse per dropped operation
);

  localparam int unsigned IW = (NUM_CAPS > 1) ? $clog2(NUM_CAPS) : 1;

  cap_t caps_q [NUM_CAPS];
  logic booted_q;

  typedef enum logic [1:0] {C_IDLE, C_ISSUE, C_WAIT, C_DENY} cstate_e;
  cstate_e state_q;

  // ---------------------------------------------------------------- check
  cap_t  sel;
  logic  idx_ok, in_region, right_ok, permit;
  addr_t offs;

  always_comb begin
    idx_ok = (32'(t_req.cap) < NUM_CAPS);
    sel    = idx_ok ? caps_q[t_req.cap[IW-1:0]] : '0;
    offs   = t_req.addr - sel.base;
    in_region = (t_req.addr >= sel.base) && (offs < sel.size);
    right_ok  = t_req.we ? sel.w : sel.r;
    permit    = idx_ok && sel.valid && in_region && right_ok;
  end

  assign t_req_ready = (state_q == C_IDLE);
  assign m_req_valid = (state_q == C_ISSUE);
  assign denied      = (state_q == C_IDLE) && t_req_valid && !permit;

  // ------------------------------------------------------- request path
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= C_IDLE;
      m_req       <= '0;
      t_rsp_valid <= 1'b0;
      t_rsp       <= '0;
    end else begin
      t_rsp_valid <= 1'b0;
      unique case (state_q)
        C_IDLE: if (t_req_valid) begin
          if (permit) begin
            m_req.we    <= t_req.we;
            m_req.addr  <= t_req.addr;
            m_req.wdata <= t_req.wdata;
            m_req.vote  <= sel.vote;
            m_req.label <= sel.label;
            m_req.src   <= NODE_W'(NODE_ID);
            state_q     <= C_ISSUE;
          end else begin
            state_q     <= C_DENY;
          end
        end
        C_ISSUE: if (m_req_ready) state_q <= C_WAIT;
        C_WAIT: if (m_rsp_valid) begin
          t_rsp_valid <= 1'b1;
          t_rsp.rdata <= m_rsp.rdata;
          t_rsp.err   <= m_rsp.err;
          state_q     <= C_IDLE;
        end
        C_DENY: begin
          t_rsp_valid <= 1'b1;
          t_rsp.rdata <= '0;
          t_rsp.err   <= 1'b1;
          state_q     <= C_IDLE;
        end
        default: state_q <= C_IDLE;
      endcase
    end
  end

  // ------------------------------------------------ capability registers
  logic [7:0] cfg_idx;
  logic [1:0] cfg_field;
  assign cfg_idx   = cfg_addr[11:4];
  assign cfg_field = cfg_addr[3:2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_CAPS; i++) caps_q[i] <= '0;
      booted_q   <= 1'b0;
      tile_reset <= 1'b0;
    end else begin
      if (!boot_en) booted_q <= 1'b1;
      if (boot_en && !booted_q && boot_we && 32'(boot_idx) < NUM_CAPS)
        caps_q[boot_idx[IW-1:0]] <= boot_cap;
      if (cfg_valid && cfg_addr[31:28] == REGION_CFG) begin
        if (cfg_idx == CF_TILE_CTRL_IDX) begin
          if (cfg_field == CF_BASE) tile_reset <= cfg_data[0];
        end else if (32'(cfg_idx) < NUM_CAPS) begin
          unique case (cfg_field)
            CF_BASE:  caps_q[cfg_idx[IW-1:0]].base <= cfg_data;
            CF_SIZE:  caps_q[cfg_idx[IW-1:0]].size <= cfg_data;
            CF_FLAGS: begin
              caps_q[cfg_idx[IW-1:0]].valid <= cfg_data[0];
              caps_q[cfg_idx[IW-1:0]].r     <= cfg_data[1];
              caps_q[cfg_idx[IW-1:0]].w     <= cfg_data[2];
              caps_q[cfg_idx[IW-1:0]].vote  <= cfg_data[3];
              caps_q[cfg_idx[IW-1:0]].label <= cfg_data[4 +: RID_W];
            end
            default: ;
          endcase
        end
      end
    end
  end

  // A request must stay stable until the NoC takes it.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_req_valid && !m_req_ready) |=> (m_req_valid && $stable(m_req)));

endmodule
