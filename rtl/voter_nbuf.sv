// voter_nbuf -- n-buffer voter of the T2H2 (immediate fault masking).
//
// The voter holds one proposal buffer per replica, dimensioned for
// n_max = 2*F_MAX+1 replicas; the fault threshold f <= F_MAX is loaded from
// f_cfg while in reset (boot time) and only replicas 0..2f are active.
// Replica r, identified by the label its T2H2 inserted from r's vote
// capability, writes its message into buffer r and marks it complete with a
// COMMIT carrying the voter's current sequence number and the message size.
// A committed buffer cannot be changed any more. After every commit all
// committed buffers are compared pairwise; as soon as f+1 of them match the
// operation is applied (vote_apply). If at that moment every committed
// buffer matched, the vote succeeded: the buffers are cleared and seq
// advances. If one diverged, the voter is suspended after applying: seq stays
// and the buffers stay frozen for replicas to introspect. When all n buffers
// are committed without f+1 matching, the voter is suspended without
// applying. While suspended only non-destructive writes (into buffers not yet
// committed) are taken. A reset is itself voted: RESET writes carrying the
// current seq set one bit per replica; with f+1 bits set the voter clears all
// buffers and vectors, advances seq by one and resumes.
//
// All of this follows the paper's description of the n-buffer variant. Own
// choices: the register map (midir_pkg VR_*), that writes carry seq only in
// COMMIT and RESET, that writes for a stale seq are refused (err = 1) rather
// than buffered, that seq advances only after the agreed write has landed,
// and that writes arriving while the operation is being applied are refused.
//
// Interface: NoC slave port (one request at a time, answered in the next
// cycle) and an apply port that issues the agreed writes one by one.
//
// Lint note: f is loaded on clock edges while rst_n is low, so rst_n is used
// both as asynchronous reset and as a synchronous load enable; intended.
module voter_nbuf
  import midir_pkg::*;
#(
  parameter int unsigned F_MAX     = 1,
  parameter int unsigned MSG_WORDS = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic [3:0] f_cfg,
  // NoC slave port
  input  logic     s_req_valid,
  input  noc_req_t s_req,
  output logic     s_rsp_valid,
  output noc_rsp_t s_rsp,
  // apply port
  output logic     a_valid,
  output addr_t    a_addr,
  output data_t    a_data,
  input  logic     a_done,
  // status
  output seq_t     seq,
  output logic     suspended
);

  localparam int unsigned N_MAX = 2 * F_MAX + 1;
  localparam int unsigned WI_W  = $clog2(MSG_WORDS);
  localparam int unsigned LI_W  = (N_MAX > 1) ? $clog2(N_MAX) : 1;  // replica index width

  function automatic logic [3:0] popcnt(input logic [N_MAX-1:0] v);
    logic [3:0] c;
    c = '0;
    for (int i = 0; i < N_MAX; i++) c = c + {3'd0, v[i]};
    return c;
  endfunction

  data_t      buf_q  [N_MAX][MSG_WORDS];
  logic [7:0] size_q [N_MAX];
  logic [N_MAX-1:0] com_q, rst_q;
  seq_t       seq_q;
  logic [3:0] f_q;
  vstate_e    state_q;
  vote_outcome_e out_q;
  logic       applied_q, susp_after_q;
  logic [$clog2(N_MAX+1)-1:0] win_q;

  assign seq       = seq_q;
  assign suspended = (state_q == V_SUSP);

  // --------------------------------------------------------- active set
  logic [3:0] n;
  logic [N_MAX-1:0] active;
  always_comb begin
    n = 4'(2 * f_q + 1);
    for (int i = 0; i < N_MAX; i++) active[i] = (i < 32'(n));
  end

  // --------------------------------------------------- pairwise compare
  logic [N_MAX-1:0] eq [N_MAX];
  always_comb begin
    for (int i = 0; i < N_MAX; i++)
      for (int j = 0; j < N_MAX; j++) begin
        eq[i][j] = com_q[i] && com_q[j] && (size_q[i] == size_q[j]);
        for (int w = 0; w < MSG_WORDS; w++)
          if (w < 32'(size_q[i]) && buf_q[i][w] != buf_q[j][w]) eq[i][j] = 1'b0;
      end
  end

  logic       have_win, diverge;
  logic [$clog2(N_MAX+1)-1:0] win;
  always_comb begin
    have_win = 1'b0;
    win      = '0;
    for (int i = N_MAX - 1; i >= 0; i--) begin
      if (com_q[i] && popcnt(eq[i]) >= 4'(f_q + 4'd1)) begin
        have_win = 1'b1;
        win      = ($bits(win))'(i);
      end
    end
    // a committed buffer that differs from the winner is a divergence
    diverge = |(com_q & ~eq[win]);
  end

  logic all_com;
  assign all_com = ((com_q & active) == active);

  logic do_reset;
  assign do_reset = (state_q != V_APPLY) && (popcnt(rst_q & active) >= 4'(f_q + 4'd1));

  // ------------------------------------------------------------- apply
  logic ap_start, ap_busy, ap_done;
  assign ap_start = (state_q == V_VOTE) && have_win && !do_reset;
  vote_apply #(.MSG_WORDS(MSG_WORDS)) u_apply (
    .clk, .rst_n, .start(ap_start), .msg(buf_q[ap_start ? win : win_q]),
    .size(size_q[ap_start ? win : win_q]), .busy(ap_busy), .done(ap_done),
    .a_valid, .a_addr, .a_data, .a_done);

  // ----------------------------------------------------- request decode
  logic [11:0] off;
  logic        lab_ok, wr;
  rid_t        lab;
  logic [LI_W-1:0] li;
  logic [2:0]  rsel;      // buffer selected by offset
  logic [WI_W-1:0] wsel;
  assign off    = s_req.addr[11:0];
  assign lab    = s_req.label;
  assign li     = lab[LI_W-1:0];   // used only when lab_ok (lab < n <= N_MAX)
  assign lab_ok = s_req.vote && (32'(lab) < 32'(n));
  assign wr     = s_req_valid && s_req.we;
  assign rsel   = off[8:6];
  assign wsel   = off[2 +: WI_W];

  logic       in_buf;
  assign in_buf = (off[11:9] == 3'b010) && (32'(rsel) < N_MAX) && (32'(off[5:2]) < MSG_WORDS);

  logic acc_buf, acc_com, acc_rst;
  always_comb begin
    acc_buf = wr && lab_ok && in_buf && (32'(rsel) == 32'(lab)) && (state_q != V_APPLY)
              && !com_q[li];
    acc_com = wr && lab_ok && (off == VR_COMMIT) && (state_q != V_APPLY) && !com_q[li]
              && (s_req.wdata[SEQ_W-1:0] == seq_q)
              && (s_req.wdata[23:16] != 8'd0) && (32'(s_req.wdata[23:16]) <= MSG_WORDS);
    acc_rst = wr && lab_ok && (off == VR_RESET) && (s_req.wdata[SEQ_W-1:0] == seq_q);
  end

  data_t rdata;
  always_comb begin
    rdata = '0;
    if (off == VR_SEQ)         rdata = data_t'(seq_q);
    else if (off == VR_STATUS) begin
      rdata[ST_SUSP_BIT]    = (state_q == V_SUSP);
      rdata[ST_APPLY_BIT]   = (state_q == V_APPLY);
      rdata[ST_APPLIED_BIT] = applied_q;
      rdata[ST_OUT_LSB +: 2] = out_q;
      rdata[ST_F_LSB +: 4]  = f_q;
    end
    else if (off == VR_RESET)  rdata = data_t'(rst_q);
    else if (off == VR_AGRVEC) rdata = data_t'(com_q);
    else if (off >= VR_SIZE && off < VR_SIZE + 12'(4 * N_MAX)) rdata = data_t'(size_q[off[2 +: LI_W]]);
    else if (in_buf)           rdata = buf_q[rsel[LI_W-1:0]][wsel];
  end

  // fault threshold, loaded while reset is held (boot time)
  always_ff @(posedge clk) begin
    if (!rst_n) f_q <= (32'(f_cfg) > F_MAX) ? 4'(F_MAX) : f_cfg;
  end

  // ---------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_MAX; i++) begin
        size_q[i] <= '0;
        for (int w = 0; w < MSG_WORDS; w++) buf_q[i][w] <= '0;
      end
      com_q        <= '0;
      rst_q        <= '0;
      seq_q        <= '0;
      state_q      <= V_VOTE;
      out_q        <= OUT_NONE;
      applied_q    <= 1'b0;
      susp_after_q <= 1'b0;
      win_q        <= '0;
      s_rsp_valid  <= 1'b0;
      s_rsp        <= '0;
    end else begin
      // slave response, one cycle after the request
      s_rsp_valid <= s_req_valid;
      s_rsp.rdata <= s_req.we ? '0 : rdata;
      s_rsp.err   <= s_req.we ? !(acc_buf || acc_com || acc_rst) : !s_req.vote;

      if (acc_buf) buf_q[li][wsel] <= s_req.wdata;
      if (acc_com) begin
        com_q[li]  <= 1'b1;
        size_q[li] <= s_req.wdata[23:16];
      end
      if (acc_rst) rst_q[li] <= 1'b1;

      if (do_reset) begin
        for (int i = 0; i < N_MAX; i++) begin
          size_q[i] <= '0;
          for (int w = 0; w < MSG_WORDS; w++) buf_q[i][w] <= '0;
        end
        com_q     <= '0;
        rst_q     <= '0;
        seq_q     <= seq_q + 1'b1;
        state_q   <= V_VOTE;
        out_q     <= OUT_NONE;
        applied_q <= 1'b0;
      end else begin
        unique case (state_q)
          V_VOTE: begin
            if (have_win) begin
              state_q      <= V_APPLY;
              win_q        <= win;
              out_q        <= OUT_AGREED;
              susp_after_q <= diverge;
            end else if (all_com) begin
              state_q <= V_SUSP;
              out_q   <= OUT_REJECTED;
            end
          end
          V_APPLY: if (ap_done) begin
            applied_q <= 1'b1;
            if (susp_after_q) state_q <= V_SUSP;
            else begin
              for (int i = 0; i < N_MAX; i++) size_q[i] <= '0;
              com_q     <= '0;
              rst_q     <= '0;
              seq_q     <= seq_q + 1'b1;
              state_q   <= V_VOTE;
              out_q     <= OUT_NONE;
              applied_q <= 1'b0;
            end
          end
          default: ;
        endcase
      end
    end
  end

  a_no_apply_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    a_valid |-> (state_q == V_APPLY));

endmodule
