// voter_sbuf -- single-buffer voter of the T2H2 (leader/follower voting).
//
// There is one message buffer. Only the current leader, replica
// seq mod n, may write it; the leader marks its proposal complete with a
// COMMIT carrying seq and the message size, after which the buffer is locked
// and the leader's own agreement cell reads Agree. Followers introspect the
// buffer and write their cell of the agreement vector (AGREE, carrying seq and
// a 2-bit value): Agree, Disagree or Timeout. Cells only change in
// non-destructive ways: empty -> any value, Timeout -> Agree/Disagree.
// Majority gates over the vector decide the vote:
//   f+1 Agree    -> the buffered operation is applied (vote_apply);
//   f+1 Disagree -> the proposal is invalid and is not applied;
//   f+1 Timeout  -> the vote failed; replicas log it and reset, which rotates
//                   the leader because the reset advances seq.
// A vote that ends with every written cell equal to the outcome succeeded:
// the buffer and vector are cleared and seq advances. Any diverging cell
// (a Disagree against an applied proposal, the leader's Agree against a
// rejected one, any timeout outcome) suspends the voter with its state frozen
// for diagnosis. Reset is voted over the reset vector exactly as in the
// n-buffer voter: f+1 RESET writes with the current seq clear everything and
// advance seq by one.
//
// The leader rule, the lock, the agreement vector, the three outcomes and
// the voted reset follow the paper. The paper calls the cells tri-state
// (A, D, empty) but also lets an empty cell become timeout, agree or
// disagree; the cells here therefore hold four values in 2 bits. The register
// map, the Agree implied by the leader's commit and the timeout outcome
// always suspending are this design's own choices.
//
// Interface and timing as voter_nbuf: NoC slave port answered in the next
// cycle, apply port issuing the agreed writes one by one; the decision is
// taken in the cycle after the deciding cell was written.
//
// Lint note: f is loaded on clock edges while rst_n is low, so rst_n is used
// both as asynchronous reset and as a synchronous load enable; intended.
module voter_sbuf
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

  data_t      buf_q [MSG_WORDS];
  logic [7:0] size_q;
  logic       ready_q;                  // leader proposal complete, buffer locked
  agr_e       agr_q [N_MAX];
  logic [N_MAX-1:0] rst_q;
  seq_t       seq_q;
  logic [3:0] f_q;
  vstate_e    state_q;
  vote_outcome_e out_q;
  logic       applied_q, susp_after_q;

  assign seq       = seq_q;
  assign suspended = (state_q == V_SUSP);

  logic [3:0] n;
  logic [N_MAX-1:0] active;
  rid_t leader;
  always_comb begin
    n = 4'(2 * f_q + 1);
    for (int i = 0; i < N_MAX; i++) active[i] = (i < 32'(n));
    leader = rid_t'(seq_q % SEQ_W'(n));
  end

  // ----------------------------------------------------- majority gates
  logic [N_MAX-1:0] is_a, is_d, is_t, is_w;
  always_comb begin
    for (int i = 0; i < N_MAX; i++) begin
      is_a[i] = active[i] && (agr_q[i] == AGR_AGREE);
      is_d[i] = active[i] && (agr_q[i] == AGR_DISAGREE);
      is_t[i] = active[i] && (agr_q[i] == AGR_TIMEOUT);
      is_w[i] = active[i] && (agr_q[i] != AGR_EMPTY);
    end
  end

  logic q_agree, q_disagree, q_timeout;
  assign q_agree    = ready_q && (popcnt(is_a) >= 4'(f_q + 4'd1));
  assign q_disagree = (popcnt(is_d) >= 4'(f_q + 4'd1));
  assign q_timeout  = (popcnt(is_t) >= 4'(f_q + 4'd1));

  logic do_reset;
  assign do_reset = (state_q != V_APPLY) && (popcnt(rst_q & active) >= 4'(f_q + 4'd1));

  // ------------------------------------------------------------- apply
  logic ap_start, ap_busy, ap_done;
  assign ap_start = (state_q == V_VOTE) && q_agree && !do_reset;
  vote_apply #(.MSG_WORDS(MSG_WORDS)) u_apply (
    .clk, .rst_n, .start(ap_start), .msg(buf_q), .size(size_q),
    .busy(ap_busy), .done(ap_done), .a_valid, .a_addr, .a_data, .a_done);

  // ----------------------------------------------------- request decode
  logic [11:0] off;
  logic        lab_ok, wr, in_buf;
  rid_t        lab;
  logic [LI_W-1:0] li;
  logic [WI_W-1:0] wsel;
  agr_e        val;
  assign off    = s_req.addr[11:0];
  assign lab    = s_req.label;
  assign li     = lab[LI_W-1:0];   // used only when lab_ok (lab < n <= N_MAX)
  assign lab_ok = s_req.vote && (32'(lab) < 32'(n));
  assign wr     = s_req_valid && s_req.we;
  assign wsel   = off[2 +: WI_W];
  assign in_buf = (off[11:6] == VR_BUF[11:6]) && (32'(off[5:2]) < MSG_WORDS);
  assign val    = agr_e'(s_req.wdata[17:16]);

  logic acc_buf, acc_com, acc_agr, acc_rst, seq_ok, cell_ok;
  always_comb begin
    seq_ok  = (s_req.wdata[SEQ_W-1:0] == seq_q);
    acc_buf = wr && lab_ok && in_buf && (lab == leader) && !ready_q && (state_q == V_VOTE);
    acc_com = wr && lab_ok && (off == VR_COMMIT) && (lab == leader) && !ready_q
              && (state_q == V_VOTE) && seq_ok && (agr_q[li] == AGR_EMPTY)
              && (s_req.wdata[23:16] != 8'd0) && (32'(s_req.wdata[23:16]) <= MSG_WORDS);
    // non-destructive cell updates only; Agree/Disagree need a complete proposal
    unique case (agr_q[li])
      AGR_EMPTY:   cell_ok = (val == AGR_TIMEOUT) || ((val != AGR_EMPTY) && ready_q);
      AGR_TIMEOUT: cell_ok = ((val == AGR_AGREE) || (val == AGR_DISAGREE)) && ready_q;
      default:     cell_ok = 1'b0;
    endcase
    acc_agr = wr && lab_ok && (off == VR_AGREE) && (state_q != V_APPLY) && seq_ok && cell_ok;
    acc_rst = wr && lab_ok && (off == VR_RESET) && seq_ok;
  end

  logic [2*N_MAX-1:0] agr_flat;
  always_comb for (int i = 0; i < N_MAX; i++) agr_flat[2*i +: 2] = agr_q[i];

  data_t rdata;
  always_comb begin
    rdata = '0;
    if (off == VR_SEQ)         rdata = data_t'(seq_q);
    else if (off == VR_STATUS) begin
      rdata[ST_SUSP_BIT]    = (state_q == V_SUSP);
      rdata[ST_APPLY_BIT]   = (state_q == V_APPLY);
      rdata[ST_APPLIED_BIT] = applied_q;
      rdata[3]              = ready_q;
      rdata[ST_OUT_LSB +: 2] = out_q;
      rdata[ST_F_LSB +: 4]  = f_q;
    end
    else if (off == VR_RESET)  rdata = data_t'(rst_q);
    else if (off == VR_AGRVEC) rdata = data_t'(agr_flat);
    else if (off == VR_LEADER) rdata = {16'd0, size_q, 5'd0, leader};
    else if (in_buf)           rdata = buf_q[wsel];
  end

  // fault threshold, loaded while reset is held (boot time)
  always_ff @(posedge clk) begin
    if (!rst_n) f_q <= (32'(f_cfg) > F_MAX) ? 4'(F_MAX) : f_cfg;
  end

  // ---------------------------------------------------------- registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < MSG_WORDS; w++) buf_q[w] <= '0;
      for (int i = 0; i < N_MAX; i++) agr_q[i] <= AGR_EMPTY;
      size_q       <= '0;
      ready_q      <= 1'b0;
      rst_q        <= '0;
      seq_q        <= '0;
      state_q      <= V_VOTE;
      out_q        <= OUT_NONE;
      applied_q    <= 1'b0;
      susp_after_q <= 1'b0;
      s_rsp_valid  <= 1'b0;
      s_rsp        <= '0;
    end else begin
      s_rsp_valid <= s_req_valid;
      s_rsp.rdata <= s_req.we ? '0 : rdata;
      s_rsp.err   <= s_req.we ? !(acc_buf || acc_com || acc_agr || acc_rst) : !s_req.vote;

      if (acc_buf) buf_q[wsel] <= s_req.wdata;
      if (acc_com) begin
        ready_q     <= 1'b1;
        size_q      <= s_req.wdata[23:16];
        agr_q[li]  <= AGR_AGREE;
      end
      if (acc_agr) agr_q[li] <= val;
      if (acc_rst) rst_q[li] <= 1'b1;

      if (do_reset) begin
        for (int w = 0; w < MSG_WORDS; w++) buf_q[w] <= '0;
        for (int i = 0; i < N_MAX; i++) agr_q[i] <= AGR_EMPTY;
        size_q    <= '0;
        ready_q   <= 1'b0;
        rst_q     <= '0;
        seq_q     <= seq_q + 1'b1;
        state_q   <= V_VOTE;
        out_q     <= OUT_NONE;
        applied_q <= 1'b0;
      end else begin
        unique case (state_q)
          V_VOTE: begin
            if (q_agree) begin
              state_q      <= V_APPLY;
              out_q        <= OUT_AGREED;
              susp_after_q <= (is_a != is_w);
            end else if (q_disagree) begin
              state_q <= V_SUSP;
              out_q   <= OUT_REJECTED;
            end else if (q_timeout) begin
              state_q <= V_SUSP;
              out_q   <= OUT_TIMEOUT;
            end
          end
          V_APPLY: if (ap_done) begin
            applied_q <= 1'b1;
            if (susp_after_q) state_q <= V_SUSP;
            else begin
              for (int i = 0; i < N_MAX; i++) agr_q[i] <= AGR_EMPTY;
              size_q    <= '0;
              ready_q   <= 1'b0;
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
