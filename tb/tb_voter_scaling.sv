// tb_voter_scaling -- both voter kinds dimensioned for f_max = 3.
//
// A voter built for f_max faults has n_max = 2 f_max + 1 buffers or cells
// and can run at any threshold 0 <= f <= f_max, chosen while rst_n is low.
// This testbench builds voter_nbuf and voter_sbuf with F_MAX = 3 (seven
// replicas) and plays the replicas on their slave ports; each apply port
// feeds a memory model that records the applied writes.
// n-buffer, f = 3: three matching faulty proposals are not enough; the
// fourth matching correct proposal applies and the voter suspends; reset
// needs four votes. Single-buffer, f = 3: the leader plus two agreements do
// not apply, a third agreement does; in the next vote (leader 1) three
// disagreements do not decide, the fourth rejects and suspends. Then both
// voters are reset with f = 2; on the n-buffer voter label 5 is inactive
// and three matching proposals apply and advance seq.
module tb_voter_scaling;
  import midir_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] f_cfg = 4'd3;
  noc_req_t s_req = '0;
  logic nb_valid = 1'b0, sb_valid = 1'b0;
  logic nb_rsp_valid, sb_rsp_valid;
  noc_rsp_t nb_rsp, sb_rsp;
  logic nb_a_valid, sb_a_valid;
  logic nb_a_done, sb_a_done;
  addr_t nb_a_addr, sb_a_addr;
  data_t nb_a_data, sb_a_data;
  seq_t nb_seq, sb_seq;
  logic nb_susp, sb_susp;

  voter_nbuf #(.F_MAX(3), .MSG_WORDS(16)) u_nb (
    .clk, .rst_n, .f_cfg, .s_req_valid(nb_valid), .s_req, .s_rsp_valid(nb_rsp_valid), .s_rsp(nb_rsp),
    .a_valid(nb_a_valid), .a_addr(nb_a_addr), .a_data(nb_a_data), .a_done(nb_a_done),
    .seq(nb_seq), .suspended(nb_susp));
  voter_sbuf #(.F_MAX(3), .MSG_WORDS(16)) u_sb (
    .clk, .rst_n, .f_cfg, .s_req_valid(sb_valid), .s_req, .s_rsp_valid(sb_rsp_valid), .s_rsp(sb_rsp),
    .a_valid(sb_a_valid), .a_addr(sb_a_addr), .a_data(sb_a_data), .a_done(sb_a_done),
    .seq(sb_seq), .suspended(sb_susp));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // apply-port memory models: each write completes one cycle after it appears
  // (counted only out of reset)
  int unsigned nb_n = 0, sb_n = 0;
  data_t nb_last = '0, sb_last = '0;
  always_ff @(posedge clk) begin
    nb_a_done <= 1'b0;
    sb_a_done <= 1'b0;
    if (rst_n && nb_a_valid && !nb_a_done) begin nb_a_done <= 1'b1; nb_n <= nb_n + 1; nb_last <= nb_a_data; end
    if (rst_n && sb_a_valid && !sb_a_done) begin sb_a_done <= 1'b1; sb_n <= sb_n + 1; sb_last <= sb_a_data; end
  end

  // one vote-port access to the n-buffer (sb = 0) or single-buffer (sb = 1) voter
  task automatic access(input bit sb, input int lab, input bit we, input logic [11:0] off, input data_t d,
                        output data_t rd, output bit err);
    @(negedge clk);
    nb_valid = !sb;
    sb_valid = sb;
    s_req = '0;
    s_req.we = we; s_req.addr = {20'h10000, off}; s_req.wdata = d;
    s_req.vote = 1'b1; s_req.label = rid_t'(lab);
    @(negedge clk);
    nb_valid = 1'b0;
    sb_valid = 1'b0;
    rd  = sb ? sb_rsp.rdata : nb_rsp.rdata;
    err = sb ? sb_rsp.err : nb_rsp.err;
  endtask
  task automatic wr(input bit sb, input int lab, input logic [11:0] off, input data_t d, output bit err);
    data_t rd;
    access(sb, lab, 1'b1, off, d, rd, err);
  endtask
  task automatic nb_propose(input int lab, input data_t msg[], input int seqn, output bit err);
    bit e;
    err = 0;
    foreach (msg[w]) begin
      wr(0, lab, VR_BUF + 12'(lab * 64 + w * 4), msg[w], e);
      err |= e;
    end
    wr(0, lab, VR_COMMIT, {8'd0, 8'(msg.size()), 16'(seqn)}, e);
    err |= e;
  endtask
  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  bit e;
  data_t d;

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    idle(2);

    // ---- n-buffer, f = 3 (n = 7)
    for (int r = 0; r < 3; r++) begin
      nb_propose(r, '{32'h100, 32'hBAD}, 0, e);
      check(!e, "faulty proposal taken");
    end
    for (int r = 3; r < 6; r++) nb_propose(r, '{32'h100, 32'h600D}, 0, e);
    idle(6);
    check(nb_n == 0 && nb_seq == 0, "n-buffer f=3: three matching proposals are not a decision");
    nb_propose(6, '{32'h100, 32'h600D}, 0, e);
    check(!e, "seventh replica's proposal taken");
    idle(8);
    check(nb_n == 1 && nb_last == 32'h600D, "n-buffer f=3: four matching proposals apply");
    check(nb_susp && nb_seq == 0, "n-buffer f=3: three faulty replicas masked, voter suspended");
    for (int r = 0; r < 3; r++) wr(0, r + 3, VR_RESET, 32'd0, e);
    idle(2);
    check(nb_susp, "n-buffer f=3: three reset votes are not enough");
    wr(0, 6, VR_RESET, 32'd0, e);
    idle(2);
    check(!nb_susp && nb_seq == 1, "n-buffer f=3: four reset votes resume voting");

    // ---- single-buffer, f = 3: vote 0, leader 0
    wr(1, 0, VR_BUF, 32'h200, e);
    wr(1, 0, VR_BUF + 12'h4, 32'h51, e);
    wr(1, 0, VR_COMMIT, {8'd0, 8'd2, 16'd0}, e);
    check(!e, "single-buffer leader commit taken");
    for (int r = 1; r < 3; r++) wr(1, r, VR_AGREE, {14'd0, AGR_AGREE, 16'd0}, e);
    idle(6);
    check(sb_n == 0 && sb_seq == 0, "single-buffer f=3: leader and two agreements do not apply");
    wr(1, 3, VR_AGREE, {14'd0, AGR_AGREE, 16'd0}, e);
    idle(8);
    check(sb_n == 1 && sb_last == 32'h51 && sb_seq == 1, "single-buffer f=3: f+1 agreements apply");
    // vote 1, leader 1: rejected by four disagreements
    access(1, 0, 1'b0, VR_LEADER, '0, d, e);
    check(d[RID_W-1:0] == 1, "single-buffer f=3: leader rotates to replica 1");
    wr(1, 1, VR_BUF, 32'h204, e);
    wr(1, 1, VR_BUF + 12'h4, 32'hBAD, e);
    wr(1, 1, VR_COMMIT, {8'd0, 8'd2, 16'd1}, e);
    for (int r = 2; r < 5; r++) wr(1, r, VR_AGREE, {14'd0, AGR_DISAGREE, 16'd1}, e);
    idle(6);
    check(sb_n == 1 && sb_seq == 1 && !sb_susp, "single-buffer f=3: three disagreements do not decide");
    wr(1, 5, VR_AGREE, {14'd0, AGR_DISAGREE, 16'd1}, e);
    idle(6);
    check(sb_n == 1 && sb_susp, "single-buffer f=3: four disagreements reject and suspend");

    // ---- n-buffer at f = 2 on the same hardware (n = 5)
    @(negedge clk) rst_n = 1'b0;
    f_cfg = 4'd2;
    idle(2);
    @(negedge clk) rst_n = 1'b1;
    idle(2);
    wr(0, 5, VR_BUF + 12'(5 * 64), 32'h300, e);
    check(e, "n-buffer f=2: replica 5 is inactive");
    for (int r = 0; r < 2; r++) nb_propose(r, '{32'h300, 32'h22}, 0, e);
    idle(6);
    check(nb_n == 1, "n-buffer f=2: two matching proposals are not a decision");
    nb_propose(4, '{32'h300, 32'h22}, 0, e);
    idle(8);
    check(nb_n == 2 && nb_last == 32'h22 && nb_seq == 1 && !nb_susp, "n-buffer f=2: three matching proposals apply and advance seq");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
