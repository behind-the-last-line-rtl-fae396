// tb_voter_sbuf -- self-checking test of the single-buffer voter.
//
// Three replicas (labels 0..2, f = 1) drive the voter's NoC slave port; a
// memory model on the apply port records the applied writes. Checked, vote by
// vote: only the leader (seq mod n) may write and commit the buffer; the
// buffer is locked after the commit; leader + one agreement applies the
// operation and advances seq; f+1 disagreements reject without applying and
// suspend; voted reset rotates the leader; an agreement against one
// disagreement still applies but suspends; f+1 timeouts end the vote as
// timed out; agreement cells only change non-destructively.
module tb_voter_sbuf;
  import midir_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] f_cfg = 4'd1;
  logic s_req_valid = 1'b0;
  noc_req_t s_req = '0;
  logic s_rsp_valid;
  noc_rsp_t s_rsp;
  logic a_valid, a_done;
  addr_t a_addr;
  data_t a_data;
  seq_t seq;
  logic suspended;

  voter_sbuf #(.F_MAX(1), .MSG_WORDS(16)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int unsigned nwr = 0;
  addr_t wr_addr [64];
  data_t wr_data [64];
  always_ff @(posedge clk) begin
    a_done <= 1'b0;
    if (rst_n && a_valid && !a_done) begin
      a_done <= 1'b1;
      wr_addr[nwr] <= a_addr;
      wr_data[nwr] <= a_data;
      nwr <= nwr + 1;
    end
  end

  task automatic access(input int lab, input bit we, input logic [11:0] off, input data_t d,
                        output data_t rd, output bit err);
    @(negedge clk);
    s_req_valid = 1'b1;
    s_req = '0;
    s_req.we = we; s_req.addr = {20'h10000, off}; s_req.wdata = d;
    s_req.vote = 1'b1; s_req.label = rid_t'(lab);
    @(negedge clk);
    s_req_valid = 1'b0;
    rd = s_rsp.rdata; err = s_rsp.err;
  endtask
  task automatic wr(input int lab, input logic [11:0] off, input data_t d, output bit err);
    data_t rd;
    access(lab, 1'b1, off, d, rd, err);
  endtask
  task automatic rd(input int lab, input logic [11:0] off, output data_t d);
    bit err;
    access(lab, 1'b0, off, '0, d, err);
  endtask
  task automatic propose(input int lab, input data_t msg[], input int seqn, output bit err);
    bit e;
    err = 0;
    foreach (msg[w]) begin
      wr(lab, VR_BUF + 12'(w * 4), msg[w], e);
      err |= e;
    end
    wr(lab, VR_COMMIT, {8'd0, 8'(msg.size()), 16'(seqn)}, e);
    err |= e;
  endtask
  task automatic agree(input int lab, input agr_e v, input int seqn, output bit err);
    wr(lab, VR_AGREE, {14'd0, v, 16'(seqn)}, err);
  endtask
  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  data_t d;
  bit e;

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    idle(2);

    // ---- seq 0, leader 0: clean vote
    rd(0, VR_LEADER, d);                 check(d[2:0] == 3'd0, "leader of seq 0 is replica 0");
    propose(1, '{32'h300, 32'd5}, 0, e); check(e, "follower cannot propose");
    agree(1, AGR_AGREE, 0, e);           check(e, "no agreement before the proposal is complete");
    propose(0, '{32'h300, 32'd7}, 0, e); check(!e, "leader proposal taken");
    wr(0, VR_BUF + 12'(4), 32'd8, e);    check(e, "buffer locked after commit");
    rd(2, VR_BUF + 12'(4), d);           check(d == 32'd7, "followers introspect the proposal");
    rd(2, VR_AGRVEC, d);                 check(d[5:0] == 6'b000001, "leader's cell reads agree");
    agree(1, AGR_AGREE, 0, e);           check(!e, "follower agreement taken");
    idle(6);
    check(nwr == 1 && wr_addr[0] == 32'h300 && wr_data[0] == 32'd7, "f+1 agreement applies the operation");
    check(seq == 1 && !suspended, "clean vote advances seq");
    agree(2, AGR_AGREE, 0, e);           check(e, "late agreement for old seq refused");

    // ---- seq 1, leader 1: rejected by f+1 disagreements
    rd(0, VR_LEADER, d);                 check(d[2:0] == 3'd1, "leader rotates with seq");
    propose(1, '{32'h304, 32'd9}, 1, e); check(!e, "leader 1 proposal taken");
    agree(2, AGR_DISAGREE, 1, e);
    agree(0, AGR_DISAGREE, 1, e);
    idle(4);
    check(nwr == 1, "rejected proposal not applied");
    rd(0, VR_STATUS, d);
    check(d[ST_SUSP_BIT] && d[ST_OUT_LSB +: 2] == OUT_REJECTED && seq == 1, "rejection suspends, seq kept");
    agree(0, AGR_AGREE, 1, e);           check(e, "disagree cannot be changed to agree");

    // ---- voted reset: rotates the leader
    wr(0, VR_RESET, 32'd1, e);
    idle(2);                             check(suspended, "one reset vote is not enough");
    wr(2, VR_RESET, 32'd1, e);
    idle(2);
    check(seq == 2 && !suspended, "f+1 reset votes resume and advance seq");
    rd(0, VR_AGRVEC, d);                 check(d[5:0] == 6'd0, "agreement vector cleared");

    // ---- seq 2, leader 2: applied despite one disagreement, then suspended
    propose(2, '{32'h308, 32'd11}, 2, e); check(!e, "leader 2 proposal taken");
    agree(1, AGR_DISAGREE, 2, e);
    idle(3);                             check(nwr == 1, "one disagreement alone decides nothing");
    agree(0, AGR_AGREE, 2, e);
    idle(6);
    check(nwr == 2 && wr_addr[1] == 32'h308 && wr_data[1] == 32'd11, "f+1 agreement applied against a disagreement");
    check(suspended && seq == 2, "divergent vote suspends after applying");
    wr(1, VR_RESET, 32'd2, e); wr(2, VR_RESET, 32'd2, e);
    idle(2);

    // ---- seq 3, leader 0 silent: timeout
    check(seq == 3, "reset after divergent vote");
    agree(1, AGR_TIMEOUT, 3, e);         check(!e, "timeout taken without a proposal");
    agree(1, AGR_TIMEOUT, 3, e);         check(e, "timeout cannot be written twice");
    agree(2, AGR_TIMEOUT, 3, e);
    idle(3);
    rd(1, VR_STATUS, d);
    check(d[ST_SUSP_BIT] && d[ST_OUT_LSB +: 2] == OUT_TIMEOUT && nwr == 2, "f+1 timeouts end the vote");
    rd(1, VR_AGRVEC, d);                 check(d[5:0] == 6'b111100, "timeouts recorded in the vector");
    wr(1, VR_RESET, 32'd3, e); wr(2, VR_RESET, 32'd3, e);
    idle(2);
    rd(1, VR_LEADER, d);
    check(seq == 4 && d[2:0] == 3'd1, "after timeout the next leader takes over");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
