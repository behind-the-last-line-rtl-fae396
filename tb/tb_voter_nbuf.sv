// tb_voter_nbuf -- self-checking test of the n-buffer voter.
//
// The testbench plays three replicas (labels 0..2) on the voter's NoC slave
// port and a memory on its apply port that records every applied write.
// With f = 1 it checks: masking of one faulty proposal with suspension after
// applying; refusal of stale-seq commits, writes to committed buffers,
// foreign buffers, non-vote requests and inactive labels; introspection of a
// frozen buffer; voted reset (one vote is not enough, two are); a clean vote
// with a multi-word operation that advances seq; suspension without applying
// when no two proposals match. Then it resets with f = 0 and checks that a
// single proposal is applied at once.
module tb_voter_nbuf;
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

  voter_nbuf #(.F_MAX(1), .MSG_WORDS(16)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // apply-port memory model: completes each write one cycle after it appears
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
                        output data_t rd, output bit err, input bit vote = 1'b1);
    @(negedge clk);
    s_req_valid = 1'b1;
    s_req = '0;
    s_req.we = we; s_req.addr = {20'h10000, off}; s_req.wdata = d;
    s_req.vote = vote; s_req.label = rid_t'(lab);
    @(negedge clk);
    s_req_valid = 1'b0;
    check(s_rsp_valid, "response one cycle after request");
    rd = s_rsp.rdata; err = s_rsp.err;
  endtask

  task automatic wr(input int lab, input logic [11:0] off, input data_t d, output bit err);
    data_t rd;
    access(lab, 1'b1, off, d, rd, err);
  endtask
  function automatic data_t rd_dummy(); return '0; endfunction
  task automatic rd(input int lab, input logic [11:0] off, output data_t d);
    bit err;
    access(lab, 1'b0, off, '0, d, err);
  endtask

  task automatic propose(input int lab, input data_t msg[], input int seqn, output bit err);
    bit e;
    err = 0;
    foreach (msg[w]) begin
      wr(lab, VR_BUF + 12'(lab * 64 + w * 4), msg[w], e);
      err |= e;
    end
    wr(lab, VR_COMMIT, {8'd0, 8'(msg.size()), 16'(seqn)}, e);
    err |= e;
  endtask

  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  data_t d;
  bit    e;
  data_t m_bad[], m_good[], m_multi[];

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

    // ---- 1: faulty replica 0 proposes write(0x100,0), replicas 1,2 write(0x100,1)
    m_bad  = '{32'h100, 32'd0};
    m_good = '{32'h100, 32'd1};
    propose(0, m_bad, 0, e);   check(!e, "replica 0 proposal taken");
    propose(1, m_good, 0, e);  check(!e, "replica 1 proposal taken");
    idle(4);
    check(nwr == 0, "no write with two diverging proposals");
    wr(0, VR_BUF + 12'(4), 32'd77, e);  check(e, "committed buffer is locked");
    wr(0, VR_BUF + 12'(64 + 4), 32'd77, e); check(e, "replica cannot write another's buffer");
    propose(2, m_good, 0, e);  check(!e, "replica 2 proposal taken");
    idle(8);
    check(nwr == 1 && wr_addr[0] == 32'h100 && wr_data[0] == 32'd1, "majority value applied");
    check(suspended && seq == 0, "suspended after divergence, seq kept");
    rd(1, VR_STATUS, d);
    check(d[ST_SUSP_BIT] && d[ST_APPLIED_BIT] && d[ST_OUT_LSB +: 2] == OUT_AGREED, "status after masked vote");
    rd(1, VR_BUF + 12'(4), d);  check(d == 32'd0, "diverging proposal frozen for diagnosis");
    rd(2, VR_AGRVEC, d);        check(d[2:0] == 3'b111, "all three buffers committed");

    // ---- 2: illegal requests
    wr(1, VR_RESET, 32'd9, e);  check(e, "reset vote with stale seq refused");
    wr(5, VR_RESET, 32'd0, e);  check(e, "inactive label refused");
    access(1, 1'b1, VR_RESET, 32'd0, d, e, 1'b0); check(e, "non-vote request refused");

    // ---- 3: voted reset
    wr(1, VR_RESET, 32'd0, e);  check(!e, "reset vote 1 taken");
    idle(2);
    check(suspended && seq == 0, "one reset vote is not enough");
    rd(0, VR_RESET, d);         check(d[2:0] == 3'b010, "reset vector shows replica 1");
    wr(2, VR_RESET, 32'd0, e);  check(!e, "reset vote 2 taken");
    idle(2);
    check(!suspended && seq == 1, "f+1 reset votes resume voting and advance seq");
    rd(0, VR_AGRVEC, d);        check(d[2:0] == 3'b000, "buffers cleared by reset");

    // ---- 4: clean multi-word vote
    m_multi = '{32'h200, 32'hAAAA0001, 32'hBBBB0002};
    propose(2, m_multi, 0, e);  check(e, "commit with stale seq refused");
    rd(2, VR_AGRVEC, d);        check(d[2] == 1'b0, "stale commit left buffer open");
    wr(2, VR_COMMIT, {8'd0, 8'd3, 16'd1}, e); check(!e, "commit with current seq taken");
    propose(0, m_multi, 1, e);  check(!e, "replica 0 proposal taken");
    idle(10);
    check(nwr == 3 && wr_addr[1] == 32'h200 && wr_data[1] == 32'hAAAA0001
          && wr_addr[2] == 32'h204 && wr_data[2] == 32'hBBBB0002, "multi-word operation applied");
    check(!suspended && seq == 2, "agreement without divergence advances seq");
    propose(1, m_multi, 1, e);  check(e, "late proposal of finished vote refused");

    // ---- 5: no majority
    propose(0, '{32'h300, 32'd1}, 2, e);
    propose(1, '{32'h300, 32'd2}, 2, e);
    propose(2, '{32'h300, 32'd3}, 2, e);
    idle(6);
    check(nwr == 3, "nothing applied without f+1 matching proposals");
    rd(0, VR_STATUS, d);
    check(d[ST_SUSP_BIT] && !d[ST_APPLIED_BIT] && d[ST_OUT_LSB +: 2] == OUT_REJECTED, "suspended, no majority");
    wr(0, VR_RESET, 32'd2, e); wr(1, VR_RESET, 32'd2, e);
    idle(2);
    check(!suspended && seq == 3, "reset after failed vote");

    // ---- 6: boot-time f = 0 (n = 1)
    f_cfg = 4'd0;
    rst_n = 1'b0; idle(2); rst_n = 1'b1; idle(2);
    rd(0, VR_STATUS, d);        check(d[ST_F_LSB +: 4] == 4'd0, "f loaded at boot");
    wr(1, VR_BUF + 12'(64), 32'h400, e); check(e, "replica 1 inactive with f = 0");
    propose(0, '{32'h400, 32'd42}, 0, e);
    idle(6);
    check(nwr == 4 && wr_addr[3] == 32'h400 && wr_data[3] == 32'd42 && seq == 1, "f = 0: single proposal applied");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
