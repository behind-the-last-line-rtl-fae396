// tb_midir_syscalls -- the hypervisor system-call workloads on the full chip.
//
// Runs the voting side of the null, grant and prime system calls on
// midir_soc at its default size. Three hypervisor replicas run one per tile
// (replica r on tile r, label r). A client runs on tile 1 and keeps its
// request and response buffers in shared memory. The testbench is the
// replicas' software, executing each step at once, so the cycle counts
// measure only the chip: the NoC, the capability checks and the voters.
//
// Each system call follows the replicas' protocol:
//   phase 1  the client writes {opcode, arg0, arg1} to its request buffer.
//            The leader of the log voter (tile 0, voter 2, single-buffer)
//            proposes "write(log, <opcode, client, seq of the voters the
//            call uses>)". The followers read the proposal, check it against
//            the request buffer and the voters' sequence numbers, and agree.
//   phase 2  subordinate votes on the n-buffer voters:
//            grant  each replica writes the capability into its own copy of
//                   the client's capability space (per-replica variant), or
//                   one extra vote writes the shared copy (consensual);
//            prime  a vote on tile 1's configuration voter installs the
//                   capability in the client's T2H2 register 10; the
//                   consensual variant adds a vote that marks the shared
//                   entry as primed;
//            all    one vote writes the reply to the client's response
//                   buffer, one marks the call finished.
// A last prime call runs with replica 2 faulty: in the configuration vote it
// proposes a wider region. The voter masks it, applies the majority's
// capability and suspends without advancing seq. The replicas then follow
// the paper's error path: introspect the frozen buffers, find the divergent
// replica, agree on an error-log entry through a second voter (tile 1,
// voter 1), and vote the suspended voter's reset.
// Checked: log entries, reply, finished count, the primed capability works
// for the client and is bounded, every voter's seq advanced by exactly the
// number of its votes, no voter suspended in the fault-free calls, and in the
// faulty call the right replica is named and its proposal is not applied.
// Every call must complete
// (a call that never does is a failure) and the cycle counts are printed.
// A consensual call must take longer than its per-replica variant.
module tb_midir_syscalls;
  import midir_pkg::*;

  localparam int NT = 3;
  localparam addr_t REQ_BUF = 32'h2000, RSP_BUF = 32'h2040, DONE_CNT = 32'h2080;
  localparam addr_t LOG     = 32'h2100, CSPACE  = 32'h2400, SHARED_CS = 32'h2800;
  localparam addr_t ERR_LOG = 32'h2C00;
  localparam int OP_NULL = 1, OP_GRANT = 2, OP_PRIME = 3;
  localparam int CLIENT = 1, PRIMED_CAP = 10;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] f_cfg = 4'd1;
  logic boot_en = 1'b1;
  logic boot_we [NT];
  logic [CIDX_W-1:0] boot_idx [NT];
  cap_t boot_cap [NT];
  logic tile_req_valid [NT];
  tile_req_t tile_req [NT];
  logic tile_req_ready [NT], tile_rsp_valid [NT], tile_reset [NT], tile_denied [NT];
  tile_rsp_t tile_rsp [NT];
  seq_t voter_seq [NT][3];
  logic voter_susp [NT][3];

  midir_soc dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int unsigned cycle = 0;
  bit any_susp = 1'b0, susp_before_fault = 1'b0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    for (int t = 0; t < NT; t++)
      for (int v = 0; v < 3; v++)
        if (rst_n && voter_susp[t][v]) any_susp <= 1'b1;
  end

  // ------------------------------------------------------ tile drivers
  task automatic op(input int t, input int cap, input bit we, input addr_t a, input data_t d,
                    output tile_rsp_t r);
    @(negedge clk);
    tile_req_valid[t] = 1'b1;
    tile_req[t] = '{cap: CIDX_W'(cap), we: we, addr: a, wdata: d};
    @(posedge clk);
    while (!tile_req_ready[t]) @(posedge clk);
    @(negedge clk);
    tile_req_valid[t] = 1'b0;
    while (!tile_rsp_valid[t]) @(negedge clk);
    r = tile_rsp[t];
  endtask
  task automatic wr(input int t, input int cap, input addr_t a, input data_t d, output bit err);
    tile_rsp_t r;
    op(t, cap, 1'b1, a, d, r);
    err = r.err;
  endtask
  task automatic rd(input int t, input int cap, input addr_t a, output data_t d);
    tile_rsp_t r;
    op(t, cap, 1'b0, a, '0, r);
    d = r.rdata;
  endtask

  // Voters used, each through the vote capability every replica holds.
  localparam int CAP_MEM = 0, CAP_REPLY = 2, CAP_LOG = 3, CAP_CFG = 4, CAP_ERR = 5;
  addr_t vb_reply, vb_log, vb_cfg, vb_err;

  // wait until the voter behind cap has passed seq s (replica t polls)
  task automatic wait_seq(input int t, input int cap, input addr_t vb, input int s);
    data_t d;
    int n;
    n = 0;
    do begin
      rd(t, cap, vb | addr_t'(VR_SEQ), d);
      n++;
    end while (d[15:0] == 16'(s) && n < 200);
  endtask

  // one replica's part of an n-buffer vote
  task automatic nb_part(input int t, input int cap, input addr_t vb, input data_t msg[], input int s);
    bit e;
    foreach (msg[w]) wr(t, cap, vb | (addr_t'(VR_BUF) + addr_t'(t * 64 + w * 4)), msg[w], e);
    wr(t, cap, vb | addr_t'(VR_COMMIT), {8'd0, 8'(msg.size()), 16'(s)}, e);
    wait_seq(t, cap, vb, s);
  endtask
  task automatic nb_vote(input int cap, input addr_t vb, input data_t msg[], input int s);
    fork
      nb_part(0, cap, vb, msg, s);
      nb_part(1, cap, vb, msg, s);
      nb_part(2, cap, vb, msg, s);
    join
  endtask

  // one replica's part of a single-buffer vote; followers validate against exp
  task automatic sb_part(input int t, input int cap, input addr_t vb, input data_t msg[],
                         input data_t exp[], input int s);
    bit e, ok;
    data_t d;
    int n;
    if (t == s % NT) begin
      foreach (msg[w]) wr(t, cap, vb | (addr_t'(VR_BUF) + addr_t'(w * 4)), msg[w], e);
      wr(t, cap, vb | addr_t'(VR_COMMIT), {8'd0, 8'(msg.size()), 16'(s)}, e);
    end else begin
      n = 0;
      do begin
        rd(t, cap, vb | addr_t'(VR_STATUS), d);
        n++;
      end while (!d[3] && n < 200);
      ok = 1'b1;
      foreach (exp[w]) begin
        rd(t, cap, vb | (addr_t'(VR_BUF) + addr_t'(w * 4)), d);
        if (d != exp[w]) ok = 1'b0;
      end
      wr(t, cap, vb | addr_t'(VR_AGREE), {14'd0, ok ? AGR_AGREE : AGR_DISAGREE, 16'(s)}, e);
    end
    wait_seq(t, cap, vb, s);
  endtask

  // A subordinate vote in which replica `bad` proposes bad_msg. The faulty
  // proposal is committed first so that the voter sees the divergence.
  // Then the error path: every replica introspects the frozen buffers and
  // names the replica whose proposal differs from the majority; the error
  // entry is agreed on through the error voter; the suspended voter is reset
  // by vote. Returns the replica found faulty.
  int s_err = 0;
  task automatic nb_vote_faulty(input int cap, input addr_t vb, input data_t msg[], input data_t bad_msg[],
                                input int bad, input int s, output int found);
    data_t d, w1 [NT];
    bit e;
    nb_part_commit(bad, cap, vb, bad_msg, s);
    fork
      nb_part_commit((bad + 1) % NT, cap, vb, msg, s);
      nb_part_commit((bad + 2) % NT, cap, vb, msg, s);
    join
    repeat (20) @(negedge clk);
    rd(0, cap, vb | addr_t'(VR_STATUS), d);
    check(d[ST_SUSP_BIT] && d[ST_APPLIED_BIT], "divergent configuration vote applied and suspended");
    rd(0, cap, vb | addr_t'(VR_SEQ), d);
    check(d[15:0] == 16'(s), "suspended voter kept its seq");
    // introspection: compare word 2 (the size) of all buffers
    for (int r = 0; r < NT; r++) rd(1, cap, vb | (addr_t'(VR_BUF) + addr_t'(r * 64 + 8)), w1[r]);
    found = -1;
    for (int r = 0; r < NT; r++)
      if (w1[r] != w1[(r + 1) % NT] && w1[r] != w1[(r + 2) % NT]) found = r;
    // push the error, then reset the suspended voter
    nb_vote(CAP_ERR, vb_err, '{ERR_LOG, data_t'(s), data_t'(found), w1[found]}, s_err);
    s_err++;
    fork
      wr(0, cap, vb | addr_t'(VR_RESET), data_t'(s), e);
      wr(1, cap, vb | addr_t'(VR_RESET), data_t'(s), e);
      wr(2, cap, vb | addr_t'(VR_RESET), data_t'(s), e);
    join
    repeat (4) @(negedge clk);
  endtask
  task automatic nb_part_commit(input int t, input int cap, input addr_t vb, input data_t msg[], input int s);
    bit e;
    foreach (msg[w]) wr(t, cap, vb | (addr_t'(VR_BUF) + addr_t'(t * 64 + w * 4)), msg[w], e);
    wr(t, cap, vb | addr_t'(VR_COMMIT), {8'd0, 8'(msg.size()), 16'(s)}, e);
  endtask

  // ----------------------------------------------------- system call
  int unsigned log_n = 0, done_n = 0;
  int s_log = 0, s_reply = 0, s_cfg = 0;

  int found_faulty = -2;
  task automatic syscall(input int opc, input bit consensual, input data_t a0, input data_t a1,
                         output int unsigned cycles, input int faulty = -1);
    data_t req[3], lmsg[], lexp[], d;
    bit e;
    int unsigned t0;
    int n;
    t0 = cycle;
    // client request
    wr(CLIENT, CAP_MEM, REQ_BUF, data_t'(opc), e);
    wr(CLIENT, CAP_MEM, REQ_BUF + 4, a0, e);
    wr(CLIENT, CAP_MEM, REQ_BUF + 8, a1, e);
    // phase 1: agree on the log entry; every replica reads the request and
    // the voters' sequence numbers itself (the follower's validation)
    for (int k = 0; k < 3; k++) rd(0, CAP_MEM, REQ_BUF + addr_t'(4 * k), req[k]);
    lmsg = '{LOG + addr_t'(16 * log_n), req[0], data_t'(CLIENT), data_t'(s_reply), data_t'(s_cfg)};
    lexp = lmsg;
    fork
      sb_part(0, CAP_LOG, vb_log, lmsg, lexp, s_log);
      sb_part(1, CAP_LOG, vb_log, lmsg, lexp, s_log);
      sb_part(2, CAP_LOG, vb_log, lmsg, lexp, s_log);
    join
    s_log++;
    rd(2, CAP_MEM, LOG + addr_t'(16 * log_n), d);
    check(d == data_t'(opc), $sformatf("log entry %0d holds the system call", log_n));
    log_n++;
    // phase 2
    if (opc == OP_GRANT) begin
      if (consensual) begin
        nb_vote(CAP_REPLY, vb_reply, '{SHARED_CS, a0, a1}, s_reply); s_reply++;
      end else
        fork
          wr(0, CAP_MEM, CSPACE + 32'h000, a0, e);
          wr(1, CAP_MEM, CSPACE + 32'h100, a0, e);
          wr(2, CAP_MEM, CSPACE + 32'h200, a0, e);
        join
    end
    if (opc == OP_PRIME) begin
      if (faulty >= 0)
        nb_vote_faulty(CAP_CFG, vb_cfg, '{cfg_address(PRIMED_CAP, CF_BASE), a0, a1, 32'b0_000_0111},
                       '{cfg_address(PRIMED_CAP, CF_BASE), a0, a1 + 32'h1000, 32'b0_000_0111},
                       faulty, s_cfg, found_faulty);
      else
        nb_vote(CAP_CFG, vb_cfg, '{cfg_address(PRIMED_CAP, CF_BASE), a0, a1, 32'b0_000_0111}, s_cfg);
      s_cfg++;
      if (consensual) begin
        nb_vote(CAP_REPLY, vb_reply, '{SHARED_CS + 32'h8, 32'd1}, s_reply); s_reply++;
      end
    end
    nb_vote(CAP_REPLY, vb_reply, '{RSP_BUF, data_t'(opc) | 32'h100}, s_reply); s_reply++;
    nb_vote(CAP_REPLY, vb_reply, '{DONE_CNT, data_t'(done_n + 1)}, s_reply); s_reply++;
    done_n++;
    // client waits for its reply
    n = 0;
    do begin
      rd(CLIENT, CAP_MEM, RSP_BUF, d);
      n++;
    end while (d != (data_t'(opc) | 32'h100) && n < 100);
    check(d == (data_t'(opc) | 32'h100), "client received the reply");
    cycles = cycle - t0;
  endtask

  task automatic boot(input int idx, input cap_t c[NT]);
    @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      boot_we[t] = 1'b1; boot_idx[t] = CIDX_W'(idx); boot_cap[t] = c[t];
    end
    @(negedge clk);
    for (int t = 0; t < NT; t++) boot_we[t] = 1'b0;
  endtask

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cap_t cs [NT];
  data_t d;
  bit e;
  int unsigned c_null, c_grant, c_prime, c_grant_c, c_prime_c, c_prime_f;

  initial begin
    for (int t = 0; t < NT; t++) begin
      boot_we[t] = 1'b0; boot_idx[t] = '0; boot_cap[t] = '0;
      tile_req_valid[t] = 1'b0; tile_req[t] = '0;
    end
    vb_reply = voter_base(0, 1);
    vb_log   = voter_base(0, 2);
    vb_cfg   = voter_base(CLIENT, 0);
    vb_err   = voter_base(1, 1);
    c_null = 0; c_grant = 0; c_prime = 0; c_grant_c = 0; c_prime_c = 0; c_prime_f = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int t = 0; t < NT; t++) cs[t] = '{valid: 1, r: 1, w: 1, vote: 0, label: rid_t'(t), base: 32'h0, size: 32'h4000};
    boot(CAP_MEM, cs);
    for (int t = 0; t < NT; t++) cs[t] = '{valid: 1, r: 1, w: 1, vote: 1, label: rid_t'(t), base: vb_reply, size: 32'h1000};
    boot(CAP_REPLY, cs);
    for (int t = 0; t < NT; t++) cs[t] = '{valid: 1, r: 1, w: 1, vote: 1, label: rid_t'(t), base: vb_log, size: 32'h1000};
    boot(CAP_LOG, cs);
    for (int t = 0; t < NT; t++) cs[t] = '{valid: 1, r: 1, w: 1, vote: 1, label: rid_t'(t), base: vb_cfg, size: 32'h1000};
    boot(CAP_CFG, cs);
    for (int t = 0; t < NT; t++) cs[t] = '{valid: 1, r: 1, w: 1, vote: 1, label: rid_t'(t), base: vb_err, size: 32'h1000};
    boot(CAP_ERR, cs);
    @(negedge clk) boot_en = 1'b0;
    idle2();
    wr(0, CAP_MEM, RSP_BUF, 32'h0, e);

    syscall(OP_NULL, 1'b0, 32'h0, 32'h0, c_null);
    syscall(OP_GRANT, 1'b0, 32'h3000, 32'h40, c_grant);
    rd(1, CAP_MEM, CSPACE + 32'h100, d);
    check(d == 32'h3000, "per-replica capability space updated");
    syscall(OP_GRANT, 1'b1, 32'h3000, 32'h40, c_grant_c);
    rd(2, CAP_MEM, SHARED_CS, d);
    check(d == 32'h3000, "shared capability space updated by vote");
    wr(CLIENT, PRIMED_CAP, 32'h3010, 32'h1, e);
    check(e, "capability not usable before prime");
    syscall(OP_PRIME, 1'b0, 32'h3000, 32'h40, c_prime);
    wr(CLIENT, PRIMED_CAP, 32'h303C, 32'h77, e);
    check(!e, "primed capability usable by the client");
    wr(CLIENT, PRIMED_CAP, 32'h3040, 32'h77, e);
    check(e, "primed capability bounded");
    wr(0, PRIMED_CAP, 32'h3010, 32'h1, e);
    check(e, "prime affected only the client's tile");
    syscall(OP_PRIME, 1'b1, 32'h3000, 32'h40, c_prime_c);

    susp_before_fault = any_susp;
    // prime with a faulty replica: revoke the capability first (by vote), then re-prime
    nb_vote(CAP_CFG, vb_cfg, '{cfg_address(PRIMED_CAP, CF_FLAGS), 32'd0}, s_cfg); s_cfg++;
    wr(CLIENT, PRIMED_CAP, 32'h3010, 32'h1, e);
    check(e, "capability revoked by vote");
    syscall(OP_PRIME, 1'b0, 32'h3000, 32'h40, c_prime_f, 2);
    check(found_faulty == 2, "introspection identifies the faulty replica");
    rd(0, CAP_MEM, ERR_LOG + 32'h4, d);
    check(d == 32'd2, "error log entry agreed by vote");
    wr(CLIENT, PRIMED_CAP, 32'h303C, 32'h77, e);
    check(!e, "majority capability installed despite the faulty replica");
    wr(CLIENT, PRIMED_CAP, 32'h3040, 32'h77, e);
    check(e, "faulty replica's wider region not installed");
    check(!voter_susp[CLIENT][0] && voter_seq[CLIENT][0] == 16'(s_cfg), "voter reset by vote, seq advanced");

    rd(0, CAP_MEM, DONE_CNT, d);
    check(d == 32'd6, "six system calls marked finished");
    check(voter_seq[0][2] == 16'(s_log) && s_log == 6, "log voter: one vote per call");
    check(voter_seq[0][1] == 16'(s_reply) && s_reply == 14, "reply voter: 2 votes per call + 2 consensual extras");
    check(voter_seq[CLIENT][0] == 16'(s_cfg) && s_cfg == 4, "configuration voter: one vote per prime and revocation");
    check(voter_seq[1][1] == 16'(s_err) && s_err == 1, "error voter: one error pushed");
    check(!susp_before_fault, "no voter suspended in the fault-free calls");

    $display("cycles  null %0d  grant %0d / %0d  prime %0d / %0d  (per-replica / consensual)  prime with a faulty replica %0d",
             c_null, c_grant, c_grant_c, c_prime, c_prime_c, c_prime_f);
    check(any_susp, "the faulty replica caused a suspension");
    check(c_prime_f > c_prime, "error handling costs extra votes");
    check(c_null > 0 && c_grant > 0 && c_prime > 0 && c_grant_c > 0 && c_prime_c > 0, "every system call completed");
    check(c_grant_c > c_grant && c_prime_c > c_prime, "consensual capability space costs extra votes");
    check(c_prime > c_null, "prime costs more than null");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle2();
    repeat (2) @(negedge clk);
  endtask
endmodule
