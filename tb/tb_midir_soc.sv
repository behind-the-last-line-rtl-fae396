// tb_midir_soc -- end-to-end test of the Midir chip at its full size
// (default parameters: 3 tiles, 20 capabilities per T2H2, 3 voters per
// T2H2 of which voter 2 is single-buffer, f = 1, 16-word messages).
//
// The testbench plays the three tile cores, each running one replica
// (label = tile number) of the hypervisor. At boot every tile receives:
// cap 0 read-write on shared memory [0, 0x4000); caps 1..3 vote capabilities
// for voters 0..2 of tile 0's T2H2; cap 4 a vote capability for tile 1's
// configuration voter; cap 6 a "memory" capability that points at the
// capability configuration space (to show the space is unreachable); cap 7
// read-only on [0x3000, 0x3100). Replicas run concurrently (fork/join).
//
// Mechanisms exercised and counted (each must occur at least once, a
// mechanism that never happened counts as a failure):
//   direct      capability-checked access to shared memory
//   denied      operation dropped by the capability check
//   cfg_blocked configuration space not reachable by a plain access
//   masked      n-buffer vote with one faulty replica: majority applied
//   suspend     voter suspended after a divergence
//   introspect  frozen proposal read back for diagnosis
//   vreset      voted voter reset resumes voting and advances seq
//   reconfig    voted capability reconfiguration, new capability used
//   sb_agree    single-buffer vote: leader proposal + agreement applied
//   sb_diverge  single-buffer vote applied against one disagreement
//   sb_timeout  single-buffer vote ended by f+1 timeouts
//   tile_reset  voted reset of a tile (set and released)
//   arbitration two or more tiles requesting the NoC in the same cycle
module tb_midir_soc;
  import midir_pkg::*;

  localparam int NT = 3;

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

  // mechanism counters
  typedef enum int {M_DIRECT, M_DENIED, M_CFGBLK, M_MASKED, M_SUSPEND, M_INTRO, M_VRESET,
                    M_RECONF, M_SBAGREE, M_SBDIV, M_SBTMO, M_TRESET, M_ARB, M_COUNT} mech_e;
  int mech [M_COUNT];
  string mech_name [M_COUNT] = '{"direct", "denied", "cfg_blocked", "masked", "suspend",
                                 "introspect", "vreset", "reconfig", "sb_agree", "sb_diverge",
                                 "sb_timeout", "tile_reset", "arbitration"};
  task automatic saw(input mech_e m, input bit ok);
    if (ok) mech[m]++;
  endtask

  int unsigned n_denied = 0;
  always @(posedge clk) begin
    int busy;
    busy = 0;
    for (int t = 0; t < NT; t++) begin
      if (tile_denied[t]) n_denied++;
      if (dut.m_req_valid[t]) busy++;
    end
    if (busy >= 2) mech[M_ARB]++;
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
  // propose msg to the n-buffer voter at vb through capability cap
  task automatic propose(input int t, input int cap, input addr_t vb, input data_t msg[],
                         input int seqn, output bit err);
    bit e;
    err = 0;
    foreach (msg[w]) begin
      wr(t, cap, vb | addr_t'(VR_BUF) + addr_t'(12'(t * 64 + w * 4)), msg[w], e);
      err |= e;
    end
    wr(t, cap, vb | addr_t'(VR_COMMIT), {8'd0, 8'(msg.size()), 16'(seqn)}, e);
    err |= e;
  endtask
  task automatic idle(input int n);
    repeat (n) @(negedge clk);
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
    #3000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  addr_t vb0 [3];
  addr_t vcfg1;
  data_t msg[];
  data_t dd [NT];
  bit    ee [NT];
  data_t d;
  bit    e;
  cap_t  cs [NT];
  int unsigned den0;

  initial begin
    for (int t = 0; t < NT; t++) begin
      boot_we[t] = 1'b0; boot_idx[t] = '0; boot_cap[t] = '0;
      tile_req_valid[t] = 1'b0; tile_req[t] = '0;
    end
    for (int m = 0; m < M_COUNT; m++) mech[m] = 0;
    for (int v = 0; v < 3; v++) vb0[v] = voter_base(0, v);
    vcfg1 = voter_base(1, 0);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---------------------------------------------------------- boot
    for (int t = 0; t < NT; t++) cs[t] = '{valid: 1, r: 1, w: 1, vote: 0, label: rid_t'(t), base: 32'h0, size: 32'h4000};
    boot(0, cs);
    for (int v = 0; v < 3; v++) begin
      for (int t = 0; t < NT; t++) cs[t] = '{valid: 1, r: 1, w: 1, vote: 1, label: rid_t'(t), base: vb0[v], size: 32'h1000};
      boot(1 + v, cs);
    end
    for (int t = 0; t < NT; t++) cs[t] = '{valid: 1, r: 1, w: 1, vote: 1, label: rid_t'(t), base: vcfg1, size: 32'h1000};
    boot(4, cs);
    for (int t = 0; t < NT; t++) cs[t] = '{valid: 1, r: 1, w: 1, vote: 0, label: rid_t'(t), base: 32'h2000_0000, size: 32'h1000};
    boot(6, cs);
    for (int t = 0; t < NT; t++) cs[t] = '{valid: 1, r: 1, w: 0, vote: 0, label: rid_t'(t), base: 32'h3000, size: 32'h100};
    boot(7, cs);
    @(negedge clk) boot_en = 1'b0;
    idle(2);

    // ------------------------------------ direct access, concurrent tiles
    fork
      begin : w0 for (int i = 0; i < 16; i++) wr(0, 0, 32'h100 + 32'(i * 4), 32'hA000 + 32'(i), ee[0]); end
      begin : w1 for (int i = 0; i < 16; i++) wr(1, 0, 32'h200 + 32'(i * 4), 32'hB000 + 32'(i), ee[1]); end
      begin : w2 for (int i = 0; i < 16; i++) wr(2, 0, 32'h300 + 32'(i * 4), 32'hC000 + 32'(i), ee[2]); end
    join
    begin
      bit all_ok;
      all_ok = 1;
      for (int i = 0; i < 16; i++)
        for (int t = 0; t < NT; t++) begin
          rd((t + 1) % NT, 0, 32'h100 * (t + 1) + 32'(i * 4), d);
          if (d != (32'hA000 + 32'h1000 * t + 32'(i))) all_ok = 0;
        end
      check(all_ok, "concurrent direct writes all visible to other tiles");
      saw(M_DIRECT, all_ok);
    end

    // ------------------------------------------------ denied operations
    wr(2, 0, 32'h3000, 32'h600D, e);   // the RAM has no reset: give the word a known value
    den0 = n_denied;
    wr(2, 7, 32'h3000, 32'hDEAD, e);   check(e, "write through read-only capability denied");
    rd(2, 7, 32'h3000, d);             check(d == 32'h600D, "denied write left memory unchanged");
    wr(1, 0, 32'h4000, 32'h1, e);      check(e, "access past the region denied");
    wr(0, 9, 32'h0, 32'h1, e);         check(e, "empty capability denied");
    check(n_denied == den0 + 3, "each dropped operation reported");
    saw(M_DENIED, n_denied == den0 + 3);

    // ---------------------------- configuration space is not addressable
    wr(0, 6, cfg_address(5, CF_FLAGS), 32'h7, e);
    check(e, "plain write to the configuration space fails");
    wr(0, 5, 32'h1000, 32'h1, e);
    check(e, "capability 5 still empty");
    saw(M_CFGBLK, e);

    // ----------- n-buffer vote (tile 0 voter 1) with faulty replica 0
    // the faulty replica commits first so that its divergence is seen;
    // a proposal arriving after f+1 matching ones is simply too late
    propose(0, 2, vb0[1], '{32'h800, 32'd0}, 0, ee[0]);
    fork
      begin : p1 propose(1, 2, vb0[1], '{32'h800, 32'd1}, 0, ee[1]); end
      begin : p2 propose(2, 2, vb0[1], '{32'h800, 32'd1}, 0, ee[2]); end
    join
    idle(20);
    rd(1, 0, 32'h800, d);
    check(d == 32'd1, "majority value applied, faulty replica masked");
    saw(M_MASKED, d == 32'd1);
    check(voter_susp[0][1] && voter_seq[0][1] == 0, "voter suspended after divergence");
    saw(M_SUSPEND, voter_susp[0][1]);
    rd(2, 2, vb0[1] | addr_t'(VR_BUF) + addr_t'(12'h4), d);
    check(d == 32'd0, "faulty proposal frozen and readable");
    saw(M_INTRO, d == 32'd0);
    wr(0, 2, vb0[1] | addr_t'(VR_BUF) + addr_t'(12'h4), 32'd1, e);
    check(e, "faulty replica cannot repair its frozen proposal");
    fork
      begin : r1 wr(1, 2, vb0[1] | addr_t'(VR_RESET), 32'd0, ee[1]); end
      begin : r2 wr(2, 2, vb0[1] | addr_t'(VR_RESET), 32'd0, ee[2]); end
    join
    idle(2);
    check(!voter_susp[0][1] && voter_seq[0][1] == 1, "voted reset resumes voting, seq advanced");
    saw(M_VRESET, !voter_susp[0][1] && voter_seq[0][1] == 1);

    // ------ voted reconfiguration of tile 0: cap 5 = rw [0x1000, 0x1100)
    msg = '{cfg_address(5, CF_BASE), 32'h1000, 32'h100, 32'b0_000_0111};
    fork
      begin : c0 propose(0, 1, vb0[0], msg, 0, ee[0]); end
      begin : c1 propose(1, 1, vb0[0], msg, 0, ee[1]); end
      begin : c2 propose(2, 1, vb0[0], msg, 0, ee[2]); end
    join
    idle(10);
    wr(0, 5, 32'h10F0, 32'h5A5A, e);
    rd(2, 0, 32'h10F0, d);
    check(!e && d == 32'h5A5A, "voted capability installed and usable");
    check(voter_seq[0][0] == 1 && !voter_susp[0][0], "configuration vote clean");
    saw(M_RECONF, !e && d == 32'h5A5A);
    wr(1, 5, 32'h10F0, 32'h0, e);
    check(e, "reconfiguration affected only tile 0");

    // ------------------- single-buffer voter (tile 0 voter 2), seq 0
    rd(1, 3, vb0[2] | addr_t'(VR_LEADER), d);
    check(d[2:0] == 3'd0, "leader of seq 0 is replica 0");
    wr(0, 3, vb0[2] | addr_t'(VR_BUF), 32'h900, e);
    wr(0, 3, vb0[2] | addr_t'(VR_BUF) + addr_t'(12'h4), 32'h33, e);
    wr(0, 3, vb0[2] | addr_t'(VR_COMMIT), {8'd0, 8'd2, 16'd0}, e);
    fork
      begin : a1 rd(1, 3, vb0[2] | addr_t'(VR_BUF) + addr_t'(12'h4), dd[1]);
                 wr(1, 3, vb0[2] | addr_t'(VR_AGREE), {14'd0, AGR_AGREE, 16'd0}, ee[1]); end
      begin : a2 rd(2, 3, vb0[2] | addr_t'(VR_BUF) + addr_t'(12'h4), dd[2]); end
    join
    idle(10);
    rd(2, 0, 32'h900, d);
    check(dd[1] == 32'h33 && dd[2] == 32'h33, "followers read the leader's proposal");
    check(d == 32'h33 && voter_seq[0][2] == 1, "single-buffer agreement applied");
    saw(M_SBAGREE, d == 32'h33 && voter_seq[0][2] == 1);
    if (voter_seq[0][2] != 1) begin
      wr(1, 3, vb0[2] | addr_t'(VR_RESET), 32'd0, e);
      wr(2, 3, vb0[2] | addr_t'(VR_RESET), 32'd0, e);
    end

    // seq 1, leader 1: applied against replica 2's disagreement
    wr(1, 3, vb0[2] | addr_t'(VR_BUF), 32'h904, e);
    wr(1, 3, vb0[2] | addr_t'(VR_BUF) + addr_t'(12'h4), 32'h44, e);
    wr(1, 3, vb0[2] | addr_t'(VR_COMMIT), {8'd0, 8'd2, 16'd1}, e);
    wr(2, 3, vb0[2] | addr_t'(VR_AGREE), {14'd0, AGR_DISAGREE, 16'd1}, e);
    wr(0, 3, vb0[2] | addr_t'(VR_AGREE), {14'd0, AGR_AGREE, 16'd1}, e);
    idle(10);
    rd(0, 0, 32'h904, d);
    check(d == 32'h44 && voter_susp[0][2], "divergent single-buffer vote applied and suspended");
    saw(M_SBDIV, d == 32'h44 && voter_susp[0][2]);
    fork
      begin : s0 wr(0, 3, vb0[2] | addr_t'(VR_RESET), 32'd1, ee[0]); end
      begin : s2 wr(2, 3, vb0[2] | addr_t'(VR_RESET), 32'd1, ee[2]); end
    join
    idle(2);
    check(voter_seq[0][2] == 2 && !voter_susp[0][2], "reset after divergent vote");

    // seq 2, leader 2 stays silent: timeouts
    fork
      begin : t0 wr(0, 3, vb0[2] | addr_t'(VR_AGREE), {14'd0, AGR_TIMEOUT, 16'd2}, ee[0]); end
      begin : t1 wr(1, 3, vb0[2] | addr_t'(VR_AGREE), {14'd0, AGR_TIMEOUT, 16'd2}, ee[1]); end
    join
    idle(3);
    rd(0, 3, vb0[2] | addr_t'(VR_STATUS), d);
    check(d[ST_SUSP_BIT] && d[ST_OUT_LSB +: 2] == OUT_TIMEOUT, "f+1 timeouts end the vote");
    saw(M_SBTMO, d[ST_SUSP_BIT] && d[ST_OUT_LSB +: 2] == OUT_TIMEOUT);
    wr(0, 3, vb0[2] | addr_t'(VR_RESET), 32'd2, e);
    wr(1, 3, vb0[2] | addr_t'(VR_RESET), 32'd2, e);
    idle(2);
    rd(0, 3, vb0[2] | addr_t'(VR_LEADER), d);
    check(voter_seq[0][2] == 3 && d[2:0] == 3'd0, "next leader after timeout");

    // --------------------------------------- voted reset of tile 1
    check(!tile_reset[1], "tile 1 running");
    msg = '{cfg_address(int'(CF_TILE_CTRL_IDX), CF_BASE), 32'd1};
    wr(1, 4, vcfg1 | addr_t'(VR_BUF) + addr_t'(12'h40), 32'h0, e);  // tile 1 stays silent
    propose(0, 4, vcfg1, msg, 0, e);
    idle(6);
    check(!tile_reset[1], "one replica alone cannot reset a tile");
    propose(2, 4, vcfg1, msg, 0, e);
    idle(6);
    check(tile_reset[1] && !tile_reset[0] && !tile_reset[2], "voted reset of tile 1");
    saw(M_TRESET, tile_reset[1]);
    msg = '{cfg_address(int'(CF_TILE_CTRL_IDX), CF_BASE), 32'd0};
    // replica 1's buffer is still open for seq 1 (never committed): reset the voter first
    if (voter_seq[1][0] == 0) begin
      wr(0, 4, vcfg1 | addr_t'(VR_RESET), 32'd0, e);
      wr(2, 4, vcfg1 | addr_t'(VR_RESET), 32'd0, e);
    end
    fork
      begin : q0 propose(0, 4, vcfg1, msg, 1, ee[0]); end
      begin : q2 propose(2, 4, vcfg1, msg, 1, ee[2]); end
    join
    idle(6);
    check(!tile_reset[1], "tile 1 released by vote");

    // ---------------------------------------------------- summary
    for (int m = 0; m < M_COUNT; m++) begin
      $display("mechanism %-12s : %0d", mech_name[m], mech[m]);
      checks++;
      if (mech[m] == 0) begin
        failures++;
        $display("FAIL: mechanism %s never happened", mech_name[m]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
