// tb_noc_bus -- self-checking test of the shared-bus NoC.
//
// Three masters each issue a stream of random reads and writes to the four
// slaves (T2H2 0..2 at 0x1t00_0000, memory at 0x0...). Each slave model
// answers after 1..4 cycles with rdata = addr ^ 0x5A5A5A5A ^ src and
// counts the requests it saw. Checked: every response carries the data of
// the master's own request (routing back and forth), every request reaches
// the slave its address decodes to, an unmapped address (the configuration
// region 0x2...) is answered with err by the bus, and with all masters busy
// the round-robin arbiter serves them equally often.
module tb_noc_bus;
  import midir_pkg::*;

  localparam int NM = 3, NS = 4, NREQ = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     m_req_valid [NM];
  noc_req_t m_req       [NM];
  logic     m_req_ready [NM];
  logic     m_rsp_valid [NM];
  noc_rsp_t m_rsp       [NM];
  logic     s_req_valid [NS];
  noc_req_t s_req       [NS];
  logic     s_rsp_valid [NS];
  noc_rsp_t s_rsp       [NS];

  noc_bus #(.NTILES(3), .NM(NM), .NS(NS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // slave models
  int unsigned seen [NS];
  int unsigned misroute = 0;
  for (genvar s = 0; s < NS; s++) begin : g_slave
    int unsigned cnt = 0;
    noc_req_t r;
    always_ff @(posedge clk) begin
      s_rsp_valid[s] <= 1'b0;
      if (s_req_valid[s]) begin
        r   <= s_req[s];
        cnt <= 1 + ($urandom % 4);
        seen[s] <= seen[s] + 1;
        if ((s == 3 && s_req[s].addr[31:28] != 4'h0) ||
            (s < 3 && s_req[s].addr[31:24] != 8'(8'h10 + s))) misroute <= misroute + 1;
      end else if (cnt == 1) begin
        cnt <= 0;
        s_rsp_valid[s] <= 1'b1;
        s_rsp[s] <= '{rdata: r.addr ^ 32'h5A5A5A5A ^ 32'(r.src), err: 1'b0};
      end else if (cnt > 1) cnt <= cnt - 1;
    end
  end

  int unsigned served [NM];
  int unsigned bad_data = 0, derr_ok = 0;

  task automatic master(input int m, input int nreq, input bit unmapped);
    for (int k = 0; k < nreq; k++) begin
      addr_t a;
      int tgt;
      tgt = $urandom % NS;
      a = (tgt == 3) ? {4'h0, 28'($urandom) & 28'h000FFFC} : {8'(8'h10 + tgt), 24'($urandom) & 24'h00FFFC};
      if (unmapped) a = 32'h2000_0010;
      @(negedge clk);
      m_req_valid[m] = 1'b1;
      m_req[m] = '{we: 1'($urandom), addr: a, wdata: $urandom, vote: 1'b0, label: '0, src: NODE_W'(m)};
      @(posedge clk);
      while (!m_req_ready[m]) @(posedge clk);
      @(negedge clk);
      m_req_valid[m] = 1'b0;
      while (!m_rsp_valid[m]) @(negedge clk);
      if (unmapped) begin
        if (m_rsp[m].err) derr_ok++;
      end else if (m_rsp[m].err || m_rsp[m].rdata != (a ^ 32'h5A5A5A5A ^ 32'(m))) bad_data++;
      served[m]++;
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < NM; m++) begin m_req_valid[m] = 1'b0; m_req[m] = '0; served[m] = 0; end
    for (int s = 0; s < NS; s++) seen[s] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    fork
      master(0, NREQ, 1'b0);
      master(1, NREQ, 1'b0);
      master(2, NREQ, 1'b0);
    join
    check(bad_data == 0, "every response matches its request");
    check(misroute == 0, "every request reached its decoded slave");
    check(seen[0] + seen[1] + seen[2] + seen[3] == 3 * NREQ, "slaves saw all requests exactly once");
    check(served[0] == NREQ && served[1] == NREQ && served[2] == NREQ, "all masters served");
    check(rr_seen > 0 && rr_viol == 0, "round-robin grant order");
    master(1, 3, 1'b1);
    check(derr_ok == 3, "unmapped address answered with err by the bus");
    check(seen[0] + seen[1] + seen[2] + seen[3] == 3 * NREQ, "unmapped request reached no slave");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Round-robin reference: a grant goes to the first waiting master after
  // the previously granted one.
  int unsigned rr_viol = 0, rr_seen = 0;
  int last_grant = 0;   // the arbiter pointer resets to master 0
  always @(negedge clk) begin
    #2;
    for (int m = 0; m < NM; m++) if (m_req_ready[m]) begin
      int expect_m;
      expect_m = -1;
      for (int k = NM; k >= 1; k--) if (m_req_valid[(last_grant + k) % NM]) expect_m = (last_grant + k) % NM;
      rr_seen++;
      if (m != expect_m) rr_viol++;
      last_grant = m;
    end
  end
endmodule
