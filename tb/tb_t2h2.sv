// tb_t2h2 -- self-checking test of one T2H2 (capability unit + voters).
//
// The testbench stands in for the NoC: requests on the T2H2's master port
// addressed to its own voters are looped back into its slave port, all other
// requests go to a memory model. Remote replicas (labels 1, 2) are played
// by driving the slave port directly; replica 0 is the local tile, which
// reaches the voters through its vote capabilities. Checked: a plain write
// through a memory capability; an n-buffer vote on voter 1 whose agreed
// write leaves through the master port; a voted reconfiguration through the
// configuration voter (voter 0) that creates a new capability the tile can
// then use, while the configuration space is not reachable through the
// NoC; a single-buffer vote on voter 2; a voted tile reset; a slave-port
// request to a voter that does not exist.
module tb_t2h2;
  import midir_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] f_cfg = 4'd1;
  logic boot_en = 1'b1, boot_we = 1'b0;
  logic [CIDX_W-1:0] boot_idx = '0;
  cap_t boot_cap = '0;
  logic t_req_valid = 1'b0;
  tile_req_t t_req = '0;
  logic t_req_ready, t_rsp_valid, tile_reset, denied;
  tile_rsp_t t_rsp;
  logic m_req_valid, m_req_ready, m_rsp_valid;
  noc_req_t m_req;
  noc_rsp_t m_rsp;
  logic s_req_valid, s_rsp_valid;
  noc_req_t s_req;
  noc_rsp_t s_rsp;
  seq_t voter_seq [3];
  logic voter_susp [3];

  t2h2 #(.TILE_ID(0)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------ NoC stand-in
  // One request at a time: a request to this tile's voters is driven into
  // the slave port for one cycle and the voter's answer returned; any other
  // request is served by the memory model (err for non-memory addresses).
  typedef enum logic [1:0] {N_IDLE, N_LOOP, N_LOOPW, N_MEM} nst_e;
  nst_e nst = N_IDLE;
  data_t mem [4096];
  bit    mem_ok [4096];
  logic tb_s_valid = 1'b0;
  noc_req_t tb_s_req = '0;
  noc_req_t hold = '0;

  assign s_req_valid = tb_s_valid || (nst == N_LOOP);
  assign s_req       = tb_s_valid ? tb_s_req : hold;
  assign m_req_ready = m_req_valid && (nst == N_IDLE) && !tb_s_valid;

  always_ff @(posedge clk) begin
    m_rsp_valid <= 1'b0;
    unique case (nst)
      N_IDLE: if (m_req_valid && m_req_ready) begin
        hold <= m_req;
        nst  <= (m_req.addr[31:24] == 8'h10) ? N_LOOP : N_MEM;
      end
      N_LOOP: nst <= N_LOOPW;
      N_LOOPW: begin
        m_rsp_valid <= 1'b1;
        m_rsp       <= s_rsp;
        nst         <= N_IDLE;
      end
      N_MEM: begin
        m_rsp_valid <= 1'b1;
        m_rsp.err   <= (hold.addr[31:28] != 4'h0);
        m_rsp.rdata <= mem[hold.addr[13:2]];
        if (hold.we && hold.addr[31:28] == 4'h0) begin
          mem[hold.addr[13:2]]    <= hold.wdata;
          mem_ok[hold.addr[13:2]] <= 1'b1;
        end
        nst <= N_IDLE;
      end
      default: nst <= N_IDLE;
    endcase
  end

  // remote replica access on the slave port
  task automatic remote(input int lab, input bit we, input addr_t a, input data_t d, output noc_rsp_t r);
    @(negedge clk);
    while (nst != N_IDLE) @(negedge clk);
    tb_s_valid = 1'b1;
    tb_s_req = '{we: we, addr: a, wdata: d, vote: 1'b1, label: rid_t'(lab), src: NODE_W'(lab)};
    @(negedge clk);
    tb_s_valid = 1'b0;
    r = s_rsp;
  endtask
  task automatic remote_propose(input int lab, input int voter, input data_t msg[], input int seqn);
    noc_rsp_t r;
    foreach (msg[w]) remote(lab, 1, voter_base(0, voter) | addr_t'(VR_BUF) + addr_t'(12'(lab * 64 + w * 4)), msg[w], r);
    remote(lab, 1, voter_base(0, voter) | addr_t'(VR_COMMIT), {8'd0, 8'(msg.size()), 16'(seqn)}, r);
    check(!r.err, "remote proposal committed");
  endtask

  // local tile access
  task automatic op(input int cap, input bit we, input addr_t a, input data_t d, output tile_rsp_t r);
    @(negedge clk);
    t_req_valid = 1'b1;
    t_req = '{cap: CIDX_W'(cap), we: we, addr: a, wdata: d};
    @(posedge clk);
    while (!t_req_ready) @(posedge clk);
    @(negedge clk);
    t_req_valid = 1'b0;
    while (!t_rsp_valid) @(negedge clk);
    r = t_rsp;
  endtask
  task automatic local_propose(input int cap, input int voter, input data_t msg[], input int seqn);
    tile_rsp_t r;
    foreach (msg[w]) op(cap, 1, voter_base(0, voter) | addr_t'(VR_BUF) + addr_t'(12'(w * 4)), msg[w], r);
    op(cap, 1, voter_base(0, voter) | addr_t'(VR_COMMIT), {8'd0, 8'(msg.size()), 16'(seqn)}, r);
    check(!r.err, "local proposal committed");
  endtask

  task automatic boot(input int idx, input cap_t c);
    @(negedge clk);
    boot_we = 1'b1; boot_idx = CIDX_W'(idx); boot_cap = c;
    @(negedge clk);
    boot_we = 1'b0;
  endtask
  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  tile_rsp_t tr;
  noc_rsp_t nr;
  data_t cfg_msg[];

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (mem_ok[i]) mem_ok[i] = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    boot(0, '{valid: 1, r: 1, w: 1, vote: 0, label: 0, base: 32'h0, size: 32'h1000});
    boot(1, '{valid: 1, r: 1, w: 1, vote: 1, label: 0, base: voter_base(0, 1), size: 32'h1000});
    boot(2, '{valid: 1, r: 1, w: 1, vote: 1, label: 0, base: voter_base(0, 0), size: 32'h1000});
    boot(4, '{valid: 1, r: 1, w: 1, vote: 0, label: 0, base: 32'h2000_0000, size: 32'h1000});
    @(negedge clk) boot_en = 1'b0;

    // plain capability-checked write
    op(0, 1, 32'h10, 32'h1234, tr);
    check(!tr.err && mem[32'h10 >> 2] == 32'h1234, "direct write through memory capability");
    op(0, 0, 32'h10, 32'h0, tr);
    check(!tr.err && tr.rdata == 32'h1234, "direct read through memory capability");

    // n-buffer vote on voter 1: replica 0 (local) is faulty
    local_propose(1, 1, '{32'h40, 32'h0BAD}, 0);
    remote_propose(1, 1, '{32'h40, 32'h0055}, 0);
    idle(4);
    check(!mem_ok[32'h40 >> 2], "nothing written before a majority");
    remote_propose(2, 1, '{32'h40, 32'h0055}, 0);
    idle(12);
    check(mem_ok[32'h40 >> 2] && mem[32'h40 >> 2] == 32'h0055, "voted write applied through the master port");
    check(voter_susp[1] && voter_seq[1] == 0, "voter 1 suspended after masking replica 0");

    // the configuration space is not reachable by a direct access
    op(4, 1, cfg_address(3, CF_FLAGS), 32'h7, tr);
    check(tr.err, "direct access to the configuration space fails");
    op(3, 0, 32'h2010, 32'h0, tr);
    check(tr.err, "capability 3 not installed by the direct attempt");

    // voted reconfiguration: install capability 3 = read-write [0x800, 0x900)
    cfg_msg = '{cfg_address(3, CF_BASE), 32'h800, 32'h100, 32'b0_000_0111};
    local_propose(2, 0, cfg_msg, 0);
    remote_propose(1, 0, cfg_msg, 0);
    idle(10);
    check(voter_seq[0] == 1 && !voter_susp[0], "configuration vote succeeded");
    op(3, 1, 32'h8FC, 32'h77, tr);
    check(!tr.err && mem[32'h8FC >> 2] == 32'h77, "voted capability usable by the tile");
    op(3, 1, 32'h900, 32'h77, tr);
    check(tr.err, "voted capability bounded");

    // single-buffer vote on voter 2: leader is replica 0 (seq 0)
    remote(0, 1, voter_base(0, 2) | addr_t'(VR_BUF), 32'h80, nr);
    remote(0, 1, voter_base(0, 2) | addr_t'(VR_BUF) + addr_t'(12'h4), 32'h99, nr);
    remote(0, 1, voter_base(0, 2) | addr_t'(VR_COMMIT), {8'd0, 8'd2, 16'd0}, nr);
    remote(2, 1, voter_base(0, 2) | addr_t'(VR_AGREE), {14'd0, AGR_AGREE, 16'd0}, nr);
    idle(10);
    check(mem_ok[32'h80 >> 2] && mem[32'h80 >> 2] == 32'h99 && voter_seq[2] == 1, "single-buffer vote applied");

    // voted tile reset
    cfg_msg = '{cfg_address(int'(CF_TILE_CTRL_IDX), CF_BASE), 32'd1};
    remote_propose(1, 0, cfg_msg, 1);
    remote_propose(2, 0, cfg_msg, 1);
    idle(8);
    check(tile_reset, "voted tile reset");

    remote(1, 0, voter_base(0, 7), 32'h0, nr);
    check(nr.err, "request to a missing voter answered with err");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
