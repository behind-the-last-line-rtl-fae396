// tb_capability_unit -- self-checking test of the capability register file.
//
// Boot installs four capabilities (read-write memory region, read-only
// region, vote capability with label 2, an invalid entry). The testbench
// then plays the tile and a NoC slave that answers every request two cycles
// later with rdata = ~addr. Checked: permitted reads and writes reach the
// NoC unchanged with the capability's label and vote flag and return the
// slave's answer; out-of-region, missing-right, invalid and out-of-range
// capabilities are dropped (no NoC request, err to the tile, denied pulse);
// the boot port is locked once boot_en falls; the voted configuration port
// rewrites a capability field by field and drives tile reset.
module tb_capability_unit;
  import midir_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic boot_en = 1'b1, boot_we = 1'b0;
  logic [CIDX_W-1:0] boot_idx = '0;
  cap_t boot_cap = '0;
  logic cfg_valid = 1'b0;
  addr_t cfg_addr = '0;
  data_t cfg_data = '0;
  logic t_req_valid = 1'b0;
  tile_req_t t_req = '0;
  logic t_req_ready, t_rsp_valid;
  tile_rsp_t t_rsp;
  logic m_req_valid, m_req_ready, m_rsp_valid;
  noc_req_t m_req;
  noc_rsp_t m_rsp;
  logic tile_reset, denied;

  capability_unit #(.NUM_CAPS(20), .NODE_ID(3)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // NoC slave model
  int unsigned n_noc = 0, n_denied = 0;
  noc_req_t last_req;
  logic [1:0] pend = '0;
  assign m_req_ready = m_req_valid && (pend == 0);
  always_ff @(posedge clk) begin
    m_rsp_valid <= 1'b0;
    if (m_req_valid && m_req_ready) begin
      last_req <= m_req;
      n_noc    <= n_noc + 1;
      pend     <= 2'd2;
    end else if (pend == 2'd1) begin
      m_rsp_valid <= 1'b1;
      m_rsp.rdata <= ~last_req.addr;
      m_rsp.err   <= 1'b0;
      pend        <= 2'd0;
    end else if (pend != 0) pend <= pend - 1'b1;
    if (denied) n_denied <= n_denied + 1;
  end

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

  task automatic boot(input int idx, input cap_t c);
    @(negedge clk);
    boot_we = 1'b1; boot_idx = CIDX_W'(idx); boot_cap = c;
    @(negedge clk);
    boot_we = 1'b0;
  endtask

  task automatic cfg(input int idx, input logic [1:0] field, input data_t d);
    @(negedge clk);
    cfg_valid = 1'b1; cfg_addr = cfg_address(idx, field); cfg_data = d;
    @(negedge clk);
    cfg_valid = 1'b0;
  endtask

  tile_rsp_t r;
  int unsigned n0, d0;

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
    boot(0, '{valid: 1, r: 1, w: 1, vote: 0, label: 0, base: 32'h1000, size: 32'h100});
    boot(1, '{valid: 1, r: 1, w: 0, vote: 0, label: 0, base: 32'h2000, size: 32'h10});
    boot(2, '{valid: 1, r: 1, w: 1, vote: 1, label: 2, base: 32'h1000_1000, size: 32'h1000});
    boot(3, '{valid: 0, r: 1, w: 1, vote: 0, label: 0, base: 32'h0, size: 32'hFFFF_FFFF});
    @(negedge clk) boot_en = 1'b0;
    boot(4, '{valid: 1, r: 1, w: 1, vote: 0, label: 0, base: 32'h0, size: 32'hFFFF_FFFF});

    // permitted accesses (Fig. 2a: c1.write(a, val) inside [p, p+s))
    op(0, 1'b1, 32'h10FC, 32'hCAFE, r);
    check(!r.err && n_noc == 1, "write inside region forwarded");
    check(last_req.we && last_req.addr == 32'h10FC && last_req.wdata == 32'hCAFE
          && !last_req.vote && last_req.src == 4'd3, "forwarded request unchanged");
    op(1, 1'b0, 32'h2004, '0, r);
    check(!r.err && r.rdata == ~32'h2004, "read through read-only capability returns data");
    op(2, 1'b1, 32'h1000_100C, 32'h5, r);
    check(last_req.vote && last_req.label == 3'd2, "vote capability inserts label and vote flag");

    // denied accesses
    n0 = n_noc; d0 = n_denied;
    op(0, 1'b1, 32'h1100, 32'h1, r);  check(r.err, "address at base+size denied");
    op(0, 1'b0, 32'h0FFC, 32'h1, r);  check(r.err, "address below base denied");
    op(1, 1'b1, 32'h2000, 32'h1, r);  check(r.err, "write without write right denied");
    op(3, 1'b0, 32'h10, 32'h1, r);    check(r.err, "invalid capability denied");
    op(25, 1'b0, 32'h1000, 32'h1, r); check(r.err, "capability index out of range denied");
    op(4, 1'b0, 32'h1000, 32'h1, r);  check(r.err, "boot port locked after boot");
    check(n_noc == n0, "denied operations never reach the NoC");
    check(n_denied == d0 + 6, "each denied operation pulses denied");

    // voted configuration: turn capability 5 into a write-only window
    op(5, 1'b1, 32'h3000, 32'h1, r);  check(r.err, "capability 5 empty before configuration");
    cfg(5, CF_BASE, 32'h3000);
    cfg(5, CF_SIZE, 32'h40);
    cfg(5, CF_FLAGS, 32'b0_100_0101);   // label 4, w, valid
    op(5, 1'b1, 32'h303C, 32'h9, r);
    check(!r.err && last_req.label == 3'd4 && last_req.addr == 32'h303C, "configured capability usable");
    op(5, 1'b0, 32'h3000, 32'h0, r);  check(r.err, "configured capability has no read right");
    cfg(0, CF_FLAGS, 32'd0);
    op(0, 1'b1, 32'h1000, 32'h1, r);  check(r.err, "revoked capability denied");

    // voted tile reset
    check(!tile_reset, "tile not in reset");
    cfg(int'(CF_TILE_CTRL_IDX), CF_BASE, 32'd1);
    check(tile_reset, "voted tile reset asserted");
    cfg(int'(CF_TILE_CTRL_IDX), CF_BASE, 32'd0);
    check(!tile_reset, "voted tile reset released");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
