// tb_shared_mem -- self-checking test of the on-chip memory.
//
// Writes a pseudo-random word to 200 random addresses, keeps a reference
// copy in an associative array, then reads back every written address and
// the first and last word. Each response must come exactly one cycle after
// its request.
module tb_shared_mem;
  import midir_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic s_req_valid = 1'b0, s_rsp_valid;
  noc_req_t s_req = '0;
  noc_rsp_t s_rsp;

  shared_mem #(.MEM_WORDS(4096)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic access(input bit we, input addr_t a, input data_t d, output data_t q);
    @(negedge clk);
    s_req_valid = 1'b1;
    s_req = '{we: we, addr: a, wdata: d, vote: 1'b0, label: '0, src: '0};
    @(negedge clk);
    s_req_valid = 1'b0;
    check(s_rsp_valid && !s_rsp.err, "response in the next cycle");
    q = s_rsp.rdata;
  endtask

  data_t ref_mem [int unsigned];
  data_t q;

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
    access(1'b1, 32'h0, 32'h1111_0000, q);      ref_mem[0] = 32'h1111_0000;
    access(1'b1, 32'h3FFC, 32'h2222_FFFF, q);   ref_mem[4095] = 32'h2222_FFFF;
    for (int k = 0; k < 200; k++) begin
      int unsigned w;
      data_t d;
      w = 1 + ($urandom % 4094);
      d = $urandom;
      access(1'b1, addr_t'(w << 2), d, q);
      ref_mem[w] = d;
    end
    foreach (ref_mem[w]) begin
      access(1'b0, addr_t'(w << 2), '0, q);
      check(q == ref_mem[w], $sformatf("read back word %0d", w));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
