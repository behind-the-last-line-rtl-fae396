// shared_mem -- on-chip memory on the NoC.
//
// Holds what the replicated hypervisor shares: the syscall log, the error
// log and read-shared state such as capability spaces. The paper names it
// only; this is a plain word-addressed RAM (MEM_WORDS x 32 bit) with a NoC
// slave port. Access control is not its job: every request reaching it has
// passed a capability check in the sender's T2H2 or comes from a voter.
// Address bits above the array are ignored (the region wraps).
//
// Timing: each request is answered in the next cycle; reads return the word
// at addr[...:2], writes return err = 0.
//
// Its err output is constantly 0: every word address inside the region is
// valid, and decode errors are answered by the interconnect.
module shared_mem
  import midir_pkg::*;
#(
  parameter int unsigned MEM_WORDS = 4096
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     s_req_valid,
  input  noc_req_t s_req,
  output logic     s_rsp_valid,
  output noc_rsp_t s_rsp
);

  localparam int unsigned AW = $clog2(MEM_WORDS);
  data_t mem [MEM_WORDS];
  logic [AW-1:0] widx;
  assign widx = s_req.addr[2 +: AW];

  always_ff @(posedge clk) begin
    if (s_req_valid && s_req.we) mem[widx] <= s_req.wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rsp_valid <= 1'b0;
      s_rsp       <= '0;
    end else begin
      s_rsp_valid <= s_req_valid;
      s_rsp.err   <= 1'b0;
      s_rsp.rdata <= (s_req_valid && !s_req.we) ? mem[widx] : '0;
    end
  end

endmodule
