// vote_apply -- writes out the operation a voter has agreed on.
//
// A voter proposal is a short message of MSG_WORDS 32-bit words; `size` of
// them are used. Word 0 is the destination address, words 1..size-1 are the
// data written to dest, dest+4, ... (the paper says that voted operations are
// "normally simple writes"; the message layout is this design's own choice).
// A size of 1 is an empty operation that only advances the vote.
//
// Timing: `start` (one cycle) latches size; the engine then presents one
// write at a time on a_valid/a_addr/a_data and moves on when a_done pulses.
// `done` pulses in the cycle after the last write completed. The message must
// stay stable while busy; the voters keep their buffers frozen while applying.
module vote_apply
  import midir_pkg::*;
#(
  parameter int unsigned MSG_WORDS = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  data_t msg [MSG_WORDS],
  input  logic [7:0] size,
  output logic  busy,
  output logic  done,
  output logic  a_valid,
  output addr_t a_addr,
  output data_t a_data,
  input  logic  a_done
);

  logic [7:0] idx_q, size_q;

  assign a_valid = busy && (idx_q < size_q);
  assign a_addr  = msg[0] + addr_t'({idx_q - 8'd1, 2'b00});
  assign a_data  = msg[idx_q[$clog2(MSG_WORDS)-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      idx_q  <= 8'd1;
      size_q <= 8'd0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          idx_q  <= 8'd1;
          size_q <= size;
        end
      end else if (idx_q >= size_q) begin
        busy <= 1'b0;
        done <= 1'b1;
      end else if (a_done) begin
        idx_q <= idx_q + 8'd1;
      end
    end
  end

endmodule
