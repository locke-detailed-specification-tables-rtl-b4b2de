// msg_fifo: first-in first-out queue of coherence messages.
//
// A register-array FIFO of DEPTH entries with valid/ready on both sides.
// in_ready is high while the queue has room; out_valid while it holds a
// message, whose value out shows. A push and a pop may happen in the same
// cycle. Used as the input queue of every node of the interconnect; the depth
// is this design's choice.
//
// Lint note: the embedded assertion uses rst_n in "disable iff", and lint
// reports that as SYNCASYNCNET (reset used both as the asynchronous flop
// reset and inside a clocked check). The assertion is not logic; the
// flops are all reset asynchronously.
module msg_fifo
  import locke_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  msg_t in,
  output logic out_valid,
  input  logic out_ready,
  output msg_t out
);
  localparam int unsigned PW = $clog2(DEPTH);
  typedef logic [PW-1:0] ptr_t;

  msg_t mem [DEPTH];
  ptr_t rd_q, wr_q;
  logic [PW:0] cnt_q;

  assign in_ready  = (cnt_q != (PW+1)'(DEPTH));
  assign out_valid = (cnt_q != '0);
  assign out       = mem[rd_q];

  logic push, pop;
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      if (push) begin
        mem[wr_q] <= in;
        wr_q      <= (wr_q == ptr_t'(DEPTH-1)) ? '0 : wr_q + ptr_t'(1);
      end
      if (pop) rd_q <= (rd_q == ptr_t'(DEPTH-1)) ? '0 : rd_q + ptr_t'(1);
      cnt_q <= cnt_q + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) in_valid && !in_ready |=> in_valid);
endmodule
