// tb_locke_bus: checks delivery sets, blocking and arbitration of the bus.
//
// Two L1s (nodes 0, 1), the L2 (node 2) and the memory (node 3). The test
// offers messages and checks, from the message kind alone, which receivers
// get them: point-to-point to dst, GETS/GETX and broadcast Special requests to
// every cache but the sender, COMPLETE to the other L1. It checks that a
// message for a busy receiver waits without holding up a message for an idle
// one, that one message moves per cycle, and that three senders offering at
// once are served in round-robin order. Stimulus changes on the falling edge.
module tb_locke_bus;
  import locke_pkg::*;

  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] src_valid, src_ready, dst_valid, dst_ready;
  msg_t         src_msg [N];
  msg_t         dst_msg;

  locke_bus #(.NUM_L1(2), .NODES(N)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic msg_t mk(msg_type_e t, int src, int dst, logic bc = 1'b0);
    msg_t m;
    m = '0; m.mtype = t; m.src = node_t'(src); m.dst = node_t'(dst); m.bcast = bc;
    m.addr = addr_t'(16 * src + dst);
    return m;
  endfunction

  // offer one message from src; check it is delivered to exactly `who`
  task automatic one(input msg_type_e t, input int src, input int dst, input logic bc,
                     input logic [N-1:0] who);
    src_msg[src] = mk(t, src, dst, bc);
    src_valid    = '0;
    src_valid[src] = 1'b1;
    #1;
    check(src_ready[src] && dst_valid == who && dst_msg == src_msg[src],
          $sformatf("%s from %0d: delivered to %b, expected %b", t.name(), src, dst_valid, who));
    @(negedge clk);
    src_valid = '0;
  endtask

  initial begin
    src_valid = '0; dst_ready = '1;
    for (int i = 0; i < N; i++) src_msg[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    one(MSG_DATA,     0, 2, 1'b0, 4'b0100);
    one(MSG_ACK,      2, 1, 1'b0, 4'b0010);
    one(MSG_GETS,     1, 0, 1'b0, 4'b0101);
    one(MSG_GETX,     0, 0, 1'b0, 4'b0110);
    one(MSG_GETX,     2, 0, 1'b0, 4'b0011);   // (L2 never sends one; rule still holds)
    one(MSG_SGETS,    2, 0, 1'b1, 4'b0011);
    one(MSG_SGETX,    1, 2, 1'b0, 4'b0100);
    one(MSG_COMPLETE, 0, 0, 1'b1, 4'b0010);
    one(MSG_RETRY,    2, 0, 1'b1, 4'b0001);   // RETRY is never broadcast
    one(MSG_DATA,     2, 3, 1'b0, 4'b1000);   // writeback to memory

    // busy receiver: message 0->2 waits, message 1->0 goes
    dst_ready    = 4'b1011;
    src_msg[0]   = mk(MSG_DATA, 0, 2);
    src_msg[1]   = mk(MSG_DATA, 1, 0);
    src_valid    = 4'b0011;
    #1;
    check(src_ready == 4'b0010 && dst_valid == 4'b0001, "message to idle receiver passes a blocked one");
    @(negedge clk);
    src_valid = 4'b0001;
    repeat (3) begin
      #1; check(src_ready == 4'b0000 && dst_valid == 4'b0000, "blocked message waits");
      @(negedge clk);
    end
    dst_ready = '1;
    #1; check(src_ready == 4'b0001 && dst_valid == 4'b0100, "blocked message goes once ready");
    @(negedge clk);

    // three senders at once: one per cycle, round robin, all served in 3 cycles
    begin
      logic [N-1:0] served, g;
      int order [3];
      served = '0;
      src_msg[0] = mk(MSG_DATA, 0, 3);
      src_msg[1] = mk(MSG_DATA, 1, 2);
      src_msg[2] = mk(MSG_DATA, 2, 0);
      src_valid  = 4'b0111;
      for (int c = 0; c < 3; c++) begin
        #1;
        check($countones(src_ready) == 1, "exactly one grant per cycle");
        for (int s = 0; s < 3; s++) if (src_ready[s]) order[c] = s;
        served |= src_ready;
        g = src_ready;
        @(negedge clk);
        src_valid &= ~g;
      end
      check(served == 4'b0111, "all three senders served in three cycles");
      // last grant before was node 0 (blocked message), so the order is 1, 2, 0
      check(order[0] == 1 && order[1] == 2 && order[2] == 0,
            $sformatf("round-robin order %0d %0d %0d, expected 1 2 0", order[0], order[1], order[2]));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
