// tb_l2_controller: directed test of the L2 controller against a scripted network.
//
// The testbench plays the L1s and the memory. Starting from the reset state
// (every line M with all tokens), it drives lines through the L2 rows: giving
// all tokens to a reader, pointing later requesters at the token holder,
// collecting replaced tokens (PA, A), tokens-only transfer from A, owner data
// arriving at an unallocated line, send1Token from O with a replaced token
// arriving meanwhile, writeback to memory and a stalled second replacement,
// Special requests to an unallocated line, the DataAllTokens classification,
// and an error cell. Every message is compared with values worked out by hand.
module tb_l2_controller;
  import locke_pkg::*;

  localparam node_t ME  = 3'd4;
  localparam node_t MEM = 3'd5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      net_in_valid, net_in_ready, net_out_valid, net_out_ready;
  msg_t      net_in, net_out;
  logic      repl_valid, repl_ready;
  addr_t     repl_addr;
  logic      ev_fire, err;
  l2_state_e ev_state;
  l2_event_e ev_event;
  cell_e     ev_cell;

  l2_controller #(.MY_ID(ME), .MEM_ID(MEM), .TOTAL_TOKENS(5), .LINES(16)) dut (.*);

  int checks = 0, failures = 0;
  msg_t outq [$];
  int   cyc = 0;
  l2_state_e last_state;
  l2_event_e last_event;
  cell_e     last_cell;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && net_out_valid && net_out_ready) outq.push_back(net_out);
    if (ev_fire) begin last_state <= ev_state; last_event <= ev_event; last_cell <= ev_cell; end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  function automatic msg_t mk(msg_type_e t, node_t src, addr_t addr, tok_t tokens = '0,
                              logic owner = 1'b0, data_t data = '0);
    msg_t m;
    m = '0;
    m.mtype = t; m.src = src; m.dst = ME; m.addr = addr; m.tokens = tokens;
    m.owner = owner; m.data = data;
    return m;
  endfunction

  task automatic send(input msg_t m);
    net_in       <= m;
    net_in_valid <= 1'b1;
    @(posedge clk);
    while (!net_in_ready) @(posedge clk);
    net_in_valid <= 1'b0;
    repeat (3) @(posedge clk);
  endtask

  task automatic repl(input addr_t a);
    repl_addr  <= a;
    repl_valid <= 1'b1;
    @(posedge clk);
    while (!repl_ready) @(posedge clk);
    repl_valid <= 1'b0;
    repeat (3) @(posedge clk);
  endtask

  task automatic expect_msg(input msg_type_e t, input node_t dst, input addr_t addr,
                            input tok_t tokens = '0, input logic owner = 1'b0,
                            input data_t data = '0, input bit chk_data = 1'b0,
                            input node_t info = '0, input bit chk_info = 1'b0,
                            input logic bcast = 1'b0);
    msg_t m;
    if (outq.size() == 0) begin
      check(1'b0, $sformatf("expected %s, nothing sent", t.name()));
      return;
    end
    m = outq.pop_front();
    check(m.mtype == t && m.addr == addr && m.src == ME && m.dst == dst && m.bcast == bcast,
          $sformatf("msg %s addr %0d dst %0d bc %0d; expected %s addr %0d dst %0d bc %0d",
                    m.mtype.name(), m.addr, m.dst, m.bcast, t.name(), addr, dst, bcast));
    if (t inside {MSG_DATA, MSG_TOKENS})
      check(m.tokens == tokens && m.owner == owner,
            $sformatf("%s tokens %0d owner %0d expected %0d %0d", t.name(), m.tokens, m.owner,
                      tokens, owner));
    if (chk_data) check(m.data == data, $sformatf("data %h expected %h", m.data, data));
    if (chk_info) check(m.info_node == info, $sformatf("info %0d expected %0d", m.info_node, info));
  endtask

  task automatic expect_none(input string where);
    check(outq.size() == 0, $sformatf("no message expected after %s, %0d sent", where, outq.size()));
    outq.delete();
  endtask

  task automatic expect_cell(input l2_state_e s, input l2_event_e e);
    check(last_state == s && last_event == e,
          $sformatf("cell %s/%s expected %s/%s", last_state.name(), last_event.name(),
                    s.name(), e.name()));
  endtask

  initial begin
    net_in_valid = 1'b0; net_in = '0; net_out_ready = 1'b1;
    repl_valid = 1'b0; repl_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    // M at reset: a GETS takes every token and the owner
    send(mk(MSG_GETS, 3'd1, 10'd3));
    expect_cell(L2_M, L2E_L1_GETS);
    expect_msg(MSG_DATA, 3'd1, 10'd3, 4'd5, 1'b1, 32'h0, 1);
    send(mk(MSG_GETS, 3'd2, 10'd3));                      // PX: informOwnerDest
    expect_msg(MSG_RETRY, 3'd2, 10'd3, , , , , 3'd1, 1);
    send(mk(MSG_GETX, 3'd2, 10'd3));                      // PX: informTokensDest
    expect_msg(MSG_RETRY, 3'd2, 10'd3, , , , , 3'd1, 1);
    send(mk(MSG_TOKENS, 3'd0, 10'd3, 4'd2));              // replaced tokens: PA
    expect_cell(L2_PX, L2E_TOKENS);
    expect_msg(MSG_ACK, 3'd0, 10'd3);
    send(mk(MSG_ACK, 3'd1, 10'd3));                       // PA + Ack -> A
    expect_cell(L2_PA, L2E_ACK);
    send(mk(MSG_GETS, 3'd3, 10'd3));                      // A ignores GETS
    expect_cell(L2_A, L2E_L1_GETS);
    expect_none("GETS in A");
    send(mk(MSG_GETX, 3'd3, 10'd3));                      // A: sendTokens /PX
    expect_msg(MSG_TOKENS, 3'd3, 10'd3, 4'd2, 1'b0);
    send(mk(MSG_ACK, 3'd3, 10'd3));                       // PX + Ack -> I
    expect_cell(L2_PX, L2E_ACK);
    // owner data reaches an unallocated line: O
    send(mk(MSG_DATA, 3'd2, 10'd3, 4'd3, 1'b1, 32'hCC));
    expect_cell(L2_I, L2E_DATAOWNER);
    expect_msg(MSG_ACK, 3'd2, 10'd3);
    send(mk(MSG_GETS, 3'd1, 10'd3));                      // O: send1Token /PO
    expect_msg(MSG_DATA, 3'd1, 10'd3, 4'd1, 1'b0, 32'hCC, 1);
    send(mk(MSG_TOKENS, 3'd0, 10'd3, 4'd1));              // PO: updateNumTokens sendAck
    expect_cell(L2_PO, L2E_TOKENS);
    expect_msg(MSG_ACK, 3'd0, 10'd3);
    send(mk(MSG_ACK, 3'd1, 10'd3));                       // PO + Ack -> O
    expect_cell(L2_PO, L2E_ACK);
    // writeback: 3 - 1 + 1 = 3 tokens with the owner and the data
    repl(10'd3);
    expect_cell(L2_O, L2E_REPLACEMENT);
    expect_msg(MSG_DATA, MEM, 10'd3, 4'd3, 1'b1, 32'hCC, 1);
    repl(10'd3);                                          // PX: stalled
    expect_cell(L2_PX, L2E_REPLACEMENT);
    check(last_cell == CELL_STALL, "replacement stalls in PX");
    expect_none("stalled replacement");
    send(mk(MSG_ACK, MEM, 10'd3));                        // -> I
    send(mk(MSG_SGETS, 3'd1, 10'd3));                     // I: askToRetryBC
    expect_msg(MSG_RETRY, 3'd1, 10'd3, , , , , , , 1'b1);
    // tokens then the rest of them with data: A, then DataAllTokens -> M
    send(mk(MSG_TOKENS, 3'd0, 10'd3, 4'd1));
    expect_cell(L2_I, L2E_TOKENS);
    expect_msg(MSG_ACK, 3'd0, 10'd3);
    send(mk(MSG_DATA, 3'd1, 10'd3, 4'd4, 1'b1, 32'hDD));
    expect_cell(L2_A, L2E_DATAALLTOK);
    expect_msg(MSG_ACK, 3'd1, 10'd3);
    send(mk(MSG_GETX, 3'd2, 10'd3));                      // M: all 5 tokens with data DD
    expect_msg(MSG_DATA, 3'd2, 10'd3, 4'd5, 1'b1, 32'hDD, 1);
    send(mk(MSG_ACK, 3'd2, 10'd3));
    // shared data to an unallocated line: S; S ignores GETS, gives tokens to GETX
    send(mk(MSG_DATA, 3'd1, 10'd3, 4'd1, 1'b0, 32'hEE));
    expect_cell(L2_I, L2E_DATASHARED);
    expect_msg(MSG_ACK, 3'd1, 10'd3);
    send(mk(MSG_GETS, 3'd2, 10'd3));
    expect_none("GETS in S");
    send(mk(MSG_GETX, 3'd2, 10'd3));
    expect_msg(MSG_DATA, 3'd2, 10'd3, 4'd1, 1'b0, 32'hEE, 1);
    check(!err, "no error cell so far");
    send(mk(MSG_ACK, 3'd2, 10'd9));                       // Ack to a line in M: error
    check(err, "Ack in M raises the error flag");
    expect_none("end");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
