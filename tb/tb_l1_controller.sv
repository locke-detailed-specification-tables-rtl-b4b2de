// tb_l1_controller: directed test of one L1 controller against a scripted network.
//
// The testbench plays the processor and every other node. It walks one line
// at a time through the protocol paths (miss and fill, read sharing with the
// owner keeping the owner token, a write losing to a higher-priority GETX, the
// frozen state and its wake-up, replacement of a shared line, retries, the
// counting of several outstanding acks, request numbers and the dropping of
// stale retries, an error cell) and compares every
// processor response and every message sent with values written out by hand
// from the protocol rules. It also checks the timing: the processor response
// comes exactly one cycle after the request is accepted.
module tb_l1_controller;
  import locke_pkg::*;

  localparam node_t ME = 3'd0;
  localparam node_t L2 = 3'd4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       net_in_valid, net_in_ready, net_out_valid, net_out_ready;
  msg_t       net_in, net_out;
  logic       proc_req_valid, proc_req_ready, proc_resp_valid;
  proc_req_t  proc_req;
  proc_resp_t proc_resp;
  logic       ev_fire, err;
  l1_state_e  ev_state;
  l1_event_e  ev_event;
  cell_e      ev_cell;

  l1_controller #(.MY_ID(ME), .L2_ID(L2), .TOTAL_TOKENS(5), .SETS(4)) dut (.*);

  int checks = 0, failures = 0;
  msg_t outq [$];
  int   cyc = 0;
  rseq_t last_rseq = '0;   // request number of the latest request the DUT sent
  logic saw_freeze = 1'b0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && net_out_valid && net_out_ready) outq.push_back(net_out);
    if (ev_fire && ev_event == L1E_FREEZEGETX) saw_freeze <= 1'b1;
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
                              logic owner = 1'b0, data_t data = '0, prio_t prio = '0,
                              node_t info = '0, logic bcast = 1'b0);
    msg_t m;
    m = '0;
    m.mtype = t; m.src = src; m.dst = ME; m.addr = addr; m.tokens = tokens;
    m.owner = owner; m.data = data; m.prio = prio; m.info_node = info; m.bcast = bcast;
    return m;
  endfunction

  task automatic send(input msg_t m);
    net_in       <= m;
    net_in_valid <= 1'b1;
    @(posedge clk);
    while (!net_in_ready) @(posedge clk);
    net_in_valid <= 1'b0;
    repeat (3) @(posedge clk);   // let the output stage drain
  endtask

  task automatic proc(input logic store, input addr_t addr, input data_t wdata, input prio_t prio,
                      input resp_e code, input data_t rdata = '0, input bit chk_data = 1'b0);
    proc_req       <= '{store: store, addr: addr, wdata: wdata, prio: prio};
    proc_req_valid <= 1'b1;
    @(posedge clk);
    while (!proc_req_ready) @(posedge clk);
    proc_req_valid <= 1'b0;
    #1;
    check(proc_resp_valid, "response one cycle after request");
    check(proc_resp.code == code,
          $sformatf("proc %s addr %0d: code %s expected %s", store ? "store" : "load", addr,
                    proc_resp.code.name(), code.name()));
    if (chk_data)
      check(proc_resp.rdata == rdata, $sformatf("load data %h expected %h", proc_resp.rdata, rdata));
    repeat (3) @(posedge clk);
  endtask

  task automatic expect_msg(input msg_type_e t, input node_t dst, input addr_t addr,
                            input tok_t tokens = '0, input logic owner = 1'b0,
                            input data_t data = '0, input bit chk_data = 1'b0,
                            input node_t info = '0, input bit chk_info = 1'b0,
                            input logic bcast = 1'b0, input node_t src = ME);
    msg_t m;
    if (outq.size() == 0) begin
      check(1'b0, $sformatf("expected %s, nothing sent", t.name()));
      return;
    end
    m = outq.pop_front();
    if (m.mtype inside {MSG_GETS, MSG_GETX, MSG_SGETS, MSG_SGETX}) last_rseq = m.rseq;
    if (t inside {MSG_GETS, MSG_GETX}) bcast = 1'b1;   // requests always broadcast
    check(m.mtype == t && m.addr == addr && m.src == src && m.bcast == bcast,
          $sformatf("msg %s addr %0d src %0d bc %0d; expected %s addr %0d src %0d bc %0d",
                    m.mtype.name(), m.addr, m.src, m.bcast, t.name(), addr, src, bcast));
    if (!(t inside {MSG_GETS, MSG_GETX, MSG_COMPLETE}) && !(bcast))
      check(m.dst == dst, $sformatf("%s dst %0d expected %0d", t.name(), m.dst, dst));
    if (t inside {MSG_DATA, MSG_TOKENS})
      check(m.tokens == tokens && m.owner == owner,
            $sformatf("%s tokens %0d owner %0d expected %0d %0d", t.name(), m.tokens, m.owner,
                      tokens, owner));
    if (chk_data) check(m.data == data, $sformatf("data %h expected %h", m.data, data));
    if (chk_info) check(m.info_node == info, $sformatf("info %0d expected %0d", m.info_node, info));
  endtask

  // a RETRY answering the DUT's latest request (stale: answering an older one)
  function automatic msg_t retry(node_t src, addr_t addr, node_t info, logic bcast,
                                 bit stale = 1'b0);
    msg_t m;
    m = mk(MSG_RETRY, src, addr, , , , , info, bcast);
    m.rseq = stale ? last_rseq - rseq_t'(1) : last_rseq;
    return m;
  endfunction

  task automatic expect_none(input string where);
    check(outq.size() == 0, $sformatf("no message expected after %s, %0d sent", where, outq.size()));
    outq.delete();
  endtask

  initial begin
    net_in_valid   = 1'b0;
    net_in         = '0;
    net_out_ready  = 1'b1;
    proc_req_valid = 1'b0;
    proc_req       = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    // 1. load miss: GETS broadcast, line IS
    proc(0, 10'd5, '0, '0, RESP_ISSUED);
    expect_msg(MSG_GETS, '0, 10'd5);
    proc(0, 10'd5, '0, '0, RESP_STALL);                  // IS stalls loads
    // 2. all tokens arrive from the L2: M, ack to the sender
    send(mk(MSG_DATA, L2, 10'd5, 4'd5, 1'b1, 32'hAB));
    expect_msg(MSG_ACK, L2, 10'd5);
    proc(0, 10'd5, '0, '0, RESP_DONE, 32'hAB, 1);
    proc(1, 10'd5, 32'h11, '0, RESP_DONE);
    proc(0, 10'd5, '0, '0, RESP_DONE, 32'h11, 1);
    expect_none("hits");
    // 3. GETS from node 1: one token and data, keep the owner (PO)
    send(mk(MSG_GETS, 3'd1, 10'd5));
    expect_msg(MSG_DATA, 3'd1, 10'd5, 4'd1, 1'b0, 32'h11, 1);
    proc(0, 10'd5, '0, '0, RESP_STALL);                  // PO stalls
    send(mk(MSG_ACK, 3'd1, 10'd5));
    expect_none("last ack in PO");
    proc(0, 10'd5, '0, '0, RESP_DONE, 32'h11, 1);        // back in O
    // 4. store in O: GETX with the store's priority
    proc(1, 10'd5, 32'h22, 4'd3, RESP_ISSUED);
    expect_msg(MSG_GETX, '0, 10'd5);
    proc(1, 10'd5, 32'h22, 4'd3, RESP_STALL);            // not re-sent while pending
    expect_none("pending store");
    // 5. higher-priority GETX from node 2: FreezeGETX, all 4 tokens and owner go (PX)
    send(mk(MSG_GETX, 3'd2, 10'd5, '0, 1'b0, '0, 4'd7));
    check(saw_freeze, "GETX of higher priority triggers FreezeGETX");
    expect_msg(MSG_DATA, 3'd2, 10'd5, 4'd4, 1'b1, 32'h11, 1);
    // 6. GETS in PX: tell the requester where the owner went
    send(mk(MSG_GETS, 3'd3, 10'd5));
    expect_msg(MSG_RETRY, 3'd3, 10'd5, , , , , 3'd2, 1);
    // data in PX: bounced to the L2 keeping its source (the L2 acks node 3)
    send(mk(MSG_DATA, 3'd3, 10'd5, 4'd1, 1'b0, 32'hC3));
    expect_msg(MSG_DATA, L2, 10'd5, 4'd1, 1'b0, 32'hC3, 1, , , , 3'd3);
    send(mk(MSG_ACK, 3'd2, 10'd5));
    expect_none("ack in PX");
    proc(0, 10'd5, '0, '0, RESP_ISSUED);                 // I again: new GETS
    expect_msg(MSG_GETS, '0, 10'd5);
    // 7. shared fill, then replacement by a conflicting address (5 and 9 share set 1)
    send(mk(MSG_DATA, 3'd2, 10'd5, 4'd1, 1'b0, 32'h33));
    expect_msg(MSG_ACK, 3'd2, 10'd5);
    proc(0, 10'd5, '0, '0, RESP_DONE, 32'h33, 1);        // S
    proc(0, 10'd9, '0, '0, RESP_ISSUED);                 // Replacement of line 5
    expect_msg(MSG_TOKENS, L2, 10'd5, 4'd1, 1'b0);
    proc(0, 10'd9, '0, '0, RESP_STALL);                  // PS stalls
    send(mk(MSG_ACK, L2, 10'd5));
    proc(0, 10'd9, '0, '0, RESP_ISSUED);
    expect_msg(MSG_GETS, '0, 10'd9);
    // 8. two outstanding acks: only the last one completes PO
    send(mk(MSG_DATA, L2, 10'd9, 4'd5, 1'b1, 32'h44));
    expect_msg(MSG_ACK, L2, 10'd9);
    send(mk(MSG_GETS, 3'd1, 10'd9));
    expect_msg(MSG_DATA, 3'd1, 10'd9, 4'd1, 1'b0, 32'h44, 1);
    send(mk(MSG_GETS, 3'd2, 10'd9));                     // PO + GETS: send1Token again
    expect_msg(MSG_DATA, 3'd2, 10'd9, 4'd1, 1'b0, 32'h44, 1);
    send(mk(MSG_ACK, 3'd1, 10'd9));
    proc(0, 10'd9, '0, '0, RESP_STALL);                  // still PO
    send(mk(MSG_ACK, 3'd2, 10'd9));
    proc(0, 10'd9, '0, '0, RESP_DONE, 32'h44, 1);        // O
    // 9. SpecialGETX to the owner: everything goes (PX), informs after
    send(mk(MSG_SGETX, 3'd3, 10'd9));
    expect_msg(MSG_DATA, 3'd3, 10'd9, 4'd3, 1'b1, 32'h44, 1);
    send(mk(MSG_SGETX, 3'd1, 10'd9));
    expect_msg(MSG_RETRY, 3'd1, 10'd9, , , , , 3'd3, 1);
    send(mk(MSG_ACK, 3'd3, 10'd9));
    // 10. write frozen behind a higher priority GETX, woken by COMPLETE
    proc(1, 10'd2, 32'h55, 4'd1, RESP_ISSUED);
    expect_msg(MSG_GETX, '0, 10'd2);
    send(mk(MSG_GETX, 3'd3, 10'd2, '0, 1'b0, '0, 4'd1));  // same prio, higher id: wins
    expect_none("freeze without tokens");
    proc(1, 10'd2, 32'h55, 4'd1, RESP_STALL);            // F stalls
    send(mk(MSG_GETS, 3'd1, 10'd2));
    expect_msg(MSG_RETRY, 3'd1, 10'd2, , , , , 3'd3, 1); // retryWithBoss
    send(mk(MSG_DATA, L2, 10'd2, 4'd2, 1'b0, 32'h66));
    expect_msg(MSG_DATA, 3'd3, 10'd2, 4'd2, 1'b0, 32'h66, 1, , , , L2);  // bounceToBoss
    send(mk(MSG_COMPLETE, 3'd3, 10'd2, , , , , 3'd3, 1'b1));
    expect_msg(MSG_GETX, '0, 10'd2);                     // re-issued, now IM
    send(mk(MSG_GETX, 3'd1, 10'd2, '0, 1'b0, '0, 4'd0)); // lower priority: ignored
    expect_none("lower priority GETX");
    send(mk(MSG_DATA, 3'd3, 10'd2, 4'd2, 1'b0, 32'h77));  // IM + DataShared -> SM
    expect_msg(MSG_ACK, 3'd3, 10'd2);
    send(mk(MSG_GETS, 3'd1, 10'd2));                     // SM: askToRetryLater
    expect_msg(MSG_RETRY, 3'd1, 10'd2, , , , , ME, 1);
    send(retry(3'd3, 10'd2, 3'd1, 1'b0, 1'b1));          // stale RETRY: dropped
    expect_none("stale retry");
    send(retry(3'd3, 10'd2, 3'd2, 1'b0));                // SM + Retry: SpecialGETX to node 2
    expect_msg(MSG_SGETX, 3'd2, 10'd2);
    check(last_rseq == rseq_t'(3), "third request of the line carries number 3");
    send(mk(MSG_DATA, 3'd2, 10'd2, 4'd3, 1'b1, 32'h77));  // completes the 5 tokens -> M
    expect_msg(MSG_ACK, 3'd2, 10'd2);
    proc(1, 10'd2, 32'h55, 4'd1, RESP_DONE);             // store done, COMPLETE broadcast
    expect_msg(MSG_COMPLETE, '0, 10'd2, , , , , , , 1'b1);
    proc(0, 10'd2, '0, '0, RESP_DONE, 32'h55, 1);
    // 11. IS + Retry broadcast: SpecialGETS broadcast
    proc(0, 10'd3, '0, '0, RESP_ISSUED);
    expect_msg(MSG_GETS, '0, 10'd3);
    send(retry(3'd2, 10'd3, 3'd2, 1'b1));
    expect_msg(MSG_SGETS, '0, 10'd3, , , , , , , 1'b1);
    // 12. SpecialGETS for a line not held: askToRetryBC
    send(mk(MSG_SGETS, 3'd1, 10'd60));
    expect_msg(MSG_RETRY, 3'd1, 10'd60, , , , , , , 1'b1);
    // 13. data for a line not held: bounced to the L2 unchanged
    send(mk(MSG_DATA, 3'd2, 10'd61, 4'd1, 1'b0, 32'h99));
    expect_msg(MSG_DATA, L2, 10'd61, 4'd1, 1'b0, 32'h99, 1, , , , 3'd2);
    check(!err, "no error cell so far");
    // 14. an ack for a line not held is an error cell
    send(mk(MSG_ACK, 3'd1, 10'd61));
    check(err, "Ack in I raises the error flag");
    expect_none("end");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
