// l1_controller: LOCKE L1 cache coherence controller.
//
// Holds the coherence state of a direct-mapped L1 (SETS lines, one data word
// per line), turns processor requests and network messages into the events of
// the L1 state table (l1_protocol_table), performs the actions of the selected
// cell and sends the resulting messages.
//
// Event triggering, as the protocol describes it:
//   * A load or store whose set holds another valid line triggers Replacement
//     on that line instead of Load/Store; the processor retries afterwards.
//   * A GETX from another node becomes FreezeGETX when this line has a write
//     of its own pending and the incoming request has the higher priority
//     (priority, then node id, compared as one number).
//   * Data/token messages become DataAllTokens when the tokens received
//     complete the line's set of TOTAL_TOKENS, otherwise DataOwner when the
//     owner token travels, otherwise DataShared.
//   * An Ack is passed to the table only when it is the last one the line is
//     waiting for; earlier acks only decrement the line's pending-ack count.
//     Every data/token transfer this line sends (replace, sendAllTokens,
//     send1Token, bounceL2 as the new source) adds one expected ack.
//   * Every request a line sends (GETS, GETX, Special) carries the line's
//     request number, and a RETRY echoes the number of the request it
//     answers. A Retry event is triggered only by a RETRY answering the
//     line's latest request; older ones are dropped. A broadcast Special
//     request can draw a RETRY from every node, and without this each of them
//     would start another broadcast.
//
// Message meaning chosen by this design (the protocol names the actions but
// not their encoding): informTokensDest, informOwnerDest, askToRetryLater and
// retryWithBoss send RETRY to the requester with info_node set to where the
// tokens went, to this node, or to the frozen line's "boss"; askToRetryBC sends
// RETRY with bcast set. A Retry event answers with a Special request directed
// to info_node (broadcast if bcast, or if info_node is this node itself).
// bounceData and bounceToBoss forward the message unchanged (the receiver
// acknowledges the original sender); so does bounceL2, unless the same cell
// also acknowledges the sender (PS), in which case the message is forwarded
// with this node as source and this line waits for the L2's ack. A store
// that completes with a GETX pending broadcasts COMPLETE, which wakes frozen
// lines.
//
// Interface and timing: one event per cycle at most. Network input has
// priority over the processor. An event produces up to two messages, held in
// a two-entry output stage and sent one per cycle on a valid/ready port; no
// new event is accepted until the stage is empty. The processor gets a
// response one cycle after its request is accepted: DONE (with load data),
// ISSUED (request or replacement sent, retry later), STALL or ERROR.
//
// Lint note: the embedded assertion uses rst_n in "disable iff", and lint
// reports that as SYNCASYNCNET (reset used both as the asynchronous flop
// reset and inside a clocked check). The assertion is not logic; the
// flops are all reset asynchronously.
module l1_controller
  import locke_pkg::*;
#(
  parameter node_t       MY_ID        = 3'd0,
  parameter node_t       L2_ID        = 3'd4,
  parameter int unsigned TOTAL_TOKENS = 5,
  parameter int unsigned SETS         = 64
) (
  input  logic       clk,
  input  logic       rst_n,
  // network in
  input  logic       net_in_valid,
  output logic       net_in_ready,
  input  msg_t       net_in,
  // network out
  output logic       net_out_valid,
  input  logic       net_out_ready,
  output msg_t       net_out,
  // processor
  input  logic       proc_req_valid,
  output logic       proc_req_ready,
  input  proc_req_t  proc_req,
  output logic       proc_resp_valid,
  output proc_resp_t proc_resp,
  // observation
  output logic       ev_fire,      // a table cell was applied this cycle
  output l1_state_e  ev_state,
  output l1_event_e  ev_event,
  output cell_e      ev_cell,
  output logic       err           // sticky: an 'e' cell was hit
);

  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned TAG_W = ADDR_W - SET_W;
  localparam tok_t        TOTAL = tok_t'(TOTAL_TOKENS);

  typedef logic [SET_W-1:0] set_t;
  typedef logic [TAG_W-1:0] tag_t;

  // ----------------------------------------------------------- line store
  l1_state_e st     [SETS];
  tag_t      tag_q  [SETS];
  tok_t      tok_q  [SETS];
  data_t     data_q [SETS];
  tok_t      pack_q [SETS];   // acks still expected
  logic      gp_q   [SETS];   // own GETX pending
  prio_t     prio_q [SETS];   // its priority
  node_t     tdst_q [SETS];   // where tokens were last sent
  node_t     boss_q [SETS];   // winner of the FreezeGETX
  rseq_t     rseq_q [SETS];   // number of the line's latest request

  // ------------------------------------------------------- output stage
  msg_t       stg_q [2];
  logic [1:0] cnt_q;
  logic       stage_empty;
  assign stage_empty   = (cnt_q == 2'd0);
  assign net_out_valid = (cnt_q != 2'd0);
  assign net_out       = stg_q[0];

  // ------------------------------------------------------------ decode
  logic      use_net, use_proc;
  addr_t     a;
  set_t      slot;
  tag_t      tg;
  logic      occ, hit, own, repl;
  l1_state_e line_st;
  addr_t     line_addr;
  tok_t      cur_tok, cur_pack;
  logic      ack_partial, local_stall, stale, tfire;
  l1_event_e evn;

  assign net_in_ready   = stage_empty;
  assign proc_req_ready = stage_empty && !net_in_valid;

  always_comb begin
    use_net  = net_in_valid && stage_empty;
    use_proc = proc_req_valid && stage_empty && !net_in_valid;
    a        = use_net ? net_in.addr : proc_req.addr;
    slot     = a[SET_W-1:0];
    tg       = a[ADDR_W-1:SET_W];
    occ      = (st[slot] != L1_I);
    hit      = occ && (tag_q[slot] == tg);
    repl     = use_proc && occ && !hit;
    own      = hit || use_proc;            // the slot's line is the table's line
    line_st  = own ? st[slot] : L1_I;
    line_addr = repl ? {tag_q[slot], slot} : a;
    cur_tok  = own ? tok_q[slot] : '0;
    cur_pack = own ? pack_q[slot] : '0;
    ack_partial = 1'b0;
    local_stall = 1'b0;
    stale    = 1'b0;
    evn      = L1E_LOAD;

    if (use_proc) begin
      if (repl)                evn = L1E_REPLACEMENT;
      else if (proc_req.store) evn = L1E_STORE;
      else                     evn = L1E_LOAD;
      // a store already waiting for its GETX is not sent again
      local_stall = !repl && proc_req.store && hit && gp_q[slot] &&
                    (st[slot] == L1_S || st[slot] == L1_O);
    end else begin
      unique case (net_in.mtype)
        MSG_GETS:  evn = L1E_GETS;
        MSG_GETX:  evn = (hit && gp_q[slot] &&
                          ({net_in.prio, net_in.src} > {prio_q[slot], MY_ID}))
                         ? L1E_FREEZEGETX : L1E_GETX;
        MSG_SGETS: evn = L1E_SPECIALGETS;
        MSG_SGETX: evn = L1E_SPECIALGETX;
        MSG_DATA, MSG_TOKENS:
                   evn = (cur_tok + net_in.tokens == TOTAL) ? L1E_DATAALLTOK :
                         net_in.owner ? L1E_DATAOWNER : L1E_DATASHARED;
        MSG_ACK:   begin evn = L1E_ACK; ack_partial = hit && (pack_q[slot] > tok_t'(1)); end
        MSG_RETRY: begin evn = L1E_RETRY; stale = hit && (net_in.rseq != rseq_q[slot]); end
        default:   evn = L1E_COMPLETE;
      endcase
    end
    tfire = (use_net || use_proc) && !ack_partial && !local_stall && !stale;
  end

  cell_e       cls;
  l1_actions_t act;
  logic        nxt_v;
  l1_state_e   nxt;

  l1_protocol_table u_table (
    .state(line_st), .ev(evn), .cls(cls), .act(act),
    .next_valid(nxt_v), .next_state(nxt)
  );

  assign ev_fire  = tfire;
  assign ev_state = line_st;
  assign ev_event = evn;
  assign ev_cell  = cls;

  // --------------------------------------------------- message building
  logic   doit;
  logic   owns;
  msg_t   om [2];
  logic [1:0] on;
  tok_t   acks_inc;
  logic   sent_all;
  msg_t   base;

  always_comb begin
    doit     = tfire && (cls == CELL_ACT);
    owns     = (line_st == L1_O) || (line_st == L1_E) || (line_st == L1_M) || (line_st == L1_PO);
    sent_all = doit && act.send_all_tokens && (cur_tok != '0);
    base           = '0;
    base.src       = MY_ID;
    base.addr      = line_addr;
    base.prio      = prio_q[slot];
    base.info_node = MY_ID;
    base.rseq      = own ? rseq_q[slot] + rseq_t'(1) : '0;   // requests carry the next number
    om[0] = base;
    om[1] = base;
    on    = 2'd0;
    acks_inc = '0;

    if (doit) begin
      if (act.send_gets) begin
        om[on[0]].mtype = MSG_GETS; om[on[0]].bcast = 1'b1; om[on[0]].prio = proc_req.prio; on = on + 2'd1;
      end
      if (act.send_getx) begin
        om[on[0]].mtype = MSG_GETX; om[on[0]].bcast = 1'b1;
        om[on[0]].prio  = use_proc ? proc_req.prio : prio_q[slot];
        on = on + 2'd1;
      end
      if (act.send_special_gets || act.send_special_getx) begin
        om[on[0]].mtype = act.send_special_gets ? MSG_SGETS : MSG_SGETX;
        // COMPLETE: info_node is its sender. A hint naming this node itself
        // (its tokens have moved on since) is no use: ask by broadcast.
        om[on[0]].dst   = net_in.info_node;
        om[on[0]].bcast = ((net_in.mtype == MSG_RETRY) && net_in.bcast) ||
                          (net_in.info_node == MY_ID);
        on = on + 2'd1;
      end
      if (act.replace) begin
        om[on[0]].mtype  = (line_st == L1_S) ? MSG_TOKENS : MSG_DATA;
        om[on[0]].dst    = L2_ID;
        om[on[0]].tokens = cur_tok;
        om[on[0]].owner  = owns;
        om[on[0]].data   = data_q[slot];
        on = on + 2'd1; acks_inc = acks_inc + tok_t'(1);
      end
      if (act.inform_tokens || act.inform_owner || act.retry_with_boss ||
          act.ask_retry_bc || act.ask_retry_later) begin
        om[on[0]].mtype     = MSG_RETRY;
        om[on[0]].rseq      = net_in.rseq;
        om[on[0]].dst       = net_in.src;
        om[on[0]].bcast     = act.ask_retry_bc;
        om[on[0]].info_node = act.retry_with_boss ? boss_q[slot] :
                           (act.inform_tokens || act.inform_owner) ? (own ? tdst_q[slot] : L2_ID) :
                           MY_ID;
        on = on + 2'd1;
      end
      if (sent_all) begin
        om[on[0]].mtype  = MSG_DATA;
        om[on[0]].dst    = net_in.src;
        om[on[0]].tokens = cur_tok;
        om[on[0]].owner  = owns;
        om[on[0]].data   = data_q[slot];
        on = on + 2'd1; acks_inc = acks_inc + tok_t'(1);
      end
      if (act.send_1_token) begin
        om[on[0]].mtype  = MSG_DATA;
        om[on[0]].dst    = net_in.src;
        om[on[0]].tokens = tok_t'(1);
        om[on[0]].data   = data_q[slot];
        on = on + 2'd1; acks_inc = acks_inc + tok_t'(1);
      end
      if (act.send_ack) begin
        om[on[0]].mtype = MSG_ACK; om[on[0]].dst = net_in.src; on = on + 2'd1;
      end
      if (act.bounce_data || act.bounce_l2 || act.bounce_to_boss) begin
        om[on[0]]     = net_in;
        om[on[0]].dst = act.bounce_to_boss ? boss_q[slot] : L2_ID;
        if (act.bounce_l2 && act.send_ack) begin   // acked the sender: now ours
          om[on[0]].src = MY_ID; acks_inc = acks_inc + tok_t'(1);
        end
        on = on + 2'd1;
      end
      if (act.do_store && gp_q[slot]) begin
        om[on[0]].mtype = MSG_COMPLETE; om[on[0]].bcast = 1'b1; on = on + 2'd1;
      end
    end
  end

  // ---------------------------------------------------------- state update
  l1_state_e ns;      // state the line goes to
  tok_t      w_tok;   // tokens the line keeps

  always_comb begin
    ns    = nxt_v ? nxt : line_st;
    w_tok = cur_tok;
    if (act.update) w_tok = w_tok + net_in.tokens;
    if (act.replace || sent_all) w_tok = '0;
    if (act.send_1_token) w_tok = w_tok - tok_t'(1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SETS; i++) begin
        st[i]     <= L1_I;
        tag_q[i]  <= '0;
        tok_q[i]  <= '0;
        data_q[i] <= '0;
        pack_q[i] <= '0;
        gp_q[i]   <= 1'b0;
        prio_q[i] <= '0;
        tdst_q[i] <= L2_ID;
        boss_q[i] <= L2_ID;
        rseq_q[i] <= '0;
      end
      cnt_q           <= '0;
      stg_q[0]        <= '0;
      stg_q[1]        <= '0;
      proc_resp_valid <= 1'b0;
      proc_resp       <= '0;
      err             <= 1'b0;
    end else begin
      // output stage
      if (stage_empty) begin
        if (on != 2'd0) begin
          stg_q[0] <= om[0];
          stg_q[1] <= om[1];
          cnt_q    <= on;
        end
      end else if (net_out_ready) begin
        stg_q[0] <= stg_q[1];
        cnt_q    <= cnt_q - 2'd1;
      end

      // partial ack: only count it down
      if (use_net && ack_partial) pack_q[slot] <= pack_q[slot] - tok_t'(1);

      if (tfire && cls == CELL_ERR) err <= 1'b1;

      if (doit && own) begin
        st[slot] <= ns;
        if (use_proc && !repl) tag_q[slot] <= tg;
        tok_q[slot] <= w_tok;

        if (act.update && net_in.mtype == MSG_DATA) data_q[slot] <= net_in.data;
        if (act.do_store) data_q[slot] <= proc_req.wdata;

        if (evn == L1E_ACK) pack_q[slot] <= acks_inc;   // last ack consumed
        else                pack_q[slot] <= cur_pack + acks_inc;

        if (act.send_getx) begin
          gp_q[slot] <= 1'b1;
          if (use_proc) prio_q[slot] <= proc_req.prio;
        end else if (act.do_store || ns == L1_I || ns == L1_PS || ns == L1_PX || ns == L1_PO) begin
          gp_q[slot] <= 1'b0;
        end

        if (sent_all || act.send_1_token) tdst_q[slot] <= net_in.src;
        if (act.replace)                  tdst_q[slot] <= L2_ID;
        if (evn == L1E_FREEZEGETX)        boss_q[slot] <= net_in.src;
        if (act.send_gets || act.send_getx || act.send_special_gets || act.send_special_getx)
          rseq_q[slot] <= rseq_q[slot] + rseq_t'(1);
      end

      // processor response
      proc_resp_valid <= use_proc;
      if (use_proc) begin
        if (local_stall || cls == CELL_STALL) proc_resp.code <= RESP_STALL;
        else if (cls == CELL_ERR)             proc_resp.code <= RESP_ERROR;
        else if (act.do_load || act.do_store)  proc_resp.code <= RESP_DONE;
        else                                   proc_resp.code <= RESP_ISSUED;
        proc_resp.rdata <= act.do_store ? proc_req.wdata : data_q[slot];
      end
    end
  end

  // output message held stable until taken
  property p_out_stable;
    @(posedge clk) disable iff (!rst_n)
      net_out_valid && !net_out_ready |=> net_out_valid && ($stable(net_out));
  endproperty
  a_out_stable: assert property (p_out_stable);

endmodule
