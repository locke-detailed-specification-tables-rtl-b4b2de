// l2_controller: LOCKE L2 (shared cache) coherence controller.
//
// Keeps the coherence state, token count and data word of every line of the
// address space (LINES entries, directly indexed: the L2 is treated as
// backing the whole address space). Network messages and replacement requests
// become the events of the L2 state table (l2_protocol_table); the controller
// performs the actions of the selected cell and sends the resulting messages.
//
// The L2 always hands all the tokens it has to a request it answers. Event
// triggering: DATA messages become DataAllTokens when they complete the set of
// TOTAL_TOKENS, else DataOwner when the owner token travels, else DataShared;
// a TOKENS message (tokens without data, sent by an L1 replacing a clean
// shared line) is the Tokens event. An Ack reaches the table only when it is
// the last one the line waits for; every data/token transfer sent by the line
// (sendAllTokens, sendTokens, send1Token, issueWriteback) expects one.
// storeData stores the data and adds the tokens that came with it;
// updateNumTokens adds the tokens only.
//
// This design's choices: at reset every line is M (valid zero data and all
// tokens), standing for a memory whose contents the L2 already holds.
// issueWriteback sends the line, with all its tokens, as a message to the
// memory node MEM_ID, which acknowledges it. informTokensDest/informOwnerDest
// send RETRY to the requester naming the node the tokens were last sent to;
// askToRetryBC sends RETRY with bcast set. Lines in A, PA and PX hold no valid
// data, so tokens they pass on travel in a TOKENS message.
//
// Interface and timing: as l1_controller. One event per cycle at most, network
// input ahead of replacement requests, up to two messages per event sent one
// per cycle through a two-entry output stage; no event is accepted while the
// stage holds messages. repl_valid/repl_ready asks to replace a line (the
// policy that picks it is outside this block).
//
// Lint note: the embedded assertion uses rst_n in "disable iff", and lint
// reports that as SYNCASYNCNET (reset used both as the asynchronous flop
// reset and inside a clocked check). The assertion is not logic; the
// flops are all reset asynchronously.
// The L2 does not look at the dst, bcast, prio and info_node fields of
// incoming messages (lint reports those bits of net_in unused): requests reach
// it only when addressed to it, and priorities matter only to L1 lines.
module l2_controller
  import locke_pkg::*;
#(
  parameter node_t       MY_ID        = 3'd4,
  parameter node_t       MEM_ID       = 3'd5,
  parameter int unsigned TOTAL_TOKENS = 5,
  parameter int unsigned LINES        = 1 << ADDR_W
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      net_in_valid,
  output logic      net_in_ready,
  input  msg_t      net_in,
  output logic      net_out_valid,
  input  logic      net_out_ready,
  output msg_t      net_out,
  input  logic      repl_valid,
  output logic      repl_ready,
  input  addr_t     repl_addr,
  output logic      ev_fire,
  output l2_state_e ev_state,
  output l2_event_e ev_event,
  output cell_e     ev_cell,
  output logic      err
);

  localparam int unsigned IDX_W = $clog2(LINES);
  localparam tok_t        TOTAL = tok_t'(TOTAL_TOKENS);
  typedef logic [IDX_W-1:0] idx_t;

  // Line storage. The per-line fields are plain memories without reset, so
  // they can be mapped to RAM; vld_q marks the lines written since reset, and
  // a line that was not yet written reads as its reset value (M, all tokens,
  // zero data, no acks pending).
  logic [LINES-1:0] vld_q;
  l2_state_e st_m   [LINES];
  tok_t      tok_m  [LINES];
  data_t     data_m [LINES];
  tok_t      pack_m [LINES];
  node_t     tdst_m [LINES];

  msg_t       stg_q [2];
  logic [1:0] cnt_q;
  logic       stage_empty;
  assign stage_empty   = (cnt_q == 2'd0);
  assign net_out_valid = (cnt_q != 2'd0);
  assign net_out       = stg_q[0];
  assign net_in_ready  = stage_empty;
  assign repl_ready    = stage_empty && !net_in_valid;

  logic      use_net, use_repl, known, ack_partial, tfire;
  addr_t     a;
  idx_t      ix;
  l2_state_e line_st;
  tok_t      cur_tok, cur_pack;
  data_t     cur_data;
  node_t     cur_tdst;
  l2_event_e evn;

  always_comb begin
    use_net  = net_in_valid && stage_empty;
    use_repl = repl_valid && stage_empty && !net_in_valid;
    a        = use_net ? net_in.addr : repl_addr;
    ix       = idx_t'(a);
    line_st  = vld_q[ix] ? st_m[ix]   : L2_M;
    cur_tok  = vld_q[ix] ? tok_m[ix]  : TOTAL;
    cur_data = vld_q[ix] ? data_m[ix] : '0;
    cur_pack = vld_q[ix] ? pack_m[ix] : '0;
    cur_tdst = vld_q[ix] ? tdst_m[ix] : MY_ID;
    known    = 1'b1;
    ack_partial = 1'b0;
    evn      = L2E_REPLACEMENT;
    if (use_net) begin
      unique case (net_in.mtype)
        MSG_GETS:   evn = L2E_L1_GETS;
        MSG_GETX:   evn = L2E_L1_GETX;
        MSG_SGETS:  evn = L2E_SPECIALGETS;
        MSG_SGETX:  evn = L2E_SPECIALGETX;
        MSG_DATA:   evn = (cur_tok + net_in.tokens == TOTAL) ? L2E_DATAALLTOK :
                          net_in.owner ? L2E_DATAOWNER : L2E_DATASHARED;
        MSG_TOKENS: evn = L2E_TOKENS;
        MSG_ACK:    begin evn = L2E_ACK; ack_partial = (cur_pack > tok_t'(1)); end
        default:    known = 1'b0;   // RETRY / COMPLETE are not for the L2
      endcase
    end
    tfire = (use_net || use_repl) && known && !ack_partial;
  end

  cell_e       cls;
  l2_actions_t act;
  logic        nxt_v;
  l2_state_e   nxt;

  l2_protocol_table u_table (
    .state(line_st), .ev(evn), .cls(cls), .act(act),
    .next_valid(nxt_v), .next_state(nxt)
  );

  assign ev_fire  = tfire;
  assign ev_state = line_st;
  assign ev_event = evn;
  assign ev_cell  = cls;

  logic       doit, owns, has_data, sent_all;
  msg_t       om [2];
  logic [1:0] on;
  tok_t       acks_inc;
  msg_t       base;

  always_comb begin
    doit     = tfire && (cls == CELL_ACT);
    owns     = (line_st == L2_O) || (line_st == L2_M) || (line_st == L2_PO);
    has_data = (line_st == L2_S) || (line_st == L2_O) || (line_st == L2_M) ||
               (line_st == L2_PT) || (line_st == L2_PO);
    sent_all = doit && act.send_all_tokens && (cur_tok != '0);
    base           = '0;
    base.src       = MY_ID;
    base.addr      = a;
    base.info_node = MY_ID;
    om[0] = base;
    om[1] = base;
    on    = 2'd0;
    acks_inc = '0;
    if (doit) begin
      if (act.issue_writeback) begin
        om[on[0]].mtype  = has_data ? MSG_DATA : MSG_TOKENS;
        om[on[0]].dst    = MEM_ID;
        om[on[0]].tokens = cur_tok;
        om[on[0]].owner  = owns;
        om[on[0]].data   = cur_data;
        on = on + 2'd1; acks_inc = acks_inc + tok_t'(1);
      end
      if (act.ask_retry_bc || act.inform_tokens || act.inform_owner) begin
        om[on[0]].mtype     = MSG_RETRY;
        om[on[0]].rseq      = net_in.rseq;   // answers this request
        om[on[0]].dst       = net_in.src;
        om[on[0]].bcast     = act.ask_retry_bc;
        om[on[0]].info_node = act.ask_retry_bc ? MY_ID : cur_tdst;
        on = on + 2'd1;
      end
      if (act.send_tokens || sent_all || act.send_1_token) begin
        om[on[0]].mtype  = (has_data && !act.send_tokens) ? MSG_DATA : MSG_TOKENS;
        om[on[0]].dst    = net_in.src;
        om[on[0]].tokens = act.send_1_token ? tok_t'(1) : cur_tok;
        om[on[0]].owner  = owns && !act.send_1_token;
        om[on[0]].data   = cur_data;
        on = on + 2'd1; acks_inc = acks_inc + tok_t'(1);
      end
      if (act.send_ack) begin
        om[on[0]].mtype = MSG_ACK; om[on[0]].dst = net_in.src; on = on + 2'd1;
      end
    end
  end

  // new field values of line ix, written when an event changes the line
  logic      wr;
  l2_state_e w_st;
  tok_t      w_tok, w_pack;
  data_t     w_data;
  node_t     w_tdst;

  always_comb begin
    wr     = (use_net && ack_partial) || doit;
    w_st   = line_st;
    w_tok  = cur_tok;
    w_data = cur_data;
    w_pack = cur_pack;
    w_tdst = cur_tdst;
    if (use_net && ack_partial) w_pack = cur_pack - tok_t'(1);
    if (doit) begin
      if (nxt_v) w_st = nxt;
      if (act.store_data || act.update_tokens) w_tok = w_tok + net_in.tokens;
      if (act.issue_writeback || act.send_tokens || sent_all) w_tok = '0;
      if (act.send_1_token) w_tok = w_tok - tok_t'(1);
      if (act.store_data && net_in.mtype == MSG_DATA) w_data = net_in.data;
      w_pack = (evn == L2E_ACK) ? acks_inc : cur_pack + acks_inc;
      if (act.send_tokens || sent_all || act.send_1_token) w_tdst = net_in.src;
      if (act.issue_writeback)                             w_tdst = MEM_ID;
    end
  end

  always_ff @(posedge clk) begin
    if (wr) begin
      st_m[ix]   <= w_st;
      tok_m[ix]  <= w_tok;
      data_m[ix] <= w_data;
      pack_m[ix] <= w_pack;
      tdst_m[ix] <= w_tdst;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q    <= '0;
      cnt_q    <= '0;
      stg_q[0] <= '0;
      stg_q[1] <= '0;
      err      <= 1'b0;
    end else begin
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
      if (wr) vld_q[ix] <= 1'b1;
      if (tfire && cls == CELL_ERR) err <= 1'b1;
    end
  end

  property p_out_stable;
    @(posedge clk) disable iff (!rst_n)
      net_out_valid && !net_out_ready |=> net_out_valid && $stable(net_out);
  endproperty
  a_out_stable: assert property (p_out_stable);

endmodule
