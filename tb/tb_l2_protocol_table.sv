// tb_l2_protocol_table: checks every cell of the L2 state table.
//
// As tb_l1_protocol_table: the expected table is the LOCKE L2 specification
// written out as text, one string per cell, parsed into class, actions and
// next state. The one cell where the RTL departs on purpose (PO + Ack goes to
// O) carries the RTL's value and is marked.
module tb_l2_protocol_table;
  import locke_pkg::*;

  l2_state_e   state;
  l2_event_e   ev;
  cell_e       cls;
  l2_actions_t act;
  logic        nv;
  l2_state_e   ns;

  l2_protocol_table dut (.state, .ev, .cls, .act, .next_valid(nv), .next_state(ns));

  int checks = 0, failures = 0;
  string tbl [9][10];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic l2_state_e st_of(string s);
    case (s)
      "I": return L2_I;   "A": return L2_A;   "S": return L2_S;   "O": return L2_O;
      "M": return L2_M;   "PA": return L2_PA; "PT": return L2_PT; "PX": return L2_PX;
      "PO": return L2_PO;
      default: begin $display("bad state %s", s); return L2_I; end
    endcase
  endfunction

  task automatic parse(input string c, output cell_e ec, output l2_actions_t ea,
                       output logic env, output l2_state_e ens);
    string w;
    int    p;
    ec = CELL_ACT; ea = '0; env = 1'b0; ens = L2_I;
    p = 0;
    while (p < c.len()) begin
      w = "";
      while (p < c.len() && c[p] == " ") p++;
      while (p < c.len() && c[p] != " ") begin w = {w, string'(c[p])}; p++; end
      if (w.len() == 0) break;
      if (w[0] == "/") begin env = 1'b1; ens = st_of(w.substr(1, w.len()-1)); end
      else case (w)
        "z": ec = CELL_STALL;
        "i": ec = CELL_IGN;
        "e": ec = CELL_ERR;
        "issueWriteback": ea.issue_writeback = 1;
        "sendTokens": ea.send_tokens = 1;
        "sendAllToken", "sendAllTokens": ea.send_all_tokens = 1;
        "send1Token": ea.send_1_token = 1;
        "askToRetryBC", "askRetryBC": ea.ask_retry_bc = 1;
        "informTokenDest", "informTokensDest": ea.inform_tokens = 1;
        "informOwnerDest": ea.inform_owner = 1;
        "storeData": ea.store_data = 1;
        "sendAck": ea.send_ack = 1;
        "updateNumTokens": ea.update_tokens = 1;
        default: $display("bad action %s", w);
      endcase
    end
  endtask

  initial begin
    // columns: Replacement L1_Gets L1_Getx SpecialGETS SpecialGETX DataShared
    //          DataOwner DataAllTokens Tokens Ack
    tbl[0] = '{"e", "i", "i", "askToRetryBC", "askToRetryBC", "storeData sendAck /S",
               "storeData sendAck /O", "storeData sendAck /M", "updateNumTokens sendAck /A", "e"};
    tbl[1] = '{"issueWriteback /PX", "i", "sendTokens /PX", "askToRetryBC", "sendTokens /PX",
               "storeData sendAck /S", "storeData sendAck /O", "storeData sendAck /M",
               "updateNumTokens sendAck", "e"};
    tbl[2] = '{"issueWriteback /PX", "i", "sendAllToken /PX", "askToRetryBC", "sendAllToken /PX",
               "updateNumTokens sendAck", "updateNumTokens sendAck /O",
               "updateNumTokens sendAck /M", "updateNumTokens sendAck", "e"};
    tbl[3] = '{"issueWriteback /PX", "send1Token /PO", "sendAllTokens /PX", "send1Token /PO",
               "sendAllTokens /PX", "e", "updateNumTokens sendAck", "updateNumTokens sendAck /M",
               "updateNumTokens sendAck", "e"};
    tbl[4] = '{"issueWriteback /PX", "sendAllTokens /PX", "sendAllTokens /PX", "sendAllTokens /PX",
               "sendAllTokens /PX", "e", "e", "e", "e", "e"};
    tbl[5] = '{"z", "informOwnerDest", "sendAllTokens informTokensDest /PX", "askToRetryBC",
               "sendAllTokens /PX", "storeData sendAck /PT", "storeData sendAck /PO",
               "storeData sendAck /PO", "updateNumTokens sendAck", "/A"};
    tbl[6] = '{"z", "informOwnerDest", "sendAllTokens informTokenDest", "askRetryBC",
               "informTokenDest sendAllTokens", "storeData sendAck", "updateNumTokens sendAck /PO",
               "updateNumTokens sendAck /PO", "updateNumTokens sendAck", "/S"};
    tbl[7] = '{"z", "informOwnerDest", "informTokensDest", "informOwnerDest", "informTokensDest",
               "storeData sendAck /PT", "storeData sendAck /PO", "storeData sendAck /PO",
               "updateNumTokens sendAck /PA", "/I"};
    tbl[8] = '{"z", "send1Token", "informTokensDest sendAllTokens /PX", "sendAllTokens /PX",
               "informTokensDest sendAllTokens /PX", "e", "updateNumTokens sendAck",
               "updateNumTokens sendAck", "updateNumTokens sendAck", "/O"};  // Ack: /O, not /I

    for (int s = 0; s < 9; s++) begin
      for (int e = 0; e < 10; e++) begin
        cell_e ec; l2_actions_t ea; logic env; l2_state_e ens;
        parse(tbl[s][e], ec, ea, env, ens);
        state = l2_state_e'(s);
        ev    = l2_event_e'(e);
        #1;
        checks++;
        if (cls !== ec || act !== ea || nv !== env || (env && ns !== ens)) begin
          failures++;
          $display("FAIL state=%s event=%s expect \"%s\": cls=%s act=%b nv=%b ns=%s",
                   state.name(), ev.name(), tbl[s][e], cls.name(), act, nv, ns.name());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
