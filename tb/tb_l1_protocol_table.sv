// tb_l1_protocol_table: checks every cell of the L1 state table.
//
// The expected table is written out below as text, one string per cell in the
// notation of the LOCKE L1 specification ("update sendAck /O", "z", "i",
// "e"), and parsed here into the expected cell class, action set and next
// state. The five cells where the RTL departs from the specification on
// purpose carry the RTL's value and are marked. Every (state, event) pair is
// applied to the block and compared.
module tb_l1_protocol_table;
  import locke_pkg::*;

  l1_state_e   state;
  l1_event_e   ev;
  cell_e       cls;
  l1_actions_t act;
  logic        nv;
  l1_state_e   ns;

  l1_protocol_table dut (.state, .ev, .cls, .act, .next_valid(nv), .next_state(ns));

  int checks = 0, failures = 0;
  string tbl [12][14];

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic l1_state_e st_of(string s);
    case (s)
      "I": return L1_I;   "S": return L1_S;   "O": return L1_O;   "E": return L1_E;
      "M": return L1_M;   "IS": return L1_IS; "IM": return L1_IM; "SM": return L1_SM;
      "PS": return L1_PS; "PX": return L1_PX; "PO": return L1_PO; "F": return L1_F;
      default: begin $display("bad state %s", s); return L1_I; end
    endcase
  endfunction

  task automatic parse(input string c, output cell_e ec, output l1_actions_t ea,
                       output logic env, output l1_state_e ens);
    string w;
    int    p;
    ec = CELL_ACT; ea = '0; env = 1'b0; ens = L1_I;
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
        "sendGETS": ea.send_gets = 1;
        "sendGETX": ea.send_getx = 1;
        "doLoad": ea.do_load = 1;
        "doStore": ea.do_store = 1;
        "replace": ea.replace = 1;
        "sendAllToken", "sendAllTokens": ea.send_all_tokens = 1;
        "send1Token", "sendToken": ea.send_1_token = 1;
        "askToRetryBC", "askRetryBC": ea.ask_retry_bc = 1;
        "askToRetryLater": ea.ask_retry_later = 1;
        "informTokenDest", "informTokensDest": ea.inform_tokens = 1;
        "informOwnerDest": ea.inform_owner = 1;
        "retryWithBoss": ea.retry_with_boss = 1;
        "update": ea.update = 1;
        "sendAck": ea.send_ack = 1;
        "bounceData": ea.bounce_data = 1;
        "bounceL2": ea.bounce_l2 = 1;
        "bounceToBoss": ea.bounce_to_boss = 1;
        "sendSpecialGETS": ea.send_special_gets = 1;
        "sendSpecialGETX": ea.send_special_getx = 1;
        default: $display("bad action %s", w);
      endcase
    end
  endtask

  initial begin
    // columns: Load Store Replacement Gets Getx FreezeGETX SpecialGETS SpecialGETX
    //          DataShared DataOwner DataAllTokens Ack Retry Complete
    tbl[0]  = '{"sendGETS /IS", "sendGETX /IM", "e", "i", "i", "i", "askToRetryBC", "askToRetryBC",
                "bounceData", "bounceData", "bounceData", "e", "i", "i"};   // /IS, /IM added
    tbl[1]  = '{"doLoad", "sendGETX", "replace /PS", "i", "sendAllToken /PS", "sendAllToken /PX",
                "askToRetryBC", "sendAllToken /PS", "update sendAck", "update sendAck /O",
                "update sendAck /M", "e", "i", "i"};
    tbl[2]  = '{"doLoad", "sendGETX", "replace /PX", "send1Token /PO", "sendAllTokens /PX",
                "sendAllTokens /PX", "send1Token /PO", "sendAllTokens /PX", "update sendAck",
                "update sendAck", "update sendAck /M", "e", "i", "i"};
    tbl[3]  = '{"doLoad", "doStore /M", "replace /PX", "send1Token /PO", "sendAllTokens /PX",
                "sendAllTokens /PX", "send1Token /PO", "sendAllTokens /PX", "e", "e", "e", "e",
                "i", "i"};                                                  // /M added
    tbl[4]  = '{"doLoad", "doStore /M", "replace /PX", "send1Token /PO", "sendAllTokens /PX",
                "sendAllTokens /PX", "send1Token /PO", "sendAllTokens /PX", "e", "e", "e", "e",
                "i", "i"};
    tbl[5]  = '{"z", "z", "z", "i", "i", "i", "askToRetryBC", "askToRetryBC", "update sendAck /S",
                "update sendAck /O", "update sendAck /M", "e", "sendSpecialGETS", "i"};
    tbl[6]  = '{"z", "z", "z", "i", "i", "sendAllTokens /F", "askToRetryBC", "askToRetryBC",
                "update sendAck /SM", "update sendAck /SM", "update sendAck /M", "e",
                "sendSpecialGETX", "sendSpecialGETX"};
    tbl[7]  = '{"z", "z", "z", "askToRetryLater", "i", "sendAllTokens /F", "askToRetryLater",
                "askToRetryLater", "update sendAck", "update sendAck", "update sendAck /M", "e",
                "sendSpecialGETX", "sendSpecialGETX"};
    tbl[8]  = '{"z", "z", "z", "i", "informTokenDest", "informTokenDest", "askRetryBC",
                "informTokenDest", "sendAck bounceL2", "sendAck bounceL2 /PX",
                "sendAck bounceL2 /PX", "/I", "i", "i"};
    tbl[9]  = '{"z", "z", "z", "informOwnerDest", "informTokensDest", "informTokensDest",
                "informOwnerDest", "informTokensDest", "bounceL2", "bounceL2", "bounceL2", "/I",
                "i", "i"};
    tbl[10] = '{"z", "z", "z", "send1Token", "informTokensDest sendAllTokens /PX",
                "informTokensDest sendAllTokens /PX", "sendToken",
                "informTokensDest sendAllTokens /PX", "update sendAck", "update sendAck",
                "update sendAck", "/O", "i", "i"};                          // Ack: /O, not /I
    tbl[11] = '{"z", "z", "z", "retryWithBoss", "retryWithBoss", "retryWithBoss", "i", "i",
                "bounceToBoss", "bounceToBoss", "bounceToBoss", "/F", "sendGETX /IM",
                "sendGETX /IM"};                                            // /IM added

    for (int s = 0; s < 12; s++) begin
      for (int e = 0; e < 14; e++) begin
        cell_e ec; l1_actions_t ea; logic env; l1_state_e ens;
        parse(tbl[s][e], ec, ea, env, ens);
        state = l1_state_e'(s);
        ev    = l1_event_e'(e);
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
