// l1_protocol_table: the LOCKE L1 state table (states x events -> actions, next state).
//
// Purely combinational, no clock. For the state of one cache line and the
// event the controller triggered, it returns the class of the table cell
// (act, stall 'z', ignore 'i', error 'e'), the set of actions to perform and,
// when the cell names one, the next state (next_valid). A cell without a next
// state keeps the line where it is.
//
// Every cell follows the L1 specification table of LOCKE, with these
// exceptions. Each is a cell where the table names no state change but the
// state descriptions need one, or where the table and the state descriptions
// disagree:
//   * I + Load -> IS and I + Store -> IM (IS/IM are "issued a GETS/GETX and
//     waiting for data"; without the change the reply would hit the I row and
//     be bounced).
//   * E + Store -> M (the store makes the clean line modified).
//   * PO + Ack -> O, not I: PO "still keeps the owner token", so the line
//     returns to O once the shared copy it sent is acknowledged.
//   * F + Retry / Complete -> IM: the frozen write is re-issued with sendGETX
//     and then waits for its data like any other GETX (otherwise F would be a
//     state with no exit).
module l1_protocol_table
  import locke_pkg::*;
(
  input  l1_state_e   state,
  input  l1_event_e   ev,
  output cell_e       cls,
  output l1_actions_t act,
  output logic        next_valid,
  output l1_state_e   next_state
);

  always_comb begin
    cls       = CELL_ACT;
    act        = '0;
    next_valid = 1'b0;
    next_state = state;

    unique case (state)
      // ---------------------------------------------------------------- I
      L1_I: unique case (ev)
        L1E_LOAD:        begin act.send_gets = 1'b1; next_valid = 1'b1; next_state = L1_IS; end
        L1E_STORE:       begin act.send_getx = 1'b1; next_valid = 1'b1; next_state = L1_IM; end
        L1E_REPLACEMENT: cls = CELL_ERR;
        L1E_GETS, L1E_GETX, L1E_FREEZEGETX: cls = CELL_IGN;
        L1E_SPECIALGETS, L1E_SPECIALGETX:   act.ask_retry_bc = 1'b1;
        L1E_DATASHARED, L1E_DATAOWNER, L1E_DATAALLTOK: act.bounce_data = 1'b1;
        L1E_ACK:         cls = CELL_ERR;
        default:         cls = CELL_IGN;   // Retry, Complete
      endcase
      // ---------------------------------------------------------------- S
      L1_S: unique case (ev)
        L1E_LOAD:        act.do_load = 1'b1;
        L1E_STORE:       act.send_getx = 1'b1;
        L1E_REPLACEMENT: begin act.replace = 1'b1; next_valid = 1'b1; next_state = L1_PS; end
        L1E_GETS:        cls = CELL_IGN;
        L1E_GETX:        begin act.send_all_tokens = 1'b1; next_valid = 1'b1; next_state = L1_PS; end
        L1E_FREEZEGETX:  begin act.send_all_tokens = 1'b1; next_valid = 1'b1; next_state = L1_PX; end
        L1E_SPECIALGETS: act.ask_retry_bc = 1'b1;
        L1E_SPECIALGETX: begin act.send_all_tokens = 1'b1; next_valid = 1'b1; next_state = L1_PS; end
        L1E_DATASHARED:  begin act.update = 1'b1; act.send_ack = 1'b1; end
        L1E_DATAOWNER:   begin act.update = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L1_O; end
        L1E_DATAALLTOK:  begin act.update = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L1_M; end
        L1E_ACK:         cls = CELL_ERR;
        default:         cls = CELL_IGN;
      endcase
      // ---------------------------------------------------------------- O
      L1_O: unique case (ev)
        L1E_LOAD:        act.do_load = 1'b1;
        L1E_STORE:       act.send_getx = 1'b1;
        L1E_REPLACEMENT: begin act.replace = 1'b1; next_valid = 1'b1; next_state = L1_PX; end
        L1E_GETS, L1E_SPECIALGETS:
                         begin act.send_1_token = 1'b1; next_valid = 1'b1; next_state = L1_PO; end
        L1E_GETX, L1E_FREEZEGETX, L1E_SPECIALGETX:
                         begin act.send_all_tokens = 1'b1; next_valid = 1'b1; next_state = L1_PX; end
        L1E_DATASHARED, L1E_DATAOWNER:
                         begin act.update = 1'b1; act.send_ack = 1'b1; end
        L1E_DATAALLTOK:  begin act.update = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L1_M; end
        L1E_ACK:         cls = CELL_ERR;
        default:         cls = CELL_IGN;
      endcase
      // ------------------------------------------------------------ E, M
      L1_E, L1_M: unique case (ev)
        L1E_LOAD:        act.do_load = 1'b1;
        L1E_STORE:       begin act.do_store = 1'b1; next_valid = 1'b1; next_state = L1_M; end
        L1E_REPLACEMENT: begin act.replace = 1'b1; next_valid = 1'b1; next_state = L1_PX; end
        L1E_GETS, L1E_SPECIALGETS:
                         begin act.send_1_token = 1'b1; next_valid = 1'b1; next_state = L1_PO; end
        L1E_GETX, L1E_FREEZEGETX, L1E_SPECIALGETX:
                         begin act.send_all_tokens = 1'b1; next_valid = 1'b1; next_state = L1_PX; end
        L1E_DATASHARED, L1E_DATAOWNER, L1E_DATAALLTOK, L1E_ACK:
                         cls = CELL_ERR;
        default:         cls = CELL_IGN;
      endcase
      // --------------------------------------------------------------- IS
      L1_IS: unique case (ev)
        L1E_LOAD, L1E_STORE, L1E_REPLACEMENT: cls = CELL_STALL;
        L1E_GETS, L1E_GETX, L1E_FREEZEGETX:   cls = CELL_IGN;
        L1E_SPECIALGETS, L1E_SPECIALGETX:     act.ask_retry_bc = 1'b1;
        L1E_DATASHARED:  begin act.update = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L1_S; end
        L1E_DATAOWNER:   begin act.update = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L1_O; end
        L1E_DATAALLTOK:  begin act.update = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L1_M; end
        L1E_ACK:         cls = CELL_ERR;
        L1E_RETRY:       act.send_special_gets = 1'b1;
        default:         cls = CELL_IGN;   // Complete
      endcase
      // --------------------------------------------------------------- IM
      L1_IM: unique case (ev)
        L1E_LOAD, L1E_STORE, L1E_REPLACEMENT: cls = CELL_STALL;
        L1E_GETS, L1E_GETX: cls = CELL_IGN;
        L1E_FREEZEGETX:  begin act.send_all_tokens = 1'b1; next_valid = 1'b1; next_state = L1_F; end
        L1E_SPECIALGETS, L1E_SPECIALGETX: act.ask_retry_bc = 1'b1;
        L1E_DATASHARED, L1E_DATAOWNER:
                         begin act.update = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L1_SM; end
        L1E_DATAALLTOK:  begin act.update = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L1_M; end
        L1E_ACK:         cls = CELL_ERR;
        default:         act.send_special_getx = 1'b1;   // Retry, Complete
      endcase
      // --------------------------------------------------------------- SM
      L1_SM: unique case (ev)
        L1E_LOAD, L1E_STORE, L1E_REPLACEMENT: cls = CELL_STALL;
        L1E_GETS, L1E_SPECIALGETS, L1E_SPECIALGETX: act.ask_retry_later = 1'b1;
        L1E_GETX:        cls = CELL_IGN;
        L1E_FREEZEGETX:  begin act.send_all_tokens = 1'b1; next_valid = 1'b1; next_state = L1_F; end
        L1E_DATASHARED, L1E_DATAOWNER:
                         begin act.update = 1'b1; act.send_ack = 1'b1; end
        L1E_DATAALLTOK:  begin act.update = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L1_M; end
        L1E_ACK:         cls = CELL_ERR;
        default:         act.send_special_getx = 1'b1;   // Retry, Complete
      endcase
      // --------------------------------------------------------------- PS
      L1_PS: unique case (ev)
        L1E_LOAD, L1E_STORE, L1E_REPLACEMENT: cls = CELL_STALL;
        L1E_GETS:        cls = CELL_IGN;
        L1E_GETX, L1E_FREEZEGETX, L1E_SPECIALGETX: act.inform_tokens = 1'b1;
        L1E_SPECIALGETS: act.ask_retry_bc = 1'b1;
        L1E_DATASHARED:  begin act.send_ack = 1'b1; act.bounce_l2 = 1'b1; end
        L1E_DATAOWNER, L1E_DATAALLTOK:
                         begin act.send_ack = 1'b1; act.bounce_l2 = 1'b1; next_valid = 1'b1; next_state = L1_PX; end
        L1E_ACK:         begin next_valid = 1'b1; next_state = L1_I; end
        default:         cls = CELL_IGN;
      endcase
      // --------------------------------------------------------------- PX
      L1_PX: unique case (ev)
        L1E_LOAD, L1E_STORE, L1E_REPLACEMENT: cls = CELL_STALL;
        L1E_GETS, L1E_SPECIALGETS: act.inform_owner = 1'b1;
        L1E_GETX, L1E_FREEZEGETX, L1E_SPECIALGETX: act.inform_tokens = 1'b1;
        L1E_DATASHARED, L1E_DATAOWNER, L1E_DATAALLTOK: act.bounce_l2 = 1'b1;
        L1E_ACK:         begin next_valid = 1'b1; next_state = L1_I; end
        default:         cls = CELL_IGN;
      endcase
      // --------------------------------------------------------------- PO
      L1_PO: unique case (ev)
        L1E_LOAD, L1E_STORE, L1E_REPLACEMENT: cls = CELL_STALL;
        L1E_GETS, L1E_SPECIALGETS: act.send_1_token = 1'b1;
        L1E_GETX, L1E_FREEZEGETX, L1E_SPECIALGETX:
                         begin act.inform_tokens = 1'b1; act.send_all_tokens = 1'b1;
                               next_valid = 1'b1; next_state = L1_PX; end
        L1E_DATASHARED, L1E_DATAOWNER, L1E_DATAALLTOK:
                         begin act.update = 1'b1; act.send_ack = 1'b1; end
        L1E_ACK:         begin next_valid = 1'b1; next_state = L1_O; end
        default:         cls = CELL_IGN;
      endcase
      // ---------------------------------------------------------------- F
      L1_F: unique case (ev)
        L1E_LOAD, L1E_STORE, L1E_REPLACEMENT: cls = CELL_STALL;
        L1E_GETS, L1E_GETX, L1E_FREEZEGETX: act.retry_with_boss = 1'b1;
        L1E_SPECIALGETS, L1E_SPECIALGETX:   cls = CELL_IGN;
        L1E_DATASHARED, L1E_DATAOWNER, L1E_DATAALLTOK: act.bounce_to_boss = 1'b1;
        L1E_ACK:         begin next_valid = 1'b1; next_state = L1_F; end
        default:         begin act.send_getx = 1'b1; next_valid = 1'b1; next_state = L1_IM; end
      endcase
      default: cls = CELL_ERR;
    endcase
  end

endmodule
