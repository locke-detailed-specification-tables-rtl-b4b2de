// l2_protocol_table: the LOCKE L2 state table (states x events -> actions, next state).
//
// Purely combinational, no clock. Same contract as l1_protocol_table: for the
// state of one L2 line and the triggered event it returns the cell class
// (act, stall 'z', ignore 'i', error 'e'), the action flags and, when the cell
// names one, the next state. The L2 has no processor, so there are no Load,
// Store, FreezeGETX, Retry or Complete events; instead it has a Tokens event
// (tokens arriving without data, from an L1 replacing a clean line).
//
// Every cell follows the L2 specification table of LOCKE except PO + Ack,
// which goes to O instead of I: a line reaches PO by keeping (O + GETS) or
// receiving (PA/PT/PX + DataOwner/DataAllTokens) the owner token, so once the
// acknowledgement arrives it holds data and the owner token, which is O. This
// mirrors the pattern of the other control states (PA + Ack -> A, PT + Ack -> S).
module l2_protocol_table
  import locke_pkg::*;
(
  input  l2_state_e   state,
  input  l2_event_e   ev,
  output cell_e       cls,
  output l2_actions_t act,
  output logic        next_valid,
  output l2_state_e   next_state
);

  always_comb begin
    cls       = CELL_ACT;
    act        = '0;
    next_valid = 1'b0;
    next_state = state;

    unique case (state)
      // ---------------------------------------------------------------- I
      L2_I: unique case (ev)
        L2E_REPLACEMENT: cls = CELL_ERR;
        L2E_L1_GETS, L2E_L1_GETX: cls = CELL_IGN;
        L2E_SPECIALGETS, L2E_SPECIALGETX: act.ask_retry_bc = 1'b1;
        L2E_DATASHARED:  begin act.store_data = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_S; end
        L2E_DATAOWNER:   begin act.store_data = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_O; end
        L2E_DATAALLTOK:  begin act.store_data = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_M; end
        L2E_TOKENS:      begin act.update_tokens = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_A; end
        default:         cls = CELL_ERR;   // Ack
      endcase
      // ---------------------------------------------------------------- A
      L2_A: unique case (ev)
        L2E_REPLACEMENT: begin act.issue_writeback = 1'b1; next_valid = 1'b1; next_state = L2_PX; end
        L2E_L1_GETS:     cls = CELL_IGN;
        L2E_L1_GETX, L2E_SPECIALGETX:
                         begin act.send_tokens = 1'b1; next_valid = 1'b1; next_state = L2_PX; end
        L2E_SPECIALGETS: act.ask_retry_bc = 1'b1;
        L2E_DATASHARED:  begin act.store_data = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_S; end
        L2E_DATAOWNER:   begin act.store_data = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_O; end
        L2E_DATAALLTOK:  begin act.store_data = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_M; end
        L2E_TOKENS:      begin act.update_tokens = 1'b1; act.send_ack = 1'b1; end
        default:         cls = CELL_ERR;
      endcase
      // ---------------------------------------------------------------- S
      L2_S: unique case (ev)
        L2E_REPLACEMENT: begin act.issue_writeback = 1'b1; next_valid = 1'b1; next_state = L2_PX; end
        L2E_L1_GETS:     cls = CELL_IGN;
        L2E_L1_GETX, L2E_SPECIALGETX:
                         begin act.send_all_tokens = 1'b1; next_valid = 1'b1; next_state = L2_PX; end
        L2E_SPECIALGETS: act.ask_retry_bc = 1'b1;
        L2E_DATASHARED, L2E_TOKENS:
                         begin act.update_tokens = 1'b1; act.send_ack = 1'b1; end
        L2E_DATAOWNER:   begin act.update_tokens = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_O; end
        L2E_DATAALLTOK:  begin act.update_tokens = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_M; end
        default:         cls = CELL_ERR;
      endcase
      // ---------------------------------------------------------------- O
      L2_O: unique case (ev)
        L2E_REPLACEMENT: begin act.issue_writeback = 1'b1; next_valid = 1'b1; next_state = L2_PX; end
        L2E_L1_GETS, L2E_SPECIALGETS:
                         begin act.send_1_token = 1'b1; next_valid = 1'b1; next_state = L2_PO; end
        L2E_L1_GETX, L2E_SPECIALGETX:
                         begin act.send_all_tokens = 1'b1; next_valid = 1'b1; next_state = L2_PX; end
        L2E_DATASHARED:  cls = CELL_ERR;
        L2E_DATAOWNER, L2E_TOKENS:
                         begin act.update_tokens = 1'b1; act.send_ack = 1'b1; end
        L2E_DATAALLTOK:  begin act.update_tokens = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_M; end
        default:         cls = CELL_ERR;
      endcase
      // ---------------------------------------------------------------- M
      L2_M: unique case (ev)
        L2E_REPLACEMENT: begin act.issue_writeback = 1'b1; next_valid = 1'b1; next_state = L2_PX; end
        L2E_L1_GETS, L2E_L1_GETX, L2E_SPECIALGETS, L2E_SPECIALGETX:
                         begin act.send_all_tokens = 1'b1; next_valid = 1'b1; next_state = L2_PX; end
        default:         cls = CELL_ERR;
      endcase
      // --------------------------------------------------------------- PA
      L2_PA: unique case (ev)
        L2E_REPLACEMENT: cls = CELL_STALL;
        L2E_L1_GETS:     act.inform_owner = 1'b1;
        L2E_L1_GETX:     begin act.send_all_tokens = 1'b1; act.inform_tokens = 1'b1;
                               next_valid = 1'b1; next_state = L2_PX; end
        L2E_SPECIALGETS: act.ask_retry_bc = 1'b1;
        L2E_SPECIALGETX: begin act.send_all_tokens = 1'b1; next_valid = 1'b1; next_state = L2_PX; end
        L2E_DATASHARED:  begin act.store_data = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_PT; end
        L2E_DATAOWNER, L2E_DATAALLTOK:
                         begin act.store_data = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_PO; end
        L2E_TOKENS:      begin act.update_tokens = 1'b1; act.send_ack = 1'b1; end
        default:         begin next_valid = 1'b1; next_state = L2_A; end   // Ack
      endcase
      // --------------------------------------------------------------- PT
      L2_PT: unique case (ev)
        L2E_REPLACEMENT: cls = CELL_STALL;
        L2E_L1_GETS:     act.inform_owner = 1'b1;
        L2E_L1_GETX, L2E_SPECIALGETX:
                         begin act.send_all_tokens = 1'b1; act.inform_tokens = 1'b1; end
        L2E_SPECIALGETS: act.ask_retry_bc = 1'b1;
        L2E_DATASHARED:  begin act.store_data = 1'b1; act.send_ack = 1'b1; end
        L2E_DATAOWNER, L2E_DATAALLTOK:
                         begin act.update_tokens = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_PO; end
        L2E_TOKENS:      begin act.update_tokens = 1'b1; act.send_ack = 1'b1; end
        default:         begin next_valid = 1'b1; next_state = L2_S; end   // Ack
      endcase
      // --------------------------------------------------------------- PX
      L2_PX: unique case (ev)
        L2E_REPLACEMENT: cls = CELL_STALL;
        L2E_L1_GETS, L2E_SPECIALGETS: act.inform_owner = 1'b1;
        L2E_L1_GETX, L2E_SPECIALGETX: act.inform_tokens = 1'b1;
        L2E_DATASHARED:  begin act.store_data = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_PT; end
        L2E_DATAOWNER, L2E_DATAALLTOK:
                         begin act.store_data = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_PO; end
        L2E_TOKENS:      begin act.update_tokens = 1'b1; act.send_ack = 1'b1; next_valid = 1'b1; next_state = L2_PA; end
        default:         begin next_valid = 1'b1; next_state = L2_I; end   // Ack
      endcase
      // --------------------------------------------------------------- PO
      L2_PO: unique case (ev)
        L2E_REPLACEMENT: cls = CELL_STALL;
        L2E_L1_GETS:     act.send_1_token = 1'b1;
        L2E_L1_GETX, L2E_SPECIALGETX:
                         begin act.inform_tokens = 1'b1; act.send_all_tokens = 1'b1;
                               next_valid = 1'b1; next_state = L2_PX; end
        L2E_SPECIALGETS: begin act.send_all_tokens = 1'b1; next_valid = 1'b1; next_state = L2_PX; end
        L2E_DATASHARED:  cls = CELL_ERR;
        L2E_DATAOWNER, L2E_DATAALLTOK, L2E_TOKENS:
                         begin act.update_tokens = 1'b1; act.send_ack = 1'b1; end
        default:         begin next_valid = 1'b1; next_state = L2_O; end   // Ack
      endcase
      default: cls = CELL_ERR;
    endcase
  end

endmodule
