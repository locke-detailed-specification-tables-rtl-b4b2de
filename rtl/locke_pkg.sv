// locke_pkg: types and constants shared by the LOCKE coherence controllers.
//
// LOCKE is a token-based coherence protocol with explicit acknowledgement of
// every data/token transfer. Each cache line holds a number of tokens; one of
// them is the owner token. A controller may read with at least one token and
// write only with all of them. This package defines the line states and events
// of the L1 and L2 state tables, the action flags those tables produce, the
// network message format and the processor request/response format.
//
// The state and event sets are exactly those of the two specification tables.
// Field widths (address, data, tokens, priority, node id) are not given by the
// protocol description and are this design's choices; they are package
// constants because the message struct is shared by every module.
package locke_pkg;

  // ------------------------------------------------------------------ widths
  localparam int unsigned NODE_W = 3;   // up to 8 nodes (L1s + the L2)
  localparam int unsigned ADDR_W = 10;  // line address width
  localparam int unsigned DATA_W = 32;  // one data word stands for the line
  localparam int unsigned TOK_W  = 4;   // token counts 0..15
  localparam int unsigned PRIO_W = 4;   // priority of a write request

  typedef logic [NODE_W-1:0] node_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] data_t;
  typedef logic [TOK_W-1:0]  tok_t;
  typedef logic [PRIO_W-1:0] prio_t;
  typedef logic [1:0]        rseq_t;   // request number, tells stale retries apart

  // ------------------------------------------------------------ L1 states
  typedef enum logic [3:0] {
    L1_I  = 4'd0,   // block not allocated
    L1_S  = 4'd1,   // data + some tokens
    L1_O  = 4'd2,   // data + owner token
    L1_E  = 4'd3,   // clean data + all tokens
    L1_M  = 4'd4,   // modified data + all tokens
    L1_IS = 4'd5,   // GETS issued, waiting for data
    L1_IM = 4'd6,   // GETX issued, waiting for data
    L1_SM = 4'd7,   // GETX issued, data and some tokens received
    L1_PS = 4'd8,   // shared data/tokens sent, waiting for ack
    L1_PX = 4'd9,   // data and all tokens sent, waiting for ack
    L1_PO = 4'd10,  // shared data sent, owner kept, waiting for ack
    L1_F  = 4'd11   // frozen: own write pending behind a higher-priority one
  } l1_state_e;

  typedef enum logic [3:0] {
    L1E_LOAD        = 4'd0,
    L1E_STORE       = 4'd1,
    L1E_REPLACEMENT = 4'd2,
    L1E_GETS        = 4'd3,
    L1E_GETX        = 4'd4,
    L1E_FREEZEGETX  = 4'd5,
    L1E_SPECIALGETS = 4'd6,
    L1E_SPECIALGETX = 4'd7,
    L1E_DATASHARED  = 4'd8,
    L1E_DATAOWNER   = 4'd9,
    L1E_DATAALLTOK  = 4'd10,
    L1E_ACK         = 4'd11,
    L1E_RETRY       = 4'd12,
    L1E_COMPLETE    = 4'd13
  } l1_event_e;

  // Actions named in Table I. Spelling variants of the table that do the same
  // thing share a flag: sendAllToken/sendAllTokens, send1Token/sendToken,
  // askToRetryBC/askRetryBC, informTokenDest/informTokensDest.
  typedef struct packed {
    logic send_gets;         // sendGETS
    logic send_getx;         // sendGETX
    logic do_load;           // do Load
    logic do_store;          // doStore
    logic replace;           // replace
    logic send_all_tokens;   // sendAllTokens
    logic send_1_token;      // send1Token
    logic ask_retry_bc;      // askToRetryBC
    logic ask_retry_later;   // askToRetryLater
    logic inform_tokens;     // informTokensDest
    logic inform_owner;      // informOwnerDest
    logic retry_with_boss;   // retryWithBoss
    logic update;            // update
    logic send_ack;          // sendAck
    logic bounce_data;       // bounceData
    logic bounce_l2;         // bounceL2
    logic bounce_to_boss;    // bounceToBoss
    logic send_special_gets; // sendSpecialGETS
    logic send_special_getx; // sendSpecialGETX
  } l1_actions_t;

  // ------------------------------------------------------------ L2 states
  typedef enum logic [3:0] {
    L2_I  = 4'd0,   // block not allocated
    L2_A  = 4'd1,   // allocated, tokens only, no valid data
    L2_S  = 4'd2,   // data + some tokens
    L2_O  = 4'd3,   // data + owner token
    L2_M  = 4'd4,   // data + all tokens
    L2_PA = 4'd5,   // all sent, waiting ack, received replaced tokens
    L2_PT = 4'd6,   // all sent, waiting ack, received data + tokens
    L2_PX = 4'd7,   // all sent, waiting ack
    L2_PO = 4'd8    // all sent, waiting ack, received data + owner token
  } l2_state_e;

  typedef enum logic [3:0] {
    L2E_REPLACEMENT = 4'd0,
    L2E_L1_GETS     = 4'd1,
    L2E_L1_GETX     = 4'd2,
    L2E_SPECIALGETS = 4'd3,
    L2E_SPECIALGETX = 4'd4,
    L2E_DATASHARED  = 4'd5,
    L2E_DATAOWNER   = 4'd6,
    L2E_DATAALLTOK  = 4'd7,
    L2E_TOKENS      = 4'd8,
    L2E_ACK         = 4'd9
  } l2_event_e;

  typedef struct packed {
    logic issue_writeback;   // issueWriteback
    logic send_tokens;       // sendTokens (tokens, no data)
    logic send_all_tokens;   // sendAllTokens / sendAllToken
    logic send_1_token;      // send1Token
    logic ask_retry_bc;      // askToRetryBC / askRetryBC
    logic inform_tokens;     // informTokensDest / informTokenDest
    logic inform_owner;      // informOwnerDest
    logic store_data;        // storeData
    logic send_ack;          // sendAck
    logic update_tokens;     // updateNumTokens
  } l2_actions_t;

  // Table cell class: act (do the actions), z (stall), i (ignore), e (error).
  typedef enum logic [1:0] {
    CELL_ACT   = 2'd0,
    CELL_STALL = 2'd1,
    CELL_IGN   = 2'd2,
    CELL_ERR   = 2'd3
  } cell_e;

  // ------------------------------------------------------------- messages
  typedef enum logic [3:0] {
    MSG_GETS     = 4'd0,  // read request (broadcast)
    MSG_GETX     = 4'd1,  // write request with priority (broadcast)
    MSG_SGETS    = 4'd2,  // SpecialGETS: directed (or broadcast) retry of a GETS
    MSG_SGETX    = 4'd3,  // SpecialGETX
    MSG_DATA     = 4'd4,  // data + tokens (owner flag tells if the owner token travels)
    MSG_TOKENS   = 4'd5,  // tokens without data
    MSG_ACK      = 4'd6,  // acknowledges one data/token transfer
    MSG_RETRY    = 4'd7,  // retry hint: info_node says where to ask, bcast asks broadcast
    MSG_COMPLETE = 4'd8   // a write finished (sent to all L1s)
  } msg_type_e;

  typedef struct packed {
    msg_type_e mtype;
    node_t     src;
    node_t     dst;        // ignored when bcast and mtype is a request
    logic      bcast;      // requests: deliver to all; RETRY: retry by broadcast
    addr_t     addr;
    tok_t      tokens;
    logic      owner;      // owner token included
    prio_t     prio;
    node_t     info_node;  // RETRY: where the tokens/owner were sent
    rseq_t     rseq;       // requests: request number of the line; RETRY: echoed
    data_t     data;
  } msg_t;

  // ------------------------------------------------------ processor port
  typedef enum logic [1:0] {
    RESP_DONE   = 2'd0,  // load/store performed
    RESP_ISSUED = 2'd1,  // request or replacement started; retry later
    RESP_STALL  = 2'd2,  // line busy; retry later
    RESP_ERROR  = 2'd3   // table 'e' cell
  } resp_e;

  typedef struct packed {
    logic  store;        // 0 load, 1 store
    addr_t addr;
    data_t wdata;
    prio_t prio;         // priority given to the GETX of this store
  } proc_req_t;

  typedef struct packed {
    resp_e code;
    data_t rdata;
  } proc_resp_t;

endpackage
