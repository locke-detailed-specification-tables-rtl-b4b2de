// locke_system: NUM_L1 private L1 caches and one shared L2 kept coherent by LOCKE.
//
// Each L1 controller serves one processor port; the L2 controller backs the
// whole address space. All controllers talk over one broadcast-capable bus
// (locke_bus); every cache node receives through its own input FIFO
// (msg_fifo). Node ids: L1 i is node i, the L2 is node NUM_L1, the memory is
// node NUM_L1+1. The memory is outside this design: its bus port is brought
// out (mem_rx_* carries what the L2 writes back to it, mem_tx_* what it sends,
// normally the ACK of a writeback). The L2 replacement request port is brought
// out too, since the policy that picks L2 victims is not part of the protocol.
//
// The number of caches, the total number of tokens (one per cache, L2
// included), the L1 size and the FIFO depth are this design's choices; the
// protocol description fixes none of them. The ev_* outputs report, per
// controller, every state-table cell applied (state, event, class), for
// observation and coverage.
module locke_system
  import locke_pkg::*;
#(
  parameter int unsigned NUM_L1       = 4,
  parameter int unsigned TOTAL_TOKENS = NUM_L1 + 1,
  parameter int unsigned L1_SETS      = 64,
  parameter int unsigned FIFO_DEPTH   = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  // processors
  input  logic [NUM_L1-1:0]   proc_req_valid,
  output logic [NUM_L1-1:0]   proc_req_ready,
  input  proc_req_t           proc_req        [NUM_L1],
  output logic [NUM_L1-1:0]   proc_resp_valid,
  output proc_resp_t          proc_resp       [NUM_L1],
  // L2 replacement requests
  input  logic                l2_repl_valid,
  output logic                l2_repl_ready,
  input  addr_t               l2_repl_addr,
  // memory node
  output logic                mem_rx_valid,
  input  logic                mem_rx_ready,
  output msg_t                mem_rx,
  input  logic                mem_tx_valid,
  output logic                mem_tx_ready,
  input  msg_t                mem_tx,
  // observation
  output logic [NUM_L1-1:0]   l1_ev_fire,
  output l1_state_e           l1_ev_state     [NUM_L1],
  output l1_event_e           l1_ev_event     [NUM_L1],
  output cell_e               l1_ev_cell      [NUM_L1],
  output logic                l2_ev_fire,
  output l2_state_e           l2_ev_state,
  output l2_event_e           l2_ev_event,
  output cell_e               l2_ev_cell,
  output logic                err
);

  localparam int unsigned NODES = NUM_L1 + 2;
  localparam node_t L2_ID  = node_t'(NUM_L1);
  localparam node_t MEM_ID = node_t'(NUM_L1 + 1);

  logic [NODES-1:0] src_valid, src_ready, dst_valid, dst_ready;
  msg_t             src_msg [NODES];
  msg_t             dst_msg;

  // node input queues (caches only)
  logic [NUM_L1:0] q_valid, q_ready;
  msg_t            q_msg [NUM_L1+1];
  logic [NUM_L1:0] l1l2_err;

  for (genvar n = 0; n <= NUM_L1; n++) begin : g_q
    msg_fifo #(.DEPTH(FIFO_DEPTH)) u_q (
      .clk, .rst_n,
      .in_valid(dst_valid[n]), .in_ready(dst_ready[n]), .in(dst_msg),
      .out_valid(q_valid[n]), .out_ready(q_ready[n]), .out(q_msg[n])
    );
  end

  for (genvar i = 0; i < NUM_L1; i++) begin : g_l1
    l1_controller #(
      .MY_ID(node_t'(i)), .L2_ID(L2_ID),
      .TOTAL_TOKENS(TOTAL_TOKENS), .SETS(L1_SETS)
    ) u_l1 (
      .clk, .rst_n,
      .net_in_valid(q_valid[i]), .net_in_ready(q_ready[i]), .net_in(q_msg[i]),
      .net_out_valid(src_valid[i]), .net_out_ready(src_ready[i]), .net_out(src_msg[i]),
      .proc_req_valid(proc_req_valid[i]), .proc_req_ready(proc_req_ready[i]),
      .proc_req(proc_req[i]),
      .proc_resp_valid(proc_resp_valid[i]), .proc_resp(proc_resp[i]),
      .ev_fire(l1_ev_fire[i]), .ev_state(l1_ev_state[i]), .ev_event(l1_ev_event[i]),
      .ev_cell(l1_ev_cell[i]), .err(l1l2_err[i])
    );
  end

  l2_controller #(
    .MY_ID(L2_ID), .MEM_ID(MEM_ID), .TOTAL_TOKENS(TOTAL_TOKENS)
  ) u_l2 (
    .clk, .rst_n,
    .net_in_valid(q_valid[NUM_L1]), .net_in_ready(q_ready[NUM_L1]), .net_in(q_msg[NUM_L1]),
    .net_out_valid(src_valid[NUM_L1]), .net_out_ready(src_ready[NUM_L1]),
    .net_out(src_msg[NUM_L1]),
    .repl_valid(l2_repl_valid), .repl_ready(l2_repl_ready), .repl_addr(l2_repl_addr),
    .ev_fire(l2_ev_fire), .ev_state(l2_ev_state), .ev_event(l2_ev_event),
    .ev_cell(l2_ev_cell), .err(l1l2_err[NUM_L1])
  );

  // memory node
  assign src_valid[MEM_ID] = mem_tx_valid;
  assign src_msg[MEM_ID]   = mem_tx;
  assign mem_tx_ready      = src_ready[MEM_ID];
  assign mem_rx_valid      = dst_valid[MEM_ID];
  assign mem_rx            = dst_msg;
  assign dst_ready[MEM_ID] = mem_rx_ready;

  locke_bus #(.NUM_L1(NUM_L1), .NODES(NODES)) u_bus (
    .clk, .rst_n,
    .src_valid, .src_ready, .src_msg,
    .dst_valid, .dst_ready, .dst_msg
  );

  assign err = |l1l2_err;

endmodule
