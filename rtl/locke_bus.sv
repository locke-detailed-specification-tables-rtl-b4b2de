// locke_bus: message interconnect between the LOCKE controllers.
//
// A single shared bus with round-robin arbitration over NODES senders. Nodes
// 0..NUM_L1-1 are the L1 controllers, node NUM_L1 the L2 and node NUM_L1+1 the
// memory. Each cycle it delivers at most one message, to all its receivers at
// once. Broadcasts follow the message kind: GETS, GETX and a SpecialGETS/GETX
// with bcast set go to every cache except the sender; COMPLETE goes to every
// L1 except the sender; all else goes to dst alone. A sender is eligible only
// when every receiver of its message is ready, so a busy receiver never holds
// up traffic to others. The protocol names broadcast and point-to-point
// messages but not the network; the bus, its arbitration and its
// one-message-per-cycle rate are this design's choices. Messages from one
// sender keep their order.
//
// Lint note: the embedded assertion uses rst_n in "disable iff", and lint
// reports that as SYNCASYNCNET (reset used both as the asynchronous flop
// reset and inside a clocked check). The assertion is not logic; the
// flops are all reset asynchronously.
module locke_bus
  import locke_pkg::*;
#(
  parameter int unsigned NUM_L1 = 4,
  parameter int unsigned NODES  = NUM_L1 + 2
) (
  input  logic clk,
  input  logic rst_n,
  // from the senders
  input  logic [NODES-1:0] src_valid,
  output logic [NODES-1:0] src_ready,
  input  msg_t             src_msg [NODES],
  // to the receivers
  output logic [NODES-1:0] dst_valid,
  input  logic [NODES-1:0] dst_ready,
  output msg_t             dst_msg
);
  localparam int unsigned IW = $clog2(NODES);
  typedef logic [IW-1:0] idx_t;

  logic [NODES-1:0] mask [NODES];
  logic [NODES-1:0] elig;
  idx_t             ptr_q, gnt;
  logic             any;

  always_comb begin
    for (int s = 0; s < NODES; s++) begin
      mask[s] = '0;
      unique case (src_msg[s].mtype)
        MSG_GETS, MSG_GETX: for (int d = 0; d <= NUM_L1; d++) mask[s][d] = 1'b1;
        MSG_SGETS, MSG_SGETX:
          if (src_msg[s].bcast) for (int d = 0; d <= NUM_L1; d++) mask[s][d] = 1'b1;
          else                  mask[s][src_msg[s].dst] = 1'b1;
        MSG_COMPLETE: for (int d = 0; d < NUM_L1; d++) mask[s][d] = 1'b1;
        default: mask[s][src_msg[s].dst] = 1'b1;
      endcase
      if (src_msg[s].mtype inside {MSG_GETS, MSG_GETX, MSG_COMPLETE} ||
          (src_msg[s].mtype inside {MSG_SGETS, MSG_SGETX} && src_msg[s].bcast))
        mask[s][s] = 1'b0;
      elig[s] = src_valid[s] && ((mask[s] & ~dst_ready) == '0);
    end
    // round robin from ptr_q
    any = 1'b0;
    gnt = '0;
    for (int k = 0; k < NODES; k++) begin
      idx_t s;
      s = idx_t'((int'(ptr_q) + k) % NODES);
      if (!any && elig[s]) begin
        any = 1'b1;
        gnt = s;
      end
    end
    src_ready = '0;
    dst_valid = '0;
    dst_msg   = src_msg[gnt];
    if (any) begin
      src_ready[gnt] = 1'b1;
      dst_valid      = mask[gnt];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr_q <= '0;
    else if (any) ptr_q <= (int'(gnt) == NODES-1) ? '0 : gnt + idx_t'(1);
  end

  // a message is delivered only to receivers that can take it
  a_dst_ready: assert property (@(posedge clk) disable iff (!rst_n) (dst_valid & ~dst_ready) == '0);
endmodule
