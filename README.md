# LOCKE token coherence: L1 and L2 controllers in SystemVerilog

LOCKE keeps private L1 caches and a shared L2 coherent by counting tokens.
Every cache line has a fixed number of tokens in the system (here
`TOTAL_TOKENS = 5`, one per cache). One of them is the owner token. A cache may
read a line while it holds at least one token. It may write only while it
holds all of them. Unlike plain token coherence, every transfer of data or
tokens is acknowledged. The sender waits in a control state until the
acknowledgement arrives, so at any time it knows whether the tokens are still
in flight. Write races are settled by priority. A cache whose write loses
*freezes* the line and hands what it has to the winner. It then waits for the
winner to announce completion before trying again.

This RTL implements both controllers as table-driven state machines. It also
provides an interconnect and a top level with four L1s and one L2.

## Line states

L1 line states:

| state | holds | meaning |
|---|---|---|
| I | nothing | not allocated |
| S | data, some tokens | readable |
| O | data, owner token (and maybe more) | readable; answers reads |
| E | clean data, all tokens | readable and writable |
| M | modified data, all tokens | readable and writable |
| IS / IM | – | read / write request sent, no data yet |
| SM | data, some tokens | write request sent, still missing tokens |
| PS | – | sent shared data/tokens, waiting for the ack |
| PX | – | sent data and all tokens (owner included), waiting for the ack |
| PO | data, owner token | sent one token with data to a reader, waiting for the ack |
| F | – | frozen: own write pending behind a higher-priority write |

The L2 has five stable states: I, A, S, O and M. A means "tokens but no
data". It arises when an L1 drops a clean line and returns only its tokens.

The L2 has four control states. The L2 always gives away every token it
holds, and the four states record what arrived while it waits for that
transfer's ack:
- PX: nothing arrived;
- PA: only tokens arrived;
- PT: data and tokens arrived;
- PO: data and the owner token arrived.

`l1_protocol_table.sv` and `l2_protocol_table.sv` hold the two state tables
as combinational logic. Each maps (state, event) to four things:
- a cell class: act, stall (`z`), ignore (`i`) or error (`e`);
- a set of action flags;
- optionally a next state;
- when no next state is named, the line keeps its state.

## From messages to events

The tables are written in terms of events, not messages. Most of the work in
the controllers (`l1_controller.sv`, `l2_controller.sv`) is turning one into
the other:

- **Load/Store vs. Replacement.** A processor access hits a direct-mapped set.
  If that set holds a different valid line, the event is Replacement of the
  old line. The processor is told to retry after the old line is gone.
- **GETX vs. FreezeGETX.** A write request from another cache becomes
  FreezeGETX when two things hold: this line has a write of its own
  outstanding, and the incoming request wins. To decide the winner,
  `{priority, node id}` is compared as one number. Higher priority wins, and
  on equal priority the higher id wins.
- **DataShared / DataOwner / DataAllTokens.** A data message is DataAllTokens
  if its tokens plus those already held make `TOTAL_TOKENS`. Otherwise it is
  DataOwner if the owner token travels with it, else DataShared.
- **Tokens (L2 only).** A message carrying tokens but no data.
- **Ack.** Each line counts the acks it still expects. One is added for
  every data or token message it sends: replace, sendAllTokens, send1Token,
  bounceL2, issueWriteback, sendTokens. Only the last expected ack reaches the
  table. Earlier ones just decrement the count. This is why PO can answer
  several readers and still leave PO on the right ack.
- **Retry.** RETRY messages carry a hint:
  - `info_node` names a node to ask. informTokensDest and informOwnerDest name
    the node the tokens were last sent to. askToRetryLater names the sender
    itself. retryWithBoss names the winner that froze the line.
  - Alternatively `bcast` asks for a broadcast (askToRetryBC).

  The Retry event answers with a *Special* request (SGETS/SGETX) sent to that
  node, or broadcast. A Special request is handled like a normal one, except
  that a node that cannot serve it replies with a RETRY instead of staying
  silent.
- **Complete.** When a store finishes on a line that had a write request
  outstanding, the L1 broadcasts COMPLETE to the other L1s. Frozen lines
  then re-issue their GETX. IM/SM lines re-ask with a SpecialGETX.

### Request numbers

A broadcast Special request can draw a RETRY from every other cache. If each
of those RETRYs started a new broadcast, the traffic would grow without bound.
This actually happened in simulation: the bus saturated and every input queue
filled.

To prevent it, every request carries the line's 2-bit request number
(`rseq`), and a RETRY echoes the number of the request it answers. The L1
passes a RETRY to the table only if it answers the line's latest request, and
silently drops older ones. This is not part of the LOCKE tables. It removes
the retry storm, but it does not make the protocol free of livelock (see
Limits).

## Messages and the bus

One message format (`msg_t` in `locke_pkg.sv`) carries all traffic:

| field | use |
|---|---|
| `mtype` | GETS, GETX, SGETS, SGETX, DATA, TOKENS, ACK, RETRY, COMPLETE |
| `src`, `dst` | node ids: L1 *i* is node *i*, the L2 is node 4, memory is node 5 |
| `bcast` | requests: broadcast; RETRY: "retry by broadcast" |
| `addr`, `data` | 10-bit line address, one 32-bit word standing for the line |
| `tokens`, `owner` | tokens carried, and whether the owner token is among them |
| `prio` | priority of a write request |
| `info_node` | RETRY: where to ask next |
| `rseq` | request number (see above) |

How actions map to messages:
- **bounceData, bounceToBoss:** forward a message unchanged, so the final
  receiver acknowledges the original sender.
- **bounceL2:** forwards to the L2. In PX (no sendAck in the cell) the message
  keeps its original source, so the L2 acknowledges the original sender. In
  PS the cell also acknowledges the sender itself, so the bouncing node
  becomes the source and waits for the L2's ack.
- **Replacing an S line:** sends TOKENS.
- **Replacing an O, E or M line:** sends DATA.
- **The L2 in A, PA or PX:** has no data, so it passes tokens on as TOKENS.

`locke_bus.sv` is a single shared bus with round-robin arbitration. It
delivers one message per cycle, to all its receivers at once. GETS, GETX and
broadcast Special requests go to every cache except the sender. COMPLETE goes
to every L1 except the sender. Everything else goes to `dst` only. A sender
is granted only when every receiver of its message has room, and messages from
one sender stay in order. Every cache has an 8-entry input FIFO
(`msg_fifo.sv`).

## Controller timing

- Each controller applies at most one table cell per cycle. Network input goes
  ahead of the processor (L1) or of replacement requests (L2).
- An event emits up to two messages into a two-entry output stage. No new
  event is accepted until that stage has drained.
- The processor interface is valid/ready. The response comes exactly one cycle
  after the request is accepted:
  - `DONE`, with load data;
  - `ISSUED`: a request or replacement was sent; retry later;
  - `STALL`;
  - `ERROR`: an `e` cell.
- A store to an S or O line whose GETX is already outstanding gets `STALL`
  locally, so the request is not sent twice.
- `ev_fire/ev_state/ev_event/ev_cell` report every cell applied, and `err` is
  a sticky error flag.

L2 storage is five per-line memories without reset (state, tokens, data,
pending acks, last token destination) plus one valid bit per line. A line not
yet written reads as its reset value: M with all tokens and zero data. This
models an L2 that initially holds the whole 1024-line address space. The L1
is direct-mapped with 64 sets and a tag per line.

## Where this design departs from the tables

These cells were changed because, taken literally, they contradict the state
descriptions:

| cell | table | here | why |
|---|---|---|---|
| L1 I + Load | sendGETS | sendGETS /IS | the line must wait for data in IS |
| L1 I + Store | sendGETX | sendGETX /IM | likewise IM |
| L1 E + Store | doStore | doStore /M | the data is now modified |
| L1 PO + Ack | /I | /O | PO keeps the data and the owner token |
| L1 F + Retry, F + Complete | sendGETX | sendGETX /IM | the write request is outstanding again |
| L2 PO + Ack | /I | /O | same reason as the L1 |

Other choices not fixed by the protocol:
- the sizes and widths: four L1s, five tokens, 64 L1 sets, 1024 lines, 8-entry
  FIFOs, 4-bit priorities;
- the memory node;
- a RETRY naming the receiver itself is answered with a broadcast;
- `sendAllTokens` with zero tokens sends nothing.

## Limits

- **Liveness under heavy contention is not achieved.** The tables give no
  timeout or fairness rule. A request that every holder ignores (for example a
  GETS reaching only I/S lines) waits until something else moves the line. In
  the random phase of the end-to-end test, four processors hammer three lines.
  Only some random streams finish: 13 of the first 40 values of
  `+rnd_seed=N`. The typical failure: two caches' write requests cross while
  neither has a request of its own pending, so each ignores the other's. Both
  then collect part of the tokens and sit in SM, and no table rule ever
  re-sends either request. Readers waiting in IS starve behind them. A
  request timeout would break this, but the protocol describes none, so none
  was added. The default stream (9) finishes.
  On it, every load returns a value that was stored, all caches agree, and no
  token is lost. Serial use, sharing, replacement and two- and three-way write
  races complete for every stream. Treat the controllers as a faithful
  rendering of the tables, not as a verified livelock-free protocol.
- Data is one word per line, and there is no real memory behind the L2. A
  writeback only needs to be acknowledged.
- The processor and the memory are not part of the design. The top brings
  their ports out: `proc_*` per L1, `mem_rx_*`/`mem_tx_*` for the memory
  node, and `l2_repl_*` to ask the L2 to evict a line.

## Files

| file | contents |
|---|---|
| `rtl/locke_pkg.sv` | widths, state/event/action types, message and processor formats |
| `rtl/l1_protocol_table.sv`, `rtl/l2_protocol_table.sv` | the two state tables |
| `rtl/l1_controller.sv`, `rtl/l2_controller.sv` | the controllers |
| `rtl/msg_fifo.sv` | input queue |
| `rtl/locke_bus.sv` | interconnect |
| `rtl/locke_system.sv` | top: 4 L1s, the L2, FIFOs and the bus |
| `tb/tb_*.sv` | one self-checking testbench per module |

The testbenches:
- **Table testbenches:** compare every cell with a transcription of the
  tables written as text.
- **Controller testbenches:** play the rest of the system by hand.
- **`tb_locke_system`:** runs the top at its default size. It covers serial
  accesses, sharing, L1 replacements, write races between two and three
  caches, random traffic from all four processors, and an L2 writeback. It
  checks every load against a reference memory, and checks that all tokens
  are accounted for at the end. It counts each protocol mechanism (freeze,
  frozen stall, Special request, Retry, Complete, PO ack, partial ack, L2
  Tokens event, writeback, and so on) and fails if one never happened. Each
  testbench prints `TB_RESULT checks=N failures=M`. `+trace` prints every bus
  message, and `+rnd_seed=N` picks the random stream (default 9).

To simulate one with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/locke_pkg.sv \
    tb/tb_locke_system.sv --top-module tb_locke_system -Mdir obj
./obj/Vtb_locke_system
```
