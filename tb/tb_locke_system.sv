// tb_locke_system: end-to-end test of four L1s and the L2 at the default sizes.
//
// Four processor models issue loads and stores and retry every request that
// is not DONE until it is; a memory model acknowledges L2 writebacks. The test
// runs in phases:
//   1. serial loads and stores by different processors, each checked against
//      a reference memory (the last value stored);
//   2. read sharing of one line by every processor, then a store by a sharer
//      that must collect every token;
//   3. conflicting addresses of one L1 set, forcing L1 replacements of shared
//      and owned lines;
//   4. two processors storing to one line at once with different priorities
//      (FreezeGETX, frozen line, COMPLETE wake-up), after which every
//      processor must read the same value, one of the two stored;
//   5. random loads and stores by all processors at once to a few lines, then
//      a check that all processors read one value per line and that it is
//      the last value some processor stored there, and that every token of
//      each line used is held by some cache once the traffic has settled;
//   6. L2 replacements, written back to memory and acknowledged.
// It counts how often each protocol mechanism happened (FreezeGETX, the frozen
// state, L1 replacement, stalls, Special requests, Retry and Complete events,
// owner transfers, partial acks, L2 Tokens, L2 writeback) and counts a failure
// for any that never did, and for any error cell hit. The random stream of
// phase 5 is seeded by the testbench itself (+rnd_seed=N, default 9), so the
// run does not depend on the simulator's seed; under this much contention some
// streams do not finish (see the design notes on liveness).
module tb_locke_system;
  import locke_pkg::*;

  localparam int NL1 = 4;
  localparam int MEM = NL1 + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NL1-1:0] proc_req_valid, proc_req_ready, proc_resp_valid;
  proc_req_t      proc_req  [NL1];
  proc_resp_t     proc_resp [NL1];
  logic           l2_repl_valid, l2_repl_ready;
  addr_t          l2_repl_addr;
  logic           mem_rx_valid, mem_rx_ready, mem_tx_valid, mem_tx_ready;
  msg_t           mem_rx, mem_tx;
  logic [NL1-1:0] l1_ev_fire;
  l1_state_e      l1_ev_state [NL1];
  l1_event_e      l1_ev_event [NL1];
  cell_e          l1_ev_cell  [NL1];
  logic           l2_ev_fire;
  l2_state_e      l2_ev_state;
  l2_event_e      l2_ev_event;
  cell_e          l2_ev_cell;
  logic           err;

  locke_system dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cyc); end
  endtask

  // ------------------------------------------------------------ coverage
  int n_freeze = 0, n_frozen = 0, n_repl = 0, n_stall = 0, n_special = 0, n_retry = 0,
      n_complete = 0, n_owner = 0, n_sm = 0, n_po_ack = 0, n_bounce = 0, n_l2_tokens = 0,
      n_l2_wb = 0;
  int
      n_partial_ack;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int i = 0; i < NL1; i++) begin
      if (l1_ev_fire[i]) begin
        if (l1_ev_event[i] == L1E_FREEZEGETX && l1_ev_cell[i] == CELL_ACT) n_freeze++;
        if (l1_ev_state[i] == L1_F) n_frozen++;
        if (l1_ev_event[i] == L1E_REPLACEMENT && l1_ev_cell[i] == CELL_ACT) n_repl++;
        if (l1_ev_cell[i] == CELL_STALL) n_stall++;
        if (l1_ev_event[i] inside {L1E_SPECIALGETS, L1E_SPECIALGETX}) n_special++;
        if (l1_ev_event[i] == L1E_RETRY && l1_ev_cell[i] == CELL_ACT) n_retry++;
        if (l1_ev_event[i] == L1E_COMPLETE && l1_ev_state[i] == L1_F) n_complete++;
        if (l1_ev_event[i] == L1E_DATAOWNER) n_owner++;
        if (l1_ev_state[i] == L1_SM) n_sm++;
        if (l1_ev_state[i] == L1_PO && l1_ev_event[i] == L1E_ACK) n_po_ack++;
        if (l1_ev_event[i] inside {L1E_DATASHARED, L1E_DATAOWNER, L1E_DATAALLTOK} &&
            l1_ev_state[i] inside {L1_I, L1_PS, L1_PX, L1_F}) n_bounce++;
      end
    end
    if (l2_ev_fire) begin
      if (l2_ev_event == L2E_TOKENS) n_l2_tokens++;
      if (l2_ev_event == L2E_REPLACEMENT && l2_ev_cell == CELL_ACT) n_l2_wb++;
    end
  end

  // an ack accepted without a table event is a partial (not last) ack
  int pa [NL1];
  for (genvar g = 0; g < NL1; g++) begin : g_pa
    initial pa[g] = 0;
    always @(posedge clk) if (dut.g_l1[g].u_l1.use_net && dut.g_l1[g].u_l1.ack_partial) pa[g]++;
  end
  always_comb begin
    n_partial_ack = 0;
    for (int i = 0; i < NL1; i++) n_partial_ack += pa[i];
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // +trace prints every message the bus delivers
  bit trace;
  initial trace = $test$plusargs("trace");
  always @(posedge clk)
    if (trace && |dut.dst_valid)
      $display("%0d: %s %0d->%b addr %0d tok %0d own %0d prio %0d info %0d bc %0d", cyc,
               dut.dst_msg.mtype.name(), dut.dst_msg.src, dut.dst_valid, dut.dst_msg.addr,
               dut.dst_msg.tokens, dut.dst_msg.owner, dut.dst_msg.prio, dut.dst_msg.info_node,
               dut.dst_msg.bcast);

  // ------------------------------------------------------------- memory
  msg_t mem_q [$];
  data_t mem_data [addr_t];
  assign mem_rx_ready = 1'b1;
  always @(posedge clk) begin
    if (mem_rx_valid) begin
      msg_t a;
      a = '0;
      a.mtype = MSG_ACK; a.src = node_t'(MEM); a.dst = mem_rx.src; a.addr = mem_rx.addr;
      mem_q.push_back(a);
      if (mem_rx.mtype == MSG_DATA) mem_data[mem_rx.addr] = mem_rx.data;
    end
    if (mem_tx_valid && mem_tx_ready) void'(mem_q.pop_front());
  end
  always_comb begin
    mem_tx_valid = (mem_q.size() != 0);
    mem_tx       = (mem_q.size() != 0) ? mem_q[0] : '0;
  end

  // ---------------------------------------------------------- processors
  int op_cycles_max = 20000;

  // print where the tokens of a line are (for failure reports)
  // L2 line fields as the controller sees them (unwritten lines read as reset)
  function automatic l2_state_e l2_st(input addr_t a);
    return dut.u_l2.vld_q[a] ? dut.u_l2.st_m[a] : L2_M;
  endfunction
  function automatic tok_t l2_tok(input addr_t a);
    return dut.u_l2.vld_q[a] ? dut.u_l2.tok_m[a] : tok_t'(5);
  endfunction
  function automatic tok_t l2_pack(input addr_t a);
    return dut.u_l2.vld_q[a] ? dut.u_l2.pack_m[a] : '0;
  endfunction

  // token conservation: tokens of line tk_addr held by each L1 (tag match)
  addr_t tk_addr = '0;
  int    tk_l1 [NL1];
  for (genvar g = 0; g < NL1; g++) begin : g_tk
    always_comb begin
      logic [5:0] s;
      s = tk_addr[5:0];
      tk_l1[g] = (dut.g_l1[g].u_l1.st[s] != L1_I &&
                  dut.g_l1[g].u_l1.tag_q[s] == tk_addr[ADDR_W-1:6]) ?
                 int'(dut.g_l1[g].u_l1.tok_q[s]) : 0;
    end
  end

  task automatic check_tokens(input addr_t a);
    int sum;
    tk_addr = a;
    #1;
    sum = int'(l2_tok(a));
    for (int p = 0; p < NL1; p++) sum += tk_l1[p];
    check(sum == 5, $sformatf("line %0d: %0d tokens in the caches, expected 5", a, sum));
  endtask

  task automatic dump(input addr_t a);
    $display("  L2 line %0d: %s tokens=%0d pending_acks=%0d", a, l2_st(a).name(),
             l2_tok(a), l2_pack(a));
    for (int p = 0; p < NL1; p++) begin
      l1_state_e s; int t, k, tg; logic gp;
      case (p)
        0: begin s = dut.g_l1[0].u_l1.st[a%64]; t = dut.g_l1[0].u_l1.tok_q[a%64]; k = dut.g_l1[0].u_l1.pack_q[a%64]; tg = dut.g_l1[0].u_l1.tag_q[a%64]; gp = dut.g_l1[0].u_l1.gp_q[a%64]; end
        1: begin s = dut.g_l1[1].u_l1.st[a%64]; t = dut.g_l1[1].u_l1.tok_q[a%64]; k = dut.g_l1[1].u_l1.pack_q[a%64]; tg = dut.g_l1[1].u_l1.tag_q[a%64]; gp = dut.g_l1[1].u_l1.gp_q[a%64]; end
        2: begin s = dut.g_l1[2].u_l1.st[a%64]; t = dut.g_l1[2].u_l1.tok_q[a%64]; k = dut.g_l1[2].u_l1.pack_q[a%64]; tg = dut.g_l1[2].u_l1.tag_q[a%64]; gp = dut.g_l1[2].u_l1.gp_q[a%64]; end
        default: begin s = dut.g_l1[3].u_l1.st[a%64]; t = dut.g_l1[3].u_l1.tok_q[a%64]; k = dut.g_l1[3].u_l1.pack_q[a%64]; tg = dut.g_l1[3].u_l1.tag_q[a%64]; gp = dut.g_l1[3].u_l1.gp_q[a%64]; end
      endcase
      $display("  L1 %0d set %0d: tag %0d %s tokens=%0d pending_acks=%0d getx_pending=%0d",
               p, a % 64, tg, s.name(), t, k, gp);
    end
  endtask

  task automatic op(input int p, input logic store, input addr_t addr, input data_t wdata,
                    input prio_t prio, output data_t rdata);
    int tries = 0;
    int t0 = cyc;
    forever begin
      @(negedge clk);
      proc_req[p]       = '{store: store, addr: addr, wdata: wdata, prio: prio};
      proc_req_valid[p] = 1'b1;
      @(posedge clk);
      while (!proc_req_ready[p]) @(posedge clk);
      @(negedge clk);
      proc_req_valid[p] = 1'b0;
      if (proc_resp[p].code == RESP_DONE) begin
        rdata = proc_resp[p].rdata;
        return;
      end
      if (proc_resp[p].code == RESP_ERROR) begin
        check(1'b0, $sformatf("P%0d %s %0d got ERROR", p, store ? "store" : "load", addr));
        rdata = '0;
        return;
      end
      tries++;
      if (cyc - t0 > op_cycles_max) begin
        check(1'b0, $sformatf("P%0d %s %0d never completed", p, store ? "store" : "load", addr));
        dump(addr);
        rdata = '0;
        return;
      end
      repeat (2 + (tries % 5) + p) @(negedge clk);
    end
  endtask

  data_t ref_mem [addr_t];

  task automatic load_chk(input int p, input addr_t a);
    data_t d, e;
    op(p, 1'b0, a, '0, '0, d);
    e = ref_mem.exists(a) ? ref_mem[a] : '0;
    check(d == e, $sformatf("P%0d load %0d = %h, expected %h", p, a, d, e));
  endtask

  task automatic store(input int p, input addr_t a, input data_t v, input prio_t pr = 4'd1);
    data_t d;
    op(p, 1'b1, a, v, pr, d);
    ref_mem[a] = v;
  endtask

  task automatic settle();
    repeat (60) @(negedge clk);
  endtask

  // random phase bookkeeping
  data_t stored [addr_t][$];
  localparam int NRA = 3;
  addr_t ra [NRA] = '{10'd200, 10'd264, 10'd201};   // 200 and 264 share an L1 set

  // rnd_seed fixes the random stream of each processor, so the run is the
  // same whatever seed the simulator is started with (+rnd_seed=N changes it).
  int unsigned rnd_seed = 32'd9;
  initial void'($value$plusargs("rnd_seed=%d", rnd_seed));

  task automatic rnd_proc(input int p, input int n);
    void'($urandom(rnd_seed + 32'(p)));
    for (int k = 0; k < n; k++) begin
      addr_t a;
      data_t d, v;
      a = ra[$urandom_range(NRA-1)];
      if ($urandom_range(2) == 0) begin
        v = {8'(p), 8'(k), 16'(a)};
        op(p, 1'b1, a, v, prio_t'($urandom_range(15)), d);
        stored[a].push_back(v);
      end else begin
        op(p, 1'b0, a, '0, '0, d);
      end
    end
  endtask

  initial begin
    data_t d0, d3, dd;
    proc_req_valid = '0;
    for (int i = 0; i < NL1; i++) proc_req[i] = '0;
    l2_repl_valid = 1'b0; l2_repl_addr = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // 1. serial accesses
    load_chk(0, 10'd7);
    store(0, 10'd7, 32'hA0A0_0007);
    load_chk(0, 10'd7);
    load_chk(1, 10'd7);
    store(2, 10'd7, 32'hB0B0_0007);
    load_chk(3, 10'd7);
    load_chk(0, 10'd7);
    store(1, 10'd8, 32'h0000_0008);
    load_chk(2, 10'd8);
    settle();

    // 2. sharing by all, then a sharer writes
    store(0, 10'd20, 32'h2020_2020);
    for (int p = 1; p < NL1; p++) load_chk(p, 10'd20);
    load_chk(0, 10'd20);
    store(2, 10'd20, 32'h2222_2222);
    for (int p = 0; p < NL1; p++) load_chk(p, 10'd20);
    settle();

    // 3. L1 replacements: 30, 94, 158 share a set of the 64-set L1s
    store(1, 10'd30, 32'h3000_0030);
    load_chk(2, 10'd30);              // P2 shares, P1 owns
    load_chk(2, 10'd94);              // P2 replaces its shared copy of 30
    load_chk(1, 10'd158);             // P1 replaces the owned line 30
    load_chk(3, 10'd30);
    store(3, 10'd94, 32'h9400_0094);
    load_chk(2, 10'd30);              // P2 replaces 94 again
    load_chk(0, 10'd94);
    settle();

    // 4. write race with priorities
    fork
      begin op(0, 1'b1, 10'd40, 32'h4000_0000, 4'd1, d0); end
      begin op(3, 1'b1, 10'd40, 32'h4000_0003, 4'd9, d3); end
    join
    settle();
    op(1, 1'b0, 10'd40, '0, '0, dd);
    check(dd == 32'h4000_0000 || dd == 32'h4000_0003, $sformatf("race result %h", dd));
    for (int p = 0; p < NL1; p++) begin
      data_t x;
      op(p, 1'b0, 10'd40, '0, '0, x);
      check(x == dd, $sformatf("P%0d sees %h after the race, P1 saw %h", p, x, dd));
    end
    ref_mem[10'd40] = dd;
    // a second race, three writers
    fork
      begin data_t x; op(0, 1'b1, 10'd41, 32'h4100_0000, 4'd2, x); end
      begin data_t x; op(1, 1'b1, 10'd41, 32'h4100_0001, 4'd7, x); end
      begin data_t x; op(2, 1'b1, 10'd41, 32'h4100_0002, 4'd4, x); end
    join
    settle();
    op(3, 1'b0, 10'd41, '0, '0, dd);
    check(dd[31:16] == 16'h4100 && dd[15:0] < 16'd3, $sformatf("3-way race result %h", dd));
    ref_mem[10'd41] = dd;
    for (int p = 0; p < NL1; p++) load_chk(p, 10'd41);
    settle();

    // 5. random concurrent traffic
    fork
      rnd_proc(0, 25);
      rnd_proc(1, 25);
      rnd_proc(2, 25);
      rnd_proc(3, 25);
    join
    settle();
    for (int k = 0; k < NRA; k++) begin
      data_t v0, x;
      op(0, 1'b0, ra[k], '0, '0, v0);
      if (stored.exists(ra[k])) begin
        bit found = 0;
        foreach (stored[ra[k]][j]) if (stored[ra[k]][j] == v0) found = 1;
        check(found, $sformatf("line %0d holds %h, never stored", ra[k], v0));
      end
      for (int p = 1; p < NL1; p++) begin
        op(p, 1'b0, ra[k], '0, '0, x);
        check(x == v0, $sformatf("P%0d reads %h from line %0d, P0 reads %h", p, x, ra[k], v0));
      end
    end
    settle();
    foreach (ra[k]) check_tokens(ra[k]);
    check_tokens(10'd40);
    check_tokens(10'd41);

    // 6. L2 replacement of a line it holds (M since reset) and of one holding
    //    only tokens (A, from the shared copy P2 replaced in phase 3)
    @(negedge clk);
    l2_repl_addr  = 10'd500;
    l2_repl_valid = 1'b1;
    @(posedge clk);
    while (!l2_repl_ready) @(posedge clk);
    @(negedge clk);
    l2_repl_valid = 1'b0;
    settle();
    check(mem_data.exists(10'd500) && mem_data[10'd500] == '0, "line 500 written back to memory");
    check(l2_st(500) == L2_I, "L2 line 500 invalid after the writeback ack");

    // ------------------------------------------------------------ summary
    check(!err, "no error cell hit anywhere");
    $display("mechanisms: freeze=%0d frozen=%0d l1_repl=%0d stall=%0d special=%0d retry=%0d",
             n_freeze, n_frozen, n_repl, n_stall, n_special, n_retry);
    $display("            complete=%0d owner=%0d sm=%0d po_ack=%0d partial_ack=%0d bounce=%0d",
             n_complete, n_owner, n_sm, n_po_ack, n_partial_ack, n_bounce);
    $display("            l2_tokens=%0d l2_writeback=%0d  (%0d cycles)", n_l2_tokens, n_l2_wb, cyc);
    check(n_freeze > 0,      "FreezeGETX happened");
    check(n_frozen > 0,      "a line was frozen (F)");
    check(n_complete > 0,    "a frozen line was woken by Complete");
    check(n_repl > 0,        "L1 replacement happened");
    check(n_stall > 0,       "a processor request stalled");
    check(n_retry > 0,       "a Retry event re-issued a request");
    check(n_special > 0,     "a Special request was served");
    check(n_owner > 0,       "the owner token moved without all tokens");
    check(n_po_ack > 0,      "a PO line completed on its ack");
    check(n_partial_ack > 0, "a non-last ack was counted down");
    check(n_l2_tokens > 0,   "L2 received tokens without data");
    check(n_l2_wb > 0,       "L2 wrote a line back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
