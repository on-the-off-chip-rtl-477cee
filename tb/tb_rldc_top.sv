// tb_rldc_top: end-to-end test of the RLDRAM controller at its default
// sizes (4 PEs, 16 banks, RLDRAM3-1600 timing).
//
// A cycle-accurate reference model of the scheduler (per-PE queues,
// last-issue times per bank and per command type, round-robin pointer,
// configuration register) runs beside the controller; on every clock edge
// the controller's req_ready, issue, issue_pe, command, bank and address
// must equal the model's. An RLDRAM behavioural model checks tRC and data
// bus collisions independently.
//
// Directed phases check printed timings exactly:
//   * best case: an idle read has latency tRL = 13, a write tWL = 14;
//   * two-request scenarios (previous command one cycle before the request;
//     R/W after R/W to another bank, then to the same bank): latencies
//     13, 14, 16, 16, 17, 17, 18, 19 cycles;
//   * bank partitioning, W R W R from four PEs: commands at +0, +5, +8, +13,
//     the last read's data at +26;
//   * bank sharing, W R W R from four PEs to one bank: commands at +0, +6,
//     +12, +18, the last read's data at +31; a following write from the
//     first PE reaches the bank-sharing bound 3*tRC + tWL = 32 exactly.
// Random phases in both layouts drive in-order PEs (one outstanding request
// each) and report the worst latencies seen, and a backlogged
// phase fills the buffers. Each mechanism (same-cycle bypass, tRC stall,
// bus turnaround stall, round-robin skip, buffer-full back-pressure,
// deferred layout switch, layout switch) must occur at least once.
module tb_rldc_top;
  import rldc_pkg::*;

  localparam int NPE   = DEF_NUM_PE;
  localparam int NB    = DEF_NUM_BANKS;
  localparam int AW    = DEF_ADDR_W;
  localparam int DEPTH = DEF_BUF_DEPTH;
  localparam int TRC   = DEF_T_RC;
  localparam int TRL   = DEF_T_RL;
  localparam int TWL   = DEF_T_WL;
  localparam int BLH   = DEF_BL / 2;
  localparam int PEW   = $clog2(NPE);
  localparam int BAW   = $clog2(NB);
  localparam int GAP_RW = TRL - TWL + BLH;   // 3
  localparam int GAP_WR = TWL - TRL + BLH;   // 5
  localparam int WCL_SHARE_R = (NPE-1)*TRC + TRL;
  localparam int WCL_SHARE_W = (NPE-1)*TRC + TWL;
  localparam int WCL_PART_BASE = ((NPE-1+1)/2)*GAP_WR + ((NPE-1)/2)*GAP_RW;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_partition = 0, cfg_pending, partition;
  logic req_valid = 0, req_ready;
  logic [PEW-1:0] req_pe = '0;
  op_e  req_op = OP_READ;
  logic [AW+BAW-1:0] req_addr = '0;
  logic rld_cs_n, rld_we_n, rld_ref_n;
  logic [BAW-1:0] rld_ba;
  logic [AW-1:0]  rld_a;
  logic issue;
  logic [PEW-1:0] issue_pe;
  int viol, nrd, nwr; longint last_ds;

  rldc_top dut (.*);

  rldram_model #(.NUM_BANKS(NB), .ADDR_W(AW), .T_RC(TRC), .T_RL(TRL),
                 .T_WL(TWL), .BL(DEF_BL)) mem (
    .ck(clk), .cs_n(rld_cs_n), .we_n(rld_we_n), .ref_n(rld_ref_n),
    .ba(rld_ba), .a(rld_a), .violations(viol), .reads(nrd), .writes(nwr),
    .last_data_start(last_ds));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;

  // ---- reference model ----------------------------------------------
  typedef struct { logic wr; logic [BAW-1:0] ba; logic [AW-1:0] a; longint arr; } ent_t;
  ent_t   q [NPE][$];
  longint bank_last [NB];
  longint last_r = -100, last_w = -100;
  int     ptr = 0;
  logic   m_part = 1'b1, m_pend = 1'b0, m_val = 1'b1;

  // per-PE bookkeeping for the drivers
  longint issue_cyc [NPE];
  longint data_cyc  [NPE];
  int     outstanding [NPE];
  int     max_lat_r [2], max_lat_w [2], min_lat [2], bound_viol = 0;

  // mechanism counters
  int n_bypass = 0, n_trc_stall = 0, n_bus_stall = 0, n_skip = 0;
  int n_full = 0, n_defer = 0, n_switch = 0, n_partmap = 0;

  function automatic logic [BAW-1:0] map_ba(logic part, int pe, logic [AW+BAW-1:0] ad);
    int bpp = NB / NPE;
    if (part) return BAW'(pe * bpp + int'(ad[BAW-1:0]) % bpp);
    return ad[BAW-1:0];
  endfunction

  function automatic logic bank_ok(ent_t e, longint t);
    return (t - bank_last[e.ba]) >= TRC;
  endfunction
  function automatic logic bus_ok(ent_t e, longint t);
    if (e.wr) return (t - last_w >= BLH) && (t - last_r >= GAP_RW);
    return (t - last_r >= BLH) && (t - last_w >= GAP_WR);
  endfunction

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL cycle %0d: %s", cyc, msg);
    end
  endtask

  initial foreach (bank_last[b]) bank_last[b] = -100;

  always @(posedge clk) if (rst_n) begin : ref_model
    logic idle, m_ready, accepted, g;
    int gi, tcl, lat, m;
    ent_t e;
    m_ready = !m_pend && (q[req_pe].size() < DEPTH);
    idle = !(req_valid && m_ready);
    for (int i = 0; i < NPE; i++) if (q[i].size() != 0) idle = 1'b0;
    if (req_valid) check(req_ready == m_ready, "req_ready differs from model");
    if (req_valid && !m_ready && !m_pend) n_full++;
    accepted = req_valid && m_ready;
    if (accepted) begin
      e.wr = (req_op == OP_WRITE);
      e.ba = map_ba(m_part, int'(req_pe), req_addr);
      e.a  = req_addr[AW+BAW-1:BAW];
      e.arr = cyc;
      if (m_part && e.ba != req_addr[BAW-1:0]) n_partmap++;
      q[req_pe].push_back(e);
    end
    // expected grant
    g = 1'b0; gi = 0;
    for (int k = 0; k < NPE; k++) begin
      int idx;
      idx = (ptr + k) % NPE;
      if (!g && q[idx].size() != 0 && bank_ok(q[idx][0], cyc) && bus_ok(q[idx][0], cyc)) begin
        g = 1'b1; gi = idx;
      end
    end
    // stall / skip statistics
    for (int i = 0; i < NPE; i++)
      if (q[i].size() != 0 && !(g && gi == i)) begin
        if (!bank_ok(q[i][0], cyc)) n_trc_stall++;
        else if (!bus_ok(q[i][0], cyc)) n_bus_stall++;
      end
    if (g && gi != ptr && q[ptr].size() != 0) n_skip++;
    // compare with the controller
    check(issue == g, $sformatf("issue %0b expected %0b", issue, g));
    if (g) begin
      e = q[gi][0];
      check(issue_pe == PEW'(gi), $sformatf("issue_pe %0d expected %0d", issue_pe, gi));
      check(rld_cs_n == 1'b0 && rld_ref_n == 1'b1 && rld_we_n == !e.wr, "command pins");
      check(rld_ba == e.ba, $sformatf("ba %0d expected %0d", rld_ba, e.ba));
      check(rld_a == e.a, "address");
      if (e.arr == cyc) n_bypass++;
      void'(q[gi].pop_front());
      bank_last[e.ba] = cyc;
      if (e.wr) last_w = cyc; else last_r = cyc;
      ptr = (gi + 1) % NPE;
      tcl = e.wr ? TWL : TRL;
      lat = int'(cyc + tcl - e.arr);
      m = m_part ? 1 : 0;
      if (e.wr && lat > max_lat_w[m]) max_lat_w[m] = lat;
      if (!e.wr && lat > max_lat_r[m]) max_lat_r[m] = lat;
      if (lat < min_lat[m]) min_lat[m] = lat;
      issue_cyc[gi] = cyc;
      data_cyc[gi]  = cyc + tcl;
      if (outstanding[gi] > 0) outstanding[gi]--;
    end else begin
      check(rld_cs_n == 1'b1, "NOP expected");
    end
    // configuration register
    if (cfg_we && !idle) n_defer++;
    if (cfg_we && idle) begin
      if (m_part != cfg_partition) n_switch++;
      m_part = cfg_partition; m_pend = 1'b0;
    end else if (cfg_we) begin
      m_pend = 1'b1; m_val = cfg_partition;
    end else if (m_pend && idle) begin
      if (m_part != m_val) n_switch++;
      m_part = m_val; m_pend = 1'b0;
    end
    check(partition == m_part || cfg_we || m_pend || idle, "partition bit");
    cyc <= cyc + 1;
  end

  // ---- drivers ------------------------------------------------------
  // present one request and hold it until accepted; returns arrival cycle
  task automatic send_keep(input int pe, input op_e op, input logic [AW+BAW-1:0] ad,
                           output longint arr);
    @(negedge clk);
    req_valid = 1'b1; req_pe = PEW'(pe); req_op = op; req_addr = ad;
    forever begin
      @(posedge clk);
      if (req_ready) break;
      @(negedge clk);
    end
    arr = cyc;
  endtask

  task automatic drop();
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  task automatic send(input int pe, input op_e op, input logic [AW+BAW-1:0] ad,
                      output longint arr);
    send_keep(pe, op, ad, arr);
    drop();
  endtask

  task automatic idle_cycles(input int n);
    repeat (n) @(negedge clk);
  endtask

  function automatic logic [AW+BAW-1:0] mkaddr(int bank, int a);
    return {AW'(a), BAW'(bank)};
  endfunction

  task automatic set_layout(input logic p);
    @(negedge clk);
    cfg_we = 1'b1; cfg_partition = p;
    @(negedge clk);
    cfg_we = 1'b0;
    while (cfg_pending) @(negedge clk);
    @(negedge clk);
  endtask

  longint a0, a1, a2, a3, a4, c0;

  initial begin
    for (int m = 0; m < 2; m++) begin max_lat_r[m] = 0; max_lat_w[m] = 0; min_lat[m] = 1000; end
    foreach (outstanding[i]) begin outstanding[i] = 0; issue_cyc[i] = -1; data_cyc[i] = -1; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    idle_cycles(2);
    check(partition == 1'b1, "reset layout is partitioning");

    // ---- best case latency -------------------------------------------
    send(2, OP_READ, mkaddr(3, 17), a0);
    check(issue_cyc[2] == a0 && data_cyc[2] - a0 == TRL, "idle read latency = tRL");
    idle_cycles(20);
    send(3, OP_WRITE, mkaddr(5, 99), a0);
    check(issue_cyc[3] == a0 && data_cyc[3] - a0 == TWL, "idle write latency = tWL");
    idle_cycles(20);
    // ptr is now 0

    $display("best case done at cycle %0d", cyc);
    // ---- bank partitioning worst-case pattern: W R W R -----------------
    send_keep(0, OP_WRITE, mkaddr(1, 1), a0);
    send(1, OP_READ,  mkaddr(1, 2), a1);
    // third and fourth requests arrive after the read was issued
    while (!(issue_cyc[1] >= a1 && issue_cyc[1] > a0)) @(negedge clk);
    send_keep(2, OP_WRITE, mkaddr(1, 3), a2);
    send(3, OP_READ,  mkaddr(1, 4), a3);
    idle_cycles(20);
    c0 = issue_cyc[0];
    check(c0 == a0, "first write issued on arrival");
    check(issue_cyc[1] - c0 == 5,  $sformatf("R after W at +%0d, expected +5",  issue_cyc[1]-c0));
    check(issue_cyc[2] - c0 == 8,  $sformatf("W after R at +%0d, expected +8",  issue_cyc[2]-c0));
    check(issue_cyc[3] - c0 == 13, $sformatf("R after W at +%0d, expected +13", issue_cyc[3]-c0));
    check(data_cyc[3] - c0 == 26,  "last read data at +26");

    $display("partition pattern done at cycle %0d", cyc);
    // ---- bank sharing worst case: all four PEs on one bank ------------
    set_layout(1'b0);
    idle_cycles(10);

    // ---- two-request access scenarios: previous command one cycle before
    // the considered request; expected latencies 13,14,16,16,17,17,18,19 --
    begin
      int exp_lat [8] = '{13, 14, 16, 16, 17, 17, 18, 19};
      logic prev_w [8] = '{0, 0, 0, 0, 1, 1, 0, 1};
      logic cur_w  [8] = '{0, 1, 0, 1, 0, 1, 0, 1};
      logic same   [8] = '{0, 0, 0, 0, 0, 0, 1, 1};
      logic has_prev [8] = '{0, 0, 1, 1, 1, 1, 1, 1};
      for (int sc = 0; sc < 8; sc++) begin
        idle_cycles(20);
        if (has_prev[sc]) begin
          send_keep(0, prev_w[sc] ? OP_WRITE : OP_READ, mkaddr(6, sc), a0);
          send(1, cur_w[sc] ? OP_WRITE : OP_READ, mkaddr(same[sc] ? 6 : 7, sc), a1);
          check(a1 == a0 + 1, "scenario: second request one cycle later");
        end else begin
          send(1, cur_w[sc] ? OP_WRITE : OP_READ, mkaddr(7, sc), a1);
        end
        idle_cycles(10);
        check(data_cyc[1] - a1 == exp_lat[sc],
              $sformatf("scenario %0d: latency %0d, expected %0d", sc, data_cyc[1] - a1, exp_lat[sc]));
      end
      idle_cycles(20);
    end
    // two PE1 grants leave the pointer at 2; PE2 and PE3 bring it back to 0
    send(2, OP_READ, mkaddr(9, 0), a0);
    send(3, OP_READ, mkaddr(10, 0), a0);
    idle_cycles(20);
    send_keep(0, OP_WRITE, mkaddr(1, 10), a0);
    send_keep(1, OP_READ,  mkaddr(1, 11), a1);
    send_keep(2, OP_WRITE, mkaddr(1, 12), a2);
    send(3, OP_READ,  mkaddr(1, 13), a3);
    // PE0 again, arriving as PE1 issues: waits for PE2, PE3
    idle_cycles(1);
    send(0, OP_WRITE, mkaddr(1, 14), a4);
    idle_cycles(40);
    c0 = a0;
    check(issue_cyc[1] - c0 == 6,  $sformatf("same bank R at +%0d, expected +6",  issue_cyc[1]-c0));
    check(issue_cyc[2] - c0 == 12, $sformatf("same bank W at +%0d, expected +12", issue_cyc[2]-c0));
    check(issue_cyc[3] - c0 == 18, $sformatf("same bank R at +%0d, expected +18", issue_cyc[3]-c0));
    check(data_cyc[3] - c0 == 31,  "same bank last read data at +31");
    check(a4 == c0 + 6, "repeat write arrives as the read issues");
    check(data_cyc[0] - a4 == WCL_SHARE_W, "repeat write reaches the sharing bound 3*tRC+tWL");
    $display("sharing: repeated write latency %0d (bound %0d)", data_cyc[0] - a4, WCL_SHARE_W);

    $display("directed phases done at cycle %0d", cyc);
    // ---- random in-order traffic, both layouts --------------------------
    for (int layout = 0; layout < 2; layout++) begin
      set_layout(layout[0]);
      for (int n = 0; n < 1500; n++) begin
        int pe;
        longint arr;
        logic [AW+BAW-1:0] ad;
        op_e op;
        pe = $urandom_range(0, NPE-1);
        if (outstanding[pe] != 0) begin @(negedge clk); continue; end
        op = $urandom_range(0, 1) ? OP_WRITE : OP_READ;
        ad = {AW'($urandom), BAW'(layout == 0 ? $urandom_range(0, 3) : $urandom)};
        outstanding[pe] = 1;
        send(pe, op, ad, arr);
        if ($urandom_range(0, 3) == 0) idle_cycles($urandom_range(0, 8));
      end
      idle_cycles(40);
      $display("layout %s: max read latency %0d, max write latency %0d, min %0d",
               layout ? "partition" : "share", max_lat_r[layout], max_lat_w[layout],
               min_lat[layout]);
    end
    // with SKIP_NOT_READY = 1 a blocked PE can be passed over repeatedly,
    // so the analytical bounds are reported, not checked (tb_rldc_bounds
    // checks them with the strict arbitration)
    $display("analytical bounds: share R %0d W %0d, partition R %0d W %0d",
             WCL_SHARE_R, WCL_SHARE_W, WCL_PART_BASE + TRL, WCL_PART_BASE + TWL);
    check(min_lat[0] == TRL && min_lat[1] == TRL, "best case latency is tRL");

    // ---- backlogged traffic: buffers fill, layout switch requested busy --
    fork
      for (int n = 0; n < 300; n++) begin
        longint arr;
        send_keep($urandom_range(0, NPE-1), $urandom_range(0, 1) ? OP_WRITE : OP_READ,
                  {AW'($urandom), BAW'($urandom_range(0, 1))}, arr);
      end
      drop();
      begin
        idle_cycles(100);
        @(negedge clk); cfg_we = 1'b1; cfg_partition = 1'b0;
        @(negedge clk); cfg_we = 1'b0;
      end
    join
    idle_cycles(200);
    check(!cfg_pending && partition == 1'b0, "deferred layout switch took effect");

    // ---- totals ------------------------------------------------------
    check(viol == 0, $sformatf("RLDRAM model saw %0d timing violations", viol));
    check(nrd + nwr > 1000, "commands reached the device");
    check(n_bypass > 0,    "same-cycle bypass seen");
    check(n_trc_stall > 0, "tRC stall seen");
    check(n_bus_stall > 0, "bus turnaround stall seen");
    check(n_skip > 0,      "round-robin skip seen");
    check(n_full > 0,      "buffer-full back-pressure seen");
    check(n_defer > 0,     "deferred layout write seen");
    check(n_switch >= 2,   "layout switches seen");
    check(n_partmap > 0,   "partitioned bank remap seen");
    $display("mechanisms: bypass=%0d trc_stall=%0d bus_stall=%0d rr_skip=%0d full=%0d defer=%0d switch=%0d partmap=%0d",
             n_bypass, n_trc_stall, n_bus_stall, n_skip, n_full, n_defer, n_switch, n_partmap);
    $display("device: reads=%0d writes=%0d violations=%0d", nrd, nwr, viol);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // end early once the design is clearly wrong, before its own assertions stop
  // the simulation without a result line
  always @(negedge clk) if (failures > 10) begin
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
