// noc_harness: traffic generator and checker around one race_noc instance,
// used by tb_race_noc_sens to run one configuration of the subchannel
// sensitivity study. It is the end-to-end test of tb_race_noc made generic
// in NSUB, NBUF and RB: test weights broadcast to all agents (the extreme
// actions compare the two routers' credit sums, the balanced action has a
// bias), uniform, hotspot and transpose traffic phases, then a drain; every
// flit is checked at its destination for data and order, and the mechanisms
// (repeater mode, storage, write-blocked drain, reversal, falsefull, the
// balanced and both extreme allocations, agent actions, rewards, injection
// stalls) must each occur. When finished it raises done and reports its
// check and failure counts.
module noc_harness #(
  parameter int unsigned NSUB = 4,
  parameter int unsigned NBUF = 4,
  parameter int unsigned RB   = 2,
  parameter int unsigned MX   = 4,
  parameter int unsigned MY   = 4,
  parameter int unsigned HOT  = 5,      // hotspot node
  parameter string       NAME = "4S_4CB_2RB"
) (
  output logic done,
  output int   checks,
  output int   failures
);
  import noc_pkg::*;

  localparam int NN = MX * MY, NL = 2 * MX * MY - MX - MY;
  localparam int NA = NSUB - 1, MID = NA / 2;
  localparam int NW = 5 * 9 + NA * 6;
  localparam int TW = $clog2(NSUB);
  localparam int AW = $clog2(NW), LW = $clog2(NL);

  logic clk = 0, rst_n = 0;
  logic  inj_valid [NN], inj_ready [NN], ej_valid [NN], ej_ready [NN];
  flit_t inj_flit [NN], ej_flit [NN];
  logic  wcfg_we = 0, wcfg_bcast = 0;
  logic [LW-1:0] wcfg_link = '0;
  logic [AW-1:0] wcfg_addr = '0;
  logic signed [15:0] wcfg_data = '0;
  logic [TW-1:0] link_target [NL];
  logic signed [6:0] link_reward [NL];
  logic        link_reward_valid [NL];
  logic [31:0] link_ff_total [NL];
  link_evt_t   link_evt [NL];

  race_noc #(.MESH_X(MX), .MESH_Y(MY), .NSUB(NSUB), .NBUF(NBUF), .RB(RB)) dut (.*);

  always #5 clk = ~clk;

  initial begin checks = 0; failures = 0; done = 0; end
  flit_t pend [NN][$];
  flit_t sb [NN * NN][$];          // [src*NN + dst]
  int    ej_cur [NN];              // source of the packet being ejected, -1 none
  longint n_inj = 0, n_ej = 0, n_pkts = 0;
  longint n_bypass = 0, n_store = 0, n_block = 0, n_rev = 0, n_ff = 0;
  longint n_act = 0, n_rew = 0, n_stall = 0;
  longint n_alloc [NSUB];
  initial foreach (n_alloc[i]) n_alloc[i] = 0;
  int    w [NW];

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  task automatic make_packet(input int src, input int dst);
    int len;
    len = $urandom_range(1, 4);
    for (int k = 0; k < len; k++) begin
      flit_t f;
      f.head = (k == 0); f.tail = (k == len - 1);
      f.dst_x = 3'(dst % MX); f.dst_y = 3'(dst / MX);
      f.src_x = 3'(src % MX); f.src_y = 3'(src / MX);
      f.payload = {32'(n_pkts), 8'(k), 74'({$urandom, $urandom, $urandom})};
      pend[src].push_back(f);
    end
    n_pkts++;
  endtask


  initial begin
    int cyc;
    bit idle;
    for (int n = 0; n < NN; n++) begin
      inj_valid[n] = 0; inj_flit[n] = '0; ej_ready[n] = 1; ej_cur[n] = -1;
    end
    // test weights, Q8.8 (see header)
    for (int a = 0; a < NW; a++) w[a] = 0;
    for (int i = 0; i < 4; i++) begin
      w[0 * 8 + i] = 256;
      w[1 * 8 + 4 + i] = 256;
    end
    w[45 + 0 * 5 + 0] = -256;        w[45 + 0 * 5 + 1] = 256;
    w[45 + (NA - 1) * 5 + 0] = 256;  w[45 + (NA - 1) * 5 + 1] = -256;
    w[45 + NA * 5 + MID] = 3 * 256;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < NW; a++) begin
      wcfg_we = 1; wcfg_bcast = 1; wcfg_addr = AW'(a); wcfg_data = 16'(w[a]);
      @(negedge clk);
    end
    wcfg_we = 0; wcfg_bcast = 0;

    for (cyc = 0; cyc < 40000; cyc++) begin
      // traffic generation
      if (cyc < 3000) begin
        for (int s = 0; s < NN; s++) begin
          int rate, d;
          rate = (cyc < 800) ? 3 : (cyc < 2000) ? 12 : 8;   // percent per cycle
          if (pend[s].size() < 16 && ($urandom % 100) < rate) begin
            if (cyc < 800) d = $urandom_range(0, NN - 1);
            else if (cyc < 2000) d = ($urandom % 100 < 70) ? HOT : $urandom_range(0, NN - 1);
            else d = (s % MX) * MX + (s / MX);
            if (d != s && d < NN) make_packet(s, d);
          end
        end
      end
      for (int n = 0; n < NN; n++) begin
        inj_valid[n] = pend[n].size() > 0;
        if (inj_valid[n]) inj_flit[n] = pend[n][0];
        ej_ready[n] = ($urandom % 10) != 0;
      end
      #1;
      // sample this cycle's handshakes and events before the edge
      for (int n = 0; n < NN; n++) begin
        if (inj_valid[n] && !inj_ready[n]) n_stall++;
        if (inj_valid[n] && inj_ready[n]) begin
          flit_t f;
          f = pend[n].pop_front();
          sb[n * NN + int'(f.dst_y) * MX + int'(f.dst_x)].push_back(f);
          n_inj++;
        end
        if (ej_valid[n] && ej_ready[n]) begin
          int src, dst;
          flit_t f;
          n_ej++;
          src = int'(ej_flit[n].src_y) * MX + int'(ej_flit[n].src_x);
          dst = int'(ej_flit[n].dst_y) * MX + int'(ej_flit[n].dst_x);
          check(dst == n, "ejected at its destination");
          if (sb[src * NN + dst].size() == 0) check(0, "flit that was never injected");
          else begin
            f = sb[src * NN + dst].pop_front();
            check(ej_flit[n] == f, "flit intact and in order");
          end
          if (ej_cur[n] >= 0) check(ej_cur[n] == src, "packet ejected back to back");
          else check(ej_flit[n].head, "ejection starts at a head flit");
          ej_cur[n] = ej_flit[n].tail ? -1 : src;
        end
      end
      for (int l = 0; l < NL; l++) begin
        if (link_evt[l].bypass_ab || link_evt[l].bypass_ba) n_bypass++;
        if (link_evt[l].store_ab || link_evt[l].store_ba) n_store++;
        if (link_evt[l].rev_busy) n_block++;
        if (link_evt[l].rev_done) n_rev++;
        if (link_evt[l].falsefull) n_ff++;
        if (link_evt[l].action_new) n_act++;
        if (link_reward_valid[l]) n_rew++;
        if (cyc % 50 == 0) n_alloc[link_target[l]]++;
      end
      @(posedge clk);
      @(negedge clk);
      if (cyc > 3000) begin
        idle = 1;
        for (int n = 0; n < NN; n++) if (pend[n].size() != 0) idle = 0;
        if (idle && n_ej == n_inj) break;
      end
    end
    check(n_inj == n_ej && n_inj > 0, $sformatf("all flits delivered: %0d injected, %0d ejected", n_inj, n_ej));
    for (int i = 0; i < NN * NN; i++) if (sb[i].size() != 0) check(0, "flit left in flight");
    check(n_bypass > 0, "repeater mode");
    check(n_store > 0,  "storage mode");
    check(n_block > 0,  "write-blocked drain before reversal");
    check(n_rev > 0,    "subchannel reversal");
    check(n_ff > 0,     "falsefull");
    check(n_alloc[1] > 0 && n_alloc[MID + 1] > 0 && n_alloc[NA] > 0, "balanced and both extreme allocations");
    check(n_act > 0,    "agent actions");
    check(n_rew > 0,    "epoch rewards");
    check(n_stall > 0,  "injection stall");
    $display("%s: cycles=%0d packets=%0d flits=%0d", NAME, cyc, n_pkts, n_inj);
    $display("%s: bypass=%0d store=%0d blocked=%0d reversals=%0d falsefull=%0d actions=%0d rewards=%0d stalls=%0d", NAME,
             n_bypass, n_store, n_block, n_rev, n_ff, n_act, n_rew, n_stall);
    for (int i = 1; i < NSUB; i++) $display("%s: allocation samples (%0d,%0d)=%0d", NAME, i, NSUB - i, n_alloc[i]);
    done = 1;
  end
endmodule
