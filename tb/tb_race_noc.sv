// tb_race_noc: end-to-end test of the full 8x8 RACE mesh at its default
// parameters (4 subchannels x 4 buffers, 2 router buffers, 128-bit flits,
// 50-cycle epochs, 8-5-3 agents on all 112 links).
//
// The same test weights are broadcast to every agent: hidden neurons sum the
// credits of router A and of router B, and the output layer compares the two
// sums with a bias towards the balanced allocation (the trained weights are
// not published). Every core then injects packets of 1 to 4 flits in three
// traffic phases: light uniform random traffic, a hotspot phase in which most
// packets go to one node (35) and so congest its links, and a transpose-like
// phase. Afterwards the mesh drains.
//
// Checks: every flit is ejected at its destination node, in order and intact
// per source/destination pair, a packet's flits leave the ejection port back
// to back, and nothing is left in flight. Mechanisms that must each occur at
// least once (a failure is counted otherwise): repeater-mode pass-through,
// storage in a subchannel, a write-blocked subchannel waiting to drain, a
// completed reversal, a falsefull cycle, each of the allocations (1,3), (2,2)
// and (3,1), a new action from an agent, an epoch reward, and a core stalled
// by a full injection buffer. The count of each is printed.
module tb_race_noc;
  import noc_pkg::*;

  localparam int MX = 8, MY = 8, NN = 64, NL = 112;
  localparam int NW = 5 * 9 + 3 * 6;
  localparam int AW = $clog2(NW), LW = $clog2(NL);

  logic clk = 0, rst_n = 0;
  logic  inj_valid [NN], inj_ready [NN], ej_valid [NN], ej_ready [NN];
  flit_t inj_flit [NN], ej_flit [NN];
  logic  wcfg_we = 0, wcfg_bcast = 0;
  logic [LW-1:0] wcfg_link = '0;
  logic [AW-1:0] wcfg_addr = '0;
  logic signed [15:0] wcfg_data = '0;
  logic [1:0]  link_target [NL];
  logic signed [6:0] link_reward [NL];
  logic        link_reward_valid [NL];
  logic [31:0] link_ff_total [NL];
  link_evt_t   link_evt [NL];

  race_noc dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  flit_t pend [NN][$];
  flit_t sb [NN * NN][$];          // [src*NN + dst]
  int    ej_cur [NN];              // source of the packet being ejected, -1 none
  longint n_inj = 0, n_ej = 0, n_pkts = 0;
  longint n_bypass = 0, n_store = 0, n_block = 0, n_rev = 0, n_ff = 0;
  longint n_act = 0, n_rew = 0, n_stall = 0;
  longint n_alloc [4] = '{0, 0, 0, 0};
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
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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
    w[45 + 0 * 5 + 0] = -256; w[45 + 0 * 5 + 1] = 256;
    w[45 + 2 * 5 + 0] = 256;  w[45 + 2 * 5 + 1] = -256;
    w[45 + 15 + 1] = 3 * 256;
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
            else if (cyc < 2000) d = ($urandom % 100 < 70) ? 35 : $urandom_range(0, NN - 1);
            else d = (s % MX) * MX + (s / MX);
            if (d != s) make_packet(s, d);
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
    check(n_alloc[1] > 0 && n_alloc[2] > 0 && n_alloc[3] > 0, "allocations (1,3), (2,2), (3,1)");
    check(n_act > 0,    "agent actions");
    check(n_rew > 0,    "epoch rewards");
    check(n_stall > 0,  "injection stall");
    $display("cycles=%0d packets=%0d flits=%0d", cyc, n_pkts, n_inj);
    $display("bypass=%0d store=%0d blocked=%0d reversals=%0d falsefull=%0d actions=%0d rewards=%0d stalls=%0d",
             n_bypass, n_store, n_block, n_rev, n_ff, n_act, n_rew, n_stall);
    $display("allocation samples (1,3)=%0d (2,2)=%0d (3,1)=%0d", n_alloc[1], n_alloc[2], n_alloc[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
