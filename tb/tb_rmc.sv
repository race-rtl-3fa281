// tb_rmc: self-checking test of the reversible multi-function channel driven
// by its controller (rmc_ctrl).
// Random flits enter from both sides while the receivers randomly refuse
// (congestion) and the target allocation changes every 60 cycles. A queue
// model per direction checks that every accepted flit comes out on the far
// side, intact and in order. The test also checks repeater mode (a flit
// arriving at an idle, uncongested channel leaves in the same cycle), the
// one-flit-per-direction-per-cycle rule, that every allocation is reached
// once traffic lets the reversing subchannels drain, and that the
// controller's capacity report matches the directions.
module tb_rmc;
  import noc_pkg::*;

  localparam int unsigned NSUB = 4, NBUF = 4, RB = 2;

  logic     clk = 0, rst_n = 0;
  logic     in_valid [2], in_ready [2], out_valid [2], out_ready [2];
  flit_t    in_flit [2], out_flit [2];
  logic     wr_block [NSUB], rev [NSUB];
  sub_dir_e sub_dir [NSUB];
  logic     sub_empty [NSUB], sub_full [NSUB];
  logic     bypass [2], store [2];
  logic [1:0] target_ab;
  logic [4:0] cap [2];
  logic     busy, rev_done;

  int checks = 0, failures = 0;
  int n_bypass = 0, n_store = 0, n_rev = 0, n_out = 0;
  int reached [4] = '{0, 0, 0, 0};
  flit_t model [2][$];
  int    p_in [2], p_out [2];   // traffic probabilities in percent

  rmc #(.NSUB(NSUB), .NBUF(NBUF)) dut (.*);
  rmc_ctrl #(.NSUB(NSUB), .NBUF(NBUF), .RB(RB), .CAP_W(5)) ctrl (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  function automatic flit_t rnd_flit();
    return flit_t'({$urandom, $urandom, $urandom, $urandom});
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 2; s++) begin
      in_valid[s] = 0; in_flit[s] = '0; out_ready[s] = 0;
    end
    target_ab = 2'd2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // repeater mode in an idle channel: same-cycle pass-through
    in_valid[0] = 1; in_flit[0] = rnd_flit(); out_ready[1] = 1;
    #1;
    check(out_valid[1] && out_flit[1] == in_flit[0] && bypass[0], "repeater mode pass-through");
    @(negedge clk);
    in_valid[0] = 0; out_ready[1] = 0;

    for (int cyc = 0; cyc < 6000; cyc++) begin
      if (cyc % 60 == 0) begin
        target_ab = 2'($urandom_range(1, 3));
        // phases of light and heavy load
        for (int s = 0; s < 2; s++) begin
          p_in[s]  = $urandom_range(10, 100);
          p_out[s] = $urandom_range(20, 100);
        end
      end
      for (int s = 0; s < 2; s++) begin
        in_valid[s]  = ($urandom % 100) < p_in[s];
        in_flit[s]   = rnd_flit();
        out_ready[s] = ($urandom % 100) < p_out[s];
      end
      #1;
      // cap must match writable subchannel count
      begin
        int nab, nba;
        nab = 0; nba = 0;
        for (int i = 0; i < NSUB; i++)
          if (!wr_block[i]) begin
            if (sub_dir[i] == DIR_AB) nab++; else nba++;
          end
        check(cap[0] == RB + NBUF * nab && cap[1] == RB + NBUF * nba, "capacity report");
        if (!busy) begin
          check(nab == target_ab, "allocation matches target when idle");
          reached[nab]++;
        end
      end
      for (int d = 0; d < 2; d++) begin
        int src, dst;
        src = d; dst = 1 - d;
        if (bypass[d]) begin
          n_bypass++;
          check(model[d].size() == 0, "bypass only with nothing stored");
        end
        if (store[d]) n_store++;
      end
      @(posedge clk);
      for (int d = 0; d < 2; d++) begin
        int src, dst;
        src = d; dst = 1 - d;
        if (in_valid[src] && in_ready[src]) model[d].push_back(in_flit[src]);
        if (out_valid[dst] && out_ready[dst]) begin
          n_out++;
          if (model[d].size() == 0) check(0, "flit out of nothing");
          else check(out_flit[dst] == model[d].pop_front(), "data and order");
        end
      end
      if (rev_done) n_rev++;
      @(negedge clk);
    end
    // drain everything
    for (int s = 0; s < 2; s++) begin in_valid[s] = 0; out_ready[s] = 1; end
    repeat (40) begin
      @(posedge clk);
      for (int d = 0; d < 2; d++)
        if (out_valid[1-d]) void'(model[d].pop_front());
    end
    check(model[0].size() == 0 && model[1].size() == 0, "all flits delivered");
    check(n_bypass > 0, "repeater mode exercised");
    check(n_store > 0, "storage mode exercised");
    check(n_rev > 0, "reversals exercised");
    check(reached[1] > 0 && reached[2] > 0 && reached[3] > 0, "all three allocations reached");
    $display("bypass=%0d store=%0d reversals=%0d delivered=%0d alloc=(%0d,%0d,%0d)",
             n_bypass, n_store, n_rev, n_out, reached[1], reached[2], reached[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
