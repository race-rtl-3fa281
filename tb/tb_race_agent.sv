// tb_race_agent: self-checking test of the per-RMC RL agent.
// Loads weights that make the network compare the credits of the two
// routers (hidden neuron 0 sums router A's credits, neuron 1 router B's, the
// output layer takes their difference, with a bias towards the balanced
// action), changes the 8-credit state at random, and checks that
//  - epoch_end comes every EPOCH = 50 cycles,
//  - the state is sampled in the epoch_end cycle (it is changed right after),
//  - the new allocation is applied at the 16th clock edge after the one that
//    samples the state (15 cycles of inference plus the applying register),
//  - the allocation equals action+1 of a reference network evaluation.
module tb_race_agent;

  localparam int NSUB = 4, EPOCH = 50, N_IN = 8, N_HID = 5, IN_W = 4, W_W = 16;
  localparam int NW = N_HID * (N_IN + 1) + (NSUB - 1) * (N_HID + 1);
  localparam int AW = $clog2(NW);

  logic clk = 0, rst_n = 0;
  logic [IN_W-1:0] state [N_IN];
  logic w_we = 0;
  logic [AW-1:0] w_addr = '0;
  logic signed [W_W-1:0] w_data = '0;
  logic epoch_end, action_new;
  logic [1:0] target_ab;

  int checks = 0, failures = 0;
  int w [NW];
  int hist [4] = '{0, 0, 0, 0};

  race_agent #(.NSUB(NSUB), .EPOCH(EPOCH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  function automatic int ref_action(input logic [IN_W-1:0] s [N_IN]);
    longint h [N_HID];
    longint qq [NSUB-1];
    int best;
    for (int hh = 0; hh < N_HID; hh++) begin
      h[hh] = w[N_HID * N_IN + hh];
      for (int i = 0; i < N_IN; i++) h[hh] += longint'(w[hh * N_IN + i]) * s[i];
      if (h[hh] < 0) h[hh] = 0;
      if (h[hh] > 32767) h[hh] = 32767;
    end
    for (int o = 0; o < NSUB - 1; o++) begin
      longint acc = 0;
      for (int hh = 0; hh < N_HID; hh++)
        acc += longint'(w[N_HID * (N_IN + 1) + o * N_HID + hh]) * h[hh];
      qq[o] = (acc >>> 8) + w[N_HID * (N_IN + 1) + (NSUB - 1) * N_HID + o];
    end
    best = 1;
    for (int o = 0; o < NSUB - 1; o++) if (qq[o] > qq[best]) best = o;
    return best;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last_end, cyc, exp_a, exp_at;
    for (int a = 0; a < NW; a++) w[a] = 0;
    // hidden 0 = sum of A credits, hidden 1 = sum of B credits (Q8.8)
    for (int i = 0; i < 4; i++) begin
      w[0 * N_IN + i] = 256;
      w[1 * N_IN + 4 + i] = 256;
    end
    // q0 = hB - hA : more B->A buffers help when A's neighbours are short
    // q1 = 4.0 (bias towards balance), q2 = hA - hB
    w[N_HID * (N_IN + 1) + 0 * N_HID + 0] = -256;
    w[N_HID * (N_IN + 1) + 0 * N_HID + 1] = 256;
    w[N_HID * (N_IN + 1) + 2 * N_HID + 0] = 256;
    w[N_HID * (N_IN + 1) + 2 * N_HID + 1] = -256;
    w[N_HID * (N_IN + 1) + (NSUB - 1) * N_HID + 1] = 4 * 256;
    for (int i = 0; i < N_IN; i++) state[i] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    check(target_ab == 2, "balanced allocation after reset");
    for (int a = 0; a < NW; a++) begin
      w_we = 1; w_addr = AW'(a); w_data = W_W'(w[a]);
      @(negedge clk);
    end
    w_we = 0;
    last_end = -1; exp_at = -1; exp_a = 0;
    for (cyc = 0; cyc < 40 * EPOCH; cyc++) begin
      #1;
      if (epoch_end) begin
        if (last_end >= 0) check(cyc - last_end == EPOCH, "epoch length");
        last_end = cyc;
        exp_a  = ref_action(state);
        exp_at = cyc + 17;   // visible after the 16th edge following the sampling edge
      end
      if (action_new && exp_at >= 0) begin
        check(cyc == exp_at, $sformatf("action latency: at %0d expected %0d", cyc, exp_at));
        check(int'(target_ab) == exp_a + 1, "allocation from network");
        hist[target_ab]++;
      end
      @(negedge clk);
      // new state right after the sampling cycle
      if (last_end == cyc)
        for (int i = 0; i < N_IN; i++) state[i] = IN_W'($urandom_range(0, 14));
    end
    check(hist[1] > 0 && hist[2] > 0 && hist[3] > 0, "all allocations chosen");
    $display("allocations: (1,3)=%0d (2,2)=%0d (3,1)=%0d", hist[1], hist[2], hist[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
