// tb_dqn_mlp: self-checking test of the 8-5-3 deep Q-network.
// Loads random weights through the weight port, applies random credit
// vectors and compares the three Q values and the chosen action with a
// reference computed here in integer arithmetic (ReLU hidden layer saturated
// to 16 bits, Q8.8 weights). Also checks the latency from start to done
// (N_IN + N_HID + 2 = 15 cycles) and the tie rule (all-zero weights choose the
// balanced action, index 1).
module tb_dqn_mlp;

  localparam int N_IN = 8, N_HID = 5, N_OUT = 3, IN_W = 4, W_W = 16, FRAC = 8, ACC_W = 40;
  localparam int NW = N_HID * (N_IN + 1) + N_OUT * (N_HID + 1);
  localparam int AW = $clog2(NW);

  logic clk = 0, rst_n = 0;
  logic w_we = 0;
  logic [AW-1:0] w_addr = '0;
  logic signed [W_W-1:0] w_data = '0;
  logic start = 0;
  logic [IN_W-1:0] x [N_IN];
  logic busy, done;
  logic [1:0] action;
  logic signed [ACC_W-1:0] q [N_OUT];

  int checks = 0, failures = 0;
  int w [NW];

  dqn_mlp #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .IN_W(IN_W), .W_W(W_W),
            .FRAC(FRAC), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  task automatic load(input int range);
    for (int a = 0; a < NW; a++) begin
      w[a] = $urandom_range(2 * range) - range;
      @(negedge clk);
      w_we = 1; w_addr = AW'(a); w_data = W_W'(w[a]);
    end
    @(negedge clk);
    w_we = 0;
  endtask

  task automatic run_one();
    longint h [N_HID];
    longint qq [N_OUT];
    int best, lat;
    for (int i = 0; i < N_IN; i++) x[i] = IN_W'($urandom_range(0, 14));
    for (int hh = 0; hh < N_HID; hh++) begin
      h[hh] = w[N_HID * N_IN + hh];
      for (int i = 0; i < N_IN; i++) h[hh] += longint'(w[hh * N_IN + i]) * x[i];
      if (h[hh] < 0) h[hh] = 0;
      if (h[hh] > 32767) h[hh] = 32767;
    end
    for (int o = 0; o < N_OUT; o++) begin
      longint acc = 0;
      for (int hh = 0; hh < N_HID; hh++)
        acc += longint'(w[N_HID * (N_IN + 1) + o * N_HID + hh]) * h[hh];
      qq[o] = (acc >>> FRAC) + w[N_HID * (N_IN + 1) + N_OUT * N_HID + o];
    end
    best = 1;
    for (int o = 0; o < N_OUT; o++) if (qq[o] > qq[best]) best = o;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    lat = 0;   // cycles from the edge that samples start to the edge that raises done
    while (!done && lat < 100) begin @(negedge clk); lat++; end
    check(lat == N_IN + N_HID + 2, $sformatf("latency %0d", lat));
    for (int o = 0; o < N_OUT; o++)
      check(longint'(q[o]) == qq[o], $sformatf("q[%0d]=%0d expected %0d", o, q[o], qq[o]));
    check(int'(action) == best, $sformatf("action %0d expected %0d", action, best));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hist [3] = '{0, 0, 0};
    for (int i = 0; i < N_IN; i++) x[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // zero weights after reset: all Q equal, balanced action
    for (int a = 0; a < NW; a++) w[a] = 0;
    run_one();
    check(action == 1, "tie goes to balanced action");
    for (int t = 0; t < 200; t++) begin
      load((t % 10 == 9) ? 30000 : 600);
      run_one();
      hist[action]++;
    end
    check(hist[0] > 0 && hist[1] > 0 && hist[2] > 0, "all actions chosen");
    $display("actions: %0d %0d %0d", hist[0], hist[1], hist[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
