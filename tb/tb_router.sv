// tb_router: self-checking test of one mesh router (at column 3, row 4).
// All five inputs receive random packets of 1 to 4 flits with random
// destinations while the outputs accept at random. The test checks that every
// flit leaves through the dimension-order (XY) output for its destination,
// that flits from one input to one output keep their order and content, that
// an output carries one packet at a time from head to tail, that one credit
// is returned per flit leaving an input buffer, and that each mesh port's
// credit equals cap - in_flight (floored at 0) against a model of the next
// hop that returns credits after a random delay.
module tb_router;
  import noc_pkg::*;

  localparam int unsigned RB = 2, CAP_W = 5, CRED_W = 4, X = 3, Y = 4;

  logic clk = 0, rst_n = 0;
  logic  in_valid [NPORT], in_ready [NPORT], cred_out [NPORT];
  flit_t in_flit [NPORT];
  logic  out_valid [NPORT], out_ready [NPORT], cred_in [NPORT];
  flit_t out_flit [NPORT];
  logic [CAP_W-1:0]  cap [NPORT];
  logic [CRED_W-1:0] credit [4];

  int checks = 0, failures = 0;
  flit_t exp_q [NPORT][NPORT][$];   // [in][out]
  flit_t pend [NPORT][$];           // flits waiting to be offered at each input
  int    inflight [NPORT];          // model of the next hop, per output
  int    cur_in [NPORT];            // packet in progress on each output, -1 none
  int    n_sent = 0, n_pop = 0, n_cred_out = 0, n_multi = 0, n_block = 0;

  router #(.RB(RB), .CAP_W(CAP_W), .CRED_W(CRED_W), .X(X), .Y(Y)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  function automatic int xy(input flit_t f);
    if (f.dst_x > X) return P_E;
    if (f.dst_x < X) return P_W;
    if (f.dst_y > Y) return P_S;
    if (f.dst_y < Y) return P_N;
    return P_L;
  endfunction

  // packets: payload = {input port, packet number, flit number, random}
  task automatic make_packet(input int p, input int num);
    int len, dx, dy;
    len = $urandom_range(1, 4);
    if (len > 1) n_multi++;
    dx = $urandom_range(0, 7); dy = $urandom_range(0, 7);
    for (int k = 0; k < len; k++) begin
      flit_t f;
      f.head = (k == 0); f.tail = (k == len - 1);
      f.dst_x = 3'(dx); f.dst_y = 3'(dy); f.src_x = 3'(p); f.src_y = 3'(k);
      f.payload = {8'(p), 16'(num), 8'(k), 82'({$urandom, $urandom, $urandom})};
      pend[p].push_back(f);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NPORT; p++) begin
      in_valid[p] = 0; in_flit[p] = '0; out_ready[p] = 0; cred_in[p] = 0;
      cap[p] = (p < 4) ? CAP_W'($urandom_range(6, 14)) : '0;
      inflight[p] = 0; cur_in[p] = -1;
      for (int n = 0; n < 60; n++) make_packet(p, n);
    end
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      bit pend_done;
      if (cyc % 500 == 0)
        for (int p = 0; p < 4; p++) cap[p] = CAP_W'($urandom_range(6, 14));
      for (int p = 0; p < NPORT; p++) begin
        in_valid[p] = pend[p].size() > 0 && ($urandom % 4 != 0);
        if (pend[p].size() > 0) in_flit[p] = pend[p][0];
        // the next hop holds at most RB + 4*4 flits
        out_ready[p] = ($urandom % 3 != 0) && (p == 4 || inflight[p] < 18);
        cred_in[p] = (p < 4) && inflight[p] > 0 && ($urandom % 3 == 0);
      end
      #1;
      for (int o = 0; o < 4; o++) begin
        int e;
        e = int'(cap[o]) - inflight[o];
        if (e < 0) e = 0;
        check(int'(credit[o]) == e, $sformatf("credit port %0d: %0d expected %0d", o, credit[o], e));
      end
      for (int p = 0; p < NPORT; p++) if (in_valid[p] && !in_ready[p]) n_block++;
      // sample the handshakes of this cycle before the clock edge
      for (int p = 0; p < NPORT; p++) begin
        if (cred_out[p]) n_cred_out++;
        if (in_valid[p] && in_ready[p]) begin
          flit_t f;
          f = pend[p].pop_front();
          exp_q[p][xy(f)].push_back(f);
        end
      end
      for (int o = 0; o < NPORT; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          int p;
          flit_t f;
          n_sent++;
          p = int'(out_flit[o].src_x);
          if (p >= NPORT || exp_q[p][o].size() == 0) begin
            check(0, $sformatf("unexpected flit on output %0d", o));
          end else begin
            f = exp_q[p][o].pop_front();
            check(out_flit[o] == f, "flit content/order per input-output pair");
          end
          check(xy(out_flit[o]) == o, "XY output port");
          if (cur_in[o] >= 0) check(cur_in[o] == p, "no interleaving of packets");
          else check(out_flit[o].head, "packet starts with head flit");
          cur_in[o] = out_flit[o].tail ? -1 : p;
          if (o < 4) inflight[o]++;
        end
        if (cred_in[o]) inflight[o]--;
      end
      @(posedge clk);
      @(negedge clk);
      pend_done = 1;
      for (int p = 0; p < NPORT; p++)
        for (int o = 0; o < NPORT; o++) if (exp_q[p][o].size() != 0 || pend[p].size() != 0) pend_done = 0;
      if (pend_done) break;
    end
    for (int p = 0; p < NPORT; p++)
      for (int o = 0; o < NPORT; o++)
        check(exp_q[p][o].size() == 0 && pend[p].size() == 0, "all flits delivered");
    check(n_cred_out == n_sent, "one credit per flit leaving an input buffer");
    check(n_multi > 0 && n_block > 0, "multi-flit packets and full input buffers exercised");
    $display("flits=%0d credits=%0d blocked=%0d", n_sent, n_cred_out, n_block);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
