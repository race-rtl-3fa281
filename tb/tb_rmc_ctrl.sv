// tb_rmc_ctrl: self-checking test of the RMC controller.
// The testbench plays the subchannels: it keeps their directions, decides at
// random which ones are empty, and reverses a subchannel when the controller
// asks and it is empty. For every target allocation (including out-of-range
// requests, which must be clamped to 1..NSUB-1) it checks that exactly the
// mismatched subchannels are write-blocked and asked to reverse, that the
// capacity report counts only writable subchannels, and that the target is
// reached in the cycle after the last mismatched subchannel is empty.
module tb_rmc_ctrl;
  import noc_pkg::*;

  localparam int unsigned NSUB = 4, NBUF = 4, RB = 2;

  logic       clk = 0, rst_n = 0;
  logic [1:0] target_ab;
  sub_dir_e   sub_dir [NSUB];
  logic       sub_empty [NSUB];
  logic       wr_block [NSUB], rev [NSUB];
  logic [4:0] cap [2];
  logic       busy, rev_done;

  int checks = 0, failures = 0, n_rev = 0;

  rmc_ctrl #(.NSUB(NSUB), .NBUF(NBUF), .RB(RB), .CAP_W(5)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NSUB; i++) begin
      sub_dir[i]   = (i < NSUB / 2) ? DIR_AB : DIR_BA;
      sub_empty[i] = 1'b1;
    end
    target_ab = 2'd2;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int tgt, want_ab, wait_cyc;
      @(negedge clk);
      target_ab = 2'($urandom % 4);
      tgt = (target_ab == 0) ? 1 : int'(target_ab);
      wait_cyc = 0;
      forever begin
        int nab, nba, nmis;
        for (int i = 0; i < NSUB; i++) sub_empty[i] = ($urandom % 3) == 0;
        #1;
        nab = 0; nba = 0; nmis = 0;
        for (int i = 0; i < NSUB; i++) begin
          bit mis;
          mis = (sub_dir[i] == DIR_AB) != (i < tgt);
          check(wr_block[i] == mis && rev[i] == mis, "block/reverse exactly the mismatched ones");
          if (mis) nmis++;
          else if (sub_dir[i] == DIR_AB) nab++;
          else nba++;
        end
        check(cap[0] == RB + NBUF * nab && cap[1] == RB + NBUF * nba, "capacity");
        check(busy == (nmis != 0), "busy");
        if (nmis == 0) break;
        @(posedge clk);
        for (int i = 0; i < NSUB; i++)
          if (rev[i] && sub_empty[i]) begin
            sub_dir[i] = (sub_dir[i] == DIR_AB) ? DIR_BA : DIR_AB;
            n_rev++;
          end
        @(negedge clk);
        wait_cyc++;
        check(wait_cyc < 50, "reversal finishes");
        if (wait_cyc >= 50) break;
      end
      want_ab = 0;
      for (int i = 0; i < NSUB; i++) if (sub_dir[i] == DIR_AB) want_ab++;
      check(want_ab == tgt, "target allocation reached");
    end
    check(n_rev > 0, "reversals happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
