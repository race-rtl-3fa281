// tb_reward_unit: self-checking test of the falsefull detector and reward.
// Random subchannel directions (ends fixed), fill states and allocations are
// applied each cycle; an independent model decides falsefull per cycle and
// computes the epoch reward -EPS*c_unequal - (falsefull cycles), which is
// compared with the unit's registered output one cycle after each epoch end.
// Epochs are EPOCH = 50 cycles, as in the paper.
module tb_reward_unit;
  import noc_pkg::*;

  localparam int unsigned NSUB = 4, EPOCH = 50;
  localparam int unsigned RW = $clog2(EPOCH + 2) + 1;

  logic       clk = 0, rst_n = 0;
  logic       epoch_end = 0;
  logic [1:0] target_ab = 2;
  sub_dir_e   sub_dir [NSUB];
  logic       sub_full [NSUB], sub_empty [NSUB];
  logic       falsefull, reward_valid;
  logic signed [RW-1:0] reward;
  logic [31:0] ff_total;

  int checks = 0, failures = 0, n_ff = 0, tot = 0, n_unequal = 0;

  reward_unit #(.NSUB(NSUB), .EPOCH(EPOCH), .EPS(1)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  function automatic bit model_ff();
    for (int d = 0; d < 2; d++) begin
      bit all_full = 1, other_empty = 0;
      for (int i = 0; i < NSUB; i++) begin
        if (sub_dir[i] == sub_dir_e'(d)) begin
          if (!sub_full[i]) all_full = 0;
        end else if (i > 0 && i < NSUB - 1 && sub_empty[i]) other_empty = 1;
      end
      if (all_full && other_empty) return 1;
    end
    return 0;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cnt, exp_r, pend;
    bit pending;
    for (int i = 0; i < NSUB; i++) begin
      sub_dir[i] = (i < 2) ? DIR_AB : DIR_BA; sub_full[i] = 0; sub_empty[i] = 1;
    end
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    cnt = 0; pending = 0;
    for (int c = 0; c < 20 * EPOCH; c++) begin
      if (c % EPOCH == 0) target_ab = 2'($urandom_range(1, 3));
      for (int i = 0; i < NSUB; i++) begin
        int r;
        if (i > 0 && i < NSUB - 1) sub_dir[i] = sub_dir_e'($urandom % 2);
        r = $urandom % 3;         // mostly full or empty to make falsefull likely
        sub_full[i]  = (r == 0) || (r == 1 && sub_dir[i] == DIR_AB);
        sub_empty[i] = !sub_full[i] && ($urandom % 2);
      end
      epoch_end = (c % EPOCH) == EPOCH - 1;
      #1;
      check(falsefull == model_ff(), "falsefull detection");
      if (model_ff()) begin cnt++; n_ff++; tot++; end
      if (epoch_end) begin
        exp_r = -cnt - ((target_ab != 2) ? 1 : 0);
        if (target_ab != 2) n_unequal++;
        cnt = 0;
      end
      @(posedge clk); #1;
      if (epoch_end) begin
        check(reward_valid, "reward valid after epoch end");
        check(int'(reward) == exp_r, $sformatf("reward %0d expected %0d", reward, exp_r));
      end else begin
        check(!reward_valid, "no reward mid-epoch");
      end
      check(ff_total == tot, "falsefull total");
      @(negedge clk);
    end
    check(n_ff > 0 && n_unequal > 0, "falsefull and unequal allocations exercised");
    $display("falsefull cycles=%0d unequal epochs=%0d", n_ff, n_unequal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
