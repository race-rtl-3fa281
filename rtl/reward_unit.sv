// reward_unit: falsefull detector and epoch reward of one RMC.
//
// A falsefull is a cycle in which every subchannel pointing in one direction
// is full while at least one reversible subchannel (not the two fixed ones)
// pointing the other way is empty: that direction looks full although the RMC
// could give it more buffers. The unit raises falsefull in such a cycle and
// counts these cycles over the epoch. At the last cycle of an epoch
// (epoch_end) it emits the reward of the paper,
//     r = -EPS * c_unequal - sum over the epoch of f(t),
// where c_unequal is 1 when the allocation in force is not the balanced one
// (NSUB/2, NSUB/2). EPS = 1 as in the paper. The reward is used to train the
// agent offline; in the chip it serves as a monitor, together with a running
// total of falsefull cycles. The count includes the epoch_end cycle itself.
// Timing: reward and reward_valid are registered, valid one cycle after
// epoch_end.
module reward_unit
  import noc_pkg::*;
#(
  parameter int unsigned NSUB    = 4,
  parameter int unsigned EPOCH   = 50,
  parameter int unsigned EPS     = 1,
  parameter int unsigned TGT_W   = $clog2(NSUB),
  parameter int unsigned RW      = $clog2(EPOCH + EPS + 1) + 1,  // signed reward width
  parameter int unsigned TOT_W   = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              epoch_end,
  input  logic [TGT_W-1:0]  target_ab,     // allocation in force this epoch
  input  sub_dir_e          sub_dir   [NSUB],
  input  logic              sub_full  [NSUB],
  input  logic              sub_empty [NSUB],
  output logic              falsefull,
  output logic signed [RW-1:0] reward,
  output logic              reward_valid,
  output logic [TOT_W-1:0]  ff_total
);

  localparam int unsigned FW = $clog2(EPOCH + 1);

  logic          ff_dir [2];
  logic [FW-1:0] ff_cnt;
  logic signed [RW-1:0] penalty;     // EPS*c_unequal + falsefull cycles of the epoch

  assign penalty = RW'(ff_cnt) + RW'(falsefull)
                 + ((target_ab != TGT_W'(NSUB / 2)) ? RW'(EPS) : RW'(0));

  always_comb begin
    for (int d = 0; d < 2; d++) begin
      logic all_full, other_empty;
      all_full    = 1'b1;
      other_empty = 1'b0;
      for (int i = 0; i < NSUB; i++) begin
        if (sub_dir[i] == sub_dir_e'(d)) all_full = all_full & sub_full[i];
        else if (i != 0 && i != NSUB - 1) other_empty = other_empty | sub_empty[i];
      end
      ff_dir[d] = all_full & other_empty;
    end
    falsefull = ff_dir[0] | ff_dir[1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ff_cnt       <= '0;
      reward       <= '0;
      reward_valid <= 1'b0;
      ff_total     <= '0;
    end else begin
      reward_valid <= epoch_end;
      if (falsefull) ff_total <= ff_total + 1'b1;
      if (epoch_end) begin
        reward <= -penalty;
        ff_cnt <= '0;
      end else if (falsefull && ff_cnt != FW'(EPOCH)) begin
        ff_cnt <= ff_cnt + 1'b1;
      end
    end
  end

endmodule
