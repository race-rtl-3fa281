// race_link: everything that sits on one mesh link in the RACE design.
//
// Bundles the reversible multi-function channel (rmc), its controller
// (rmc_ctrl), its RL agent (race_agent) and its falsefull/reward monitor
// (reward_unit), wired as in the paper's control loop: the agent reads the
// eight credit counts of the two routers, picks an allocation once per epoch,
// the controller reverses subchannels to reach it, and the reward unit
// scores the epoch. Side A is the west (or north) router, side B the east (or
// south) router; array index 0 is side A, index 1 side B, and cap[s] is the
// buffer count ahead of the output port of the router on side s.
module race_link
  import noc_pkg::*;
#(
  parameter int unsigned NSUB   = 4,
  parameter int unsigned NBUF   = 4,
  parameter int unsigned RB     = 2,
  parameter int unsigned EPOCH  = 50,
  parameter int unsigned N_HID  = 5,
  parameter int unsigned CRED_W = 4,
  parameter int unsigned W_W    = 16,
  parameter int unsigned FRAC   = 8,
  parameter int unsigned CAP_W  = $clog2(RB + NBUF * NSUB + 1),
  parameter int unsigned NW     = N_HID * 9 + (NSUB - 1) * (N_HID + 1),
  parameter int unsigned AW     = $clog2(NW),
  parameter int unsigned TGT_W  = $clog2(NSUB),
  parameter int unsigned RW     = $clog2(EPOCH + 2) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid  [2],
  input  flit_t                 in_flit   [2],
  output logic                  in_ready  [2],
  output logic                  out_valid [2],
  output flit_t                 out_flit  [2],
  input  logic                  out_ready [2],
  output logic [CAP_W-1:0]      cap       [2],
  input  logic [CRED_W-1:0]     state     [8],
  input  logic                  w_we,
  input  logic [AW-1:0]         w_addr,
  input  logic signed [W_W-1:0] w_data,
  output logic [TGT_W-1:0]      target_ab,
  output logic signed [RW-1:0]  reward,
  output logic                  reward_valid,
  output link_evt_t             evt,
  output logic [31:0]           ff_total      // falsefull cycles since reset
);

  logic     wr_block  [NSUB];
  logic     rev       [NSUB];
  sub_dir_e sub_dir   [NSUB];
  logic     sub_empty [NSUB];
  logic     sub_full  [NSUB];
  logic     bypass    [2];
  logic     store     [2];
  logic     busy, rev_done, epoch_end, action_new, falsefull;

  rmc #(.NSUB(NSUB), .NBUF(NBUF)) u_rmc (
    .clk, .rst_n,
    .in_valid, .in_flit, .in_ready,
    .out_valid, .out_flit, .out_ready,
    .wr_block, .rev,
    .sub_dir, .sub_empty, .sub_full,
    .bypass, .store
  );

  rmc_ctrl #(.NSUB(NSUB), .NBUF(NBUF), .RB(RB), .CAP_W(CAP_W)) u_ctrl (
    .clk, .rst_n,
    .target_ab, .sub_dir, .sub_empty,
    .wr_block, .rev, .cap, .busy, .rev_done
  );

  race_agent #(
    .NSUB(NSUB), .EPOCH(EPOCH), .N_IN(8), .N_HID(N_HID),
    .IN_W(CRED_W), .W_W(W_W), .FRAC(FRAC)
  ) u_agent (
    .clk, .rst_n,
    .state, .w_we, .w_addr, .w_data,
    .epoch_end, .target_ab, .action_new
  );

  reward_unit #(.NSUB(NSUB), .EPOCH(EPOCH), .EPS(1), .RW(RW)) u_reward (
    .clk, .rst_n,
    .epoch_end, .target_ab, .sub_dir, .sub_full, .sub_empty,
    .falsefull, .reward, .reward_valid, .ff_total
  );

  assign evt = '{bypass_ab: bypass[0], bypass_ba: bypass[1],
                 store_ab:  store[0],  store_ba:  store[1],
                 rev_done:  rev_done,  rev_busy:  busy,
                 falsefull: falsefull, epoch_end: epoch_end,
                 action_new: action_new};

endmodule
