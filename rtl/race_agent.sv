// race_agent: the per-RMC reinforcement-learning agent (inference side).
//
// Every epoch of EPOCH cycles (50 in the paper) the agent samples its state,
// the eight credit counts [C_AN, C_AE, C_AS, C_AW, C_BN, C_BE, C_BS, C_BW] of
// the RMC's two routers, runs its deep Q-network (dqn_mlp) and turns the
// chosen action into a target allocation for the RMC controller. With NSUB
// subchannels there are NSUB-1 actions; action j means (j+1, NSUB-1-j)
// subchannels in the A->B and B->A directions, i.e. (1,3), (2,2), (3,1)
// for four subchannels. The target resets to the balanced (NSUB/2, NSUB/2).
//
// Timing: epoch_end is high in the last cycle of each epoch; the state is
// sampled in that cycle and the new target is applied when the network
// finishes, N_IN + N_HID + 2 cycles later (15 cycles with the paper's 8-5-3
// network). The paper does not say when in the epoch the state is taken or
// how long inference takes; these are this design's choices. The first epoch
// ends EPOCH cycles after reset.
module race_agent #(
  parameter int unsigned NSUB   = 4,
  parameter int unsigned EPOCH  = 50,
  parameter int unsigned N_IN   = 8,
  parameter int unsigned N_HID  = 5,
  parameter int unsigned IN_W   = 4,
  parameter int unsigned W_W    = 16,
  parameter int unsigned FRAC   = 8,
  parameter int unsigned NW     = N_HID * (N_IN + 1) + (NSUB - 1) * (N_HID + 1),
  parameter int unsigned AW     = $clog2(NW),
  parameter int unsigned TGT_W  = $clog2(NSUB)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [IN_W-1:0]       state [N_IN],
  input  logic                  w_we,
  input  logic [AW-1:0]         w_addr,
  input  logic signed [W_W-1:0] w_data,
  output logic                  epoch_end,
  output logic [TGT_W-1:0]      target_ab,   // subchannels A->B
  output logic                  action_new   // target_ab updated this cycle
);

  localparam int unsigned N_OUT = NSUB - 1;
  localparam int unsigned OW    = (N_OUT > 1) ? $clog2(N_OUT) : 1;
  localparam int unsigned EW    = $clog2(EPOCH);
  localparam int unsigned ACC_W = 40;

  logic [EW-1:0]           ecnt;
  logic                    done, busy;
  logic [OW-1:0]           action;
  logic signed [ACC_W-1:0] q [N_OUT];

  assign epoch_end = (ecnt == EW'(EPOCH - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ecnt       <= '0;
      target_ab  <= TGT_W'(NSUB / 2);
      action_new <= 1'b0;
    end else begin
      ecnt       <= epoch_end ? '0 : ecnt + 1'b1;
      action_new <= done;
      if (done) target_ab <= TGT_W'(action) + 1'b1;
    end
  end

  dqn_mlp #(
    .N_IN  (N_IN),
    .N_HID (N_HID),
    .N_OUT (N_OUT),
    .IN_W  (IN_W),
    .W_W   (W_W),
    .FRAC  (FRAC),
    .ACC_W (ACC_W)
  ) u_dqn (
    .clk    (clk),
    .rst_n  (rst_n),
    .w_we   (w_we),
    .w_addr (w_addr),
    .w_data (w_data),
    .start  (epoch_end),
    .x      (state),
    .busy   (busy),
    .done   (done),
    .action (action),
    .q      (q)
  );

  // inference must finish inside one epoch
  a_fits_epoch: assert property (@(posedge clk) disable iff (!rst_n)
    epoch_end |-> !busy);

endmodule
