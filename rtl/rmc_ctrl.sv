// rmc_ctrl: RMC controller, the reconfiguration sequencer of one RMC.
//
// Input is the target allocation: target_ab = number of subchannels that
// should carry flits from side A to side B (1 .. NSUB-1; the remaining ones
// carry B to A). Subchannel 0 is fixed A->B and subchannel NSUB-1 fixed B->A,
// so each direction keeps at least one subchannel; subchannel i should point
// A->B exactly when i < target_ab.
//
// For every subchannel whose direction differs from the target the controller
// blocks new writes (wr_block) and requests a reversal (rev). The subchannel
// reverses itself in the first cycle it is empty, i.e. after its stored flits
// have been moved into the receiving router. This is the drain-then-reverse
// rule the paper describes; all decisions are combinational from the current
// directions, so a new target takes effect in the same cycle.
//
// The controller also tells each router how many buffers lie ahead of its
// output port, for the credit counters that form the agent state:
// cap[d] = RB + NBUF * (writable subchannels in direction d). Subchannels that
// are being drained are not counted. rev_done pulses when a subchannel has
// reversed. cap and rev_done are this design's additions.
module rmc_ctrl
  import noc_pkg::*;
#(
  parameter int unsigned NSUB   = 4,
  parameter int unsigned NBUF   = 4,
  parameter int unsigned RB     = 2,   // router input buffers per port
  parameter int unsigned CAP_W  = $clog2(RB + NBUF * NSUB + 1),
  parameter int unsigned TGT_W  = $clog2(NSUB)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [TGT_W-1:0] target_ab,
  input  sub_dir_e         sub_dir   [NSUB],
  input  logic             sub_empty [NSUB],
  output logic             wr_block  [NSUB],
  output logic             rev       [NSUB],
  output logic [CAP_W-1:0] cap       [2],     // [0]: A->B, [1]: B->A
  output logic             busy,              // a reversal is pending
  output logic             rev_done           // a subchannel reversed this cycle
);

  logic [TGT_W-1:0] tgt;
  sub_dir_e         want [NSUB];
  logic             mismatch [NSUB];

  // keep one subchannel in each direction whatever the request
  always_comb begin
    tgt = target_ab;
    if (int'(tgt) < 1)            tgt = TGT_W'(1);
    if (int'(tgt) > int'(NSUB) - 1) tgt = TGT_W'(NSUB - 1);
  end

  always_comb begin
    int unsigned n_ab, n_ba;
    n_ab     = 0;
    n_ba     = 0;
    busy     = 1'b0;
    rev_done = 1'b0;
    for (int i = 0; i < NSUB; i++) begin
      want[i]     = (i < int'(tgt)) ? DIR_AB : DIR_BA;
      mismatch[i] = (sub_dir[i] != want[i]);
      wr_block[i] = mismatch[i];
      rev[i]      = mismatch[i];
      busy        = busy | mismatch[i];
      rev_done    = rev_done | (mismatch[i] & sub_empty[i]);
      if (!mismatch[i]) begin
        if (sub_dir[i] == DIR_AB) n_ab++;
        else                      n_ba++;
      end
    end
    cap[0] = CAP_W'(RB + NBUF * n_ab);
    cap[1] = CAP_W'(RB + NBUF * n_ba);
  end

  // the fixed subchannels never change direction
  a_fixed_ends: assert property (@(posedge clk) disable iff (!rst_n)
    sub_dir[0] == DIR_AB && sub_dir[NSUB-1] == DIR_BA);

endmodule
