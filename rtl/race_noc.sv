// race_noc: the RACE network-on-chip, an 8x8 mesh with reversible channels.
//
// MESH_X x MESH_Y routers (router) are joined by one race_link per pair of
// neighbours: 2*8*7 = 112 links for the paper's 8x8 mesh, each with its own
// reversible multi-function channel, controller and RL agent. Per input port
// a router has RB = 2 buffers of its own and NBUF = 4 flits in each of the
// 1 to 3 subchannels the link's agent gives that direction, so 6 to 14
// buffers, as in the paper's platform (4 subchannels of 4 buffers, 128-bit
// flits, XY routing, credit-based flow control, 50-cycle epochs).
//
// Numbering: node n = y*MESH_X + x, y grows southwards. Horizontal link
// between (x,y) and (x+1,y) has index y*(MESH_X-1) + x; vertical link between
// (x,y) and (x,y+1) has index NH + y*MESH_X + x with NH = MESH_Y*(MESH_X-1).
// Side A of a link is its west or north router.
//
// Interfaces: each node's core injects through inj_* (valid/ready) and
// receives through ej_* (valid/ready); the cores themselves are outside this
// design. The agents' weights, trained offline, are written through wcfg_*:
// wcfg_link selects one agent, or all of them when wcfg_bcast is set, and
// wcfg_addr/wcfg_data address its weight registers (see dqn_mlp). Per link,
// the allocation in force (link_target = subchannels A->B), the epoch reward,
// the falsefull total and per-cycle events are brought out for monitoring.
// Mesh ports on the edge of the mesh are tied off.
module race_noc
  import noc_pkg::*;
#(
  parameter int unsigned MESH_X = 8,
  parameter int unsigned MESH_Y = 8,
  parameter int unsigned NSUB   = 4,
  parameter int unsigned NBUF   = 4,
  parameter int unsigned RB     = 2,
  parameter int unsigned EPOCH  = 50,
  parameter int unsigned N_HID  = 5,
  parameter int unsigned W_W    = 16,
  parameter int unsigned FRAC   = 8,
  parameter int unsigned NN     = MESH_X * MESH_Y,
  parameter int unsigned NH     = MESH_Y * (MESH_X - 1),
  parameter int unsigned NL     = NH + MESH_X * (MESH_Y - 1),
  parameter int unsigned LW     = $clog2(NL),
  parameter int unsigned NW     = N_HID * 9 + (NSUB - 1) * (N_HID + 1),
  parameter int unsigned AW     = $clog2(NW),
  parameter int unsigned TGT_W  = $clog2(NSUB),
  parameter int unsigned RW     = $clog2(EPOCH + 2) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // cores
  input  logic                  inj_valid [NN],
  input  flit_t                 inj_flit  [NN],
  output logic                  inj_ready [NN],
  output logic                  ej_valid  [NN],
  output flit_t                 ej_flit   [NN],
  input  logic                  ej_ready  [NN],
  // weight load
  input  logic                  wcfg_we,
  input  logic                  wcfg_bcast,
  input  logic [LW-1:0]         wcfg_link,
  input  logic [AW-1:0]         wcfg_addr,
  input  logic signed [W_W-1:0] wcfg_data,
  // monitoring
  output logic [TGT_W-1:0]      link_target       [NL],
  output logic signed [RW-1:0]  link_reward       [NL],
  output logic                  link_reward_valid [NL],
  output logic [31:0]           link_ff_total     [NL],
  output link_evt_t             link_evt          [NL]
);

  localparam int unsigned CAP_W  = $clog2(RB + NBUF * NSUB + 1);
  localparam int unsigned CRED_W = $clog2(RB + NBUF * (NSUB - 1) + 1);

  // router side
  logic              r_in_valid  [NN][NPORT];
  flit_t             r_in_flit   [NN][NPORT];
  logic              r_in_ready  [NN][NPORT];
  logic              r_cred_out  [NN][NPORT];
  logic              r_out_valid [NN][NPORT];
  flit_t             r_out_flit  [NN][NPORT];
  logic              r_out_ready [NN][NPORT];
  logic              r_cred_in   [NN][NPORT];
  logic [CAP_W-1:0]  r_cap       [NN][NPORT];
  logic [CRED_W-1:0] r_credit    [NN][4];

  // link side
  logic              l_in_valid  [NL][2];
  flit_t             l_in_flit   [NL][2];
  logic              l_in_ready  [NL][2];
  logic              l_out_valid [NL][2];
  flit_t             l_out_flit  [NL][2];
  logic              l_out_ready [NL][2];
  logic [CAP_W-1:0]  l_cap       [NL][2];
  logic [CRED_W-1:0] l_state     [NL][8];

  initial begin
    if (MESH_X > (1 << COORD_W) || MESH_Y > (1 << COORD_W))
      $error("mesh larger than the flit's coordinate fields");
  end

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int N = y * MESH_X + x;

      router #(
        .RB(RB), .CAP_W(CAP_W), .CRED_W(CRED_W), .X(x), .Y(y)
      ) u_router (
        .clk, .rst_n,
        .in_valid  (r_in_valid[N]),
        .in_flit   (r_in_flit[N]),
        .in_ready  (r_in_ready[N]),
        .cred_out  (r_cred_out[N]),
        .out_valid (r_out_valid[N]),
        .out_flit  (r_out_flit[N]),
        .out_ready (r_out_ready[N]),
        .cred_in   (r_cred_in[N]),
        .cap       (r_cap[N]),
        .credit    (r_credit[N])
      );

      // local port: the core
      assign r_in_valid[N][P_L]  = inj_valid[N];
      assign r_in_flit[N][P_L]   = inj_flit[N];
      assign inj_ready[N]        = r_in_ready[N][P_L];
      assign ej_valid[N]         = r_out_valid[N][P_L];
      assign ej_flit[N]          = r_out_flit[N][P_L];
      assign r_out_ready[N][P_L] = ej_ready[N];
      assign r_cred_in[N][P_L]   = r_out_valid[N][P_L] && ej_ready[N];
      assign r_cap[N][P_L]       = '0;

      // mesh ports: N, E, S, W
      for (genvar p = 0; p < 4; p++) begin : g_p
        localparam bit HAS = (p == 0) ? (y > 0) :
                             (p == 1) ? (x < MESH_X - 1) :
                             (p == 2) ? (y < MESH_Y - 1) : (x > 0);
        // link index and this router's side of it
        localparam int LI  = (p == 0) ? NH + (y - 1) * MESH_X + x :
                             (p == 1) ? y * (MESH_X - 1) + x :
                             (p == 2) ? NH + y * MESH_X + x :
                                        y * (MESH_X - 1) + x - 1;
        localparam int SD  = (p == 0 || p == 3) ? 1 : 0;
        // neighbour and its port facing this router
        localparam int NB  = (p == 0) ? N - MESH_X : (p == 1) ? N + 1 :
                             (p == 2) ? N + MESH_X : N - 1;
        localparam int OP  = (p + 2) % 4;
        if (HAS) begin : g_link
          assign l_in_valid[LI][SD] = r_out_valid[N][p];
          assign l_in_flit[LI][SD]  = r_out_flit[N][p];
          assign r_out_ready[N][p]  = l_in_ready[LI][SD];
          assign r_in_valid[N][p]   = l_out_valid[LI][SD];
          assign r_in_flit[N][p]    = l_out_flit[LI][SD];
          assign l_out_ready[LI][SD] = r_in_ready[N][p];
          assign r_cap[N][p]        = l_cap[LI][SD];
          assign r_cred_in[N][p]    = r_cred_out[NB][OP];
          for (genvar q = 0; q < 4; q++) begin : g_st
            assign l_state[LI][SD * 4 + q] = r_credit[N][q];
          end
        end else begin : g_edge
          assign r_out_ready[N][p] = 1'b0;
          assign r_in_valid[N][p]  = 1'b0;
          assign r_in_flit[N][p]   = '0;
          assign r_cap[N][p]       = '0;
          assign r_cred_in[N][p]   = 1'b0;
        end
      end
    end
  end

  for (genvar l = 0; l < NL; l++) begin : g_link
    race_link #(
      .NSUB(NSUB), .NBUF(NBUF), .RB(RB), .EPOCH(EPOCH), .N_HID(N_HID),
      .CRED_W(CRED_W), .W_W(W_W), .FRAC(FRAC), .CAP_W(CAP_W), .RW(RW)
    ) u_link (
      .clk, .rst_n,
      .in_valid     (l_in_valid[l]),
      .in_flit      (l_in_flit[l]),
      .in_ready     (l_in_ready[l]),
      .out_valid    (l_out_valid[l]),
      .out_flit     (l_out_flit[l]),
      .out_ready    (l_out_ready[l]),
      .cap          (l_cap[l]),
      .state        (l_state[l]),
      .w_we         (wcfg_we && (wcfg_bcast || wcfg_link == LW'(l))),
      .w_addr       (wcfg_addr),
      .w_data       (wcfg_data),
      .target_ab    (link_target[l]),
      .reward       (link_reward[l]),
      .reward_valid (link_reward_valid[l]),
      .evt          (link_evt[l]),
      .ff_total     (link_ff_total[l])
    );
  end

endmodule
