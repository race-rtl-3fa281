// router: five-port wormhole mesh router with XY routing and credit counters.
//
// Ports are N, E, S, W and Local (noc_pkg::port_e). Each input port has an
// RB-flit input buffer (2 in the paper); the rest of a port's buffering lives
// in the RMC on the link. The head flit of a packet is routed by dimension
// order: first along x (E/W), then along y (S when the destination lies
// further south, N when further north), then to Local. Body flits follow the
// route of their head; an output port stays locked to one input from the head
// flit until the tail flit, so packets are not interleaved. Each free output
// is given to the requesting inputs in round-robin order.
//
// A flit leaves through an output when out_ready (room in the RMC for that
// direction, or the core's ejection ready for Local) is high. Crossbar and
// allocation are combinational from the buffer heads; the flit is written into
// the next RMC or router buffer at the clock edge, so a hop through an idle
// router and a link in repeater mode takes one cycle.
//
// Flow control and congestion: in_ready (input buffer not full) doubles as the
// inverted congestion signal to the RMC feeding the port, and cred_out pulses
// when a flit leaves an input buffer (a credit sent back up the link). For each
// mesh port the router keeps an in-flight count (flits sent and not yet
// credited back) and reports credit = cap - in_flight, floored at 0, where cap
// is the number of buffers ahead of that port (RMC subchannels currently
// writable in that direction plus the next router's input buffer), supplied
// by the RMC controller. Those credits are the agents' state. Keeping cap
// outside the router is this design's way of letting the credit count follow
// the reconfigurable buffer depth; the paper only says credits count free
// buffers in the next router.
module router
  import noc_pkg::*;
#(
  parameter int unsigned RB     = 2,    // router buffers per input port
  parameter int unsigned CAP_W  = 5,    // width of cap and in-flight counts
  parameter int unsigned CRED_W = 4,    // width of the credit outputs
  parameter int unsigned X      = 0,    // this router's column
  parameter int unsigned Y      = 0     // this router's row
) (
  input  logic              clk,
  input  logic              rst_n,
  // input ports
  input  logic              in_valid [NPORT],
  input  flit_t             in_flit  [NPORT],
  output logic              in_ready [NPORT],
  output logic              cred_out [NPORT],
  // output ports
  output logic              out_valid [NPORT],
  output flit_t             out_flit  [NPORT],
  input  logic              out_ready [NPORT],
  input  logic              cred_in   [NPORT],
  input  logic [CAP_W-1:0]  cap       [NPORT],
  // state for the agents: credits of the N, E, S, W output ports
  output logic [CRED_W-1:0] credit    [4]
);

  localparam int unsigned PW = $clog2(NPORT);

  flit_t         head   [NPORT];
  logic          empty  [NPORT];
  logic          full   [NPORT];
  logic          pop    [NPORT];
  port_e         route  [NPORT];   // requested output of each input
  port_e         rt_reg [NPORT];   // route held for the body of a packet

  logic          locked [NPORT];   // per output
  logic [PW-1:0] owner  [NPORT];
  logic [PW-1:0] rr     [NPORT];
  logic          gnt_v  [NPORT];   // per output: an input was chosen
  logic [PW-1:0] gnt    [NPORT];
  logic          send   [NPORT];

  logic [CAP_W-1:0] inflight [NPORT];

  function automatic port_e xy_route(input logic [COORD_W-1:0] dx,
                                     input logic [COORD_W-1:0] dy);
    if      (int'(dx) > int'(X)) return P_E;
    else if (int'(dx) < int'(X)) return P_W;
    else if (int'(dy) > int'(Y)) return P_S;
    else if (int'(dy) < int'(Y)) return P_N;
    else                         return P_L;
  endfunction

  function automatic logic [PW-1:0] rr_idx(input logic [PW-1:0] start, input int n);
    return PW'((int'(start) + n) % NPORT);
  endfunction

  for (genvar p = 0; p < NPORT; p++) begin : g_in
    flit_fifo #(.DEPTH(RB)) u_buf (
      .clk     (clk),
      .rst_n   (rst_n),
      .wr_en   (in_valid[p]),
      .wr_flit (in_flit[p]),
      .rd_en   (pop[p]),
      .rd_flit (head[p]),
      .empty   (empty[p]),
      .full    (full[p])
    );
    assign in_ready[p] = !full[p];
    assign cred_out[p] = pop[p];
    assign route[p]    = head[p].head ? xy_route(head[p].dst_x, head[p].dst_y) : rt_reg[p];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                     rt_reg[p] <= P_L;
      else if (pop[p] && head[p].head) rt_reg[p] <= route[p];
    end
  end

  // output allocation: one arbiter per output port
  for (genvar o = 0; o < NPORT; o++) begin : g_out
    always_comb begin
      gnt_v[o] = 1'b0;
      gnt[o]   = '0;
      if (locked[o]) begin
        if (!empty[owner[o]] && route[owner[o]] == port_e'(o)) begin
          gnt_v[o] = 1'b1;
          gnt[o]   = owner[o];
        end
      end else begin
        // round robin starting at rr[o]; only a head flit may claim a port
        for (int n = NPORT - 1; n >= 0; n--) begin
          if (!empty[rr_idx(rr[o], n)] && head[rr_idx(rr[o], n)].head
              && route[rr_idx(rr[o], n)] == port_e'(o)) begin
            gnt_v[o] = 1'b1;
            gnt[o]   = rr_idx(rr[o], n);
          end
        end
      end
    end
    assign out_valid[o] = gnt_v[o];
    assign out_flit[o]  = head[gnt[o]];
    assign send[o]      = gnt_v[o] && out_ready[o];
  end

  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      pop[p] = 1'b0;
      for (int o = 0; o < NPORT; o++)
        if (send[o] && gnt[o] == PW'(p)) pop[p] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NPORT; o++) begin
        locked[o]   <= 1'b0;
        owner[o]    <= '0;
        rr[o]       <= '0;
        inflight[o] <= '0;
      end
    end else begin
      for (int o = 0; o < NPORT; o++) begin
        if (send[o]) begin
          if (out_flit[o].tail) locked[o] <= 1'b0;
          else if (out_flit[o].head) begin
            locked[o] <= 1'b1;
            owner[o]  <= gnt[o];
          end
          if (!locked[o]) rr[o] <= PW'((int'(gnt[o]) + 1) % NPORT);
        end
        case ({send[o], cred_in[o]})
          2'b10:   inflight[o] <= inflight[o] + 1'b1;
          2'b01:   inflight[o] <= inflight[o] - 1'b1;
          default: ;
        endcase
      end
    end
  end

  for (genvar o = 0; o < 4; o++) begin : g_cred
    assign credit[o] = (cap[o] > inflight[o]) ? CRED_W'(cap[o] - inflight[o]) : '0;
  end

  // a credit is never returned for a flit that was not sent
  for (genvar o = 0; o < NPORT; o++) begin : g_chk
    a_credit_balance: assert property (@(posedge clk) disable iff (!rst_n)
      cred_in[o] && !send[o] |-> inflight[o] != '0);
  end

endmodule
