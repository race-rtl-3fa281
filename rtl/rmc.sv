// rmc: reversible multi-function channel between two neighbouring routers.
//
// The two one-way links of a conventional mesh are replaced by one channel of
// NSUB reversible subchannels (rmc_subchannel), each NBUF flits deep. A DEMUX
// on each side steers an incoming flit into a subchannel that currently points
// away from that side; a MUX on each side picks the subchannel whose flit is
// next. At most one flit enters and one flit leaves per direction per cycle,
// whatever the number of subchannels, as in the paper.
//
// Two modes per direction. Repeater mode: when no flit of that direction is
// stored and the receiving router's input buffer has room (no congestion), an
// arriving flit is passed straight through to the receiver in the same cycle.
// Storage mode: when the receiver is congested (its input buffer is full) or
// older flits are still stored, the flit is written into a subchannel and is
// moved into the router later, in arrival order.
//
// Arrival order across several subchannels is kept by a small order queue per
// direction that records which subchannel took each stored flit; the MUX
// always reads the subchannel named at the head of that queue. The choice of
// subchannel for a write (lowest index that is writable) and the order queue
// are this design's own; the paper does not describe how the DEMUX chooses.
//
// Index convention for the per-side arrays: [0] is side A (west or north
// router), [1] is side B (east or south router). in_*[s] is the flit arriving
// from side s, out_*[s] the flit delivered to side s. Direction AB carries
// in[0] -> out[1], direction BA carries in[1] -> out[0].
//
// Control: wr_block[i] forbids new writes into subchannel i (a reversal is
// pending) and rev[i] asks it to reverse, which it does only when empty. Both
// come from rmc_ctrl.
module rmc
  import noc_pkg::*;
#(
  parameter int unsigned NSUB = 4,   // subchannels per RMC
  parameter int unsigned NBUF = 4    // RMC buffers per subchannel
) (
  input  logic     clk,
  input  logic     rst_n,
  // flits entering the channel, per side
  input  logic     in_valid [2],
  input  flit_t    in_flit  [2],
  output logic     in_ready [2],
  // flits leaving the channel into a router input buffer, per side
  output logic     out_valid [2],
  output flit_t    out_flit  [2],
  input  logic     out_ready [2],   // receiver's input buffer not full (no congestion)
  // reconfiguration from the RMC controller
  input  logic     wr_block [NSUB],
  input  logic     rev      [NSUB],
  // status to the RMC controller and reward unit
  output sub_dir_e sub_dir   [NSUB],
  output logic     sub_empty [NSUB],
  output logic     sub_full  [NSUB],
  // per direction (0: AB, 1: BA) events of this cycle
  output logic     bypass [2],      // flit passed through in repeater mode
  output logic     store  [2]       // flit written into a subchannel (storage mode)
);

  localparam int unsigned SW = (NSUB > 1) ? $clog2(NSUB) : 1;
  localparam int unsigned QD = NSUB * NBUF;           // order queue depth
  localparam int unsigned QW = $clog2(QD);
  localparam int unsigned CW = $clog2(QD + 1);

  // subchannel connections
  logic  s_wr_en [NSUB];
  flit_t s_wr_flit [NSUB];
  logic  s_rd_en [NSUB];
  flit_t s_rd_flit [NSUB];
  logic [$clog2(NBUF+1)-1:0] s_count [NSUB];

  for (genvar i = 0; i < NSUB; i++) begin : g_sub
    // subchannel 0 is fixed A->B, the last one fixed B->A, the others start
    // split evenly: (NSUB/2, NSUB/2)
    rmc_subchannel #(
      .NBUF    (NBUF),
      .RST_DIR ((i < NSUB / 2) ? DIR_AB : DIR_BA)
    ) u_sub (
      .clk     (clk),
      .rst_n   (rst_n),
      .wr_en   (s_wr_en[i]),
      .wr_flit (s_wr_flit[i]),
      .rd_en   (s_rd_en[i]),
      .rd_flit (s_rd_flit[i]),
      .rev     (rev[i]),
      .dir     (sub_dir[i]),
      .empty   (sub_empty[i]),
      .full    (sub_full[i]),
      .count   (s_count[i])
    );
  end

  // per-direction write choice and read choice
  logic          wr_any  [2];
  logic [SW-1:0] wr_sel  [2];
  logic          do_wr   [2];
  logic          do_rd   [2];
  logic [SW-1:0] rd_sel  [2];

  // order queues
  logic [SW-1:0] oq_mem   [2][QD];
  logic [QW-1:0] oq_rd    [2];
  logic [QW-1:0] oq_wr    [2];
  logic [CW-1:0] oq_cnt   [2];

  function automatic logic [QW-1:0] qinc(input logic [QW-1:0] p);
    return (p == QW'(QD - 1)) ? '0 : p + 1'b1;
  endfunction

  for (genvar d = 0; d < 2; d++) begin : g_dir
    localparam sub_dir_e D   = (d == 0) ? DIR_AB : DIR_BA;
    localparam int       SRC = d;        // side the flits come from
    localparam int       DST = 1 - d;    // side the flits go to

    // DEMUX: lowest-index subchannel pointing in direction D that may be written
    always_comb begin
      wr_any[d] = 1'b0;
      wr_sel[d] = '0;
      for (int i = NSUB - 1; i >= 0; i--) begin
        if (sub_dir[i] == D && !wr_block[i] && !sub_full[i]) begin
          wr_any[d] = 1'b1;
          wr_sel[d] = SW'(i);
        end
      end
    end

    assign in_ready[SRC] = wr_any[d];
    assign rd_sel[d]     = oq_mem[d][oq_rd[d]];

    always_comb begin
      bypass[d]      = 1'b0;
      store[d]       = 1'b0;
      do_rd[d]       = 1'b0;
      out_valid[DST] = 1'b0;
      out_flit[DST]  = s_rd_flit[rd_sel[d]];
      if (oq_cnt[d] != '0) begin
        // storage mode: drain the oldest stored flit
        out_valid[DST] = 1'b1;
        do_rd[d]       = out_ready[DST];
        store[d]       = in_valid[SRC] && wr_any[d];
      end else if (in_valid[SRC] && wr_any[d]) begin
        if (out_ready[DST]) begin
          // repeater mode: pass through
          out_valid[DST] = 1'b1;
          out_flit[DST]  = in_flit[SRC];
          bypass[d]      = 1'b1;
        end else begin
          store[d] = 1'b1;
        end
      end
      do_wr[d] = store[d];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        oq_rd[d]  <= '0;
        oq_wr[d]  <= '0;
        oq_cnt[d] <= '0;
      end else begin
        if (do_wr[d]) oq_wr[d] <= qinc(oq_wr[d]);
        if (do_rd[d]) oq_rd[d] <= qinc(oq_rd[d]);
        case ({do_wr[d], do_rd[d]})
          2'b10:   oq_cnt[d] <= oq_cnt[d] + 1'b1;
          2'b01:   oq_cnt[d] <= oq_cnt[d] - 1'b1;
          default: ;
        endcase
      end
    end

    always_ff @(posedge clk) begin
      if (do_wr[d]) oq_mem[d][oq_wr[d]] <= wr_sel[d];
    end

    // a stored flit is only ever read from a subchannel that holds one
    a_rd_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
      do_rd[d] |-> !sub_empty[rd_sel[d]]);
  end

  // subchannel write/read enables and write data
  always_comb begin
    for (int i = 0; i < NSUB; i++) begin
      if (sub_dir[i] == DIR_AB) begin
        s_wr_en[i]   = do_wr[0] && (wr_sel[0] == SW'(i));
        s_wr_flit[i] = in_flit[0];
        s_rd_en[i]   = do_rd[0] && (rd_sel[0] == SW'(i));
      end else begin
        s_wr_en[i]   = do_wr[1] && (wr_sel[1] == SW'(i));
        s_wr_flit[i] = in_flit[1];
        s_rd_en[i]   = do_rd[1] && (rd_sel[1] == SW'(i));
      end
    end
  end

endmodule
