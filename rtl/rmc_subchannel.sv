// rmc_subchannel: one reversible physical subchannel of an RMC.
//
// The subchannel is a chain of NBUF reversible channel buffers, each able to
// hold one flit. Logically it is a first-in first-out queue whose write side
// and read side can be swapped: with dir = DIR_AB the A-side router writes
// and the B-side reads, with dir = DIR_BA the roles are exchanged. A reversal
// request (rev) is honoured only when the subchannel is empty, as the paper
// requires; the RMC controller guarantees this by blocking writes first.
//
// The chain of latching repeaters is modelled as a circular buffer of NBUF
// entries (each entry stands for one RMC buffer) with a read pointer, a write
// pointer and an occupancy count. Writes and reads are synchronous; a flit
// written in one cycle can be read from the next. rd_flit always shows the
// oldest entry (first-word fall-through). A write and a read may happen in the
// same cycle; a write into a full subchannel is refused even if a read frees a
// slot in that cycle. NBUF = 4 follows the paper; the FIFO model and
// the reset direction input (RST_DIR) are this design's choices.
module rmc_subchannel
  import noc_pkg::*;
#(
  parameter int unsigned NBUF    = 4,       // RMC buffers per subchannel
  parameter sub_dir_e    RST_DIR = DIR_AB   // direction after reset
) (
  input  logic     clk,
  input  logic     rst_n,
  // side that currently writes (selected by dir inside the RMC)
  input  logic     wr_en,
  input  flit_t    wr_flit,
  // side that currently reads
  input  logic     rd_en,
  output flit_t    rd_flit,
  // reversal
  input  logic     rev,        // flip direction; only acted on when empty
  output sub_dir_e dir,
  // status
  output logic     empty,
  output logic     full,
  output logic [$clog2(NBUF+1)-1:0] count
);

  localparam int unsigned PW = (NBUF > 1) ? $clog2(NBUF) : 1;

  flit_t          mem [NBUF];
  logic [PW-1:0]  rd_ptr, wr_ptr;
  logic           do_wr, do_rd;

  assign empty  = (count == '0);
  assign full   = (count == NBUF[$clog2(NBUF+1)-1:0]);
  assign do_wr  = wr_en && !full;
  assign do_rd  = rd_en && !empty;
  assign rd_flit = mem[rd_ptr];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(NBUF - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
      dir    <= RST_DIR;
    end else begin
      if (do_wr) wr_ptr <= inc(wr_ptr);
      if (do_rd) rd_ptr <= inc(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
      if (rev && empty && !do_wr) dir <= (dir == DIR_AB) ? DIR_BA : DIR_AB;
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_flit;
  end

  // A reversal request must never arrive while a write is being accepted.
  a_no_wr_on_rev: assert property (@(posedge clk) disable iff (!rst_n) !(rev && do_wr));

endmodule
