// flit_fifo: synchronous first-in first-out queue of flits, used as a router
// input buffer (DEPTH = 2 router buffers per port in the paper's platform).
// The head is visible on rd_flit while not empty (first-word fall-through).
// full is registered state, so a write is refused when the queue is full even
// if a read happens in the same cycle; this keeps the ready signal free of
// same-cycle paths through the router. Reset empties the queue.
module flit_fifo
  import noc_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr_en,
  input  flit_t wr_flit,
  input  logic  rd_en,
  output flit_t rd_flit,
  output logic  empty,
  output logic  full
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  flit_t         mem [DEPTH];
  logic [PW-1:0] rp, wp;
  logic [CW-1:0] cnt;
  logic          do_wr, do_rd;

  assign empty   = (cnt == '0);
  assign full    = (cnt == CW'(DEPTH));
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_flit = mem[rp];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp  <= '0;
      wp  <= '0;
      cnt <= '0;
    end else begin
      if (do_wr) wp <= inc(wp);
      if (do_rd) rp <= inc(rp);
      case ({do_wr, do_rd})
        2'b10:   cnt <= cnt + 1'b1;
        2'b01:   cnt <= cnt - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_flit;
  end

endmodule
