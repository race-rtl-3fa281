// tb_rmc_subchannel: self-checking test of one reversible subchannel.
// Fills the subchannel to NBUF flits and checks that a further write is
// refused, drains it and checks first-in first-out order against a queue
// model, checks that a reversal request is held off while flits are stored and
// takes effect in the cycle the subchannel is empty, then runs random
// simultaneous writes and reads against the model.
module tb_rmc_subchannel;
  import noc_pkg::*;

  localparam int unsigned NBUF = 4;

  logic     clk = 0, rst_n = 0;
  logic     wr_en = 0, rd_en = 0, rev = 0;
  flit_t    wr_flit = '0, rd_flit;
  sub_dir_e dir;
  logic     empty, full;
  logic [$clog2(NBUF+1)-1:0] count;

  int checks = 0, failures = 0;
  flit_t model[$];

  rmc_subchannel #(.NBUF(NBUF), .RST_DIR(DIR_AB)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic flit_t rnd_flit();
    flit_t f;
    f = flit_t'({$urandom, $urandom, $urandom, $urandom});
    return f;
  endfunction

  // one cycle: apply wr/rd, update model at the edge
  task automatic cycle(input bit w, input bit r, input flit_t f);
    bit acc_w, acc_r;
    wr_en = w; rd_en = r; wr_flit = f;
    #1;
    acc_w = w && (model.size() < NBUF);
    acc_r = r && (model.size() > 0);
    if (acc_r) check(rd_flit == model[0], "read data order");
    @(posedge clk); #1;
    if (acc_r) void'(model.pop_front());
    if (acc_w) model.push_back(f);
    wr_en = 0; rd_en = 0;
    check(count == model.size(), "occupancy");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    check(empty && !full && dir == DIR_AB, "reset state");
    // fill
    for (int i = 0; i < NBUF; i++) cycle(1, 0, rnd_flit());
    check(full, "full after NBUF writes");
    cycle(1, 0, rnd_flit());
    check(count == NBUF, "write refused when full");
    // reversal held off while not empty
    rev = 1;
    @(posedge clk); #1;
    check(dir == DIR_AB, "no reversal while flits stored");
    rev = 0;
    // drain
    for (int i = 0; i < NBUF; i++) cycle(0, 1, '0);
    check(empty, "empty after drain");
    // reverse when empty: one cycle
    rev = 1;
    @(posedge clk); #1;
    rev = 0;
    check(dir == DIR_BA, "reversal when empty");
    rev = 1;
    @(posedge clk); #1;
    rev = 0;
    check(dir == DIR_AB, "second reversal");
    // random traffic
    for (int n = 0; n < 2000; n++)
      cycle(($urandom % 3) != 0, ($urandom % 2) != 0, rnd_flit());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
