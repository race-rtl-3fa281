// tb_race_noc_sens: the subchannel sensitivity study's three systems, each
// on a 4x4 mesh (reduced from 8x8 to keep the build short) and driven end
// to end by noc_harness:
//   4S_4CB_3RB: 4 subchannels x 4 buffers, 3 router buffers
//   6S_3CB_2RB: 6 subchannels x 3 buffers, 2 router buffers (5 actions)
//   8S_2CB_3RB: 8 subchannels x 2 buffers, 3 router buffers (7 actions)
// All three run in parallel; the test ends when all are done, or at the
// watchdog, and sums their checks and failures.
module tb_race_noc_sens;

  logic clk = 0;
  logic done [3];
  int   chk [3], fl [3];

  always #5 clk = ~clk;

  noc_harness #(.NSUB(4), .NBUF(4), .RB(3), .NAME("4S_4CB_3RB")) u_4s (.done(done[0]), .checks(chk[0]), .failures(fl[0]));
  noc_harness #(.NSUB(6), .NBUF(3), .RB(2), .NAME("6S_3CB_2RB")) u_6s (.done(done[1]), .checks(chk[1]), .failures(fl[1]));
  noc_harness #(.NSUB(8), .NBUF(2), .RB(3), .NAME("8S_2CB_3RB")) u_8s (.done(done[2]), .checks(chk[2]), .failures(fl[2]));

  initial begin
    int cyc;
    for (cyc = 0; cyc < 60000; cyc++) begin
      @(posedge clk);
      if (done[0] && done[1] && done[2]) break;
    end
    #1;
    $display("TB_RESULT checks=%0d failures=%0d",
             chk[0] + chk[1] + chk[2],
             fl[0] + fl[1] + fl[2] + ((cyc >= 60000) ? 1 : 0));
    $finish;
  end
endmodule
