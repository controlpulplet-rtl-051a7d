// tb_d2d_crd_sweep: D2D link throughput against the number of credits.
//
// Runs the burst sweep (8 B to 2 KiB, write then read) on a CH = 8, LN = 8
// link with CRD = 8, 16, 32, 64 and 128 credits, first with no wire delay
// and a one-cycle memory (link-bound case), then with CRD = 8 and 128 with
// a wire delay of 50 cycles and a memory latency of 100 cycles (the
// long-latency case of the power-management study). Prints the bus
// utilisation (beats per cycle) of each burst size and checks:
//  * all data read back equals the data written, all credits come back;
//  * in the link-bound case, a 2 KiB transfer never gets slower as CRD
//    grows, and CRD = 128 is strictly faster than CRD = 8 on reads;
//  * with CRD = 128 a 2 KiB write uses at least 80 % of the cycles;
//  * in the long-latency case, CRD = 8 is strictly slower than CRD = 128
//    for a 2 KiB read.
module tb_d2d_crd_sweep;
  int checks = 0, failures = 0;
  localparam int NP = 7;
  localparam int unsigned CRDS [NP] = '{8, 16, 32, 64, 128, 8, 128};
  logic done [NP];
  int wr [NP][9];
  int rd [NP][9];
  int bad [NP];

  tb_d2d_sweep_point #(.CRD(8),   .TDELTA_CYC(0),  .TMEM(1))   p0 (done[0], wr[0], rd[0], bad[0]);
  tb_d2d_sweep_point #(.CRD(16),  .TDELTA_CYC(0),  .TMEM(1))   p1 (done[1], wr[1], rd[1], bad[1]);
  tb_d2d_sweep_point #(.CRD(32),  .TDELTA_CYC(0),  .TMEM(1))   p2 (done[2], wr[2], rd[2], bad[2]);
  tb_d2d_sweep_point #(.CRD(64),  .TDELTA_CYC(0),  .TMEM(1))   p3 (done[3], wr[3], rd[3], bad[3]);
  tb_d2d_sweep_point #(.CRD(128), .TDELTA_CYC(0),  .TMEM(1))   p4 (done[4], wr[4], rd[4], bad[4]);
  tb_d2d_sweep_point #(.CRD(8),   .TDELTA_CYC(50), .TMEM(100)) p5 (done[5], wr[5], rd[5], bad[5]);
  tb_d2d_sweep_point #(.CRD(128), .TDELTA_CYC(50), .TMEM(100)) p6 (done[6], wr[6], rd[6], bad[6]);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #1;
    for (int p = 0; p < NP; p++) wait (done[p]);
    for (int p = 0; p < NP; p++) begin
      $display("CRD=%0d %s", CRDS[p], p < 5 ? "no wire delay, 1-cycle memory" : "50-cycle wires, 100-cycle memory");
      for (int k = 0; k < 9; k++)
        $display("  %5d B  write %5d cycles (%3d %%)  read %5d cycles (%3d %%)", 8 << k,
                 wr[p][k], (100 << k) / wr[p][k], rd[p][k], (100 << k) / rd[p][k]);
      check(bad[p] == 0, $sformatf("point %0d: data and credits (%0d bad)", p, bad[p]));
    end
    for (int p = 1; p < 5; p++) begin
      check(wr[p][8] <= wr[p-1][8], $sformatf("2 KiB write not slower at CRD=%0d", CRDS[p]));
      check(rd[p][8] <= rd[p-1][8], $sformatf("2 KiB read not slower at CRD=%0d", CRDS[p]));
    end
    check(rd[4][8] < rd[0][8], "2 KiB read faster with 128 credits than with 8");
    check(wr[4][8] * 80 <= 256 * 100, $sformatf("2 KiB write utilisation at CRD=128 (%0d cycles)", wr[4][8]));
    check(rd[5][8] > rd[6][8], "long-latency 2 KiB read slower with 8 credits than with 128");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
