// tb_cpl_d2d_link: end-to-end test of the D2D link.
//
// Two link instances face each other across a modelled chiplet boundary
// (board delay TDELTA on every wire). A behavioural AXI manager drives the
// near link; the far link's manager port feeds a behavioural AXI memory.
// Two configurations run one after the other: the paper's main one
// (CH = 8, LN = 8, CRD = 128, one flit per packet) and the demonstrator
// chip's narrow one (CH = 1, LN = 8, CRD = 8, six flits per packet), the
// latter with a slow memory so that the credit counter runs dry. Each
// writes bursts of random data, reads them back through the link and
// compares with the data written and with the far memory's contents.
module tb_cpl_d2d_link;
  int checks = 0, failures = 0;
  logic done_a, done_b;
  int ca, fa, cb, fb;

  tb_d2d_pair #(.CH(8), .LN(8), .CRD(128), .TMEM(1), .NBURST(6), .NAME("CH8_CRD128"))
    i_wide (.done_o(done_a), .checks_o(ca), .failures_o(fa));
  tb_d2d_pair #(.CH(1), .LN(8), .CRD(8), .TMEM(20), .NBURST(4), .NAME("CH1_CRD8"))
    i_narrow (.done_o(done_b), .checks_o(cb), .failures_o(fb));

  initial begin
    #1;
    wait (done_a && done_b);
    checks   = ca + cb;
    failures = fa + fb;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #4000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb + 1, fa + fb + 1);
    $finish;
  end
endmodule
