// tb_graph_gen_sizes -- runs the end-to-end test at graph sizes 128 and 64.
//
// Both instances of tb_graph_gen_sized run side by side, each against its own
// graph generator and reference model. The test ends when both have finished
// and reports their combined counts. A watchdog ends it with a failure if
// either never finishes.
module tb_graph_gen_sizes;

  bit fin128, fin64;
  int chk128, chk64, fail128, fail64;

  tb_graph_gen_sized #(.SIZE(128)) u128 (.finished(fin128), .checks(chk128), .failures(fail128));
  tb_graph_gen_sized #(.SIZE(64))  u64  (.finished(fin64),  .checks(chk64),  .failures(fail64));

  initial begin
    wait (fin128 && fin64);
    $display("TB_RESULT checks=%0d failures=%0d", chk128 + chk64, fail128 + fail64);
    $finish;
  end

  initial begin
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", chk128 + chk64, fail128 + fail64 + 1);
    $finish;
  end

endmodule
