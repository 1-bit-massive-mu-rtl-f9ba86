// tb_c2po_workloads -- the C2PO configurations of the implementation table
// (U = 16 users; B = 32, 64, 128 and 256 antennas) with the paper's
// t_max = 24 iterations, BPSK for B = 32 and 64 (as in the BPSK error-rate
// and trade-off studies) and 16-QAM for B = 128 and 256 (the 16-QAM study
// names both sizes). Each instance checks the 39, 40, 41 and 42
// cycles per iteration, bit-exactness against the reference model and that
// C2PO lowers the MSE compared with quantised MRT. The step size tau is set
// per size so that tau < 1/||A^H A|| for channels of entry variance 1/U.
module tb_c2po_workloads;

  logic f32, f64, f128, f256;
  int   c32, c64, c128, c256, e32, e64, e128, e256;

  tb_c2po_wl_run #(.B(32),  .TS(3), .QAM16(1'b0)) w32  (.finished (f32),  .checks (c32),  .failures (e32));
  tb_c2po_wl_run #(.B(64),  .TS(4), .QAM16(1'b0)) w64  (.finished (f64),  .checks (c64),  .failures (e64));
  tb_c2po_wl_run #(.B(128), .TS(4), .QAM16(1'b1)) w128 (.finished (f128), .checks (c128), .failures (e128));
  tb_c2po_wl_run #(.B(256), .TS(5), .QAM16(1'b1)) w256 (.finished (f256), .checks (c256), .failures (e256));

  initial begin
    #50000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c32 + c64 + c128 + c256, e32 + e64 + e128 + e256 + 1);
    $finish;
  end

  initial begin
    #100;
    wait (f32 && f64 && f128 && f256);
    $display("TB_RESULT checks=%0d failures=%0d", c32 + c64 + c128 + c256, e32 + e64 + e128 + e256);
    $finish;
  end

endmodule
