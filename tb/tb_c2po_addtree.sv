// tb_c2po_addtree -- unit test of the pipelined adder tree.
//
// NA = 8 arrays, 3 lanes: new random accumulator values every cycle; the
// output must equal the 21-bit wrapping sum of the inputs applied L-1 = 2
// cycles earlier, truncated to 18 bits with 11 fraction bits.
module tb_c2po_addtree;
  import c2po_pkg::*;

  localparam int NA = 8;
  localparam int LN = 3;
  localparam int LAT = $clog2(NA) - 1;

  logic clk = 1'b0;
  acc_t acc [NA][LN];
  b_t   w   [LN];

  c2po_addtree #(.NA(NA), .LANES(LN)) dut (.clk_i (clk), .acc_i (acc), .w_o (w));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  b_t hist [$][LN];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int cyc = 0; cyc < 1000; cyc++) begin
      b_t e [LN];
      @(negedge clk);
      if (cyc > LAT) begin
        for (int k = 0; k < LN; k++) begin
          checks++;
          if (w[k] !== hist[cyc - LAT][k]) begin
            failures++;
            if (failures < 5) $display("cycle %0d lane %0d: %h expected %h", cyc, k, w[k], hist[cyc-LAT][k]);
          end
        end
      end
      for (int k = 0; k < LN; k++) begin
        longint sr, si;
        sr = 0;
        si = 0;
        for (int a = 0; a < NA; a++) begin
          // mostly small values, sometimes extremes to make the sum wrap
          acc[a][k].re = ($urandom_range(0, 7) == 0) ? MW'($urandom) : MW'(int'($urandom_range(0, 4000)) - 2000);
          acc[a][k].im = ($urandom_range(0, 7) == 0) ? MW'($urandom) : MW'(int'($urandom_range(0, 4000)) - 2000);
          sr += longint'(acc[a][k].re);
          si += longint'(acc[a][k].im);
        end
        sr = longint'(TW'(sr)) >>> 4;   // wrap to 21 bits, drop 4 LSBs
        si = longint'(TW'(si)) >>> 4;
        e[k].re = sr[BW-1:0];
        e[k].im = si[BW-1:0];
      end
      hist.push_back(e);
      #1;
      // the last level is combinational: check it against the registered
      // partial sums only through the pipeline model above
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
