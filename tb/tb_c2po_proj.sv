// tb_c2po_proj -- unit test of the projection unit.
//
// Applies the values around the clipping thresholds (+-0.8 = +-1638/2048),
// zero, extremes and random values, and compares with the projection
// computed in floating point: 1.25*z clipped to [-1, 1], expressed with 5
// fraction bits and rounded down (exact wherever 1.25*z is representable).
module tb_c2po_proj;
  import c2po_pkg::*;

  acc_t z;
  x_t   x;
  logic clip;

  c2po_proj dut (.z_i (z), .x_o (x), .clip_o (clip));

  int checks = 0, failures = 0;
  int n_pos = 0, n_neg = 0, n_lin = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected output part (5 fraction bits) from z part (11 fraction bits)
  function automatic int expect1(int zi, ref int cl);
    real zr, y;
    zr = real'(zi) / 2048.0;
    if (zr > 0.8)       begin cl = 1; n_pos++; return 32; end
    else if (zr < -0.8) begin cl = 1; n_neg++; return -32; end
    n_lin++;
    // z + floor(z/4), then floor to 5 fraction bits
    y = $floor((real'(zi) + $floor(real'(zi) / 4.0)) / 64.0);
    return int'(y);
  endfunction

  task automatic try(int zre, int zim);
    int er, ei, cl = 0;
    z.re = MW'(zre);
    z.im = MW'(zim);
    er = expect1(zre, cl);
    ei = expect1(zim, cl);
    #1;
    checks++;
    if (int'(x.re) != er || int'(x.im) != ei || clip !== 1'(cl)) begin
      failures++;
      if (failures < 8)
        $display("z=(%0d,%0d): x=(%0d,%0d) clip=%0d expected (%0d,%0d) clip=%0d",
                 zre, zim, x.re, x.im, clip, er, ei, cl);
    end
  endtask

  initial begin
    static int edges[] = '{0, 1, -1, 1637, 1638, 1639, -1637, -1638, -1639, 2048,
                    -2048, 131071, -131072, 100, -100, 1000, -1000};
    foreach (edges[i]) foreach (edges[j]) try(edges[i], edges[j]);
    for (int k = 0; k < 2000; k++)
      try(int'($urandom_range(0, 8000)) - 4000, int'($urandom_range(0, 8000)) - 4000);
    checks++;
    if (n_pos == 0 || n_neg == 0 || n_lin == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
