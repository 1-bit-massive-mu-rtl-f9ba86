// tb_c2po_array -- test of one linear array (U = 8 users, L = 1).
//
// A single array with the testbench playing the adder tree: w_i is the
// array's own accumulator output truncated to the b format, which is what
// the tree returns when the other arrays contribute zero. With NA = 1 the
// bit-exact reference model then describes the array alone. Random channel
// rows (U+1) x U are written through the array's write port (which applies
// the rotated address layout), and operations with 1, 2 and 5 iterations
// are compared entry by entry, together with the cycle count (2U+L+6 = 23
// per iteration).
module tb_c2po_array;
  import c2po_pkg::*;
  import tb_c2po_ref_pkg::*;

  localparam int U = 8, L = 1, TS = 3;
  localparam int N = 2*U + L + 6;

  logic       clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [7:0] t_max = '0;
  logic       busy, done, clip;
  logic       we = 1'b0;
  logic [3:0] wrow = '0;
  logic [2:0] wcol = '0;
  h_t         wdata = '0;
  x_t         x_init [U];
  b_t         w      [U+1];
  acc_t       acc    [U+1];
  x_t         x_out  [U];
  logic       xr [U];
  logic       xi [U];

  c2po_array #(.U(U), .L(L), .TAU_SHIFT(TS), .TMAXW(8)) dut (
    .clk_i (clk), .rst_ni (rst_n), .start_i (start), .t_max_i (t_max),
    .busy_o (busy), .done_o (done), .we_i (we), .wrow_i (wrow),
    .wcol_i (wcol), .wdata_i (wdata), .x_init_i (x_init), .w_i (w),
    .acc_o (acc), .x_o (x_out), .xhat_re_o (xr), .xhat_im_o (xi),
    .clip_o (clip)
  );

  // single-array adder tree
  always_comb
    for (int k = 0; k <= U; k++) begin
      logic signed [TW-1:0] tr, ti;
      tr = TW'(acc[k].re) >>> (TF - BF);
      ti = TW'(acc[k].im) >>> (TF - BF);
      w[k].re = tr[BW-1:0];
      w[k].im = ti[BW-1:0];
    end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  h_t hb[];
  x_t x1[];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int tm);
    x_t xe[];
    int cyc = 0;
    xe = new[U];
    foreach (xe[b]) xe[b] = x1[b];
    for (int t = 0; t < tm; t++) void'(ref_iter(hb, U, U, TS, xe));
    @(negedge clk);
    foreach (x_init[b]) x_init[b] = x1[b];
    start = 1'b1;
    t_max = 8'(tm);
    @(posedge clk);
    #1 start = 1'b0;
    while (!done) begin
      @(posedge clk);
      #1 cyc++;
    end
    checks++;
    if (cyc != tm * N) begin
      failures++;
      $display("t_max=%0d: %0d cycles, expected %0d", tm, cyc, tm * N);
    end
    for (int b = 0; b < U; b++) begin
      checks++;
      if (x_out[b] !== xe[b] || xr[b] !== xe[b].re[XW-1] || xi[b] !== xe[b].im[XW-1]) begin
        failures++;
        if (failures < 10)
          $display("t_max=%0d entry %0d: (%0d,%0d) expected (%0d,%0d)", tm, b,
                   x_out[b].re, x_out[b].im, xe[b].re, xe[b].im);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 3; rep++) begin
      hb = new[(U+1)*U];
      x1 = new[U];
      foreach (hb[i]) hb[i] = rand_h(U);
      foreach (x1[b]) begin
        x1[b].re = XW'(int'($urandom_range(0, 80)) - 40);
        x1[b].im = XW'(int'($urandom_range(0, 80)) - 40);
      end
      for (int r = 0; r <= U; r++)
        for (int c = 0; c < U; c++) begin
          @(negedge clk);
          we = 1'b1;
          wrow = 4'(r);
          wcol = 3'(c);
          wdata = hb[r*U + c];
        end
      @(negedge clk);
      we = 1'b0;
      run(1);
      run(2);
      run(5);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
