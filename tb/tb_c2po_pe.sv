// tb_c2po_pe -- unit test of one processing element (U = 4, tau = 2^-2).
//
// The testbench acts as the control unit and the neighbours. For each of
// NTRIAL random trials it writes the h-memory, loads a random x(1), checks a
// and b (= tau*x), runs a wide dot product with b fed from a fake neighbour
// through the rotation path, loads a random w, runs a tall sequence (start
// from a, subtract from random neighbour partial sums, add a random
// shift-path term) and finally a projection. Accumulator, a register, b
// register and sign outputs are compared with values computed here from the
// operands, the projection with the reference model's function. A second
// instance with EXTRA = 1 (PE U+1) must copy PE 1's values. Clipped and
// linear projections are counted; both must occur.
module tb_c2po_pe;
  import c2po_pkg::*;

  localparam int U = 4, TS = 2;

  logic       clk = 1'b0;
  ctrl_t      ctrl;
  logic [1:0] raddr = '0, waddr = '0;
  logic       we = 1'b0;
  h_t         wdata = '0;
  x_t         x_init = '0, x_ext = '0;
  b_t         b_nbr = '0, w = '0;
  acc_t       part = '0, chain = '0;
  b_t         b_o, b_e;
  acc_t       acc, prod, acc_e, prod_e;
  x_t         x_next, x_o, x_next_e, x_o_e;
  logic       clip, clip_e, xr, xi, xr_e, xi_e;

  c2po_pe #(.U(U), .TAU_SHIFT(TS), .EXTRA(1'b0)) dut (
    .clk_i (clk), .ctrl_i (ctrl), .raddr_i (raddr), .we_i (we),
    .waddr_i (waddr), .wdata_i (wdata), .x_init_i (x_init), .b_nbr_i (b_nbr),
    .w_i (w), .part_i (part), .chain_i (chain), .x_ext_i (x_ext),
    .b_o (b_o), .acc_o (acc), .prod_o (prod), .x_next_o (x_next),
    .clip_o (clip), .x_o (x_o), .xhat_re_o (xr), .xhat_im_o (xi)
  );

  c2po_pe #(.U(U), .TAU_SHIFT(TS), .EXTRA(1'b1)) dut_extra (
    .clk_i (clk), .ctrl_i (ctrl), .raddr_i (raddr), .we_i (1'b0),
    .waddr_i (waddr), .wdata_i (wdata), .x_init_i (x_init), .b_nbr_i (b_nbr),
    .w_i (w), .part_i (part), .chain_i (chain), .x_ext_i (x_ext),
    .b_o (b_e), .acc_o (acc_e), .prod_o (prod_e), .x_next_o (x_next_e),
    .clip_o (clip_e), .x_o (x_o_e), .xhat_re_o (xr_e), .xhat_im_o (xi_e)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  h_t hm [U];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // product b*h (or b*conj h) truncated by sh bits to 18 bits
  function automatic acc_t pm(b_t bb, h_t hh, bit cj, int sh);
    longint pr, pi;
    acc_t r;
    pr = cj ? longint'(bb.re)*hh.re + longint'(bb.im)*hh.im : longint'(bb.re)*hh.re - longint'(bb.im)*hh.im;
    pi = cj ? longint'(bb.im)*hh.re - longint'(bb.re)*hh.im : longint'(bb.re)*hh.im + longint'(bb.im)*hh.re;
    pr = pr >>> sh;
    pi = pi >>> sh;
    r.re = pr[MW-1:0];
    r.im = pi[MW-1:0];
    return r;
  endfunction

  task automatic step(ctrl_t c, logic [1:0] ra);
    @(negedge clk);
    ctrl = c;
    raddr = ra;
  endtask

  function automatic x_t rand_x();
    x_t r;
    r.re = XW'(int'($urandom_range(0, 254)) - 127);  // |x| < 4 keeps tau*x in range
    r.im = XW'(int'($urandom_range(0, 254)) - 127);
    return r;
  endfunction

  function automatic b_t rand_b(int m);
    b_t r;
    r.re = BW'(int'($urandom_range(0, 2 * m)) - m);
    r.im = BW'(int'($urandom_range(0, 2 * m)) - m);
    return r;
  endfunction

  function automatic b_t tau_ref(x_t xx);
    b_t r;
    r.re = BW'(xx.re) * (1 << (TXF - XF - TS));
    r.im = BW'(xx.im) * (1 << (TXF - XF - TS));
    return r;
  endfunction

  localparam int NTRIAL = 40;
  int n_clip = 0, n_linear = 0;

  initial begin
    ctrl_t c0;
    b_t bseq [U];
    acc_t parts [U + 3];
    acc_t e;
    x_t xnew, x1;
    int nc;
    c0 = '0;
    c0.acc_op = ACC_HOLD;
    ctrl = c0;
    for (int trial = 0; trial < NTRIAL; trial++) begin
      // memory
      for (int j = 0; j < U; j++) begin
        @(negedge clk);
        we = 1'b1; waddr = 2'(j);
        wdata.re = HW'(int'($urandom_range(0, 1000)) - 500);
        wdata.im = HW'(int'($urandom_range(0, 1000)) - 500);
        hm[j] = wdata;
      end
      @(negedge clk);
      we = 1'b0;
      // load x(1)
      x1 = rand_x();
      begin automatic ctrl_t c = c0; c.ld_x = 1'b1; step(c, 2'd0); end
      x_init = x1;
      step(c0, 2'd0);
      x_init = '0;
      #1;
      chk(x_o == x1, "a register after load");
      chk(b_o == tau_ref(x1), "b = tau*x after load");
      chk(x_o_e == x1 && b_e == b_o, "PE U+1 copies PE 1 on load");
      chk(xr == x1.re[XW-1] && xi == x1.im[XW-1], "sign outputs");
      // wide product: operands at cycles 0..U-1 (memory address j, b rotated)
      bseq[0] = b_o;
      for (int j = 1; j < U; j++) bseq[j] = rand_b(1000 + 50000 * (trial % 2));
      // the memory read register needs the address one cycle ahead: it
      // holds address 0 already (raddr = 0 during the previous cycles)
      for (int c = 0; c < U + 2; c++) begin
        ctrl_t cc;
        cc = c0;
        cc.b_rot = (c < U - 1);
        if (c == 2) cc.acc_op = ACC_WIDE_FIRST;
        else if (c > 2) cc.acc_op = ACC_WIDE;
        step(cc, 2'((c + 1) % U));
        b_nbr = (c + 1 < U) ? bseq[c + 1] : rand_b(1000);
        #1;
        if (c < U) chk(b_o == bseq[c] && b_e == bseq[c], "b rotation");
      end
      step(c0, 2'd0);
      e = '0;
      for (int j = 0; j < U; j++) begin
        acc_t p;
        p = pm(bseq[j], hm[j], 0, SHIFT_WIDE);
        e.re += p.re; e.im += p.im;
      end
      #1 chk(acc == e, "wide dot product");
      // load w
      begin automatic ctrl_t cc = c0; cc.b_ld_w = 1'b1; step(cc, 2'd0); end
      w = rand_b(3000 + 60000 * (trial % 3 == 0));
      step(c0, 2'd0);
      #1 chk(b_o == w, "w loaded into b");
      // tall: operand cycles 0..U-1, accumulate 2..U+1, last step U+2
      for (int c = 0; c < U + 3; c++) begin
        ctrl_t cc;
        cc = c0;
        if (c < U) begin cc.mul_conj = 1'b1; cc.mul_tall = 1'b1; end
        if (c == 2) cc.acc_op = ACC_TALL_FIRST;
        else if (c > 2 && c <= U + 1) cc.acc_op = ACC_TALL;
        else if (c == U + 2) cc.acc_op = ACC_TALL_LAST;
        step(cc, 2'((c + 1) % U));
        parts[c] = rand_b(2000);
        part = parts[c];
        chain = rand_b(300);
        #1;
        if (c >= 3 && c <= U + 2) begin
          acc_t p;
          p = pm(w, hm[c - 3], 1, SHIFT_TALL);
          // accumulator after the previous edge
          if (c == 3) begin
            e.re = (MW'(x1.re) <<< 6) - p.re;
            e.im = (MW'(x1.im) <<< 6) - p.im;
          end else begin
            e.re = parts[c - 1].re - p.re;
            e.im = parts[c - 1].im - p.im;
          end
          chk(acc == e, $sformatf("tall accumulation step %0d", c - 3));
        end
        if (c == U + 2) begin
          e.re = parts[c].re + chain.re;
          e.im = parts[c].im + chain.im;
        end
      end
      step(c0, 2'd0);
      #1 chk(acc == e, "tall last step adds the shift-path term");
      // projection of z = acc
      nc = 0;
      xnew.re = XW'(tb_c2po_ref_pkg::proj1(acc.re, nc) >>> (PF - XF));
      xnew.im = XW'(tb_c2po_ref_pkg::proj1(acc.im, nc) >>> (PF - XF));
      if (nc > 0) n_clip++; else n_linear++;
      chk(x_next == xnew && clip == (nc > 0), "projection result and clip flag");
      x_ext = rand_x();
      begin automatic ctrl_t cc = c0; cc.proj = 1'b1; step(cc, 2'd0); end
      step(c0, 2'd0);
      #1;
      chk(x_o == xnew, "a <= x(t+1)");
      chk(b_o == tau_ref(xnew), "b <= tau*x(t+1)");
      chk(xr == xnew.re[XW-1] && xi == xnew.im[XW-1], "sign outputs after projection");
      chk(x_o_e == x_ext && b_e == tau_ref(x_ext), "PE U+1 takes PE 1's next iterate");
    end
    checks++;
    if (n_clip == 0 || n_linear == 0) begin
      failures++;
      $display("FAIL: projection regions not both exercised (clip %0d, linear %0d)", n_clip, n_linear);
    end
    $display("projections: %0d clipped, %0d linear", n_clip, n_linear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
