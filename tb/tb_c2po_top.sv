// tb_c2po_top -- end-to-end test of the C2PO precoder at its default size
// (B = 256 antennas, U = 16 users, tau = 2^-5).
//
// Builds a random i.i.d. Rayleigh channel H (entry variance 1/U) and QPSK
// symbols s, computes in floating point x(1) = H^H s and v = H^H s/||s||,
// quantises them to the hardware formats, writes Hbar = [H; v^H] through
// the write port and runs operations with t_max = 1, 3, 0 and 24 (the
// iteration count of the paper's simulations) on two channel realisations.
// After each operation x_o and the sign outputs are compared with the
// bit-exact reference model, and the number of cycles from start to done is
// checked against t_max * (2U + log2(B/U) + 6), i.e. 42 cycles per
// iteration at this size. It also counts how often each mechanism occurred:
// iterations run (wide product, adder tree, tall product), clipped and
// linear-region projections, the t_max = 0 (MRT-Q) bypass, and busy-start
// rejection; a mechanism that never occurred counts as a failure.
module tb_c2po_top;
  import c2po_pkg::*;
  import tb_c2po_ref_pkg::*;

  localparam int B  = 256;
  localparam int U  = 16;
  localparam int TS = 5;
  localparam int NA = B / U;
  localparam int L  = $clog2(NA);
  localparam int N  = 2*U + L + 6;

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic                 h_we = 1'b0;
  logic [$clog2(U+1)-1:0] h_row = '0;
  logic [$clog2(B)-1:0] h_col = '0;
  h_t                   h_data = '0;
  logic                 start = 1'b0;
  logic [7:0]           t_max = '0;
  x_t                   x_init [B];
  logic                 busy, done, clip;
  x_t                   x_out [B];
  logic                 xr [B];
  logic                 xi [B];

  c2po_top dut (
    .clk_i     (clk),
    .rst_ni    (rst_n),
    .h_we_i    (h_we),
    .h_row_i   (h_row),
    .h_col_i   (h_col),
    .h_data_i  (h_data),
    .start_i   (start),
    .t_max_i   (t_max),
    .x_init_i  (x_init),
    .busy_o    (busy),
    .done_o    (done),
    .x_o       (x_out),
    .xhat_re_o (xr),
    .xhat_im_o (xi),
    .clip_o    (clip)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_iter = 0, n_clip = 0, n_lin = 0, n_bypass = 0, n_clip_hw = 0;
  int n_busy_reject = 0;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (clip) n_clip_hw++;

  h_t hb[];
  x_t x1[];

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  function automatic logic signed [15:0] q(real v, int frac);
    return 16'($floor(v * real'(1 << frac)));
  endfunction

  task automatic make_channel();
    real hr[U][B], hi[U][B];
    real sr[U], si[U];
    real ns = 0.0;
    hb = new[(U+1)*B];
    x1 = new[B];
    for (int u = 0; u < U; u++) begin
      sr[u] = ($urandom_range(0, 1) != 0) ? 0.70710678 : -0.70710678;
      si[u] = ($urandom_range(0, 1) != 0) ? 0.70710678 : -0.70710678;
      ns += sr[u]*sr[u] + si[u]*si[u];
      for (int b = 0; b < B; b++) begin
        hr[u][b] = gauss() * $sqrt(0.5 / real'(U));
        hi[u][b] = gauss() * $sqrt(0.5 / real'(U));
        hb[u*B + b].re = HW'(q(hr[u][b], HF));
        hb[u*B + b].im = HW'(q(hi[u][b], HF));
      end
    end
    for (int b = 0; b < B; b++) begin
      real xr0 = 0.0, xi0 = 0.0;
      for (int u = 0; u < U; u++) begin   // (H^H s)_b = sum conj(H_ub) s_u
        xr0 += hr[u][b]*sr[u] + hi[u][b]*si[u];
        xi0 += hr[u][b]*si[u] - hi[u][b]*sr[u];
      end
      x1[b].re = XW'(q(xr0, XF));
      x1[b].im = XW'(q(xi0, XF));
      // row U of Hbar is v^H = conj(H^H s)/||s||
      hb[U*B + b].re = HW'(q(xr0 / $sqrt(ns), HF));
      hb[U*B + b].im = HW'(q(-xi0 / $sqrt(ns), HF));
    end
  endtask

  task automatic write_hbar();
    for (int r = 0; r <= U; r++)
      for (int b = 0; b < B; b++) begin
        @(negedge clk);
        h_we   = 1'b1;
        h_row  = ($clog2(U+1))'(r);
        h_col  = ($clog2(B))'(b);
        h_data = hb[r*B + b];
      end
    @(negedge clk);
    h_we = 1'b0;
  endtask

  task automatic run_op(int tm);
    x_t xr_ref[];
    int cyc = 0;
    int ok = 1;
    xr_ref = new[B];
    foreach (x1[b]) begin
      xr_ref[b] = x1[b];
      x_init[b] = x1[b];
    end
    for (int t = 0; t < tm; t++) begin
      int nc = ref_iter(hb, B, U, TS, xr_ref);
      n_clip += nc;
      n_lin  += 2*B - nc;
      n_iter++;
    end
    if (tm == 0) n_bypass++;
    @(negedge clk);
    start = 1'b1;
    t_max = 8'(tm);
    @(posedge clk);
    #1 start = 1'b0;
    // a second start while busy must be ignored
    if (tm > 0) begin
      @(negedge clk);
      start = 1'b1;
      @(posedge clk);
      #1 start = 1'b0;
      cyc++;
      n_busy_reject++;
    end
    while (!done) begin
      @(posedge clk);
      #1 cyc++;
    end
    checks++;
    if (cyc != tm * N) begin
      failures++;
      $display("t_max=%0d: %0d cycles from start to done, expected %0d", tm, cyc, tm*N);
    end
    for (int b = 0; b < B; b++) begin
      checks++;
      if (x_out[b] !== xr_ref[b] || xr[b] !== xr_ref[b].re[XW-1] ||
          xi[b] !== xr_ref[b].im[XW-1]) begin
        failures++;
        ok = 0;
        if (failures < 10)
          $display("t_max=%0d antenna %0d: got (%0d,%0d) expected (%0d,%0d)", tm, b,
                   x_out[b].re, x_out[b].im, xr_ref[b].re, xr_ref[b].im);
      end
    end
    $display("t_max=%0d: %0d cycles, outputs %s", tm, cyc, ok ? "match" : "MISMATCH");
    // outputs hold after done
    repeat (3) @(posedge clk);
    #1 checks++;
    if (x_out[0] !== xr_ref[0]) failures++;
  endtask

  initial begin
    foreach (x_init[b]) x_init[b] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int ch = 0; ch < 2; ch++) begin
      make_channel();
      write_hbar();
      run_op(1);
      run_op(3);
      run_op(0);
      if (ch == 0) run_op(24);
    end
    // every mechanism must have occurred
    checks += 6;
    if (n_iter == 0)        begin failures++; $display("no iteration ran"); end
    if (n_clip == 0)        begin failures++; $display("no clipping occurred"); end
    if (n_clip_hw == 0)     begin failures++; $display("clip_o never pulsed"); end
    if (n_lin == 0)         begin failures++; $display("no linear-region projection"); end
    if (n_bypass == 0)      begin failures++; $display("no t_max=0 operation"); end
    if (n_busy_reject == 0) begin failures++; $display("no start while busy"); end
    $display("iterations=%0d clipped=%0d linear=%0d bypass=%0d busy_starts=%0d",
             n_iter, n_clip, n_lin, n_bypass, n_busy_reject);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
