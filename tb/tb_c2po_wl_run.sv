// tb_c2po_wl_run -- one precoding workload on a C2PO instance of size B x U.
//
// Helper of tb_c2po_workloads. Generates NCH random i.i.d. Rayleigh channels
// (entry variance 1/U) and symbol vectors (BPSK, or 16-QAM when QAM16 = 1),
// computes x(1) = H^H s and v = H^H s/||s|| in floating point, writes
// Hbar, runs t_max = TMAX iterations and checks (1) the output against the
// bit-exact reference model, (2) the iteration latency 2U+log2(B/U)+6 and
// (3) that the precoder reduces the noiseless MSE of the 1-bit transmit
// vector, min_beta ||s - beta H xhat||^2, compared with quantised MRT
// (t_max = 0), on average over the channels.
module tb_c2po_wl_run
  import c2po_pkg::*;
  import tb_c2po_ref_pkg::*;
#(
  parameter int B     = 32,
  parameter int U     = 16,
  parameter int TS    = 3,
  parameter bit QAM16 = 1'b0,
  parameter int TMAX  = 24,
  parameter int NCH   = 4
) (
  output logic finished,
  output int   checks,
  output int   failures
);

  localparam int NA = B / U;
  localparam int N  = 2*U + $clog2(NA) + 6;

  logic                   clk = 1'b0;
  logic                   rst_n = 1'b0;
  logic                   h_we = 1'b0;
  logic [$clog2(U+1)-1:0] h_row = '0;
  logic [$clog2(B)-1:0]   h_col = '0;
  h_t                     h_data = '0;
  logic                   start = 1'b0;
  logic [7:0]             t_max = '0;
  x_t                     x_init [B];
  logic                   busy, done, clip;
  x_t                     x_out [B];
  logic                   xr [B];
  logic                   xi [B];

  c2po_top #(.B(B), .U(U), .TAU_SHIFT(TS)) dut (
    .clk_i (clk), .rst_ni (rst_n), .h_we_i (h_we), .h_row_i (h_row),
    .h_col_i (h_col), .h_data_i (h_data), .start_i (start), .t_max_i (t_max),
    .x_init_i (x_init), .busy_o (busy), .done_o (done), .x_o (x_out),
    .xhat_re_o (xr), .xhat_im_o (xi), .clip_o (clip)
  );

  always #5 clk = ~clk;

  real hr[U][B], hi[U][B], sr[U], si[U];
  h_t  hb[];
  x_t  x1[];

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  function automatic logic signed [15:0] q(real v, int frac);
    return 16'($floor(v * real'(1 << frac)));
  endfunction

  function automatic real sym();
    if (!QAM16) return ($urandom_range(0, 1) != 0) ? 1.0 : -1.0;
    return (real'(2 * int'($urandom_range(0, 3)) - 3)) / $sqrt(10.0);
  endfunction

  task automatic make_channel();
    real ns = 0.0;
    hb = new[(U+1)*B];
    x1 = new[B];
    for (int u = 0; u < U; u++) begin
      sr[u] = sym();
      si[u] = QAM16 ? sym() : 0.0;
      ns += sr[u]*sr[u] + si[u]*si[u];
      for (int b = 0; b < B; b++) begin
        hr[u][b] = gauss() * $sqrt(0.5 / real'(U));
        hi[u][b] = gauss() * $sqrt(0.5 / real'(U));
        hb[u*B + b].re = HW'(q(hr[u][b], HF));
        hb[u*B + b].im = HW'(q(hi[u][b], HF));
      end
    end
    for (int b = 0; b < B; b++) begin
      real a = 0.0, c = 0.0;
      for (int u = 0; u < U; u++) begin
        a += hr[u][b]*sr[u] + hi[u][b]*si[u];
        c += hr[u][b]*si[u] - hi[u][b]*sr[u];
      end
      x1[b].re = XW'(q(a, XF));
      x1[b].im = XW'(q(c, XF));
      hb[U*B + b].re = HW'(q(a / $sqrt(ns), HF));
      hb[U*B + b].im = HW'(q(-c / $sqrt(ns), HF));
    end
  endtask

  // min over complex beta of ||s - beta H xhat||^2 / ||s||^2, xhat = +-1+-1j
  function automatic real mse(logic sgr[B], logic sgi[B]);
    real yr[U], yi[U];
    real yy = 0.0, syr = 0.0, syi = 0.0, ss = 0.0;
    for (int u = 0; u < U; u++) begin
      yr[u] = 0.0; yi[u] = 0.0;
      for (int b = 0; b < B; b++) begin
        real xre = sgr[b] ? -1.0 : 1.0;
        real xim = sgi[b] ? -1.0 : 1.0;
        yr[u] += hr[u][b]*xre - hi[u][b]*xim;
        yi[u] += hr[u][b]*xim + hi[u][b]*xre;
      end
      yy  += yr[u]*yr[u] + yi[u]*yi[u];
      syr += yr[u]*sr[u] + yi[u]*si[u];   // Re(y^H s)
      syi += yr[u]*si[u] - yi[u]*sr[u];   // Im(y^H s)
      ss  += sr[u]*sr[u] + si[u]*si[u];
    end
    return 1.0 - (syr*syr + syi*syi) / (yy * ss);
  endfunction

  task automatic run(int tm, output real m);
    x_t xe[];
    logic sgr[B], sgi[B];
    int cyc = 0;
    xe = new[B];
    foreach (xe[b]) xe[b] = x1[b];
    for (int t = 0; t < tm; t++) void'(ref_iter(hb, B, U, TS, xe));
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
      $display("B=%0d t_max=%0d: %0d cycles, expected %0d", B, tm, cyc, tm * N);
    end
    checks++;
    for (int b = 0; b < B; b++)
      if (x_out[b] !== xe[b] || xr[b] !== xe[b].re[XW-1] || xi[b] !== xe[b].im[XW-1]) begin
        failures++;
        $display("B=%0d t_max=%0d: mismatch at antenna %0d", B, tm, b);
        break;
      end
    foreach (sgr[b]) begin sgr[b] = xr[b]; sgi[b] = xi[b]; end
    m = mse(sgr, sgi);
  endtask

  initial begin
    real m0, m1, sum0 = 0.0, sum1 = 0.0;
    finished = 1'b0;
    checks = 0;
    failures = 0;
    foreach (x_init[b]) x_init[b] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int ch = 0; ch < NCH; ch++) begin
      make_channel();
      for (int r = 0; r <= U; r++)
        for (int b = 0; b < B; b++) begin
          @(negedge clk);
          h_we = 1'b1;
          h_row = ($clog2(U+1))'(r);
          h_col = ($clog2(B))'(b);
          h_data = hb[r*B + b];
        end
      @(negedge clk);
      h_we = 1'b0;
      run(0, m0);
      run(TMAX, m1);
      sum0 += m0;
      sum1 += m1;
    end
    checks++;
    if (!(sum1 < sum0)) failures++;
    $display("B=%0d U=%0d %s t_max=%0d: %0d cycles/iteration, normalised MSE MRT-Q %.4f, C2PO %.4f",
             B, U, QAM16 ? "16-QAM" : "BPSK", TMAX, N, sum0 / NCH, sum1 / NCH);
    finished = 1'b1;
  end

endmodule
