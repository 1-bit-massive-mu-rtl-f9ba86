// c2po_top -- C2PO 1-bit massive MU-MIMO precoder (see README.md).
//
// Given the channel H (U x B), the symbol vector s and the MRT vector
// x(1) = H^H s, C2PO iterates
//     z(t+1) = x(t) - tau * Hbar_T * Hbar * x(t),   Hbar = [H; v^H],
//     x(t+1) = prox(z(t+1)),                        v = H^H s / ||s||
// (Hbar_T = [H^H, -v]) for t_max iterations and sends the sign bits of
// x(t_max+1) to the 1-bit DACs. The hardware splits the B antennas into
// NA = B/U linear arrays of U+1 PEs. Each iteration computes the "wide"
// product w = Hbar (tau x) column by column in the arrays, sums the NA
// partial results in a pipelined adder tree, broadcasts w back, computes the
// "tall" product z = x - Hbar_T w with partial sums circulating in each
// array, and projects. One iteration takes 2U + log2(B/U) + 6 cycles.
//
// Parameters: B antennas, U users (B/U a power of two, at least 2), the step
// size tau = 2^-TAU_SHIFT, TMAXW bits for the iteration count.
// Interface: Hbar is written one entry per cycle through h_* (row 0..U-1 are
// H, row U is v^H, column 0..B-1), before start_i. start_i (in idle, busy_o
// low) loads x_init_i = x(1) and starts t_max_i iterations; done_o pulses
// one cycle after the last projection, when x_o and the sign bits
// xhat_re_o/xhat_im_o (1 = negative) hold the result; they stay valid until
// the next start. The computation of Hbar and x(1) is not part of this
// block. Everything about numbers and cycles follows the paper; the ports,
// the handshake and the value of TAU_SHIFT are choices of this design.
// rst_ni (active low) resets the control units asynchronously; the datapath
// needs no reset. The same signal also disables the handshake assertion
// below; lint reports this as a signal used both asynchronously and
// synchronously, which is harmless because the assertion builds no logic.
module c2po_top
  import c2po_pkg::*;
#(
  parameter int unsigned B         = 256,
  parameter int unsigned U         = 16,
  parameter int unsigned TAU_SHIFT = 5,
  parameter int unsigned TMAXW     = 8,
  localparam int unsigned NA       = B / U,
  localparam int unsigned L        = $clog2(NA),
  localparam int unsigned RW       = $clog2(U + 1),
  localparam int unsigned CLW      = $clog2(B)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // Hbar write port
  input  logic             h_we_i,
  input  logic [RW-1:0]    h_row_i,
  input  logic [CLW-1:0]   h_col_i,
  input  h_t               h_data_i,
  // operation
  input  logic             start_i,
  input  logic [TMAXW-1:0] t_max_i,
  input  x_t               x_init_i [B],
  output logic             busy_o,
  output logic             done_o,
  output x_t               x_o      [B],
  output logic             xhat_re_o[B],
  output logic             xhat_im_o[B],
  output logic             clip_o          // a projection clipped an entry
);

  localparam int unsigned AW = (U > 1) ? $clog2(U) : 1;

  acc_t acc  [NA][U+1];
  b_t   w    [U+1];
  logic busy [NA];
  logic done [NA];
  logic clip [NA];

  c2po_addtree #(.NA(NA), .LANES(U + 1)) u_tree (
    .clk_i (clk_i),
    .acc_i (acc),
    .w_o   (w)
  );

  for (genvar a = 0; a < NA; a++) begin : g_arr
    x_t   xi [U];
    x_t   xo [U];
    logic xr [U];
    logic xim[U];

    for (genvar u = 0; u < U; u++) begin : g_map
      assign xi[u]              = x_init_i[a*U + u];
      assign x_o[a*U + u]       = xo[u];
      assign xhat_re_o[a*U + u] = xr[u];
      assign xhat_im_o[a*U + u] = xim[u];
    end

    c2po_array #(.U(U), .L(L), .TAU_SHIFT(TAU_SHIFT), .TMAXW(TMAXW)) u_array (
      .clk_i     (clk_i),
      .rst_ni    (rst_ni),
      .start_i   (start_i),
      .t_max_i   (t_max_i),
      .busy_o    (busy[a]),
      .done_o    (done[a]),
      .we_i      (h_we_i && (int'(h_col_i) / U == a)),
      .wrow_i    (h_row_i),
      .wcol_i    (AW'(int'(h_col_i) % U)),
      .wdata_i   (h_data_i),
      .x_init_i  (xi),
      .w_i       (w),
      .acc_o     (acc[a]),
      .x_o       (xo),
      .xhat_re_o (xr),
      .xhat_im_o (xim),
      .clip_o    (clip[a])
    );
  end

  // the arrays run in lockstep; array 0 reports the status
  assign busy_o = busy[0];
  assign done_o = done[0];

  always_comb begin
    clip_o = 1'b0;
    for (int a = 0; a < NA; a++) clip_o |= clip[a];
  end

`ifndef SYNTHESIS
  // Hbar must not change while an operation runs
  a_no_write_busy: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                    !(h_we_i && busy_o));
  // parameters the architecture requires
  initial begin
    assert (B % U == 0 && NA >= 2 && (1 << L) == NA)
      else $error("B/U must be a power of two and at least 2");
    assert (TAU_SHIFT >= 1 && TAU_SHIFT <= TXF - XF)
      else $error("TAU_SHIFT must be in 1 .. %0d", TXF - XF);
  end
`endif

endmodule
