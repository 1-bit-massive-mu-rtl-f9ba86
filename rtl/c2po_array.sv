// c2po_array -- one linear array of U+1 PEs of the C2PO precoder.
//
// Array w works on the sub-matrix H~_w (U+1 rows, U columns) of the
// augmented channel matrix Hbar = [H; v^H] and on the sub-vector x~_w of U
// entries. PEs 1..U form a ring: in the wide product PE u takes b from PE
// u+1 (PE U from PE 1), so every tau*x entry visits every PE once; in the
// tall product PE u takes the partial sum (accumulator) of PE u+1, again with
// PE U fed by PE 1. PE U+1 computes the last row of the wide product with the
// same operand as PE 1, and in the tall product sends its products
// conj(Hbar[U+1,k])*w_{U+1} down a chain of registers (PE U+1 -> PE U ->
// ... -> PE 1), one hop per cycle, so that the term for z_u reaches PE u in
// the last tall cycle.
//
// Memory layout (paper): PE u (u <= U) stores H~_w[u,u] at address 0,
// H~_w[u,u+1] at address 1, and so on with wrap-around; PE U+1 stores
// H~_w[U+1,k] at address k-1. The write port takes the logical row and
// column (0-based) and computes the rotated address; this port is the
// design's own. Writes must not coincide with a running operation.
//
// Interface timing: see c2po_ctrl. acc_o goes to the adder tree; w_i comes
// back from it and is written into b in cycle U+1+L.
module c2po_array
  import c2po_pkg::*;
#(
  parameter int unsigned U         = 16,
  parameter int unsigned L         = 4,
  parameter int unsigned TAU_SHIFT = 5,
  parameter int unsigned TMAXW     = 8,
  localparam int unsigned AW       = (U > 1) ? $clog2(U) : 1,
  localparam int unsigned RW       = $clog2(U + 1)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             start_i,
  input  logic [TMAXW-1:0] t_max_i,
  output logic             busy_o,
  output logic             done_o,
  // h-memory write port: row 0..U, column 0..U-1 of H~_w
  input  logic             we_i,
  input  logic [RW-1:0]    wrow_i,
  input  logic [AW-1:0]    wcol_i,
  input  h_t               wdata_i,
  // data
  input  x_t               x_init_i [U],
  input  b_t               w_i      [U+1],
  output acc_t             acc_o    [U+1],
  output x_t               x_o      [U],
  output logic             xhat_re_o[U],
  output logic             xhat_im_o[U],
  output logic             clip_o
);

  ctrl_t         ctrl;
  logic [AW-1:0] raddr;

  c2po_ctrl #(.U(U), .L(L), .TMAXW(TMAXW)) u_ctrl (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .start_i (start_i),
    .t_max_i (t_max_i),
    .ctrl_o  (ctrl),
    .raddr_o (raddr),
    .busy_o  (busy_o),
    .done_o  (done_o)
  );

  // rotated write address: (col - row) mod U for rows 0..U-1, col for row U
  logic [AW-1:0] waddr;
  always_comb begin
    if (int'(wrow_i) < U) waddr = AW'((int'(wcol_i) + U - int'(wrow_i)) % U);
    else                  waddr = wcol_i;
  end

  b_t   b      [U+1];
  acc_t acc    [U+1];
  acc_t prod   [U+1];
  x_t   x_next [U+1];
  x_t   x_pe   [U+1];
  logic xr     [U+1];
  logic xi     [U+1];
  logic clip   [U+1];
  acc_t chain_q[U];

  for (genvar u = 0; u <= U; u++) begin : g_pe
    localparam bit IS_EXTRA = (u == U);
    localparam int NXT      = IS_EXTRA ? 1 % U : (u + 1) % U;

    c2po_pe #(.U(U), .TAU_SHIFT(TAU_SHIFT), .EXTRA(IS_EXTRA)) u_pe (
      .clk_i     (clk_i),
      .ctrl_i    (ctrl),
      .raddr_i   (raddr),
      .we_i      (we_i && (int'(wrow_i) == u)),
      .waddr_i   (waddr),
      .wdata_i   (wdata_i),
      .x_init_i  (x_init_i[IS_EXTRA ? 0 : u]),
      .b_nbr_i   (b[NXT]),
      .w_i       (w_i[u]),
      .part_i    (acc[IS_EXTRA ? 0 : (u + 1) % U]),
      .chain_i   (chain_q[IS_EXTRA ? 0 : u]),
      .x_ext_i   (x_next[0]),
      .b_o       (b[u]),
      .acc_o     (acc[u]),
      .prod_o    (prod[u]),
      .x_next_o  (x_next[u]),
      .clip_o    (clip[u]),
      .x_o       (x_pe[u]),
      .xhat_re_o (xr[u]),
      .xhat_im_o (xi[u])
    );

    assign acc_o[u] = acc[u];
    if (!IS_EXTRA) begin : g_out
      assign x_o[u]       = x_pe[u];
      assign xhat_re_o[u] = xr[u];
      assign xhat_im_o[u] = xi[u];
    end
  end

  // shift path for the PE U+1 products
  always_ff @(posedge clk_i) begin
    chain_q[U-1] <= prod[U];
    for (int k = 0; k < U - 1; k++) chain_q[k] <= chain_q[k+1];
  end

  // a projection clipped some entry of this array (observation only)
  always_comb begin
    clip_o = 1'b0;
    for (int k = 0; k < U; k++) clip_o |= clip[k];
    clip_o &= ctrl.proj;
  end

endmodule
