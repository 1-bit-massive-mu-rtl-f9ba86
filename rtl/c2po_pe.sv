// c2po_pe -- processing element of a C2PO linear array.
//
// A PE holds one entry of the current iterate x in its "a" register and the
// MAC input operand in its "b" register, one row of the array's sub-matrix in
// its h-memory, a complex MAC unit and a projection unit. Its role in each
// phase of an iteration (the control word comes from the array's control
// unit):
//   load:       a <= x(1), b <= tau*x(1)
//   wide:       b rotates (b <= b of PE u+1); MAC accumulates h*b
//   tree:       accumulator feeds the adder tree; b <= w_u when w is ready
//   tall:       MAC computes conj(h)*w_u; the accumulator takes the partial
//               sum of the neighbour and subtracts the product, and in the
//               last step adds the PE U+1 term from the shift path
//   projection: a, b <= x(t+1) = prox(acc), tau*x(t+1)
// tau = 2^-TAU_SHIFT, so tau*x is a shifted copy of x.
//
// EXTRA = 1 builds PE U+1: it has no entry of x of its own and copies into
// a and b what PE 1 loads (x_ext_i / x_init_i are wired to PE 1's values by
// the array), so that its b always equals PE 1's, as the paper requires.
// Its xhat outputs are not used.
//
// The outputs xhat_*_o are the sign bits of x (1 = negative, i.e. -l), the
// bits sent to the 1-bit DACs. In the paper's figure an extra output register
// holds x(t+1); here the a register, which always holds the same value,
// drives the outputs directly.
module c2po_pe
  import c2po_pkg::*;
#(
  parameter int unsigned U         = 16,
  parameter int unsigned TAU_SHIFT = 5,
  parameter bit          EXTRA     = 1'b0,
  localparam int unsigned AW       = (U > 1) ? $clog2(U) : 1
) (
  input  logic          clk_i,
  input  ctrl_t         ctrl_i,
  input  logic [AW-1:0] raddr_i,
  input  logic          we_i,
  input  logic [AW-1:0] waddr_i,
  input  h_t            wdata_i,
  input  x_t            x_init_i,
  input  b_t            b_nbr_i,     // b register of PE u+1
  input  b_t            w_i,         // entry of w from the adder tree
  input  acc_t          part_i,      // accumulator of PE u+1
  input  acc_t          chain_i,     // PE U+1 term on the shift path
  input  x_t            x_ext_i,     // next iterate of PE 1 (EXTRA only)
  output b_t            b_o,
  output acc_t          acc_o,
  output acc_t          prod_o,
  output x_t            x_next_o,    // projection result (combinational)
  output logic          clip_o,
  output x_t            x_o,
  output logic          xhat_re_o,
  output logic          xhat_im_o
);

  h_t   h_rd;
  x_t   a_q, x_proj, x_new;
  b_t   b_q;
  acc_t a_init;

  c2po_hmem #(.DEPTH(U)) u_hmem (
    .clk_i   (clk_i),
    .we_i    (we_i),
    .waddr_i (waddr_i),
    .wdata_i (wdata_i),
    .raddr_i (raddr_i),
    .rdata_o (h_rd)
  );

  // a register in accumulator (tall) format: 5 -> 11 fraction bits
  assign a_init.re = MW'(a_q.re) <<< (MF_TALL - XF);
  assign a_init.im = MW'(a_q.im) <<< (MF_TALL - XF);

  c2po_cmac u_cmac (
    .clk_i    (clk_i),
    .b_i      (b_q),
    .h_i      (h_rd),
    .conj_i   (ctrl_i.mul_conj),
    .tall_i   (ctrl_i.mul_tall),
    .acc_op_i (ctrl_i.acc_op),
    .a_init_i (a_init),
    .nbr_i    (part_i),
    .chain_i  (chain_i),
    .prod_o   (prod_o),
    .acc_o    (acc_o)
  );

  c2po_proj u_proj (
    .z_i    (acc_o),
    .x_o    (x_proj),
    .clip_o (clip_o)
  );

  assign x_new = EXTRA ? x_ext_i : x_proj;

  always_ff @(posedge clk_i) begin
    if (ctrl_i.ld_x) begin
      a_q <= x_init_i;
      b_q <= tau_x(x_init_i, TAU_SHIFT);
    end else if (ctrl_i.proj) begin
      a_q <= x_new;
      b_q <= tau_x(x_new, TAU_SHIFT);
    end else if (ctrl_i.b_ld_w) begin
      b_q <= w_i;
    end else if (ctrl_i.b_rot) begin
      b_q <= b_nbr_i;
    end
  end

  assign b_o       = b_q;
  assign x_next_o  = x_proj;
  assign x_o       = a_q;
  assign xhat_re_o = a_q.re[XW-1];
  assign xhat_im_o = a_q.im[XW-1];

endmodule
