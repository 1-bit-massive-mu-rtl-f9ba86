// c2po_pkg -- shared number formats and types of the C2PO 1-bit precoder.
//
// All arithmetic is two's-complement fixed point. Adders and multipliers wrap
// on overflow and every resize drops LSBs (truncation towards minus infinity),
// as in the reference FPGA design. The word lengths below are the published
// ones; the 18-bit width of the MAC input register "b" (which holds tau*x in
// the wide product and w in the tall product) and its 11 fraction bits are a
// choice of this design, picked so that one register and one multiplier serve
// both products.
package c2po_pkg;

  // x(t): 12-bit signed, 5 fraction bits
  localparam int XW = 12;
  localparam int XF = 5;
  // tau*x(t): 12-bit signed, 11 fraction bits
  localparam int TXW = 12;
  localparam int TXF = 11;
  // entries of the augmented channel matrix: 10-bit, 8 fraction bits
  localparam int HW = 10;
  localparam int HF = 8;
  // MAC input register b: 18 bits, 11 fraction bits (design choice)
  localparam int BW = 18;
  localparam int BF = 11;
  // MAC accumulator: 18 bits, 15 fraction bits (wide) / 11 (tall)
  localparam int MW = 18;
  localparam int MF_WIDE = 15;
  localparam int MF_TALL = 11;
  // projection unit: 18 bits, 11 fraction bits
  localparam int PW = 18;
  localparam int PF = 11;
  // adder tree: 21 bits, 15 fraction bits
  localparam int TW = 21;
  localparam int TF = 15;

  // full-precision product of b (BF) and h (HF): BF+HF = 19 fraction bits
  localparam int PRODW = BW + HW + 1;
  localparam int SHIFT_WIDE = BF + HF - MF_WIDE;  // 4
  localparam int SHIFT_TALL = BF + HF - MF_TALL;  // 8

  // projection constants in PF format: +1.0 and the clipping threshold 0.8
  localparam logic signed [PW-1:0] PROJ_ONE = PW'(1 << PF);          // 2048
  localparam logic signed [PW-1:0] PROJ_THR = PW'(1638);             // floor(0.8*2^11)

  typedef struct packed {
    logic signed [XW-1:0] re;
    logic signed [XW-1:0] im;
  } x_t;

  typedef struct packed {
    logic signed [HW-1:0] re;
    logic signed [HW-1:0] im;
  } h_t;

  typedef struct packed {
    logic signed [BW-1:0] re;
    logic signed [BW-1:0] im;
  } b_t;

  typedef struct packed {
    logic signed [MW-1:0] re;
    logic signed [MW-1:0] im;
  } acc_t;

  typedef struct packed {
    logic signed [TW-1:0] re;
    logic signed [TW-1:0] im;
  } tree_t;

  // accumulator operation, applied in the third MAC pipeline stage
  typedef enum logic [2:0] {
    ACC_HOLD       = 3'd0,  // keep the accumulator
    ACC_WIDE_FIRST = 3'd1,  // acc <= prod            (first wide-product term)
    ACC_WIDE       = 3'd2,  // acc <= acc + prod      (wide product)
    ACC_TALL_FIRST = 3'd3,  // acc <= a - prod        (a = x(t), initial value)
    ACC_TALL       = 3'd4,  // acc <= nbr - prod      (partial sum from PE u+1)
    ACC_TALL_LAST  = 3'd5   // acc <= nbr + chain     (PE U+1 term, added)
  } acc_op_e;

  // control word broadcast by an array's control unit to its PEs
  typedef struct packed {
    logic     ld_x;      // load x(1) from the input port into a and b
    logic     b_rot;     // cyclic exchange of b (wide product)
    logic     b_ld_w;    // load w from the adder tree into b
    logic     proj;      // projection cycle: write x(t+1) into a, b and output
    logic     mul_conj;  // operand cycle: multiply by conj(h)
    logic     mul_tall;  // operand cycle: tall-product scaling of the product
    acc_op_e  acc_op;    // accumulator operation this cycle
  } ctrl_t;

  // tau*x from x: x has XF fraction bits, tau = 2^-tau_shift, result has TXF
  // fraction bits and TXW bits (wraps), sign-extended into the b register.
  function automatic b_t tau_x(x_t x, int unsigned tau_shift);
    logic signed [TXW-1:0] re_t, im_t;
    b_t r;
    re_t = TXW'((XW+TXF-XF)'(x.re) <<< (TXF - XF - tau_shift));
    im_t = TXW'((XW+TXF-XF)'(x.im) <<< (TXF - XF - tau_shift));
    r.re = BW'(re_t);
    r.im = BW'(im_t);
    return r;
  endfunction

endpackage
