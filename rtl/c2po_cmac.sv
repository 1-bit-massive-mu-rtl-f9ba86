// c2po_cmac -- complex-valued multiply-accumulate unit of one C2PO PE.
//
// Computes p = b*h or p = b*conj(h) with four real multipliers and two
// adders, scales the product to the accumulator format and accumulates it.
// Three pipeline stages, as in the published design: (1) the four real
// products are registered inside the multiplier, (2) they are combined,
// truncated and registered as the product, (3) the product is accumulated.
// Operands presented in cycle k therefore reach the accumulator at the end of
// cycle k+2, so a U-term dot product needs U+2 cycles (two to flush).
//
// Interface: b_i/h_i/conj_i/tall_i belong to the operand cycle; acc_op_i and
// the three base inputs belong to the accumulate cycle two cycles later. The
// accumulator supports the operations the paper lists: add or subtract the
// product, and start from a non-zero value (the a register). The extra
// ACC_TALL_LAST operation adds the PE U+1 term that arrives on the shift path
// instead of the local product, as described for the last tall-product cycle.
// Products wrap and are truncated: the wide product keeps 15 fraction bits,
// the tall product 11, both in 18 bits. The selection of the base value
// (own accumulator, a register, neighbour's partial sum) is this design's way
// of realising the multiplexers drawn in front of the adder.
module c2po_cmac
  import c2po_pkg::*;
(
  input  logic    clk_i,
  // operand cycle
  input  b_t      b_i,
  input  h_t      h_i,
  input  logic    conj_i,
  input  logic    tall_i,
  // accumulate cycle (two cycles after the operand cycle)
  input  acc_op_e acc_op_i,
  input  acc_t    a_init_i,   // a register in accumulator format
  input  acc_t    nbr_i,      // partial sum received from the neighbouring PE
  input  acc_t    chain_i,    // PE U+1 term received on the shift path
  output acc_t    prod_o,
  output acc_t    acc_o
);

  localparam int RW = BW + HW;  // width of one real product

  // stage 1: real products
  logic signed [RW-1:0] m_rr_q, m_ii_q, m_ri_q, m_ir_q;
  logic                 conj_q, tall_q;

  always_ff @(posedge clk_i) begin
    m_rr_q <= RW'(b_i.re) * RW'(h_i.re);
    m_ii_q <= RW'(b_i.im) * RW'(h_i.im);
    m_ri_q <= RW'(b_i.re) * RW'(h_i.im);
    m_ir_q <= RW'(b_i.im) * RW'(h_i.re);
    conj_q <= conj_i;
    tall_q <= tall_i;
  end

  // stage 2: complex combination, scaling by truncation, wrap to MW bits
  logic signed [PRODW-1:0] p_re, p_im;
  logic signed [MW-1:0]    p_re_s, p_im_s;
  acc_t                    prod_q;

  always_comb begin
    if (conj_q) begin
      p_re = PRODW'(m_rr_q) + PRODW'(m_ii_q);
      p_im = PRODW'(m_ir_q) - PRODW'(m_ri_q);
    end else begin
      p_re = PRODW'(m_rr_q) - PRODW'(m_ii_q);
      p_im = PRODW'(m_ri_q) + PRODW'(m_ir_q);
    end
    p_re_s = MW'(tall_q ? (p_re >>> SHIFT_TALL) : (p_re >>> SHIFT_WIDE));
    p_im_s = MW'(tall_q ? (p_im >>> SHIFT_TALL) : (p_im >>> SHIFT_WIDE));
  end

  always_ff @(posedge clk_i) begin
    prod_q.re <= p_re_s;
    prod_q.im <= p_im_s;
  end

  // stage 3: accumulator
  acc_t acc_q;

  always_ff @(posedge clk_i) begin
    unique case (acc_op_i)
      ACC_WIDE_FIRST: acc_q <= prod_q;
      ACC_WIDE: begin
        acc_q.re <= acc_q.re + prod_q.re;
        acc_q.im <= acc_q.im + prod_q.im;
      end
      ACC_TALL_FIRST: begin
        acc_q.re <= a_init_i.re - prod_q.re;
        acc_q.im <= a_init_i.im - prod_q.im;
      end
      ACC_TALL: begin
        acc_q.re <= nbr_i.re - prod_q.re;
        acc_q.im <= nbr_i.im - prod_q.im;
      end
      ACC_TALL_LAST: begin
        acc_q.re <= nbr_i.re + chain_i.re;
        acc_q.im <= nbr_i.im + chain_i.im;
      end
      default: acc_q <= acc_q;
    endcase
  end

  assign prod_o = prod_q;
  assign acc_o  = acc_q;

endmodule
