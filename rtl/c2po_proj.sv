// c2po_proj -- expansion-reprojection (prox_g) unit of one C2PO PE.
//
// Applied separately to the real and the imaginary part of z(t+1) (18 bits,
// 11 fraction bits): the part is multiplied by 1.25 = 1/(1 - tau*delta) as
// z + (z >>> 2), and compared with +0.8 and -0.8. Above +0.8 the unit outputs
// +1, below -0.8 it outputs -1, in between 1.25*z. The result is the next
// iterate x(t+1); it is truncated to the 12-bit x format (5 fraction bits).
// The clipping level 1 follows from the paper's choice P = 2B. The threshold
// is 0.8 rounded down to the 11-bit fraction grid (1638/2048), so that
// 1.25*z never exceeds +1 in the linear region. Purely combinational; the PE
// registers its output. In the paper this adder is the MAC accumulator's
// adder; here it is a separate adder fed by the accumulator register.
//
// The clip flags report which branch of the projection was taken, for
// observation only.
module c2po_proj
  import c2po_pkg::*;
(
  input  acc_t z_i,
  output x_t   x_o,
  output logic clip_o     // some part of z was clipped to +-1
);

  function automatic logic signed [PW-1:0] proj1(logic signed [PW-1:0] z);
    if (z > PROJ_THR)       return PROJ_ONE;
    else if (z < -PROJ_THR) return -PROJ_ONE;
    else                    return z + (z >>> 2);
  endfunction

  logic signed [PW-1:0] p_re, p_im;

  always_comb begin
    p_re    = proj1(z_i.re);
    p_im    = proj1(z_i.im);
    x_o.re  = XW'(p_re >>> (PF - XF));
    x_o.im  = XW'(p_im >>> (PF - XF));
    clip_o  = (z_i.re > PROJ_THR) || (z_i.re < -PROJ_THR) ||
              (z_i.im > PROJ_THR) || (z_i.im < -PROJ_THR);
  end

endmodule
