// tb_c2po_cmac -- unit test of the complex MAC.
//
// Drives random operands, random conj/tall modes and random accumulator
// operations every cycle and compares the product and accumulator outputs
// with a model that forms the product at full precision, truncates it (15 or
// 11 fraction bits) and applies the operation two cycles later, i.e. checks
// the three-stage pipeline timing as well as the arithmetic.
module tb_c2po_cmac;
  import c2po_pkg::*;

  logic    clk = 1'b0;
  b_t      b;
  h_t      h;
  logic    conj_m, tall_m;
  acc_op_e op;
  acc_t    a_init, nbr, chain, prod, acc;

  c2po_cmac dut (
    .clk_i (clk), .b_i (b), .h_i (h), .conj_i (conj_m), .tall_i (tall_m),
    .acc_op_i (op), .a_init_i (a_init), .nbr_i (nbr), .chain_i (chain),
    .prod_o (prod), .acc_o (acc)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic acc_t model_prod(b_t bb, h_t hh, logic cj, logic tl);
    longint pr, pi;
    acc_t r;
    if (!cj) begin
      pr = longint'(bb.re) * hh.re - longint'(bb.im) * hh.im;
      pi = longint'(bb.re) * hh.im + longint'(bb.im) * hh.re;
    end else begin
      pr = longint'(bb.re) * hh.re + longint'(bb.im) * hh.im;
      pi = longint'(bb.im) * hh.re - longint'(bb.re) * hh.im;
    end
    pr = pr >>> (tl ? 8 : 4);
    pi = pi >>> (tl ? 8 : 4);
    r.re = pr[MW-1:0];
    r.im = pi[MW-1:0];
    return r;
  endfunction

  acc_t pq [$];
  acc_t exp_acc;
  logic acc_known = 1'b0;

  initial begin
    b = '0; h = '0; conj_m = 0; tall_m = 0; op = ACC_HOLD;
    a_init = '0; nbr = '0; chain = '0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // check outputs of the previous edge
      if (pq.size() > 1) begin
        acc_t ep;
        ep = pq[pq.size()-2];
        checks++;
        if (prod !== ep) begin
          failures++;
          if (failures < 5) $display("cycle %0d prod %h expected %h", cyc, prod, ep);
        end
      end
      if (acc_known) begin
        checks++;
        if (acc !== exp_acc) begin
          failures++;
          if (failures < 5) $display("cycle %0d acc %h expected %h", cyc, acc, exp_acc);
        end
      end
      // new stimulus
      b.re = BW'($urandom); b.im = BW'($urandom);
      h.re = HW'($urandom); h.im = HW'($urandom);
      conj_m = 1'($urandom); tall_m = 1'($urandom);
      a_init.re = MW'($urandom); a_init.im = MW'($urandom);
      nbr.re = MW'($urandom); nbr.im = MW'($urandom);
      chain.re = MW'($urandom); chain.im = MW'($urandom);
      pq.push_back(model_prod(b, h, conj_m, tall_m));
      op = (cyc < 3) ? ACC_WIDE_FIRST : acc_op_e'($urandom_range(0, 5));
      // accumulator expected after this edge: uses product of stimulus 2
      // cycles back, i.e. the product register value visible now
      if (pq.size() > 2) begin
        acc_t p;
        p = pq[pq.size()-3];
        acc_known = 1'b1;
        case (op)
          ACC_WIDE_FIRST: exp_acc = p;
          ACC_WIDE:       begin exp_acc.re = exp_acc.re + p.re; exp_acc.im = exp_acc.im + p.im; end
          ACC_TALL_FIRST: begin exp_acc.re = a_init.re - p.re; exp_acc.im = a_init.im - p.im; end
          ACC_TALL:       begin exp_acc.re = nbr.re - p.re; exp_acc.im = nbr.im - p.im; end
          ACC_TALL_LAST:  begin exp_acc.re = nbr.re + chain.re; exp_acc.im = nbr.im + chain.im; end
          default:        exp_acc = exp_acc;
        endcase
      end else begin
        acc_known = 1'b0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
