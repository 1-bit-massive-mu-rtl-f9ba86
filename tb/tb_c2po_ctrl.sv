// tb_c2po_ctrl -- unit test of the array control unit (U = 16, L = 4).
//
// Starts operations with t_max = 2 and t_max = 0 and records the control
// word of every cycle. Checks against the schedule written out from the
// paper's phase lengths: load in the start cycle, U-1 rotations, w written
// into b at cycle U+1+L, tall operands from T0 = U+L+2, accumulator
// operations, projection in the last of N = 2U+L+6 cycles, the h-memory
// address sequence (0..U-1 for both products), busy/done timing, and that a
// start while busy is ignored.
module tb_c2po_ctrl;
  import c2po_pkg::*;

  localparam int U = 16, L = 4;
  localparam int N = 2*U + L + 6;
  localparam int T0 = U + L + 2;

  logic        clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [7:0]  t_max = '0;
  ctrl_t       ctrl;
  logic [3:0]  raddr;
  logic        busy, done;

  c2po_ctrl #(.U(U), .L(L), .TMAXW(8)) dut (
    .clk_i (clk), .rst_ni (rst_n), .start_i (start), .t_max_i (t_max),
    .ctrl_o (ctrl), .raddr_o (raddr), .busy_o (busy), .done_o (done)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what, int c);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("cycle %0d: %s", c, what);
    end
  endtask

  function automatic acc_op_e exp_op(int c);
    if (c == 2) return ACC_WIDE_FIRST;
    if (c > 2 && c <= U + 1) return ACC_WIDE;
    if (c == T0 + 2) return ACC_TALL_FIRST;
    if (c > T0 + 2 && c <= T0 + U + 1) return ACC_TALL;
    if (c == T0 + U + 2) return ACC_TALL_LAST;
    return ACC_HOLD;
  endfunction

  task automatic run(int tm);
    int prev_raddr;
    @(negedge clk);
    start = 1'b1;
    t_max = 8'(tm);
    #1;
    chk(ctrl.ld_x && busy, "load not in start cycle", -1);
    chk(raddr == 0, "address 0 not prepared in load cycle", -1);
    @(negedge clk);
    // start again while busy (t_max > 0): must be ignored
    start = (tm > 0);
    #1;
    if (tm == 0) begin
      chk(done && !busy, "t_max=0: done must follow the load", 0);
    end else begin
      for (int it = 0; it < tm; it++) begin
        for (int c = 0; c < N; c++) begin
          if (!(it == 0 && c == 0)) begin
            @(negedge clk);
            start = 1'b0;
            #1;
          end
          chk(busy && !done && !ctrl.ld_x, "busy/done/ld_x wrong while running", c);
          chk(ctrl.b_rot == (c < U - 1), "b_rot", c);
          chk(ctrl.b_ld_w == (c == U + 1 + L), "b_ld_w", c);
          chk(ctrl.proj == (c == N - 1), "proj", c);
          chk((ctrl.mul_conj && ctrl.mul_tall) == (c >= T0 && c < T0 + U), "tall operand", c);
          if (c < U) chk(!ctrl.mul_conj && !ctrl.mul_tall, "wide operand", c);
          chk(ctrl.acc_op == exp_op(c), "acc_op", c);
          if (c + 1 < U) chk(int'(raddr) == c + 1, "wide address", c);
          if (c + 1 >= T0 && c + 1 < T0 + U) chk(int'(raddr) == c + 1 - T0, "tall address", c);
          if (c == N - 1) chk(raddr == 0, "address 0 for next iteration", c);
        end
      end
      @(negedge clk);
      #1;
      chk(done && !busy, "done one cycle after last projection", N);
    end
    start = 1'b0;
    @(negedge clk);
    #1;
    chk(!done, "done is a single-cycle pulse", N + 1);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1 chk(!busy && !done, "idle after reset", -2);
    run(2);
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
