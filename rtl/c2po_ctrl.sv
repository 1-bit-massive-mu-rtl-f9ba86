// c2po_ctrl -- control unit of a C2PO linear array.
//
// Sequences one precoding operation: a load cycle (x(1) into the PEs), then
// t_max iterations of exactly N = 2U + L + 6 cycles each, L = log2(B/U):
//   cycles 0 .. U-1          wide-product operands (b rotates after 0..U-2)
//   cycles 2 .. U+1          wide-product accumulation (first one loads)
//   cycles U+2 .. U+1+L      adder tree; w is written into b at U+1+L
//   cycles T0 .. T0+U-1      tall-product operands, T0 = U+L+2
//   cycles T0+2 .. T0+U+1    tall accumulation (first one starts from a)
//   cycle  T0+U+2            PE U+1 terms are added
//   cycle  T0+U+3 = N-1      projection, x(t+1) written
// The cycle counts per phase are the paper's (U+L+2 for the wide product and
// tree, U+3 for the tall product, 1 for the projection). The start/busy/done
// handshake is this design's: start_i is taken in idle only, the load
// happens in that same cycle, and done_o pulses in the cycle after the last
// projection (or after the load when t_max = 0, which yields MRT-Q).
// raddr_o is the h-memory address of the next cycle (the memory output is
// registered).
module c2po_ctrl
  import c2po_pkg::*;
#(
  parameter int unsigned U     = 16,
  parameter int unsigned L     = 4,
  parameter int unsigned TMAXW = 8,
  localparam int unsigned AW   = (U > 1) ? $clog2(U) : 1,
  localparam int unsigned N    = 2*U + L + 6,
  localparam int unsigned CW   = $clog2(N)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             start_i,
  input  logic [TMAXW-1:0] t_max_i,
  output ctrl_t            ctrl_o,
  output logic [AW-1:0]    raddr_o,
  output logic             busy_o,
  output logic             done_o
);

  localparam int unsigned T0 = U + L + 2;

  typedef enum logic {S_IDLE, S_RUN} state_e;

  state_e           state_q;
  logic [CW-1:0]    cyc_q;
  logic [TMAXW-1:0] iter_q, tmax_q;
  logic             done_q;

  logic start_ok, last_cyc;
  assign start_ok = (state_q == S_IDLE) && start_i;
  assign last_cyc = (state_q == S_RUN) && (cyc_q == CW'(N-1));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      cyc_q   <= '0;
      iter_q  <= '0;
      tmax_q  <= '0;
      done_q  <= 1'b0;
    end else begin
      done_q <= 1'b0;
      if (start_ok) begin
        tmax_q <= t_max_i;
        cyc_q  <= '0;
        iter_q <= TMAXW'(1);
        if (t_max_i == '0) done_q  <= 1'b1;
        else               state_q <= S_RUN;
      end else if (state_q == S_RUN) begin
        if (last_cyc) begin
          cyc_q <= '0;
          if (iter_q == tmax_q) begin
            state_q <= S_IDLE;
            done_q  <= 1'b1;
          end else begin
            iter_q <= iter_q + 1'b1;
          end
        end else begin
          cyc_q <= cyc_q + 1'b1;
        end
      end
    end
  end

  // control word decode
  int unsigned c, n;
  always_comb begin
    c = int'(cyc_q);
    n = c + 1;
    ctrl_o          = '0;
    ctrl_o.acc_op   = ACC_HOLD;
    raddr_o         = '0;
    if (start_ok) begin
      ctrl_o.ld_x = 1'b1;
    end else if (state_q == S_RUN) begin
      // operands
      if (c < U) begin
        ctrl_o.b_rot = (c < U-1);
      end else if (c >= T0 && c < T0 + U) begin
        ctrl_o.mul_conj = 1'b1;
        ctrl_o.mul_tall = 1'b1;
      end
      ctrl_o.b_ld_w = (c == U + 1 + L);
      ctrl_o.proj   = (c == N - 1);
      // accumulator
      if (c == 2)                            ctrl_o.acc_op = ACC_WIDE_FIRST;
      else if (c > 2 && c <= U + 1)          ctrl_o.acc_op = ACC_WIDE;
      else if (c == T0 + 2)                  ctrl_o.acc_op = ACC_TALL_FIRST;
      else if (c > T0 + 2 && c <= T0 + U + 1) ctrl_o.acc_op = ACC_TALL;
      else if (c == T0 + U + 2)              ctrl_o.acc_op = ACC_TALL_LAST;
      // memory address of the next cycle
      if (n < U)                             raddr_o = AW'(n);
      else if (n >= T0 && n < T0 + U)        raddr_o = AW'(n - T0);
    end
  end

  assign busy_o = (state_q == S_RUN) || start_ok;
  assign done_o = done_q;

endmodule
