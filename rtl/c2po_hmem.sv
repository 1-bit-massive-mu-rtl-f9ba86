// c2po_hmem -- h-memory of one C2PO PE.
//
// Holds one row of the array's sub-matrix of the augmented channel matrix,
// U complex entries of 10+10 bits. The paper stores these in FPGA LUTs used
// as distributed RAM; here it is a plain array with a synchronous write port
// and an asynchronous read that is registered, which maps onto distributed
// RAM followed by the MAC's input register. The read address for cycle k is
// presented in cycle k-1; rdata_o is valid in cycle k. The order of the
// entries (rotated so that address 0 holds the diagonal entry) is set by the
// writer, see c2po_array. The write port is this design's own: the paper only
// says that the matrix comes from a separate preprocessing stage.
module c2po_hmem
  import c2po_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk_i,
  input  logic          we_i,
  input  logic [AW-1:0] waddr_i,
  input  h_t            wdata_i,
  input  logic [AW-1:0] raddr_i,
  output h_t            rdata_o
);

  h_t mem [DEPTH];
  h_t rdata_q;

  always_ff @(posedge clk_i) begin
    if (we_i) mem[waddr_i] <= wdata_i;
    rdata_q <= mem[raddr_i];
  end

  assign rdata_o = rdata_q;

endmodule
