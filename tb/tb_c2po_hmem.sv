// tb_c2po_hmem -- unit test of the PE h-memory.
//
// Fills the memory with random entries, reads every address back in random
// order and checks that each entry appears one cycle after its address
// (registered read), and that a new address does not reach the output
// before the next clock edge. Also overwrites entries and reads them again.
module tb_c2po_hmem;
  import c2po_pkg::*;

  localparam int D = 16;

  logic                 clk = 1'b0;
  logic                 we = 1'b0;
  logic [$clog2(D)-1:0] waddr = '0, raddr = '0;
  h_t                   wdata = '0, rdata;
  h_t                   model [D];

  c2po_hmem #(.DEPTH(D)) dut (
    .clk_i (clk), .we_i (we), .waddr_i (waddr), .wdata_i (wdata),
    .raddr_i (raddr), .rdata_o (rdata)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pass = 0; pass < 3; pass++) begin
      for (int i = 0; i < D; i++) begin
        if (pass > 0 && $urandom_range(0, 1) == 0) continue;
        @(negedge clk);
        we = 1'b1;
        waddr = ($clog2(D))'(i);
        wdata.re = HW'($urandom);
        wdata.im = HW'($urandom);
        model[i] = wdata;
      end
      @(negedge clk);
      we = 1'b0;
      for (int k = 0; k < 4 * D; k++) begin
        int a;
        a = $urandom_range(0, D - 1);
        @(negedge clk);
        raddr = ($clog2(D))'(a);
        @(negedge clk);
        checks++;
        if (rdata !== model[a]) begin
          failures++;
          $display("address %0d read %h expected %h", a, rdata, model[a]);
        end
      end
      // Streaming reads, a new address every cycle: the output must still
      // show the previous address's entry until the next clock edge.
      for (int k = 0; k < 2 * D; k++) begin
        int a, prev;
        prev = int'(raddr);
        a = (prev + 1 + $urandom_range(0, D - 2)) % D;
        @(negedge clk);
        raddr = ($clog2(D))'(a);
        #1;
        checks++;
        if (rdata !== model[prev]) begin
          failures++;
          $display("address %0d appeared before the clock edge", a);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
