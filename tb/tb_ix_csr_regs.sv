// tb_ix_csr_regs: loads the three CSR registers several times and checks
// that they hold the last values written and ignore cycles without we.
module tb_ix_csr_regs;
  import ix_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  addr_t i_in = 0, e_in = 0, o_in = 0, ci, ce, co;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ix_csr_regs dut (.clk, .rst_n, .we, .index_in(i_in), .edge_in(e_in), .offset_in(o_in),
                   .csr_index(ci), .csr_edge(ce), .csr_offset(co));
  initial begin repeat (1000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    addr_t a, b, c;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); checks++; if (ci != 0 || ce != 0 || co != 0) failures++;
    for (int t = 0; t < 8; t++) begin
      a = $urandom; b = $urandom; c = $urandom;
      i_in = a; e_in = b; o_in = c; we = 1; @(negedge clk); we = 0;
      i_in = $urandom; e_in = $urandom; o_in = $urandom; @(negedge clk);
      checks++;
      if (ci != a || ce != b || co != c) begin failures++; $display("CSR mismatch"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
