// tb_ix_svpu: checks the SVPU accumulator for MAC, MAX and MIN against a
// reference sum over random value pairs, including clearing and idle cycles.
module tb_ix_svpu;
  import ix_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, in_valid = 0;
  vop_e op = VOP_MAC;
  val_t val0 = 0, val1 = 0, acc;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ix_svpu dut (.clk, .rst_n, .clr, .op, .in_valid, .val0, .val1, .acc);
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [31:0] ref_acc;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      @(negedge clk); op = vop_e'(t % 3); clr = 1; @(negedge clk); clr = 0;
      ref_acc = 0;
      for (int i = 0; i < 20; i++) begin
        val0 = $urandom_range(0, 1000); val1 = $urandom_range(0, 1000);
        in_valid = ($urandom_range(0, 3) != 0);
        if (in_valid) ref_acc += (op == VOP_MAC) ? val0 * val1 : (op == VOP_MAX) ? ((val0 > val1) ? val0 : val1) : ((val0 < val1) ? val0 : val1);
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      checks++;
      if (acc !== ref_acc) begin failures++; $display("op %0d acc %0d expected %0d", op, acc, ref_acc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
