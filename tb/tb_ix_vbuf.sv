// tb_ix_vbuf: allocates value-buffer entries, fills val0/val1 in random
// order, and checks that each entry is offered to the SVPU only when both
// values are ready, with the right pair, and that the buffer refuses
// allocation when full.
module tb_ix_vbuf;
  import ix_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, alloc_req = 0, alloc_gnt, fill_valid = 0, fill_which = 0;
  logic out_valid, out_ready = 1, empty;
  logic [2:0] alloc_idx, fill_idx = 0;
  val_t fill_data = 0, out_val0, out_val1;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ix_vbuf dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int ids [8];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      // fill the buffer
      for (int i = 0; i < 8; i++) begin
        @(negedge clk); alloc_req = 1; #1;
        checks++; if (!alloc_gnt) failures++;
        ids[i] = alloc_idx;
        @(negedge clk); alloc_req = 0;
      end
      @(negedge clk); alloc_req = 1; #1; checks++; if (alloc_gnt) begin failures++; $display("alloc when full"); end
      @(negedge clk); alloc_req = 0;
      // values: entry id gets val0 = 100*round+id, val1 = 1000+id; val1 first for odd ids
      out_ready = 0;
      for (int i = 0; i < 8; i++) begin
        @(negedge clk); fill_valid = 1; fill_idx = ids[i][2:0]; fill_which = ids[i] % 2; fill_data = fill_which ? 1000 + ids[i] : 100*round + ids[i];
      end
      @(negedge clk); fill_valid = 0; #1;
      checks++; if (out_valid) begin failures++; $display("offered with one value"); end
      for (int i = 7; i >= 0; i--) begin
        @(negedge clk); fill_valid = 1; fill_idx = ids[i][2:0]; fill_which = !(ids[i] % 2); fill_data = fill_which ? 1000 + ids[i] : 100*round + ids[i];
      end
      @(negedge clk); fill_valid = 0; out_ready = 1;
      for (int i = 0; i < 8; i++) begin
        #1; checks++;
        if (!out_valid || out_val1 < 1000 || out_val0 != 100*round + (out_val1 - 1000)) begin
          failures++; $display("bad pair %0d %0d", out_val0, out_val1);
        end
        @(negedge clk);
      end
      #1; checks++; if (!empty || out_valid) begin failures++; $display("not empty"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
