// tb_ix_sreg_file: defines streams in random registers, updates lengths and
// clears valid bits, comparing every register with a reference copy.
module tb_ix_sreg_file;
  import ix_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0, len_we = 0, clr_en = 0, wr_is_kv = 0;
  sreg_t wr_idx = 0, len_idx = 0, clr_idx = 0;
  addr_t wr_key_addr = 0, wr_val_addr = 0;
  len_t wr_len = 0, wr_max_len = 0, len_val = 0;
  logic valid [16], is_kv [16];
  addr_t key_addr [16], val_addr [16];
  len_t len [16], max_len [16];
  logic r_v [16], r_kv [16];
  addr_t r_ka [16], r_va [16];
  len_t r_len [16], r_max [16];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ix_sreg_file dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int j = 0; j < 16; j++) begin r_v[j] = 0; r_kv[j] = 0; r_ka[j] = 0; r_va[j] = 0; r_len[j] = 0; r_max[j] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      wr_en = $urandom_range(0, 1); wr_idx = $urandom; wr_key_addr = $urandom; wr_val_addr = $urandom;
      wr_len = $urandom_range(0, 999); wr_max_len = $urandom_range(0, 999); wr_is_kv = $urandom;
      len_we = $urandom_range(0, 1); len_idx = $urandom; len_val = $urandom_range(0, 999);
      clr_en = $urandom_range(0, 1); clr_idx = $urandom;
      if (clr_en) r_v[clr_idx] = 0;
      if (len_we) r_len[len_idx] = len_val;
      if (wr_en) begin
        r_v[wr_idx] = 1; r_ka[wr_idx] = wr_key_addr; r_va[wr_idx] = wr_val_addr;
        r_len[wr_idx] = wr_len; r_max[wr_idx] = wr_max_len; r_kv[wr_idx] = wr_is_kv;
      end
      @(posedge clk); #1;
      for (int j = 0; j < 16; j++) begin
        checks++;
        if (valid[j] != r_v[j] || key_addr[j] != r_ka[j] || val_addr[j] != r_va[j] ||
            len[j] != r_len[j] || max_len[j] != r_max[j] || is_kv[j] != r_kv[j]) begin
          failures++; $display("reg %0d mismatch at step %0d", j, t);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
