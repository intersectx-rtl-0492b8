// tb_ix_va_gen: feeds matched position pairs and checks that every match
// produces exactly two loads, base_a + 4*ia then base_b + 4*ib, tagged with
// the lane, the allocated vBuf entry and val0/val1, under random
// back-pressure from the vBuf and the load queue.
module tb_ix_va_gen;
  import ix_pkg::*;
  logic clk = 0, rst_n = 0, m_valid = 0, m_ready, alloc_req, alloc_gnt, lq_valid, lq_ready, busy;
  len_t m_ia = 0, m_ib = 0;
  addr_t base_a = 32'h1000, base_b = 32'h8000, lq_addr;
  logic [2:0] alloc_idx;
  lq_tag_t lq_tag;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ix_va_gen #(.LANE(2)) dut (.*);
  typedef struct { addr_t a; logic [3:0] idx; logic w; } ld_t;
  ld_t expq [$];
  logic gnt_en;
  assign alloc_gnt = alloc_req && gnt_en;
  always @(negedge clk) begin gnt_en = $urandom_range(0, 2) != 0; lq_ready = $urandom_range(0, 2) != 0; alloc_idx = $urandom; end
  always @(posedge clk) if (rst_n) begin
    if (m_valid && m_ready) begin
      expq.push_back('{base_a + 4*m_ia, 4'(alloc_idx), 1'b0});
      expq.push_back('{base_b + 4*m_ib, 4'(alloc_idx), 1'b1});
    end
    if (lq_valid && lq_ready) begin
      ld_t e;
      checks++;
      if (expq.size() == 0) failures++;
      else begin
        e = expq.pop_front();
        if (lq_addr != e.a || lq_tag.idx != e.idx || lq_tag.which != e.w || lq_tag.lane != 2 || lq_tag.to_tb) begin
          failures++; $display("load %h/%h idx %0d/%0d", lq_addr, e.a, lq_tag.idx, e.idx);
        end
      end
    end
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk); m_valid = 1; m_ia = $urandom_range(0, 500); m_ib = $urandom_range(0, 500);
      @(posedge clk); while (!m_ready) @(posedge clk);
      @(negedge clk); m_valid = 0;
    end
    repeat (20) @(posedge clk);
    checks++; if (expq.size() != 0 || busy) begin failures++; $display("loads missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
