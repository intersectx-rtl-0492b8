// tb_ix_nest_translator: runs S_NESTINTER over random key sets S of a
// random CSR graph.  Models: an S-Cache port holding the keys of S, a load
// queue answering CSR index/offset loads out of order, a rename stage that
// accepts micro-ops with random stalls, and intersection units that return
// the count of each nested S_INTER.C after a random delay.
// Checks: nothing is read before S is produced; for every key s_i, in
// order, the micro-ops S_READ(edge+4*index[s_i], offset[s_i], sid_i),
// S_INTER.C(S, sid_i, bound s_i), S_FREE(sid_i) with an internal sid; then
// OP_NEST_END; done carries the sum of the returned counts; the 8-entry
// translation buffer fills up when rename stalls.
module tb_ix_nest_translator;
  import ix_pkg::*;
  localparam addr_t IDX_B = 32'h1000, OFF_B = 32'h2000, EDGE_B = 32'h8000;
  logic clk = 0, rst_n = 0, start = 0, s_p = 0;
  sreg_t start_sreg = 5, cur_sreg; sid_t start_sid = 9'd17; len_t s_len = 0;
  addr_t csr_index = IDX_B, csr_edge = EDGE_B, csr_offset = OFF_B;
  logic rd_req, rd_gnt, rd_rvalid; sreg_t rd_sreg; len_t rd_grp; beat_t rd_rdata;
  logic lq_valid, lq_ready, ret_valid; addr_t lq_addr; lq_tag_t lq_tag, ret_tag; val_t ret_data;
  logic uop_valid, uop_ready, cnt_valid; insn_t uop; len_t cnt_val;
  logic busy, front_busy, done; logic [31:0] sum;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ix_nest_translator dut (.*);

  key_t skeys [64];
  int   vidx [256], voff [256];
  logic hold_rename = 0;
  typedef struct { int due; lq_tag_t t; val_t d; } lr_t;
  typedef struct { int due; len_t c; } cr_t;
  lr_t lq_pend [$];
  cr_t cn_pend [$];
  insn_t uops [$];
  int cyc = 0, full_seen = 0;

  function automatic len_t cnt_of(key_t b); return len_t'((b * 7) % 13); endfunction

  always @(negedge clk) begin
    rd_gnt    = rd_req && $urandom_range(0, 2) != 0;
    lq_ready  = $urandom_range(0, 2) != 0;
    uop_ready = !hold_rename && $urandom_range(0, 2) != 0;
  end
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    rd_rvalid <= rd_req && rd_gnt;
    if (rd_req && rd_gnt) begin
      if (!s_p) begin failures++; $display("S read before it was produced"); end
      if (rd_sreg != start_sreg) begin failures++; $display("wrong stream register"); end
      for (int i = 0; i < 4; i++) rd_rdata[32*i +: 32] <= skeys[(4*rd_grp + i) % 64];
    end
    if (lq_valid && lq_ready) begin
      lr_t r; int v;
      r.due = cyc + 2 + $urandom_range(0, 6); r.t = lq_tag;
      if (lq_addr >= OFF_B) begin v = (lq_addr - OFF_B) >> 2; r.d = val_t'(voff[v % 256]); end
      else begin v = (lq_addr - IDX_B) >> 2; r.d = val_t'(vidx[v % 256]); end
      lq_pend.push_back(r);
    end
    ret_valid <= 1'b0;
    for (int i = 0; i < lq_pend.size(); i++)
      if (lq_pend[i].due <= cyc && $urandom_range(0, 1) != 0) begin
        ret_valid <= 1'b1; ret_tag <= lq_pend[i].t; ret_data <= lq_pend[i].d; lq_pend.delete(i); break;
      end
    if (uop_valid && uop_ready) begin
      uops.push_back(uop);
      if (uop.op == OP_INTERC) begin cr_t c; c.due = cyc + 3 + $urandom_range(0, 20); c.c = cnt_of(key_t'(uop.r3)); cn_pend.push_back(c); end
    end
    cnt_valid <= 1'b0;
    if (cn_pend.size() > 0 && cn_pend[0].due <= cyc) begin cnt_valid <= 1'b1; cnt_val <= cn_pend[0].c; void'(cn_pend.pop_front()); end
    if (dut.used == 8) full_seen++;
  end

  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    rd_rvalid = 0; ret_valid = 0; cnt_valid = 0; cnt_val = 0; ret_tag = '0; ret_data = 0;
    for (int v = 0; v < 256; v++) begin vidx[v] = $urandom_range(0, 4000); voff[v] = $urandom_range(0, 60); end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int n, k, esum, ui; logic [31:0] got;
      n = (t == 0) ? 0 : $urandom_range(1, 40);
      k = $urandom_range(0, 5);
      for (int i = 0; i < n; i++) begin skeys[i] = key_t'(k); k += 1 + $urandom_range(0, 5); end
      uops.delete();
      hold_rename = (t == 3);
      @(negedge clk); start = 1; start_sid = sid_t'(10 + t); s_len = n; @(negedge clk); start = 0;
      repeat (20) @(negedge clk);
      checks++; if (!front_busy || uops.size() != 0) begin failures++; $display("did not wait for S"); end
      s_p = 1;
      if (t == 3) begin repeat (400) @(negedge clk); hold_rename = 0; end
      while (!done) @(negedge clk);
      got = sum; s_p = 0;
      esum = 0; ui = 0;
      checks++;
      if (uops.size() != 3*n + 1) begin failures++; $display("trial %0d: %0d micro-ops for %0d keys", t, uops.size(), n); end
      else begin
        for (int i = 0; i < n; i++) begin
          int v; sid_t sd; v = skeys[i];
          sd = sid_t'(uops[3*i].r2);
          esum += cnt_of(skeys[i]);
          checks++;
          if (uops[3*i].op != OP_READ || uops[3*i].r0 != EDGE_B + 4*vidx[v] || uops[3*i].r1 != voff[v] || !sd[8] ||
              uops[3*i+1].op != OP_INTERC || uops[3*i+1].r0 != 32'(start_sid) || uops[3*i+1].r1 != 32'(sd) ||
              uops[3*i+1].r3 != skeys[i] ||
              uops[3*i+2].op != OP_FREE || uops[3*i+2].r0 != 32'(sd)) begin
            failures++; $display("trial %0d key %0d: wrong micro-ops", t, i);
          end
        end
        checks++; if (uops[3*n].op != OP_NEST_END) begin failures++; $display("no NEST_END"); end
      end
      checks++; if (got != esum) begin failures++; $display("trial %0d: sum %0d expected %0d", t, got, esum); end
      @(negedge clk); checks++; if (busy) begin failures++; $display("busy after done"); end
    end
    checks++; if (full_seen == 0) begin failures++; $display("translation buffer never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
