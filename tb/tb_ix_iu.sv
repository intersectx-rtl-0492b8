// tb_ix_iu: runs the intersection unit on random ascending key streams
// against a reference merge, for S_INTER, S_SUB (writing the result
// stream), their .C counting forms, and S_VINTER (matched position pairs),
// with random and all-ones upper bounds and random S-Cache/vBuf
// back-pressure.  A final run with no back-pressure checks the speed: one
// key comparison per cycle, so a merge of lengths a and b must finish within
// a + b cycles plus a small start-up/drain allowance.
module tb_ix_iu;
  import ix_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, cnt_only = 0;
  iu_op_e op = IU_INTER;
  sreg_t sreg_a = 1, sreg_b = 2, sreg_o = 3;
  len_t len_a = 0, len_b = 0; key_t bound = '1;
  logic rd_req [2], rd_gnt [2], rd_rvalid [2]; sreg_t rd_sreg [2]; len_t rd_grp [2]; beat_t rd_rdata;
  logic wr_req, wr_gnt; sreg_t wr_sreg; len_t wr_grp; beat_t wr_data;
  logic m_valid, m_ready; len_t m_ia, m_ib; logic busy, done; len_t count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ix_iu dut (.*);

  key_t ka [512], kb [512], ko [512];
  int got_ia [$], got_ib [$];
  logic fast = 0;

  // S-Cache model: one read grant per cycle, data one cycle later
  logic sel_q;
  always @(negedge clk) begin
    logic g0, g1;
    g0 = rd_req[0] && (fast || $urandom_range(0, 2) != 0);
    g1 = rd_req[1] && (fast || $urandom_range(0, 2) != 0);
    if (g0 && g1) begin if (sel_q) g0 = 0; else g1 = 0; end
    rd_gnt[0] = g0; rd_gnt[1] = g1;
    wr_gnt   = wr_req && (fast || $urandom_range(0, 2) != 0);
    m_ready  = fast || $urandom_range(0, 3) != 0;
  end
  always @(posedge clk) if (rst_n) begin
    rd_rvalid[0] <= rd_req[0] && rd_gnt[0];
    rd_rvalid[1] <= rd_req[1] && rd_gnt[1];
    if (rd_req[0] && rd_gnt[0]) sel_q <= 1'b0;
    if (rd_req[1] && rd_gnt[1]) sel_q <= 1'b1;
    for (int k = 0; k < 2; k++)
      if (rd_req[k] && rd_gnt[k]) begin
        if (rd_sreg[k] != ((k == 0) ? sreg_a : sreg_b)) begin failures++; $display("wrong stream register on read port %0d", k); end
        for (int i = 0; i < 4; i++)
          rd_rdata[32*i +: 32] <= (k == 0) ? ka[(4*rd_grp[k] + i) % 512] : kb[(4*rd_grp[k] + i) % 512];
      end
    if (wr_req && wr_gnt) for (int i = 0; i < 4; i++) ko[(4*wr_grp + i) % 512] <= wr_data[32*i +: 32];
    if (m_valid && m_ready) begin got_ia.push_back(int'(m_ia)); got_ib.push_back(int'(m_ib)); end
  end

  task automatic gen(ref key_t k [512], input int n, input int range);
    int v; v = $urandom_range(0, 3);
    for (int i = 0; i < n; i++) begin k[i] = key_t'(v); v += 1 + $urandom_range(0, range); end
  endtask

  task automatic run(iu_op_e o, bit c, int na, int nb, key_t bd, output int cycles);
    key_t ref_k [$]; int ref_ia [$], ref_ib [$];
    int i, j;
    i = 0; j = 0;
    while (i < na && (o == IU_SUB || j < nb)) begin
      if (o == IU_SUB && (j >= nb || ka[i] < kb[j])) begin if (ka[i] < bd) ref_k.push_back(ka[i]); i++; end
      else if (ka[i] == kb[j]) begin
        if (o != IU_SUB && ka[i] < bd) begin ref_k.push_back(ka[i]); ref_ia.push_back(i); ref_ib.push_back(j); end
        i++; j++;
      end
      else if (ka[i] < kb[j]) i++;
      else j++;
    end
    for (int x = 0; x < 512; x++) ko[x] = '1;
    got_ia.delete(); got_ib.delete();
    @(negedge clk);
    op = o; cnt_only = c; len_a = na; len_b = nb; bound = bd; start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (int'(count) != ref_k.size()) begin failures++; $display("op %0d cnt %0d: count %0d expected %0d", o, c, count, ref_k.size()); end
    if (o != IU_VINTER && !c)
      for (int x = 0; x < ref_k.size(); x++) begin
        checks++; if (ko[x] != ref_k[x]) begin failures++; $display("op %0d key %0d: %0d expected %0d", o, x, ko[x], ref_k[x]); end
      end
    if (o == IU_VINTER) begin
      checks++;
      if (got_ia.size() != ref_ia.size()) begin failures++; $display("pairs %0d expected %0d", got_ia.size(), ref_ia.size()); end
      else for (int x = 0; x < ref_ia.size(); x++)
        if (got_ia[x] != ref_ia[x] || got_ib[x] != ref_ib[x]) begin failures++; $display("pair %0d wrong", x); end
    end
    repeat (2) @(negedge clk);
    checks++; if (busy) begin failures++; $display("busy after done"); end
  endtask

  initial begin repeat (400000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int cyc, na, nb; key_t bd;
    rd_gnt[0] = 0; rd_gnt[1] = 0; rd_rvalid[0] = 0; rd_rvalid[1] = 0; sel_q = 0; wr_gnt = 0; m_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 90; t++) begin
      na = $urandom_range(0, 150); nb = $urandom_range(0, 150);
      gen(ka, na, $urandom_range(1, 4)); gen(kb, nb, $urandom_range(1, 4));
      bd = ($urandom_range(0, 1) != 0) ? '1 : key_t'($urandom_range(0, 300));
      run(iu_op_e'(t % 3), (t % 6) >= 3 && (t % 3) != 2, na, nb, bd, cyc);
    end
    // speed: no back-pressure
    fast = 1;
    for (int t = 0; t < 6; t++) begin
      na = 100 + 20*t; nb = 120;
      gen(ka, na, 2); gen(kb, nb, 2);
      run((t % 2) ? IU_SUB : IU_INTER, 1, na, nb, '1, cyc);
      checks++;
      if (cyc > na + nb + 12) begin failures++; $display("slow: %0d cycles for %0d+%0d keys", cyc, na, nb); end
      $display("merge %0d+%0d keys: %0d cycles", na, nb, cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
