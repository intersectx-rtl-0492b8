// tb_intersectx: end-to-end test of the stream unit at its default sizes.
// It builds a random graph in CSR form in the behavioural memory (a few
// dense hub vertices, so that intersections exceed the 64-key slot), then
// runs stream programs: bounded and unbounded S_INTER.C / S_SUB.C, S_INTER /
// S_SUB into output streams read back with S_FETCH and fed to further
// intersections, S_VREAD + S_VINTER with MAC/MAX/MIN, S_NESTINTER (triangle
// style nested counting), stream-ID overwrite, a full SMT, an S_READ that
// overlaps an unproduced output stream, and exceptions.  Every retired
// result is compared, in program order, with a value computed here from the
// adjacency matrix.  It also counts how often each mechanism occurred and
// fails if one never did.
module tb_intersectx;
  import ix_pkg::*;
  localparam int V = 128;
  localparam int IDX_B = 32'h0000_4000, OFF_B = 32'h0000_8000, EDGE_B = 32'h0001_0000,
                 VAL_B = 32'h0004_0000, SPILL_B = 32'h0010_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, res_valid, res_exc, idle;
  insn_t in_insn;
  op_e res_op;
  logic [31:0] res_value;
  logic l2_req, l2_we, l2_gnt, l2_rvalid, l1_req, l1_gnt, l1_rvalid;
  addr_t l2_addr, l1_addr;
  beat_t l2_wdata, l2_rdata;
  logic [4:0] l1_id, l1_rid;
  val_t l1_rdata;
  int l2_writes;

  intersectx u_dut (
    .clk, .rst_n, .in_valid, .in_insn, .in_ready, .res_valid, .res_op, .res_value, .res_exc,
    .spill_base(SPILL_B), .idle,
    .l2_req, .l2_we, .l2_addr, .l2_wdata, .l2_gnt, .l2_rvalid, .l2_rdata,
    .l1_req, .l1_addr, .l1_id, .l1_gnt, .l1_rvalid, .l1_rid, .l1_rdata);
  ix_mem_model u_mem (
    .clk, .l2_req, .l2_we, .l2_addr, .l2_wdata, .l2_gnt, .l2_rvalid, .l2_rdata,
    .l1_req, .l1_addr, .l1_id, .l1_gnt, .l1_rvalid, .l1_rid, .l1_rdata, .l2_writes);

  // ---------------- graph and reference model ----------------
  bit adj [V][V];
  int idx [V+1];
  int offs [V];
  int checks = 0, failures = 0;

  function automatic int nb(int v, int i);       // i-th neighbour of v
    int c = 0;
    for (int w = 0; w < V; w++) if (adj[v][w]) begin if (c == i) return w; c++; end
    return -1;
  endfunction
  function automatic int deg(int v);
    return idx[v+1] - idx[v];
  endfunction
  function automatic int edge_val(int e);         // value stored with edge slot e
    return (e * 7 + 3) % 50;
  endfunction

  typedef struct { op_e op; bit chk; logic [31:0] val; bit exc; } exp_t;
  exp_t expq [$];
  int unsigned n_res = 0;

  always @(posedge clk) if (rst_n && res_valid) begin
    exp_t e;
    if (expq.size() == 0) begin failures++; $display("unexpected result op=%0d", res_op); end
    else begin
      e = expq.pop_front();
      checks++;
      if (res_op != e.op || res_exc != e.exc || (e.chk && res_value != e.val)) begin
        failures++;
        $display("MISMATCH #%0d op=%0d/%0d exc=%0d/%0d val=%0d/%0d", n_res, res_op, e.op, res_exc, e.exc, res_value, e.val);
      end
    end
    n_res++;
  end

  task automatic issue(op_e op, logic [31:0] r0, logic [31:0] r1, logic [31:0] r2, logic [31:0] r3,
                       bit chk, logic [31:0] val, bit exc = 0, vop_e imm = VOP_MAC);
    exp_t e;
    @(negedge clk);
    in_valid = 1; in_insn = '{op: op, r0: r0, r1: r1, r2: r2, r3: r3, imm: imm};
    e.op = op; e.chk = chk; e.val = val; e.exc = exc;
    expq.push_back(e);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    @(negedge clk);
    in_valid = 0;
  endtask

  // stream helpers
  task automatic sread(int v, int sid);
    issue(OP_READ, EDGE_B + 4*idx[v], deg(v), sid, 0, 0, 0);
  endtask
  function automatic int inter_cnt(int u, int v, logic [31:0] bnd);
    int c = 0;
    for (int w = 0; w < V; w++) if (adj[u][w] && adj[v][w] && w < bnd) c++;
    return c;
  endfunction
  function automatic int sub_cnt(int u, int v, logic [31:0] bnd);
    int c = 0;
    for (int w = 0; w < V; w++) if (adj[u][w] && !adj[v][w] && w < bnd) c++;
    return c;
  endfunction
  function automatic int inter_kth(int u, int v, logic [31:0] bnd, int k, bit sub);
    int c = 0;
    for (int w = 0; w < V; w++)
      if (adj[u][w] && (sub ? !adj[v][w] : adj[v][w]) && w < bnd) begin if (c == k) return w; c++; end
    return -1;
  endfunction

  // ---------------- mechanism counters ----------------
  int ev_smt_full, ev_win_full, ev_wb, ev_dep_wait, ev_ovl, ev_reuse, ev_bound, ev_multi_lane,
      ev_rr, ev_tb_full, ev_nest, ev_vinter, ev_exc, ev_demand;
  always @(posedge clk) if (rst_n) begin
    if (u_dut.src_valid && u_dut.is_def && !u_dut.exc && !u_dut.tgt_reuse && !u_dut.free_avail) ev_smt_full++;
    if (u_dut.src_valid && u_dut.wcnt == 5'(16)) ev_win_full++;
    if (l2_req && l2_we && l2_gnt) ev_wb++;
    if (u_dut.def_en && u_dut.def_pv != 0 && !u_dut.is_outop) ev_ovl++;
    if (u_dut.def_en && u_dut.tgt_reuse) ev_reuse++;
    if ($countones(u_dut.lane_busy) == 4) ev_multi_lane++;
    begin
      int h;
      h = 0;
      for (int k = 0; k < 9; k++) h += int'(u_dut.u_sc.rd_hit[k]);
      if (h > 1) ev_rr++;
    end
    if (u_dut.u_nt.used == 4'(8)) ev_tb_full++;
    if (u_dut.t_start) ev_nest++;
    if (u_dut.d_lane_go && u_dut.dw.op == OP_VINTER) ev_vinter++;
    if (res_valid && res_exc) ev_exc++;
    if (u_dut.u_sc.est == 2'd0 && u_dut.u_sc.c_any && u_dut.u_sc.c_demand) ev_demand++;
    for (int e = 0; e < 16; e++)
      if (u_dut.win[e].v && !u_dut.win[e].done && !u_dut.win[e].disp &&
          (u_dut.win[e].op inside {OP_INTER, OP_INTERC, OP_SUBC}) && !u_dut.p[u_dut.win[e].a]) ev_dep_wait++;
  end

  for (genvar l = 0; l < 4; l++) begin : g_bnd
    always @(posedge clk)
      if (u_dut.g_lane[l].u_lane.u_iu.finish &&
          u_dut.g_lane[l].u_lane.u_iu.a_ok && u_dut.g_lane[l].u_lane.u_iu.b_ok) ev_bound++;
  end

  task automatic need(string name, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never seen: %s", name); end
    else $display("  %-28s %0d", name, n);
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int u, v, n, e, bnd, tot;
    in_valid = 0; in_insn = '0;
    #1;  // after the memory model has cleared its array
    // ---- graph ----
    for (int a = 0; a < V; a++) for (int b = 0; b < a; b++) begin
      int pr;
      bit x;
      pr = (a < 8 || b < 8) ? 85 : 8;
      x = ($urandom_range(0, 99) < pr);
      adj[a][b] = x; adj[b][a] = x;
    end
    for (int a = 0; a < V; a++) adj[a][a] = 0;
    e = 0;
    for (int a = 0; a < V; a++) begin
      idx[a] = e; offs[a] = 0;
      for (int w = 0; w < V; w++) if (adj[a][w]) begin
        u_mem.mem[(EDGE_B >> 2) + e] = w;
        u_mem.mem[(VAL_B >> 2) + e]  = edge_val(e);
        if (w < a) offs[a]++;
        e++;
      end
    end
    idx[V] = e;
    for (int a = 0; a <= V; a++) u_mem.mem[(IDX_B >> 2) + a] = idx[a];
    for (int a = 0; a < V; a++)  u_mem.mem[(OFF_B >> 2) + a] = offs[a];
    $display("graph: %0d vertices, %0d edge slots, deg(0)=%0d", V, e, deg(0));
    repeat (3) @(posedge clk);
    rst_n = 1;

    issue(OP_CSR, IDX_B, EDGE_B, OFF_B, 0, 0, 0);

    // ---- key-stream computations ----
    for (int t = 0; t < 10; t++) begin
      u = (t < 6) ? t % 8 : $urandom_range(0, V-1);
      v = (t < 6) ? (t + 1) % 8 : $urandom_range(0, V-1);
      if (u == v) v = (v + 1) % V;
      bnd = (t % 3 == 0) ? 32'hFFFF_FFFF : $urandom_range(10, V);
      sread(u, 1); sread(v, 2);
      issue(OP_INTERC, 1, 2, 0, bnd, 1, inter_cnt(u, v, bnd));
      issue(OP_SUBC,   1, 2, 0, bnd, 1, sub_cnt(u, v, bnd));
      issue(OP_INTER,  1, 2, 3, bnd, 0, 0);
      issue(OP_SUB,    1, 2, 4, 32'hFFFF_FFFF, 0, 0);
      // dependent on output streams: (u&v) & (u-v) is empty, (u&v) & u = u&v
      issue(OP_INTERC, 3, 4, 0, 32'hFFFF_FFFF, 1, 0);
      issue(OP_INTERC, 3, 1, 0, 32'hFFFF_FFFF, 1, inter_cnt(u, v, bnd));
      n = inter_cnt(u, v, bnd);
      for (int k = 0; k <= n; k += (n > 20 ? 7 : 1))
        issue(OP_FETCH, 3, k, 0, 0, 1, (k < n) ? inter_kth(u, v, bnd, k, 0) : EOS);
      issue(OP_FETCH, 3, n, 0, 0, 1, EOS);
      n = sub_cnt(u, v, 32'hFFFF_FFFF);
      if (n > 0) issue(OP_FETCH, 4, n-1, 0, 0, 1, inter_kth(u, v, 32'hFFFF_FFFF, n-1, 1));
      issue(OP_FREE, 1, 0, 0, 0, 0, 0);
      issue(OP_FREE, 2, 0, 0, 0, 0, 0);
      issue(OP_FREE, 3, 0, 0, 0, 0, 0);
      issue(OP_FREE, 4, 0, 0, 0, 0, 0);
    end

    // ---- (key,value) streams ----
    for (int t = 0; t < 6; t++) begin
      vop_e op;
      int acc;
      u = t % 8; v = (t + 3) % 8;
      op = vop_e'(t % 3);
      acc = 0;
      for (int w = 0; w < V; w++) if (adj[u][w] && adj[v][w]) begin
        int pu, pv, a0, a1;
        pu = 0; pv = 0;
        for (int x = 0; x < w; x++) begin pu += adj[u][x]; pv += adj[v][x]; end
        a0 = edge_val(idx[u] + pu); a1 = edge_val(idx[v] + pv);
        acc += (op == VOP_MAC) ? a0 * a1 : (op == VOP_MAX) ? (a0 > a1 ? a0 : a1) : (a0 < a1 ? a0 : a1);
      end
      issue(OP_VREAD, EDGE_B + 4*idx[u], deg(u), 6, VAL_B + 4*idx[u], 0, 0);
      issue(OP_VREAD, EDGE_B + 4*idx[v], deg(v), 7, VAL_B + 4*idx[v], 0, 0);
      issue(OP_VINTER, 6, 7, 0, 0, 1, acc, 0, op);
      issue(OP_FREE, 6, 0, 0, 0, 0, 0);
      issue(OP_FREE, 7, 0, 0, 0, 0, 0);
    end

    // ---- nested intersection ----
    for (int t = 0; t < 3; t++) begin
      u = (t == 0) ? 1 : $urandom_range(8, V-1);
      tot = 0;
      for (int s = 0; s < V; s++) if (adj[u][s]) tot += inter_cnt(u, s, s);
      sread(u, 5);
      issue(OP_NESTINTER, 5, 0, 0, 0, 1, tot);
      issue(OP_FREE, 5, 0, 0, 0, 0, 0);
    end

    // ---- overwrite of a defined stream ID ----
    sread(2, 30); sread(3, 30); sread(4, 31);
    issue(OP_INTERC, 30, 31, 0, 32'hFFFF_FFFF, 1, inter_cnt(3, 4, 32'hFFFF_FFFF));
    issue(OP_FREE, 30, 0, 0, 0, 0, 0);
    issue(OP_FREE, 31, 0, 0, 0, 0, 0);

    // ---- S_READ overlapping an output stream still being produced ----
    sread(0, 1); sread(1, 2);
    issue(OP_INTER, 1, 2, 3, 32'hFFFF_FFFF, 0, 0);
    issue(OP_READ, SPILL_B, 16 * 32768, 8, 0, 0, 0);
    issue(OP_FREE, 8, 0, 0, 0, 0, 0);
    issue(OP_INTERC, 3, 1, 0, 32'hFFFF_FFFF, 1, inter_cnt(0, 1, 32'hFFFF_FFFF));
    for (int s = 1; s <= 3; s++) issue(OP_FREE, s, 0, 0, 0, 0, 0);

    // ---- all stream registers in use ----
    for (int s = 0; s < 16; s++) sread(s, 40 + s);
    issue(OP_FREE, 40, 0, 0, 0, 0, 0);
    sread(20, 60);
    issue(OP_INTERC, 41, 60, 0, 32'hFFFF_FFFF, 1, inter_cnt(1, 20, 32'hFFFF_FFFF));
    for (int s = 1; s < 16; s++) issue(OP_FREE, 40 + s, 0, 0, 0, 0, 0);
    issue(OP_FREE, 60, 0, 0, 0, 0, 0);

    // ---- exceptions ----
    issue(OP_FREE, 99, 0, 0, 0, 0, 0, 1);
    issue(OP_FETCH, 98, 0, 0, 0, 0, 0, 1);
    sread(5, 1); sread(6, 2);
    issue(OP_VINTER, 1, 2, 0, 0, 0, 0, 1);
    issue(OP_FREE, 1, 0, 0, 0, 0, 0);
    issue(OP_FREE, 2, 0, 0, 0, 0, 0);

    // drain
    while (!(idle && expq.size() == 0)) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (u_dut.u_smt.va != '0) begin failures++; $display("stream registers left active"); end
    $display("results checked: %0d, L2 write beats: %0d", n_res, l2_writes);
    need("SMT full stall", ev_smt_full);
    need("window full stall", ev_win_full);
    need("S-Cache write-back to L2", ev_wb);
    need("S-Cache demand refill", ev_demand);
    need("wait on producer stream", ev_dep_wait);
    need("overlap dependence", ev_ovl);
    need("stream ID overwrite", ev_reuse);
    need("early termination (bound)", ev_bound);
    need("four lanes busy", ev_multi_lane);
    need("round-robin contention", ev_rr);
    need("translation buffer full", ev_tb_full);
    need("nested intersection", ev_nest);
    need("S_VINTER", ev_vinter);
    need("exception", ev_exc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
