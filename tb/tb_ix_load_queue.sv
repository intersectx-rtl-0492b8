// tb_ix_load_queue: five sources (four VA_gens and the nested translator)
// push random word loads into the 32-entry load queue; the memory model
// answers out of order with random back-pressure.  Every answer must carry
// the tag of its request and the word stored at its address, every request
// must be answered exactly once, sources must be served fairly, and the
// queue must refuse new loads while 32 are outstanding.
module tb_ix_load_queue;
  import ix_pkg::*;
  localparam int NS = 5;
  logic clk = 0, rst_n = 0;
  logic src_valid [NS], src_ready [NS];
  addr_t src_addr [NS];
  lq_tag_t src_tag [NS];
  logic mem_req, mem_gnt, mem_rvalid, ret_valid, empty;
  addr_t mem_addr;
  logic [4:0] mem_id, mem_rid;
  val_t mem_rdata, ret_data;
  lq_tag_t ret_tag;
  logic hold = 0;
  logic l2_req = 0, l2_we = 0, l2_gnt, l2_rvalid;
  addr_t l2_addr = 0; beat_t l2_wdata = 0, l2_rdata; int l2_writes;
  logic l1_gnt;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ix_load_queue dut (.clk, .rst_n, .src_valid, .src_addr, .src_tag, .src_ready,
    .mem_req, .mem_addr, .mem_id, .mem_gnt, .mem_rvalid, .mem_rid, .mem_rdata,
    .ret_valid, .ret_tag, .ret_data, .empty);
  ix_mem_model #(.WORDS(4096)) u_mem (.clk, .l2_req, .l2_we, .l2_addr, .l2_wdata, .l2_gnt, .l2_rvalid, .l2_rdata,
    .l1_req(mem_req && !hold), .l1_addr(mem_addr), .l1_id(mem_id), .l1_gnt, .l1_rvalid(mem_rvalid),
    .l1_rid(mem_rid), .l1_rdata(mem_rdata), .l2_writes);
  assign mem_gnt = l1_gnt && !hold;

  // outstanding loads per 7-bit tag: expected data values
  val_t exp_d [int][$];
  int sent [NS], nret = 0, nsent = 0, full_seen = 0;
  logic [3:0] ctr [NS];
  logic run = 0;

  function automatic val_t word(addr_t a); return val_t'((a >> 2) * 32'h9e37 + 32'h11); endfunction

  always @(negedge clk) begin
    for (int s = 0; s < NS; s++) begin
      if (!src_valid[s] || src_ready_q[s]) begin
        src_valid[s] = run && ($urandom_range(0, 2) != 0);
        src_addr[s]  = addr_t'(4 * $urandom_range(0, 4095));
        src_tag[s]   = '{to_tb: (s == 4), lane: 2'(s), idx: ctr[s], which: ctr[s][0]};
      end
    end
  end
  logic src_ready_q [NS];
  always @(posedge clk) if (rst_n) begin
    int cnt_v;
    for (int s = 0; s < NS; s++) begin
      src_ready_q[s] <= src_ready[s] && src_valid[s];
      if (src_valid[s] && src_ready[s]) begin
        exp_d[int'(src_tag[s])].push_back(word(src_addr[s]));
        sent[s]++; nsent++; ctr[s] <= ctr[s] + 1;
      end
    end
    if (ret_valid) begin
      int k; int found;
      k = int'(ret_tag); found = -1;
      checks++;
      if (exp_d.exists(k))
        for (int i = 0; i < exp_d[k].size(); i++) if (exp_d[k][i] == ret_data && found < 0) found = i;
      if (found < 0) begin failures++; $display("unexpected answer tag %0h data %h", k, ret_data); end
      else exp_d[k].delete(found);
      nret++;
    end
    cnt_v = 0;
    for (int i = 0; i < 32; i++) cnt_v += dut.v[i];
    if (cnt_v == 32) begin
      full_seen++;
      for (int s = 0; s < NS; s++) if (src_ready[s]) begin failures++; $display("accepted while full"); end
    end
  end

  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int s = 0; s < NS; s++) begin src_valid[s] = 0; src_addr[s] = 0; src_tag[s] = '0; ctr[s] = 0; sent[s] = 0; src_ready_q[s] = 0; end
    #1;  // after the memory model has cleared its array
    for (int i = 0; i < 4096; i++) u_mem.mem[i] = word(addr_t'(4*i));
    repeat (2) @(posedge clk); rst_n = 1;
    run = 1;
    repeat (600) @(posedge clk);
    hold = 1;                      // memory stops accepting: the queue fills up
    repeat (100) @(posedge clk);
    hold = 0;
    repeat (1000) @(posedge clk);
    run = 0;
    repeat (200) @(posedge clk);
    checks++; if (nret != nsent || !empty) begin failures++; $display("sent %0d answered %0d", nsent, nret); end
    checks++; if (full_seen == 0) begin failures++; $display("queue never filled"); end
    for (int s = 0; s < NS; s++) begin
      checks++;
      if (sent[s] < nsent / 10) begin failures++; $display("source %0d starved: %0d of %0d", s, sent[s], nsent); end
    end
    $display("loads=%0d full_cycles=%0d", nsent, full_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
