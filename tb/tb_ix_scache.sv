// tb_ix_scache: exercises the stream cache with the memory model as L2.
//  - start prefetch after S_READ: start_bits rises, and a read of group 0
//    is then granted in the cycle it is asked and answered one cycle later;
//  - two ports stream two 200/100-key streams at once: every 4-key group
//    must match memory, at most one group leaves per cycle (16 B/cycle), and
//    a port reading a present group is never made to wait more than NRD-1
//    cycles behind the others (round-robin);
//  - an IU write port fills an 80-key output stream; replacing its dirty
//    first chunk must write it back to L2, and reading it back must return
//    the written keys, refetching the evicted chunk from L2;
//  - invalidation clears the start bit.
module tb_ix_scache;
  import ix_pkg::*;
  localparam int N = 16, NRD = 9, NWR = 4;
  logic clk = 0, rst_n = 0;
  addr_t key_addr [N]; len_t len [N];
  logic rd_req [NRD], rd_gnt [NRD], rd_rvalid [NRD]; sreg_t rd_sreg [NRD]; len_t rd_grp [NRD]; beat_t rd_rdata;
  logic wr_req [NWR], wr_gnt [NWR]; sreg_t wr_sreg [NWR]; len_t wr_grp [NWR]; beat_t wr_data [NWR];
  logic pf_req = 0, inv_req = 0; sreg_t pf_sreg = 0, inv_sreg = 0;
  logic [N-1:0] start_bits, slot_busy;
  logic l2_req, l2_we, l2_gnt, l2_rvalid; addr_t l2_addr; beat_t l2_wdata, l2_rdata;
  logic l1_gnt, l1_rvalid; logic [4:0] l1_rid; val_t l1_rdata; int l2_writes;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ix_scache dut (.*);
  ix_mem_model #(.WORDS(1 << 16)) u_mem (.clk, .l2_req, .l2_we, .l2_addr, .l2_wdata, .l2_gnt, .l2_rvalid, .l2_rdata,
    .l1_req(1'b0), .l1_addr('0), .l1_id('0), .l1_gnt, .l1_rvalid, .l1_rid, .l1_rdata, .l2_writes);

  task automatic chk(bit c, string m); checks++; if (!c) begin failures++; $display("FAIL: %s", m); end endtask
  function automatic key_t key_of(int sr, int i); return key_t'((sr << 16) + 3 * i + 1); endfunction

  int wait_max [NRD];
  // read groups g0..g1-1 of stream sr through port k and compare each beat
  task automatic read_stream(int k, int sr, int ng, bit from_mem);
    for (int g = 0; g < ng; g++) begin
      int w; w = 0;
      @(negedge clk); rd_req[k] = 1; rd_sreg[k] = sreg_t'(sr); rd_grp[k] = len_t'(g);
      @(posedge clk); #1;
      while (!rd_gnt_q[k]) begin
        if (hit_wait[k]) w++;
        @(posedge clk); #1;
      end
      if (w > wait_max[k]) wait_max[k] = w;
      checks++;
      if (!rd_rvalid[k]) begin failures++; $display("port %0d: no data one cycle after grant", k); end
      for (int i = 0; i < 4; i++) begin
        key_t e; e = from_mem ? u_mem.mem[(key_addr[sr] >> 2) + 4*g + i] : key_of(sr, 4*g + i);
        if (4*g + i < int'(len[sr]) && rd_rdata[32*i +: 32] != e) begin
          failures++; $display("port %0d stream %0d key %0d: %h expected %h", k, sr, 4*g+i, rd_rdata[32*i +: 32], e);
        end
      end
      rd_req[k] = 0;
    end
    @(negedge clk); rd_req[k] = 0;
  endtask

  // grant seen in the previous cycle; "hit_wait": asked for a present group but not granted
  logic rd_gnt_q [NRD], hit_wait [NRD];
  int gnt_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    int ng; ng = 0;
    for (int k = 0; k < NRD; k++) begin
      rd_gnt_q[k] <= rd_req[k] && rd_gnt[k];
      hit_wait[k] <= rd_req[k] && !rd_gnt[k] && dut.rd_hit[k];
      ng += rd_gnt[k];
    end
    if (ng > 1) begin failures++; $display("two read grants in one cycle"); end
    gnt_cycles += ng;
  end

  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int wb0;
    for (int j = 0; j < N; j++) begin key_addr[j] = addr_t'(32'h1000 * (j + 1)); len[j] = 0; end
    for (int k = 0; k < NRD; k++) begin rd_req[k] = 0; rd_sreg[k] = 0; rd_grp[k] = 0; wait_max[k] = 0; end
    for (int w = 0; w < NWR; w++) begin wr_req[w] = 0; wr_sreg[w] = 0; wr_grp[w] = 0; wr_data[w] = 0; end
    len[0] = 200; len[1] = 100;
    #1;  // after the memory model has cleared its array
    for (int i = 0; i < 200; i++) u_mem.mem[(key_addr[0] >> 2) + i] = key_of(0, i);
    for (int i = 0; i < 100; i++) u_mem.mem[(key_addr[1] >> 2) + i] = key_of(1, i);
    repeat (2) @(posedge clk); rst_n = 1;
    // start prefetch
    @(negedge clk); pf_req = 1; pf_sreg = 0; @(negedge clk); pf_req = 0;
    fork begin repeat (200) @(posedge clk); end begin wait (start_bits[0]); end join_any
    chk(start_bits[0], "start prefetch sets the start bit");
    @(negedge clk); rd_req[0] = 1; rd_sreg[0] = 0; rd_grp[0] = 0; #1;
    chk(rd_gnt[0], "present group granted in the cycle it is asked");
    @(posedge clk); #1; chk(rd_rvalid[0] && rd_rdata[31:0] == key_of(0, 0), "data one cycle after grant");
    @(negedge clk); rd_req[0] = 0;
    // two streams at once, plus a third port re-reading stream 0
    fork
      read_stream(0, 0, 50, 0);
      read_stream(1, 1, 25, 0);
      read_stream(4, 0, 50, 0);
    join
    for (int k = 0; k < NRD; k++) chk(wait_max[k] <= NRD - 1, "round-robin wait bound");
    // output stream written by IU write port 1 into stream register 2
    wb0 = l2_writes;
    for (int g = 0; g < 20; g++) begin
      @(negedge clk); wr_req[1] = 1; wr_sreg[1] = 2; wr_grp[1] = len_t'(g);
      for (int i = 0; i < 4; i++) wr_data[1][32*i +: 32] = key_of(2, 4*g + i);
      @(posedge clk); while (!wr_gnt[1]) @(posedge clk);
    end
    @(negedge clk); wr_req[1] = 0; len[2] = 80;
    chk(l2_writes - wb0 == 8, "dirty chunk 0 written back (8 beats) when chunk 2 replaced it");
    for (int i = 0; i < 32; i++) chk(u_mem.mem[(key_addr[2] >> 2) + i] == key_of(2, i), "written-back key");
    read_stream(2, 2, 20, 0);
    chk(l2_writes - wb0 >= 16, "dirty chunk 2 written back when chunk 0 was refetched");
    // invalidate
    @(negedge clk); inv_req = 1; inv_sreg = 0; @(negedge clk); inv_req = 0; #1;
    chk(!start_bits[0], "invalidate clears the start bit");
    $display("grants=%0d wait_max=%0d/%0d/%0d", gnt_cycles, wait_max[0], wait_max[1], wait_max[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
