// tb_ix_smt: drives the stream mapping table through define, lookup,
// S_FREE decode (VD clear), retire (VA clear), table-full, produced and
// dependence-on-overlap cases, and also random defines and frees checked
// against a reference table.
module tb_ix_smt;
  import ix_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  sid_t lk_sid [3];
  logic [2:0] lk_hit;
  sreg_t lk_sreg [3];
  logic free_avail; sreg_t free_sreg;
  logic def_en = 0, def_is_out = 0; sreg_t def_sreg = 0; sid_t def_sid = 0; logic [1:0] def_pv = 0; sreg_t def_pred [2];
  logic undef_en = 0, rel_en = 0, prod_en = 0; sreg_t undef_sreg = 0, rel_sreg = 0, prod_sreg = 0;
  logic [N-1:0] start_bits = 0, vd, va, p, s, is_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ix_smt dut (.*);

  task automatic chk(bit c, string m); checks++; if (!c) begin failures++; $display("FAIL: %s", m); end endtask
  task automatic define(int r, int id, bit out, logic [1:0] pv = 0, int p0 = 0, int p1 = 0);
    @(negedge clk); def_en = 1; def_sreg = sreg_t'(r); def_sid = sid_t'(id); def_is_out = out;
    def_pv = pv; def_pred[0] = sreg_t'(p0); def_pred[1] = sreg_t'(p1);
    @(negedge clk); def_en = 0;
  endtask
  task automatic pulse_undef(int r); @(negedge clk); undef_en = 1; undef_sreg = sreg_t'(r); @(negedge clk); undef_en = 0; endtask
  task automatic pulse_rel(int r);   @(negedge clk); rel_en = 1;   rel_sreg = sreg_t'(r);   @(negedge clk); rel_en = 0; endtask
  task automatic pulse_prod(int r);  @(negedge clk); prod_en = 1;  prod_sreg = sreg_t'(r);  @(negedge clk); prod_en = 0; endtask
  task automatic look(int k, int id); lk_sid[k] = sid_t'(id); #1; endtask

  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    int rv [N]; int ra [N]; int rid [N];
    def_pred[0] = 0; def_pred[1] = 0;
    for (int k = 0; k < 3; k++) lk_sid[k] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); chk(free_avail && free_sreg == 0, "free after reset");
    // fill the table
    for (int j = 0; j < N; j++) begin
      chk(free_avail && free_sreg == sreg_t'(j), "lowest free entry");
      define(j, 40 + j, 0);
    end
    chk(!free_avail, "table full: rename must stall");
    chk(va == '1 && vd == '1, "all entries VA/VD");
    @(negedge clk); chk(p == '1, "key streams with no pending source are produced");
    for (int j = 0; j < N; j++) begin
      look(j % 3, 40 + j); chk(lk_hit[j % 3] && lk_sreg[j % 3] == sreg_t'(j), "lookup");
    end
    look(0, 7); chk(!lk_hit[0], "lookup miss");
    // S_FREE decoded: sid no longer visible but the register stays allocated
    pulse_undef(3);
    look(0, 43); chk(!lk_hit[0], "VD cleared on decode");
    chk(va[3] && !free_avail, "VA still set until retire");
    pulse_rel(3);
    chk(free_avail && free_sreg == 3 && !va[3], "freed on retire");
    // output stream waits for its producer; a stream overlapping it waits too
    define(3, 100, 1);
    pulse_undef(5); pulse_rel(5);
    define(5, 101, 0, 2'b01, 3, 0);
    repeat (3) @(negedge clk);
    chk(is_out[3] && !p[3] && !p[5], "output and dependent stream not produced");
    pulse_prod(3);
    chk(p[3], "produced");
    @(negedge clk); chk(p[5], "dependent stream resolves after its predecessor");
    // start bits are reported only for allocated entries
    start_bits = 16'h00ff; pulse_undef(2); pulse_rel(2); #1;
    chk(s == 16'h00fb, "s bits");
    // random traffic against a reference
    for (int j = 0; j < N; j++) begin rv[j] = vd[j]; ra[j] = va[j]; rid[j] = 0; end
    for (int j = 0; j < N; j++) if (vd[j]) rid[j] = (j == 3) ? 100 : (j == 5) ? 101 : 40 + j;
    for (int t = 0; t < 400; t++) begin
      int j; j = $urandom_range(0, N-1);
      case ($urandom_range(0, 2))
        0: if (free_avail) begin
             j = free_sreg; rid[j] = 200 + t; rv[j] = 1; ra[j] = 1; define(j, 200 + t, 0);
           end
        1: if (rv[j]) begin rv[j] = 0; pulse_undef(j); end
        default: if (ra[j] && !rv[j]) begin ra[j] = 0; pulse_rel(j); end
      endcase
      for (int k = 0; k < N; k++) begin
        chk(vd[k] == rv[k][0] && va[k] == ra[k][0], "random VD/VA");
        if (rv[k]) begin look(1, rid[k]); chk(lk_hit[1] && lk_sreg[1] == sreg_t'(k), "random lookup"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
