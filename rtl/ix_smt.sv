// ix_smt: Stream Mapping Table.
// Maps the stream IDs (sid) that instructions name to stream registers.
// Entry j always maps to stream register j, so its sreg field equals j.
// Each entry holds sid, V_D (stream defined), V_A (stream active), the start
// bit s (from the S-Cache), the produced bit p, and pred0/pred1, the streams
// it waits for.  As in the architecture, defining a stream sets V_D and V_A,
// decoding S_FREE clears V_D only, and retiring it clears V_A, which makes
// the entry free again.  Lookups are combinational and match only entries
// with V_D=1.
// Own choices: preds carry valid bits; a stream defined with preds (the
// overlapping-region case) sets p once all preds are produced, a stream
// defined as the output of a computation (is_out) waits for prod_en.
// Interface: three lookup ports, a free-entry finder, and one-cycle write
// strobes def_*, undef_*, rel_*, prod_*; updates take effect next cycle.
module ix_smt
  import ix_pkg::*;
#(
  parameter int N = NSREG
) (
  input  logic                clk,
  input  logic                rst_n,
  // lookups
  input  sid_t                lk_sid  [3],
  output logic [2:0]          lk_hit,
  output sreg_t               lk_sreg [3],
  // lowest free entry
  output logic                free_avail,
  output sreg_t               free_sreg,
  // define an entry
  input  logic                def_en,
  input  sreg_t               def_sreg,
  input  sid_t                def_sid,
  input  logic                def_is_out,
  input  logic [1:0]          def_pv,
  input  sreg_t               def_pred [2],
  // S_FREE decoded / retired
  input  logic                undef_en,
  input  sreg_t               undef_sreg,
  input  logic                rel_en,
  input  sreg_t               rel_sreg,
  // computation producing the stream finished
  input  logic                prod_en,
  input  sreg_t               prod_sreg,
  input  logic [N-1:0]        start_bits,
  output logic [N-1:0]        vd,
  output logic [N-1:0]        va,
  output logic [N-1:0]        p,
  output logic [N-1:0]        s,
  output logic [N-1:0]        is_out
);
  typedef struct packed {
    sid_t       sid;
    sreg_t      sreg;
    logic       vd;
    logic       va;
    logic       p;
    logic       is_out;
    logic [1:0] pv;
    sreg_t      pred0;
    sreg_t      pred1;
  } smt_entry_t;

  smt_entry_t tab [N];

  always_comb begin
    for (int k = 0; k < 3; k++) begin
      lk_hit[k]  = 1'b0;
      lk_sreg[k] = '0;
      for (int j = N-1; j >= 0; j--)
        if (tab[j].vd && tab[j].sid == lk_sid[k]) begin
          lk_hit[k]  = 1'b1;
          lk_sreg[k] = tab[j].sreg;
        end
    end
    free_avail = 1'b0;
    free_sreg  = '0;
    for (int j = N-1; j >= 0; j--)
      if (!tab[j].va) begin
        free_avail = 1'b1;
        free_sreg  = sreg_t'(j);
      end
    for (int j = 0; j < N; j++) begin
      vd[j] = tab[j].vd;
      va[j] = tab[j].va;
      p[j]  = tab[j].p;
      is_out[j] = tab[j].is_out;
    end
  end
  assign s = start_bits & va;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N; j++) tab[j] <= '0;
    end else begin
      for (int j = 0; j < N; j++) begin
        // dependence on overlapping streams resolved
        if (tab[j].va && !tab[j].p && !tab[j].is_out &&
            (!tab[j].pv[0] || p[tab[j].pred0]) && (!tab[j].pv[1] || p[tab[j].pred1]))
          tab[j].p <= 1'b1;
      end
      if (prod_en)  tab[prod_sreg].p   <= 1'b1;
      if (undef_en) tab[undef_sreg].vd <= 1'b0;
      if (rel_en) begin
        tab[rel_sreg].va <= 1'b0;
        tab[rel_sreg].vd <= 1'b0;
      end
      if (def_en) begin
        tab[def_sreg].sid    <= def_sid;
        tab[def_sreg].sreg   <= def_sreg;
        tab[def_sreg].vd     <= 1'b1;
        tab[def_sreg].va     <= 1'b1;
        tab[def_sreg].is_out <= def_is_out;
        tab[def_sreg].pv     <= def_pv;
        tab[def_sreg].pred0  <= def_pred[0];
        tab[def_sreg].pred1  <= def_pred[1];
        tab[def_sreg].p      <= 1'b0;
      end
    end
  end

`ifndef SYNTHESIS
  // A stream is freed only after it was defined.
  a_rel_active: assert property (@(posedge clk) disable iff (!rst_n) rel_en |-> tab[rel_sreg].va);
  a_def_free:   assert property (@(posedge clk) disable iff (!rst_n)
                                 def_en |-> (!tab[def_sreg].va || tab[def_sreg].vd));
`endif
endmodule
