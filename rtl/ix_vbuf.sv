// ix_vbuf: value buffer of one IU lane.
// Each entry has a valid bit v and two values val0/val1 with ready bits
// r0/r1, as in the architecture.  The value address generator allocates an
// entry per matched pair; the load queue fills val0 or val1 and sets its
// ready bit when the load returns; the lowest entry with both ready bits set
// is offered to the SVPU and freed when taken.  Because the accumulation is
// commutative, entries may leave in any order.
// Interface: alloc_req/alloc_gnt/alloc_idx (grant is combinational: a free
// entry exists), fill_* from the load queue, out_valid/out_ready to the SVPU.
// VB_N (8 entries) is this design's choice.
// Lint reports rst_n as used both synchronously and asynchronously: the
// "synchronous" use is only the `disable iff (!rst_n)` of the simulation
// assertion below; every flop of the design resets asynchronously.
module ix_vbuf
  import ix_pkg::*;
#(
  parameter int N = VB_N
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clr,
  input  logic   alloc_req,
  output logic   alloc_gnt,
  output logic [$clog2(N)-1:0] alloc_idx,
  input  logic   fill_valid,
  input  logic [$clog2(N)-1:0] fill_idx,
  input  logic   fill_which,
  input  val_t   fill_data,
  output logic   out_valid,
  output val_t   out_val0,
  output val_t   out_val1,
  input  logic   out_ready,
  output logic   empty
);
  localparam int W = $clog2(N);
  logic v [N], r0 [N], r1 [N];
  val_t val0 [N], val1 [N];
  logic [W-1:0] out_idx;

  always_comb begin
    alloc_gnt = 1'b0; alloc_idx = '0;
    out_valid = 1'b0; out_idx = '0;
    empty = 1'b1;
    for (int i = N-1; i >= 0; i--) begin
      if (!v[i]) begin alloc_gnt = alloc_req; alloc_idx = W'(i); end
      if (v[i] && r0[i] && r1[i]) begin out_valid = 1'b1; out_idx = W'(i); end
      if (v[i]) empty = 1'b0;
    end
    out_val0 = val0[out_idx];
    out_val1 = val1[out_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        v[i] <= 1'b0; r0[i] <= 1'b0; r1[i] <= 1'b0; val0[i] <= '0; val1[i] <= '0;
      end
    end else if (clr) begin
      for (int i = 0; i < N; i++) begin v[i] <= 1'b0; r0[i] <= 1'b0; r1[i] <= 1'b0; end
    end else begin
      if (out_valid && out_ready) v[out_idx] <= 1'b0;
      if (fill_valid) begin
        if (fill_which) begin val1[fill_idx] <= fill_data; r1[fill_idx] <= 1'b1; end
        else            begin val0[fill_idx] <= fill_data; r0[fill_idx] <= 1'b1; end
      end
      if (alloc_gnt) begin
        v[alloc_idx] <= 1'b1; r0[alloc_idx] <= 1'b0; r1[alloc_idx] <= 1'b0;
      end
    end
  end

`ifndef SYNTHESIS
  a_fill_alloc: assert property (@(posedge clk) disable iff (!rst_n) fill_valid |-> v[fill_idx]);
`endif
endmodule
