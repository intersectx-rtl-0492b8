// ix_load_queue: stream part of the core's load queue.
// Accepts loads from NSRC sources (the four value address generators and the
// nested translator), one per cycle, round-robin, into LQ_N entries.  Each
// entry keeps, besides the address, a pointer to where the data must go:
// a vBuf entry (val0 or val1) or a translation-buffer entry.  The lowest
// entry not yet sent is issued to the L1 port, with its entry number as id;
// responses may come back in any order and are forwarded, one cycle later,
// with the entry's tag (ret_*), freeing the entry.
// LQ_N = 32 follows the published configuration; the issue order, round-robin
// and the L1 port handshake are this design's own.
module ix_load_queue
  import ix_pkg::*;
#(
  parameter int N    = 32,
  parameter int NSRC = NIU + 1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    src_valid [NSRC],
  input  addr_t   src_addr  [NSRC],
  input  lq_tag_t src_tag   [NSRC],
  output logic    src_ready [NSRC],
  output logic    mem_req,
  output addr_t   mem_addr,
  output logic [$clog2(N)-1:0] mem_id,
  input  logic    mem_gnt,
  input  logic    mem_rvalid,
  input  logic [$clog2(N)-1:0] mem_rid,
  input  val_t    mem_rdata,
  output logic    ret_valid,
  output lq_tag_t ret_tag,
  output val_t    ret_data,
  output logic    empty
);
  localparam int W  = $clog2(N);
  localparam int SW = (NSRC > 1) ? $clog2(NSRC) : 1;
  logic    v [N], issued [N];
  addr_t   addr [N];
  lq_tag_t tag  [N];

  logic          free_ok, iss_ok, src_any;
  logic [W-1:0]  free_idx, iss_idx;
  logic [SW-1:0] rr, src_sel;
  always_comb begin
    free_ok = 1'b0; free_idx = '0; iss_ok = 1'b0; iss_idx = '0; empty = 1'b1;
    for (int i = N-1; i >= 0; i--) begin
      if (!v[i]) begin free_ok = 1'b1; free_idx = W'(i); end
      if (v[i] && !issued[i]) begin iss_ok = 1'b1; iss_idx = W'(i); end
      if (v[i]) empty = 1'b0;
    end
    src_any = 1'b0; src_sel = '0;
    for (int o = NSRC; o >= 1; o--) begin
      automatic int s = (int'(rr) + o) % NSRC;
      if (src_valid[s]) begin src_any = 1'b1; src_sel = SW'(s); end
    end
    for (int s = 0; s < NSRC; s++) src_ready[s] = free_ok && src_any && src_sel == SW'(s);
  end
  assign mem_req  = iss_ok;
  assign mem_addr = addr[iss_idx];
  assign mem_id   = iss_idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin v[i] <= 1'b0; issued[i] <= 1'b0; addr[i] <= '0; tag[i] <= '0; end
      rr <= '0; ret_valid <= 1'b0; ret_tag <= '0; ret_data <= '0;
    end else begin
      ret_valid <= mem_rvalid;
      if (mem_rvalid) begin
        ret_tag  <= tag[mem_rid];
        ret_data <= mem_rdata;
        v[mem_rid] <= 1'b0;
      end
      if (mem_req && mem_gnt) issued[iss_idx] <= 1'b1;
      if (free_ok && src_any) begin
        v[free_idx] <= 1'b1; issued[free_idx] <= 1'b0;
        addr[free_idx] <= src_addr[src_sel]; tag[free_idx] <= src_tag[src_sel];
        rr <= src_sel;
      end
    end
  end

`ifndef SYNTHESIS
  a_rsp_valid: assert property (@(posedge clk) disable iff (!rst_n) mem_rvalid |-> (v[mem_rid] && issued[mem_rid]));
`endif
endmodule
