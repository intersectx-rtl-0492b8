// ix_csr_regs: the three CSR graph registers.
// They hold the addresses of the CSR index array (start of each vertex's
// neighbour list), the CSR edge list, and the CSR offset array (per vertex,
// position within its neighbour list of the first neighbour larger than the
// vertex).  S_CSR loads all three at once (we); they reset to zero, which is
// this design's choice.  The nested intersection translator reads them.
module ix_csr_regs
  import ix_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  we,
  input  addr_t index_in,
  input  addr_t edge_in,
  input  addr_t offset_in,
  output addr_t csr_index,
  output addr_t csr_edge,
  output addr_t csr_offset
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      csr_index <= '0; csr_edge <= '0; csr_offset <= '0;
    end else if (we) begin
      csr_index <= index_in; csr_edge <= edge_in; csr_offset <= offset_in;
    end
  end
endmodule
