// ix_va_gen: Value Address Generator of one IU lane.
// For each matched key pair of S_VINTER (positions ia in stream A and ib in
// stream B) it allocates a vBuf entry and sends two loads to the load queue:
// value 0 at base_a + 4*ia and value 1 at base_b + 4*ib, each tagged with the
// lane, the vBuf entry and which value it is.  Values are taken to be 4-byte
// words stored in key order (this design's choice).
// Interface: match valid/ready from the IU; alloc_req/alloc_gnt/alloc_idx to
// the vBuf (combinational grant); lq_valid/lq_ready to the load queue.
// One match is taken at most every two cycles (two loads per match).
module ix_va_gen
  import ix_pkg::*;
#(
  parameter int LANE = 0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    m_valid,
  input  len_t    m_ia,
  input  len_t    m_ib,
  output logic    m_ready,
  input  addr_t   base_a,
  input  addr_t   base_b,
  output logic    alloc_req,
  input  logic    alloc_gnt,
  input  logic [VB_W-1:0] alloc_idx,
  output logic    lq_valid,
  output addr_t   lq_addr,
  output lq_tag_t lq_tag,
  input  logic    lq_ready,
  output logic    busy
);
  typedef enum logic [1:0] { G_IDLE, G_V0, G_V1 } st_e;
  st_e   st;
  addr_t a0, a1;
  logic [VB_W-1:0] idx;

  assign alloc_req = (st == G_IDLE) && m_valid;
  assign m_ready   = alloc_req && alloc_gnt;
  assign busy      = (st != G_IDLE);
  assign lq_valid  = (st != G_IDLE);
  assign lq_addr   = (st == G_V1) ? a1 : a0;
  always_comb begin
    lq_tag       = '0;
    lq_tag.to_tb = 1'b0;
    lq_tag.lane  = 2'(LANE);
    lq_tag.idx   = 4'(idx);
    lq_tag.which = (st == G_V1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; a0 <= '0; a1 <= '0; idx <= '0;
    end else begin
      unique case (st)
        G_IDLE: if (m_ready) begin
          a0  <= base_a + addr_t'(m_ia << 2);
          a1  <= base_b + addr_t'(m_ib << 2);
          idx <= alloc_idx;
          st  <= G_V0;
        end
        G_V0: if (lq_ready) st <= G_V1;
        G_V1: if (lq_ready) st <= G_IDLE;
        default: st <= G_IDLE;
      endcase
    end
  end
endmodule
