// ix_lane: one intersection lane - an intersection unit (ix_iu) with its
// value address generator (ix_va_gen), value buffer (ix_vbuf) and stream
// value processing unit (ix_svpu) holding acc_reg, wired as in the
// architecture: IU -> VA_gen -> load queue -> vBuf -> SVPU -> acc_reg.
// `start` launches one stream computation; when it has finished - for
// S_VINTER only once every value pair has been accumulated - `fin` rises and
// stays high with `result` (result-key count, or acc_reg for S_VINTER)
// until `ack`.  The lane is busy from start to ack.
module ix_lane
  import ix_pkg::*;
#(
  parameter int LANE = 0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  iu_op_e  op,
  input  logic    cnt_only,
  input  vop_e    vop,
  input  sreg_t   sreg_a,
  input  sreg_t   sreg_b,
  input  sreg_t   sreg_o,
  input  len_t    len_a,
  input  len_t    len_b,
  input  key_t    bound,
  input  addr_t   vbase_a,
  input  addr_t   vbase_b,
  output logic    rd_req   [2],
  output sreg_t   rd_sreg  [2],
  output len_t    rd_grp   [2],
  input  logic    rd_gnt   [2],
  input  logic    rd_rvalid[2],
  input  beat_t   rd_rdata,
  output logic    wr_req,
  output sreg_t   wr_sreg,
  output len_t    wr_grp,
  output beat_t   wr_data,
  input  logic    wr_gnt,
  output logic    lq_valid,
  output addr_t   lq_addr,
  output lq_tag_t lq_tag,
  input  logic    lq_ready,
  input  logic    ret_valid,
  input  lq_tag_t ret_tag,
  input  val_t    ret_data,
  output logic    busy,
  output logic    fin,
  output logic [31:0] result,
  input  logic    ack
);
  logic   iu_busy, iu_done, m_valid, m_ready, vg_busy, a_req, a_gnt, vb_empty, o_valid;
  len_t   iu_count, m_ia, m_ib;
  logic [VB_W-1:0] a_idx;
  val_t   o_v0, o_v1, acc;
  logic   r_busy, iu_fin, r_vint;
  len_t   r_count;
  vop_e   r_vop;
  addr_t  r_va, r_vb;

  ix_iu u_iu (
    .clk, .rst_n, .start, .op, .cnt_only, .sreg_a, .sreg_b, .sreg_o, .len_a, .len_b, .bound,
    .rd_req, .rd_sreg, .rd_grp, .rd_gnt, .rd_rvalid, .rd_rdata,
    .wr_req, .wr_sreg, .wr_grp, .wr_data, .wr_gnt,
    .m_valid, .m_ia, .m_ib, .m_ready, .busy(iu_busy), .done(iu_done), .count(iu_count));

  ix_va_gen #(.LANE(LANE)) u_vag (
    .clk, .rst_n, .m_valid, .m_ia, .m_ib, .m_ready, .base_a(r_va), .base_b(r_vb),
    .alloc_req(a_req), .alloc_gnt(a_gnt), .alloc_idx(a_idx),
    .lq_valid, .lq_addr, .lq_tag, .lq_ready, .busy(vg_busy));

  ix_vbuf u_vbuf (
    .clk, .rst_n, .clr(start), .alloc_req(a_req), .alloc_gnt(a_gnt), .alloc_idx(a_idx),
    .fill_valid(ret_valid && !ret_tag.to_tb && ret_tag.lane == 2'(LANE)),
    .fill_idx(VB_W'(ret_tag.idx)), .fill_which(ret_tag.which), .fill_data(ret_data),
    .out_valid(o_valid), .out_val0(o_v0), .out_val1(o_v1), .out_ready(1'b1), .empty(vb_empty));

  ix_svpu u_svpu (
    .clk, .rst_n, .clr(start), .op(r_vop), .in_valid(o_valid), .val0(o_v0), .val1(o_v1), .acc);

  assign busy   = r_busy;
  assign fin    = r_busy && iu_fin && (!r_vint || (!vg_busy && !m_valid && vb_empty));
  assign result = r_vint ? 32'(acc) : 32'(r_count);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_busy <= 1'b0; iu_fin <= 1'b0; r_vint <= 1'b0; r_count <= '0; r_vop <= VOP_MAC; r_va <= '0; r_vb <= '0;
    end else begin
      if (start) begin
        r_busy <= 1'b1; iu_fin <= 1'b0; r_vint <= (op == IU_VINTER); r_vop <= vop;
        r_va <= vbase_a; r_vb <= vbase_b;
      end
      if (iu_done) begin iu_fin <= 1'b1; r_count <= iu_count; end
      if (ack) begin r_busy <= 1'b0; iu_fin <= 1'b0; end
    end
  end
  wire unused_ok = iu_busy;
endmodule
