// intersectx: stream unit of a core with the stream ISA extension.
// The core hands over decoded stream instructions (S_READ, S_VREAD, S_FREE,
// S_FETCH, S_INTER(.C), S_SUB(.C), S_VINTER, S_CSR, S_NESTINTER) in program
// order with the values of their register operands; results come back in
// program order when the instruction retires.
//
// Rename: stream IDs are mapped to stream registers through the Stream
// Mapping Table (ix_smt).  S_READ/S_VREAD and the output stream of
// S_INTER/S_SUB define a mapping (allocating a free register, or reusing the
// register of an ID that is still defined); S_FREE clears V_D; unknown IDs
// raise an exception.  An S_READ whose key region may overlap a not yet
// produced output stream (its region taken as max_len keys) gets that stream
// as pred0/pred1 and is produced only after it.  Rename stalls when no stream
// register is free, the window is full, or a reused register is still in use.
// S_NESTINTER starts the nested translator, whose micro-ops enter rename
// ahead of any later instruction.
// Window: WIN entries hold the renamed instructions (their ROB entries).  The
// oldest entry whose input streams are produced and whose unit is free is
// dispatched each cycle: computations to one of four lanes (IU + VA_gen +
// vBuf + SVPU), S_FETCH to the fetch unit, S_READ to the S-Cache as a
// prefetch of the start of the stream.  A finished output stream sets its
// produced bit and length.  The head retires when done; S_FREE then clears
// V_A and releases the register.
// Memory: the S-Cache talks to L2 (4-word beats); the load queue sends value
// and CSR loads to L1 (one word, tagged).  Output streams live at
// spill_base + sreg*SPILL_KEYS*4 once they leave the S-Cache.
// The blocks and their roles follow the published architecture; the window,
// dispatch rule, spill region and the handshakes are this design's own.
// Lint lists unused bits of the window-entry copies (dw, cw, hw): each
// stage reads only the fields it needs from the shared entry struct.
module intersectx
  import ix_pkg::*;
#(
  parameter int WIN        = 16,
  parameter int LQ_N       = 32,
  parameter int SPILL_KEYS = 32768
) (
  input  logic   clk,
  input  logic   rst_n,
  // instructions from the core
  input  logic   in_valid,
  input  insn_t  in_insn,
  output logic   in_ready,
  // retired results
  output logic   res_valid,
  output op_e    res_op,
  output logic [31:0] res_value,
  output logic   res_exc,
  input  addr_t  spill_base,
  output logic   idle,
  // S-Cache <-> L2
  output logic   l2_req,
  output logic   l2_we,
  output addr_t  l2_addr,
  output beat_t  l2_wdata,
  input  logic   l2_gnt,
  input  logic   l2_rvalid,
  input  beat_t  l2_rdata,
  // load queue <-> L1
  output logic   l1_req,
  output addr_t  l1_addr,
  output logic [$clog2(LQ_N)-1:0] l1_id,
  input  logic   l1_gnt,
  input  logic   l1_rvalid,
  input  logic [$clog2(LQ_N)-1:0] l1_rid,
  input  val_t   l1_rdata
);
  localparam int N   = NSREG;
  localparam int WW  = $clog2(WIN);
  localparam int NRD = 2*NIU + 1;

  // ------------------------------------------------------------------
  // window entries
  typedef struct packed {
    logic        v;
    op_e         op;
    sreg_t       a, b, o;
    key_t        bound;
    len_t        off;
    vop_e        imm;
    logic        uop;
    logic        exc;
    logic        disp;
    logic        done;
    logic [31:0] res;
  } win_t;
  win_t        win [WIN];
  logic [WW-1:0] head, tail;
  logic [WW:0]   wcnt;

  // ------------------------------------------------------------------
  // sub-blocks' signals
  sid_t  lk_sid [3];
  logic [2:0] lk_hit;
  sreg_t lk_sreg [3];
  logic  free_avail;
  sreg_t free_sreg;
  logic  def_en, undef_en, rel_en, prod_en;
  sreg_t def_sreg, undef_sreg, rel_sreg, prod_sreg;
  sid_t  def_sid;
  logic  def_is_out;
  logic [1:0] def_pv;
  sreg_t def_pred [2];
  logic [N-1:0] vd, va, p, sbit, is_out, start_bits, slot_busy;

  logic  sr_we, len_we;
  sreg_t sr_idx, len_idx;
  addr_t sr_kaddr, sr_vaddr;
  len_t  sr_len, sr_max, len_val;
  logic  sr_kv;
  logic  sr_valid [N];
  addr_t key_addr [N], val_addr [N];
  len_t  slen [N], max_len [N];
  logic  is_kv [N];

  logic  csr_we;
  addr_t csr_index, csr_edge, csr_offset;

  // ------------------------------------------------------------------
  // instruction source: translator micro-ops first
  logic  t_uop_valid, t_uop_ready, t_front_busy, t_busy, t_done, t_start;
  insn_t t_uop;
  logic [31:0] t_sum;
  logic  src_valid, src_uop;
  insn_t I;
  always_comb begin
    src_uop   = t_uop_valid;
    src_valid = t_uop_valid || (in_valid && !t_front_busy);
    I         = t_uop_valid ? t_uop : in_insn;
  end
  function automatic sid_t sid_of(logic u, logic [31:0] r);
    return u ? sid_t'(r[SID_W-1:0]) : {1'b0, r[SID_W-2:0]};
  endfunction

  // ------------------------------------------------------------------
  // rename
  logic is_def, is_outop, needs_a, needs_b, exc, stall, accept, mk_entry;
  sreg_t tgt;
  logic  tgt_reuse;
  logic [N-1:0] in_use, ovl;
  addr_t rd_end;
  always_comb begin
    lk_sid[0] = sid_of(src_uop, I.r0);
    lk_sid[1] = sid_of(src_uop, I.r1);
    lk_sid[2] = sid_of(src_uop, I.r2);
    is_outop  = I.op inside {OP_INTER, OP_SUB};
    is_def    = I.op inside {OP_READ, OP_VREAD} || is_outop;
    needs_a   = I.op inside {OP_FREE, OP_FETCH, OP_SUB, OP_SUBC, OP_INTER, OP_INTERC, OP_VINTER, OP_NESTINTER};
    needs_b   = I.op inside {OP_SUB, OP_SUBC, OP_INTER, OP_INTERC, OP_VINTER};
    exc = (needs_a && !lk_hit[0]) || (needs_b && !lk_hit[1]) ||
          (I.op == OP_VINTER && (!is_kv[lk_sreg[0]] || !is_kv[lk_sreg[1]]));
    tgt_reuse = lk_hit[2];
    tgt       = lk_hit[2] ? lk_sreg[2] : free_sreg;
    // stream registers still named by the window
    in_use = '0;
    for (int e = 0; e < WIN; e++)
      if (win[e].v) begin
        if (win[e].op inside {OP_FREE, OP_FETCH, OP_SUB, OP_SUBC, OP_INTER, OP_INTERC, OP_VINTER}) in_use[win[e].a] = 1'b1;
        if (win[e].op inside {OP_SUB, OP_SUBC, OP_INTER, OP_INTERC, OP_VINTER}) in_use[win[e].b] = 1'b1;
        if (win[e].op inside {OP_READ, OP_VREAD, OP_SUB, OP_INTER}) in_use[win[e].o] = 1'b1;
      end
    // conservative overlap of an S_READ region with unproduced output streams
    rd_end = I.r0 + addr_t'(I.r1 << 2);
    for (int j = 0; j < N; j++)
      ovl[j] = va[j] && is_out[j] && !p[j] &&
               (I.r0 < key_addr[j] + addr_t'(max_len[j] << 2)) && (key_addr[j] < rd_end);
    def_pv = '0; def_pred[0] = '0; def_pred[1] = '0;
    if (I.op inside {OP_READ, OP_VREAD})
      for (int j = N-1; j >= 0; j--)
        if (ovl[j]) begin
          def_pred[1] = def_pred[0]; def_pv[1] = def_pv[0];
          def_pred[0] = sreg_t'(j);  def_pv[0] = 1'b1;
        end
    if (is_outop) begin def_pred[0] = lk_sreg[0]; def_pred[1] = lk_sreg[1]; def_pv = 2'b11; end
    mk_entry = !(I.op == OP_NESTINTER && !exc);
    stall = (mk_entry && wcnt == (WW+1)'(WIN)) ||
            (is_def && !exc && !tgt_reuse && !free_avail) ||
            (is_def && !exc && tgt_reuse && in_use[tgt]) ||
            (is_def && !exc && slot_busy[tgt]) ||
            (I.op inside {OP_READ, OP_VREAD} && $countones(ovl) > 2) ||
            (I.op == OP_NESTINTER && t_busy);
    accept = src_valid && !stall;
  end
  assign in_ready    = !t_uop_valid && !t_front_busy && !stall;
  assign t_uop_ready = t_uop_valid && !stall;
  assign t_start     = accept && I.op == OP_NESTINTER && !exc;

  always_comb begin
    def_en = accept && is_def && !exc;
    def_sreg = tgt; def_sid = lk_sid[2]; def_is_out = is_outop;
    undef_en = accept && I.op == OP_FREE && !exc; undef_sreg = lk_sreg[0];
    sr_we = def_en; sr_idx = tgt; sr_kv = (I.op == OP_VREAD);
    if (is_outop) begin
      sr_kaddr = spill_base + addr_t'((32'(tgt) * SPILL_KEYS) << 2);
      sr_vaddr = '0;
      sr_len   = '0;
      sr_max   = (I.op == OP_SUB || max_len[lk_sreg[0]] < max_len[lk_sreg[1]]) ?
                 max_len[lk_sreg[0]] : max_len[lk_sreg[1]];
    end else begin
      sr_kaddr = I.r0; sr_vaddr = I.r3; sr_len = I.r1; sr_max = I.r1;
    end
    csr_we = accept && I.op == OP_CSR;
  end

  // ------------------------------------------------------------------
  // dispatch
  logic [NIU-1:0] lane_busy, lane_fin, lane_ack, lane_start;
  logic [31:0]    lane_res [NIU];
  logic [WW-1:0]  lane_ent [NIU];
  logic           f_busy;
  logic           d_any;
  logic [WW-1:0]  d_idx;
  logic [1:0]     d_lane;
  logic           lane_free;
  always_comb begin
    lane_free = 1'b0; d_lane = '0;
    for (int l = NIU-1; l >= 0; l--) if (!lane_busy[l]) begin lane_free = 1'b1; d_lane = 2'(l); end
    d_any = 1'b0; d_idx = '0;
    for (int k = WIN-1; k >= 0; k--) begin
      automatic logic [WW-1:0] e = head + WW'(k);
      automatic win_t w = win[e];
      automatic logic ok = 1'b0;
      if (w.v && !w.done && !w.disp) begin
        unique case (w.op)
          OP_SUB, OP_SUBC, OP_INTER, OP_INTERC, OP_VINTER: ok = p[w.a] && p[w.b] && lane_free;
          OP_FETCH:            ok = p[w.a] && !f_busy;
          OP_READ, OP_VREAD:   ok = p[w.o] && !slot_busy[w.o];
          default:             ok = 1'b0;
        endcase
      end
      if (ok && k < int'(wcnt)) begin d_any = 1'b1; d_idx = e; end
    end
  end
  win_t dw;
  assign dw = win[d_idx];
  logic d_lane_go, d_fetch_go, d_read_go;
  assign d_lane_go  = d_any && (dw.op inside {OP_SUB, OP_SUBC, OP_INTER, OP_INTERC, OP_VINTER});
  assign d_fetch_go = d_any && dw.op == OP_FETCH;
  assign d_read_go  = d_any && (dw.op inside {OP_READ, OP_VREAD});

  // completion of one lane per cycle
  logic          c_any;
  logic [1:0]    c_lane;
  always_comb begin
    c_any = 1'b0; c_lane = '0;
    for (int l = NIU-1; l >= 0; l--) if (lane_fin[l]) begin c_any = 1'b1; c_lane = 2'(l); end
    for (int l = 0; l < NIU; l++) lane_ack[l] = c_any && c_lane == 2'(l);
  end
  win_t cw;
  assign cw        = win[lane_ent[c_lane]];
  assign prod_en   = c_any && (cw.op inside {OP_INTER, OP_SUB});
  assign prod_sreg = cw.o;
  assign len_we    = prod_en;
  assign len_idx   = cw.o;
  assign len_val   = len_t'(lane_res[c_lane]);
  logic  t_cnt_valid;
  assign t_cnt_valid = c_any && cw.op == OP_INTERC && cw.uop;

  // retire
  win_t hw;
  assign hw = win[head];
  logic retire;
  assign retire = wcnt != '0 && hw.done;
  assign rel_en   = retire && hw.op == OP_FREE && !hw.exc;
  assign rel_sreg = hw.a;

  // ------------------------------------------------------------------
  // fetch unit and shared S-Cache port
  logic   sc_rd_req [NRD], sc_rd_gnt [NRD], sc_rd_rvalid [NRD];
  sreg_t  sc_rd_sreg [NRD];
  len_t   sc_rd_grp [NRD];
  beat_t  sc_rd_rdata;
  logic   sc_wr_req [NIU], sc_wr_gnt [NIU];
  sreg_t  sc_wr_sreg [NIU];
  len_t   sc_wr_grp [NIU];
  beat_t  sc_wr_data [NIU];

  logic   f_wait, f_infl, f_owner;
  sreg_t  f_sreg;
  len_t   f_off;
  logic [WW-1:0] f_ent;
  logic   t_rd_req, t_rd_gnt, t_rd_rvalid;
  sreg_t  t_rd_sreg;
  len_t   t_rd_grp;
  always_comb begin
    sc_rd_req[NRD-1]  = (f_wait && !f_infl) || t_rd_req;
    sc_rd_sreg[NRD-1] = (f_wait && !f_infl) ? f_sreg : t_rd_sreg;
    sc_rd_grp[NRD-1]  = (f_wait && !f_infl) ? f_off >> 2 : t_rd_grp;
    t_rd_gnt    = sc_rd_gnt[NRD-1] && !(f_wait && !f_infl);
    t_rd_rvalid = sc_rd_rvalid[NRD-1] && !f_owner;
  end
  assign f_busy = f_wait;

  // ------------------------------------------------------------------
  // lanes and load queue
  logic    lq_v [NIU+1], lq_r [NIU+1];
  addr_t   lq_a [NIU+1];
  lq_tag_t lq_t [NIU+1];
  logic    ret_valid;
  lq_tag_t ret_tag;
  val_t    ret_data;
  logic    lq_empty;

  for (genvar l = 0; l < NIU; l++) begin : g_lane
    logic rq [2], gn [2], rv [2];
    sreg_t rs [2];
    len_t  rg [2];
    iu_op_e lop;
    always_comb begin
      unique case (dw.op)
        OP_SUB, OP_SUBC: lop = IU_SUB;
        OP_VINTER:       lop = IU_VINTER;
        default:         lop = IU_INTER;
      endcase
    end
    assign lane_start[l] = d_lane_go && d_lane == 2'(l);
    for (genvar s = 0; s < 2; s++) begin : g_p
      assign sc_rd_req[2*l+s]  = rq[s];
      assign sc_rd_sreg[2*l+s] = rs[s];
      assign sc_rd_grp[2*l+s]  = rg[s];
      assign gn[s] = sc_rd_gnt[2*l+s];
      assign rv[s] = sc_rd_rvalid[2*l+s];
    end
    ix_lane #(.LANE(l)) u_lane (
      .clk, .rst_n, .start(lane_start[l]), .op(lop),
      .cnt_only(dw.op inside {OP_INTERC, OP_SUBC}), .vop(dw.imm),
      .sreg_a(dw.a), .sreg_b(dw.b), .sreg_o(dw.o), .len_a(slen[dw.a]), .len_b(slen[dw.b]),
      .bound(dw.op == OP_VINTER ? '1 : dw.bound), .vbase_a(val_addr[dw.a]), .vbase_b(val_addr[dw.b]),
      .rd_req(rq), .rd_sreg(rs), .rd_grp(rg), .rd_gnt(gn), .rd_rvalid(rv), .rd_rdata(sc_rd_rdata),
      .wr_req(sc_wr_req[l]), .wr_sreg(sc_wr_sreg[l]), .wr_grp(sc_wr_grp[l]), .wr_data(sc_wr_data[l]),
      .wr_gnt(sc_wr_gnt[l]),
      .lq_valid(lq_v[l]), .lq_addr(lq_a[l]), .lq_tag(lq_t[l]), .lq_ready(lq_r[l]),
      .ret_valid, .ret_tag, .ret_data,
      .busy(lane_busy[l]), .fin(lane_fin[l]), .result(lane_res[l]), .ack(lane_ack[l]));
  end

  ix_load_queue #(.N(LQ_N), .NSRC(NIU+1)) u_lq (
    .clk, .rst_n, .src_valid(lq_v), .src_addr(lq_a), .src_tag(lq_t), .src_ready(lq_r),
    .mem_req(l1_req), .mem_addr(l1_addr), .mem_id(l1_id), .mem_gnt(l1_gnt),
    .mem_rvalid(l1_rvalid), .mem_rid(l1_rid), .mem_rdata(l1_rdata),
    .ret_valid, .ret_tag, .ret_data, .empty(lq_empty));

  sreg_t t_cur_sreg;
  ix_nest_translator u_nt (
    .clk, .rst_n, .start(t_start), .start_sreg(lk_sreg[0]), .start_sid(lk_sid[0]),
    .cur_sreg(t_cur_sreg), .s_p(p[t_cur_sreg]), .s_len(slen[t_cur_sreg]),
    .csr_index, .csr_edge, .csr_offset,
    .rd_req(t_rd_req), .rd_sreg(t_rd_sreg), .rd_grp(t_rd_grp), .rd_gnt(t_rd_gnt),
    .rd_rvalid(t_rd_rvalid), .rd_rdata(sc_rd_rdata),
    .lq_valid(lq_v[NIU]), .lq_addr(lq_a[NIU]), .lq_tag(lq_t[NIU]), .lq_ready(lq_r[NIU]),
    .ret_valid, .ret_tag, .ret_data,
    .uop_valid(t_uop_valid), .uop(t_uop), .uop_ready(t_uop_ready),
    .cnt_valid(t_cnt_valid), .cnt_val(len_t'(lane_res[c_lane])),
    .busy(t_busy), .front_busy(t_front_busy), .done(t_done), .sum(t_sum));

  ix_smt u_smt (
    .clk, .rst_n, .lk_sid, .lk_hit, .lk_sreg, .free_avail, .free_sreg,
    .def_en, .def_sreg, .def_sid, .def_is_out, .def_pv, .def_pred,
    .undef_en, .undef_sreg, .rel_en, .rel_sreg, .prod_en, .prod_sreg,
    .start_bits, .vd, .va, .p, .s(sbit), .is_out);

  ix_sreg_file u_sregs (
    .clk, .rst_n, .wr_en(sr_we), .wr_idx(sr_idx), .wr_key_addr(sr_kaddr), .wr_val_addr(sr_vaddr),
    .wr_len(sr_len), .wr_max_len(sr_max), .wr_is_kv(sr_kv),
    .len_we, .len_idx, .len_val, .clr_en(rel_en), .clr_idx(rel_sreg),
    .valid(sr_valid), .key_addr, .val_addr, .len(slen), .max_len, .is_kv);

  ix_csr_regs u_csr (
    .clk, .rst_n, .we(csr_we), .index_in(I.r0), .edge_in(I.r1), .offset_in(I.r2),
    .csr_index, .csr_edge, .csr_offset);

  ix_scache u_sc (
    .clk, .rst_n, .key_addr, .len(slen),
    .rd_req(sc_rd_req), .rd_sreg(sc_rd_sreg), .rd_grp(sc_rd_grp), .rd_gnt(sc_rd_gnt),
    .rd_rvalid(sc_rd_rvalid), .rd_rdata(sc_rd_rdata),
    .wr_req(sc_wr_req), .wr_sreg(sc_wr_sreg), .wr_grp(sc_wr_grp), .wr_data(sc_wr_data), .wr_gnt(sc_wr_gnt),
    .pf_req(d_read_go), .pf_sreg(dw.o), .inv_req(def_en), .inv_sreg(tgt),
    .start_bits, .slot_busy,
    .l2_req, .l2_we, .l2_addr, .l2_wdata, .l2_gnt, .l2_rvalid, .l2_rdata);

  // ------------------------------------------------------------------
  // window, fetch unit and result state
  logic [WW-1:0] nest_ent;
  always_comb begin
    nest_ent = '0;
    for (int e = WIN-1; e >= 0; e--)
      if (win[e].v && win[e].op == OP_NEST_END && !win[e].done) nest_ent = WW'(e);
  end

  assign idle = (wcnt == '0) && !t_busy && lq_empty && !t_uop_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < WIN; e++) win[e] <= '0;
      head <= '0; tail <= '0; wcnt <= '0;
      for (int l = 0; l < NIU; l++) lane_ent[l] <= '0;
      f_wait <= 1'b0; f_infl <= 1'b0; f_owner <= 1'b0; f_sreg <= '0; f_off <= '0; f_ent <= '0;
      res_valid <= 1'b0; res_op <= OP_READ; res_value <= '0; res_exc <= 1'b0;
    end else begin
      // new entry
      if (accept && mk_entry) begin
        automatic win_t n = '0;
        n.v = 1'b1; n.op = I.op; n.uop = src_uop; n.exc = exc;
        n.a = lk_sreg[0]; n.b = lk_sreg[1]; n.o = tgt;
        n.bound = key_t'(I.r3); n.off = len_t'(I.r1); n.imm = I.imm;
        n.done = exc || (I.op inside {OP_FREE, OP_CSR});
        if (I.op == OP_FREE) n.a = lk_sreg[0];
        win[tail] <= n;
        tail <= tail + 1'b1;
      end
      // dispatch
      if (d_any) begin
        win[d_idx].disp <= 1'b1;
        if (d_read_go) win[d_idx].done <= 1'b1;
        if (d_lane_go) lane_ent[d_lane] <= d_idx;
        if (d_fetch_go) begin
          f_sreg <= dw.a; f_off <= dw.off; f_ent <= d_idx;
          if (dw.off >= slen[dw.a]) begin
            win[d_idx].done <= 1'b1; win[d_idx].res <= EOS;
          end else f_wait <= 1'b1;
        end
      end
      // fetch unit
      if (sc_rd_gnt[NRD-1]) begin
        f_owner <= f_wait && !f_infl;
        if (f_wait && !f_infl) f_infl <= 1'b1;
      end
      if (sc_rd_rvalid[NRD-1] && f_owner) begin
        f_wait <= 1'b0; f_infl <= 1'b0; f_owner <= 1'b0;
        win[f_ent].done <= 1'b1;
        win[f_ent].res  <= 32'(sc_rd_rdata[f_off[1:0]*KEY_W +: KEY_W]);
      end
      // lane completion
      if (c_any) begin
        win[lane_ent[c_lane]].done <= 1'b1;
        win[lane_ent[c_lane]].res  <= lane_res[c_lane];
      end
      if (t_done) begin
        win[nest_ent].done <= 1'b1;
        win[nest_ent].res  <= t_sum;
      end
      // retire
      res_valid <= retire && (!hw.uop || hw.op == OP_NEST_END);
      res_op    <= (hw.op == OP_NEST_END) ? OP_NESTINTER : hw.op;
      res_value <= hw.res;
      res_exc   <= hw.exc;
      if (retire) begin
        win[head].v <= 1'b0;
        head <= head + 1'b1;
      end
      wcnt <= wcnt + (WW+1)'(accept && mk_entry) - (WW+1)'(retire);
    end
  end

  wire unused_ok = &{1'b0, vd, sbit, sr_valid[0]};
endmodule
