// ix_nest_translator: Nested Intersection Translator and translation buffer.
// Implements S_NESTINTER S: C = sum over keys s_i of S of
// count(S intersect N'(s_i)) with every intersection bounded by s_i, where
// N'(s_i) is the part of the neighbour list of s_i below s_i.
// Operation: once S is produced (s_p), the translator reads the keys of S
// through an S-Cache port.  For each key it allocates a translation-buffer
// entry (valid, sid, rdy, start addr, stream len; valid and
// sid are implied by the FIFO position) and sends two loads through the
// load queue: CSR index[s_i] and CSR offset[s_i].  When both have returned
// (rdy), the entry emits three micro-ops to rename, in order:
//   S_READ  edge_list + 4*index[s_i], offset[s_i], sid_i
//   S_INTER.C S, sid_i, -, bound = s_i
//   S_FREE  sid_i
// where sid_i is an internal stream ID (bit 8 set, low bits = entry number).
// Counts of the finished nested S_INTER.C come back on cnt_valid and are
// summed here, in place of separate add micro-ops; after the last entry a
// final micro-op OP_NEST_END is emitted, and `done` pulses with the sum once
// every count has arrived.  front_busy stays high until OP_NEST_END has been
// emitted, so that later instructions enter rename after the micro-ops.
// Entries are used as a FIFO; one entry per nested stream (TB_N = 8) is this
// design's choice, as are the folded additions and the use of offset[s_i]
// as the length of the bounded neighbour list.
// The lane field of ret_tag is unused here: answers for the translation
// buffer are recognised by to_tb alone.
module ix_nest_translator
  import ix_pkg::*;
#(
  parameter int N = TB_N
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  sreg_t   start_sreg,
  input  sid_t    start_sid,
  output sreg_t   cur_sreg,
  input  logic    s_p,
  input  len_t    s_len,
  input  addr_t   csr_index,
  input  addr_t   csr_edge,
  input  addr_t   csr_offset,
  // S-Cache read port for the keys of S
  output logic    rd_req,
  output sreg_t   rd_sreg,
  output len_t    rd_grp,
  input  logic    rd_gnt,
  input  logic    rd_rvalid,
  input  beat_t   rd_rdata,
  // load queue
  output logic    lq_valid,
  output addr_t   lq_addr,
  output lq_tag_t lq_tag,
  input  logic    lq_ready,
  input  logic    ret_valid,
  input  lq_tag_t ret_tag,
  input  val_t    ret_data,
  // micro-ops
  output logic    uop_valid,
  output insn_t   uop,
  input  logic    uop_ready,
  input  logic    cnt_valid,
  input  len_t    cnt_val,
  output logic    busy,
  output logic    front_busy,
  output logic    done,
  output logic [31:0] sum
);
  localparam int W = $clog2(N);
  typedef enum logic [2:0] { T_IDLE, T_WAITS, T_RUN, T_END, T_WAIT } st_e;
  st_e  st;
  sreg_t r_sreg;
  sid_t  r_sid;
  len_t  r_len, ki;
  logic  kphase;                 // 0: index load next, 1: offset load next
  logic  gv, ginfl;
  len_t  gg;
  beat_t gd;
  len_t  n_emit, n_cnt;

  // translation buffer
  logic  rdy0 [N], rdy1 [N];
  addr_t t_start [N];
  len_t  t_len [N];
  key_t  t_bound [N];
  logic [W-1:0] head, tail;
  logic [W:0]   used;
  logic [1:0]   ephase;

  assign cur_sreg   = r_sreg;
  assign busy       = (st != T_IDLE);
  assign front_busy = (st == T_WAITS) || (st == T_RUN) || (st == T_END);

  // keys of S
  len_t cur_g;
  key_t cur_key;
  logic key_here, keys_left;
  always_comb begin
    cur_g     = ki >> 2;
    key_here  = gv && gg == cur_g;
    cur_key   = gd[ki[1:0]*KEY_W +: KEY_W];
    keys_left = ki < r_len;
    rd_sreg   = r_sreg;
    rd_grp    = cur_g;
    rd_req    = (st == T_RUN) && keys_left && !key_here && !ginfl;
  end

  // loads of stream information
  always_comb begin
    lq_valid   = (st == T_RUN) && keys_left && key_here && (kphase || used != (W+1)'(N));
    lq_addr    = kphase ? csr_offset + addr_t'(cur_key << 2) : csr_index + addr_t'(cur_key << 2);
    lq_tag     = '0;
    lq_tag.to_tb = 1'b1;
    lq_tag.idx   = 4'(kphase ? tail - 1'b1 : tail);
    lq_tag.which = kphase;
  end

  // micro-op emission from the head entry
  sid_t hsid;
  always_comb begin
    hsid      = {1'b1, (SID_W-1)'(head)};
    uop       = '0;
    uop_valid = 1'b0;
    if ((st == T_RUN || st == T_END) && used != '0 && rdy0[head] && rdy1[head]) begin
      uop_valid = 1'b1;
      unique case (ephase)
        2'd0: begin uop.op = OP_READ;   uop.r0 = t_start[head]; uop.r1 = t_len[head]; uop.r2 = 32'(hsid); end
        2'd1: begin uop.op = OP_INTERC; uop.r0 = 32'(r_sid); uop.r1 = 32'(hsid); uop.r3 = t_bound[head]; end
        default: begin uop.op = OP_FREE; uop.r0 = 32'(hsid); end
      endcase
    end else if (st == T_END && used == '0) begin
      uop_valid = 1'b1;
      uop.op    = OP_NEST_END;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; r_sreg <= '0; r_sid <= '0; r_len <= '0; ki <= '0; kphase <= 1'b0;
      gv <= 1'b0; ginfl <= 1'b0; gg <= '0; gd <= '0; n_emit <= '0; n_cnt <= '0;
      head <= '0; tail <= '0; used <= '0; ephase <= '0; done <= 1'b0; sum <= '0;
      for (int i = 0; i < N; i++) begin
        rdy0[i] <= 1'b0; rdy1[i] <= 1'b0; t_start[i] <= '0; t_len[i] <= '0; t_bound[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (rd_gnt) ginfl <= 1'b1;
      if (rd_rvalid) begin ginfl <= 1'b0; gv <= 1'b1; gg <= cur_g; gd <= rd_rdata; end
      if (ret_valid && ret_tag.to_tb) begin
        if (ret_tag.which) begin t_len[W'(ret_tag.idx)] <= len_t'(ret_data); rdy1[W'(ret_tag.idx)] <= 1'b1; end
        else begin t_start[W'(ret_tag.idx)] <= csr_edge + addr_t'(ret_data << 2); rdy0[W'(ret_tag.idx)] <= 1'b1; end
      end
      if (cnt_valid) begin n_cnt <= n_cnt + 1'b1; sum <= sum + 32'(cnt_val); end

      // allocate entries / advance through the keys of S
      if (lq_valid && lq_ready) begin
        if (!kphase) begin
          rdy0[tail] <= 1'b0; rdy1[tail] <= 1'b0; t_bound[tail] <= cur_key;
          tail <= tail + 1'b1;
          kphase <= 1'b1;
        end else begin
          kphase <= 1'b0;
          ki <= ki + 1'b1;
        end
      end
      // emit micro-ops
      if (uop_valid && uop_ready && uop.op != OP_NEST_END) begin
        if (ephase == 2'd1) n_emit <= n_emit + 1'b1;
        if (ephase == 2'd2) begin
          ephase <= '0; rdy0[head] <= 1'b0; rdy1[head] <= 1'b0; head <= head + 1'b1;
        end else ephase <= ephase + 1'b1;
      end
      used <= used + (W+1)'(lq_valid && lq_ready && !kphase)
                   - (W+1)'(uop_valid && uop_ready && uop.op != OP_NEST_END && ephase == 2'd2);

      unique case (st)
        T_IDLE: if (start) begin
          st <= T_WAITS; r_sreg <= start_sreg; r_sid <= start_sid;
          ki <= '0; kphase <= 1'b0; gv <= 1'b0; n_emit <= '0; n_cnt <= '0; sum <= '0;
        end
        T_WAITS: if (s_p) begin st <= T_RUN; r_len <= s_len; end
        T_RUN:   if (!keys_left && !ginfl) st <= T_END;
        T_END:   if (uop_valid && uop_ready && uop.op == OP_NEST_END) st <= T_WAIT;
        T_WAIT:  if (n_cnt == n_emit && !cnt_valid) begin st <= T_IDLE; done <= 1'b1; end
        default: st <= T_IDLE;
      endcase
    end
  end
endmodule
