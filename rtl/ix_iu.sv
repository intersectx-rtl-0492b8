// ix_iu: Intersection Unit.
// Merges two ascending key streams A and B that it reads from the S-Cache in
// 4-key groups, and computes A intersect B (S_INTER, S_INTER.C, the key part
// of S_VINTER) or A minus B (S_SUB, S_SUB.C).  One key comparison is made
// per cycle, like the scalar merge loop it replaces; each input keeps a
// two-group look-ahead buffer so that transfers overlap with comparisons.
// Only result keys below `bound` are produced; the unit stops as soon as no
// further result can be below it (bound = all ones means unbounded).
// Results: IU_INTER/IU_SUB without cnt_only write the result keys, packed in
// groups of 4, to the slot of output stream sreg_o; IU_VINTER hands each
// matched pair of positions (m_ia, m_ib) to the value address generator
// (valid/ready); count is the number of result keys.  `done` pulses one
// cycle after the last result has left the unit.
// Computation, bound and the 4-key transfer follow the architecture; the
// look-ahead buffers and the handshakes are this design's choices.
module ix_iu
  import ix_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  iu_op_e op,
  input  logic   cnt_only,
  input  sreg_t  sreg_a,
  input  sreg_t  sreg_b,
  input  sreg_t  sreg_o,
  input  len_t   len_a,
  input  len_t   len_b,
  input  key_t   bound,
  // S-Cache read ports for A and B, shared read data bus
  output logic   rd_req   [2],
  output sreg_t  rd_sreg  [2],
  output len_t   rd_grp   [2],
  input  logic   rd_gnt   [2],
  input  logic   rd_rvalid[2],
  input  beat_t  rd_rdata,
  // S-Cache write port
  output logic   wr_req,
  output sreg_t  wr_sreg,
  output len_t   wr_grp,
  output beat_t  wr_data,
  input  logic   wr_gnt,
  // matched positions for S_VINTER
  output logic   m_valid,
  output len_t   m_ia,
  output len_t   m_ib,
  input  logic   m_ready,
  output logic   busy,
  output logic   done,
  output len_t   count
);
  typedef enum logic [1:0] { S_IDLE, S_RUN, S_FLUSH } st_e;
  st_e    st;
  iu_op_e r_op;
  logic   r_cnt;
  sreg_t  r_sreg [2];
  sreg_t  r_sreg_o;
  len_t   r_len  [2];
  key_t   r_bound;
  len_t   pos    [2];

  logic   bv  [2][2];
  len_t   bg  [2][2];
  beat_t  bd  [2][2];
  logic   infl[2];
  len_t   infl_g[2];

  key_t   obuf [BEAT_KEYS];
  logic [2:0] ocnt;
  len_t   ogrp;
  logic   wr_pend;

  // ---------- input side ----------
  logic   avail [2];
  key_t   key   [2];
  always_comb
    for (int s = 0; s < 2; s++) begin
      automatic len_t g  = pos[s] >> 2;
      automatic len_t g1 = g + 1'b1;
      avail[s] = bv[s][g[0]] && bg[s][g[0]] == g;
      key[s]   = bd[s][g[0]][pos[s][1:0]*KEY_W +: KEY_W];
      rd_sreg[s] = r_sreg[s];
      rd_req[s]  = 1'b0;
      rd_grp[s]  = g;
      if (st == S_RUN && !infl[s] && pos[s] < r_len[s]) begin
        if (!avail[s]) begin
          rd_req[s] = 1'b1;
        end else if ((g1 << 2) < r_len[s] && !(bv[s][g1[0]] && bg[s][g1[0]] == g1)) begin
          rd_req[s] = 1'b1; rd_grp[s] = g1;
        end
      end
    end

  // ---------- merge step ----------
  logic a_ok, b_ok, finish, adv_a, adv_b, emit, stall;
  always_comb begin
    a_ok = pos[0] < r_len[0];
    b_ok = pos[1] < r_len[1];
    finish = 1'b0; adv_a = 1'b0; adv_b = 1'b0; emit = 1'b0; stall = 1'b0;
    if (st == S_RUN) begin
      if (r_op == IU_SUB) begin
        if (!a_ok) finish = 1'b1;
        else if (!avail[0]) stall = 1'b1;
        else if (key[0] >= r_bound) finish = 1'b1;
        else if (!b_ok) begin emit = 1'b1; adv_a = 1'b1; end
        else if (!avail[1]) stall = 1'b1;
        else if (key[0] == key[1]) begin adv_a = 1'b1; adv_b = 1'b1; end
        else if (key[0] <  key[1]) begin emit = 1'b1; adv_a = 1'b1; end
        else adv_b = 1'b1;
      end else begin
        if (!a_ok || !b_ok) finish = 1'b1;
        else if (!avail[0] || !avail[1]) stall = 1'b1;
        else if (key[0] >= r_bound || key[1] >= r_bound) finish = 1'b1;
        else if (key[0] == key[1]) begin emit = 1'b1; adv_a = 1'b1; adv_b = 1'b1; end
        else if (key[0] <  key[1]) adv_a = 1'b1;
        else adv_b = 1'b1;
      end
      // output side full: hold the step
      if (emit && ((r_op == IU_VINTER && m_valid && !m_ready) ||
                   (r_op != IU_VINTER && !r_cnt && wr_pend))) begin
        stall = 1'b1; emit = 1'b0; adv_a = 1'b0; adv_b = 1'b0;
      end
      if (stall) finish = 1'b0;
    end
  end

  assign wr_req  = wr_pend;
  assign wr_sreg = r_sreg_o;
  assign wr_grp  = ogrp;
  always_comb
    for (int i = 0; i < BEAT_KEYS; i++) wr_data[i*KEY_W +: KEY_W] = obuf[i];
  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; r_op <= IU_INTER; r_cnt <= 1'b0; r_sreg_o <= '0; r_bound <= '0;
      for (int s = 0; s < 2; s++) begin
        r_sreg[s] <= '0; r_len[s] <= '0; pos[s] <= '0; infl[s] <= 1'b0; infl_g[s] <= '0;
        for (int h = 0; h < 2; h++) begin bv[s][h] <= 1'b0; bg[s][h] <= '0; bd[s][h] <= '0; end
      end
      for (int i = 0; i < BEAT_KEYS; i++) obuf[i] <= '0;
      ocnt <= '0; ogrp <= '0; wr_pend <= 1'b0;
      m_valid <= 1'b0; m_ia <= '0; m_ib <= '0; done <= 1'b0; count <= '0;
    end else begin
      done <= 1'b0;
      // transfers from the S-Cache
      for (int s = 0; s < 2; s++) begin
        if (rd_gnt[s]) begin infl[s] <= 1'b1; infl_g[s] <= rd_grp[s]; end
        if (rd_rvalid[s]) begin
          infl[s] <= 1'b0;
          bv[s][infl_g[s][0]] <= 1'b1;
          bg[s][infl_g[s][0]] <= infl_g[s];
          bd[s][infl_g[s][0]] <= rd_rdata;
        end
      end
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (wr_pend && wr_gnt) begin
        wr_pend <= 1'b0; ogrp <= ogrp + 1'b1; ocnt <= '0;
      end
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_RUN; r_op <= op; r_cnt <= cnt_only;
          r_sreg[0] <= sreg_a; r_sreg[1] <= sreg_b; r_sreg_o <= sreg_o;
          r_len[0] <= len_a; r_len[1] <= len_b; r_bound <= bound;
          pos[0] <= '0; pos[1] <= '0; count <= '0; ocnt <= '0; ogrp <= '0;
          for (int s = 0; s < 2; s++) for (int h = 0; h < 2; h++) bv[s][h] <= 1'b0;
        end
        S_RUN: begin
          if (adv_a) pos[0] <= pos[0] + 1'b1;
          if (adv_b) pos[1] <= pos[1] + 1'b1;
          if (emit) begin
            count <= count + 1'b1;
            if (r_op == IU_VINTER) begin
              m_valid <= 1'b1; m_ia <= pos[0]; m_ib <= pos[1];
            end else if (!r_cnt) begin
              obuf[ocnt[1:0]] <= key[0];
              ocnt <= ocnt + 1'b1;
              if (ocnt == 3'(BEAT_KEYS-1)) wr_pend <= 1'b1;
            end
          end
          if (finish) st <= S_FLUSH;
        end
        S_FLUSH: begin
          // last partial group of output keys, then wait for the outputs
          if (!wr_pend && ocnt != '0 && !r_cnt && r_op != IU_VINTER) wr_pend <= 1'b1;
          else if (!wr_pend && !infl[0] && !infl[1] && !(m_valid && !m_ready) &&
                   (ocnt == '0 || r_cnt || r_op == IU_VINTER)) begin
            st <= S_IDLE; done <= 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
