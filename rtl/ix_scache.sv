// ix_scache: Stream Cache (S-Cache).
// Holds the keys of the active streams, one slot of SLOT_KEYS (64) keys per
// stream register, split into two sub-slots of 32 keys used as a double
// buffer.  Chunk c of a stream (keys 32c..32c+31) always lives in sub-slot
// c mod 2, which carries a tag naming the chunk, a dirty bit and a pin.
//
// Reads: NRD ports (two per intersection unit, one shared by S_FETCH and the
// nested translator) ask for a 4-key group of a stream.  Each cycle one port
// whose group is present is granted, round-robin (16 bytes per cycle); its
// data appear one cycle after the grant (rd_rvalid/rd_rdata).
// Writes: one port per IU writes 4-key groups of an output stream into its
// slot; one write is accepted per cycle, round-robin.
// A single fill engine serves misses: it writes back a dirty sub-slot to L2
// when it must be replaced, then fetches the wanted chunk (or, for a write,
// just claims the sub-slot).  Priority: write claims, demand read misses,
// then prefetches - the start of a stream after S_READ (pf_req) and the chunk
// after the one a port is reading.  A demand-filled sub-slot is pinned until
// its port has read it or stopped asking, so progress is guaranteed when
// several ports read one stream at different places.
// L2 port: one 4-word beat per request from any word address, reads answered
// in order.  start_bits tells the SMT whether a slot holds the start of its
// stream; slot_busy marks a slot the engine is working on.
// The slot and sub-slot sizes, the 16-byte bandwidth and round-robin come
// from the architecture; the tag, pin and write-back-on-replace rules are
// this design's own way of realising it.
// Lint lists unused upper bits of integer loop indices (round-robin
// offsets); only their low bits select a port.
module ix_scache
  import ix_pkg::*;
#(
  parameter int N   = NSREG,
  parameter int NRD = 2*NIU + 1,
  parameter int NWR = NIU
) (
  input  logic   clk,
  input  logic   rst_n,
  // stream register contents
  input  addr_t  key_addr [N],
  input  len_t   len      [N],
  // read ports
  input  logic   rd_req  [NRD],
  input  sreg_t  rd_sreg [NRD],
  input  len_t   rd_grp  [NRD],
  output logic   rd_gnt  [NRD],
  output logic   rd_rvalid [NRD],
  output beat_t  rd_rdata,
  // write ports
  input  logic   wr_req  [NWR],
  input  sreg_t  wr_sreg [NWR],
  input  len_t   wr_grp  [NWR],
  input  beat_t  wr_data [NWR],
  output logic   wr_gnt  [NWR],
  // control
  input  logic   pf_req,
  input  sreg_t  pf_sreg,
  input  logic   inv_req,
  input  sreg_t  inv_sreg,
  output logic [N-1:0] start_bits,
  output logic [N-1:0] slot_busy,
  // L2 port
  output logic   l2_req,
  output logic   l2_we,
  output addr_t  l2_addr,
  output beat_t  l2_wdata,
  input  logic   l2_gnt,
  input  logic   l2_rvalid,
  input  beat_t  l2_rdata
);
  localparam int BW  = $clog2(BEATS_PER_SUB);
  localparam int PW  = $clog2(NRD);
  localparam int CW  = LEN_W - $clog2(SUB_KEYS);

  typedef logic [CW-1:0] chunk_t;

  beat_t  data [N*2*BEATS_PER_SUB];
  logic   hv    [N][2];
  chunk_t hch   [N][2];
  logic   hdirty[N][2];
  logic   hpin  [N][2];
  logic [PW-1:0] hpin_port [N][2];
  logic [1:0]    pf_pend   [N];

  function automatic chunk_t chunk_of(len_t grp);
    return chunk_t'(grp >> BW);
  endfunction
  function automatic len_t nchunks(len_t l);
    return (l + len_t'(SUB_KEYS-1)) >> $clog2(SUB_KEYS);
  endfunction

  // ---------------- engine state ----------------
  typedef enum logic [1:0] { E_IDLE, E_WB, E_RD } est_e;
  est_e          est;
  sreg_t         j_sreg;
  logic          j_half;
  chunk_t        j_chunk, j_wbchunk;
  logic          j_read, j_demand;
  logic [PW-1:0] j_port;
  logic [BW:0]   j_beats, b_req, b_rsp;

  // ---------------- read hits and grant ----------------
  logic rd_hit [NRD];
  always_comb
    for (int k = 0; k < NRD; k++) begin
      automatic chunk_t c = chunk_of(rd_grp[k]);
      rd_hit[k] = rd_req[k] && hv[rd_sreg[k]][c[0]] && hch[rd_sreg[k]][c[0]] == c;
    end

  logic [PW-1:0] rr_rd;
  logic          rd_any;
  logic [PW-1:0] rd_sel;
  always_comb begin
    rd_any = 1'b0; rd_sel = '0;
    for (int o = NRD; o >= 1; o--) begin
      automatic int k = (int'(rr_rd) + o) % NRD;
      if (rd_hit[k]) begin rd_any = 1'b1; rd_sel = PW'(k); end
    end
    for (int k = 0; k < NRD; k++) rd_gnt[k] = rd_any && rd_sel == PW'(k);
  end

  // ---------------- write hits and grant ----------------
  localparam int WW = (NWR > 1) ? $clog2(NWR) : 1;
  logic wr_hit [NWR];
  always_comb
    for (int w = 0; w < NWR; w++) begin
      automatic chunk_t c = chunk_of(wr_grp[w]);
      wr_hit[w] = wr_req[w] && hv[wr_sreg[w]][c[0]] && hch[wr_sreg[w]][c[0]] == c;
    end
  logic [WW-1:0] rr_wr;
  logic          wr_any;
  logic [WW-1:0] wr_sel;
  always_comb begin
    wr_any = 1'b0; wr_sel = '0;
    for (int o = NWR; o >= 1; o--) begin
      automatic int w = (int'(rr_wr) + o) % NWR;
      if (wr_hit[w]) begin wr_any = 1'b1; wr_sel = WW'(w); end
    end
    for (int w = 0; w < NWR; w++) wr_gnt[w] = wr_any && wr_sel == WW'(w);
  end

  // ---------------- job selection ----------------
  logic          c_any, c_read, c_demand;
  sreg_t         c_sreg;
  chunk_t        c_chunk;
  logic [PW-1:0] c_port;
  always_comb begin
    c_any = 1'b0; c_read = 1'b0; c_demand = 1'b0; c_sreg = '0; c_chunk = '0; c_port = '0;
    // prefetch of the next chunk of a stream being read
    for (int k = NRD-1; k >= 0; k--) begin
      automatic chunk_t c  = chunk_of(rd_grp[k]) + 1'b1;
      automatic sreg_t  sr = rd_sreg[k];
      if (rd_hit[k] && len_t'(c) < nchunks(len[sr]) && !hpin[sr][c[0]] &&
          !(hv[sr][c[0]] && hch[sr][c[0]] == c)) begin
        c_any = 1'b1; c_read = 1'b1; c_demand = 1'b0; c_sreg = sr; c_chunk = c;
      end
    end
    // prefetch of the start of a newly read stream
    for (int j = N-1; j >= 0; j--)
      for (int h = 1; h >= 0; h--)
        if (pf_pend[j][h] && !hpin[j][h]) begin
          c_any = 1'b1; c_read = 1'b1; c_demand = 1'b0; c_sreg = sreg_t'(j); c_chunk = chunk_t'(h);
        end
    // demand read misses
    for (int k = NRD-1; k >= 0; k--) begin
      automatic chunk_t c  = chunk_of(rd_grp[k]);
      automatic sreg_t  sr = rd_sreg[k];
      if (rd_req[k] && !rd_hit[k] && (!hpin[sr][c[0]] || hpin_port[sr][c[0]] == PW'(k))) begin
        c_any = 1'b1; c_read = 1'b1; c_demand = 1'b1; c_sreg = sr; c_chunk = c; c_port = PW'(k);
      end
    end
    // claims of a sub-slot for output keys
    for (int w = NWR-1; w >= 0; w--) begin
      automatic chunk_t c  = chunk_of(wr_grp[w]);
      automatic sreg_t  sr = wr_sreg[w];
      if (wr_req[w] && !wr_hit[w] && !hpin[sr][c[0]]) begin
        c_any = 1'b1; c_read = 1'b0; c_demand = 1'b0; c_sreg = sr; c_chunk = c;
      end
    end
  end

  // beats of chunk c that lie inside the stream
  function automatic logic [BW:0] beats_in(len_t l, chunk_t c);
    len_t first = len_t'(c) << $clog2(SUB_KEYS);
    len_t rest  = (l > first) ? l - first : '0;
    len_t nb    = (rest + len_t'(BEAT_KEYS-1)) >> $clog2(BEAT_KEYS);
    return (nb >= len_t'(BEATS_PER_SUB)) ? (BW+1)'(BEATS_PER_SUB) : nb[BW:0];
  endfunction

  // ---------------- L2 port ----------------
  always_comb begin
    l2_req   = 1'b0;
    l2_we    = 1'b0;
    l2_addr  = '0;
    l2_wdata = data[{j_sreg, j_half, b_req[BW-1:0]}];
    if (est == E_WB) begin
      l2_req  = 1'b1;
      l2_we   = 1'b1;
      l2_addr = key_addr[j_sreg] + addr_t'(((len_t'(j_wbchunk) << $clog2(SUB_KEYS)) +
                                            (len_t'(b_req) << $clog2(BEAT_KEYS))) << 2);
    end else if (est == E_RD && b_req < j_beats) begin
      l2_req  = 1'b1;
      l2_addr = key_addr[j_sreg] + addr_t'(((len_t'(j_chunk) << $clog2(SUB_KEYS)) +
                                            (len_t'(b_req) << $clog2(BEAT_KEYS))) << 2);
    end
  end

  always_comb
    for (int j = 0; j < N; j++) begin
      start_bits[j] = hv[j][0] && hch[j][0] == '0 &&
                      (len[j] <= len_t'(SUB_KEYS) || (hv[j][1] && hch[j][1] == chunk_t'(1)));
      slot_busy[j]  = (est != E_IDLE) && j_sreg == sreg_t'(j);
    end

  // ---------------- state update ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N; j++) begin
        pf_pend[j] <= '0;
        for (int h = 0; h < 2; h++) begin
          hv[j][h] <= 1'b0; hch[j][h] <= '0; hdirty[j][h] <= 1'b0;
          hpin[j][h] <= 1'b0; hpin_port[j][h] <= '0;
        end
      end
      for (int k = 0; k < NRD; k++) rd_rvalid[k] <= 1'b0;
      rd_rdata <= '0;
      rr_rd <= '0; rr_wr <= '0;
      est <= E_IDLE; j_sreg <= '0; j_half <= 1'b0; j_chunk <= '0; j_wbchunk <= '0;
      j_read <= 1'b0; j_demand <= 1'b0; j_port <= '0; j_beats <= '0; b_req <= '0; b_rsp <= '0;
    end else begin
      // read transfer
      for (int k = 0; k < NRD; k++) rd_rvalid[k] <= rd_gnt[k];
      if (rd_any) begin
        automatic chunk_t c = chunk_of(rd_grp[rd_sel]);
        rd_rdata <= data[{rd_sreg[rd_sel], c[0], rd_grp[rd_sel][BW-1:0]}];
        rr_rd    <= rd_sel;
        if (hpin[rd_sreg[rd_sel]][c[0]] && hpin_port[rd_sreg[rd_sel]][c[0]] == rd_sel)
          hpin[rd_sreg[rd_sel]][c[0]] <= 1'b0;
      end
      // pins of ports that stopped asking
      for (int j = 0; j < N; j++)
        for (int h = 0; h < 2; h++)
          if (hpin[j][h]) begin
            automatic logic [PW-1:0] pk = hpin_port[j][h];
            if (!(rd_req[pk] && rd_sreg[pk] == sreg_t'(j) && chunk_of(rd_grp[pk]) == hch[j][h]))
              hpin[j][h] <= 1'b0;
          end
      // write transfer
      if (wr_any) begin
        automatic chunk_t c = chunk_of(wr_grp[wr_sel]);
        data[{wr_sreg[wr_sel], c[0], wr_grp[wr_sel][BW-1:0]}] <= wr_data[wr_sel];
        hdirty[wr_sreg[wr_sel]][c[0]] <= 1'b1;
        rr_wr <= wr_sel;
      end
      if (pf_req) pf_pend[pf_sreg] <= {len[pf_sreg] > len_t'(SUB_KEYS), len[pf_sreg] != '0};

      // fill engine
      unique case (est)
        E_IDLE: if (c_any) begin
          automatic logic h = c_chunk[0];
          j_sreg <= c_sreg; j_half <= h; j_chunk <= c_chunk; j_wbchunk <= hch[c_sreg][h];
          j_read <= c_read; j_demand <= c_demand; j_port <= c_port;
          j_beats <= beats_in(len[c_sreg], c_chunk);
          b_req <= '0; b_rsp <= '0;
          hv[c_sreg][h] <= 1'b0;
          if (c_chunk < 2) pf_pend[c_sreg][h] <= 1'b0;
          if (hv[c_sreg][h] && hdirty[c_sreg][h]) est <= E_WB;
          else if (c_read) est <= E_RD;
          else begin
            hv[c_sreg][h] <= 1'b1; hch[c_sreg][h] <= c_chunk; hdirty[c_sreg][h] <= 1'b0;
          end
        end
        E_WB: if (l2_gnt) begin
          if (b_req == (BW+1)'(BEATS_PER_SUB-1)) begin
            b_req <= '0;
            hdirty[j_sreg][j_half] <= 1'b0;
            if (j_read) est <= E_RD;
            else begin
              est <= E_IDLE;
              hv[j_sreg][j_half] <= 1'b1; hch[j_sreg][j_half] <= j_chunk;
            end
          end else b_req <= b_req + 1'b1;
        end
        E_RD: begin
          if (l2_req && l2_gnt) b_req <= b_req + 1'b1;
          if (l2_rvalid) begin
            data[{j_sreg, j_half, b_rsp[BW-1:0]}] <= l2_rdata;
            b_rsp <= b_rsp + 1'b1;
          end
          if ((l2_rvalid ? b_rsp + 1'b1 : b_rsp) == j_beats) begin
            est <= E_IDLE;
            hv[j_sreg][j_half] <= 1'b1; hch[j_sreg][j_half] <= j_chunk;
            hdirty[j_sreg][j_half] <= 1'b0;
            hpin[j_sreg][j_half] <= j_demand; hpin_port[j_sreg][j_half] <= j_port;
          end
        end
        default: est <= E_IDLE;
      endcase

      if (inv_req) begin
        pf_pend[inv_sreg] <= '0;
        for (int h = 0; h < 2; h++) begin
          hv[inv_sreg][h] <= 1'b0; hdirty[inv_sreg][h] <= 1'b0; hpin[inv_sreg][h] <= 1'b0;
        end
      end
    end
  end

`ifndef SYNTHESIS
  a_inv_idle: assert property (@(posedge clk) disable iff (!rst_n) inv_req |-> !slot_busy[inv_sreg]);
`endif
endmodule
