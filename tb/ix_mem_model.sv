// ix_mem_model: behavioural memory for simulation only (not synthesizable
// intent).  It stands in for the L2 cache seen by the S-Cache and the L1
// data cache seen by the load queue, both backed by one word array `mem`
// that the testbench fills directly.
// L2 port: a request is accepted when l2_gnt is high (random back-pressure);
// a read returns 4 consecutive words from any word address after L2_LAT
// cycles, in order; a write stores 4 words.
// L1 port: one word per request, answered after L1_LAT cycles plus a random
// 0..3, so answers may come back out of order.
module ix_mem_model
  import ix_pkg::*;
#(
  parameter int WORDS  = 1 << 20,
  parameter int L2_LAT = 10,
  parameter int L1_LAT = 4,
  parameter int ID_W   = 5
) (
  input  logic   clk,
  input  logic   l2_req,
  input  logic   l2_we,
  input  addr_t  l2_addr,
  input  beat_t  l2_wdata,
  output logic   l2_gnt,
  output logic   l2_rvalid,
  output beat_t  l2_rdata,
  input  logic   l1_req,
  input  addr_t  l1_addr,
  input  logic [ID_W-1:0] l1_id,
  output logic   l1_gnt,
  output logic   l1_rvalid,
  output logic [ID_W-1:0] l1_rid,
  output val_t   l1_rdata,
  output int     l2_writes
);
  logic [31:0] mem [WORDS];
  int unsigned cyc = 0;
  typedef struct { int unsigned due; beat_t d; } l2r_t;
  typedef struct { int unsigned due; logic [ID_W-1:0] id; val_t d; } l1r_t;
  l2r_t l2q [$];
  l1r_t l1q [$];
  initial begin
    // no grant until the first negative edge: requests from not yet reset
    // logic are ignored
    l2_gnt = 1'b0; l1_gnt = 1'b0; l2_rvalid = 1'b0; l1_rvalid = 1'b0;
    l2_writes = 0;
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
  end

  function automatic logic [31:0] rd(addr_t a);
    return mem[(a >> 2) % WORDS];
  endfunction

  always @(negedge clk) begin
    l2_gnt = ($urandom_range(0, 7) != 0);
    l1_gnt = ($urandom_range(0, 7) != 0);
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    l2_rvalid <= 1'b0;
    l1_rvalid <= 1'b0;
    if (l2_req && l2_gnt) begin
      if (l2_we) begin
        for (int i = 0; i < BEAT_KEYS; i++) mem[((l2_addr >> 2) + i) % WORDS] = l2_wdata[i*32 +: 32];
        l2_writes = l2_writes + 1;
      end else begin
        automatic l2r_t r;
        r.due = cyc + L2_LAT;
        for (int i = 0; i < BEAT_KEYS; i++) r.d[i*32 +: 32] = rd(l2_addr + addr_t'(4*i));
        l2q.push_back(r);
      end
    end
    if (l2q.size() > 0 && l2q[0].due <= cyc) begin
      l2_rvalid <= 1'b1;
      l2_rdata  <= l2q[0].d;
      void'(l2q.pop_front());
    end
    if (l1_req && l1_gnt) begin
      automatic l1r_t r;
      r.due = cyc + L1_LAT + $urandom_range(0, 3);
      r.id  = l1_id;
      r.d   = rd(l1_addr);
      l1q.push_back(r);
    end
    for (int i = 0; i < l1q.size(); i++)
      if (l1q[i].due <= cyc) begin
        l1_rvalid <= 1'b1;
        l1_rid    <= l1q[i].id;
        l1_rdata  <= l1q[i].d;
        l1q.delete(i);
        break;
      end
  end
endmodule
