// ix_pkg: types and constants shared by the stream unit.
// Sizes that the architecture fixes (16 stream registers, 64-key S-Cache
// slots split into two 32-key sub-slots, 4-key transfers, 4 intersection
// units, 32-entry load queue) follow the published configuration.  Widths
// of addresses, values and stream IDs, the opcode and operation encodings
// and the load-queue tag layout are this design's own choices.
package ix_pkg;
  localparam int KEY_W     = 32;            // 256-byte slot / 64 keys
  localparam int ADDR_W    = 32;
  localparam int VAL_W     = 32;
  localparam int LEN_W     = 32;
  localparam int SID_W     = 9;             // bit 8 set: ID made by the nested translator
  localparam int NSREG     = 16;
  localparam int SREG_W    = $clog2(NSREG);
  localparam int SLOT_KEYS = 64;
  localparam int SUB_KEYS  = 32;
  localparam int BEAT_KEYS = 4;
  localparam int BEAT_W    = BEAT_KEYS * KEY_W;
  localparam int BEATS_PER_SUB = SUB_KEYS / BEAT_KEYS;   // 8
  localparam int NIU       = 4;
  localparam int VB_N      = 8;
  localparam int VB_W      = $clog2(VB_N);
  localparam int TB_N      = 8;
  localparam int TB_W      = $clog2(TB_N);
  localparam logic [KEY_W-1:0] EOS = '1;    // End Of Stream value of S_FETCH

  typedef logic [KEY_W-1:0]  key_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [VAL_W-1:0]  val_t;
  typedef logic [LEN_W-1:0]  len_t;
  typedef logic [SID_W-1:0]  sid_t;
  typedef logic [SREG_W-1:0] sreg_t;
  typedef logic [BEAT_W-1:0] beat_t;

  // Stream ISA (Table 1) plus two internal micro-ops of S_NESTINTER.
  typedef enum logic [3:0] {
    OP_READ, OP_VREAD, OP_FREE, OP_FETCH, OP_SUB, OP_SUBC, OP_INTER, OP_INTERC,
    OP_VINTER, OP_CSR, OP_NESTINTER, OP_NEST_END
  } op_e;

  // S_VINTER immediate: value operation of the SVPU.
  typedef enum logic [1:0] { VOP_MAC = 2'd0, VOP_MAX = 2'd1, VOP_MIN = 2'd2 } vop_e;

  // Decoded stream instruction with the values of its register operands.
  typedef struct packed {
    op_e         op;
    logic [31:0] r0;
    logic [31:0] r1;
    logic [31:0] r2;
    logic [31:0] r3;
    vop_e        imm;
  } insn_t;

  // Kind of work an intersection unit performs.
  typedef enum logic [1:0] { IU_INTER, IU_SUB, IU_VINTER } iu_op_e;

  // Destination of a load returned through the load queue.
  typedef struct packed {
    logic            to_tb;     // 1: translation buffer, 0: vBuf
    logic [1:0]      lane;      // vBuf of this IU lane
    logic [3:0]      idx;       // vBuf or translation-buffer entry
    logic            which;     // val0/val1, or index/offset word
  } lq_tag_t;
endpackage
