// ix_sreg_file: stream registers.
// One register per stream: valid bit, start key address, start value
// address and stream length, as the architecture lists them, plus two
// fields this design adds: is_kv (defined by S_VREAD) and max_len, the
// longest the stream can become, used for the conservative overlap check
// between an S_READ region and a not-yet-produced output stream.
// Registers cannot be read by instructions; they are written when a stream
// is defined (wr_*), the length of an output stream is set when it has been
// produced (len_*), and valid is cleared when S_FREE retires (clr_*).
// All fields are visible as arrays; writes take effect on the next edge.
module ix_sreg_file
  import ix_pkg::*;
#(
  parameter int N = NSREG
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   wr_en,
  input  sreg_t  wr_idx,
  input  addr_t  wr_key_addr,
  input  addr_t  wr_val_addr,
  input  len_t   wr_len,
  input  len_t   wr_max_len,
  input  logic   wr_is_kv,
  input  logic   len_we,
  input  sreg_t  len_idx,
  input  len_t   len_val,
  input  logic   clr_en,
  input  sreg_t  clr_idx,
  output logic   valid    [N],
  output addr_t  key_addr [N],
  output addr_t  val_addr [N],
  output len_t   len      [N],
  output len_t   max_len  [N],
  output logic   is_kv    [N]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N; j++) begin
        valid[j] <= 1'b0; key_addr[j] <= '0; val_addr[j] <= '0;
        len[j] <= '0; max_len[j] <= '0; is_kv[j] <= 1'b0;
      end
    end else begin
      if (clr_en) valid[clr_idx] <= 1'b0;
      if (len_we) len[len_idx] <= len_val;
      if (wr_en) begin
        valid[wr_idx]    <= 1'b1;
        key_addr[wr_idx] <= wr_key_addr;
        val_addr[wr_idx] <= wr_val_addr;
        len[wr_idx]      <= wr_len;
        max_len[wr_idx]  <= wr_max_len;
        is_kv[wr_idx]    <= wr_is_kv;
      end
    end
  end
endmodule
